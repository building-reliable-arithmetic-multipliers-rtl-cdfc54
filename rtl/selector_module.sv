// selector_module: one selector module (SM), a small Boolean function f(X, W).
//
// The SM approximates the offline stress oracle that says whether multiplying
// (-X) x (-W) instead of X x W lowers the stress on the multiplier's
// first-to-fail transistors. It reads K chosen bits of the two operands
// (BIT_IDX: position p < W is X[p], otherwise W[p-W]) and looks the K-bit
// pattern up in the constant truth table TRUTH. Because both are parameters,
// synthesis turns the lookup into a handful of gates, as intended for an SM.
// The K = 4 inputs follow the 8-bit array-multiplier result; which bits and
// which function are left to the offline fit (defaults in sa_pkg are
// placeholders). Combinational, evaluated in the same cycle as the multiply.
module selector_module
  import sa_pkg::*;
#(
  parameter int unsigned W = OP_W,
  parameter int unsigned K = SM_K,
  parameter logic [K-1:0][$clog2(2*W)-1:0] BIT_IDX = SM1_BITS,
  parameter logic [(1<<K)-1:0]             TRUTH   = SM1_TRUTH
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] w,
  output logic         apply_2c
);
  logic [2*W-1:0] bits;
  logic [K-1:0]   pattern;

  always_comb begin
    bits = {w, x};
    for (int n = 0; n < int'(K); n++) pattern[n] = bits[BIT_IDX[n]];
    apply_2c = TRUTH[pattern];
  end
endmodule
