// twos_complement_unit: the "2C" box at the start of every row and column.
//
// It computes -I = ~I + 1 once per row/column so that both I and -I can be
// broadcast through the array and each PE only has to pick one of them.
// min_neg flags I = -2^(W-1): its negation wraps to itself in W bits, so the
// sign-invariance (-A)x(-B) = AxB does not hold for it and the PE must not
// transform. The flag is this design's addition; the edge negation follows the
// architecture. Purely combinational.
module twos_complement_unit #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] i,
  output logic [W-1:0] neg,
  output logic         min_neg
);
  always_comb begin
    neg     = ~i + W'(1);
    min_neg = (i == {1'b1, {(W-1){1'b0}}});
  end
endmodule
