// processing_element: one output-stationary MAC PE with an aging-aware selector.
//
// Each cycle the PE registers the operand bundle arriving from the west
// (X, -X) and from the north (W, -W) and forwards the registered copies east
// and south, so the 2's complement is computed only once per row and column.
// The selector ensemble looks at the registered X and W and decides whether
// this product should be formed as (-X) x (-W) instead of X x W; a mux feeds
// the chosen pair to the array multiplier, and the product is added to the
// running sum. The result is the same either way; what changes is which
// transistors of the multiplier are stressed.
//
// Interface and timing:
//   x_in / w_in   operand bundles, registered on the rising clock edge
//   x_out / w_out the registered bundles (one cycle per PE hop)
//   acc           running sum; it adds the product of the registered pair on
//                 the edge after the pair was registered, when both are valid.
//                 acc_clr clears it instead (synchronous, has priority).
//   cfg_*         the PE's SM choice, a SM_SEL_W-bit register loaded through a
//                 shift chain (cfg_in -> register -> cfg_out) while cfg_shift.
// The register/mux/multiplier/adder arrangement follows the architecture; the
// valid bits, the clear, the configuration chain, the accumulator width and the
// refusal to transform the most negative value are this design's choices.
module processing_element
  import sa_pkg::*;
#(
  parameter int unsigned ACC_BITS = ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  operand_t            x_in,
  input  operand_t            w_in,
  output operand_t            x_out,
  output operand_t            w_out,
  input  logic                acc_clr,
  input  logic                cfg_shift,
  input  logic [SM_SEL_W-1:0] cfg_in,
  output logic [SM_SEL_W-1:0] cfg_out,
  output logic [ACC_BITS-1:0] acc
);
  // Kept as one shared module rather than copied into the array, so that the
  // array's netlist grows by an instance, not by a PE's logic, per PE.
  /* verilator no_inline_module */
  localparam int unsigned W = OP_W;

  operand_t            x_q, w_q;
  logic [SM_SEL_W-1:0] cfg_q;
  logic                sm_apply, use_neg, mac_en;
  logic [W-1:0]        mul_a, mul_b;
  logic [2*W-1:0]      prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      w_q   <= '0;
      cfg_q <= '0;
    end else begin
      x_q <= x_in;
      w_q <= w_in;
      if (cfg_shift) cfg_q <= cfg_in;
    end
  end

  selector_ensemble u_sel (
    .x       (x_q.val),
    .w       (w_q.val),
    .sm_sel  (cfg_q),
    .apply_2c(sm_apply)
  );

  always_comb begin
    mac_en  = x_q.valid & w_q.valid;
    use_neg = sm_apply & ~x_q.is_min & ~w_q.is_min;
    mul_a   = use_neg ? x_q.neg : x_q.val;
    mul_b   = use_neg ? w_q.neg : w_q.val;
  end

  array_multiplier #(.W(W)) u_mul (.a(mul_a), .b(mul_b), .p(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (acc_clr)  acc <= '0;
    else if (mac_en)   acc <= acc + ACC_BITS'(signed'(prod));
  end

  assign x_out   = x_q;
  assign w_out   = w_q;
  assign cfg_out = cfg_q;

  // The bundles must carry a consistent negation (valid is cleared by reset).
  a_x_neg: assert property (@(posedge clk) x_q.valid |-> (x_q.neg == W'(-x_q.val)));
  a_w_neg: assert property (@(posedge clk) w_q.valid |-> (w_q.neg == W'(-w_q.val)));
endmodule
