// selector_ensemble: the per-PE "selector" made of NUM_SM selector modules.
//
// Each SM-i is a different approximate function, fitted for a different set of
// first-to-fail transistors. Which one a PE should follow depends on how that
// PE's own transistors came out of fabrication, which is found by test; that
// choice arrives here as the static sm_sel value, and only the chosen SM's
// decision leaves the block. Codes sm_sel >= NUM_SM select no SM: the PE then
// never transforms (this design's use of the spare code). Combinational.
module selector_ensemble
  import sa_pkg::*;
#(
  parameter int unsigned W      = OP_W,
  parameter int unsigned K      = SM_K,
  parameter int unsigned NSM    = NUM_SM,
  parameter int unsigned SEL_W  = SM_SEL_W,
  parameter logic [K-1:0][$clog2(2*W)-1:0] BITS  [NSM] = SM_BITS_DEFAULT,
  parameter logic [(1<<K)-1:0]             TRUTH [NSM] = SM_TRUTH_DEFAULT
) (
  input  logic [W-1:0]     x,
  input  logic [W-1:0]     w,
  input  logic [SEL_W-1:0] sm_sel,
  output logic             apply_2c
);
  logic [NSM-1:0] sm_out;

  for (genvar s = 0; s < int'(NSM); s++) begin : g_sm
    selector_module #(
      .W(W), .K(K), .BIT_IDX(BITS[s]), .TRUTH(TRUTH[s])
    ) u_sm (
      .x(x), .w(w), .apply_2c(sm_out[s])
    );
  end

  always_comb begin
    apply_2c = 1'b0;
    for (int s = 0; s < int'(NSM); s++)
      if (int'(sm_sel) == s) apply_2c = sm_out[s];
  end
endmodule
