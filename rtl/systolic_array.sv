// systolic_array: ROWS x COLS output-stationary systolic array whose PEs
// balance NBTI stress in their multipliers by selective 2's complement.
//
// Row r receives the operand stream X_r at its west edge and column c the
// stream W_c at its north edge. A 2's complement unit at each edge computes
// -X_r and -W_c once; the bundle {I, -I, min flag, valid} then hops one PE per
// cycle east along the row (X) or south down the column (W). PE (r,c) keeps
// the running sum of X_r x W_c products and, per product, lets its selector
// ensemble choose between X x W and (-X) x (-W).
//
// Timing: for C = X * W (X is ROWS x K, W is K x COLS) present X[r][k] on
// x_in[r] in cycle t0 + k + r and W[k][c] on w_in[c] in cycle t0 + k + c, with
// the valid bits set; the matching pair meets in PE (r,c) and acc[r][c] holds
// C[r][c] from cycle t0 + K + r + c + 1 on. Skewing the inputs is left to the
// feeder. acc_clr clears every running sum.
// Configuration: while cfg_shift is high, each column's SM-select chain moves
// one PE down per cycle; after ROWS shifts PE (r,c) holds the value that was
// on cfg_in[c] ROWS-1-r shifts earlier.
// The grid, the edge 2C units and the per-PE selectors follow the
// architecture; the skew convention, parallel readout of all running sums and
// the configuration chain are this design's choices.
module systolic_array
  import sa_pkg::*;
#(
  parameter int unsigned ROWS     = 128,
  parameter int unsigned COLS     = 128,
  parameter int unsigned ACC_BITS = ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [OP_W-1:0]     x_in     [ROWS],
  input  logic                x_valid  [ROWS],
  input  logic [OP_W-1:0]     w_in     [COLS],
  input  logic                w_valid  [COLS],
  input  logic                acc_clr,
  input  logic                cfg_shift,
  input  logic [SM_SEL_W-1:0] cfg_in   [COLS],
  output logic [ACC_BITS-1:0] acc      [ROWS][COLS]
);
  // h[r][c] enters PE (r,c) from the west; v[r][c] enters it from the north.
  operand_t            h   [ROWS][COLS+1];
  operand_t            v   [ROWS+1][COLS];
  logic [SM_SEL_W-1:0] cfg [ROWS+1][COLS];

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row_2c
    twos_complement_unit #(.W(OP_W)) u_2c (
      .i(x_in[r]), .neg(h[r][0].neg), .min_neg(h[r][0].is_min)
    );
    assign h[r][0].val   = x_in[r];
    assign h[r][0].valid = x_valid[r];
  end

  for (genvar c = 0; c < int'(COLS); c++) begin : g_col_2c
    twos_complement_unit #(.W(OP_W)) u_2c (
      .i(w_in[c]), .neg(v[0][c].neg), .min_neg(v[0][c].is_min)
    );
    assign v[0][c].val   = w_in[c];
    assign v[0][c].valid = w_valid[c];
    assign cfg[0][c]     = cfg_in[c];
  end

  for (genvar r = 0; r < int'(ROWS); r++) begin : g_row
    for (genvar c = 0; c < int'(COLS); c++) begin : g_col
      processing_element #(.ACC_BITS(ACC_BITS)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .x_in     (h[r][c]),
        .w_in     (v[r][c]),
        .x_out    (h[r][c+1]),
        .w_out    (v[r+1][c]),
        .acc_clr  (acc_clr),
        .cfg_shift(cfg_shift),
        .cfg_in   (cfg[r][c]),
        .cfg_out  (cfg[r+1][c]),
        .acc      (acc[r][c])
      );
    end
  end
endmodule
