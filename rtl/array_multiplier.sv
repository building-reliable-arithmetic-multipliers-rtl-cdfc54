// array_multiplier: signed W x W array multiplier made of full-adder cells.
//
// This is the multiplier whose PMOS stress the selective 2's complement
// transformation redistributes, so it is written as an explicit grid of
// full-adder (FA) cells rather than a '*' operator: which cell sees which
// input pattern is what the method acts on. Signed operands use the modified
// Baugh-Wooley form:
//   pp[j][i] = a[i] & b[j], inverted when exactly one of i, j is W-1,
//   plus constant ones at weights W and 2W-1.
// Row 0 is the bare partial products of b[0]. Rows j = 1..W-1 are carry-save
// rows of W FA cells each, W*(W-1) cells in all; cell (j,i) adds pp[j][i],
// the sum of cell (j-1,i+1) (same weight) and the carry of cell (j-1,i).
// Product bit j leaves row j at its cell 0. A ripple-carry row then merges the
// last row's sums and carries, with carry-in 1 supplying the constant at
// weight W; the constant at weight 2W-1 inverts the top product bit, and the
// carry out of the top is dropped (the product is taken mod 2^2W).
// Each carry-save row is written as W-bit vector equations: bit i of the
// sum/majority expressions is exactly FA cell (j,i). Writing a row as one word
// rather than W separate cells keeps the netlist of a large array of PEs small
// for the tools without changing the circuit. Purely combinational.
// The FA grid follows the architecture; the signed (Baugh-Wooley) arrangement
// is this design's choice.
module array_multiplier #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [2*W-1:0] p
);
  // Baugh-Wooley inversion masks: row j < W-1 inverts its top cell (i = W-1),
  // row W-1 inverts all cells except the top one.
  localparam logic [W-1:0] MASK_LOW  = {1'b1, {(W-1){1'b0}}};
  localparam logic [W-1:0] MASK_LAST = {1'b0, {(W-1){1'b1}}};

  logic [W-1:0] pp  [W];   // pp[j][i]: partial product of a[i] and b[j]
  logic [W-1:0] sum [W];   // sum[j][i]: sum out of cell (j,i)
  logic [W-1:0] cry [W];   // cry[j][i]: carry out of cell (j,i)
  logic [W-1:0] up  [W];   // up[j][i] = sum[j-1][i+1]: the same-weight input of cell (j,i)
  logic [W-1:0] ra, rb, rs;
  logic [W:0]   rc;        // ripple-row carries

  for (genvar j = 0; j < int'(W); j++) begin : g_pp
    assign pp[j] = (a & {W{b[j]}}) ^ ((j == int'(W) - 1) ? MASK_LAST : MASK_LOW);
  end

  assign sum[0] = pp[0];
  assign cry[0] = '0;
  assign up[0]  = '0;
  for (genvar j = 1; j < int'(W); j++) begin : g_row
    assign up[j]  = {1'b0, sum[j-1][W-1:1]};
    assign sum[j] = pp[j] ^ up[j] ^ cry[j-1];
    assign cry[j] = (pp[j] & up[j]) | (pp[j] & cry[j-1]) | (up[j] & cry[j-1]);
  end

  // Ripple-carry row over weights W .. 2W-1, carry-in 1.
  assign ra    = {1'b0, sum[W-1][W-1:1]};
  assign rb    = cry[W-1];
  assign rc[0] = 1'b1;
  for (genvar k = 0; k < int'(W); k++) begin : g_ripple
    assign rs[k]   = ra[k] ^ rb[k] ^ rc[k];
    assign rc[k+1] = (ra[k] & rb[k]) | (ra[k] & rc[k]) | (rb[k] & rc[k]);
  end

  for (genvar j = 0; j < int'(W); j++) begin : g_low
    assign p[j] = sum[j][0];
  end
  assign p[2*W-1:W] = rs ^ {1'b1, {(W-1){1'b0}}};
endmodule
