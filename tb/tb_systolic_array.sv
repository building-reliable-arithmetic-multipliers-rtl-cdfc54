// tb_systolic_array: end-to-end test of the systolic array.
//
// It loads a per-PE SM choice through the configuration chains (all four
// codes appear), then runs NOPS matrix products C = X * W of random inner
// size K up to KMAX. The inputs are skewed as the array expects (row r late by
// r cycles, column c by c cycles), with random bubbles (valid low, garbage
// data) inside the streams and the most negative value mixed into the data.
// After every clock edge the running sum of every PE is compared with the
// partial product that should have reached it by then, which checks the
// result and the latency of every PE. A monitor in every PE checks that it
// takes (-X, -W) exactly when its chosen SM says so and the operands allow.
// Counted mechanisms (each must occur): transformed products, products the
// most-negative guard kept untransformed, products under each SM code,
// configuration shifts, clears, bubbles.
module tb_systolic_array #(
  parameter int unsigned R    = 8,
  parameter int unsigned C    = 6,
  parameter int unsigned KMAX = 12,
  parameter int unsigned NOPS = 4
);
  import sa_pkg::*;
  import tb_sm_ref_pkg::*;
  int checks = 0, failures = 0;
  int n_neg = 0, n_guard = 0, n_shift = 0, n_clr = 0, n_bubble = 0;
  int n_sel [4] = '{0, 0, 0, 0};

  logic clk = 0, rst_n = 1;
  logic [7:0]  x_in [R];  logic x_valid [R];
  logic [7:0]  w_in [C];  logic w_valid [C];
  logic        acc_clr, cfg_shift;
  logic [1:0]  cfg_in [C];
  logic [31:0] acc [R][C];

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #(64'd10 * (64'd200 + NOPS * (64'd4 * KMAX + 64'd2 * 64'(R + C) + 64'd20)));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] rnd_op();
    if ($urandom_range(0, 15) == 0) return 8'h80;
    return 8'($urandom);
  endfunction

  // Per-PE monitor of the transformation decision.
  logic [1:0] cfg_ref [R][C];
  for (genvar r = 0; r < int'(R); r++) begin : g_mr
    for (genvar c = 0; c < int'(C); c++) begin : g_mc
      always @(negedge clk) if (rst_n) begin
        automatic operand_t xq = dut.g_row[r].g_col[c].u_pe.x_q;
        automatic operand_t wq = dut.g_row[r].g_col[c].u_pe.w_q;
        automatic logic     un = dut.g_row[r].g_col[c].u_pe.use_neg;
        if (xq.valid && wq.valid) begin
          checks++;
          if (un != use_neg_ref(int'(cfg_ref[r][c]), xq.val, wq.val)) begin
            failures++;
            if (failures < 10) $display("PE(%0d,%0d) use_neg=%0b", r, c, un);
          end
          if (un) n_neg++;
          else if (sm_ref(int'(cfg_ref[r][c]), xq.val, wq.val)) n_guard++;
          n_sel[cfg_ref[r][c]]++;
        end
      end
    end
  end

  logic [7:0] xm [R][KMAX];
  logic [7:0] wm [KMAX][C];
  int         xt [R][KMAX];   // cycle (edge index) at which X[r][k] is driven
  int         wt [KMAX][C];

  initial begin
    int k_len, e, len, last;
    for (int r = 0; r < int'(R); r++) begin x_in[r] = '0; x_valid[r] = 0; end
    for (int c = 0; c < int'(C); c++) begin w_in[c] = '0; w_valid[c] = 0; cfg_in[c] = 0; end
    acc_clr = 0; cfg_shift = 0;
    #1 rst_n = 0;   // a falling edge, so the asynchronous reset takes effect
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Configuration: PE (r,c) gets code (r + 2c) mod 4.
    for (int s = 0; s < int'(R); s++) begin
      for (int c = 0; c < int'(C); c++) cfg_in[c] = 2'((int'(R) - 1 - s + 2 * c) % 4);
      cfg_shift = 1;
      @(negedge clk);
      n_shift++;
    end
    cfg_shift = 0;
    for (int r = 0; r < int'(R); r++)
      for (int c = 0; c < int'(C); c++) cfg_ref[r][c] = 2'((r + 2 * c) % 4);

    for (int op = 0; op < int'(NOPS); op++) begin
      k_len = (op == 0) ? int'(KMAX) : $urandom_range(1, KMAX);
      for (int r = 0; r < int'(R); r++)
        for (int k = 0; k < k_len; k++) xm[r][k] = rnd_op();
      for (int k = 0; k < k_len; k++)
        for (int c = 0; c < int'(C); c++) wm[k][c] = rnd_op();
      // Schedule: element k of every stream at edge 1 + k + r (+c) plus a
      // common bubble offset, so bubbles stay aligned across the skew.
      begin
        automatic int off = 0;
        for (int k = 0; k < k_len; k++) begin
          if (op != 0 && $urandom_range(0, 3) == 0) off++;
          for (int r = 0; r < int'(R); r++) xt[r][k] = 1 + k + off + r;
          for (int c = 0; c < int'(C); c++) wt[k][c] = 1 + k + off + c;
        end
        len = k_len + off;
      end
      // Edge 0: clear.
      acc_clr = 1;
      @(negedge clk);
      acc_clr = 0;
      n_clr++;
      last = len + int'(R) + int'(C) + 2;
      for (e = 1; e <= last; e++) begin
        // Drive the values registered at edge e.
        for (int r = 0; r < int'(R); r++) begin
          x_valid[r] = 0; x_in[r] = 8'($urandom);
          for (int k = 0; k < k_len; k++)
            if (xt[r][k] == e) begin x_valid[r] = 1; x_in[r] = xm[r][k]; end
        end
        for (int c = 0; c < int'(C); c++) begin
          w_valid[c] = 0; w_in[c] = 8'($urandom);
          for (int k = 0; k < k_len; k++)
            if (wt[k][c] == e) begin w_valid[c] = 1; w_in[c] = wm[k][c]; end
        end
        if (!x_valid[0] && e <= len) n_bubble++;
        @(negedge clk);
        // After edge e: PE (r,c) holds the products whose pair met by e-1.
        for (int r = 0; r < int'(R); r++)
          for (int c = 0; c < int'(C); c++) begin
            automatic int sum = 0;
            for (int k = 0; k < k_len; k++)
              if (xt[r][k] + c + 1 <= e) sum += sprod(xm[r][k], wm[k][c]);
            checks++;
            if (acc[r][c] != 32'(sum)) begin
              failures++;
              if (failures < 10)
                $display("op %0d edge %0d PE(%0d,%0d): %0d expected %0d",
                         op, e, r, c, $signed(acc[r][c]), sum);
            end
          end
      end
    end

    $display("transformed=%0d guarded=%0d per-SM=%0d/%0d/%0d/none %0d shifts=%0d clears=%0d bubbles=%0d",
             n_neg, n_guard, n_sel[0], n_sel[1], n_sel[2], n_sel[3], n_shift, n_clr, n_bubble);
    checks++; if (n_neg == 0)   begin failures++; $display("no transformed product"); end
    checks++; if (n_guard == 0) begin failures++; $display("most-negative guard never used"); end
    checks++; if (n_shift == 0) begin failures++; $display("no configuration shift"); end
    checks++; if (n_clr == 0)   begin failures++; $display("no clear"); end
    if (NOPS > 1) begin
      checks++; if (n_bubble == 0) begin failures++; $display("no bubble"); end
    end
    for (int s = 0; s < 4; s++) begin
      if (int'(R + 2 * C) > s || R > 3) begin
        checks++;
        if (n_sel[s] == 0) begin failures++; $display("SM code %0d never used", s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
