// tb_processing_element: one PE against a cycle-accurate reference model.
// Random operand bundles (with random valid bits, the most negative value
// mixed in), random clears and every SM choice. Each cycle it checks the
// running sum (which must reflect a product exactly one edge after the pair
// was registered), the forwarded bundles, the configuration chain, and
// whether the PE took (-X, -W) exactly when the selector and the
// most-negative guard say so.
module tb_processing_element;
  import sa_pkg::*;
  import tb_sm_ref_pkg::*;
  int checks = 0, failures = 0;
  int n_neg = 0, n_guard = 0, n_mac = 0, n_clr = 0;

  logic clk = 0, rst_n = 1;
  operand_t x_in, w_in, x_out, w_out;
  logic acc_clr, cfg_shift;
  logic [1:0] cfg_in, cfg_out;
  logic [31:0] acc;

  processing_element dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic operand_t mk(input logic [7:0] v, input logic valid);
    operand_t o;
    o.val = v; o.neg = neg8(v); o.is_min = (v == 8'h80); o.valid = valid;
    return o;
  endfunction

  function automatic logic [7:0] rnd_op();
    int r = $urandom_range(0, 15);
    if (r == 0) return 8'h80;
    return 8'($urandom);
  endfunction

  // Reference state.
  operand_t    m_x, m_w;
  logic [1:0]  m_cfg;
  logic [31:0] m_acc;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%0t: %s", $time, what);
    end
  endtask

  initial begin
    x_in = '0; w_in = '0; acc_clr = 0; cfg_shift = 0; cfg_in = 0;
    m_x = '0; m_w = '0; m_cfg = 0; m_acc = 0;
    #1 rst_n = 0;   // a falling edge, so the asynchronous reset takes effect
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // Drive the next inputs on the falling edge.
      x_in      = mk(rnd_op(), $urandom_range(0, 7) != 0);
      w_in      = mk(rnd_op(), $urandom_range(0, 7) != 0);
      acc_clr   = ($urandom_range(0, 99) == 0);
      cfg_shift = (cyc % 1000 == 0);
      cfg_in    = 2'(cyc / 1000);
      @(posedge clk);
      // Reference update (same edge).
      if (acc_clr) begin
        m_acc = 0; n_clr++;
      end else if (m_x.valid && m_w.valid) begin
        m_acc = m_acc + 32'(sprod(m_x.val, m_w.val));
      end
      m_x = x_in; m_w = w_in;
      if (cfg_shift) m_cfg = cfg_in;
      @(negedge clk);
      check(acc == m_acc, $sformatf("acc %0d expected %0d", $signed(acc), $signed(m_acc)));
      check(x_out == m_x && w_out == m_w, "forwarded bundles");
      check(cfg_out == m_cfg, "configuration register");
      if (m_x.valid && m_w.valid) begin
        n_mac++;
        check(dut.use_neg == use_neg_ref(int'(m_cfg), m_x.val, m_w.val),
              $sformatf("use_neg cfg=%0d x=%h w=%h", m_cfg, m_x.val, m_w.val));
        if (dut.use_neg) n_neg++;
        if (sm_ref(int'(m_cfg), m_x.val, m_w.val) && !dut.use_neg) n_guard++;
      end
    end
    $display("macs=%0d transformed=%0d guarded=%0d clears=%0d", n_mac, n_neg, n_guard, n_clr);
    check(n_neg > 0 && n_guard > 0 && n_clr > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
