// tb_selector_ensemble: exhaustive check of the SM ensemble for every
// operand pair and every SM choice (including the spare "no SM" code).
module tb_selector_ensemble;
  import tb_sm_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0] x, w;
  logic [1:0] sel;
  logic       y;

  selector_ensemble dut (.x(x), .w(w), .sm_sel(sel), .apply_2c(y));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++)
      for (int v = 0; v < 65536; v++) begin
        sel = 2'(s); x = 8'(v); w = 8'(v >> 8);
        #1;
        checks++;
        if (y != sm_ref(s, x, w)) begin
          failures++;
          if (failures < 10) $display("sel=%0d x=%h w=%h got %0b", s, x, w, y);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
