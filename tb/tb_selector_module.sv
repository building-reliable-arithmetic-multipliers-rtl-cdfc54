// tb_selector_module: exhaustive check of the three default selector
// functions (all 65536 operand pairs) against their Boolean expressions.
module tb_selector_module;
  import sa_pkg::*;
  import tb_sm_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0] x, w;
  logic [2:0] y;

  selector_module #(.BIT_IDX(SM1_BITS), .TRUTH(SM1_TRUTH)) u1 (.x(x), .w(w), .apply_2c(y[0]));
  selector_module #(.BIT_IDX(SM2_BITS), .TRUTH(SM2_TRUTH)) u2 (.x(x), .w(w), .apply_2c(y[1]));
  selector_module #(.BIT_IDX(SM3_BITS), .TRUTH(SM3_TRUTH)) u3 (.x(x), .w(w), .apply_2c(y[2]));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones [3] = '{0, 0, 0};
    for (int v = 0; v < 65536; v++) begin
      x = 8'(v); w = 8'(v >> 8);
      #1;
      for (int s = 0; s < 3; s++) begin
        checks++;
        ones[s] += int'(y[s]);
        if (y[s] != sm_ref(s, x, w)) begin
          failures++;
          if (failures < 10) $display("SM-%0d x=%h w=%h got %0b", s + 1, x, w, y[s]);
        end
      end
    end
    // Each function must take both values.
    for (int s = 0; s < 3; s++) begin
      checks++;
      if (ones[s] == 0 || ones[s] == 65536) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
