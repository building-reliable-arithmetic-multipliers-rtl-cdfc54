// tb_twos_complement_unit: exhaustive check of the edge 2's complement unit
// at W = 8 and W = 5: -I against (2^W - I) mod 2^W and the most-negative flag.
module tb_twos_complement_unit;
  int checks = 0, failures = 0;

  logic [7:0] i8, n8;  logic m8;
  logic [4:0] i5, n5;  logic m5;

  twos_complement_unit #(.W(8)) u8 (.i(i8), .neg(n8), .min_neg(m8));
  twos_complement_unit #(.W(5)) u5 (.i(i5), .neg(n5), .min_neg(m5));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      i8 = 8'(v); i5 = 5'(v % 32);
      #1;
      checks++;
      if (int'(n8) != (256 - v) % 256 || m8 != (v == 128)) begin
        failures++;
        $display("W=8 i=%0d neg=%0d min=%0b", v, n8, m8);
      end
      checks++;
      if (int'(n5) != (32 - v % 32) % 32 || m5 != (v % 32 == 16)) begin
        failures++;
        $display("W=5 i=%0d neg=%0d min=%0b", v % 32, n5, m5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
