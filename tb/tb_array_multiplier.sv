// tb_array_multiplier: the signed array multiplier against integer products:
// exhaustive at W = 8 (the design size) and W = 4, random at W = 12 and 16.
// It also checks the sign invariance the aging method relies on:
// (-a) x (-b) = a x b for every 8-bit pair except the most negative value.
module tb_array_multiplier;
  int checks = 0, failures = 0;

  logic [7:0]  a8, b8, na8, nb8;  logic [15:0] p8, q8;
  logic [3:0]  a4, b4;            logic [7:0]  p4;
  logic [11:0] a12, b12;          logic [23:0] p12;
  logic [15:0] a16, b16;          logic [31:0] p16;

  array_multiplier #(.W(8))  u8  (.a(a8),  .b(b8),  .p(p8));
  array_multiplier #(.W(8))  u8n (.a(na8), .b(nb8), .p(q8));
  array_multiplier #(.W(4))  u4  (.a(a4),  .b(b4),  .p(p4));
  array_multiplier #(.W(12)) u12 (.a(a12), .b(b12), .p(p12));
  array_multiplier #(.W(16)) u16 (.a(a16), .b(b16), .p(p16));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      a8 = 8'(v); b8 = 8'(v >> 8);
      na8 = 8'(-int'($signed(a8))); nb8 = 8'(-int'($signed(b8)));
      a4 = 4'(v); b4 = 4'(v >> 4);
      a12 = 12'($urandom); b12 = 12'($urandom);
      a16 = 16'($urandom); b16 = 16'($urandom);
      #1;
      checks++;
      if (int'($signed(p8)) != int'($signed(a8)) * int'($signed(b8))) begin
        failures++;
        if (failures < 10) $display("W=8 %0d x %0d = %0d", $signed(a8), $signed(b8), $signed(p8));
      end
      if (a8 != 8'h80 && b8 != 8'h80) begin
        checks++;
        if (q8 != p8) failures++;
      end
      if (v < 256) begin
        checks++;
        if (int'($signed(p4)) != int'($signed(a4)) * int'($signed(b4))) failures++;
      end
      if (v < 4096) begin
        checks += 2;
        if (int'($signed(p12)) != int'($signed(a12)) * int'($signed(b12))) failures++;
        if (longint'($signed(p16)) != longint'($signed(a16)) * longint'($signed(b16))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
