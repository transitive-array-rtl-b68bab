// tb_ppe: random and corner-case check of the 12-bit prefix adder against
// integer addition (prefix + sign-extended 8-bit input).
module tb_ppe;
  int checks = 0, failures = 0;
  logic signed [11:0] prefix, suffix;
  logic signed [7:0]  in_elem;
  ppe dut (.prefix, .in_elem, .suffix);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2000; i++) begin
      int p, x;
      p = int'($urandom_range(0, 2047)) - 1024;
      x = int'($urandom_range(0, 255)) - 128;
      if (i == 0) begin p = -1024; x = -128; end
      if (i == 1) begin p = 1000; x = 127; end
      prefix = 12'(p); in_elem = 8'(x); #1;
      checks++;
      if (int'(suffix) != p + x) begin
        failures++; $display("FAIL %0d + %0d = %0d", p, x, suffix);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
