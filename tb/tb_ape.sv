// tb_ape: checks acc +/- (psum << shift) of the APE against integer
// arithmetic for random operands and every shift.
module tb_ape;
  int checks = 0, failures = 0;
  logic signed [23:0] acc_in, acc_out;
  logic signed [11:0] psum;
  logic [2:0] shift;
  logic negate;
  ape dut (.acc_in, .psum, .shift, .negate, .acc_out);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 4000; i++) begin
      int a, p, s, n, r;
      a = int'($urandom_range(0, 2000000)) - 1000000;
      p = int'($urandom_range(0, 2047)) - 1024;
      s = i % 8; n = (i / 8) % 2;
      acc_in = 24'(a); psum = 12'(p); shift = 3'(s); negate = n[0]; #1;
      r = n ? a - (p <<< s) : a + (p <<< s);
      checks++;
      if (int'(acc_out) != r) begin
        failures++; $display("FAIL a=%0d p=%0d s=%0d n=%0d got %0d exp %0d", a, p, s, n, acc_out, r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
