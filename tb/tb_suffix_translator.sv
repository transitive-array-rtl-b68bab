// tb_suffix_translator: the bitmap example of the Scoreboard bit-field
// figure (node 8, bitmap 0111 -> 12, 10, 9) at T = 4, then random T = 8
// node/bitmap pairs against a loop model.
module tb_suffix_translator;
  int checks = 0, failures = 0;
  logic [3:0] n4, b4, s4 [4], v4;
  logic [7:0] n8, b8, s8 [8], v8;
  suffix_translator #(.T(4)) d4 (.node(n4), .bitmap(b4), .suffixes(s4), .valid(v4));
  suffix_translator #(.T(8)) d8 (.node(n8), .bitmap(b8), .suffixes(s8), .valid(v8));
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    n4 = 4'd8; b4 = 4'b0111; n8 = 0; b8 = 0; #1;
    checks++;
    if (!(v4 == 4'b0111 && s4[2] == 4'd12 && s4[1] == 4'd10 && s4[0] == 4'd9)) begin
      failures++; $display("FAIL example");
    end
    for (int i = 0; i < 3000; i++) begin
      int n, b;
      n = $urandom_range(0, 255); b = $urandom_range(0, 255);
      n8 = 8'(n); b8 = 8'(b); #1;
      checks++;
      if (v8 != 8'(b & ~n)) begin failures++; $display("FAIL valid n=%0d b=%0d", n, b); end
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'(s8[k]) != (n | (1 << k))) begin failures++; $display("FAIL suffix n=%0d k=%0d", n, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
