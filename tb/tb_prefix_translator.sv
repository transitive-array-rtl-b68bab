// tb_prefix_translator: the bitmap example of the Scoreboard bit-field
// figure (node 11, bitmap 1011 -> 3, 9, 10; first 3) at T = 4, then all
// node/bitmap pairs at T = 8 against a loop model.
module tb_prefix_translator;
  int checks = 0, failures = 0;
  logic [3:0] n4, b4, p4 [4], v4, f4; logic [1:0] fb4; logic a4;
  logic [7:0] n8, b8, p8 [8], v8, f8; logic [2:0] fb8; logic a8;
  prefix_translator #(.T(4)) d4 (.node(n4), .bitmap(b4), .prefixes(p4), .valid(v4), .first(f4), .first_bit(fb4), .any(a4));
  prefix_translator #(.T(8)) d8 (.node(n8), .bitmap(b8), .prefixes(p8), .valid(v8), .first(f8), .first_bit(fb8), .any(a8));
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    n4 = 4'd11; b4 = 4'b1011; n8 = 0; b8 = 0; #1;
    checks++;
    if (!(v4 == 4'b1011 && p4[3] == 4'd3 && p4[1] == 4'd9 && p4[0] == 4'd10 && f4 == 4'd3 && a4)) begin
      failures++; $display("FAIL example");
    end
    for (int n = 0; n < 256; n++)
      for (int b = 0; b < 256; b += 7) begin
        int first, fbit; logic any;
        n8 = 8'(n); b8 = 8'(b); #1;
        first = 0; fbit = 0; any = 0;
        for (int i = 0; i < 8; i++) if (((n & b) >> i) & 1) begin first = n - (1 << i); fbit = i; any = 1; end
        checks++;
        if (int'(f8) != first || int'(fb8) != fbit || a8 != any || v8 != 8'(n & b) || int'(p8[5]) != (n & ~32)) begin
          failures++; $display("FAIL n=%0d b=%0d", n, b);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
