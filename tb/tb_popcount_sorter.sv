// tb_popcount_sorter: random sub-tiles of 256 and fewer TransRows. Checks
// that the used entries come out with non-decreasing PopCount, that they are
// a permutation of the written rows (value and row index kept together),
// that unused entries come last, and that sorting takes 39 cycles from
// start to done (idle, load, 36 network stages, registered done).
module tb_popcount_sorter;
  import ta_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0; logic [4:0] wr_addr = 0; logic [7:0] wr_val [8]; logic [8:0] n_rows = 0;
  logic start = 0, busy, done;
  logic [7:0] s_val [256]; logic [7:0] s_idx [256]; logic [3:0] s_key [256];
  popcount_sorter dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_val, .n_rows, .start, .busy, .done, .s_val, .s_idx, .s_key);
  int rows [256];
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int n, cyc;
      bit seen [256];
      n = (t < 3) ? 256 : 17 + 60 * t;
      if (n > 256) n = 256;
      for (int g = 0; g < 32; g++) begin
        @(negedge clk); wr_en = 1; wr_addr = 5'(g);
        for (int j = 0; j < 8; j++) begin
          rows[g * 8 + j] = $urandom_range(0, 255);
          wr_val[j] = 8'(rows[g * 8 + j]);
        end
      end
      @(negedge clk); wr_en = 0; n_rows = 9'(n); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      @(negedge clk);
      chk(cyc == 39, $sformatf("sort latency %0d", cyc));
      for (int i = 0; i < 256; i++) seen[i] = 0;
      for (int i = 0; i < 256; i++) begin
        if (i < n) begin
          chk(int'(s_key[i]) == popcount(16'(s_val[i])), "key is popcount");
          chk(s_idx[i] < 8'(n) || n == 256, "used entry comes from a used row");
          chk(int'(s_val[i]) == rows[s_idx[i]] && !seen[s_idx[i]], "value follows its row index once");
          seen[s_idx[i]] = 1;
          if (i > 0) chk(s_key[i] >= s_key[i-1], "non-decreasing popcount");
        end else begin
          chk(s_key[i] == 4'd9, "unused entry last");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
