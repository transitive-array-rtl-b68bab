// tb_ape_array: random bank writes (row, shift, sign, 32 values) into the
// APE array across all banks, in parallel, checked against a model of the
// 64 x 32 output buffer through the row read port; then 'clear'.
module tb_ape_array;
  localparam int T = 8, M = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  logic b_valid [T]; logic [2:0] b_row [T]; logic [2:0] b_shift [T]; logic b_neg [T];
  logic signed [11:0] b_val [T][M]; logic [5:0] rd_row = 0; logic signed [23:0] rd_data [M];
  ape_array dut (.clk, .clear, .b_valid, .b_row, .b_shift, .b_neg, .b_val, .rd_row, .rd_data);
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int model [64][M];
  initial begin
    for (int b = 0; b < T; b++) b_valid[b] = 0;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    for (int r = 0; r < 64; r++) for (int c = 0; c < M; c++) model[r][c] = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int b = 0; b < T; b++) begin
        b_valid[b] = ($urandom_range(0, 3) != 0);
        b_row[b] = 3'($urandom_range(0, 7)); b_shift[b] = 3'($urandom_range(0, 7)); b_neg[b] = 1'($urandom_range(0, 1));
        for (int c = 0; c < M; c++) b_val[b][c] = 12'(int'($urandom_range(0, 255)) - 128);
        if (b_valid[b]) for (int c = 0; c < M; c++) begin
          int v;
          v = int'(b_val[b][c]) <<< b_shift[b];
          model[int'(b_row[b]) * T + b][c] += b_neg[b] ? -v : v;
        end
      end
    end
    @(negedge clk); for (int b = 0; b < T; b++) b_valid[b] = 0;
    for (int r = 0; r < 64; r++) begin
      rd_row = 6'(r); #1;
      for (int c = 0; c < M; c++) chk(int'(rd_data[c]) == model[r][c], $sformatf("row %0d col %0d", r, c));
    end
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    rd_row = 6'd13; #1;
    chk(rd_data[5] == 0 && rd_data[31] == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
