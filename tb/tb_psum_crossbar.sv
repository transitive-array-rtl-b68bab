// tb_psum_crossbar: all lanes push random TransRow results, often to the
// same bank, with 8-bit and 4-bit row layouts. A model of the output rows
// accumulates every bank write; at the end it must equal the sum of all
// pushed results placed by (row, shift, sign) decoded independently. Also
// checks that conflicts occur, that no result is lost or duplicated, and
// that each bank accepts at most one result per cycle.
module tb_psum_crossbar;
  localparam int T = 8, M = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wbits4 = 0;
  logic in_valid [T], in_ready [T]; logic [7:0] in_row [T]; logic signed [11:0] in_val [T][M];
  logic b_valid [T]; logic [2:0] b_row [T]; logic [2:0] b_shift [T]; logic b_neg [T];
  logic signed [11:0] b_val [T][M]; logic empty, ev_conflict;
  psum_crossbar dut (.clk, .rst_n, .wbits4, .in_valid, .in_ready, .in_row, .in_val,
    .b_valid, .b_row, .b_shift, .b_neg, .b_val, .empty, .ev_conflict);
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  longint exp_acc [64][M];
  longint got_acc [64][M];
  int pushed, popped, conflicts;
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < T; b++) if (b_valid[b]) begin
      int r;
      r = int'(b_row[b]) * T + b;
      popped++;
      for (int c = 0; c < M; c++) begin
        longint v;
        v = longint'(b_val[b][c]) <<< b_shift[b];
        got_acc[r][c] += b_neg[b] ? -v : v;
      end
    end
    if (ev_conflict) conflicts++;
  end
  task automatic run(input bit w4);
    wbits4 = w4;
    for (int r = 0; r < 64; r++) for (int c = 0; c < M; c++) begin exp_acc[r][c] = 0; got_acc[r][c] = 0; end
    pushed = 0; popped = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int l = 0; l < T; l++) begin
        in_valid[l] = ($urandom_range(0, 1) == 1);
        in_row[l] = 8'($urandom_range(0, 255) & (t % 2 ? 8'h3f : 8'hff));
        for (int c = 0; c < M; c++) in_val[l][c] = 12'($urandom_range(0, 4095));
      end
      #1;
      for (int l = 0; l < T; l++) if (in_valid[l] && in_ready[l]) begin
        int idx, r, s, neg;
        idx = in_row[l];
        r = w4 ? idx / 4 : idx / 8; s = w4 ? idx % 4 : idx % 8; neg = w4 ? (s == 3) : (s == 7);
        pushed++;
        for (int c = 0; c < M; c++) begin
          longint v;
          v = longint'(in_val[l][c]) <<< s;
          exp_acc[r][c] += neg ? -v : v;
        end
      end
    end
    @(negedge clk); for (int l = 0; l < T; l++) in_valid[l] = 0;
    repeat (20) @(posedge clk);
    chk(empty, "drained");
    chk(pushed == popped, $sformatf("pushed %0d popped %0d", pushed, popped));
    for (int r = 0; r < 64; r++) for (int c = 0; c < M; c++)
      chk(exp_acc[r][c] == got_acc[r][c], $sformatf("row %0d col %0d", r, c));
  endtask
  initial begin
    for (int l = 0; l < T; l++) in_valid[l] = 0;
    conflicts = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(0);
    run(1);
    chk(conflicts > 0, "bank conflicts seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
