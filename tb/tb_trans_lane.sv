// tb_trans_lane: feeds one lane random chains of ops (prefix chains of
// single-bit steps, multi-bit ops from the root, repeats with TranSparsity
// 0, path nodes) under random crossbar back-pressure. Every emitted result
// must equal the sum of the input rows named by the node's bits, each real
// op must emit exactly once in order, path nodes never, and the PPE must be
// busy for exactly one cycle per TranSparsity bit.
module tb_trans_lane;
  import ta_pkg::*;
  localparam int T = 8, M = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic op_valid = 0, op_ready, op_real = 0; logic [7:0] op_node = 0, op_pre = 0, op_diff = 0, op_row = 0;
  logic signed [7:0] x [T][M];
  logic res_valid, res_ready = 1; logic [7:0] res_row; logic signed [11:0] res_val [M];
  logic idle, ev_add, ev_step, ev_reuse;
  trans_lane dut (.clk, .rst_n, .op_valid, .op_ready, .op_node, .op_pre, .op_diff, .op_real, .op_row,
    .x, .res_valid, .res_ready, .res_row, .res_val, .idle, .ev_add, .ev_step, .ev_reuse);
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int exp_node [$];
  int exp_row [$];
  int adds_expected = 0, adds_seen = 0, reuse_seen = 0;
  always @(negedge clk) res_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (ev_add) adds_seen++;
    if (ev_reuse) reuse_seen++;
    if (res_valid && res_ready) begin
      int v, r;
      v = exp_node.pop_front(); r = exp_row.pop_front();
      chk(int'(res_row) == r, "result row order");
      for (int c = 0; c < M; c++) begin
        int s;
        s = 0;
        for (int b = 0; b < T; b++) if ((v >> b) & 1) s += int'(x[b][c]);
        chk(int'(res_val[c]) == s, $sformatf("node %0d col %0d: %0d vs %0d", v, c, res_val[c], s));
      end
    end
  end
  task automatic issue(input int v, input int p, input bit real_row, input int row);
    @(negedge clk);
    op_valid = 1; op_node = 8'(v); op_pre = 8'(p); op_diff = 8'(v ^ p); op_real = real_row; op_row = 8'(row);
    #1;
    while (!op_ready) begin @(negedge clk); #1; end
    if (real_row) begin exp_node.push_back(v); exp_row.push_back(row); end
    adds_expected += popcount(16'(v ^ p));
    @(posedge clk); #1 op_valid = 0;
  endtask
  initial begin
    int row;
    for (int b = 0; b < T; b++) for (int c = 0; c < M; c++) x[b][c] = 8'($urandom_range(0, 255));
    repeat (2) @(posedge clk); rst_n = 1;
    row = 0;
    for (int t = 0; t < 30; t++) begin
      int v, p, perm [8];
      for (int i = 0; i < 8; i++) perm[i] = i;
      perm.shuffle();
      // chain from the root adding one bit at a time, first node a path node
      v = 0;
      for (int i = 0; i < 5; i++) begin
        p = v; v = v | (1 << perm[i]);
        issue(v, p, i != 0, row++);
      end
      issue(v, v, 1, row++);                                  // repeat: reuse
      issue(255 & ~(1 << perm[0]), 0, 1, row++);              // outlier from root
    end
    repeat (40) @(posedge clk);
    chk(exp_node.size() == 0, "all results emitted");
    chk(adds_seen == adds_expected, $sformatf("PPE cycles %0d expected %0d", adds_seen, adds_expected));
    chk(reuse_seen == 30, "reuse events");
    chk(idle, "lane idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
