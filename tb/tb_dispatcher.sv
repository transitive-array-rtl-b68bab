// tb_dispatcher: drives the dispatcher with sorted TransRows and a rule-
// based SI (prefix = node without its highest bit, lane = lowest set bit;
// missing prefixes marked as path nodes), lanes randomly not ready.
// Checks: every non-zero TransRow is issued exactly once with its row
// index; TranSparsity = node XOR prefix; the first op of a node uses the SI
// prefix, later ones reuse the node itself; each op's prefix was issued
// earlier to the same lane; path nodes are issued once, before their
// suffixes. A second run with scrambled lanes must report SI misses and
// fall back to the root.
module tb_dispatcher;
  import ta_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, ev_miss, ev_path;
  logic [7:0] s_val [256]; logic [7:0] s_idx [256]; logic [3:0] s_key [256];
  logic [7:0] si_pre [256]; logic [2:0] si_lane [256]; logic si_virt [256];
  logic op_valid [8], op_ready [8], op_real [8];
  logic [7:0] op_node [8], op_pre [8], op_diff [8], op_row [8];
  dispatcher dut (.clk, .rst_n, .start, .s_val, .s_idx, .s_key, .si_pre, .si_lane, .si_virt,
    .op_valid, .op_ready, .op_node, .op_pre, .op_diff, .op_real, .op_row, .busy, .done, .ev_miss, .ev_path);
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int issued_row [256];
  int node_lane [256];
  bit node_done [256];
  int misses, reuses;
  always @(negedge clk) for (int l = 0; l < 8; l++) op_ready[l] = ($urandom_range(0, 3) != 0);

  task automatic run(input bit scramble);
    int present [256];
    int n;
    for (int i = 0; i < 256; i++) begin issued_row[i] = 0; node_done[i] = 0; present[i] = 0; end
    misses = 0; reuses = 0;
    // rows in Hamming order; every third row is masked, which repeats values
    n = 0;
    for (int lv = 0; lv <= 8; lv++)
      for (int i = 0; i < 256; i++) begin
        int v;
        v = (i * 37 + 11) & 8'hff;
        if (i % 3 == 0) v = v & 8'h3c;
        if (popcount(16'(v)) == lv) begin
          s_val[n] = 8'(v); s_idx[n] = 8'(i); s_key[n] = 4'(lv); present[v]++; n++;
        end
      end
    for (int i = n; i < 256; i++) begin s_val[i] = 0; s_idx[i] = 0; s_key[i] = 4'd9; end
    for (int v = 0; v < 256; v++) begin
      si_pre[v]  = (v == 0) ? 8'd0 : 8'(v & ~(1 << msb_index(16'(v))));
      si_lane[v] = scramble ? 3'(v % 5) : 3'(lsb_index(16'(v)));
      si_virt[v] = 0;
    end
    // path nodes: absent prefixes of present nodes, transitively
    for (int lv = 8; lv >= 1; lv--)
      for (int v = 1; v < 256; v++)
        if (popcount(16'(v)) == lv && (present[v] > 0 || si_virt[v]) && si_pre[v] != 0 && present[si_pre[v]] == 0)
          si_virt[si_pre[v]] = !scramble;
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!done) begin
      #1;
      for (int l = 0; l < 8; l++) if (op_valid[l] && op_ready[l]) begin
        int v, p;
        v = op_node[l]; p = op_pre[l];
        chk(op_diff[l] == 8'(v ^ p), "TranSparsity is node XOR prefix");
        if (op_real[l]) issued_row[op_row[l]]++;
        if (!node_done[v]) begin
          if (p != 0) chk(p == si_pre[v], "first op uses the SI prefix");
          if (p == 0 && si_pre[v] != 0) misses++;
          if (p != 0) chk(node_done[p] && node_lane[p] == l, "prefix issued before, same lane");
          chk(int'(si_lane[v]) == l, "op on the node's lane");
        end else begin
          chk(p == v && op_real[l], "repeat reuses the node");
          reuses++;
        end
        if (!op_real[l]) chk(si_virt[v] && !node_done[v], "path node issued once");
        node_done[v] = 1; node_lane[v] = l;
      end
      @(negedge clk);
    end
    for (int i = 0; i < n; i++) chk(issued_row[s_idx[i]] == (s_val[i] != 0 ? 1 : 0), "row issued once");
    chk(reuses > 0, "repeated TransRows seen");
    if (scramble) chk(misses > 0, "SI misses seen"); else chk(misses == 0, "no SI miss with consistent SI");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
