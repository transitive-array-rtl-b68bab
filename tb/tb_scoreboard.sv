// tb_scoreboard: checks the dynamic Scoreboard.
//  1. The worked example of the scoreboarding figure (T = 4, TransRows
//     2 5 15 14 1 7 2): expected forest lane A = {1,5,7,15}, lane B =
//     {2,6,14}, with node 6 a path node and node 14 at distance 2.
//  2. Random T = 8 sub-tiles of 256 TransRows (and some sparse ones):
//     distances against a software forward pass (Algorithm 1), and forest
//     rules: every present node has a prefix that is a strict subset of it,
//     one bit smaller unless it is an outlier on the root, present, and in
//     the same lane; node counts match the TransRows; done comes 58 cycles after start.
module tb_scoreboard;
  import ta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------ T = 4 DUT
  localparam int T4 = 4, R4 = 8;
  logic [3:0] s4_val [R4];
  logic [2:0] s4_key [R4];
  logic st4, busy4, done4;
  logic [3:0] pre4 [16]; logic [1:0] lane4 [16]; logic pres4 [16], virt4 [16]; logic [2:0] dist4 [16];
  logic [3:0] q4_node = 4'd6; logic [3:0] q4_sfx [4]; logic [3:0] q4_sv, q4_pb, q4_sb; logic [3:0] q4_cnt;
  scoreboard #(.T(T4), .MAX_ROWS(R4)) dut4 (
    .clk, .rst_n, .start(st4), .s_val(s4_val), .s_key(s4_key), .busy(busy4), .done(done4),
    .si_pre(pre4), .si_lane(lane4), .si_present(pres4), .si_virt(virt4), .si_dist(dist4),
    .q_node(q4_node), .q_count(q4_cnt), .q_prefix_bitmap(q4_pb), .q_suffix_bitmap(q4_sb),
    .q_suffixes(q4_sfx), .q_suffix_valid(q4_sv));

  // ------------------------------------------------------------ T = 8 DUT
  localparam int T8 = 8, R8 = 256;
  logic [7:0] s8_val [R8];
  logic [3:0] s8_key [R8];
  logic st8, busy8, done8;
  logic [7:0] pre8 [256]; logic [2:0] lane8 [256]; logic pres8 [256], virt8 [256]; logic [2:0] dist8 [256];
  logic [7:0] q8_node; logic [7:0] q8_sfx [8]; logic [7:0] q8_sv, q8_pb, q8_sb; logic [8:0] q8_cnt;
  scoreboard #(.T(T8), .MAX_ROWS(R8)) dut8 (
    .clk, .rst_n, .start(st8), .s_val(s8_val), .s_key(s8_key), .busy(busy8), .done(done8),
    .si_pre(pre8), .si_lane(lane8), .si_present(pres8), .si_virt(virt8), .si_dist(dist8),
    .q_node(q8_node), .q_count(q8_cnt), .q_prefix_bitmap(q8_pb), .q_suffix_bitmap(q8_sb),
    .q_suffixes(q8_sfx), .q_suffix_valid(q8_sv));

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference forward pass (Algorithm 1) on 8-bit nodes.
  int refcnt [256];
  int refdist [256];
  task automatic ref_forward();
    for (int i = 0; i < 256; i++) refdist[i] = 7;
    refdist[0] = 0;
    for (int lv = 0; lv < 8; lv++)
      for (int i = 0; i < 256; i++) if (popcount(16'(i)) == lv) begin
        int d;
        d = refdist[i];
        if (!(d >= 4 && i != 0)) begin
          if (refcnt[i] > 0 || i == 0) d = 0;
          for (int b = 0; b < 8; b++) if (((i >> b) & 1) == 0) begin
            int s;
            s = i | (1 << b);
            if (d + 1 < refdist[s]) refdist[s] = d + 1;
          end
        end
      end
  endtask

  initial begin
    int rows4 [7] = '{2, 5, 15, 14, 1, 7, 2};
    int cyc;
    st4 = 0; st8 = 0; q8_node = 0;
    for (int i = 0; i < R4; i++) begin s4_val[i] = 0; s4_key[i] = 3'd5; end
    for (int i = 0; i < R8; i++) begin s8_val[i] = 0; s8_key[i] = 4'd9; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- worked example, T = 4
    for (int i = 0; i < 7; i++) begin s4_val[i] = 4'(rows4[i]); s4_key[i] = 3'(popcount(16'(rows4[i]))); end
    @(negedge clk) st4 = 1; @(negedge clk) st4 = 0;
    wait (done4); @(negedge clk);
    chk(pre4[5] == 1 && pre4[7] == 5 && pre4[15] == 7, "example: prefixes of 5, 7, 15");
    chk(pre4[6] == 2 && pre4[14] == 6, "example: prefixes of 6, 14");
    chk(pre4[1] == 0 && pre4[2] == 0, "example: level-1 nodes on root");
    chk(lane4[1] == lane4[5] && lane4[5] == lane4[7] && lane4[7] == lane4[15], "example: lane of 1,5,7,15");
    chk(lane4[2] == lane4[6] && lane4[6] == lane4[14] && lane4[2] != lane4[1], "example: lane of 2,6,14");
    chk(virt4[6] && !virt4[5] && pres4[6] && !pres4[3] && !pres4[10], "example: path node 6 only");
    chk(dist4[14] == 2 && dist4[15] == 1 && dist4[7] == 1, "example: distances");
    chk(q4_cnt == 1 && q4_sb == 4'b1000 && q4_sv == 4'b1000 && q4_sfx[3] == 4'd14, "example: node 6 suffix bitmap names 14");
    q4_node = 2; #1;
    chk(q4_cnt == 2, "example: count of node 2");

    // ---- random T = 8 sub-tiles
    for (int t = 0; t < 12; t++) begin
      int n, mask;
      n = (t < 8) ? 256 : 40 + t * 10;
      mask = (t % 3 == 0) ? 8'hff : (t % 3 == 1) ? 8'h7f : 8'hf3;
      for (int i = 0; i < 256; i++) refcnt[i] = 0;
      for (int i = 0; i < R8; i++) begin
        if (i < n) begin
          s8_val[i] = 8'($urandom() & mask);
          s8_key[i] = 4'(popcount(16'(s8_val[i])));
          refcnt[s8_val[i]]++;
        end else begin
          s8_val[i] = 8'($urandom());
          s8_key[i] = 4'd9;
        end
      end
      ref_forward();
      @(negedge clk) st8 = 1; @(negedge clk) st8 = 0;
      cyc = 1;
      while (!done8) begin @(posedge clk); cyc++; end
      @(negedge clk);
      chk(cyc == 58, $sformatf("latency %0d", cyc));
      for (int v = 1; v < 256; v++) begin
        if (refcnt[v] > 0) begin
          int p;
          p = pre8[v];
          chk(pres8[v], $sformatf("node %0d present", v));
          chk(int'(dist8[v]) == refdist[v], $sformatf("distance of %0d: %0d vs %0d", v, dist8[v], refdist[v]));
          chk((p & ~v) == 0 && p != v, $sformatf("prefix %0d of %0d is a subset", p, v));
          if (refdist[v] < 4) chk(popcount(16'(p ^ v)) == 1, $sformatf("prefix %0d of %0d one bit away", p, v));
          else chk(p == 0, $sformatf("outlier %0d on root", v));
          if (p != 0) chk(pres8[p] && lane8[p] == lane8[v], $sformatf("prefix %0d of %0d present in same lane", p, v));
        end else if (pres8[v]) begin
          chk(virt8[v], $sformatf("node %0d present without a TransRow must be a path node", v));
          chk(popcount(16'(pre8[v] ^ v)) == 1 && (pre8[v] == 0 || pres8[pre8[v]]), $sformatf("path node %0d prefix", v));
        end
      end
      q8_node = s8_val[3]; #1;
      chk(int'(q8_cnt) == refcnt[s8_val[3]], "count read port");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
