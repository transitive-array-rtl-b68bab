// tb_transitive_array: end-to-end test of the Transitive Array top level at
// its default size (T = 8, 256 TransRows, m = 32, six units).
//
// Random GEMMs W (rows x K, signed 4- or 8-bit) times X (K x 192, signed
// 8-bit) are bit-sliced here into TransRows and run sub-tile by sub-tile
// along K; every output of every unit is compared with a plain
// multiply-accumulate reference. Cases:
//   A  8-bit weights, dynamic Scoreboard, full 256-row sub-tiles;
//   B  8-bit weights, dynamic Scoreboard, sparse 40-row sub-tiles
//      (short trees: path nodes, outliers);
//   C  4-bit weights (64 output rows), dynamic Scoreboard;
//   D  8-bit weights, static SI written by the test (SI misses);
//   E  cases A, C and D again with the next sub-tile written and prepared
//      while the units run the current one (double-buffered overlap).
// Each mechanism (front-end overlap, path nodes, repeated-TransRow reuse, multi-cycle PPE ops,
// outliers, crossbar conflicts, SI misses, 4-bit mode, static mode) must
// occur at least once. A full 256-row sub-tile must finish in fewer than
// 256 + 64 cycles (sorting, scoreboarding and the T-lane array together).
module tb_transitive_array;
  import ta_pkg::*;
  localparam int T = 8, M = 32, NU = 6, R = 256;
  localparam int KMAX = 32;
  localparam int COLS = M * NU;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic wbits4 = 0, si_static = 0;
  logic tr_we = 0; logic [4:0] tr_addr = 0; logic [7:0] tr_val [8]; logic [8:0] n_rows = 0;
  logic in_we = 0; logic [2:0] in_unit = 0; logic [2:0] in_k = 0; logic signed [7:0] in_row [M];
  logic ssi_we = 0; logic [7:0] ssi_node = 0, ssi_pre = 0; logic [2:0] ssi_lane = 0;
  logic clear_out = 0, start = 0, ready, busy, done;
  logic [2:0] rd_unit = 0; logic [5:0] rd_row = 0; logic signed [23:0] rd_data [M];
  logic [7:0] q_node = 0; logic [8:0] q_count; logic [7:0] q_pb, q_sb, q_sv; logic [7:0] q_sfx [8]; logic sb_busy;
  logic [31:0] c_cyc, c_add, c_multi, c_reuse, c_path, c_miss, c_conf, c_outl, c_ovl;

  transitive_array dut (
    .clk, .rst_n, .wbits4, .si_static, .tr_we, .tr_addr, .tr_val, .n_rows,
    .in_we, .in_unit, .in_k, .in_row, .ssi_we, .ssi_node, .ssi_pre, .ssi_lane,
    .clear_out, .start, .ready, .busy, .done, .rd_unit, .rd_row, .rd_data,
    .sb_q_node(q_node), .sb_q_count(q_count), .sb_q_prefix_bitmap(q_pb), .sb_q_suffix_bitmap(q_sb),
    .sb_q_suffixes(q_sfx), .sb_q_suffix_valid(q_sv), .sb_busy,
    .cnt_cycles(c_cyc), .cnt_ppe_adds(c_add), .cnt_multi_steps(c_multi), .cnt_reuse(c_reuse),
    .cnt_path_nodes(c_path), .cnt_si_miss(c_miss), .cnt_conflicts(c_conf), .cnt_outliers(c_outl), .cnt_overlap(c_ovl));

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [64][KMAX];
  int X [KMAX][COLS];
  int tot_ovl, tot_path, tot_reuse, tot_multi, tot_outl, tot_conf, tot_miss, runs_w4, runs_static;
  int worst_full;

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  // Run one GEMM: nrow output rows, K columns of W, S-bit weights. With
  // pipe = 0 each sub-tile is started after the previous one is done and
  // timed; with pipe = 1 the next sub-tile is written and started as soon
  // as 'ready' allows, overlapping with the running one.
  task automatic run_gemm(input int nrow, input int K, input int S, input bit stat,
                          input bit pipe = 0);
    int ntr, cyc, d0;
    wbits4 = (S == 4); si_static = stat;
    for (int r = 0; r < nrow; r++)
      for (int k = 0; k < K; k++) W[r][k] = $signed($urandom_range(0, (1 << S) - 1)) - (1 << (S - 1));
    for (int k = 0; k < K; k++)
      for (int c = 0; c < COLS; c++) X[k][c] = int'($urandom_range(0, 255)) - 128;
    @(negedge clk) clear_out = 1; @(negedge clk) clear_out = 0;
    d0 = n_done;
    for (int kt = 0; kt < K / T; kt++) begin
      ntr = nrow * S;
      while (!ready) @(negedge clk);
      for (int g = 0; g < (ntr + T - 1) / T; g++) begin
        @(negedge clk); tr_we = 1; tr_addr = 5'(g);
        for (int j = 0; j < T; j++) begin
          int idx, r, s;
          idx = g * T + j; r = idx / S; s = idx % S;
          for (int b = 0; b < T; b++)
            tr_val[j][b] = (idx < ntr) ? 1'((W[r][kt * T + b] >> s) & 1) : 1'b0;
        end
      end
      @(negedge clk) tr_we = 0;
      for (int u = 0; u < NU; u++)
        for (int b = 0; b < T; b++) begin
          @(negedge clk); in_we = 1; in_unit = 3'(u); in_k = 3'(b);
          for (int c = 0; c < M; c++) in_row[c] = 8'(X[kt * T + b][u * M + c]);
        end
      @(negedge clk) in_we = 0; n_rows = 9'(ntr); start = 1;
      @(negedge clk) start = 0;
      if (!pipe) begin
        cyc = 1;
        while (!done) begin @(posedge clk); cyc++; end
        if (ntr == R && !stat) begin
          chk(cyc < 256 + 64, $sformatf("full sub-tile took %0d cycles", cyc));
          if (cyc > worst_full) worst_full = cyc;
        end
      end
    end
    while (n_done - d0 < K / T) @(negedge clk);
    chk(n_done - d0 == K / T, "one done per sub-tile");
    chk(!busy, "idle after the last sub-tile");
    @(negedge clk);
    for (int u = 0; u < NU; u++)
      for (int r = 0; r < nrow; r++) begin
        rd_unit = 3'(u); rd_row = 6'(r); #1;
        for (int c = 0; c < M; c++) begin
          int ref_v;
          ref_v = 0;
          for (int k = 0; k < K; k++) ref_v += W[r][k] * X[k][u * M + c];
          chk(int'(rd_data[c]) == ref_v,
              $sformatf("u%0d r%0d c%0d: %0d expected %0d", u, r, c, rd_data[c], ref_v));
        end
      end
    tot_path += int'(c_path); tot_reuse += int'(c_reuse); tot_multi += int'(c_multi);
    tot_outl += int'(c_outl); tot_conf += int'(c_conf); tot_miss += int'(c_miss);
    if (S == 4) runs_w4++;
    if (stat) runs_static++;
    tot_ovl += int'(c_ovl);
    if (pipe) begin
      // Preparing the next sub-tile hides behind the running one: a full
      // sub-tile then costs about the unit time, well under the front end
      // (39 + 58 cycles) plus the units.
      chk(int'(c_ovl) > 0, "front end overlapped the units");
      if (nrow * S == R && !stat)
        chk(int'(c_cyc) < (K / T) * 200, $sformatf("pipelined run took %0d cycles", c_cyc));
    end
    $display("gemm rows=%0d K=%0d S=%0d static=%0d pipe=%0d: cycles=%0d adds=%0d multi=%0d reuse=%0d path=%0d miss=%0d conflicts=%0d outliers=%0d overlap=%0d",
             nrow, K, S, stat, pipe, c_cyc, c_add, c_multi, c_reuse, c_path, c_miss, c_conf, c_outl, c_ovl);
  endtask

  initial begin
    for (int c = 0; c < M; c++) in_row[c] = 0;
    tot_ovl = 0; tot_path = 0; tot_reuse = 0; tot_multi = 0; tot_outl = 0; tot_conf = 0; tot_miss = 0;
    runs_w4 = 0; runs_static = 0; worst_full = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // static SI: prefix = node without its highest set bit, lane = lowest set bit
    for (int v = 0; v < 256; v++) begin
      @(negedge clk); ssi_we = 1; ssi_node = 8'(v);
      ssi_pre = (v == 0) ? 8'd0 : 8'(v & ~(1 << msb_index(16'(v))));
      ssi_lane = 3'(lsb_index(16'(v)));
    end
    @(negedge clk) ssi_we = 0;
    run_gemm(32, 16, 8, 0);   // A
    // Scoreboard read port after case A: counts of the last sub-tile add up.
    begin
      int sum;
      sum = 0;
      for (int v = 1; v < 256; v++) begin
        q_node = 8'(v); #1;
        sum += int'(q_count);
        chk((q_sv & ~q_sb) == 0, "suffix bitmap decode");
      end
      chk(sum >= 1 && sum <= 256 + 255, "scoreboard counts");
    end
    run_gemm(5, 16, 8, 0);    // B
    run_gemm(5, 32, 8, 0);    // B, longer K
    run_gemm(64, 16, 4, 0);   // C
    run_gemm(32, 16, 8, 1);   // D
    run_gemm(5, 16, 8, 1);    // D sparse
    run_gemm(32, 32, 8, 0, 1); // E pipelined
    run_gemm(64, 32, 4, 0, 1); // E pipelined, 4-bit
    run_gemm(32, 32, 8, 1, 1); // E pipelined, static SI
    $display("mechanisms: path=%0d reuse=%0d multi=%0d outliers=%0d conflicts=%0d miss=%0d w4=%0d static=%0d worst full sub-tile=%0d cycles",
             tot_path, tot_reuse, tot_multi, tot_outl, tot_conf, tot_miss, runs_w4, runs_static, worst_full);
    chk(tot_ovl > 0, "front end / unit overlap occurred");
    chk(tot_path > 0, "path nodes occurred");
    chk(tot_reuse > 0, "repeated-TransRow reuse occurred");
    chk(tot_multi > 0, "multi-cycle PPE ops occurred");
    chk(tot_outl > 0, "outliers occurred");
    chk(tot_conf > 0, "crossbar conflicts occurred");
    chk(tot_miss > 0, "SI misses occurred");
    chk(runs_w4 > 0 && runs_static > 0, "4-bit and static modes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
