// tb_trans_array_unit: one TransArray unit on random 8-bit and 4-bit weight
// tiles, two sub-tiles along K each, with sorted TransRows and a rule-based
// SI prepared by the test (prefix = node without its highest bit, lane =
// lowest set bit, absent prefixes marked as path nodes). The output tile
// is compared with a multiply-accumulate reference, and each 256-row
// sub-tile must finish within 256 cycles (T lanes working in parallel).
module tb_trans_array_unit;
  import ta_pkg::*;
  localparam int T = 8, M = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wbits4 = 0, clear = 0, x_we = 0, start = 0, busy, done;
  logic [2:0] x_k = 0; logic signed [7:0] x_row [M];
  logic [7:0] s_val [256]; logic [7:0] s_idx [256]; logic [3:0] s_key [256];
  logic [7:0] si_pre [256]; logic [2:0] si_lane [256]; logic si_virt [256];
  logic [5:0] rd_row = 0; logic signed [23:0] rd_data [M];
  logic [3:0] ev_add, ev_step, ev_reuse; logic ev_path, ev_miss, ev_conflict;
  trans_array_unit dut (.clk, .rst_n, .wbits4, .clear, .x_we, .x_k, .x_row, .start, .s_val, .s_idx, .s_key,
    .si_pre, .si_lane, .si_virt, .busy, .done, .rd_row, .rd_data,
    .ev_add, .ev_step, .ev_reuse, .ev_path, .ev_miss, .ev_conflict);
  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int W [64][16];
  int X [16][M];
  int paths;
  always @(posedge clk) if (ev_path) paths++;

  task automatic run(input int S);
    int nrow;
    nrow = 256 / S;
    wbits4 = (S == 4);
    for (int r = 0; r < nrow; r++) for (int k = 0; k < 16; k++)
      W[r][k] = int'($urandom_range(0, (1 << S) - 1)) - (1 << (S - 1));
    for (int k = 0; k < 16; k++) for (int c = 0; c < M; c++) X[k][c] = int'($urandom_range(0, 255)) - 128;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    for (int kt = 0; kt < 2; kt++) begin
      int n, cyc;
      int present [256];
      int tr [256];
      for (int i = 0; i < 256; i++) begin
        tr[i] = 0;
        for (int b = 0; b < T; b++) tr[i] |= ((W[i / S][kt * T + b] >> (i % S)) & 1) << b;
      end
      for (int v = 0; v < 256; v++) present[v] = 0;
      n = 0;
      for (int lv = 0; lv <= 8; lv++)
        for (int i = 0; i < 256; i++) if (popcount(16'(tr[i])) == lv) begin
          s_val[n] = 8'(tr[i]); s_idx[n] = 8'(i); s_key[n] = 4'(lv); present[tr[i]]++; n++;
        end
      for (int v = 0; v < 256; v++) begin
        si_pre[v]  = (v == 0) ? 8'd0 : 8'(v & ~(1 << msb_index(16'(v))));
        si_lane[v] = 3'(lsb_index(16'(v)));
        si_virt[v] = 0;
      end
      for (int lv = 8; lv >= 1; lv--)
        for (int v = 1; v < 256; v++)
          if (popcount(16'(v)) == lv && (present[v] > 0 || si_virt[v]) && si_pre[v] != 0 && present[si_pre[v]] == 0)
            si_virt[si_pre[v]] = 1;
      for (int b = 0; b < T; b++) begin
        @(negedge clk); x_we = 1; x_k = 3'(b);
        for (int c = 0; c < M; c++) x_row[c] = 8'(X[kt * T + b][c]);
      end
      @(negedge clk) x_we = 0; start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      chk(cyc <= 256, $sformatf("sub-tile took %0d cycles", cyc));
      $display("S=%0d sub-tile %0d: %0d cycles", S, kt, cyc);
    end
    @(negedge clk);
    for (int r = 0; r < nrow; r++) begin
      rd_row = 6'(r); #1;
      for (int c = 0; c < M; c++) begin
        int ref_v;
        ref_v = 0;
        for (int k = 0; k < 16; k++) ref_v += W[r][k] * X[k][c];
        chk(int'(rd_data[c]) == ref_v, $sformatf("r%0d c%0d: %0d vs %0d", r, c, rd_data[c], ref_v));
      end
    end
  endtask
  initial begin
    paths = 0;
    for (int c = 0; c < M; c++) x_row[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(8);
    run(4);
    chk(paths > 0, "path nodes issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
