// scoreboard: the dynamic Scoreboard, which builds the execution forest of
// one weight sub-tile at run time and outputs its Scoreboard Information (SI).
//
// The table has one entry per node of the T-bit Hasse graph (2**T entries):
// Count, four prefix bitmaps (distances 1..4), a suffix bitmap and a lane ID.
// Bit b of a prefix bitmap names the node with bit b cleared; bit b of the
// suffix bitmap names the node with bit b set (see prefix_translator and
// suffix_translator). The passes, each handling a whole Hasse level per
// cycle (every node of the level in parallel):
//   RECORD    T sorted TransRows per cycle; Count of each node += matches.
//   FORWARD   levels 1..T. A prefix p of node v passes distance
//             d = (p is root or Count[p] > 0 ? 0 : Dist[p]) + 1 to v, unless
//             Dist[p] >= 4 (p is not root). v sets bit b of prefix bitmap d
//             and keeps Dist[v] = min d (Algorithm 1).
//   BACKWARD  levels T..2. A node with Count > 0 and 1 < Dist < 4 takes the
//             first prefix of its bitmap at distance Dist; that prefix sets
//             the suffix bit and, if absent, gets Count = 1 and becomes a
//             path node computed only for reuse (Algorithm 2).
//   BALANCE   levels 1..T. Each present node picks a prefix and inherits its
//             lane. Level-1 nodes start lane b (their set bit). Distance-1
//             nodes pick, among their distance-1 prefixes, the one whose lane
//             has the smallest workload (sum of Counts already assigned; ties
//             go to the first prefix). Distance 2-3 nodes keep the prefix of
//             the backward pass. Nodes with distance >= 4 (outliers) take the
//             root (node 0, result 0) as prefix and the least-loaded lane.
//             Only the bitmap of the smallest distance is kept.
// The pass order, the bitmaps, the "first prefix" rule and the use of Count
// as the lane workload follow the paper. The per-level parallel schedule is
// this design's reading of "processing each level concurrently"; choosing
// lanes from the workloads at the start of a level, and the outlier rule
// (root prefix, least-loaded lane), are this design's choices.
//
// Interface: 'start' with the sorted TransRows of popcount_sorter (s_val,
// s_key; key > T marks an unused entry) runs all passes; 'done' pulses when
// si_* are valid. They hold until the next start. Latency:
// 'done' rises 3 + ceil(MAX_ROWS/T) + 3T - 1 cycles after 'start' (58 for T = 8,
// 256 rows).
// q_node reads one table entry, with its suffixes decoded.
module scoreboard
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned MAX_ROWS = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [T-1:0]                s_val [MAX_ROWS],
  input  logic [$clog2(T+2)-1:0]      s_key [MAX_ROWS],
  output logic                        busy,
  output logic                        done,
  // Scoreboard Information, one entry per node
  output logic [T-1:0]                si_pre     [2**T],
  output logic [$clog2(T)-1:0]        si_lane    [2**T],
  output logic                        si_present [2**T],
  output logic                        si_virt    [2**T],
  output logic [2:0]                  si_dist    [2**T],
  // entry read port
  input  logic [T-1:0]                q_node,
  output logic [$clog2(MAX_ROWS+1)-1:0] q_count,
  output logic [T-1:0]                q_prefix_bitmap,
  output logic [T-1:0]                q_suffix_bitmap,
  output logic [T-1:0]                q_suffixes [T],
  output logic [T-1:0]                q_suffix_valid
);
  localparam int unsigned NN  = 2**T;
  localparam int unsigned CW  = $clog2(MAX_ROWS+1);
  localparam int unsigned LW  = $clog2(T);
  localparam int unsigned LDW = $clog2(2*MAX_ROWS+NN+1);   // lane workload
  localparam int unsigned NG  = (MAX_ROWS + T - 1) / T;     // record groups
  localparam int unsigned KW  = $clog2(T+2);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RECORD, S_FWD, S_BWD, S_BAL} state_t;
  state_t state;

  logic [CW-1:0] cnt  [NN];
  logic [2:0]    dst  [NN];
  logic [T-1:0]  pb   [NN][MAX_DIST];
  logic [T-1:0]  sb   [NN];
  logic [LW-1:0] lane [NN];
  logic [T-1:0]  pre  [NN];
  logic          virt [NN];
  logic [LDW-1:0] load [T];

  logic [$clog2(NG+1)-1:0] grp;
  logic [$clog2(T+1)-1:0]  lvl;

  // ---------------------------------------------------------------- record
  logic [CW-1:0] rec_add [NN];
  always_comb begin
    for (int v = 0; v < NN; v++) begin
      rec_add[v] = '0;
      for (int j = 0; j < T; j++) begin
        int unsigned e;
        e = int'(grp) * T + j;
        if (e < MAX_ROWS && s_key[e] <= KW'(T) && s_val[e] == T'(v))
          rec_add[v] = rec_add[v] + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------- per-node logic
  logic [T-1:0]  f_pb   [NN][MAX_DIST];
  logic [2:0]    f_dist [NN];
  logic          b_need [NN];
  logic [LW-1:0] b_bit  [NN];
  logic [T-1:0]  b_sb   [NN];
  logic [T-1:0]  g_pre  [NN];
  logic [LW-1:0] g_lane [NN];

  function automatic logic [LW-1:0] argmin_lane(input logic [LDW-1:0] ld [T]);
    logic [LW-1:0] best;
    best = '0;
    for (int l = 1; l < T; l++) if (ld[l] < ld[best]) best = LW'(l);
    return best;
  endfunction

  logic [LW-1:0] least_lane;
  always_comb least_lane = argmin_lane(load);

  for (genvar v = 0; v < NN; v++) begin : g_node
    localparam int unsigned LV = popcount(16'(v));

    // Forward pass: distances passed by every prefix (Algorithm 1).
    always_comb begin
      int unsigned p;
      logic [2:0] eff;
      p   = 0;
      eff = '0;
      for (int d = 0; d < MAX_DIST; d++) f_pb[v][d] = '0;
      f_dist[v] = DIST_INF;
      for (int b = 0; b < T; b++) begin
        if (((v >> b) & 1) == 1) begin
          p = v & ~(1 << b);
          if (p == 0 || dst[p] < 3'(MAX_DIST)) begin
            eff = (p == 0 || cnt[p] != 0) ? 3'd0 : dst[p];
            f_pb[v][eff[1:0]] = f_pb[v][eff[1:0]] | (T'(1) << b);
            if (eff + 3'd1 < f_dist[v]) f_dist[v] = eff + 3'd1;
          end
        end
      end
    end

    // Backward pass, suffix side: which prefix bit this node asks for.
    logic [1:0] bwd_sel;
    always_comb bwd_sel = (dst[v] >= 3'd2 && dst[v] <= 3'(MAX_DIST)) ? 2'(dst[v] - 3'd1) : 2'd0;
    prefix_translator #(.T(T)) u_bwd_pt (
      .node(T'(v)), .bitmap(pb[v][bwd_sel]),
      .prefixes(), .valid(), .first(), .first_bit(b_bit[v]), .any());
    always_comb
      b_need[v] = (LV == int'(lvl)) && cnt[v] != 0 && dst[v] > 3'd1 && dst[v] < 3'(MAX_DIST);

    // Backward pass, prefix side: suffix bits requested of this node.
    always_comb begin
      int unsigned s;
      s = 0;
      b_sb[v] = '0;
      for (int b = 0; b < T; b++) begin
        if (((v >> b) & 1) == 0) begin
          s = v | (1 << b);
          if (b_need[s] && int'(b_bit[s]) == b) b_sb[v][b] = 1'b1;
        end
      end
    end

    // Balance: choose the prefix and lane of this node.
    logic [T-1:0]  d1_cand;
    prefix_translator #(.T(T)) u_bal_pt (
      .node(T'(v)), .bitmap(pb[v][0]),
      .prefixes(), .valid(d1_cand), .first(), .first_bit(), .any());
    always_comb begin
      int unsigned p;
      logic found;
      p     = 0;
      found = 1'b0;
      g_pre[v]  = '0;
      g_lane[v] = least_lane;
      if (LV == 1) begin
        g_pre[v]  = '0;
        g_lane[v] = LW'(msb_index(16'(v)));
      end else if (dst[v] == 3'd1) begin
        for (int b = T - 1; b >= 0; b--) begin
          if (d1_cand[b]) begin
            p = v & ~(1 << b);
            if (!found || load[lane[p]] < load[g_lane[v]]) begin
              g_pre[v]  = T'(p);
              g_lane[v] = lane[p];
            end
            found = 1'b1;
          end
        end
      end else if (dst[v] > 3'd1 && dst[v] < 3'(MAX_DIST)) begin
        g_pre[v]  = T'(v) & ~(T'(1) << b_bit[v]);
        g_lane[v] = lane[T'(v) & ~(T'(1) << b_bit[v])];
      end
    end
  end

  // Lane workloads added by the level being balanced.
  logic [LDW-1:0] load_add [T];
  always_comb begin
    for (int l = 0; l < T; l++) load_add[l] = '0;
    for (int v = 1; v < NN; v++)
      if (popcount(16'(v)) == int'(lvl) && cnt[v] != 0)
        load_add[g_lane[v]] = load_add[g_lane[v]] + LDW'(cnt[v]);
  end

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      grp   <= '0;
      lvl   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:   if (start) state <= S_CLEAR;
        S_CLEAR:  begin grp <= '0; state <= S_RECORD; end
        S_RECORD: begin
          grp <= grp + 1'b1;
          if (int'(grp) == NG - 1) begin lvl <= 1; state <= S_FWD; end
        end
        S_FWD: begin
          if (int'(lvl) == T) begin lvl <= ($bits(lvl))'(T); state <= S_BWD; end
          else lvl <= lvl + 1'b1;
        end
        S_BWD: begin
          if (lvl == 2) begin lvl <= 1; state <= S_BAL; end
          else lvl <= lvl - 1'b1;
        end
        S_BAL: begin
          if (int'(lvl) == T) begin state <= S_IDLE; done <= 1'b1; end
          else lvl <= lvl + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ the table
  always_ff @(posedge clk) begin
    case (state)
      S_CLEAR: begin
        for (int v = 0; v < NN; v++) begin
          cnt[v]  <= '0;
          dst[v] <= (v == 0) ? 3'd0 : DIST_INF;
          sb[v]   <= '0;
          lane[v] <= '0;
          pre[v]  <= '0;
          virt[v] <= 1'b0;
          for (int d = 0; d < MAX_DIST; d++) pb[v][d] <= '0;
        end
        for (int l = 0; l < T; l++) load[l] <= '0;
      end
      S_RECORD: for (int v = 1; v < NN; v++) cnt[v] <= cnt[v] + rec_add[v];
      S_FWD: begin
        for (int v = 1; v < NN; v++) if (popcount(16'(v)) == int'(lvl)) begin
          dst[v] <= f_dist[v];
          for (int d = 0; d < MAX_DIST; d++) pb[v][d] <= f_pb[v][d];
        end
      end
      S_BWD: begin
        for (int v = 1; v < NN; v++) if (popcount(16'(v)) == int'(lvl) - 1 && b_sb[v] != '0) begin
          sb[v] <= sb[v] | b_sb[v];
          if (cnt[v] == '0) begin
            cnt[v]  <= CW'(1);
            virt[v] <= 1'b1;
          end
        end
      end
      S_BAL: begin
        for (int v = 1; v < NN; v++) if (popcount(16'(v)) == int'(lvl) && cnt[v] != 0) begin
          pre[v]  <= g_pre[v];
          lane[v] <= g_lane[v];
          for (int d = 0; d < MAX_DIST; d++)
            if (d != int'(dst[v]) - 1) pb[v][d] <= '0;
        end
        for (int l = 0; l < T; l++) load[l] <= load[l] + load_add[l];
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------- outputs
  always_comb begin
    for (int v = 0; v < NN; v++) begin
      si_pre[v]     = pre[v];
      si_lane[v]    = lane[v];
      si_present[v] = (v != 0) && cnt[v] != 0;
      si_virt[v]    = virt[v];
      si_dist[v]    = dst[v];
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    q_count         = cnt[q_node];
    q_prefix_bitmap = (dst[q_node] >= 3'd1 && dst[q_node] <= 3'(MAX_DIST)) ?
                      pb[q_node][2'(dst[q_node] - 3'd1)] : pb[q_node][0];
    q_suffix_bitmap = sb[q_node];
  end
  suffix_translator #(.T(T)) u_q_st (
    .node(q_node), .bitmap(sb[q_node]), .suffixes(q_suffixes), .valid(q_suffix_valid));

endmodule
