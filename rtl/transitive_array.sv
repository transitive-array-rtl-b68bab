// transitive_array: top level of the Transitive Array GEMM accelerator.
//
// Multiplication-free GEMM on bit-sliced weights with result reuse
// ("transitive sparsity"). One weight sub-tile of up to 256 TransRows
// (T = 8-bit binary rows of the bit-sliced weight tile) is shared by
// NUM_UNITS TransArray units, each with its own input sub-tile of T x m
// 8-bit inputs, i.e. its own m output columns. The PopCount sorter and the
// dynamic Scoreboard are shared, as is the Scoreboard Information (SI) they
// produce. Alternatively a static SI, computed offline and written through
// the ssi_* port, is used for every sub-tile (si_static = 1).
//
// Operation of one sub-tile:
//   1. while 'ready' is high, write the TransRows, T per cycle
//      (tr_we/tr_addr/tr_val; tr_val[j] is the TransRow with row index
//      tr_addr * T + j, and a row index is output row * S + bit level,
//      S = 8 or 4 weight bits), and the input sub-tiles
//      (in_we/in_unit/in_k/in_row), one row of one unit per cycle;
//   2. pulse 'start' with n_rows, wbits4 and si_static: the front end sorts
//      the TransRows by PopCount (39 cycles) and, in dynamic mode, builds
//      the SI in the Scoreboard (58 cycles). 'ready' is low meanwhile;
//   3. when the units are free, the sorted TransRows and the SI are copied
//      into the units' side of a double buffer (the hand-over) and the
//      units run the sub-tile; 'ready' rises again at the hand-over, so the
//      next sub-tile can be written and prepared while this one runs.
//      'done' pulses when a sub-tile has been fully accumulated.
//   4. sub-tiles along K accumulate into the outputs; after the last
//      'done', read them with rd_unit/rd_row and pulse 'clear_out' (only
//      while 'busy' is low) to start a new output tile.
// This three-stage overlap (Scoreboard, PPE lanes, APE accumulation) and its
// double buffers follow the paper's scheduling; the single hand-over point
// and the ready/start protocol are this design's choices. Inside a unit the
// lanes and the APE array already work concurrently through the crossbar
// queues. The global buffer and DRAM are outside this module: sub-tiles
// come in through the write ports. The event counters count what happened
// since the last 'clear_out'; cnt_overlap counts cycles in which the front
// end prepared a sub-tile while the units were running another.
module transitive_array
  import ta_pkg::*;
#(
  parameter int unsigned T         = 8,
  parameter int unsigned M_COLS    = 32,
  parameter int unsigned MAX_ROWS  = 256,
  parameter int unsigned NUM_UNITS = 6
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // configuration
  input  logic                               wbits4,     // 1: 4-bit weights, 0: 8-bit
  input  logic                               si_static,  // 1: static SI, 0: dynamic Scoreboard
  // weight sub-tile
  input  logic                               tr_we,
  input  logic [$clog2(MAX_ROWS/T)-1:0]      tr_addr,
  input  logic [T-1:0]                       tr_val [T],
  input  logic [$clog2(MAX_ROWS):0]          n_rows,
  // input sub-tiles
  input  logic                               in_we,
  input  logic [$clog2(NUM_UNITS)-1:0]       in_unit,
  input  logic [$clog2(T)-1:0]               in_k,
  input  logic signed [ACT_W-1:0]            in_row [M_COLS],
  // static Scoreboard Information
  input  logic                               ssi_we,
  input  logic [T-1:0]                       ssi_node,
  input  logic [T-1:0]                       ssi_pre,
  input  logic [$clog2(T)-1:0]               ssi_lane,
  // control
  input  logic                               clear_out,
  input  logic                               start,
  output logic                               ready,
  output logic                               busy,
  output logic                               done,
  // outputs
  input  logic [$clog2(NUM_UNITS)-1:0]       rd_unit,
  input  logic [$clog2(MAX_ROWS/4)-1:0]      rd_row,
  output logic signed [ACC_W-1:0]            rd_data [M_COLS],
  // Scoreboard entry read port
  input  logic [T-1:0]                       sb_q_node,
  output logic [$clog2(MAX_ROWS+1)-1:0]      sb_q_count,
  output logic [T-1:0]                       sb_q_prefix_bitmap,
  output logic [T-1:0]                       sb_q_suffix_bitmap,
  output logic [T-1:0]                       sb_q_suffixes [T],
  output logic [T-1:0]                       sb_q_suffix_valid,
  output logic                               sb_busy,
  // event counters
  output logic [31:0]                        cnt_cycles,
  output logic [31:0]                        cnt_ppe_adds,
  output logic [31:0]                        cnt_multi_steps,
  output logic [31:0]                        cnt_reuse,
  output logic [31:0]                        cnt_path_nodes,
  output logic [31:0]                        cnt_si_miss,
  output logic [31:0]                        cnt_conflicts,
  output logic [31:0]                        cnt_outliers,
  output logic [31:0]                        cnt_overlap
);
  localparam int unsigned NN = 2**T;
  localparam int unsigned IW = $clog2(MAX_ROWS);
  localparam int unsigned KW = $clog2(T+2);
  localparam int unsigned LW = $clog2(T);

  // Front end: sorter and Scoreboard prepare one sub-tile; back end: the
  // units run the previous one. The hand-over copies the sorted TransRows
  // and the SI into the back end's registers (the double buffer), which
  // frees the front end for the next sub-tile.
  typedef enum logic [1:0] {F_IDLE, F_SORT, F_SCORE, F_HOLD} fphase_t;
  fphase_t fphase;
  logic    fe_static, fe_w4;           // configuration of the front-end tile
  logic    be_busy, be_w4, run_start, handover;

  // ---------------------------------------------------------------- sorter
  logic [T-1:0]  s_val [MAX_ROWS];
  logic [IW-1:0] s_idx [MAX_ROWS];
  logic [KW-1:0] s_key [MAX_ROWS];
  logic sort_busy, sort_done;

  popcount_sorter #(.T(T), .MAX_ROWS(MAX_ROWS)) u_sort (
    .clk, .rst_n, .wr_en(tr_we), .wr_addr(tr_addr), .wr_val(tr_val), .n_rows,
    .start(start && fphase == F_IDLE), .busy(sort_busy), .done(sort_done),
    .s_val, .s_idx, .s_key);

  // ------------------------------------------------------------ scoreboard
  logic [T-1:0]  d_pre [NN];
  logic [LW-1:0] d_lane [NN];
  logic          d_present [NN], d_virt [NN];
  logic [2:0]    d_dist [NN];
  logic          sb_done;

  scoreboard #(.T(T), .MAX_ROWS(MAX_ROWS)) u_sb (
    .clk, .rst_n, .start(sort_done && !fe_static), .s_val, .s_key,
    .busy(sb_busy), .done(sb_done),
    .si_pre(d_pre), .si_lane(d_lane), .si_present(d_present), .si_virt(d_virt), .si_dist(d_dist),
    .q_node(sb_q_node), .q_count(sb_q_count), .q_prefix_bitmap(sb_q_prefix_bitmap),
    .q_suffix_bitmap(sb_q_suffix_bitmap), .q_suffixes(sb_q_suffixes), .q_suffix_valid(sb_q_suffix_valid));

  // ------------------------------------------------------------- static SI
  logic [T-1:0]  st_pre [NN];
  logic [LW-1:0] st_lane [NN];
  always_ff @(posedge clk) begin
    if (ssi_we) begin
      st_pre[ssi_node]  <= ssi_pre;
      st_lane[ssi_node] <= ssi_lane;
    end
  end

  // ------------------------------------------- hand-over (double buffer)
  logic [T-1:0]  r_val [MAX_ROWS];
  logic [IW-1:0] r_idx [MAX_ROWS];
  logic [KW-1:0] r_key [MAX_ROWS];
  logic [T-1:0]  r_pre [NN];
  logic [LW-1:0] r_lane [NN];
  logic          r_virt [NN];

  assign handover = (fphase == F_HOLD) && !be_busy;
  always_ff @(posedge clk) begin
    if (handover) begin
      r_val <= s_val;
      r_idx <= s_idx;
      r_key <= s_key;
      for (int v = 0; v < NN; v++) begin
        r_pre[v]  <= fe_static ? st_pre[v]  : d_pre[v];
        r_lane[v] <= fe_static ? st_lane[v] : d_lane[v];
        r_virt[v] <= fe_static ? 1'b0       : d_virt[v];
      end
    end
  end

  // ---------------------------------------------------------------- units
  logic                    u_busy [NUM_UNITS], u_done [NUM_UNITS];
  logic signed [ACC_W-1:0] u_rd [NUM_UNITS][M_COLS];
  logic [$clog2(T+1)-1:0]  e_add [NUM_UNITS], e_step [NUM_UNITS], e_reuse [NUM_UNITS];
  logic                    e_path [NUM_UNITS], e_miss [NUM_UNITS], e_conf [NUM_UNITS];

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    trans_array_unit #(.T(T), .M_COLS(M_COLS), .MAX_ROWS(MAX_ROWS)) u_ta (
      .clk, .rst_n, .wbits4(be_w4), .clear(clear_out),
      .x_we(in_we && in_unit == ($clog2(NUM_UNITS))'(u)), .x_k(in_k), .x_row(in_row),
      .start(run_start), .s_val(r_val), .s_idx(r_idx), .s_key(r_key),
      .si_pre(r_pre), .si_lane(r_lane), .si_virt(r_virt),
      .busy(u_busy[u]), .done(u_done[u]), .rd_row, .rd_data(u_rd[u]),
      .ev_add(e_add[u]), .ev_step(e_step[u]), .ev_reuse(e_reuse[u]),
      .ev_path(e_path[u]), .ev_miss(e_miss[u]), .ev_conflict(e_conf[u]));
  end
  assign rd_data = u_rd[rd_unit];

  // --------------------------------------------------------------- control
  logic [NUM_UNITS-1:0] fin;
  logic                 all_done;
  always_comb begin
    all_done = 1'b1;
    for (int u = 0; u < NUM_UNITS; u++) if (!(fin[u] || u_done[u])) all_done = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fphase    <= F_IDLE;
      fe_static <= 1'b0;
      fe_w4     <= 1'b0;
    end else begin
      case (fphase)
        F_IDLE:  if (start) begin
                   fphase    <= F_SORT;
                   fe_static <= si_static;
                   fe_w4     <= wbits4;
                 end
        F_SORT:  if (sort_done) fphase <= fe_static ? F_HOLD : F_SCORE;
        F_SCORE: if (sb_done) fphase <= F_HOLD;
        F_HOLD:  if (handover) fphase <= F_IDLE;
        default: fphase <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      be_busy   <= 1'b0;
      be_w4     <= 1'b0;
      run_start <= 1'b0;
      fin       <= '0;
      done      <= 1'b0;
    end else begin
      run_start <= handover;
      done      <= 1'b0;
      if (handover) begin
        be_busy <= 1'b1;
        be_w4   <= fe_w4;
        fin     <= '0;
      end else if (be_busy && !run_start) begin
        for (int u = 0; u < NUM_UNITS; u++) if (u_done[u]) fin[u] <= 1'b1;
        if (all_done) begin
          be_busy <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
  assign ready = (fphase == F_IDLE);
  assign busy  = (fphase != F_IDLE) || be_busy;

  // The units run the same SI on the same TransRows in lock step; unit 0's
  // events stand for all of them.
  logic [31:0] outl;
  always_comb begin
    outl = '0;
    for (int v = 1; v < NN; v++)
      if (d_present[v] && !d_virt[v] && d_dist[v] >= 3'(MAX_DIST)) outl = outl + 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_cycles <= '0; cnt_ppe_adds <= '0; cnt_multi_steps <= '0; cnt_reuse <= '0;
      cnt_path_nodes <= '0; cnt_si_miss <= '0; cnt_conflicts <= '0; cnt_outliers <= '0;
      cnt_overlap <= '0;
    end else if (clear_out) begin
      cnt_cycles <= '0; cnt_ppe_adds <= '0; cnt_multi_steps <= '0; cnt_reuse <= '0;
      cnt_path_nodes <= '0; cnt_si_miss <= '0; cnt_conflicts <= '0; cnt_outliers <= '0;
      cnt_overlap <= '0;
    end else begin
      if (busy) cnt_cycles <= cnt_cycles + 1;
      if (be_busy && (fphase == F_SORT || fphase == F_SCORE)) cnt_overlap <= cnt_overlap + 1;
      cnt_ppe_adds    <= cnt_ppe_adds    + 32'(e_add[0]);
      cnt_multi_steps <= cnt_multi_steps + 32'(e_step[0]);
      cnt_reuse       <= cnt_reuse       + 32'(e_reuse[0]);
      cnt_path_nodes  <= cnt_path_nodes  + 32'(e_path[0]);
      cnt_si_miss     <= cnt_si_miss     + 32'(e_miss[0]);
      cnt_conflicts   <= cnt_conflicts   + 32'(e_conf[0]);
      if (sb_done) cnt_outliers <= cnt_outliers + outl;
    end
  end
endmodule
