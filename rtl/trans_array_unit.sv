// trans_array_unit: one TransArray unit.
//
// Computes the product of one binary weight sub-tile (up to MAX_ROWS
// TransRows of T bits, sorted into Hamming order) and one input sub-tile
// (T rows of m signed 8-bit elements), and accumulates it into its output
// tile. Dataflow: dispatcher (SI lookup, XOR pruning) -> T lanes (PPE rows
// with distributed prefix buffers) -> crossbar with queues -> T x m APE
// array with the output buffer. No multiplier is used.
// The input sub-tile is double buffered: x_we/x_k/x_row write the next
// sub-tile row by row while the current one is being computed, and 'start'
// moves it into the working registers, which hold it for the whole
// sub-tile. The next sub-tile may be written from the cycle after 'start'.
// 'start' runs the sub-tile with the sorted
// TransRows and SI held stable by the caller; 'done' pulses once every
// result has been accumulated. 'clear' zeroes the output tile before the
// first sub-tile along K. rd_row reads one output row.
// Event outputs pulse per cycle for counting: PPE activity, extra cycles of
// multi-bit ops, repeated-TransRow reuse, path nodes, SI misses and
// crossbar bank conflicts. Structure after the paper's unit figure; the
// handshakes and buffering between the stages are this design's choices.
module trans_array_unit
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned M_COLS   = 32,
  parameter int unsigned MAX_ROWS = 256
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wbits4,
  input  logic                               clear,
  // input sub-tile
  input  logic                               x_we,
  input  logic [$clog2(T)-1:0]               x_k,
  input  logic signed [ACT_W-1:0]            x_row [M_COLS],
  // sorted TransRows and Scoreboard Information
  input  logic                               start,
  input  logic [T-1:0]                       s_val [MAX_ROWS],
  input  logic [$clog2(MAX_ROWS)-1:0]        s_idx [MAX_ROWS],
  input  logic [$clog2(T+2)-1:0]             s_key [MAX_ROWS],
  input  logic [T-1:0]                       si_pre  [2**T],
  input  logic [$clog2(T)-1:0]               si_lane [2**T],
  input  logic                               si_virt [2**T],
  output logic                               busy,
  output logic                               done,
  // output tile
  input  logic [$clog2(MAX_ROWS/4)-1:0]      rd_row,
  output logic signed [ACC_W-1:0]            rd_data [M_COLS],
  // events
  output logic [$clog2(T+1)-1:0]             ev_add,
  output logic [$clog2(T+1)-1:0]             ev_step,
  output logic [$clog2(T+1)-1:0]             ev_reuse,
  output logic                               ev_path,
  output logic                               ev_miss,
  output logic                               ev_conflict
);
  localparam int unsigned IW  = $clog2(MAX_ROWS);
  localparam int unsigned BRW = $clog2(MAX_ROWS/(4*T));

  logic signed [ACT_W-1:0] x_nx [T][M_COLS];   // next input sub-tile
  logic signed [ACT_W-1:0] x    [T][M_COLS];   // sub-tile being computed
  always_ff @(posedge clk) begin
    if (x_we) x_nx[x_k] <= x_row;
    if (start) x <= x_nx;
  end

  // dispatcher -> lanes
  logic          op_valid [T], op_ready [T], op_real [T];
  logic [T-1:0]  op_node [T], op_pre [T], op_diff [T];
  logic [IW-1:0] op_row [T];
  logic          d_busy, d_done;

  dispatcher #(.T(T), .MAX_ROWS(MAX_ROWS)) u_disp (
    .clk, .rst_n, .start, .s_val, .s_idx, .s_key, .si_pre, .si_lane, .si_virt,
    .op_valid, .op_ready, .op_node, .op_pre, .op_diff, .op_real, .op_row,
    .busy(d_busy), .done(d_done), .ev_miss, .ev_path);

  // lanes -> crossbar
  logic                    r_valid [T], r_ready [T];
  logic [IW-1:0]           r_row [T];
  logic signed [PSUM_W-1:0] r_val [T][M_COLS];
  logic [T-1:0]            l_idle, l_add, l_step, l_reuse;

  for (genvar l = 0; l < T; l++) begin : g_lane
    trans_lane #(.T(T), .M_COLS(M_COLS), .MAX_ROWS(MAX_ROWS)) u_lane (
      .clk, .rst_n,
      .op_valid(op_valid[l]), .op_ready(op_ready[l]), .op_node(op_node[l]), .op_pre(op_pre[l]),
      .op_diff(op_diff[l]), .op_real(op_real[l]), .op_row(op_row[l]),
      .x, .res_valid(r_valid[l]), .res_ready(r_ready[l]), .res_row(r_row[l]), .res_val(r_val[l]),
      .idle(l_idle[l]), .ev_add(l_add[l]), .ev_step(l_step[l]), .ev_reuse(l_reuse[l]));
  end

  // crossbar -> APE banks
  logic                     b_valid [T], b_neg [T];
  logic [BRW-1:0]           b_row [T];
  logic [2:0]               b_shift [T];
  logic signed [PSUM_W-1:0] b_val [T][M_COLS];
  logic                     x_empty;

  psum_crossbar #(.T(T), .M_COLS(M_COLS), .MAX_ROWS(MAX_ROWS)) u_xbar (
    .clk, .rst_n, .wbits4, .in_valid(r_valid), .in_ready(r_ready), .in_row(r_row), .in_val(r_val),
    .b_valid, .b_row, .b_shift, .b_neg, .b_val, .empty(x_empty), .ev_conflict);

  ape_array #(.T(T), .M_COLS(M_COLS), .MAX_ROWS(MAX_ROWS)) u_ape (
    .clk, .clear, .b_valid, .b_row, .b_shift, .b_neg, .b_val, .rd_row, .rd_data);

  // Completion: dispatcher finished, lanes and queues drained.
  logic draining;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (d_done) draining <= 1'b1;
      else if (draining && (&l_idle) && x_empty) begin
        draining <= 1'b0;
        done     <= 1'b1;
      end
    end
  end
  assign busy = d_busy || draining;

  always_comb begin
    ev_add = '0; ev_step = '0; ev_reuse = '0;
    for (int l = 0; l < T; l++) begin
      ev_add   = ev_add   + $bits(ev_add)'(l_add[l]);
      ev_step  = ev_step  + $bits(ev_step)'(l_step[l]);
      ev_reuse = ev_reuse + $bits(ev_reuse)'(l_reuse[l]);
    end
  end
endmodule
