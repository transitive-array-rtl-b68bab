// trans_lane: one of the T parallel lanes of a TransArray unit.
//
// A lane holds m PPEs (one per input column) and its own slice of the
// distributed prefix buffer, one m-wide entry per Hasse node (2**T entries).
// Work arrives from the dispatcher as ops {node, prefix, TranSparsity, real
// TransRow?, row index} into a small queue. For an op the lane starts from
// the prefix result (0 for the root, node 0), adds the input row selected by
// each set bit of the TranSparsity, lowest bit first, one bit per cycle, and
// stores the node's result in its prefix buffer. A distance-1 op therefore
// takes one cycle; a longer one takes one cycle per bit. An op with an
// all-zero TranSparsity re-reads the stored result of its own node (a
// repeated TransRow). Ops of real TransRows emit the result towards the
// crossbar in their last cycle (res_valid/res_ready); path nodes only fill
// the prefix buffer. Since a node's prefix is always issued earlier to the
// same lane, results are read one cycle after they are written at the
// latest; the buffer is read combinationally.
// The input row for each bit is picked here by a T:1 multiplexer per column;
// this takes the place of the paper's Benes network between input FIFO and
// PPEs. Buffer organisation (full node range per lane) is this design's
// choice.
module trans_lane
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned M_COLS   = 32,
  parameter int unsigned MAX_ROWS = 256,
  parameter int unsigned QDEPTH   = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // ops from the dispatcher
  input  logic                              op_valid,
  output logic                              op_ready,
  input  logic [T-1:0]                      op_node,
  input  logic [T-1:0]                      op_pre,
  input  logic [T-1:0]                      op_diff,
  input  logic                              op_real,
  input  logic [$clog2(MAX_ROWS)-1:0]       op_row,
  // input sub-tile (T rows of m signed elements)
  input  logic signed [ACT_W-1:0]           x [T][M_COLS],
  // results towards the crossbar
  output logic                              res_valid,
  input  logic                              res_ready,
  output logic [$clog2(MAX_ROWS)-1:0]       res_row,
  output logic signed [PSUM_W-1:0]          res_val [M_COLS],
  // status / events
  output logic                              idle,
  output logic                              ev_add,     // PPE row active
  output logic                              ev_step,    // extra cycle of a multi-bit op
  output logic                              ev_reuse    // repeated TransRow, no add
);
  localparam int unsigned IW = $clog2(MAX_ROWS);
  localparam int unsigned OPW = 3 * T + 1 + IW;

  logic [OPW-1:0] q_din, q_dout;
  logic q_empty, q_full, q_pop;
  assign q_din    = {op_node, op_pre, op_diff, op_real, op_row};
  assign op_ready = !q_full;
  sync_fifo #(.W(OPW), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .push(op_valid && !q_full), .din(q_din), .pop(q_pop),
    .dout(q_dout), .empty(q_empty), .full(q_full));

  logic [T-1:0] h_node, h_pre, h_diff;
  logic h_real;
  logic [IW-1:0] h_row;
  assign {h_node, h_pre, h_diff, h_real, h_row} = q_dout;

  logic signed [PSUM_W-1:0] pbuf [2**T][M_COLS];   // distributed prefix buffer
  logic signed [PSUM_W-1:0] acc  [M_COLS];         // running sum of a multi-bit op
  logic                     first;                 // first cycle of the head op
  logic [T-1:0]             rem;                   // TranSparsity bits still to add

  logic [T-1:0]             cur_diff, nxt_diff;
  logic [$clog2(T)-1:0]     bsel;
  logic                     finishing, stall;
  logic signed [PSUM_W-1:0] base [M_COLS];
  logic signed [PSUM_W-1:0] sum  [M_COLS];

  always_comb begin
    cur_diff = first ? h_diff : rem;
    bsel     = $clog2(T)'(lsb_index(16'(cur_diff)));
    nxt_diff = cur_diff & ~(T'(1) << bsel);
    for (int c = 0; c < M_COLS; c++) begin
      if (!first)              base[c] = acc[c];
      else if (h_diff == '0)   base[c] = pbuf[h_node][c];
      else if (h_pre == '0)    base[c] = '0;
      else                     base[c] = pbuf[h_pre][c];
    end
  end

  for (genvar c = 0; c < M_COLS; c++) begin : g_ppe
    ppe #(.PSUM_W(PSUM_W), .ACT_W(ACT_W)) u_ppe (
      .prefix(base[c]), .in_elem(x[bsel][c]), .suffix(sum[c]));
  end

  always_comb begin
    finishing = !q_empty && (nxt_diff == '0);
    res_valid = finishing && h_real;
    stall     = res_valid && !res_ready;
    q_pop     = finishing && !stall;
    res_row   = h_row;
    for (int c = 0; c < M_COLS; c++) res_val[c] = (cur_diff == '0) ? base[c] : sum[c];
    idle      = q_empty;
    ev_add    = !q_empty && !stall && cur_diff != '0;
    ev_step   = !q_empty && !stall && !first;
    ev_reuse  = q_pop && first && h_diff == '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first <= 1'b1;
      rem   <= '0;
    end else if (!q_empty && !stall) begin
      first <= finishing;
      rem   <= nxt_diff;
    end
  end

  always_ff @(posedge clk) begin
    if (!q_empty && !stall) begin
      for (int c = 0; c < M_COLS; c++) acc[c] <= sum[c];
      if (finishing && cur_diff != '0)
        for (int c = 0; c < M_COLS; c++) pbuf[h_node][c] <= sum[c];
    end
  end
endmodule
