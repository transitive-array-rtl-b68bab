// psum_crossbar: moves TransRow results from the T lanes to the T APE banks.
//
// The output buffer is split into T banks by output row (bank = row mod T).
// Each cycle up to T lane results arrive; two of them may target the same
// bank, a bank conflict. Every lane therefore feeds a small queue, and each
// bank takes, per cycle, the head of one queue that targets it, chosen
// round-robin. The row index of a TransRow is decoded here into output row,
// bit level (shift) and sign level: with 8-bit weights (wbits4 = 0) row =
// idx/8 and level = idx mod 8, with 4-bit weights row = idx/4 and level =
// idx mod 4; the top level of a two's-complement weight is subtracted.
// A result enters a queue the cycle it is produced and can reach its bank
// in the next cycle. The crossbar with queues follows the paper; the
// banking rule, queue depth and row-index layout are this design's choices.
module psum_crossbar
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned M_COLS   = 32,
  parameter int unsigned MAX_ROWS = 256,
  parameter int unsigned QDEPTH   = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wbits4,
  // from the lanes
  input  logic                               in_valid [T],
  output logic                               in_ready [T],
  input  logic [$clog2(MAX_ROWS)-1:0]        in_row   [T],
  input  logic signed [PSUM_W-1:0]           in_val   [T][M_COLS],
  // to the APE banks
  output logic                               b_valid  [T],
  output logic [$clog2(MAX_ROWS/(4*T))-1:0]  b_row    [T],   // row within the bank
  output logic [2:0]                         b_shift  [T],
  output logic                               b_neg    [T],
  output logic signed [PSUM_W-1:0]           b_val    [T][M_COLS],
  output logic                               empty,
  output logic                               ev_conflict
);
  localparam int unsigned IW  = $clog2(MAX_ROWS);
  localparam int unsigned LW  = $clog2(T);
  localparam int unsigned BRW = $clog2(MAX_ROWS/(4*T));
  localparam int unsigned DW  = IW + M_COLS * PSUM_W;

  logic [DW-1:0] q_din [T], q_dout [T];
  logic          q_empty [T], q_full [T], q_pop [T];
  logic [IW-1:0] h_idx [T];
  logic [IW-1:0] h_orow [T];
  logic [LW-1:0] h_bank [T];

  for (genvar l = 0; l < T; l++) begin : g_q
    always_comb begin
      q_din[l] = {in_row[l], {M_COLS*PSUM_W{1'b0}}};
      for (int c = 0; c < M_COLS; c++) q_din[l][c*PSUM_W +: PSUM_W] = in_val[l][c];
    end
    assign in_ready[l] = !q_full[l];
    sync_fifo #(.W(DW), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n, .push(in_valid[l] && !q_full[l]), .din(q_din[l]), .pop(q_pop[l]),
      .dout(q_dout[l]), .empty(q_empty[l]), .full(q_full[l]));
    always_comb begin
      h_idx[l]  = q_dout[l][DW-1 -: IW];
      h_orow[l] = wbits4 ? (h_idx[l] >> 2) : (h_idx[l] >> 3);
      h_bank[l] = h_orow[l][LW-1:0];
    end
  end

  // Round-robin pointer per bank.
  logic [LW-1:0] rr [T];
  logic [LW-1:0] gsel [T];
  logic          gnt [T];

  always_comb begin
    logic [LW-1:0] cand;
    cand = '0;
    for (int l = 0; l < T; l++) q_pop[l] = 1'b0;
    ev_conflict = 1'b0;
    for (int b = 0; b < T; b++) begin
      gnt[b]  = 1'b0;
      gsel[b] = '0;
      for (int k = 0; k < T; k++) begin
        cand = LW'(int'(rr[b]) + k);
        if (!gnt[b] && !q_empty[cand] && h_bank[cand] == LW'(b)) begin
          gnt[b]  = 1'b1;
          gsel[b] = cand;
        end
      end
      if (gnt[b]) q_pop[gsel[b]] = 1'b1;
    end
    for (int l = 0; l < T; l++) if (!q_empty[l] && !q_pop[l]) ev_conflict = 1'b1;
    for (int b = 0; b < T; b++) begin
      b_valid[b] = gnt[b];
      b_row[b]   = BRW'(h_orow[gsel[b]] >> LW);
      b_shift[b] = wbits4 ? {1'b0, h_idx[gsel[b]][1:0]} : h_idx[gsel[b]][2:0];
      b_neg[b]   = wbits4 ? (h_idx[gsel[b]][1:0] == 2'd3) : (h_idx[gsel[b]][2:0] == 3'd7);
      for (int c = 0; c < M_COLS; c++) b_val[b][c] = q_dout[gsel[b]][c*PSUM_W +: PSUM_W];
    end
    empty = 1'b1;
    for (int l = 0; l < T; l++) if (!q_empty[l]) empty = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < T; b++) rr[b] <= '0;
    end else begin
      for (int b = 0; b < T; b++) if (gnt[b]) rr[b] <= gsel[b] + 1'b1;
    end
  end
endmodule
