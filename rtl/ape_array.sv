// ape_array: the T x m APE array with the output buffer of one unit.
//
// Bank b holds the output rows r with r mod T = b, MAX_ROWS/(4T) rows of m
// 24-bit accumulators each (64 rows in all: enough for 4-bit weights, where
// a 256-row sub-tile covers 64 output rows; 8-bit weights use 32). Each
// bank's m APEs take one crossbar result per cycle and read-modify-write
// one row: acc += (+/-) psum << shift. Different banks work in parallel.
// 'clear' zeroes the buffer; results of later sub-tiles along K keep
// accumulating into it. rd_row reads one whole output row combinationally.
// The 24-bit APE array of the paper's shape; the banked buffer is this
// design's choice.
module ape_array
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned M_COLS   = 32,
  parameter int unsigned MAX_ROWS = 256
) (
  input  logic                               clk,
  input  logic                               clear,
  input  logic                               b_valid  [T],
  input  logic [$clog2(MAX_ROWS/(4*T))-1:0]  b_row    [T],
  input  logic [2:0]                         b_shift  [T],
  input  logic                               b_neg    [T],
  input  logic signed [PSUM_W-1:0]           b_val    [T][M_COLS],
  input  logic [$clog2(MAX_ROWS/4)-1:0]      rd_row,
  output logic signed [ACC_W-1:0]            rd_data  [M_COLS]
);
  localparam int unsigned BR = MAX_ROWS / (4 * T);
  localparam int unsigned LW = $clog2(T);

  logic signed [ACC_W-1:0] obuf [T][BR][M_COLS];
  logic signed [ACC_W-1:0] nxt  [T][M_COLS];

  for (genvar b = 0; b < T; b++) begin : g_bank
    for (genvar c = 0; c < M_COLS; c++) begin : g_col
      ape #(.PSUM_W(PSUM_W), .ACC_W(ACC_W)) u_ape (
        .acc_in(obuf[b][b_row[b]][c]), .psum(b_val[b][c]), .shift(b_shift[b]),
        .negate(b_neg[b]), .acc_out(nxt[b][c]));
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int b = 0; b < T; b++)
        for (int r = 0; r < BR; r++)
          for (int c = 0; c < M_COLS; c++) obuf[b][r][c] <= '0;
    end else begin
      for (int b = 0; b < T; b++)
        if (b_valid[b]) obuf[b][b_row[b]] <= nxt[b];
    end
  end

  always_comb
    for (int c = 0; c < M_COLS; c++) rd_data[c] = obuf[rd_row[LW-1:0]][$clog2(BR)'(rd_row >> LW)][c];
endmodule
