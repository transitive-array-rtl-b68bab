// popcount_sorter: sorts the TransRows of one sub-tile into Hamming order.
//
// TransRows are written T per cycle: wr_addr selects a group of T
// consecutive row indices and wr_val[j] is the TransRow of index
// wr_addr * T + j. Each entry keeps its row index, which later names the output row and bit level it belongs
// to. 'start' sorts the first n_rows entries by PopCount with a bitonic
// network; entries at or beyond n_rows get a key of T+1 and sort to the end.
// Order within one PopCount is not defined, as no order is needed there.
// The network is time-multiplexed: one of its log2(N)(log2(N)+1)/2 stages
// runs per cycle with N/2 compare-exchange units, so 256 rows take 36
// stage cycles plus key loading and the registered 'done': 'done' pulses
// 39 cycles after 'start', once the sorted entries (s_val, s_idx, s_key)
// are stable; they stay until the next start.
// Using a bitonic sorter follows the paper; the stage-per-cycle schedule is
// this design's choice.
module popcount_sorter
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned MAX_ROWS = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [$clog2(MAX_ROWS/T)-1:0] wr_addr,
  input  logic [T-1:0]                wr_val [T],
  input  logic [$clog2(MAX_ROWS):0]   n_rows,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [T-1:0]                s_val [MAX_ROWS],
  output logic [$clog2(MAX_ROWS)-1:0] s_idx [MAX_ROWS],
  output logic [$clog2(T+2)-1:0]      s_key [MAX_ROWS]
);
  localparam int unsigned LN = $clog2(MAX_ROWS);
  localparam int unsigned KW = $clog2(T+2);
  localparam int unsigned IW = $clog2(MAX_ROWS);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_SORT} state_t;
  state_t state;

  logic [T-1:0]  raw_val [MAX_ROWS];
  logic [IW:0]   n_q;
  logic [$clog2(LN+1)-1:0] kexp;   // current block size is 2**kexp
  logic [$clog2(LN+1)-1:0] jexp;   // current compare distance is 2**jexp

  // Written TransRows.
  always_ff @(posedge clk) begin
    if (wr_en)
      for (int j = 0; j < T; j++) raw_val[IW'(wr_addr) * IW'(T) + IW'(j)] <= wr_val[j];
  end

  // One compare-exchange stage of the bitonic network, for every entry.
  logic [T-1:0]  nx_val [MAX_ROWS];
  logic [IW-1:0] nx_idx [MAX_ROWS];
  logic [KW-1:0] nx_key [MAX_ROWS];
  always_comb begin
    for (int i = 0; i < MAX_ROWS; i++) begin
      int unsigned p;
      logic up, lower, take_min, swap_needed;
      p       = i ^ (1 << jexp);
      up      = ((i >> kexp) & 1) == 0;     // ascending block
      lower   = (i < p);
      take_min = (lower == up);
      // The entry keeps the smaller key if take_min, else the larger one.
      swap_needed = take_min ? (s_key[p] < s_key[i]) : (s_key[p] > s_key[i]);
      if (swap_needed) begin
        nx_val[i] = s_val[p];
        nx_idx[i] = s_idx[p];
        nx_key[i] = s_key[p];
      end else begin
        nx_val[i] = s_val[i];
        nx_idx[i] = s_idx[i];
        nx_key[i] = s_key[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      kexp  <= '0;
      jexp  <= '0;
      n_q   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n_q   <= n_rows;
          state <= S_LOAD;
        end
        S_LOAD: begin
          kexp  <= 1;
          jexp  <= 0;
          state <= S_SORT;
        end
        S_SORT: begin
          if (jexp == 0) begin
            if (kexp == LN[$bits(kexp)-1:0]) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              kexp <= kexp + 1'b1;
              jexp <= kexp;
            end
          end else begin
            jexp <= jexp - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD) begin
      for (int i = 0; i < MAX_ROWS; i++) begin
        s_val[i] <= raw_val[i];
        s_idx[i] <= IW'(i);
        s_key[i] <= (i < int'(n_q)) ? KW'(popcount(16'(raw_val[i]))) : KW'(T + 1);
      end
    end else if (state == S_SORT) begin
      s_val <= nx_val;
      s_idx <= nx_idx;
      s_key <= nx_key;
    end
  end

  assign busy = (state != S_IDLE);

endmodule
