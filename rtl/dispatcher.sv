// dispatcher: issues the TransRows of a sub-tile, in Hamming order, to the
// T lanes of a TransArray unit.
//
// For each TransRow it looks up the node's prefix and lane in the Scoreboard
// Information (SI) and prunes the TransRow into its TranSparsity, TransRow
// XOR prefix: the input rows still to be added to the prefix result. The
// first TransRow of a node afterwards acts as the prefix of every later,
// identical one (TranSparsity 0: the result is reused as is). Path nodes of
// the SI (nodes without a TransRow of their own that carry a result to a
// suffix) are issued before any TransRow of their level or above.
// Each cycle it issues either one path node or a group of up to T
// consecutive TransRows of one level that go to distinct lanes, so every
// lane gets at most one op per cycle and keeps the order of its tree.
// All-zero TransRows contribute nothing and are dropped, up to T per cycle.
// If the SI names a prefix that has not been computed in this lane (an SI
// miss, possible with a static SI shared by many sub-tiles), the node falls
// back to the root and adds all its bits. Outliers (distance >= 4) come
// with the root as prefix from the Scoreboard and are handled the same way.
// XOR pruning, prefix reuse after the first dispatch and the SI miss
// follow the paper; the grouping rule and the miss fallback are this
// design's choices.
// Interface: 'start' begins with the sorted TransRows (s_val, s_idx, s_key)
// and the SI held stable; 'done' pulses after the last op was accepted.
module dispatcher
  import ta_pkg::*;
#(
  parameter int unsigned T        = 8,
  parameter int unsigned MAX_ROWS = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [T-1:0]                s_val [MAX_ROWS],
  input  logic [$clog2(MAX_ROWS)-1:0] s_idx [MAX_ROWS],
  input  logic [$clog2(T+2)-1:0]      s_key [MAX_ROWS],
  input  logic [T-1:0]                si_pre  [2**T],
  input  logic [$clog2(T)-1:0]        si_lane [2**T],
  input  logic                        si_virt [2**T],
  // one op port per lane
  output logic                        op_valid [T],
  input  logic                        op_ready [T],
  output logic [T-1:0]                op_node  [T],
  output logic [T-1:0]                op_pre   [T],
  output logic [T-1:0]                op_diff  [T],
  output logic                        op_real  [T],
  output logic [$clog2(MAX_ROWS)-1:0] op_row   [T],
  output logic                        busy,
  output logic                        done,
  output logic                        ev_miss,     // SI miss this cycle
  output logic                        ev_path      // path node issued this cycle
);
  localparam int unsigned NN = 2**T;
  localparam int unsigned IW = $clog2(MAX_ROWS);
  localparam int unsigned KW = $clog2(T+2);
  localparam int unsigned LW = $clog2(T);

  logic          active;
  logic [IW:0]   ptr;
  logic          ndone [NN];       // node already issued
  logic [LW-1:0] nlane [NN];       // lane it was issued to

  // Current level: that of the next TransRow, T+1 when none is left.
  logic [KW-1:0] cur_key;
  logic          rows_left;
  always_comb begin
    rows_left = (int'(ptr) < MAX_ROWS) && (s_key[ptr[IW-1:0]] <= KW'(T));
    cur_key   = rows_left ? s_key[ptr[IW-1:0]] : KW'(T + 1);
  end

  // Lowest pending path node at or below the current level.
  logic          vp_any;
  logic [T-1:0]  vp_node;
  always_comb begin
    vp_any  = 1'b0;
    vp_node = '0;
    for (int v = NN - 1; v >= 1; v--) begin
      if (si_virt[v] && !ndone[v] && popcount(16'(v)) <= int'(cur_key)) begin
        vp_any  = 1'b1;
        vp_node = T'(v);
      end
    end
  end

  // Group of TransRows issued this cycle.
  logic [T-1:0]  take;            // entry ptr+j issued or dropped
  logic [T-1:0]  used;            // lanes given an op
  logic [IW:0]   adv;             // entries consumed
  logic          miss_any;
  always_comb begin
    logic stop;
    int unsigned e;
    logic [T-1:0] v, p;
    logic [LW-1:0] ln;
    stop = 1'b0;
    e = 0; v = '0; p = '0; ln = '0;
    take = '0;
    used = '0;
    adv  = '0;
    miss_any = 1'b0;
    for (int l = 0; l < T; l++) begin
      op_valid[l] = 1'b0;
      op_node[l]  = '0;
      op_pre[l]   = '0;
      op_diff[l]  = '0;
      op_real[l]  = 1'b0;
      op_row[l]   = '0;
    end
    if (active && vp_any) begin
      ln = si_lane[vp_node];
      op_valid[ln] = 1'b1;
      op_node[ln]  = vp_node;
      op_pre[ln]   = si_pre[vp_node];
      op_diff[ln]  = vp_node ^ si_pre[vp_node];
    end else if (active && rows_left) begin
      for (int j = 0; j < T; j++) begin
        e = int'(ptr) + j;
        if (!stop) begin
          if (e >= MAX_ROWS || s_key[e] != cur_key) stop = 1'b1;
          else if (cur_key == '0) begin
            take[j] = 1'b1;                          // zero row: nothing to do
          end else begin
            v  = s_val[e];
            ln = si_lane[v];
            if (used[ln] || !op_ready[ln]) stop = 1'b1;
            else begin
              take[j]  = 1'b1;
              used[ln] = 1'b1;
              if (ndone[v]) p = v;                   // full result reuse
              else begin
                p = si_pre[v];
                if (p != '0 && !(ndone[p] && nlane[p] == ln)) begin
                  p = '0;                            // SI miss
                  miss_any = 1'b1;
                end
              end
              op_valid[ln] = 1'b1;
              op_node[ln]  = v;
              op_pre[ln]   = p;
              op_diff[ln]  = v ^ p;
              op_real[ln]  = 1'b1;
              op_row[ln]   = s_idx[e];
            end
          end
        end
      end
      for (int j = 0; j < T; j++) if (take[j]) adv = adv + 1'b1;
    end
  end

  assign ev_miss = miss_any;
  assign ev_path = active && vp_any && op_ready[si_lane[vp_node]];
  assign busy    = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      done   <= 1'b0;
      ptr    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active <= 1'b1;
        ptr    <= '0;
      end else if (active) begin
        if (!vp_any) ptr <= ptr + adv;
        if (!vp_any && !rows_left) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int v = 0; v < NN; v++) ndone[v] <= 1'b0;
    end else if (active) begin
      for (int l = 0; l < T; l++) begin
        if (op_valid[l] && op_ready[l]) begin
          ndone[op_node[l]] <= 1'b1;
          nlane[op_node[l]] <= LW'(l);
        end
      end
    end
  end
endmodule
