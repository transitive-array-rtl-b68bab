// ta_pkg: constants and helper functions shared by the Transitive Array RTL.
//
// A TransRow is a T-bit binary row of a bit-sliced weight sub-tile. Its
// value is also the index of its node in the Hasse graph of all T-bit values,
// and its PopCount is the node's level. Defaults follow the main
// configuration of the design: T = 8-bit TranSparsity, m = 32 input columns,
// at most 256 TransRows per sub-tile, 12-bit prefix sums, 24-bit accumulators.
package ta_pkg;

  localparam int unsigned ACT_W        = 8;    // input (activation) width
  localparam int unsigned PSUM_W       = 12;   // PPE adder width
  localparam int unsigned ACC_W        = 24;   // APE accumulator width
  localparam int unsigned MAX_DIST     = 4;    // prefix bitmaps kept per node

  // Distance code used by the Scoreboard for "no prefix found" (+infinity).
  localparam logic [2:0]  DIST_INF     = 3'd7;

  // Number of ones in a value of up to 16 bits.
  function automatic int unsigned popcount(input logic [15:0] v);
    return int'($countones(v));
  endfunction

  // Position of the highest set bit (0 when none is set).
  function automatic int unsigned msb_index(input logic [15:0] v);
    int unsigned r;
    r = 0;
    for (int i = 0; i < 16; i++) if (v[i]) r = i;
    return r;
  endfunction

  // Position of the lowest set bit (0 when none is set).
  function automatic int unsigned lsb_index(input logic [15:0] v);
    int unsigned r;
    r = 0;
    for (int i = 15; i >= 0; i--) if (v[i]) r = i;
    return r;
  endfunction

endpackage
