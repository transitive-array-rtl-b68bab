// suffix_translator: decodes a suffix bitmap into suffix node indices.
//
// A suffix of a node differs from it by one 0-to-1 bit flip, so bit b of a
// suffix bitmap stands for the node with bit b set. Bitmap bits where the
// node already holds a 1 name no node and are masked out of 'valid'.
// Combinational.
module suffix_translator #(
  parameter int unsigned T = 8
) (
  input  logic [T-1:0] node,
  input  logic [T-1:0] bitmap,
  output logic [T-1:0] suffixes [T],
  output logic [T-1:0] valid
);
  always_comb begin
    valid = bitmap & ~node;
    for (int b = 0; b < T; b++) suffixes[b] = node | (T'(1) << b);
  end
endmodule
