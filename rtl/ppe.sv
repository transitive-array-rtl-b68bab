// ppe: Prefix Processing Element.
//
// One adder: the suffix result of a node is its prefix result plus one input
// element, the element selected by a set bit of the TranSparsity (TransRow
// XOR prefix). The prefix sum is PSUM_W = 12 bits and the input ACT_W = 8
// bits, both signed; the input is sign-extended. Twelve bits hold the sum of
// up to eight 8-bit inputs, so a prefix chain within one T = 8 sub-tile
// cannot overflow. Purely combinational; the lane registers the result in its
// prefix buffer. Widths follow the paper; signed arithmetic is this design's
// reading of its two's-complement convention.
module ppe #(
  parameter int unsigned PSUM_W = 12,
  parameter int unsigned ACT_W  = 8
) (
  input  logic signed [PSUM_W-1:0] prefix,
  input  logic signed [ACT_W-1:0]  in_elem,
  output logic signed [PSUM_W-1:0] suffix
);
  always_comb suffix = prefix + PSUM_W'(in_elem);
endmodule
