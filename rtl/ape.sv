// ape: Accumulation Processing Element.
//
// Adds the result of one TransRow into a 24-bit output accumulator. The
// TransRow result is a sum of inputs for a single bit level of the weights,
// so it is shifted left by that bit level first. For the most significant
// (sign) bit level of a two's-complement weight the shifted value is
// subtracted instead of added. The accumulator itself is the output-buffer
// entry held by the APE array; this module is the combinational adder.
// Widths (12-bit in, 24-bit accumulator) follow the paper; the shift/negate
// placement inside the APE is this design's choice.
module ape #(
  parameter int unsigned PSUM_W = 12,
  parameter int unsigned ACC_W  = 24
) (
  input  logic signed [ACC_W-1:0]  acc_in,
  input  logic signed [PSUM_W-1:0] psum,
  input  logic        [2:0]        shift,
  input  logic                     negate,
  output logic signed [ACC_W-1:0]  acc_out
);
  logic signed [ACC_W-1:0] shifted;
  always_comb begin
    shifted = ACC_W'(psum) <<< shift;
    acc_out = negate ? acc_in - shifted : acc_in + shifted;
  end
endmodule
