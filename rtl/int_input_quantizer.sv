// int_input_quantizer: converts one generator input element to the integer
// form used by the binarized network.
//
// The noise element z (a real number in [-1, 1)) is scaled by
// A = 2^(H-1) - 1 and rounded: zi = round(A * z). The class element y (one
// bit of the one-hot label) becomes yi = A * y. Both results fit in a signed
// H-bit integer. The scaling and rounding follow the published generator;
// the Q1.Z_FRAC fixed-point format of z and rounding of halves away from
// minus infinity (add one half, then floor) are this design's choices.
//
// Purely combinational: zi and yi follow z and y in the same cycle.
module int_input_quantizer #(
  parameter int unsigned H      = bdcgan_pkg::H_BITS,  // bits of zi, yi
  parameter int unsigned Z_FRAC = bdcgan_pkg::Z_FRAC   // fraction bits of z
) (
  input  logic signed [Z_FRAC:0] z,   // signed Q1.Z_FRAC, -1 <= z < 1
  input  logic                   y,   // one bit of the one-hot label
  output logic signed [H-1:0]    zi,  // round(A*z)
  output logic signed [H-1:0]    yi   // A*y
);
  localparam int unsigned A = (1 << (H - 1)) - 1;
  localparam int unsigned PW = Z_FRAC + H + 2;

  logic signed [PW-1:0] prod;
  logic signed [PW-1:0] rounded;

  always_comb begin
    prod    = PW'(z) * $signed(PW'(A));
    rounded = (prod + $signed(PW'(1) <<< (Z_FRAC - 1))) >>> Z_FRAC;
    zi      = rounded[H-1:0];
    yi      = y ? H'(A) : '0;
  end
endmodule
