// sigmoid_unit: output activation of the generator.
//
// Maps the fixed-point pre-activation of the last transposed convolution
// to an 8-bit pixel, pix = min(255, floor(256 * sigmoid(x))). The sigmoid
// itself is approximated piecewise linearly with slopes that are powers of
// two (the PLAN approximation), so only shifts and adds are needed:
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
// and sigmoid(x) = 1 - sigmoid(|x|) for x < 0. The published network
// names the sigmoid only; the approximation and the pixel format are this
// design's choices. The largest error of the approximation is about 0.019.
//
// Purely combinational.
module sigmoid_unit #(
  parameter int unsigned X_W  = bdcgan_pkg::ACC2_W,  // width of x
  parameter int unsigned FRAC = bdcgan_pkg::W2_FRAC, // fraction bits of x
  parameter int unsigned P_W  = bdcgan_pkg::PIX_W    // pixel width
) (
  input  logic signed [X_W-1:0] x,
  output logic [P_W-1:0]        pix
);
  localparam int unsigned YW = FRAC + 4;
  localparam logic [YW-1:0] ONE = YW'(1) << FRAC;

  logic [X_W-1:0] ax;   // |x|
  logic [YW-1:0]  y;    // sigmoid(|x|), unsigned Q.FRAC
  logic [YW-1:0]  ys;   // sigmoid(x)
  logic [YW-1:0]  scaled;

  always_comb begin
    ax = x[X_W-1] ? X_W'(-x) : X_W'(x);
    if (ax >= X_W'(5) << FRAC)
      y = ONE;
    else if (ax >= X_W'(19) << (FRAC - 3))           // 2.375
      y = YW'(ax >> 5) + YW'(27) * (ONE >> 5);        // 0.84375 = 27/32
    else if (ax >= X_W'(1) << FRAC)
      y = YW'(ax >> 3) + YW'(5) * (ONE >> 3);         // 0.625 = 5/8
    else
      y = YW'(ax >> 2) + (ONE >> 1);
    ys = x[X_W-1] ? ONE - y : y;
    scaled = ys >> (FRAC - P_W);
    pix = (scaled > YW'((1 << P_W) - 1)) ? P_W'((1 << P_W) - 1) : scaled[P_W-1:0];
  end
endmodule
