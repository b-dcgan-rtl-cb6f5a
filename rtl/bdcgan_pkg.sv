// bdcgan_pkg: sizes and shared types of the binarized DCGAN generator.
//
// The layer sizes are the network of the generator in its main
// configuration (scenario S3-1): inputs z (100) and a one-hot class label
// y (10), three fully connected layers of 600 units, one of 64x7x7 units,
// a 5x5 transposed convolution to 64 channels of 14x14, and a 5x5
// transposed convolution to one 28x28 channel followed by a sigmoid.
// The label y is concatenated to the input of the first and of the fourth
// fully connected layer and, broadcast over the spatial positions, to the
// input of each transposed convolution.
//
// Widths of accumulators, thresholds and fixed-point numbers are not part
// of the published network; they are this implementation's choice.
package bdcgan_pkg;

  // Network sizes (published).
  localparam int unsigned Z_DIM    = 100;  // length of z
  localparam int unsigned Y_DIM    = 10;   // number of classes, length of y
  localparam int unsigned FC_UNITS = 600;  // units of each hidden FC layer
  localparam int unsigned DEC_CH   = 64;   // channels of the 7x7 and 14x14 maps
  localparam int unsigned DEC_HW   = 7;    // side of the first feature map
  localparam int unsigned KSIZE    = 5;    // transposed convolution kernel side
  localparam int unsigned KPAD     = 2;    // padding of the transposed convolutions

  // Integer input: A = 2^(H-1) - 1. H = 2 gives A = 1 (scenario S3-1).
  localparam int unsigned H_BITS   = 2;

  // Implementation choices.
  localparam int unsigned LANES    = 8;    // output units computed in parallel
  localparam int unsigned ACC_W    = 24;   // accumulator / threshold width
  localparam int unsigned W2_W     = 16;   // fixed-point weight width of Deconv-2
  localparam int unsigned W2_FRAC  = 12;   // fraction bits of those weights
  localparam int unsigned ACC2_W   = 40;   // accumulator width of Deconv-2
  localparam int unsigned Z_FRAC   = 15;   // z is signed Q1.15
  localparam int unsigned PIX_W    = 8;    // output pixel: sigmoid * 256, saturated

  // Layer being executed; also selects the input read path in the top.
  typedef enum logic [2:0] {
    L_IDLE = 3'd0,
    L_FC1  = 3'd1,
    L_FC2  = 3'd2,
    L_FC3  = 3'd3,
    L_FC4  = 3'd4,
    L_DC1  = 3'd5,
    L_DC2  = 3'd6
  } layer_e;

  // Target of a parameter load (weights and thresholds).
  typedef enum logic [3:0] {
    P_FC1_W  = 4'd0,
    P_FC1_T  = 4'd1,
    P_FC2_W  = 4'd2,
    P_FC2_T  = 4'd3,
    P_FC3_W  = 4'd4,
    P_FC3_T  = 4'd5,
    P_FC4_W  = 4'd6,
    P_FC4_T  = 4'd7,
    P_DC1_W  = 4'd8,
    P_DC1_T  = 4'd9,
    P_DC2_W  = 4'd10
  } param_sel_e;

endpackage
