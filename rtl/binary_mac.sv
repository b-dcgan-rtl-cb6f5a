// binary_mac: multiply-accumulate with a binarized weight.
//
// A weight of +1 is stored as bit 1 and -1 as bit 0, so the product of an
// integer input x and the weight is +x or -x and no multiplier is needed:
// acc <= acc + (w ? x : -x). This is the arithmetic of the binarized fully
// connected and transposed convolution layers. For binarized activations
// (x = +1 or -1) it is the usual XNOR-and-count.
//
// Timing: clr sets acc to zero on the next clock edge; en adds one term on
// the next clock edge. clr has priority. Synchronous active-low reset.
module binary_mac #(
  parameter int unsigned X_W   = 2,   // width of the signed input
  parameter int unsigned ACC_W = 24   // width of the accumulator
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    en,
  input  logic signed [X_W-1:0]   x,
  input  logic                    w,    // 1: +1, 0: -1
  output logic signed [ACC_W-1:0] acc
);
  logic signed [ACC_W-1:0] term;

  always_comb term = w ? ACC_W'(x) : -ACC_W'(x);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) acc <= '0;
    else if (en)       acc <= acc + term;
  end
endmodule
