// bbna_threshold: binarized batch normalization plus activation.
//
// Batch normalization followed by the sign activation is folded into one
// integer comparison: the output is +1 (bit 1) when the integer
// pre-activation a is at least the threshold tau, and -1 (bit 0)
// otherwise. tau is the rounded root of the trained batch normalization,
// tau = round(mu - B / (gamma * i)), computed off line and loaded as a
// constant. This assumes gamma * i > 0, as the published formula does.
//
// Purely combinational.
module bbna_threshold #(
  parameter int unsigned ACC_W = 24
) (
  input  logic signed [ACC_W-1:0] a,
  input  logic signed [ACC_W-1:0] tau,
  output logic                    ab   // 1: +1, 0: -1
);
  always_comb ab = (a >= tau);
endmodule
