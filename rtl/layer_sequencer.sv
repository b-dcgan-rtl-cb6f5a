// layer_sequencer: runs the generator's layers one after another.
//
// The generator computes one image as a chain of six layers, each waiting
// for the complete output of the one before: FC1, FC2, FC3, FC4 (binarized
// fully connected), DC1 (binarized transposed convolution) and DC2 (the
// real-valued last transposed convolution, followed by the sigmoid). The
// order is the published network's; running the layers strictly one at a
// time is this design's choice.
//
// Interface and timing
//   start      pulse in idle: in_load pulses in the same cycle (the top
//              latches the quantized inputs) and FC1 is started on the next
//   eng_start  one-cycle start pulse to engine k (0 = FC1 ... 5 = DC2)
//   eng_done   done pulse from engine k; the next engine starts one cycle
//              later
//   layer      the layer now running (selects the input path in the top)
//   done       pulse one cycle after DC2 reports done; busy until then
module layer_sequencer
  import bdcgan_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       in_load,
  output logic [5:0] eng_start,
  input  logic [5:0] eng_done,
  output layer_e     layer,
  output logic       busy,
  output logic       done
);
  logic kick;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      layer <= L_IDLE;
      kick  <= 1'b0;
      done  <= 1'b0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      if (layer == L_IDLE) begin
        if (start) begin
          layer <= L_FC1;
          kick  <= 1'b1;
        end
      end else if (eng_done[int'(layer) - 1]) begin
        if (layer == L_DC2) begin
          layer <= L_IDLE;
          done  <= 1'b1;
        end else begin
          layer <= layer_e'(int'(layer) + 1);
          kick  <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    in_load   = (layer == L_IDLE) && start;
    busy      = (layer != L_IDLE);
    eng_start = '0;
    if (kick && layer != L_IDLE) eng_start[int'(layer) - 1] = 1'b1;
  end

  a_done_from_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (eng_done != '0) |-> busy) else $error("engine done while idle");
endmodule
