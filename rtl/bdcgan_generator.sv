// bdcgan_generator: generator of the binarized DCGAN (B-DCGAN), in the
// configuration with integer inputs, binarized encoder and binarized first
// decoder layer, and a real-valued last layer (scenario S3-1).
//
// From a noise vector z and a one-hot class label y it produces one 28x28
// 8-bit image. The network (published sizes):
//   [zi ; yi] (110)  -> B-FC 600 -> B-BNA -> B-FC 600 -> B-BNA
//                    -> B-FC 600 -> B-BNA
//   [a ; yi]  (610)  -> B-FC 64x7x7 -> B-BNA           (reshaped 64x7x7)
//   [a ; yi]  (74x7x7)  -> B-Deconv 64x5x5, stride 2 -> B-BNA  (64x14x14)
//   [a ; yi]  (74x14x14) -> Deconv 1x5x5, stride 2 (fixed-point weights)
//                    -> sigmoid -> 28x28 pixels
// where zi = round(A*z), yi = A*y, A = 2^(H-1)-1, every binarized
// activation is +1 or -1 and yi is concatenated to the channels of a
// feature map by repeating it at every pixel.
//
// Structure. An input quantizer per input element, four bfc_layer engines,
// two deconv_layer engines and a sigmoid_unit, run one layer at a time by
// the layer_sequencer. Binarized activations are kept as bit vectors in
// registers (1 = +1); one registered read multiplexer serves the active
// engine, which sees every input as a small signed integer: the +1/-1 of
// a stored bit or an element of zi or yi. The FC4 output unit index
// c*49 + y*7 + x is channel c, row y, column x of the 7x7 map. All of this
// arrangement is this design's choice; the published work generated its
// circuit with a high-level synthesis tool and gives only the network.
//
// Interface and timing
//   ld_we/ld_sel/ld_addr/ld_data  parameter load, one word per cycle, only
//          while idle; layouts are those of bfc_layer and deconv_layer
//          (weights: LANES bits per word, DC2: one W2_W-bit weight;
//          thresholds: one ACC_W-bit value per unit or channel)
//   start  pulse while idle; z and y_onehot are sampled in that cycle
//   pix_valid/pix_addr/pix_data  the 784 pixels, in raster order
//          (pix_addr = row*28 + column), one every 74*9+2 cycles
//   done   pulse after the last pixel; busy from start to done
// At the default sizes one image takes 1,909,748 cycles from the start
// cycle to the done pulse (see the README for the formula).
module bdcgan_generator
  import bdcgan_pkg::*;
#(
  parameter int unsigned Z_DIM    = bdcgan_pkg::Z_DIM,
  parameter int unsigned Y_DIM    = bdcgan_pkg::Y_DIM,
  parameter int unsigned FC_UNITS = bdcgan_pkg::FC_UNITS,
  parameter int unsigned DEC_CH   = bdcgan_pkg::DEC_CH,
  parameter int unsigned DEC_HW   = bdcgan_pkg::DEC_HW,
  parameter int unsigned H        = bdcgan_pkg::H_BITS,
  parameter int unsigned LANES    = bdcgan_pkg::LANES,
  localparam int unsigned N1_IN   = Z_DIM + Y_DIM,
  localparam int unsigned N4_IN   = FC_UNITS + Y_DIM,
  localparam int unsigned N4_OUT  = DEC_CH * DEC_HW * DEC_HW,
  localparam int unsigned C_DC    = DEC_CH + Y_DIM,
  localparam int unsigned H1      = 2 * DEC_HW,
  localparam int unsigned H2      = 4 * DEC_HW,
  localparam int unsigned PIX_AW  = $clog2(H2 * H2),
  localparam int unsigned LD_AW   = 24,
  localparam int unsigned LD_W    = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // parameter load
  input  logic                       ld_we,
  input  param_sel_e                 ld_sel,
  input  logic [LD_AW-1:0]           ld_addr,
  input  logic [LD_W-1:0]            ld_data,
  // generation
  input  logic                       start,
  input  logic signed [Z_FRAC:0]     z [Z_DIM],
  input  logic [Y_DIM-1:0]           y_onehot,
  output logic                       busy,
  output logic                       done,
  output logic                       pix_valid,
  output logic [PIX_AW-1:0]          pix_addr,
  output logic [PIX_W-1:0]           pix_data
);
  typedef logic signed [H-1:0] act_t;

  // ---------------------------------------------------------------- control
  layer_e     layer;
  logic       in_load;
  logic [5:0] eng_start, eng_done;

  layer_sequencer u_seq (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .in_load   (in_load),
    .eng_start (eng_start),
    .eng_done  (eng_done),
    .layer     (layer),
    .busy      (busy),
    .done      (done)
  );

  // ------------------------------------------------------- integer inputs
  act_t zi_q [Z_DIM];
  act_t yi_q [Y_DIM];
  act_t zi_d [Z_DIM];
  act_t yi_d [Y_DIM];
  localparam int unsigned NQ = (Z_DIM > Y_DIM) ? Z_DIM : Y_DIM;

  for (genvar k = 0; k < NQ; k++) begin : g_quant
    act_t zq, yq;
    int_input_quantizer #(.H(H), .Z_FRAC(Z_FRAC)) u_q (
      .z  ((k < Z_DIM) ? z[k % Z_DIM] : '0),
      .y  ((k < Y_DIM) ? y_onehot[k % Y_DIM] : 1'b0),
      .zi (zq),
      .yi (yq)
    );
    if (k < Z_DIM) begin : g_z
      assign zi_d[k] = zq;
    end
    if (k < Y_DIM) begin : g_y
      assign yi_d[k] = yq;
    end
  end

  always_ff @(posedge clk) begin
    if (in_load) begin
      zi_q <= zi_d;
      yi_q <= yi_d;
    end
  end

  // ----------------------------------------------------- activation store
  logic [FC_UNITS-1:0]     act1, act2, act3;
  logic [N4_OUT-1:0]       act4;
  logic [DEC_CH*H1*H1-1:0] act5;

  function automatic act_t pm1(input logic b);
    return b ? act_t'(1) : act_t'(-1);
  endfunction

  // ---------------------------------------------------------- FC engines
  // address widths of the parameter memories
  localparam int unsigned WA1 = $clog2((FC_UNITS / LANES) * N1_IN);
  localparam int unsigned WA2 = $clog2((FC_UNITS / LANES) * FC_UNITS);
  localparam int unsigned WA4 = $clog2((N4_OUT / LANES) * N4_IN);
  localparam int unsigned TA2 = $clog2(FC_UNITS);
  localparam int unsigned TA4 = $clog2(N4_OUT);
  localparam int unsigned WD1 = $clog2((DEC_CH / LANES) * C_DC * KSIZE * KSIZE);
  localparam int unsigned TD1 = $clog2(DEC_CH);
  localparam int unsigned WD2 = $clog2(C_DC * KSIZE * KSIZE);
  localparam int unsigned A1 = $clog2(N1_IN);
  localparam int unsigned A2 = $clog2(FC_UNITS);
  localparam int unsigned A4 = $clog2(N4_IN);
  localparam int unsigned G1 = (FC_UNITS / LANES > 1) ? $clog2(FC_UNITS / LANES) : 1;
  localparam int unsigned G4 = (N4_OUT / LANES > 1) ? $clog2(N4_OUT / LANES) : 1;

  logic [3:0]         fc_rd, fc_we;
  logic [A1-1:0]      fc1_addr;
  logic [A2-1:0]      fc2_addr, fc3_addr;
  logic [A4-1:0]      fc4_addr;
  logic [G1-1:0]      fc1_grp, fc2_grp, fc3_grp;
  logic [G4-1:0]      fc4_grp;
  logic [LANES-1:0]   fc1_bits, fc2_bits, fc3_bits, fc4_bits;
  act_t               rd_data;
  logic [3:0]         fc_busy;

  bfc_layer #(.N_IN(N1_IN), .N_OUT(FC_UNITS), .LANES(LANES), .X_W(H), .ACC_W(ACC_W)) u_fc1 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[0]), .busy(fc_busy[0]), .done(eng_done[0]),
    .in_rd(fc_rd[0]), .in_addr(fc1_addr), .in_data(rd_data),
    .out_we(fc_we[0]), .out_grp(fc1_grp), .out_bits(fc1_bits),
    .w_we(ld_we && ld_sel == P_FC1_W), .w_addr(ld_addr[WA1-1:0]), .w_data(ld_data[LANES-1:0]),
    .t_we(ld_we && ld_sel == P_FC1_T), .t_addr(ld_addr[TA2-1:0]), .t_data(ld_data[ACC_W-1:0]));

  bfc_layer #(.N_IN(FC_UNITS), .N_OUT(FC_UNITS), .LANES(LANES), .X_W(H), .ACC_W(ACC_W)) u_fc2 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[1]), .busy(fc_busy[1]), .done(eng_done[1]),
    .in_rd(fc_rd[1]), .in_addr(fc2_addr), .in_data(rd_data),
    .out_we(fc_we[1]), .out_grp(fc2_grp), .out_bits(fc2_bits),
    .w_we(ld_we && ld_sel == P_FC2_W), .w_addr(ld_addr[WA2-1:0]), .w_data(ld_data[LANES-1:0]),
    .t_we(ld_we && ld_sel == P_FC2_T), .t_addr(ld_addr[TA2-1:0]), .t_data(ld_data[ACC_W-1:0]));

  bfc_layer #(.N_IN(FC_UNITS), .N_OUT(FC_UNITS), .LANES(LANES), .X_W(H), .ACC_W(ACC_W)) u_fc3 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[2]), .busy(fc_busy[2]), .done(eng_done[2]),
    .in_rd(fc_rd[2]), .in_addr(fc3_addr), .in_data(rd_data),
    .out_we(fc_we[2]), .out_grp(fc3_grp), .out_bits(fc3_bits),
    .w_we(ld_we && ld_sel == P_FC3_W), .w_addr(ld_addr[WA2-1:0]), .w_data(ld_data[LANES-1:0]),
    .t_we(ld_we && ld_sel == P_FC3_T), .t_addr(ld_addr[TA2-1:0]), .t_data(ld_data[ACC_W-1:0]));

  bfc_layer #(.N_IN(N4_IN), .N_OUT(N4_OUT), .LANES(LANES), .X_W(H), .ACC_W(ACC_W)) u_fc4 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[3]), .busy(fc_busy[3]), .done(eng_done[3]),
    .in_rd(fc_rd[3]), .in_addr(fc4_addr), .in_data(rd_data),
    .out_we(fc_we[3]), .out_grp(fc4_grp), .out_bits(fc4_bits),
    .w_we(ld_we && ld_sel == P_FC4_W), .w_addr(ld_addr[WA4-1:0]), .w_data(ld_data[LANES-1:0]),
    .t_we(ld_we && ld_sel == P_FC4_T), .t_addr(ld_addr[TA4-1:0]), .t_data(ld_data[ACC_W-1:0]));

  // ------------------------------------------------------- deconv engines
  localparam int unsigned CA  = $clog2(C_DC);
  localparam int unsigned HA1 = $clog2(DEC_HW);
  localparam int unsigned HA2 = $clog2(H1);
  localparam int unsigned HB1 = $clog2(H1);
  localparam int unsigned HB2 = $clog2(H2);
  localparam int unsigned GD1 = (DEC_CH / LANES > 1) ? $clog2(DEC_CH / LANES) : 1;

  logic [1:0]                     dc_rd, dc_we, dc_busy;
  logic [CA-1:0]                  dc1_c, dc2_c;
  logic [HA1-1:0]                 dc1_y, dc1_x;
  logic [HA2-1:0]                 dc2_y, dc2_x;
  logic [GD1-1:0]                 dc1_grp;
  logic                           dc2_grp;
  logic [HB1-1:0]                 dc1_oy, dc1_ox;
  logic [HB2-1:0]                 dc2_oy, dc2_ox;
  logic [LANES-1:0]               dc1_bits;
  logic [LANES-1:0][ACC_W-1:0]    dc1_acc;
  logic                           dc2_bits;
  logic [0:0][ACC2_W-1:0]         dc2_acc;

  deconv_layer #(.C_IN(C_DC), .C_OUT(DEC_CH), .H_IN(DEC_HW), .LANES(LANES), .X_W(H),
                 .W_W(1), .ACC_W(ACC_W), .HAS_BNA(1'b1)) u_dc1 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[4]), .busy(dc_busy[0]), .done(eng_done[4]),
    .in_rd(dc_rd[0]), .in_c(dc1_c), .in_y(dc1_y), .in_x(dc1_x), .in_data(rd_data),
    .out_we(dc_we[0]), .out_grp(dc1_grp), .out_y(dc1_oy), .out_x(dc1_ox),
    .out_bits(dc1_bits), .out_acc(dc1_acc),
    .w_we(ld_we && ld_sel == P_DC1_W), .w_addr(ld_addr[WD1-1:0]), .w_data(ld_data[LANES-1:0]),
    .t_we(ld_we && ld_sel == P_DC1_T), .t_addr(ld_addr[TD1-1:0]), .t_data(ld_data[ACC_W-1:0]));

  deconv_layer #(.C_IN(C_DC), .C_OUT(1), .H_IN(H1), .LANES(1), .X_W(H),
                 .W_W(W2_W), .ACC_W(ACC2_W), .HAS_BNA(1'b0)) u_dc2 (
    .clk(clk), .rst_n(rst_n), .start(eng_start[5]), .busy(dc_busy[1]), .done(eng_done[5]),
    .in_rd(dc_rd[1]), .in_c(dc2_c), .in_y(dc2_y), .in_x(dc2_x), .in_data(rd_data),
    .out_we(dc_we[1]), .out_grp(dc2_grp), .out_y(dc2_oy), .out_x(dc2_ox),
    .out_bits(dc2_bits), .out_acc(dc2_acc),
    .w_we(ld_we && ld_sel == P_DC2_W), .w_addr(ld_addr[WD2-1:0]), .w_data(ld_data[W2_W-1:0]),
    .t_we(1'b0), .t_addr('0), .t_data('0));

  // ------------------------------------------------- input read multiplexer
  // One registered read serves whichever engine is running; a channel or
  // input index past the stored activations selects an element of yi.
  always_ff @(posedge clk) begin
    unique case (layer)
      L_FC1: rd_data <= (int'(fc1_addr) < Z_DIM) ? zi_q[int'(fc1_addr) % Z_DIM]
                                                 : yi_q[(int'(fc1_addr) - Z_DIM) % Y_DIM];
      L_FC2: rd_data <= pm1(act1[int'(fc2_addr) % FC_UNITS]);
      L_FC3: rd_data <= pm1(act2[int'(fc3_addr) % FC_UNITS]);
      L_FC4: rd_data <= (int'(fc4_addr) < FC_UNITS) ? pm1(act3[int'(fc4_addr) % FC_UNITS])
                                                   : yi_q[(int'(fc4_addr) - FC_UNITS) % Y_DIM];
      L_DC1: rd_data <= (int'(dc1_c) < DEC_CH)
                        ? pm1(act4[((int'(dc1_c) * DEC_HW + int'(dc1_y)) * DEC_HW + int'(dc1_x)) % N4_OUT])
                        : yi_q[(int'(dc1_c) - DEC_CH) % Y_DIM];
      L_DC2: rd_data <= (int'(dc2_c) < DEC_CH)
                        ? pm1(act5[((int'(dc2_c) * H1 + int'(dc2_y)) * H1 + int'(dc2_x)) % (DEC_CH * H1 * H1)])
                        : yi_q[(int'(dc2_c) - DEC_CH) % Y_DIM];
      default: rd_data <= '0;
    endcase
  end

  // ------------------------------------------------------ activation writes
  always_ff @(posedge clk) begin
    if (fc_we[0]) act1[int'(fc1_grp) * LANES +: LANES] <= fc1_bits;
    if (fc_we[1]) act2[int'(fc2_grp) * LANES +: LANES] <= fc2_bits;
    if (fc_we[2]) act3[int'(fc3_grp) * LANES +: LANES] <= fc3_bits;
    if (fc_we[3]) act4[int'(fc4_grp) * LANES +: LANES] <= fc4_bits;
    if (dc_we[0])
      for (int l = 0; l < LANES; l++)
        act5[((int'(dc1_grp) * LANES + l) * H1 + int'(dc1_oy)) * H1 + int'(dc1_ox)] <= dc1_bits[l];
  end

  // ------------------------------------------------------------ output stage
  logic [PIX_W-1:0] pix_d;

  sigmoid_unit #(.X_W(ACC2_W), .FRAC(W2_FRAC), .P_W(PIX_W)) u_sig (
    .x   (dc2_acc[0]),
    .pix (pix_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pix_valid <= 1'b0;
      pix_addr  <= '0;
      pix_data  <= '0;
    end else begin
      pix_valid <= dc_we[1];
      pix_addr  <= PIX_AW'(int'(dc2_oy) * H2 + int'(dc2_ox));
      pix_data  <= pix_d;
    end
  end

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ld_we |-> !busy) else $error("parameter load while busy");
endmodule
