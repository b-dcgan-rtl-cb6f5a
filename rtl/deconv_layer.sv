// deconv_layer: transposed convolution ("deconvolution") with a 5x5 kernel
// and stride 2, doubling the side of the feature map, used for both
// decoder layers of the generator.
//
// Output pixel (co, oy, ox) of the H_OUT x H_OUT map (H_OUT = 2*H_IN) is
//   a = sum over ci, ky, kx of x[ci][iy][ix] * w[co][ci][ky][kx]
// where oy = 2*iy - PAD + ky and ox = 2*ix - PAD + kx. With PAD = 2 and
// K = 5 this maps 7x7 to 14x14 and 14x14 to 28x28, the sizes of the
// published network. Only the taps with ky of the same parity as oy + PAD
// can contribute, so at most ceil(K/2) x ceil(K/2) = 9 tap slots per input
// channel are visited; slots outside the kernel or the input map are idle
// cycles.
//
// W_W = 1 gives the binarized layer (B-Deconv): 1-bit weights, 1 = +1 and
// 0 = -1, and, with HAS_BNA = 1, the fused batch normalization and
// activation, out_bits[l] = (a >= tau[co]). W_W > 1 gives the real-valued
// last layer of the main configuration: signed fixed-point weights and the
// raw sum on out_acc. Binarization, kernel and map sizes follow the
// published network; the output-stationary schedule, LANES output channels
// in parallel, the fixed-point format and the memory layouts are this
// design's choices.
//
// Interface
//   start/busy/done  as in bfc_layer; done pulses with the last output write
//   in_rd, in_c/in_y/in_x  input read request; in_data returns one cycle later
//   out_we           one cycle per output position and channel group:
//                    out_bits/out_acc lane l is channel out_grp*LANES + l
//                    at (out_y, out_x); outputs come in raster order per group
//   w_we/w_addr/w_data  weight word ((g*C_IN + ci)*K + ky)*K + kx holds in
//                    bits [l*W_W +: W_W] the weight of channel g*LANES + l
//   t_we/t_addr/t_data  threshold of output channel t_addr
// Timing: C_IN*9 + 2 cycles per output position and group.
module deconv_layer #(
  parameter int unsigned C_IN    = 74,
  parameter int unsigned C_OUT   = 64,
  parameter int unsigned H_IN    = 7,
  parameter int unsigned K       = bdcgan_pkg::KSIZE,
  parameter int unsigned PAD     = bdcgan_pkg::KPAD,
  parameter int unsigned LANES   = bdcgan_pkg::LANES,
  parameter int unsigned X_W     = bdcgan_pkg::H_BITS,
  parameter int unsigned W_W     = 1,
  parameter int unsigned ACC_W   = bdcgan_pkg::ACC_W,
  parameter bit          HAS_BNA = 1'b1,
  localparam int unsigned H_OUT  = 2 * H_IN,
  localparam int unsigned T      = (K + 1) / 2,
  localparam int unsigned N_GRP  = C_OUT / LANES,
  localparam int unsigned CI_AW  = (C_IN > 1) ? $clog2(C_IN) : 1,
  localparam int unsigned HI_AW  = $clog2(H_IN),
  localparam int unsigned HO_AW  = $clog2(H_OUT),
  localparam int unsigned L_AW   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned G_AW   = (N_GRP > 1) ? $clog2(N_GRP) : 1,
  localparam int unsigned T_AW   = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned WM_N   = N_GRP * C_IN * K * K,
  localparam int unsigned WM_AW  = $clog2(WM_N)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // input feature map
  output logic                          in_rd,
  output logic [CI_AW-1:0]              in_c,
  output logic [HI_AW-1:0]              in_y,
  output logic [HI_AW-1:0]              in_x,
  input  logic signed [X_W-1:0]         in_data,
  // output feature map
  output logic                          out_we,
  output logic [G_AW-1:0]               out_grp,
  output logic [HO_AW-1:0]              out_y,
  output logic [HO_AW-1:0]              out_x,
  output logic [LANES-1:0]              out_bits,
  output logic [LANES-1:0][ACC_W-1:0]   out_acc,
  // parameter load
  input  logic                          w_we,
  input  logic [WM_AW-1:0]              w_addr,
  input  logic [LANES*W_W-1:0]          w_data,
  input  logic                          t_we,
  input  logic [T_AW-1:0]               t_addr,
  input  logic signed [ACC_W-1:0]       t_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT, S_FIN} state_e;
  state_e state;

  logic [G_AW-1:0]  g_cnt;
  logic [HO_AW-1:0] oy, ox;
  logic [CI_AW-1:0] ci;
  logic [1:0]       ty, tx;

  // tap geometry of the current slot
  int ky, kx, iy, ix;
  logic tap_ok;
  logic [WM_AW-1:0] w_rd_addr;

  always_comb begin
    ky = int'((int'(oy) + PAD) % 2) + 2 * int'(ty);
    kx = int'((int'(ox) + PAD) % 2) + 2 * int'(tx);
    iy = (int'(oy) + int'(PAD) - ky) / 2;
    ix = (int'(ox) + int'(PAD) - kx) / 2;
    tap_ok = (ky < int'(K)) && (kx < int'(K)) &&
             (iy >= 0) && (iy < int'(H_IN)) && (ix >= 0) && (ix < int'(H_IN));
    w_rd_addr = WM_AW'(((int'(g_cnt) * int'(C_IN) + int'(ci)) * int'(K) + ky) * int'(K) + kx);
  end

  // memories
  logic [LANES*W_W-1:0]    wmem [WM_N];
  logic signed [ACC_W-1:0] tmem [N_GRP][LANES];
  logic [LANES*W_W-1:0]    w_q;
  logic signed [ACC_W-1:0] tau_q [LANES];
  logic                    valid_q;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    w_q <= wmem[w_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (t_we) tmem[G_AW'(int'(t_addr) / int'(LANES))][L_AW'(int'(t_addr) % int'(LANES))] <= t_data;
    tau_q <= tmem[g_cnt];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      g_cnt   <= '0;
      oy      <= '0;
      ox      <= '0;
      ci      <= '0;
      ty      <= '0;
      tx      <= '0;
      valid_q <= 1'b0;
    end else begin
      valid_q <= (state == S_RUN) && tap_ok;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          g_cnt <= '0;
          oy    <= '0;
          ox    <= '0;
          ci    <= '0;
          ty    <= '0;
          tx    <= '0;
        end
        S_RUN: begin
          if (tx != 2'(T - 1)) begin
            tx <= tx + 1'b1;
          end else begin
            tx <= '0;
            if (ty != 2'(T - 1)) begin
              ty <= ty + 1'b1;
            end else begin
              ty <= '0;
              if (ci != CI_AW'(C_IN - 1)) begin
                ci <= ci + 1'b1;
              end else begin
                ci    <= '0;
                state <= S_WAIT;
              end
            end
          end
        end
        S_WAIT: state <= S_FIN;
        S_FIN: begin
          state <= S_RUN;
          if (ox != HO_AW'(H_OUT - 1)) begin
            ox <= ox + 1'b1;
          end else begin
            ox <= '0;
            if (oy != HO_AW'(H_OUT - 1)) begin
              oy <= oy + 1'b1;
            end else begin
              oy <= '0;
              if (g_cnt != G_AW'(N_GRP - 1)) g_cnt <= g_cnt + 1'b1;
              else                           state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy    = (state != S_IDLE);
    in_rd   = (state == S_RUN) && tap_ok;
    in_c    = ci;
    in_y    = HI_AW'(iy);
    in_x    = HI_AW'(ix);
    out_we  = (state == S_FIN);
    out_grp = g_cnt;
    out_y   = oy;
    out_x   = ox;
    done    = (state == S_FIN) && (g_cnt == G_AW'(N_GRP - 1)) &&
              (oy == HO_AW'(H_OUT - 1)) && (ox == HO_AW'(H_OUT - 1));
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [ACC_W-1:0] acc;
    if (W_W == 1) begin : g_bin
      binary_mac #(.X_W(X_W), .ACC_W(ACC_W)) u_mac (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (state == S_FIN),
        .en    (valid_q),
        .x     (in_data),
        .w     (w_q[l]),
        .acc   (acc)
      );
    end else begin : g_fix
      logic signed [W_W-1:0]   wl;
      logic signed [ACC_W-1:0] prod;
      always_comb begin
        wl   = w_q[l*W_W +: W_W];
        prod = ACC_W'(in_data) * ACC_W'(wl);
      end
      always_ff @(posedge clk) begin
        if (!rst_n || state == S_FIN) acc <= '0;
        else if (valid_q)             acc <= acc + prod;
      end
    end
    assign out_acc[l] = acc;
    if (HAS_BNA) begin : g_bna
      bbna_threshold #(.ACC_W(ACC_W)) u_bna (
        .a   (acc),
        .tau (tau_q[l]),
        .ab  (out_bits[l])
      );
    end else begin : g_nobna
      assign out_bits[l] = acc[ACC_W-1];  // sign of the sum, unused downstream
    end
  end

  initial begin
    assert (C_OUT % LANES == 0) else $error("C_OUT must be a multiple of LANES");
    assert (T <= 4) else $error("kernel too large for the tap counters");
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && busy)) else $error("start while busy");
endmodule
