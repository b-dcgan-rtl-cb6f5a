// bfc_layer: binarized fully connected layer with fused binarized batch
// normalization and activation (B-FC followed by B-BNA).
//
// For each output unit j the layer forms the integer sum
//   a_j = sum_i (w_ji ? +x_i : -x_i)
// over its N_IN signed integer inputs x_i and 1-bit weights w_ji (1 = +1,
// 0 = -1), then emits the binary activation a_j >= tau_j (1 = +1, 0 = -1).
// The arithmetic is the published one; the schedule is this design's:
// LANES units are computed at once, one input per clock, so a group of
// LANES units takes N_IN + 2 cycles and the layer N_OUT/LANES groups.
//
// Interface
//   start         pulse, begins the layer (ignored while busy)
//   in_rd/in_addr requests input x[in_addr]; the source returns it on
//                 in_data in the next cycle (one-cycle read latency)
//   out_we        one cycle per group: out_bits[l] is the activation of
//                 unit out_grp*LANES + l
//   done          pulse after the last group has been written
//   w_we/...      weight load: word w_addr = g*N_IN + i holds, in bit l,
//                 the weight from input i to unit g*LANES + l
//   t_we/...      threshold load: tau of unit t_addr
// Weights and thresholds are held in internal memories loaded before use.
module bfc_layer #(
  parameter int unsigned N_IN  = 110,
  parameter int unsigned N_OUT = 600,
  parameter int unsigned LANES = bdcgan_pkg::LANES,
  parameter int unsigned X_W   = bdcgan_pkg::H_BITS,
  parameter int unsigned ACC_W = bdcgan_pkg::ACC_W,
  localparam int unsigned N_GRP = N_OUT / LANES,
  localparam int unsigned IN_AW = $clog2(N_IN),
  localparam int unsigned WM_AW = $clog2(N_GRP * N_IN),
  localparam int unsigned L_AW  = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned G_AW  = (N_GRP > 1) ? $clog2(N_GRP) : 1,
  localparam int unsigned T_AW  = $clog2(N_OUT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // input activations
  output logic                    in_rd,
  output logic [IN_AW-1:0]        in_addr,
  input  logic signed [X_W-1:0]   in_data,
  // output activations
  output logic                    out_we,
  output logic [G_AW-1:0]         out_grp,
  output logic [LANES-1:0]        out_bits,
  // parameter load
  input  logic                    w_we,
  input  logic [WM_AW-1:0]        w_addr,
  input  logic [LANES-1:0]        w_data,
  input  logic                    t_we,
  input  logic [T_AW-1:0]         t_addr,
  input  logic signed [ACC_W-1:0] t_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT, S_FIN} state_e;
  state_e state;

  logic [IN_AW-1:0] i_cnt;
  logic [G_AW-1:0]  g_cnt;
  logic [WM_AW-1:0] w_rd_addr;
  logic             valid_q;

  // weight and threshold memories
  logic [LANES-1:0]        wmem [N_GRP * N_IN];
  logic signed [ACC_W-1:0] tmem [N_GRP][LANES];
  logic [LANES-1:0]        w_q;
  logic signed [ACC_W-1:0] tau_q [LANES];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    w_q <= wmem[w_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (t_we) tmem[G_AW'(int'(t_addr) / int'(LANES))][L_AW'(int'(t_addr) % int'(LANES))] <= t_data;
    tau_q <= tmem[g_cnt];
  end

  // sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      i_cnt     <= '0;
      g_cnt     <= '0;
      w_rd_addr <= '0;
      valid_q   <= 1'b0;
    end else begin
      valid_q <= (state == S_RUN);
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_RUN;
          i_cnt     <= '0;
          g_cnt     <= '0;
          w_rd_addr <= '0;
        end
        S_RUN: begin
          w_rd_addr <= w_rd_addr + 1'b1;
          if (i_cnt == IN_AW'(N_IN - 1)) begin
            i_cnt <= '0;
            state <= S_WAIT;
          end else begin
            i_cnt <= i_cnt + 1'b1;
          end
        end
        S_WAIT: state <= S_FIN;
        S_FIN: begin
          if (g_cnt == G_AW'(N_GRP - 1)) begin
            state <= S_IDLE;
          end else begin
            g_cnt <= g_cnt + 1'b1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    in_rd   = (state == S_RUN);
    in_addr = i_cnt;
    busy    = (state != S_IDLE);
    out_we  = (state == S_FIN);
    out_grp = g_cnt;
    done    = (state == S_FIN) && (g_cnt == G_AW'(N_GRP - 1));
  end

  // the read address of the weight memory is issued together with in_addr
  // so that the weight word and the input arrive in the same cycle
  logic signed [ACC_W-1:0] acc [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    binary_mac #(.X_W(X_W), .ACC_W(ACC_W)) u_mac (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (state == S_FIN),
      .en    (valid_q),
      .x     (in_data),
      .w     (w_q[l]),
      .acc   (acc[l])
    );
    bbna_threshold #(.ACC_W(ACC_W)) u_bna (
      .a   (acc[l]),
      .tau (tau_q[l]),
      .ab  (out_bits[l])
    );
  end

  initial begin
    assert (N_OUT % LANES == 0) else $error("N_OUT must be a multiple of LANES");
  end

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && busy)) else $error("start while busy");
endmodule
