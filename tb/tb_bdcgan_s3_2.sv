// tb_bdcgan_s3_2: runs the generator as the fully binarized network of
// scenario S3-2, in which the last transposed convolution is binarized as
// well. The hardware is unchanged: its fixed-point Deconv-2 weights are
// loaded with +1.0 or -1.0 only (+4096 / -4096 in Q4.12). The network is
// scaled down (100 + 10 inputs, 64 FC units, 16 decoder channels on the
// published 7x7 -> 14x14 -> 28x28 maps) to keep the run short. Apart from
// the weights of the last layer it is the end-to-end test of
// tb_bdcgan_generator: every stored activation, every pixel, the cycle
// count and the same mechanism counters are checked against a
// behavioural model.
module tb_bdcgan_s3_2;
  import bdcgan_pkg::*;

  localparam int ZD   = bdcgan_pkg::Z_DIM;
  localparam int YD   = bdcgan_pkg::Y_DIM;
  localparam int FU   = 64;
  localparam int DC   = 16;
  localparam int HW   = bdcgan_pkg::DEC_HW;
  localparam int HB   = bdcgan_pkg::H_BITS;
  localparam int LN   = bdcgan_pkg::LANES;
  localparam int N1   = ZD + YD;
  localparam int N4I  = FU + YD;
  localparam int N4O  = DC * HW * HW;
  localparam int CD   = DC + YD;
  localparam int H1   = 2 * HW;
  localparam int H2   = 4 * HW;
  localparam int KS   = KSIZE;
  localparam int AV   = (1 << (HB - 1)) - 1;
  localparam int NIMG = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              ld_we = 0;
  param_sel_e        ld_sel = P_FC1_W;
  logic [23:0]       ld_addr = '0;
  logic [31:0]       ld_data = '0;
  logic              start = 0;
  logic signed [Z_FRAC:0] z [ZD];
  logic [YD-1:0]     y_onehot = '0;
  logic              busy, done, pix_valid;
  logic [$clog2(H2*H2)-1:0] pix_addr;
  logic [PIX_W-1:0]  pix_data;

  bdcgan_generator #(.FC_UNITS(FU), .DEC_CH(DC)) dut (
    .clk, .rst_n, .ld_we, .ld_sel, .ld_addr, .ld_data,
    .start, .z, .y_onehot, .busy, .done, .pix_valid, .pix_addr, .pix_data
  );

  // model parameters
  bit        w1 [FU][N1];
  bit        w2 [FU][FU];
  bit        w3 [FU][FU];
  bit        w4 [N4O][N4I];
  bit        wd1 [DC][CD][KS][KS];
  int        wd2 [CD][KS][KS];
  int        t1 [FU], t2 [FU], t3 [FU], t4 [N4O], t5 [DC];

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_layer_done [6];
  int n_ycat, n_idle_tap, n_sat, n_lin, n_pos, n_neg;
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 6; k++) if (dut.eng_done[k]) n_layer_done[k]++;
    if ((dut.layer == L_FC1 && dut.fc_rd[0] && int'(dut.fc1_addr) >= ZD) ||
        (dut.layer == L_FC4 && dut.fc_rd[3] && int'(dut.fc4_addr) >= FU) ||
        (dut.layer == L_DC1 && dut.dc_rd[0] && int'(dut.dc1_c) >= DC) ||
        (dut.layer == L_DC2 && dut.dc_rd[1] && int'(dut.dc2_c) >= DC)) n_ycat++;
    if ((dut.layer == L_DC1 && !dut.u_dc1.tap_ok && int'(dut.u_dc1.state) == 1) ||
        (dut.layer == L_DC2 && !dut.u_dc2.tap_ok && int'(dut.u_dc2.state) == 1)) n_idle_tap++;
  end

  function automatic int pm(bit b);
    return b ? 1 : -1;
  endfunction

  function automatic real plan(real x);
    real ax, s;
    ax = (x < 0.0) ? -x : x;
    if (ax >= 5.0)        s = 1.0;
    else if (ax >= 2.375) s = ax / 32.0 + 0.84375;
    else if (ax >= 1.0)   s = ax / 8.0 + 0.625;
    else                  s = ax / 4.0 + 0.5;
    return (x < 0.0) ? 1.0 - s : s;
  endfunction

  task automatic load(param_sel_e sel, int addr, logic [31:0] data);
    @(negedge clk);
    ld_we = 1; ld_sel = sel; ld_addr = 24'(addr); ld_data = data;
  endtask

  int exp_pix [H2*H2];
  int got_pix [H2*H2];
  int got_n;

  always @(posedge clk) if (rst_n && pix_valid) begin
    if (int'(pix_addr) != got_n) begin
      failures++;
      if (failures < 10) $display("pixel order: got addr %0d expected %0d", pix_addr, got_n);
    end
    got_pix[pix_addr] = int'(pix_data);
    got_n++;
  end

  // model activations, compared with the generator's stored activations
  bit h1 [FU], h2 [FU], h3 [FU], h4 [N4O];
  bit h5 [DC][H1][H1];

  task automatic check_acts(input int img);
    int bad [5];
    bad = '{default: 0};
    for (int j = 0; j < FU; j++) begin
      if (dut.act1[j] != h1[j]) bad[0]++;
      if (dut.act2[j] != h2[j]) bad[1]++;
      if (dut.act3[j] != h3[j]) bad[2]++;
    end
    for (int j = 0; j < N4O; j++) if (dut.act4[j] != h4[j]) bad[3]++;
    foreach (h5[c, yy, xx]) if (dut.act5[(c * H1 + yy) * H1 + xx] != h5[c][yy][xx]) bad[4]++;
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (bad[k] != 0) begin
        failures++;
        $display("image %0d: %0d activations of layer %0d differ from the model", img, bad[k], k + 1);
      end
    end
  endtask

  task automatic run_model(input int zq [ZD], input int lab);
    int zi [ZD], yi [YD];
    int a, x, oy, ox;
    int acc5 [DC][H1][H1];
    longint acc6 [H2][H2];
    real s;
    for (int k = 0; k < ZD; k++) zi[k] = int'($floor(real'(AV) * real'(zq[k]) / 32768.0 + 0.5));
    for (int k = 0; k < YD; k++) yi[k] = (k == lab) ? AV : 0;
    for (int j = 0; j < FU; j++) begin
      a = 0;
      for (int i = 0; i < N1; i++) begin
        x = (i < ZD) ? zi[i] : yi[i - ZD];
        a += w1[j][i] ? x : -x;
      end
      h1[j] = (a >= t1[j]);
    end
    for (int j = 0; j < FU; j++) begin
      a = 0;
      for (int i = 0; i < FU; i++) a += pm(h1[i]) * pm(w2[j][i]);
      h2[j] = (a >= t2[j]);
    end
    for (int j = 0; j < FU; j++) begin
      a = 0;
      for (int i = 0; i < FU; i++) a += pm(h2[i]) * pm(w3[j][i]);
      h3[j] = (a >= t3[j]);
    end
    for (int j = 0; j < N4O; j++) begin
      a = 0;
      for (int i = 0; i < N4I; i++) begin
        x = (i < FU) ? pm(h3[i]) : yi[i - FU];
        a += w4[j][i] ? x : -x;
      end
      h4[j] = (a >= t4[j]);
    end
    // first transposed convolution, scattered from the inputs
    foreach (acc5[c, yy, xx]) acc5[c][yy][xx] = 0;
    for (int ci = 0; ci < CD; ci++)
      for (int iy = 0; iy < HW; iy++)
        for (int ix = 0; ix < HW; ix++) begin
          x = (ci < DC) ? pm(h4[(ci * HW + iy) * HW + ix]) : yi[ci - DC];
          for (int ky = 0; ky < KS; ky++)
            for (int kx = 0; kx < KS; kx++) begin
              oy = 2 * iy - KPAD + ky;
              ox = 2 * ix - KPAD + kx;
              if (oy >= 0 && oy < H1 && ox >= 0 && ox < H1)
                for (int co = 0; co < DC; co++)
                  acc5[co][oy][ox] += wd1[co][ci][ky][kx] ? x : -x;
            end
        end
    foreach (acc5[c, yy, xx]) begin
      h5[c][yy][xx] = (acc5[c][yy][xx] >= t5[c]);
      if (h5[c][yy][xx]) n_pos++; else n_neg++;
    end
    // last transposed convolution
    foreach (acc6[yy, xx]) acc6[yy][xx] = 0;
    for (int ci = 0; ci < CD; ci++)
      for (int iy = 0; iy < H1; iy++)
        for (int ix = 0; ix < H1; ix++) begin
          x = (ci < DC) ? pm(h5[ci][iy][ix]) : yi[ci - DC];
          for (int ky = 0; ky < KS; ky++)
            for (int kx = 0; kx < KS; kx++) begin
              oy = 2 * iy - KPAD + ky;
              ox = 2 * ix - KPAD + kx;
              if (oy >= 0 && oy < H2 && ox >= 0 && ox < H2)
                acc6[oy][ox] += longint'(x) * longint'(wd2[ci][ky][kx]);
            end
        end
    foreach (acc6[yy, xx]) begin
      s = plan(real'(acc6[yy][xx]) / real'(1 << W2_FRAC));
      exp_pix[yy * H2 + xx] = (s * 256.0 >= 255.0) ? 255 : int'($floor(s * 256.0));
      if (acc6[yy][xx] >= (5 << W2_FRAC) || acc6[yy][xx] <= -(5 << W2_FRAC)) n_sat++;
      else n_lin++;
    end
    // the activations of the encoder layers must take both values too
    foreach (h1[j]) if (h1[j]) n_pos++; else n_neg++;
    foreach (h4[j]) if (h4[j]) n_pos++; else n_neg++;
  endtask

  longint t_start, t_done;
  longint exp_cycles;
  int zq [ZD];
  int lab;
  int d;

  initial begin
    foreach (z[k]) z[k] = '0;
    // random parameters
    foreach (w1[j, i]) w1[j][i] = 1'($urandom);
    foreach (w2[j, i]) w2[j][i] = 1'($urandom);
    foreach (w3[j, i]) w3[j][i] = 1'($urandom);
    foreach (w4[j, i]) w4[j][i] = 1'($urandom);
    foreach (wd1[a, b, c, e]) wd1[a][b][c][e] = 1'($urandom);
    foreach (wd2[a, b, c]) wd2[a][b][c] = $urandom_range(1) ? 4096 : -4096;
    foreach (t1[j]) t1[j] = $urandom_range(6) - 3;
    foreach (t2[j]) t2[j] = $urandom_range(6) - 3;
    foreach (t3[j]) t3[j] = $urandom_range(6) - 3;
    foreach (t4[j]) t4[j] = $urandom_range(6) - 3;
    foreach (t5[j]) t5[j] = $urandom_range(6) - 3;

    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // parameter load
    for (int g = 0; g < FU / LN; g++)
      for (int i = 0; i < N1; i++) begin
        logic [31:0] wd = '0;
        for (int l = 0; l < LN; l++) wd[l] = w1[g*LN + l][i];
        load(P_FC1_W, g * N1 + i, wd);
      end
    for (int g = 0; g < FU / LN; g++)
      for (int i = 0; i < FU; i++) begin
        logic [31:0] wa = '0, wb = '0;
        for (int l = 0; l < LN; l++) begin wa[l] = w2[g*LN + l][i]; wb[l] = w3[g*LN + l][i]; end
        load(P_FC2_W, g * FU + i, wa);
        load(P_FC3_W, g * FU + i, wb);
      end
    for (int g = 0; g < N4O / LN; g++)
      for (int i = 0; i < N4I; i++) begin
        logic [31:0] wd = '0;
        for (int l = 0; l < LN; l++) wd[l] = w4[g*LN + l][i];
        load(P_FC4_W, g * N4I + i, wd);
      end
    for (int g = 0; g < DC / LN; g++)
      for (int ci = 0; ci < CD; ci++)
        for (int ky = 0; ky < KS; ky++)
          for (int kx = 0; kx < KS; kx++) begin
            logic [31:0] wd = '0;
            for (int l = 0; l < LN; l++) wd[l] = wd1[g*LN + l][ci][ky][kx];
            load(P_DC1_W, ((g * CD + ci) * KS + ky) * KS + kx, wd);
          end
    for (int ci = 0; ci < CD; ci++)
      for (int ky = 0; ky < KS; ky++)
        for (int kx = 0; kx < KS; kx++)
          load(P_DC2_W, (ci * KS + ky) * KS + kx, 32'(wd2[ci][ky][kx]));
    foreach (t1[j]) load(P_FC1_T, j, 32'(t1[j]));
    foreach (t2[j]) load(P_FC2_T, j, 32'(t2[j]));
    foreach (t3[j]) load(P_FC3_T, j, 32'(t3[j]));
    foreach (t4[j]) load(P_FC4_T, j, 32'(t4[j]));
    foreach (t5[j]) load(P_DC1_T, j, 32'(t5[j]));
    @(negedge clk);
    ld_we = 0;

    exp_cycles = 2 + 6
               + (FU / LN) * (N1 + 2) + 2 * (FU / LN) * (FU + 2) + (N4O / LN) * (N4I + 2)
               + (DC / LN) * H1 * H1 * (CD * 9 + 2) + H2 * H2 * (CD * 9 + 2);

    for (int img = 0; img < NIMG; img++) begin
      foreach (zq[k]) zq[k] = int'($urandom_range(65535)) - 32768;
      lab = $urandom_range(YD - 1);
      run_model(zq, lab);
      foreach (z[k]) z[k] <= 16'(zq[k]);
      y_onehot <= YD'(1) << lab;
      got_n = 0;
      @(posedge clk);
      start <= 1;
      t_start = cycle;
      @(posedge clk);
      start <= 0;
      foreach (z[k]) z[k] <= 16'($urandom);   // inputs only sampled at start
      y_onehot <= '0;
      while (!done) @(posedge clk);
      t_done = cycle;
      @(posedge clk);
      check_acts(img);
      checks++;
      if (got_n != H2 * H2) begin
        failures++;
        $display("image %0d: %0d pixels, expected %0d", img, got_n, H2 * H2);
      end
      for (int p = 0; p < H2 * H2; p++) begin
        checks++;
        d = got_pix[p] - exp_pix[p];
        if (d > 1 || d < -1) begin
          failures++;
          if (failures < 10) $display("image %0d pixel %0d: got %0d expected %0d", img, p, got_pix[p], exp_pix[p]);
        end
      end
      checks++;
      if (t_done - t_start != exp_cycles) begin
        failures++;
        $display("image %0d: %0d cycles, expected %0d", img, t_done - t_start, exp_cycles);
      end
      $display("image %0d (label %0d) done in %0d cycles", img, lab, t_done - t_start);
    end

    // every mechanism must have happened
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (n_layer_done[k] != NIMG) begin failures++; $display("layer %0d ran %0d times", k, n_layer_done[k]); end
    end
    checks += 6;
    if (n_ycat == 0)     begin failures++; $display("label channels never read"); end
    if (n_idle_tap == 0) begin failures++; $display("no idle tap slot"); end
    if (n_sat == 0)      begin failures++; $display("sigmoid never saturated"); end
    if (n_lin == 0)      begin failures++; $display("sigmoid never unsaturated"); end
    if (n_pos == 0)      begin failures++; $display("no +1 activation"); end
    if (n_neg == 0)      begin failures++; $display("no -1 activation"); end
    $display("mechanisms: label reads=%0d idle taps=%0d sat=%0d lin=%0d pos=%0d neg=%0d",
             n_ycat, n_idle_tap, n_sat, n_lin, n_pos, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
