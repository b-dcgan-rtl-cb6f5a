// tb_deconv_layer: checks the transposed convolution engine in both of its
// forms at small sizes: binarized weights with threshold activation
// (3 input channels, 4 output channels in 2 lanes, 3x3 -> 6x6) and signed
// 8-bit weights with the raw sum (3 -> 1 channel, 4x4 -> 8x8). The
// expected maps are computed by scattering every input pixel through the
// kernel, the opposite order to the engine's gathering. Every output
// write, the write order and the number of cycles are checked.
module tb_deconv_layer;
  localparam int CI = 3, CO = 4, HI = 3, LN = 2, XW = 3, K = 5, P = 2;
  localparam int HO = 2 * HI;
  localparam int CI2 = 3, HI2 = 4, HO2 = 2 * HI2, WW2 = 8, AW2 = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- binarized instance
  logic start1 = 0, busy1, done1, rd1, we1;
  logic [1:0] c1;
  logic [1:0] y1, x1;
  logic signed [XW-1:0] d1;
  logic [0:0] g1;
  logic [2:0] oy1, ox1;
  logic [LN-1:0] bits1;
  logic [LN-1:0][23:0] acc1;
  logic w_we1 = 0, t_we1 = 0;
  logic [$clog2(CO/LN*CI*K*K)-1:0] w_addr1 = '0;
  logic [LN-1:0] w_data1 = '0;
  logic [1:0] t_addr1 = '0;
  logic signed [23:0] t_data1 = '0;

  deconv_layer #(.C_IN(CI), .C_OUT(CO), .H_IN(HI), .LANES(LN), .X_W(XW), .W_W(1),
                 .ACC_W(24), .HAS_BNA(1'b1)) dut1 (
    .clk, .rst_n, .start(start1), .busy(busy1), .done(done1),
    .in_rd(rd1), .in_c(c1), .in_y(y1), .in_x(x1), .in_data(d1),
    .out_we(we1), .out_grp(g1), .out_y(oy1), .out_x(ox1), .out_bits(bits1), .out_acc(acc1),
    .w_we(w_we1), .w_addr(w_addr1), .w_data(w_data1),
    .t_we(t_we1), .t_addr(t_addr1), .t_data(t_data1));

  int in1 [CI][HI][HI];
  bit w1 [CO][CI][K][K];
  int tau1 [CO];
  int ref1 [CO][HO][HO];
  always @(posedge clk) d1 <= XW'(in1[c1 % CI][y1 % HI][x1 % HI]);

  // ---------------- fixed-point instance
  logic start2 = 0, busy2, done2, rd2, we2;
  logic [1:0] c2;
  logic [1:0] y2, x2;
  logic signed [XW-1:0] d2;
  logic g2;
  logic [2:0] oy2, ox2;
  logic [0:0] bits2;
  logic [0:0][AW2-1:0] acc2;
  logic w_we2 = 0;
  logic [$clog2(CI2*K*K)-1:0] w_addr2 = '0;
  logic [WW2-1:0] w_data2 = '0;

  deconv_layer #(.C_IN(CI2), .C_OUT(1), .H_IN(HI2), .LANES(1), .X_W(XW), .W_W(WW2),
                 .ACC_W(AW2), .HAS_BNA(1'b0)) dut2 (
    .clk, .rst_n, .start(start2), .busy(busy2), .done(done2),
    .in_rd(rd2), .in_c(c2), .in_y(y2), .in_x(x2), .in_data(d2),
    .out_we(we2), .out_grp(g2), .out_y(oy2), .out_x(ox2), .out_bits(bits2), .out_acc(acc2),
    .w_we(w_we2), .w_addr(w_addr2), .w_data(w_data2),
    .t_we(1'b0), .t_addr(1'b0), .t_data(20'sd0));

  int in2 [CI2][HI2][HI2];
  int w2 [CI2][K][K];
  int ref2 [HO2][HO2];
  always @(posedge clk) d2 <= XW'(in2[c2 % CI2][y2 % HI2][x2 % HI2]);

  int n_out1 = 0, n_out2 = 0;
  longint t0, t1;

  always @(posedge clk) if (we1 && rst_n) begin
    for (int l = 0; l < LN; l++) begin
      int co;
      co = int'(g1) * LN + l;
      checks++;
      if (bits1[l] != (ref1[co][oy1][ox1] >= tau1[co]) || $signed(acc1[l]) != ref1[co][oy1][ox1]) begin
        failures++;
        if (failures < 10) $display("bin co=%0d (%0d,%0d): acc %0d bit %0d, expected %0d", co, oy1, ox1,
                                    $signed(acc1[l]), bits1[l], ref1[co][oy1][ox1]);
      end
    end
    checks++;
    if (int'(g1) * HO * HO + int'(oy1) * HO + int'(ox1) != n_out1) failures++;
    n_out1++;
  end

  always @(posedge clk) if (we2 && rst_n) begin
    checks++;
    if ($signed(acc2[0]) != ref2[oy2][ox2]) begin
      failures++;
      if (failures < 10) $display("fix (%0d,%0d): acc %0d, expected %0d", oy2, ox2, $signed(acc2[0]), ref2[oy2][ox2]);
    end
    checks++;
    if (int'(oy2) * HO2 + int'(ox2) != n_out2) failures++;
    n_out2++;
  end

  initial begin
    int oy, ox;
    foreach (in1[a, b, c]) in1[a][b][c] = $urandom_range(6) - 3;
    foreach (w1[a, b, c, d]) w1[a][b][c][d] = 1'($urandom);
    foreach (tau1[a]) tau1[a] = $urandom_range(6) - 3;
    foreach (in2[a, b, c]) in2[a][b][c] = $urandom_range(6) - 3;
    foreach (w2[a, b, c]) w2[a][b][c] = $urandom_range(255) - 128;
    foreach (ref1[a, b, c]) ref1[a][b][c] = 0;
    foreach (ref2[a, b]) ref2[a][b] = 0;
    for (int ci = 0; ci < CI; ci++)
      for (int iy = 0; iy < HI; iy++)
        for (int ix = 0; ix < HI; ix++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              oy = 2 * iy - P + ky; ox = 2 * ix - P + kx;
              if (oy >= 0 && oy < HO && ox >= 0 && ox < HO)
                for (int co = 0; co < CO; co++)
                  ref1[co][oy][ox] += w1[co][ci][ky][kx] ? in1[ci][iy][ix] : -in1[ci][iy][ix];
            end
    for (int ci = 0; ci < CI2; ci++)
      for (int iy = 0; iy < HI2; iy++)
        for (int ix = 0; ix < HI2; ix++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              oy = 2 * iy - P + ky; ox = 2 * ix - P + kx;
              if (oy >= 0 && oy < HO2 && ox >= 0 && ox < HO2)
                ref2[oy][ox] += in2[ci][iy][ix] * w2[ci][ky][kx];
            end

    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int g = 0; g < CO / LN; g++)
      for (int ci = 0; ci < CI; ci++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            w_we1 <= 1;
            w_addr1 <= $bits(w_addr1)'(((g * CI + ci) * K + ky) * K + kx);
            for (int l = 0; l < LN; l++) w_data1[l] <= w1[g * LN + l][ci][ky][kx];
            @(posedge clk);
          end
    w_we1 <= 0;
    for (int co = 0; co < CO; co++) begin
      t_we1 <= 1; t_addr1 <= 2'(co); t_data1 <= 24'(tau1[co]);
      @(posedge clk);
    end
    t_we1 <= 0;
    for (int ci = 0; ci < CI2; ci++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++) begin
          w_we2 <= 1; w_addr2 <= $bits(w_addr2)'((ci * K + ky) * K + kx); w_data2 <= WW2'(w2[ci][ky][kx]);
          @(posedge clk);
        end
    w_we2 <= 0;

    // binarized run
    start1 <= 1; t0 = cycle; @(posedge clk); start1 <= 0;
    while (!done1) @(posedge clk);
    t1 = cycle;
    checks++;
    if (t1 - t0 != 1 + (CO / LN) * HO * HO * (CI * 9 + 2)) begin
      failures++; $display("bin cycles %0d expected %0d", t1 - t0, (CO / LN) * HO * HO * (CI * 9 + 2));
    end
    @(posedge clk);
    checks++;
    if (n_out1 != CO / LN * HO * HO || busy1) failures++;

    // fixed-point run
    start2 <= 1; t0 = cycle; @(posedge clk); start2 <= 0;
    while (!done2) @(posedge clk);
    t1 = cycle;
    checks++;
    if (t1 - t0 != 1 + HO2 * HO2 * (CI2 * 9 + 2)) begin
      failures++; $display("fix cycles %0d expected %0d", t1 - t0, HO2 * HO2 * (CI2 * 9 + 2));
    end
    @(posedge clk);
    checks++;
    if (n_out2 != HO2 * HO2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
