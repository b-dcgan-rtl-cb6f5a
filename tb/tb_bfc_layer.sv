// tb_bfc_layer: checks the binarized fully connected layer at a small
// size (13 inputs, 16 units in 4 lanes, 3-bit inputs): random weights,
// thresholds and inputs are loaded, the layer is run twice with different
// inputs, and every written activation, the group order and the number of
// cycles (N_OUT/LANES * (N_IN + 2), plus the start cycle) are compared with
// a direct model.
module tb_bfc_layer;
  localparam int NI = 13, NO = 16, LN = 4, XW = 3, AW = 16;
  localparam int NG = NO / LN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic start = 0, busy, done, in_rd, out_we;
  logic [3:0] in_addr;
  logic signed [XW-1:0] in_data;
  logic [1:0] out_grp;
  logic [LN-1:0] out_bits;
  logic w_we = 0, t_we = 0;
  logic [5:0] w_addr = '0;
  logic [LN-1:0] w_data = '0;
  logic [3:0] t_addr = '0;
  logic signed [AW-1:0] t_data = '0;

  bfc_layer #(.N_IN(NI), .N_OUT(NO), .LANES(LN), .X_W(XW), .ACC_W(AW)) dut (
    .clk, .rst_n, .start, .busy, .done, .in_rd, .in_addr, .in_data,
    .out_we, .out_grp, .out_bits, .w_we, .w_addr, .w_data, .t_we, .t_addr, .t_data);

  int xin [NI];
  bit w [NO][NI];
  int tau [NO];
  bit expb [NO];
  int n_out;

  always @(posedge clk) in_data <= XW'(xin[in_addr % NI]);

  always @(posedge clk) if (out_we && rst_n) begin
    checks++;
    if (int'(out_grp) != n_out) failures++;
    for (int l = 0; l < LN; l++) begin
      checks++;
      if (out_bits[l] != expb[int'(out_grp) * LN + l]) begin
        failures++;
        if (failures < 10) $display("unit %0d: %0d expected %0d", int'(out_grp) * LN + l, out_bits[l], expb[int'(out_grp) * LN + l]);
      end
    end
    n_out++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int a, npos;
    npos = 0;
    foreach (w[j, i]) w[j][i] = 1'($urandom);
    foreach (tau[j]) tau[j] = $urandom_range(8) - 4;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int g = 0; g < NG; g++)
      for (int i = 0; i < NI; i++) begin
        @(negedge clk);
        w_we = 1; w_addr = 6'(g * NI + i);
        for (int l = 0; l < LN; l++) w_data[l] = w[g * LN + l][i];
      end
    @(negedge clk); w_we = 0;
    for (int j = 0; j < NO; j++) begin
      @(negedge clk);
      t_we = 1; t_addr = 4'(j); t_data = AW'(tau[j]);
    end
    @(negedge clk); t_we = 0;
    repeat (2) begin
      foreach (xin[i]) xin[i] = $urandom_range(6) - 3;
      for (int j = 0; j < NO; j++) begin
        a = 0;
        for (int i = 0; i < NI; i++) a += w[j][i] ? xin[i] : -xin[i];
        expb[j] = (a >= tau[j]);
        npos += expb[j];
      end
      n_out = 0;
      @(negedge clk); start = 1; t0 = cycle;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      checks++;
      if (cycle - t0 != NG * (NI + 2)) begin
        failures++;
        $display("cycles %0d expected %0d", cycle - t0, NG * (NI + 2));
      end
      @(posedge clk); #1;
      checks++;
      if (n_out != NG || busy) failures++;
    end
    checks++;
    if (npos == 0 || npos == 2 * NO) failures++;   // both activation values seen
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
