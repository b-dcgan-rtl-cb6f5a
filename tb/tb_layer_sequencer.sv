// tb_layer_sequencer: plays the six engines with random run times and
// checks that the sequencer starts exactly one engine at a time, in the
// order FC1, FC2, FC3, FC4, DC1, DC2, one cycle after the previous one
// reports done, shows the running layer, ignores start while busy, and
// pulses done one cycle after the last engine.
module tb_layer_sequencer;
  import bdcgan_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, in_load, busy, done;
  logic [5:0] eng_start, eng_done = '0;
  layer_e layer;

  layer_sequencer dut (.clk, .rst_n, .start, .in_load, .eng_start, .eng_done, .layer, .busy, .done);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dur;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    checks++; if (busy || layer != L_IDLE) failures++;
    repeat (3) begin
      start = 1; #1;
      checks++; if (!in_load) failures++;
      @(negedge clk); start = 0;
      for (int k = 0; k < 6; k++) begin
        checks += 3;
        if (eng_start != 6'(1 << k)) begin failures++; $display("layer %0d: eng_start=%b", k, eng_start); end
        if (int'(layer) != k + 1) failures++;
        if (!busy) failures++;
        dur = $urandom_range(20, 1);
        for (int c = 0; c < dur; c++) begin
          @(negedge clk);
          start = (c == 0);   // must be ignored while busy
          checks++; if (eng_start != 0 || in_load) failures++;
        end
        start = 0;
        eng_done = 6'(1 << k);
        @(negedge clk);
        eng_done = '0;
      end
      checks += 2;
      if (!done) failures++;
      if (busy) failures++;
      @(negedge clk);
      checks++; if (done) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
