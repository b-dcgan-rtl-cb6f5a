// tb_binary_mac: drives random clear / enable / input / weight sequences
// into the binary-weight accumulator and compares every cycle with a
// model that multiplies by +1 or -1.
module tb_binary_mac;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, en = 0, w = 0;
  logic signed [3:0] x = '0;
  logic signed [15:0] acc;
  int model = 0;

  binary_mac #(.X_W(4), .ACC_W(16)) dut (.clk, .rst_n, .clr, .en, .x, .w, .acc);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    checks++;
    if (acc != 0) failures++;
    repeat (3000) begin
      @(negedge clk);
      clr = ($urandom_range(40) == 0);
      en  = 1'($urandom);
      w   = 1'($urandom);
      x   = 4'($urandom);
      @(posedge clk);
      if (clr) model = 0;
      else if (en) model += w ? int'(x) : -int'(x);
      #1;
      checks++;
      if (int'(acc) != model) begin
        failures++;
        if (failures < 10) $display("acc %0d expected %0d", acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
