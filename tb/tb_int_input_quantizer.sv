// tb_int_input_quantizer: checks zi = round(A*z) and yi = A*y for H = 2
// (A = 1), H = 8 (A = 127) and H = 13 (A = 4095), the three scales of the
// published experiments, on random and boundary values of z. The expected
// value is computed in real arithmetic.
module tb_int_input_quantizer;
  int checks = 0, failures = 0;
  logic signed [15:0] z;
  logic y;
  logic signed [1:0]  zi2, yi2;
  logic signed [7:0]  zi8, yi8;
  logic signed [12:0] zi13, yi13;

  int_input_quantizer #(.H(2),  .Z_FRAC(15)) u2  (.z, .y, .zi(zi2),  .yi(yi2));
  int_input_quantizer #(.H(8),  .Z_FRAC(15)) u8  (.z, .y, .zi(zi8),  .yi(yi8));
  int_input_quantizer #(.H(13), .Z_FRAC(15)) u13 (.z, .y, .zi(zi13), .yi(yi13));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expq(int a, int zq);
    return int'($floor(real'(a) * real'(zq) / 32768.0 + 0.5));
  endfunction

  task automatic check(int zq, bit yv);
    z = 16'(zq); y = yv;
    #1;
    checks += 6;
    if (int'(zi2) != expq(1, zq))     begin failures++; $display("H=2 z=%0d zi=%0d", zq, zi2); end
    if (int'(zi8) != expq(127, zq))   begin failures++; $display("H=8 z=%0d zi=%0d", zq, zi8); end
    if (int'(zi13) != expq(4095, zq)) begin failures++; $display("H=13 z=%0d zi=%0d", zq, zi13); end
    if (int'(yi2) != (yv ? 1 : 0))    failures++;
    if (int'(yi8) != (yv ? 127 : 0))  failures++;
    if (int'(yi13) != (yv ? 4095 : 0)) failures++;
  endtask

  initial begin
    check(-32768, 1); check(32767, 0); check(0, 1); check(16384, 0); check(-16384, 1);
    check(16383, 0); check(-16385, 1);
    repeat (2000) check(int'($urandom_range(65535)) - 32768, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
