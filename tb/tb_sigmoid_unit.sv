// tb_sigmoid_unit: compares the fixed-point sigmoid with the piecewise
// linear curve evaluated in real arithmetic (at most one unit apart) and
// with the exact logistic function (within 0.02 * 256 + 1 units), over a
// sweep of -8 .. 8 and at the segment boundaries.
module tb_sigmoid_unit;
  int checks = 0, failures = 0;
  logic signed [39:0] x;
  logic [7:0] pix;

  sigmoid_unit #(.X_W(40), .FRAC(12), .P_W(8)) dut (.x, .pix);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real plan(real v);
    real av, s;
    av = (v < 0.0) ? -v : v;
    if (av >= 5.0)        s = 1.0;
    else if (av >= 2.375) s = av / 32.0 + 0.84375;
    else if (av >= 1.0)   s = av / 8.0 + 0.625;
    else                  s = av / 4.0 + 0.5;
    return (v < 0.0) ? 1.0 - s : s;
  endfunction

  task automatic check(int xq);
    real v, e1, e2;
    int p1;
    x = 40'(xq);
    #1;
    v  = real'(xq) / 4096.0;
    e1 = plan(v) * 256.0;
    p1 = (e1 >= 255.0) ? 255 : int'($floor(e1));
    e2 = 256.0 / (1.0 + $exp(-v));
    checks += 2;
    if (int'(pix) - p1 > 1 || p1 - int'(pix) > 1) begin
      failures++;
      if (failures < 10) $display("x=%f pix=%0d plan=%0d", v, pix, p1);
    end
    if (real'(pix) - e2 > 6.2 || e2 - real'(pix) > 6.2) begin
      failures++;
      if (failures < 10) $display("x=%f pix=%0d sigmoid=%f", v, pix, e2);
    end
  endtask

  initial begin
    for (int q = -8 * 4096; q <= 8 * 4096; q += 7) check(q);
    check(5 * 4096); check(5 * 4096 - 1); check(9728); check(9727); check(4096); check(4095);
    check(-5 * 4096); check(-9728); check(-4096); check(0);
    check(1 << 30); check(-(1 << 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
