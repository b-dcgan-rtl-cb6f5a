// tb_bbna_threshold: checks the threshold activation against the batch
// normalization it replaces. For random (gamma, mu, i, B) with gamma*i > 0
// the threshold tau = round(mu - B/(gamma*i)) is computed in real
// arithmetic and the output for integer inputs around tau must be +1
// exactly when a >= tau.
module tb_bbna_threshold;
  int checks = 0, failures = 0;
  logic signed [15:0] a, tau;
  logic ab;

  bbna_threshold #(.ACC_W(16)) dut (.a, .tau, .ab);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real gamma, mu, istd, beta, t;
    int tr;
    repeat (500) begin
      gamma = 0.1 + real'($urandom_range(1000)) / 250.0;
      istd  = 0.1 + real'($urandom_range(1000)) / 500.0;
      mu    = real'(int'($urandom_range(4000)) - 2000) / 10.0;
      beta  = real'(int'($urandom_range(2000)) - 1000) / 100.0;
      t     = mu - beta / (gamma * istd);
      tr    = int'($floor(t + 0.5));
      tau   = 16'(tr);
      for (int d = -3; d <= 3; d++) begin
        a = 16'(tr + d);
        #1;
        checks++;
        if (ab != (tr + d >= tr)) begin
          failures++;
          $display("a=%0d tau=%0d ab=%0d", a, tau, ab);
        end
      end
      // extreme values
      a = 16'sh7fff; #1; checks++; if (!ab) failures++;
      a = -16'sh7fff; #1; checks++; if (ab && tr > -32767) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
