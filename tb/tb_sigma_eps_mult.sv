// tb_sigma_eps_mult: exhaustive check of sigma*eps rounding against
// floor(sigma*eps/16 + 1/2) computed in real arithmetic.
module tb_sigma_eps_mult;
  logic [3:0] sigma;
  logic signed [7:0] eps;
  logic signed [8:0] noise;
  int checks = 0, failures = 0, e;

  sigma_eps_mult dut (.sigma, .eps, .noise);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++)
      for (int x = -128; x < 128; x++) begin
        sigma = 4'(s); eps = 8'(x); #1;
        e = int'($floor(real'(s) * real'(x) / 16.0 + 0.5));
        checks++;
        if (int'(noise) != e) begin
          failures++;
          if (failures < 10) $display("FAIL s=%0d eps=%0d got %0d exp %0d", s, x, noise, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
