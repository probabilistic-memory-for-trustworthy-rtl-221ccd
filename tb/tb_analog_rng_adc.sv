// tb_analog_rng_adc: checks the behavioural analog RNG/ADC model: zero noise
// after reset and for sigma = 0, noise = +-4*adc_code with the sign register,
// codes within 4 bits and non-decreasing in sigma for one held sample, outputs
// held between strobes, and noise statistics for sigma = 8 (mean near 0,
// variance near 64 plus the ADC quantisation error).
module tb_analog_rng_adc;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [3:0] sigma = 0, adc_code;
  logic sign;
  logic signed [8:0] noise, held;
  int checks = 0, failures = 0, prev;
  real s1 = 0, s2 = 0, mean, var_n;
  localparam int N = 20000;

  analog_rng_adc #(.ADC_BITS(4), .ADC_LSB_LOG2(2)) dut (.clk, .rst_n, .sample, .sigma, .adc_code, .sign, .noise);
  // a 6-bit ADC with a 1-LSB step, one of the other resolutions of the sweep
  logic [5:0] code6;
  logic sign6;
  logic signed [8:0] noise6;
  analog_rng_adc #(.ADC_BITS(6), .ADC_LSB_LOG2(0)) dut6 (.clk, .rst_n, .sample, .sigma, .adc_code(code6), .sign(sign6), .noise(noise6));
  real t1 = 0, t2 = 0, mean6, var6;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    sigma = 4'd15; #1;
    chk(noise == 0, "zero after reset");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk); sample = 1; @(negedge clk); sample = 0;
      prev = 0;
      for (int s = 0; s < 16; s++) begin
        sigma = 4'(s); #1;
        chk(int'(noise) == (sign ? -4 : 4) * int'(adc_code), "noise = sign * 4 * code");
        chk(int'(adc_code) >= prev, "code monotonic in sigma");
        chk(int'(noise6) == (sign6 ? -1 : 1) * int'(code6), "6-bit: noise = sign * code");
        if (s == 0) chk(adc_code == 0, "sigma 0 gives no noise");
        prev = int'(adc_code);
      end
      held = noise;
      repeat (3) @(negedge clk);
      chk(noise == held, "held between strobes");
    end
    sigma = 4'd8; sample = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      s1 += real'(noise);
      s2 += real'(noise) ** 2;
      t1 += real'(noise6);
      t2 += real'(noise6) ** 2;
    end
    mean6 = t1 / N;
    var6  = t2 / N - mean6 * mean6;
    $display("6-bit ADC, sigma=8: noise mean %f variance %f", mean6, var6);
    chk(mean6 < 0.3 && mean6 > -0.3, "6-bit mean");
    chk(var6 > 0.92 * 64.1 && var6 < 1.08 * 64.1, "6-bit variance");
    mean  = s1 / N;
    var_n = s2 / N - mean * mean;
    $display("sigma=8 noise mean %f variance %f", mean, var_n);
    chk(mean < 0.5 && mean > -0.5, "mean");
    chk(var_n > 0.9 * 65.3 && var_n < 1.1 * 65.3, "variance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
