// tb_clt_grng: compares every eps of the CLT-12 generator with the reference
// model over 20000 draws (also across a reseed), and checks the statistics of
// eps: mean within 0.05 and variance within 5 % of N(0,1). A CLT-4 instance
// is checked the same way, with variance 4/12.
module tb_clt_grng;
  import pmem_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, seed_we = 0;
  logic [15:0] seed_in = 0;
  logic signed [7:0] eps;
  int checks = 0, failures = 0;
  ref_grng rg;
  real s1 = 0, s2 = 0, mean, var_e;
  localparam int N = 20000;

  clt_grng #(.CLT_N(12), .SEED_BASE(16'h1D2B)) dut (.clk, .rst_n, .step, .seed_we, .seed_in, .eps);
  // a shallower generator (CLT-4, one of the depths of the quality sweep):
  // exact against the reference, variance sqrt(4/12)^2 = 1/3
  logic signed [7:0] eps4;
  clt_grng #(.CLT_N(4), .SEED_BASE(16'h0777)) dut4 (.clk, .rst_n, .step, .seed_we(1'b0), .seed_in(16'h0), .eps(eps4));
  ref_grng rg4;
  real t1 = 0, t2 = 0, var4;
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rg = new(16'h1D2B, 12);
    rg4 = new(16'h0777, 4);
    repeat (2) @(posedge clk);
    #1 rst_n = 1; step = 1;
    for (int i = 0; i < N; i++) begin
      if (i == N / 2) begin
        step = 0; seed_we = 1; seed_in = 16'hBEEF;
        @(posedge clk); #1; seed_we = 0; step = 1;
        rg.reseed(16'hBEEF);
      end
      checks++;
      if (int'(eps) != rg.eps()) begin
        failures++;
        if (failures < 10) $display("FAIL draw %0d: got %0d exp %0d", i, eps, rg.eps());
      end
      checks++;
      if (int'(eps4) != rg4.eps()) begin failures++; if (failures < 10) $display("FAIL CLT-4 draw %0d", i); end
      t1 += real'(eps4) / 16.0;
      t2 += (real'(eps4) / 16.0) ** 2;
      s1 += real'(eps) / 16.0;
      s2 += (real'(eps) / 16.0) ** 2;
      @(posedge clk); #1;
      rg.step();
      rg4.step();
    end
    mean  = s1 / N;
    var_e = s2 / N - mean * mean;
    $display("eps mean %f variance %f", mean, var_e);
    var4 = t2 / N - (t1 / N) ** 2;
    $display("CLT-4 eps variance %f", var4);
    checks++; if (var4 > 0.36 || var4 < 0.31) begin failures++; $display("FAIL CLT-4 variance"); end
    checks++; if (mean > 0.05 || mean < -0.05) begin failures++; $display("FAIL mean"); end
    checks++; if (var_e > 1.05 || var_e < 0.95 - 1.0/12.0/256.0 - 0.05) begin failures++; $display("FAIL variance"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
