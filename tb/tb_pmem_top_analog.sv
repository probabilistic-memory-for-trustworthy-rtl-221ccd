// tb_pmem_top_analog: the memory with the analog RNG flavour (ANALOG = 1,
// behavioural noise source and 4-bit ADC), one mat of two subarrays. The
// noise is not reproducible, so the test checks what the ADC path guarantees:
// deterministic words read back exactly; a probabilistic read returns
// mu + 4*k with |k| <= 15; sigma = 0 reads back mu; k never exceeds what
// sigma allows (|noise| <= sigma*8 + 2); and for mu = 5, sigma = 8 the sample
// mean and deviation match N(5, 8^2) within the ADC quantisation error.
module tb_pmem_top_analog;
  import pmem_pkg::*;
  logic clk = 0, rst_n = 0, req_valid = 0, req_we = 0, req_prob = 0, seed_we = 0;
  logic [10:0] req_addr = 0;
  logic [15:0] req_wdata = 0, seed = 0, rsp_data;
  logic rsp_valid, rsp_prob;
  int checks = 0, failures = 0, n_prob = 0, n_det = 0;
  logic [15:0] mem [2048];
  bit md [2048];
  real s1 = 0, s2 = 0, m, sd;

  pmem_top #(.N_MATS(1), .N_SUB(2), .ANALOG(1'b1)) dut (
    .clk, .rst_n, .req_valid, .req_we, .req_prob, .req_addr, .req_wdata,
    .seed_we, .seed, .rsp_valid, .rsp_prob, .rsp_data);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [15:0] d, input bit prob);
    @(negedge clk); req_valid = 1; req_we = 1; req_prob = prob; req_addr = 11'(a); req_wdata = d;
    mem[a] = d; md[a] = prob;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask

  task automatic rd(input int a, output int v);
    int mu, sg, nz;
    @(negedge clk); req_valid = 1; req_we = 0; req_addr = 11'(a);
    @(negedge clk); req_valid = 0;
    chk(rsp_valid, "response one cycle after the read");
    chk(rsp_prob == md[a], "response mode");
    v = int'($signed(rsp_data));
    if (md[a]) begin
      n_prob++;
      mu = int'($signed(mem[a][11:4])); sg = int'(mem[a][3:0]); nz = v - mu;
      chk(nz % 4 == 0 && nz <= 60 && nz >= -60, $sformatf("noise %0d is an ADC code step", nz));
      chk(nz <= sg * 8 + 2 && nz >= -(sg * 8 + 2), "noise within what sigma allows");
      if (sg == 0) chk(nz == 0, "sigma 0 reads back mu");
    end else begin
      n_det++;
      chk(rsp_data == mem[a], "deterministic word");
    end
  endtask

  initial begin
    #100000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int v;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 2048; a++)
      if (a % 3 == 0) wr(a, pack_prob(8'($urandom), 4'($urandom)), 1);
      else            wr(a, 16'($urandom), 0);
    for (int i = 0; i < 6000; i++) rd($urandom % 2048, v);
    wr(1500, pack_prob(8'sd5, 4'd8), 1);
    for (int i = 0; i < 4000; i++) begin
      rd(1500, v);
      s1 += real'(v); s2 += real'(v) ** 2;
    end
    m = s1 / 4000; sd = $sqrt(s2 / 4000 - m * m);
    $display("analog mu=5 sigma=8: mean %f deviation %f", m, sd);
    chk(m > 4.4 && m < 5.6, "analog sample mean");
    chk(sd > 7.4 && sd < 8.8, "analog sample deviation");
    chk(n_prob > 0 && n_det > 0, "both modes read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
