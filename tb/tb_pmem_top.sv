// tb_pmem_top: end-to-end test of the whole memory at its default size
// (4 mats x 4 subarrays x 128 x 128 cells, digital CLT-12 RNGs).
//
// A host model issues one request per cycle: deterministic writes,
// probabilistic (mu, sigma) writes, reads, and at one point a reseed of all
// RNGs. Each response is checked in the cycle after its read against a shadow
// memory and sixteen reference RNGs, one per subarray. The test counts each
// mechanism of the design and fails if one never happened: deterministic and
// probabilistic reads and writes, mode switches of an address in both
// directions, zero-variance words (sigma = 0 reads back mu exactly),
// back-to-back probabilistic reads of one subarray, a reseed, and reads of
// every mat and subarray. Finally it checks the sample mean and deviation of
// one stored distribution read 4000 times.
module tb_pmem_top;
  import pmem_pkg::*;
  import pmem_ref_pkg::*;
  localparam int WORDS = 16384;
  logic clk = 0, rst_n = 0, req_valid = 0, req_we = 0, req_prob = 0, seed_we = 0;
  logic [13:0] req_addr = 0;
  logic [15:0] req_wdata = 0, seed = 0, rsp_data;
  logic rsp_valid, rsp_prob;
  logic [15:0] mem [WORDS];
  bit          md  [WORDS];
  bit          written [WORDS];
  ref_grng rg [16];
  int checks = 0, failures = 0;
  int n_det_rd = 0, n_prob_rd = 0, n_det_wr = 0, n_prob_wr = 0, n_to_prob = 0, n_to_det = 0;
  int n_zero_var = 0, n_b2b = 0, n_reseed = 0, sub_hits [16];
  int last_prob_sub = -1;
  logic        exp_valid = 0, exp_prob;
  logic [15:0] exp_data;
  real s1 = 0, s2 = 0, mean, sd;

  pmem_top dut (.clk, .rst_n, .req_valid, .req_we, .req_prob, .req_addr, .req_wdata,
                .seed_we, .seed, .rsp_valid, .rsp_prob, .rsp_data);
  always #5 clk = ~clk;

  function automatic logic [15:0] sub_base(int sub);
    return 16'h1D2B + 16'(sub / 4) * 16'h3301 + 16'(sub % 4) * 16'h0101;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic count(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  // Check the response due in this cycle, then issue one request
  task automatic issue(input bit we, input bit prob, input int a, input logic [15:0] d);
    int sub;
    @(negedge clk);
    chk(rsp_valid == exp_valid, "rsp_valid one cycle after each read only");
    if (exp_valid) begin
      chk(rsp_data == exp_data, $sformatf("data got %h exp %h", rsp_data, exp_data));
      chk(rsp_prob == exp_prob, "rsp_prob");
    end
    sub = a / 1024;
    req_valid = 1; req_we = we; req_prob = prob; req_addr = 14'(a); req_wdata = d;
    exp_valid = !we;
    if (we) begin
      if (written[a] && md[a] != prob) begin if (prob) n_to_prob++; else n_to_det++; end
      if (prob) n_prob_wr++; else n_det_wr++;
      mem[a] = d; md[a] = prob; written[a] = 1;
      last_prob_sub = -1;
    end else begin
      exp_prob = md[a];
      sub_hits[sub]++;
      if (md[a]) begin
        exp_data = 16'($signed(mem[a][11:4])) + 16'(noise_of(int'(mem[a][3:0]), rg[sub].eps()));
        rg[sub].step();
        n_prob_rd++;
        if (mem[a][3:0] == 0) begin
          n_zero_var++;
          chk(exp_data == 16'($signed(mem[a][11:4])), "zero variance reads mu");
        end
        if (last_prob_sub == sub) n_b2b++;
        last_prob_sub = sub;
      end else begin
        exp_data = mem[a];
        n_det_rd++;
        last_prob_sub = -1;
      end
    end
  endtask

  task automatic idle();
    @(negedge clk);
    chk(rsp_valid == exp_valid, "rsp_valid");
    if (exp_valid) chk(rsp_data == exp_data, "data");
    req_valid = 0; exp_valid = 0; last_prob_sub = -1;
  endtask

  initial begin
    #200000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 16; s++) begin rg[s] = new(sub_base(s), 12); sub_hits[s] = 0; end
    for (int a = 0; a < WORDS; a++) begin mem[a] = 0; md[a] = 0; written[a] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fill the whole memory, a quarter of it with distributions
    for (int a = 0; a < WORDS; a++)
      if ($urandom % 4 == 0) issue(1, 1, a, pack_prob(8'($urandom), 4'($urandom)));
      else                   issue(1, 0, a, 16'($urandom));
    for (int i = 0; i < 40000; i++) begin
      automatic int a = $urandom % WORDS;
      automatic int k = $urandom % 8;
      if (i == 20000) begin
        idle();
        @(negedge clk); seed_we = 1; seed = 16'h5EED;
        @(negedge clk); seed_we = 0;
        for (int s = 0; s < 16; s++) rg[s].reseed(16'h5EED);
        n_reseed++;
      end
      if (k == 0)      issue(1, 0, a, 16'($urandom));
      else if (k == 1) issue(1, 1, a, pack_prob(8'($urandom), 4'($urandom % 3 == 0 ? 0 : $urandom)));
      else if (k == 2) idle();
      else if (k == 3) begin  // burst of probabilistic reads in one subarray
        for (int j = 0; j < 4; j++) begin
          automatic int b = (a & ~1023) | ($urandom % 1024);
          if (md[b]) issue(0, 0, b, 0);
        end
      end
      else             issue(0, 0, a, 0);
    end
    // statistics of one distribution, mu = -20, sigma = 9
    issue(1, 1, 5000, pack_prob(-8'sd20, 4'd9));
    for (int i = 0; i < 4000; i++) begin
      issue(0, 0, 5000, 0);
      @(posedge clk); #1;
      s1 += real'($signed(rsp_data));
      s2 += real'($signed(rsp_data)) ** 2;
    end
    idle(); idle();
    mean = s1 / 4000; sd = $sqrt(s2 / 4000 - mean * mean);
    $display("mu=-20 sigma=9: sample mean %f deviation %f", mean, sd);
    chk(mean > -20.5 && mean < -19.5, "sample mean");
    chk(sd > 8.5 && sd < 9.5, "sample deviation");
    $display("mechanisms: det_rd=%0d prob_rd=%0d det_wr=%0d prob_wr=%0d to_prob=%0d to_det=%0d zero_var=%0d b2b=%0d reseed=%0d",
             n_det_rd, n_prob_rd, n_det_wr, n_prob_wr, n_to_prob, n_to_det, n_zero_var, n_b2b, n_reseed);
    count(n_det_rd > 0, "deterministic read");
    count(n_prob_rd > 0, "probabilistic read");
    count(n_det_wr > 0, "deterministic write");
    count(n_prob_wr > 0, "probabilistic write");
    count(n_to_prob > 0, "mode switch to probabilistic");
    count(n_to_det > 0, "mode switch to deterministic");
    count(n_zero_var > 0, "zero-variance word");
    count(n_b2b > 0, "back-to-back probabilistic reads");
    count(n_reseed > 0, "reseed");
    for (int s = 0; s < 16; s++) count(sub_hits[s] > 0, $sformatf("read of subarray %0d", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
