// tb_pmem_workloads: runs the three kernels the memory is meant for on the
// default-size memory, with the testbench acting as the host processor.
//   BNN : out[i] = in[i] * w[i], i < 128, where in[] is deterministic data
//         and w[] probabilistic weights stored as (mu, sigma); 5 forward
//         passes, each resampling every weight through ordinary loads.
//   DP  : y[i] = x[i] + n[i], i < 128, with n[i] ~ N(0, sigma_dp^2) read from
//         zero-mean words (the Gaussian mechanism); 20 releases.
//   PCME: two 1024-dimensional probabilistic embeddings z_a, z_b; 10 Monte
//         Carlo samples of the element-wise product z_a*z_b and of
//         ||z_a - z_b||^2.
// Every load is checked against a shadow memory and the reference RNGs, every
// result against the same arithmetic on the expected loads. Loads stream one
// per cycle; the test checks that a stream of N loads returns its last word N
// cycles after the first request plus the one-cycle read latency. It also
// checks the DP noise statistics and the PCME sample mean of z_a - z_b.
module tb_pmem_workloads;
  import pmem_pkg::*;
  import pmem_ref_pkg::*;
  localparam int WORDS = 16384;
  logic clk = 0, rst_n = 0, req_valid = 0, req_we = 0, req_prob = 0, seed_we = 0;
  logic [13:0] req_addr = 0;
  logic [15:0] req_wdata = 0, seed = 0, rsp_data;
  logic rsp_valid, rsp_prob;
  logic [15:0] mem [WORDS];
  bit          md  [WORDS];
  ref_grng rg [16];
  int checks = 0, failures = 0;
  longint cyc = 0;

  pmem_top dut (.clk, .rst_n, .req_valid, .req_we, .req_prob, .req_addr, .req_wdata,
                .seed_we, .seed, .rsp_valid, .rsp_prob, .rsp_data);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [15:0] d, input bit prob);
    @(negedge clk); req_valid = 1; req_we = 1; req_prob = prob; req_addr = 14'(a); req_wdata = d;
    mem[a] = d; md[a] = prob;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask

  // Stream loads of addrs[], one per cycle; returns the loaded values
  task automatic load_stream(input int addrs [$], output int vals [$]);
    int exp_q [$];
    longint t0, t_last;
    vals.delete();
    foreach (addrs[i]) begin
      automatic int a = addrs[i], s = addrs[i] / 1024;
      @(negedge clk);
      if (i == 0) t0 = cyc;
      if (i > 0) begin
        chk(rsp_valid, "stream response");
        vals.push_back(int'($signed(rsp_data)));
      end
      req_valid = 1; req_we = 0; req_addr = 14'(a);
      if (md[a]) begin
        exp_q.push_back(int'($signed(mem[a][11:4])) + noise_of(int'(mem[a][3:0]), rg[s].eps()));
        rg[s].step();
      end else exp_q.push_back(int'($signed(mem[a])));
    end
    @(negedge clk); req_valid = 0;
    chk(rsp_valid, "last stream response");
    vals.push_back(int'($signed(rsp_data)));
    t_last = cyc;
    chk(t_last - t0 == longint'(addrs.size()), $sformatf("stream of %0d loads took %0d cycles", addrs.size(), t_last - t0));
    foreach (vals[i]) chk(vals[i] == exp_q[i], $sformatf("load %0d got %0d exp %0d", i, vals[i], exp_q[i]));
  endtask

  initial begin
    #400000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int addrs [$], vals [$];
    int in_v [128], mu_w [128], sg_w [128], x_v [128], mu_a [1024], mu_b [1024], sg_a [1024], sg_b [1024];
    real s1, s2, m, sd;
    for (int s = 0; s < 16; s++) rg[s] = new(16'h1D2B + 16'(s / 4) * 16'h3301 + 16'(s % 4) * 16'h0101, 12);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---------------- BNN: in[] in mat 0, w[] in mat 1 ----------------
    for (int i = 0; i < 128; i++) begin
      in_v[i] = int'($urandom % 64) - 32;
      mu_w[i] = int'($urandom % 200) - 100;
      sg_w[i] = int'($urandom % 16);
      wr(i, 16'(in_v[i]), 0);
      wr(4096 + i, pack_prob(8'(mu_w[i]), 4'(sg_w[i])), 1);
    end
    for (int pass = 0; pass < 5; pass++) begin
      automatic int acc = 0;
      addrs.delete();
      for (int i = 0; i < 128; i++) begin addrs.push_back(i); addrs.push_back(4096 + i); end
      load_stream(addrs, vals);
      for (int i = 0; i < 128; i++) begin
        chk(vals[2*i] == in_v[i], "BNN input is deterministic");
        acc += vals[2*i] * vals[2*i+1];

      end
      $display("BNN pass %0d: sum of out[i] = %0d", pass, acc);
    end

    // ---------------- DP: x[] in mat 2, zero-mean noise in mat 3 ----------------
    for (int i = 0; i < 128; i++) begin
      x_v[i] = int'($urandom % 100);
      wr(8192 + i, 16'(x_v[i]), 0);
      wr(12288 + i, pack_prob(8'sd0, 4'd7), 1);
    end
    s1 = 0; s2 = 0;
    for (int rel = 0; rel < 20; rel++) begin
      addrs.delete();
      for (int i = 0; i < 128; i++) begin addrs.push_back(8192 + i); addrs.push_back(12288 + i); end
      load_stream(addrs, vals);
      for (int i = 0; i < 128; i++) begin
        automatic int y = vals[2*i] + vals[2*i+1];
        chk(vals[2*i] == x_v[i], "DP data is deterministic");
        s1 += real'(y - x_v[i]); s2 += real'(y - x_v[i]) ** 2;
      end
    end
    m = s1 / 2560; sd = $sqrt(s2 / 2560 - m * m);
    $display("DP noise mean %f deviation %f (sigma 7)", m, sd);
    chk(m > -0.5 && m < 0.5 && sd > 6.4 && sd < 7.6, "DP noise statistics");

    // ---------------- PCME: z_a in subarrays 1 of mats 0/1, z_b in mats 2/3 ----------------
    for (int d = 0; d < 1024; d++) begin
      mu_a[d] = int'($urandom % 64) - 32; sg_a[d] = int'($urandom % 16);
      mu_b[d] = int'($urandom % 64) - 32; sg_b[d] = int'($urandom % 16);
      wr(1024 + (d / 512) * 4096 + d % 512, pack_prob(8'(mu_a[d]), 4'(sg_a[d])), 1);
      wr(9216 + (d / 512) * 4096 + d % 512, pack_prob(8'(mu_b[d]), 4'(sg_b[d])), 1);
    end
    s1 = 0;
    for (int smp = 0; smp < 10; smp++) begin
      automatic longint sqd = 0, dot = 0;
      addrs.delete();
      for (int d = 0; d < 1024; d++) begin
        addrs.push_back(1024 + (d / 512) * 4096 + d % 512);
        addrs.push_back(9216 + (d / 512) * 4096 + d % 512);
      end
      load_stream(addrs, vals);
      for (int d = 0; d < 1024; d++) begin
        dot  += longint'(vals[2*d] * vals[2*d+1]);
        sqd += longint'((vals[2*d] - vals[2*d+1]) ** 2);
        s1   += real'(vals[2*d] - vals[2*d+1] - (mu_a[d] - mu_b[d]));
      end
      $display("PCME sample %0d: sum z_a*z_b = %0d, ||z_a - z_b||^2 = %0d", smp, dot, sqd);
    end
    m = s1 / 10240;
    $display("PCME mean deviation of z_a - z_b from mu_a - mu_b: %f", m);
    chk(m > -0.5 && m < 0.5, "PCME sample mean");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
