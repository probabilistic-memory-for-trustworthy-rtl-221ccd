// tb_pmem_subarray: drives one digital subarray (128 x 128, MUX 8, CLT-12)
// with random deterministic writes, probabilistic writes, reads and a reseed,
// and compares every response with a shadow memory plus the reference RNG:
// deterministic reads return the word, probabilistic reads return
// mu + round(sigma*eps/16) with the next reference eps. Checks the one-cycle
// read latency, rvalid only after reads, the RNG not advancing on
// deterministic reads, and the sample mean/deviation of one (mu, sigma) word.
module tb_pmem_subarray;
  import pmem_pkg::*;
  import pmem_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, we = 0, seed_we = 0, rvalid;
  mode_e wmode = MODE_DET, rmode;
  logic [9:0] addr = 0;
  logic [15:0] wdata = 0, seed_in = 0, rdata;
  logic [15:0] mem [1024];
  mode_e       md  [1024];
  int checks = 0, failures = 0, n_det = 0, n_prob = 0;
  ref_grng rg;
  real s1 = 0, s2 = 0, mean, sd;

  pmem_subarray #(.ROWS(128), .COLS(128), .MUX(8), .CLT_N(12), .ANALOG(1'b0), .SEED_BASE(16'h1D2B)) dut (
    .clk, .rst_n, .en, .we, .wmode, .addr, .wdata, .seed_we, .seed_in, .rvalid, .rmode, .rdata);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int a, input logic [15:0] d, input mode_e m);
    @(negedge clk); en = 1; we = 1; addr = 10'(a); wdata = d; wmode = m;
    @(posedge clk); #1; en = 0; we = 0;
    mem[a] = d; md[a] = m;
    chk(!rvalid, "no response to a write");
  endtask

  // read and check; returns the data read
  task automatic rd(input int a, output logic [15:0] got);
    logic [15:0] e;
    @(negedge clk); en = 1; we = 0; addr = 10'(a);
    if (md[a] == MODE_PROB) begin
      e = 16'($signed(mem[a][11:4])) + 16'(noise_of(int'(mem[a][3:0]), rg.eps()));
      rg.step(); n_prob++;
    end else begin
      e = mem[a]; n_det++;
    end
    @(posedge clk); #1; en = 0;
    chk(rvalid, "rvalid one cycle after read");
    chk(rmode == md[a], "mode of response");
    chk(rdata == e, $sformatf("read %0d got %h exp %h", a, rdata, e));
    got = rdata;
    @(posedge clk); #1;
    chk(!rvalid, "rvalid one cycle only");
  endtask

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] g;
    rg = new(16'h1D2B, 12);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 1024; a++) wr(a, 16'($urandom), MODE_DET);
    for (int i = 0; i < 3000; i++) begin
      automatic int a = $urandom % 1024;
      case ($urandom % 4)
        0: wr(a, 16'($urandom), MODE_DET);
        1: wr(a, pack_prob(8'($urandom), 4'($urandom)), MODE_PROB);
        default: rd(a, g);
      endcase
      if (i == 1500) begin
        @(negedge clk); seed_we = 1; seed_in = 16'hC0DE;
        @(negedge clk); seed_we = 0;
        rg.reseed(16'hC0DE);
      end
    end
    wr(77, pack_prob(8'sd10, 4'd6), MODE_PROB);
    for (int i = 0; i < 4000; i++) begin
      rd(77, g);
      s1 += real'($signed(g));
      s2 += real'($signed(g)) ** 2;
    end
    mean = s1 / 4000; sd = $sqrt(s2 / 4000 - mean * mean);
    $display("mu=10 sigma=6: sample mean %f deviation %f", mean, sd);
    chk(mean > 9.6 && mean < 10.4, "sample mean");
    chk(sd > 5.6 && sd < 6.4, "sample deviation");
    chk(n_det > 0 && n_prob > 0, "both modes read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
