// tb_lfsr16: checks the leap-ahead LFSR against a bit-serial reference:
// reset value, 16 shifts per step, hold when not stepping, seed load and the
// zero-seed guard, and that 4096 consecutive outputs have no repeat.
module tb_lfsr16;
  import pmem_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, seed_we = 0;
  logic [15:0] seed_in = 0, value, exp_v;
  int checks = 0, failures = 0;
  bit seen [logic [15:0]];

  lfsr16 dut (.clk, .rst_n, .step, .seed_we, .seed_in, .value);
  always #5 clk = ~clk;

  task automatic chk(input logic [15:0] e, input string what);
    checks++;
    if (value !== e) begin failures++; $display("FAIL %s: got %h exp %h", what, value, e); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(16'hACE1, "reset seed");
    exp_v = 16'hACE1;
    for (int i = 0; i < 4096; i++) begin
      step = ($urandom % 4) != 0;
      @(posedge clk); #1;
      if (step) exp_v = lfsr_adv(exp_v);
      chk(exp_v, "step");
    end
    step = 1;
    for (int i = 0; i < 4096; i++) begin
      @(posedge clk); #1;
      checks++;
      if (seen.exists(value)) begin failures++; $display("FAIL repeat %h", value); end
      seen[value] = 1;
    end
    step = 0; seed_we = 1; seed_in = 16'h1234;
    @(posedge clk); #1; seed_we = 0;
    chk(16'h1234, "seed load");
    seed_we = 1; seed_in = 16'h0000;
    @(posedge clk); #1; seed_we = 0;
    chk(16'hACE1, "zero seed guard");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
