// tb_mode_reg: reset clears every mode bit; random writes and reads match a
// shadow copy.
module tb_mode_reg;
  import pmem_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [9:0] waddr = 0, raddr = 0;
  mode_e wmode = MODE_DET, rmode;
  mode_e shadow [1024];
  int checks = 0, failures = 0;

  mode_reg #(.ROWS(128), .MUX(8)) dut (.clk, .rst_n, .we, .waddr, .wmode, .raddr, .rmode);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) shadow[i] = MODE_DET;
    for (int i = 0; i < 1024; i++) begin
      raddr = 10'(i); #1;
      checks++; if (rmode !== MODE_DET) begin failures++; $display("FAIL reset %0d", i); end
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1; waddr = 10'($urandom); wmode = mode_e'($urandom % 2);
      raddr = 10'($urandom);
      #1;
      checks++; if (rmode !== shadow[raddr]) begin failures++; if (failures < 10) $display("FAIL read %0d", raddr); end
      if (we) shadow[waddr] = wmode;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
