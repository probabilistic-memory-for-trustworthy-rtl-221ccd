// tb_bit_array: random masked writes and reads against a shadow array; every
// row is first written in full so no uninitialised cell is read.
module tb_bit_array;
  logic clk = 0, we = 0;
  logic [127:0] wl = 0, wbl = 0, wmask = 0, bl;
  logic [127:0] shadow [128];
  int checks = 0, failures = 0, r;

  bit_array #(.ROWS(128), .COLS(128)) dut (.clk, .wl, .we, .wbl, .wmask, .bl);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      wl = 128'd1 << i; we = 1; wbl = {$urandom, $urandom, $urandom, $urandom}; wmask = '1;
      shadow[i] = wbl;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      r = $urandom % 128;
      wl = 128'd1 << r;
      we = ($urandom % 2) == 1;
      wbl = {$urandom, $urandom, $urandom, $urandom};
      wmask = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++;
      if (bl !== shadow[r]) begin failures++; if (failures < 10) $display("FAIL read row %0d", r); end
      if (we) shadow[r] = (shadow[r] & ~wmask) | (wbl & wmask);
    end
    @(negedge clk); we = 0; wl = 0; #1;
    checks++; if (bl !== '0) begin failures++; $display("FAIL no word line"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
