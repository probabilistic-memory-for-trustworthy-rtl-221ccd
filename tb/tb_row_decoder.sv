// tb_row_decoder: exhaustive; exactly the addressed word line is high when
// enabled, none when disabled.
module tb_row_decoder;
  logic en;
  logic [6:0] row;
  logic [127:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(128)) dut (.en, .row, .wl);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 128; r++)
      for (int e = 0; e < 2; e++) begin
        en = 1'(e); row = 7'(r); #1;
        checks++;
        if (wl !== ((e != 0) ? (128'd1 << r) : 128'd0)) begin failures++; $display("FAIL row %0d en %0d", r, e); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
