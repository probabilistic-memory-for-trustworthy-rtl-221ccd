// tb_col_mux: random bit-line patterns and words for every select value;
// read bit b must come from column b*8+sel, the write must drive exactly the
// columns b*8+sel with the word bits.
module tb_col_mux;
  logic [2:0] sel;
  logic [127:0] bl, wbl, wmask, ebl, emask;
  logic [15:0] rword, wword, er;
  int checks = 0, failures = 0;

  col_mux #(.COLS(128), .MUX(8)) dut (.sel, .bl, .rword, .wword, .wbl, .wmask);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      sel = 3'(i % 8);
      bl = {$urandom, $urandom, $urandom, $urandom};
      wword = 16'($urandom);
      #1;
      er = '0; ebl = '0; emask = '0;
      for (int b = 0; b < 16; b++) begin
        er[b] = bl[8*b + int'(sel)];
        ebl[8*b + int'(sel)] = wword[b];
        emask[8*b + int'(sel)] = 1'b1;
      end
      checks++; if (rword !== er)   begin failures++; $display("FAIL read sel %0d", sel); end
      checks++; if (wbl !== ebl)    begin failures++; $display("FAIL wbl sel %0d", sel); end
      checks++; if (wmask !== emask) begin failures++; $display("FAIL wmask sel %0d", sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
