// tb_sample_unit: random words, modes and noise values; deterministic mode must
// pass the word through, probabilistic mode must return mu + noise as int16.
module tb_sample_unit;
  import pmem_pkg::*;
  mode_e mode;
  logic [15:0] word, rdata;
  logic signed [8:0] noise;
  logic [3:0] sigma;
  int checks = 0, failures = 0, mu, e;

  sample_unit dut (.mode, .word, .noise, .sigma, .rdata);

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      word  = 16'($urandom);
      noise = 9'($signed(9'($urandom % 241)) - 9'sd120);
      mode  = mode_e'($urandom % 2);
      #1;
      mu = int'($signed(word[11:4]));
      e  = (mode == MODE_PROB) ? mu + int'(noise) : int'(word);
      checks++;
      if (rdata !== 16'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL word %h mode %0d noise %0d got %h exp %h", word, mode, noise, rdata, 16'(e));
      end
      checks++;
      if (sigma !== word[3:0]) begin failures++; $display("FAIL sigma field"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
