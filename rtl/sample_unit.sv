// sample_unit: the per-word mode multiplexer and output adder of a p-MEM read.
//
// In deterministic mode the stored word goes out unchanged (the noise path is
// bypassed). In probabilistic mode the word is read as a (mu, sigma) pair and
// the output is the sample w = mu + sigma*eps, where the noise term sigma*eps
// comes already rounded to mu LSBs from either the digital multiplier or the
// analog RNG/ADC path. The sample is sign-extended to the 16-bit word width, so
// a load returns a plain int16 in both modes. The 16-bit output format is this
// design's choice. Purely combinational.
module sample_unit
  import pmem_pkg::*;
(
  input  mode_e                     mode,
  input  logic [WORD_W-1:0]         word,
  input  logic signed [NOISE_W-1:0] noise,
  output logic [SIGMA_W-1:0]        sigma,   // sigma field, to the noise source
  output logic [WORD_W-1:0]         rdata
);

  prob_word_t pw;
  logic signed [WORD_W-1:0] sample;

  always_comb begin
    pw     = prob_word_t'(word);
    sigma  = pw.sigma;
    sample = WORD_W'(pw.mu) + WORD_W'(noise);
    rdata  = (mode == MODE_PROB) ? sample : word;
  end

endmodule
