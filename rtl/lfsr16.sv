// lfsr16: one uniform random source of the digital Gaussian RNG.
//
// A Galois linear-feedback shift register of W bits (16 by default) with the
// maximal-length feedback polynomial x^16 + x^14 + x^13 + x^11 + 1 (TAPS mask
// 16'hB400). Each time `step` is high at a clock edge the register advances
// STEPS shift positions at once (leap-ahead), so consecutive outputs share no
// bits and each output is a fresh, roughly uniform W-bit integer. The register
// is seedable: `seed_we` loads `seed_in` (an all-zero seed, which would lock the
// register, is replaced by the SEED parameter). Reset loads SEED.
// The 16-bit width follows the paper; the polynomial, the leap-ahead and the
// seed port are this design's choices ("configurable" LFSRs are read as a
// loadable seed plus a compile-time polynomial).
// Timing: `value` is the register itself, valid the whole cycle.
module lfsr16 #(
  parameter int             W     = 16,
  parameter logic [W-1:0]   TAPS  = 16'hB400,
  parameter logic [W-1:0]   SEED  = 16'hACE1,
  parameter int             STEPS = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic         seed_we,
  input  logic [W-1:0] seed_in,
  output logic [W-1:0] value
);

  logic [W-1:0] state, next;

  // STEPS single-bit Galois shifts unrolled into one cycle
  always_comb begin
    next = state;
    for (int i = 0; i < STEPS; i++)
      next = next[0] ? ((next >> 1) ^ TAPS) : (next >> 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= SEED;
    else if (seed_we) state <= (seed_in == '0) ? SEED : seed_in;
    else if (step)    state <= next;
  end

  assign value = state;

  initial assert (SEED != '0) else $error("lfsr16: SEED must be non-zero");

endmodule
