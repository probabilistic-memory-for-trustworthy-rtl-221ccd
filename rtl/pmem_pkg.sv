// pmem_pkg: shared constants, types and field helpers of the probabilistic memory.
//
// A stored 16-bit word is either a plain value (deterministic mode) or a
// probabilistic parameter pair (probabilistic mode). The pair is held as an
// 8-bit two's-complement mean mu and a 4-bit unsigned standard deviation sigma,
// the 8-bit-mu / 4-bit-sigma precision used throughout the design; sigma is in
// the same units as one mu LSB. Probabilistic word layout (this design's choice):
//   [15:12] reserved (ignored on read)  [11:4] mu  [3:0] sigma
// The Gaussian variable eps is carried as a signed fixed-point number with
// EPS_FRAC fractional bits, so eps = eps_q / 2**EPS_FRAC.
package pmem_pkg;

  localparam int WORD_W   = 16;  // width of one read/write word
  localparam int MU_W     = 8;   // mean precision
  localparam int SIGMA_W  = 4;   // standard-deviation precision (one 4-bit unit)
  localparam int LFSR_W   = 16;  // width of each uniform source of the digital RNG
  localparam int EPS_W    = 8;   // width of the quantised eps
  localparam int EPS_FRAC = 4;   // fractional bits of the quantised eps
  // sigma*eps after rounding to mu LSBs: |15 * 128/16| = 120 fits in 9 signed bits
  localparam int NOISE_W  = 9;

  typedef enum logic {
    MODE_DET  = 1'b0,  // read returns the stored word
    MODE_PROB = 1'b1   // read returns mu + eps*sigma
  } mode_e;

  typedef struct packed {
    logic [WORD_W-MU_W-SIGMA_W-1:0] rsvd;
    logic signed [MU_W-1:0]         mu;
    logic [SIGMA_W-1:0]             sigma;
  } prob_word_t;

  // Pack a (mu, sigma) pair into a stored word.
  function automatic logic [WORD_W-1:0] pack_prob(input logic signed [MU_W-1:0] mu,
                                                  input logic [SIGMA_W-1:0] sigma);
    prob_word_t p;
    p.rsvd  = '0;
    p.mu    = mu;
    p.sigma = sigma;
    return p;
  endfunction

endpackage
