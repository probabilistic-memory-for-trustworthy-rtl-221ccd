// sigma_eps_mult: the local multiplier of the digital RNG group (Fig. 3(c)
// "Multiplier"), computing the noise term sigma*eps in the digital domain.
//
// sigma is an unsigned SIGMA_W-bit standard deviation in mu LSBs; eps is the
// signed fixed-point Gaussian from clt_grng with EPS_FRAC fractional bits. The
// exact product sigma*eps_q has EPS_FRAC fractional bits; it is rounded to the
// nearest mu LSB (ties toward +infinity) and returned as a signed NOISE_W-bit
// integer. That rounding is this design's choice. Purely combinational.
module sigma_eps_mult
  import pmem_pkg::*;
(
  input  logic [SIGMA_W-1:0]        sigma,
  input  logic signed [EPS_W-1:0]   eps,
  output logic signed [NOISE_W-1:0] noise
);

  localparam int PW = SIGMA_W + EPS_W + 1;

  logic signed [PW-1:0] prod, rounded;

  always_comb begin
    prod    = $signed({1'b0, sigma}) * PW'(eps);
    rounded = (prod + PW'(1 << (EPS_FRAC - 1))) >>> EPS_FRAC;
    noise   = rounded[NOISE_W-1:0];
  end

endmodule
