// clt_grng: CLT-based digital Gaussian random number generator shared by a
// group of probabilistic cells (Fig. 3(c) "RNG": N LFSRs, adder, Quant).
//
// CLT_N independent 16-bit LFSRs are summed. By the central limit theorem the
// sum is close to Gaussian with mean CLT_N*(2^16-1)/2 and standard deviation
// 2^16*sqrt(CLT_N/12). With the default CLT_N = 12 the standard deviation is
// exactly 2^16, so the quantiser only has to remove the mean and shift:
//   eps_q = sat_EPS_W( round((sum - CLT_N*2^15) / 2^(16 - EPS_FRAC)) )
// giving eps ~ N(0,1) in units of 2^-EPS_FRAC (range about +-8). For other
// CLT_N the output standard deviation is sqrt(CLT_N/12) instead of 1.
// CLT depth 12 and the 16-bit LFSR width follow the paper; the quantiser
// format, rounding to nearest (ties up) and saturation are this design's.
// Interface: `step` advances every LFSR (one fresh eps per step); `eps` is
// combinational from the LFSR registers, valid in the cycle it is consumed.
// `seed_we` reseeds all LFSRs, each with seed_in XOR a per-source constant.
module clt_grng
  import pmem_pkg::*;
#(
  parameter int          CLT_N     = 12,
  parameter logic [15:0] SEED_BASE = 16'h1D2B
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    step,
  input  logic                    seed_we,
  input  logic [LFSR_W-1:0]       seed_in,
  output logic signed [EPS_W-1:0] eps
);

  localparam int SUM_W = LFSR_W + $clog2(CLT_N + 1) + 1;

  // Distinct non-zero per-source seed offsets (odd multiples of a golden-ratio constant)
  function automatic logic [15:0] seed_of(input int i);
    logic [31:0] h;
    h = 32'(SEED_BASE) * 32'd2654435761 + 32'(i) * 32'h9E37_79B9 + 32'h7F4A_7C15;
    return (h[31:16] == 16'd0) ? 16'h0001 : h[31:16];
  endfunction

  logic [LFSR_W-1:0] u [CLT_N];

  for (genvar i = 0; i < CLT_N; i++) begin : g_src
    lfsr16 #(.W(LFSR_W), .SEED(seed_of(i))) u_lfsr (
      .clk, .rst_n, .step, .seed_we,
      .seed_in(seed_in ^ seed_of(i)),
      .value  (u[i])
    );
  end

  // Adder and quantiser
  logic signed [SUM_W-1:0] sum, centred, shifted;
  localparam logic signed [SUM_W-1:0] MEAN = SUM_W'(CLT_N) <<< (LFSR_W - 1);
  localparam logic signed [SUM_W-1:0] EMAX = SUM_W'((1 << (EPS_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] EMIN = -SUM_W'(1 << (EPS_W - 1));

  always_comb begin
    sum = '0;
    for (int i = 0; i < CLT_N; i++) sum = sum + SUM_W'(u[i]);
    centred = sum - MEAN;
    shifted = (centred + (SUM_W'(1) <<< (LFSR_W - EPS_FRAC - 1))) >>> (LFSR_W - EPS_FRAC);
    if (shifted > EMAX)      eps = EMAX[EPS_W-1:0];
    else if (shifted < EMIN) eps = EMIN[EPS_W-1:0];
    else                     eps = shifted[EPS_W-1:0];
  end

endmodule
