// analog_rng_adc: BEHAVIOURAL MODEL (not synthesizable logic) of the analog
// near-memory RNG path of Fig. 3(b): the supply-noise sampler (low- and
// high-pass filters, amplifier, sampling capacitor, inverter pulse generator),
// the bit-line charge/discharge of the cell driven by the random pulses, the
// shared ADC and the register holding the sign bit.
//
// The real part turns supply noise into a random pulse that discharges the bit
// line in proportion to the stored sigma, and digitises the result. Only its
// digital effect is modelled: on every `sample` strobe a new eps ~ N(0,1) is
// drawn (twelve uniform draws summed, standing in for the physical noise
// source), held in the sign register and a magnitude register; between strobes
// the outputs are combinational in sigma:
//   adc_code = min(round(sigma*|eps| / 2^ADC_LSB_LOG2), 2^ADC_BITS - 1)
//   noise    = (sign ? -1 : +1) * adc_code * 2^ADC_LSB_LOG2     (mu LSBs)
// The 4-bit ADC follows the paper; the ADC step (4 mu LSBs, so the full scale
// covers sigma = 15 at |eps| = 4) is this design's choice. Same timing as the
// digital RNG: the value consumed by a read is the one drawn at the previous
// strobe, and a read strobes the next one.
module analog_rng_adc
  import pmem_pkg::*;
#(
  parameter int ADC_BITS     = 4,
  parameter int ADC_LSB_LOG2 = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sample,
  input  logic [SIGMA_W-1:0]        sigma,
  output logic [ADC_BITS-1:0]       adc_code,
  output logic                      sign,
  output logic signed [NOISE_W-1:0] noise
);

  // |eps| in units of 2^-EPS_FRAC, as drawn by the noise source
  logic [15:0] eps_mag;

  // One Gaussian draw from the modelled entropy source, in 2^-EPS_FRAC units
  function automatic int draw_eps();
    int s;
    s = 0;
    for (int i = 0; i < 12; i++) s += int'($urandom & 32'hFFFF);
    s = s - 12 * 32768;
    return s / (1 << (16 - EPS_FRAC));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sign    <= 1'b0;
      eps_mag <= '0;
    end else if (sample) begin
      automatic int e = draw_eps();
      sign    <= (e < 0);
      eps_mag <= 16'((e < 0) ? -e : e);
    end
  end

  localparam int CODE_MAX = (1 << ADC_BITS) - 1;
  localparam int STEP     = 1 << (ADC_LSB_LOG2 + EPS_FRAC);

  always_comb begin
    automatic int mag  = int'(sigma) * int'(eps_mag);
    automatic int code = (mag + STEP / 2) / STEP;
    if (code > CODE_MAX) code = CODE_MAX;
    adc_code = ADC_BITS'(code);
    noise    = NOISE_W'(sign ? -(code << ADC_LSB_LOG2) : (code << ADC_LSB_LOG2));
  end

endmodule
