// pmem_subarray: one p-MEM subarray, ROWS x COLS cells with its peripherals and
// its near-memory RNG (Fig. 3(a), with (b) or (c) as the RNG).
//
// A subarray is an ordinary memory read/written one WORD_W-bit word at a time
// (COLS/MUX columns after the column multiplexer), plus a mode bit per word
// and one shared Gaussian RNG on the read path. A write stores the word and its
// mode. A read of a deterministic word returns it unchanged; a read of a
// probabilistic word returns mu + eps*sigma with a fresh eps, and advances the
// RNG. With ANALOG = 0 (pSRAM-D) eps comes from the CLT-12 LFSR generator and
// sigma*eps from the local multiplier; with ANALOG = 1 (pSRAM-A) sigma*eps
// comes from the behavioural analog RNG/ADC model (ADC_BITS-bit ADC with a
// step of 2^ADC_LSB_LOG2 mu LSBs; unused when ANALOG = 0).
//
// Address: addr = {row, column select}. Timing: one access per cycle; a read
// issued with `en` high and `we` low at edge k returns `rdata` with `rvalid`
// high in the cycle after edge k, in both modes (the sampling adds logic on the
// read path, not a pipeline stage). Writes take effect at the edge.
// The geometry defaults (128 x 128 cells, MUX ratio 8, CLT depth 12) are the
// paper's; one RNG per subarray read channel (serving the four 4-bit units of
// the 16-bit word) and the single-cycle read are this design's choices.
module pmem_subarray
  import pmem_pkg::*;
#(
  parameter int          ROWS      = 128,
  parameter int          COLS      = 128,
  parameter int          MUX       = 8,
  parameter int          CLT_N     = 12,
  parameter bit          ANALOG    = 1'b0,
  parameter int          ADC_BITS  = 4,
  parameter int          ADC_LSB_LOG2 = 2,
  parameter logic [15:0] SEED_BASE = 16'h1D2B,
  localparam int         RW        = $clog2(ROWS),
  localparam int         CW        = (MUX > 1) ? $clog2(MUX) : 1,
  localparam int         AW        = $clog2(ROWS * MUX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              we,
  input  mode_e             wmode,
  input  logic [AW-1:0]     addr,
  input  logic [WORD_W-1:0] wdata,
  input  logic              seed_we,
  input  logic [LFSR_W-1:0] seed_in,
  output logic              rvalid,
  output mode_e             rmode,
  output logic [WORD_W-1:0] rdata
);

  logic [RW-1:0]     row;
  logic [CW-1:0]     csel;
  logic [ROWS-1:0]   wl;
  logic [COLS-1:0]   bl, wbl, wmask;
  logic [WORD_W-1:0] rword, sampled;
  mode_e             mode_now;
  logic [SIGMA_W-1:0] sigma;
  logic signed [NOISE_W-1:0] noise;
  logic              rd, rd_prob;

  assign row  = addr[AW-1:AW-RW];
  assign csel = (MUX > 1) ? CW'(addr[CW-1:0]) : '0;
  assign rd   = en && !we;
  assign rd_prob = rd && (mode_now == MODE_PROB);

  row_decoder #(.ROWS(ROWS)) u_rowdec (.en, .row, .wl);

  bit_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wl, .we(en && we), .wbl, .wmask, .bl
  );

  col_mux #(.COLS(COLS), .MUX(MUX)) u_colmux (
    .sel(csel), .bl, .rword, .wword(wdata), .wbl, .wmask
  );

  mode_reg #(.ROWS(ROWS), .MUX(MUX)) u_mode (
    .clk, .rst_n, .we(en && we), .waddr(addr), .wmode, .raddr(addr), .rmode(mode_now)
  );

  if (ANALOG) begin : g_analog
    logic [ADC_BITS-1:0] adc_code;
    logic                sign;
    analog_rng_adc #(.ADC_BITS(ADC_BITS), .ADC_LSB_LOG2(ADC_LSB_LOG2)) u_rng (
      .clk, .rst_n, .sample(rd_prob), .sigma, .adc_code, .sign, .noise
    );
  end else begin : g_digital
    logic signed [EPS_W-1:0] eps;
    clt_grng #(.CLT_N(CLT_N), .SEED_BASE(SEED_BASE)) u_rng (
      .clk, .rst_n, .step(rd_prob), .seed_we, .seed_in, .eps
    );
    sigma_eps_mult u_mult (.sigma, .eps, .noise);
  end

  sample_unit u_sample (.mode(mode_now), .word(rword), .noise, .sigma, .rdata(sampled));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rmode  <= MODE_DET;
      rdata  <= '0;
    end else begin
      rvalid <= rd;
      if (rd) begin
        rmode <= mode_now;
        rdata <= sampled;
      end
    end
  end

  initial assert (COLS / MUX == WORD_W)
    else $error("pmem_subarray: COLS/MUX must equal the %0d-bit word", WORD_W);

endmodule
