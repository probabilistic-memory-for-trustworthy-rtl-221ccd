// pmem_top: a probabilistic memory (p-MEM) of N_MATS mats x N_SUB subarrays x
// (ROWS x COLS) cells; by default the 4-4-2kB organisation, 32 KiB in all.
//
// To the host it is a plain word-addressed memory with one extra bit per
// write. Writing with req_prob = 0 stores a deterministic 16-bit value; writing
// with req_prob = 1 stores a (mu, sigma) pair (see pmem_pkg for the layout).
// Every read is an ordinary load: a deterministic word comes back as stored, a
// probabilistic word comes back as a fresh Gaussian sample mu + eps*sigma,
// generated next to the array. A word with sigma = 0 reads back exactly mu, the
// zero-variance special case. seed_we / seed reseed every RNG.
//
// Address: req_addr = {mat, subarray, row, column select}, 2+2+7+3 = 14 bits by
// default (16384 words). Timing: one request per cycle, no back-pressure; the
// response to a read arrives with rsp_valid in the next cycle, with rsp_prob
// telling which mode served it. Writes give no response.
// ANALOG selects the RNG flavour of all subarrays: 0 = digital CLT RNG with a
// multiplier (synthesizable), 1 = analog noise RNG with ADC (behavioural model).
// ADC_BITS (4) and ADC_LSB_LOG2 (2) set the analog ADC resolution and step.
// CLT_N sets the depth of the digital generator (see clt_grng).
module pmem_top
  import pmem_pkg::*;
#(
  parameter int  N_MATS = 4,
  parameter int  N_SUB  = 4,
  parameter int  ROWS   = 128,
  parameter int  COLS   = 128,
  parameter int  MUX    = 8,
  parameter int  CLT_N  = 12,
  parameter bit  ANALOG = 1'b0,
  parameter int  ADC_BITS     = 4,
  parameter int  ADC_LSB_LOG2 = 2,
  localparam int MAW    = $clog2(ROWS * MUX) + ((N_SUB > 1) ? $clog2(N_SUB) : 0),
  localparam int MW     = (N_MATS > 1) ? $clog2(N_MATS) : 0,
  localparam int ADDR_W = MAW + MW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic              req_we,
  input  logic              req_prob,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [WORD_W-1:0] req_wdata,
  input  logic              seed_we,
  input  logic [LFSR_W-1:0] seed,
  output logic              rsp_valid,
  output logic              rsp_prob,
  output logic [WORD_W-1:0] rsp_data
);

  logic [N_MATS-1:0] mat_rvalid;
  mode_e             mat_rmode [N_MATS];
  logic [WORD_W-1:0] mat_rdata [N_MATS];
  mode_e             wmode;

  assign wmode = req_prob ? MODE_PROB : MODE_DET;

  for (genvar m = 0; m < N_MATS; m++) begin : g_mat
    logic sel;
    if (N_MATS > 1) begin : g_dec
      assign sel = (req_addr[ADDR_W-1:MAW] == MW'(m));
    end else begin : g_one
      assign sel = 1'b1;
    end
    pmem_mat #(
      .N_SUB(N_SUB), .ROWS(ROWS), .COLS(COLS), .MUX(MUX), .CLT_N(CLT_N), .ANALOG(ANALOG),
      .ADC_BITS(ADC_BITS), .ADC_LSB_LOG2(ADC_LSB_LOG2),
      .SEED_BASE(16'h1D2B + 16'(m) * 16'h3301)
    ) u_mat (
      .clk, .rst_n, .en(req_valid && sel), .we(req_we), .wmode, .addr(req_addr[MAW-1:0]),
      .wdata(req_wdata), .seed_we, .seed_in(seed),
      .rvalid(mat_rvalid[m]), .rmode(mat_rmode[m]), .rdata(mat_rdata[m])
    );
  end

  always_comb begin
    rsp_valid = |mat_rvalid;
    rsp_prob  = 1'b0;
    rsp_data  = '0;
    for (int m = 0; m < N_MATS; m++)
      if (mat_rvalid[m]) begin
        rsp_prob = (mat_rmode[m] == MODE_PROB);
        rsp_data = mat_rdata[m];
      end
  end

  // A read is answered in exactly the next cycle; nothing else answers
  property p_read_latency;
    @(posedge clk) disable iff (!rst_n) (req_valid && !req_we) |=> rsp_valid;
  endproperty
  property p_no_spurious;
    @(posedge clk) disable iff (!rst_n) !(req_valid && !req_we) |=> !rsp_valid;
  endproperty
  a_read_latency: assert property (p_read_latency);
  a_no_spurious:  assert property (p_no_spurious);

endmodule
