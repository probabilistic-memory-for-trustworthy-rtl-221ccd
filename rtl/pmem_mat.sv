// pmem_mat: one mat of the p-MEM hierarchy, N_SUB subarrays behind one port.
//
// The upper address bits pick the subarray; only that subarray is enabled, and
// its registered response is returned. Every subarray has its own RNG, seeded
// from a different SEED_BASE so their noise streams differ. The mat adds no
// pipeline stage: read data appear one cycle after the request.
// That mats hold four subarrays is the paper's "4-4-2kB" organisation; the
// single shared port and the address split are this design's choices.
module pmem_mat
  import pmem_pkg::*;
#(
  parameter int          N_SUB     = 4,
  parameter int          ROWS      = 128,
  parameter int          COLS      = 128,
  parameter int          MUX       = 8,
  parameter int          CLT_N     = 12,
  parameter bit          ANALOG    = 1'b0,
  parameter int          ADC_BITS  = 4,
  parameter int          ADC_LSB_LOG2 = 2,
  parameter logic [15:0] SEED_BASE = 16'h1D2B,
  localparam int         SAW       = $clog2(ROWS * MUX),
  localparam int         SW        = (N_SUB > 1) ? $clog2(N_SUB) : 0,
  localparam int         AW        = SAW + SW
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

  logic [N_SUB-1:0]  sub_rvalid;
  mode_e             sub_rmode [N_SUB];
  logic [WORD_W-1:0] sub_rdata [N_SUB];

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    logic sel;
    if (N_SUB > 1) begin : g_dec
      assign sel = (addr[AW-1:SAW] == SW'(s));
    end else begin : g_one
      assign sel = 1'b1;
    end
    pmem_subarray #(
      .ROWS(ROWS), .COLS(COLS), .MUX(MUX), .CLT_N(CLT_N), .ANALOG(ANALOG),
      .ADC_BITS(ADC_BITS), .ADC_LSB_LOG2(ADC_LSB_LOG2),
      .SEED_BASE(SEED_BASE + 16'(s) * 16'h0101)
    ) u_sub (
      .clk, .rst_n, .en(en && sel), .we, .wmode, .addr(addr[SAW-1:0]), .wdata,
      .seed_we, .seed_in, .rvalid(sub_rvalid[s]), .rmode(sub_rmode[s]), .rdata(sub_rdata[s])
    );
  end

  always_comb begin
    rvalid = |sub_rvalid;
    rmode  = MODE_DET;
    rdata  = '0;
    for (int s = 0; s < N_SUB; s++)
      if (sub_rvalid[s]) begin
        rmode = sub_rmode[s];
        rdata = sub_rdata[s];
      end
  end

  // At most one subarray answers in any cycle
  a_one_answer: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sub_rvalid))
    else $error("pmem_mat: several subarrays answered");

endmodule
