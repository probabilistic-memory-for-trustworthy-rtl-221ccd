// mode_reg: the mode-control registers of one p-MEM subarray.
//
// One bit per stored word (ROWS x MUX words) says whether that word holds a
// deterministic value or a (mu, sigma) pair. It is written together with the
// word, so any address can be switched with an ordinary memory write, and it is
// read together with the word to steer the output multiplexer. The paper puts
// a mode register in each cell; one bit per 16-bit word is this design's
// granularity. Reset clears every word to deterministic mode, so the memory
// behaves as plain storage until a probabilistic write.
// Timing: write at the clock edge, combinational read.
module mode_reg
  import pmem_pkg::*;
#(
  parameter int  ROWS = 128,
  parameter int  MUX  = 8,
  localparam int AW   = $clog2(ROWS * MUX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  mode_e         wmode,
  input  logic [AW-1:0] raddr,
  output mode_e         rmode
);

  logic [ROWS*MUX-1:0] modes;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  modes <= '0;
    else if (we) modes[waddr] <= wmode;
  end

  assign rmode = mode_e'(modes[raddr]);

endmodule
