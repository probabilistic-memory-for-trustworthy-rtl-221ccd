// col_mux: column multiplexer of a p-MEM subarray (Fig. 3(a) "MUX").
//
// COLS bit lines are shared MUX ways onto COLS/MUX sense/write channels.
// Channel b serves the MUX adjacent columns b*MUX .. b*MUX+MUX-1; `sel` picks
// one of them. Read direction: the selected column of every group is routed to
// `rword`. Write direction: `wword` is steered onto the selected columns and
// `wmask` marks them, so the write drivers leave the other columns untouched.
// The interleaving (adjacent columns per channel) is this design's choice.
// Purely combinational.
module col_mux #(
  parameter int  COLS = 128,
  parameter int  MUX  = 8,
  localparam int W    = COLS / MUX,
  localparam int SW   = (MUX > 1) ? $clog2(MUX) : 1
) (
  input  logic [SW-1:0]   sel,
  input  logic [COLS-1:0] bl,      // bit-line read data
  output logic [W-1:0]    rword,
  input  logic [W-1:0]    wword,
  output logic [COLS-1:0] wbl,     // write data onto the bit lines
  output logic [COLS-1:0] wmask    // columns driven by the write drivers
);

  always_comb begin
    wbl   = '0;
    wmask = '0;
    for (int b = 0; b < W; b++) begin
      rword[b]              = bl[b*MUX + int'(sel)];
      wbl[b*MUX + int'(sel)]   = wword[b];
      wmask[b*MUX + int'(sel)] = 1'b1;
    end
  end

  initial assert (COLS % MUX == 0) else $error("col_mux: COLS must be a multiple of MUX");

endmodule
