// bit_array: the storage cells of one p-MEM subarray, ROWS x COLS bits, with
// their write drivers and sense path (Fig. 3(a) cell array).
//
// Modelled as a register array addressed by one-hot word lines from
// row_decoder. A write (we high) updates, in the row whose word line is high,
// the columns set in `wmask` to `wbl`. The read returns the selected row on
// `bl` combinationally (the sense amplifiers' output), so the subarray
// registers it. The cell technology (6T SRAM, RRAM, FeRAM) does not change the
// logic function and is not modelled; cells have no reset, like real SRAM.
module bit_array #(
  parameter int ROWS = 128,
  parameter int COLS = 128
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic            we,
  input  logic [COLS-1:0] wbl,
  input  logic [COLS-1:0] wmask,
  output logic [COLS-1:0] bl
);

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      if (we && wl[r]) cells[r] <= (cells[r] & ~wmask) | (wbl & wmask);
  end

  always_comb begin
    bl = '0;
    for (int r = 0; r < ROWS; r++)
      if (wl[r]) bl = bl | cells[r];
  end

endmodule
