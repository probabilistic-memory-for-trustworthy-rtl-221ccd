// row_decoder: word-line decoder of a p-MEM subarray (Fig. 3(a) "Row Decoder").
// Turns a binary row address into a one-hot word-line vector, all lines low
// when `en` is low. Purely combinational.
module row_decoder #(
  parameter int ROWS = 128,
  localparam int AW  = $clog2(ROWS)
) (
  input  logic            en,
  input  logic [AW-1:0]   row,
  output logic [ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    for (int r = 0; r < ROWS; r++)
      if (en && row == AW'(r)) wl[r] = 1'b1;
  end

endmodule
