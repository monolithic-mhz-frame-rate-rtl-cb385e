// address_decoder -- row address to word lines for writing the pixel masks.
//
// With en high, word line addr of the 2^AW rows is high and all others low;
// with en low no word line is active. The lower 16 word lines serve the two
// lower quadrants, the upper 16 the two upper ones.
//
// Follows the chip: 5-bit address from the initialization register, 16 word
// lines per quadrant. Own choice: the enable and the row numbering.
module address_decoder #(
  parameter int unsigned AW = 5,
  localparam int unsigned N = 1 << AW
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [N-1:0]  wl
);
  timeunit 1ps; timeprecision 1fs;

  always_comb begin
    wl = '0;
    if (en) wl[addr] = 1'b1;
  end
endmodule
