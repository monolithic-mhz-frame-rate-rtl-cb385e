// frame_counter -- 40-bit frame counter shared by the four quadrants.
//
// Counts rising edges of FRAME CLK while Shutter is high; Shutter low clears
// it asynchronously, so the count is the frame number since the start of the
// measurement. 2^40 frames at 3 MHz last about 100 hours.
//
// Follows the chip: 40 bits, FRAME CLK, start by Shutter. Own choice: Shutter
// low holds the counter at zero.
//
// Lint note: Shutter is also used synchronously elsewhere (TDC count enable);
// here it is the asynchronous clear, by design.
module frame_counter #(
  parameter int unsigned FC_BITS = dsipm_pkg::FC_BITS
) (
  input  logic               frame_clk,
  input  logic               shutter,
  output logic [FC_BITS-1:0] fc
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge frame_clk or negedge shutter) begin
    if (!shutter) fc <= '0;
    else          fc <= fc + 1'b1;
  end
endmodule
