// fc_latch -- per-quadrant latch of the frame counter.
//
// Transparent while the quadrant's trigger flip-flop is clear (en = 1); when
// the first hit of the frame sets the flip-flop (en = 0) it holds the frame
// number of that hit until Frame_rst clears the flip-flop again.
//
// Follows the chip: 40-bit latch with its enable from the trigger flip-flop.
// Own choice: enable polarity.
module fc_latch #(
  parameter int unsigned FC_BITS = dsipm_pkg::FC_BITS
) (
  input  logic               en,
  input  logic [FC_BITS-1:0] d,
  output logic [FC_BITS-1:0] q
);
  timeunit 1ps; timeprecision 1fs;

  always_latch begin
    if (en) q = d;
  end
endmodule
