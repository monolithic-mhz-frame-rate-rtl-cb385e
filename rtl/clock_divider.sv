// clock_divider -- divided clock phases for the readout multiplexers.
//
// A 3-bit counter on the system clock gives its /2, /4 and /8 phases. It is
// held at 0 while Read is low, so each readout starts in phase 0 at the first
// clock after Read rises. hm_shift marks the last cycle of an 8-cycle round
// (rows of the hit map shift), tm_shift the last of a 2-cycle round (quadrant
// time serializers shift).
//
// Follows the chip: clock dividers derive the multiplexer clocks from the
// 408 MHz system clock. Own choices: enables instead of divided clocks, and
// the alignment to Read.
module clock_divider (
  input  logic       clk,
  input  logic       read,
  output logic [2:0] phase,
  output logic       hm_shift,
  output logic       tm_shift
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge clk) begin
    if (!read) phase <= 3'd0;
    else       phase <= phase + 3'd1;
  end

  assign hm_shift = read && (phase == 3'd7);
  assign tm_shift = read && phase[0];
endmodule
