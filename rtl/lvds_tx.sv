// lvds_tx -- BEHAVIOURAL MODEL (analog, not synthesizable) of the LVDS
// transmitter: input stage (edge aligner, level converter, buffers), current
// switching output stage and common-mode feedback.
//
// The differential output follows the single-ended input after DELAY:
// out_p = d, out_n = not d. Common mode, swing and termination are analog
// properties not represented here.
//
// Follows the chip: single-ended in, differential out, used for the TIME and
// HIT MAP links at 816 Mbit/s (both edges of the 408 MHz clock) and in the
// RX-TX test chain. Own choice: the delay value.
module lvds_tx #(
  parameter realtime DELAY = dsipm_pkg::TX_DELAY_PS
) (
  input  logic d,
  output logic out_p,
  output logic out_n
);
  timeunit 1ps; timeprecision 1fs;

  logic d_aligned;

  assign #(DELAY) d_aligned = d;
  assign out_p = d_aligned;
  assign out_n = ~d_aligned;
endmodule
