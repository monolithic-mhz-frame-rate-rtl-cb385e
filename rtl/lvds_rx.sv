// lvds_rx -- BEHAVIOURAL MODEL (analog, not synthesizable) of the LVDS
// receiver: 100 Ohm termination, Schmitt-trigger comparator at 3.3 V and a
// level converter to a 1.8 V single-ended output.
//
// The output follows the sign of In+ - In- after DELAY. When both inputs are
// equal (no differential signal) the output holds its last value, which is
// the hysteresis of the Schmitt trigger.
//
// Follows the chip: differential in, single-ended out, hysteresis. Own choice:
// the delay value.
module lvds_rx #(
  parameter realtime DELAY = dsipm_pkg::RX_DELAY_PS
) (
  input  logic in_p,
  input  logic in_n,
  output logic out
);
  timeunit 1ps; timeprecision 1fs;

  logic level;

  // Transparent while the inputs differ, holding while they are equal.
  always_latch begin
    if (in_p != in_n) level = in_p;
  end

  assign #(DELAY) out = level;
endmodule
