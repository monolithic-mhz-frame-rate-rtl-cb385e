// tdc_dll -- BEHAVIOURAL MODEL (analog, not synthesizable) of the TDC's
// delay-locked loop: input buffer, delay line of N differential delay
// elements (DEs), phase-frequency detector, charge pump, loop filter and
// calibration circuit.
//
// The model shows the loop in lock: each DE delays the reference clock by one
// N-th of its period, so taps[i] is the reference clock delayed by i DE delays.
// Latching the taps at an instant gives a circular run of N/2 ones whose end
// marks the phase of that instant within the clock period (see tdc_encoder).
//
// Follows the chip: 32 DEs locked to the 408 MHz system clock (about 76.5 ps
// per bin), two calibration switches TDC_cntr<0:1>. Own choices: the loop is
// always locked, so tdc_cntr, which on the chip shifts the calibration
// current, has no effect here.
//
// Lint note: tdc_cntr (the calibration switches) is accepted but unused,
// because this ideal delay line is always locked to its nominal bin.
module tdc_dll #(
  parameter int unsigned N        = dsipm_pkg::N_DE,
  parameter realtime     DE_DELAY = dsipm_pkg::DE_DELAY_PS
) (
  input  logic         ref_clk,    // TDC Ref Clock
  input  logic [1:0]   tdc_cntr,   // calibration switches (no effect in lock)
  output logic [N-1:0] taps        // DE outputs
);
  timeunit 1ps; timeprecision 1fs;

  assign taps[0] = ref_clk;
  for (genvar i = 1; i < N; i++) begin : g_de
    assign #(DE_DELAY) taps[i] = taps[i-1];
  end
endmodule
