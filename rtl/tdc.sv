// tdc -- digital part of the 12-bit quadrant TDC: trigger flip-flop, tap
// latches, 32-to-5 encoder (fine time) and 7-bit coarse counter.
//
// Frame_rst low clears the trigger flip-flop and the coarse counter. From its
// rising edge the coarse counter counts reference-clock periods (while
// Shutter, enable, is high). The first rising edge of trigger (the quadrant
// wired-OR) sets the flip-flop; that closes the N tap latches, freezing the
// DLL phase, and stops the coarse counter. The result {coarse, fine} is
// held until the next Frame_rst. Time stamp = (coarse * N + fine) DE delays
// after the first reference edge that follows Frame_rst, minus one period.
// 2^7 periods of 408 MHz give a 313.7 ns range, one acquisition window.
//
// Timing: trigger is asynchronous. A trigger within about one DE delay of a
// reference edge may pair a coarse and a fine value from different periods;
// the chip's description gives no correction and none is built.
//
// Follows the chip: FF with D tied high clocked by the trigger and reset by
// Frame_rst, latches enabled by it, 32-to-5 encoder, 7-bit counter of DLL
// cycles, Shutter start. Own choice: a synchronous counter on the reference
// clock stands for the ripple counter.
module tdc #(
  parameter int unsigned N_DE        = dsipm_pkg::N_DE,
  parameter int unsigned COARSE_BITS = dsipm_pkg::COARSE_BITS,
  localparam int unsigned FINE_BITS  = $clog2(N_DE)
) (
  input  logic                            ref_clk,      // TDC Ref Clock
  input  logic                            frame_rst_n,  // Frame_rst
  input  logic                            enable,       // Shutter
  input  logic                            trigger,      // quadrant wired-OR
  input  logic [N_DE-1:0]                 taps,         // DLL outputs
  output logic                            triggered,    // trigger FF Q
  output logic [COARSE_BITS-1:0]          coarse,       // Coarse-TDC Out
  output logic [FINE_BITS-1:0]            fine          // Fine-TDC Out
);
  timeunit 1ps; timeprecision 1fs;

  logic [N_DE-1:0] tap_latch;

  // Trigger flip-flop: D = 1
  always_ff @(posedge trigger or negedge frame_rst_n) begin
    if (!frame_rst_n) triggered <= 1'b0;
    else              triggered <= 1'b1;
  end

  // Tap latches, transparent until the trigger
  always_latch begin
    if (!triggered) tap_latch = taps;
  end

  tdc_encoder #(.N(N_DE)) u_enc (
    .therm(tap_latch),
    .code (fine)
  );

  // Coarse counter of reference periods
  always_ff @(posedge ref_clk or negedge frame_rst_n) begin
    if (!frame_rst_n)               coarse <= '0;
    else if (enable && !triggered)  coarse <= coarse + 1'b1;
  end
endmodule
