// spad_frontend -- BEHAVIOURAL MODEL (analog, not synthesizable) of the pixel
// front end: four SPADs in parallel, the quenching transistor biased by
// V_Quench, the clamp transistor and the inverter comparator that gives the
// digital pulse "Out".
//
// An avalanche in any of the four SPADs (a rising edge on spad[3:0]) makes Out
// rise after FE_DELAY and stay high for DEADTIME, the quench-and-recharge time
// set on the chip by V_Quench. Avalanches while the pixel is dead are lost, as
// on the chip. A masked pixel (mask = 1, from the pixel's SRAM cell) has its
// quenching path switched off and gives no pulse.
//
// Follows the chip: four SPADs share one front end; masking by one SRAM cell;
// dead time of about 22 ns at the fastest V_Quench setting. Own choices: the
// front-end delay, mask polarity, and a fixed dead time instead of a bias input.
module spad_frontend #(
  parameter realtime DEADTIME = dsipm_pkg::DEADTIME_PS,  // hold-off, ps
  parameter realtime FE_DELAY = dsipm_pkg::FE_DELAY_PS   // avalanche to Out, ps
) (
  input  logic [3:0] spad,   // avalanche events of the four SPADs
  input  logic       mask,   // 1 = pixel switched off
  output logic       out     // inverter output "Out"
);
  timeunit 1ps; timeprecision 1fs;

  logic any_avalanche;
  logic out_r;

  initial out_r = 1'b0;

  assign any_avalanche = |spad;
  assign out = out_r;

  // The process is busy for FE_DELAY + DEADTIME after an accepted avalanche,
  // so edges arriving meanwhile are not seen: that is the dead time.
  always @(posedge any_avalanche) begin
    if (!mask) begin
      #(FE_DELAY) out_r <= 1'b1;
      #(DEADTIME) out_r <= 1'b0;
    end
  end
endmodule
