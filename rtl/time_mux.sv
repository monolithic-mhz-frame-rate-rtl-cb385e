// time_mux -- 4:1 multiplexer of the four quadrant time streams onto the one
// TIME link, at two bits per system clock (816 Mbit/s at 408 MHz).
//
// In cycles with phase = 0 it registers the current bits of quadrants 0 and 1,
// with phase = 1 those of quadrants 2 and 3. The registered pair is sent on
// both clock halves: the first bit while clk is high, the second while it is
// low. The quadrant serializers must shift at the end of each phase-1 cycle,
// so every quadrant moves one bit per two system clocks.
// Link order: q0 b0, q1 b0, q2 b0, q3 b0, q0 b1, ...
//
// Follows the chip: 4:1 MUX of Time Q<0:3>, two clock inputs, the 816 Mbit/s
// link rate. Own choice: the interleaving order.
module time_mux (
  input  logic       clk,
  input  logic       phase,      // system clock / 2
  input  logic [3:0] q_sin,      // serial bits of quadrants 0..3
  output logic       sdo         // DDR serial out to the TX
);
  timeunit 1ps; timeprecision 1fs;

  logic [1:0] pair;

  always_ff @(posedge clk) begin
    pair <= phase ? {q_sin[2], q_sin[3]} : {q_sin[0], q_sin[1]};
  end

  assign sdo = clk ? pair[1] : pair[0];
endmodule
