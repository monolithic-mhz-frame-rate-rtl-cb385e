// hitmap_mux -- 16:1 multiplexer of a quadrant's 16 row streams onto its HIT
// MAP link, at two bits per system clock (816 Mbit/s at 408 MHz).
//
// In the cycle with phase = p it registers the current bits of rows 2p and
// 2p+1 and sends them on the two halves of the next clock cycle (first while
// clk is high). After the phase-7 cycle every row chain must shift once, so
// each row moves one bit per eight system clocks and 256 pixel bits take
// 128 system clocks, inside one 136-clock frame.
// Link order: r0 b0, r1 b0, ..., r15 b0, r0 b1, ...
//
// Follows the chip: rows multiplexed column-wise by a 16:1 MUX with four
// clock inputs (here the clock and its /2, /4, /8 phases). Own choice: the
// interleaving order.
module hitmap_mux #(
  parameter int unsigned N_ROWS = dsipm_pkg::Q_ROWS,
  localparam int unsigned PW    = $clog2(N_ROWS) - 1
) (
  input  logic              clk,
  input  logic [PW-1:0]     phase,
  input  logic [N_ROWS-1:0] row_sin,
  output logic              sdo
);
  timeunit 1ps; timeprecision 1fs;

  logic [1:0] pair;

  always_ff @(posedge clk) begin
    pair <= {row_sin[2*phase], row_sin[2*phase+1]};
  end

  assign sdo = clk ? pair[1] : pair[0];
endmodule
