// tdc_encoder -- 32-to-5-bit encoder of the fine TDC.
//
// The latched DLL taps of a 50 % duty reference clock hold a circular run of
// N/2 ones; the last one of the run marks how many delay elements the clock
// edge had passed when the taps were frozen. The code is the index i with
// therm[i] = 1 and therm[(i+1) mod N] = 0; if bubbles give several such
// indices the lowest wins. Purely combinational.
//
// Follows the chip: 32 taps in, 5 bits out. Own choice: the bubble rule.
module tdc_encoder #(
  parameter int unsigned N = dsipm_pkg::N_DE,
  localparam int unsigned W = $clog2(N)
) (
  input  logic [N-1:0] therm,
  output logic [W-1:0] code
);
  timeunit 1ps; timeprecision 1fs;

  always_comb begin
    code = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (therm[i] && !therm[(i + 1) % N]) code = W'(i);
    end
  end
endmodule
