// time_serializer -- parallel-in serial-out register for one quadrant's time
// word.
//
// While Read is low (between two acquisition windows) it loads the word on
// every clock edge; while Read is high it shifts left on clock edges with
// shift_en, sending the MSB first and filling with zeros, so that the link
// carries zeros once the word has left.
//
// Follows the chip: the quadrant's timing data are buffered into a serializer
// at the end of the window and sent during the next frame. Own choice: word
// layout {valid, frame number, coarse, fine}, MSB first.
module time_serializer #(
  parameter int unsigned WORD_BITS = dsipm_pkg::TIME_WORD_BITS
) (
  input  logic                 clk,
  input  logic                 read,
  input  logic                 shift_en,
  input  logic [WORD_BITS-1:0] word,
  output logic                 sout
);
  timeunit 1ps; timeprecision 1fs;

  logic [WORD_BITS-1:0] sr;

  always_ff @(posedge clk) begin
    if (!read)         sr <= word;
    else if (shift_en) sr <= {sr[WORD_BITS-2:0], 1'b0};
  end

  assign sout = sr[WORD_BITS-1];
endmodule
