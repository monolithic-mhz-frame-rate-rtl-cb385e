// dsipm_pixel -- digital part of one dSiPM pixel: mask SRAM cell, hit counter,
// wired-OR drive and one stage of the row serializer.
//
// Mask: a 1-bit SRAM cell written while its word line wl is high and the bit
// lines bl/bl_n are complementary; mask = 1 switches the pixel off.
// Counting: every rising edge of the front-end pulse fe_out of an unmasked
// pixel clocks a 2-bit counter, while Read is high; Frame_rst low clears it.
// With set_2bit_n high the counter acts as a one-bit hit buffer (Q1 = "hit
// seen"); with set_2bit_n low it counts 0..3 and saturates at 3.
// Wired-OR: the pixel pulls its row line for as long as fe_out is high
// (modelled as an active-high OR contribution).
// Serializer: while Read is low the stage loads {Q2, Q1} on each clk edge;
// while Read is high it shifts on clk edges with shift_en. In 1-bit mode the
// stage is one flop long, in 2-bit mode two (Q1 leaves before Q2).
//
// Follows the chip: SRAM masking cell, 2-bit hit counter switchable to a
// buffer by /Set_2bit, Frame_rst clear, serializer with Data In/Out, Read and
// Clock. Own choices: counter saturation, the load/shift meaning of Read, the
// bit order and the polarities of mask and /Set_2bit.
//
// Lint note: when the pixel is elaborated inside a matrix with constant bit
// lines, the mask cell can be reported as "no latch detected"; it is a latch
// (an SRAM cell) on the chip and in this description.
module dsipm_pixel (
  input  logic clk,          // serializer clock (system clock)
  input  logic shift_en,     // serializer shift enable (divided clock)
  input  logic fe_out,       // front-end "Out" pulse
  input  logic frame_rst_n,  // Frame_rst, low clears the counter
  input  logic read,         // high: acquire and shift, low: load serializer
  input  logic set_2bit_n,   // low: 2-bit counting
  input  logic wl,           // SRAM word line
  input  logic bl,           // SRAM bit line
  input  logic bl_n,         // SRAM complementary bit line
  input  logic data_in,      // serial input from the previous pixel of the row
  output logic mask,         // 1 = pixel off
  output logic wired_or,     // contribution to the row wired-OR
  output logic data_out      // serial output to the next pixel of the row
);
  timeunit 1ps; timeprecision 1fs;

  logic       hit;
  logic [1:0] cnt;           // {Q2, Q1}
  logic       s1, s2;        // serializer flops, s1 drives data_out

  // 1-bit SRAM cell
  always_latch begin
    if (wl && (bl != bl_n)) mask = bl;
  end

  assign hit      = fe_out & ~mask;
  assign wired_or = hit;

  // Hit counter, clocked by the discriminated SPAD pulse
  always_ff @(posedge hit or negedge frame_rst_n) begin
    if (!frame_rst_n)      cnt <= 2'd0;
    else if (read) begin
      if (set_2bit_n)      cnt <= 2'd1;                  // buffer: hit seen
      else if (cnt != 2'd3) cnt <= cnt + 2'd1;            // saturating count
    end
  end

  // Serializer stage
  always_ff @(posedge clk) begin
    if (!read) begin
      s1 <= cnt[0];
      s2 <= cnt[1];
    end else if (shift_en) begin
      if (set_2bit_n) begin
        s1 <= data_in;
      end else begin
        s2 <= data_in;
        s1 <= s2;
      end
    end
  end

  assign data_out = s1;
endmodule
