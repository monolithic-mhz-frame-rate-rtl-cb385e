// pixel_matrix -- the ROWS x COLS pixel matrix of one quadrant.
//
// Every pixel drives its row's wired-OR line; the ROWS row lines R<0:ROWS-1>
// go to the validation logic and are ORed again into the quadrant line that
// triggers the TDC. The pixels of a row form one serial chain: column 0 takes
// a 0 as serial input and column COLS-1 drives the row's serial output, so a
// row delivers its highest column first. Word line r writes row r's masks
// from the bit lines, one bit line pair per column.
//
// Follows the chip: 16 x 16 pixels per quadrant, row-wise wired-ORs, row-wise
// serialization towards a column-wise multiplexer. Own choices: chain
// direction and the active-high representation of the wired-OR lines.
module pixel_matrix #(
  parameter int unsigned ROWS = dsipm_pkg::Q_ROWS,
  parameter int unsigned COLS = dsipm_pkg::Q_COLS
) (
  input  logic                       clk,
  input  logic                       shift_en,
  input  logic                       frame_rst_n,
  input  logic                       read,
  input  logic                       set_2bit_n,
  input  logic [ROWS-1:0][COLS-1:0]  fe_out,
  input  logic [ROWS-1:0]            wl,
  input  logic [COLS-1:0]            bl,
  input  logic [COLS-1:0]            bl_n,
  output logic [ROWS-1:0][COLS-1:0]  mask,
  output logic [ROWS-1:0]            row_or,    // R<0:ROWS-1>
  output logic                       any_hit,   // quadrant wired-OR
  output logic [ROWS-1:0]            row_sout   // serial hit map per row
);
  timeunit 1ps; timeprecision 1fs;

  logic [ROWS-1:0][COLS-1:0] pix_or;
  logic [ROWS-1:0][COLS-1:0] chain;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      dsipm_pixel u_pix (
        .clk        (clk),
        .shift_en   (shift_en),
        .fe_out     (fe_out[r][c]),
        .frame_rst_n(frame_rst_n),
        .read       (read),
        .set_2bit_n (set_2bit_n),
        .wl         (wl[r]),
        .bl         (bl[c]),
        .bl_n       (bl_n[c]),
        .data_in    ((c == 0) ? 1'b0 : chain[r][(c == 0) ? 0 : c-1]),
        .mask       (mask[r][c]),
        .wired_or   (pix_or[r][c]),
        .data_out   (chain[r][c])
      );
    end
    assign row_or[r]   = |pix_or[r];
    assign row_sout[r] = chain[r][COLS-1];
  end

  assign any_hit = |row_or;
endmodule
