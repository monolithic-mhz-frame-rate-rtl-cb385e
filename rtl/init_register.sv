// init_register -- serially loaded configuration of the IC.
//
// Bits arrive on SDA and are taken on rising edges of SCL, MSB first. After
// every INIT_BITS bits the shifted word is copied to cfg at once, so the
// outputs never show a half-shifted word. GL_RST high clears the shift
// register, the bit count and cfg (1-bit mode, all-OR validation, word lines
// off). Word layout (dsipm_pkg::init_cfg_t, MSB first): TDC_cntr[1:0],
// Valid_cntr[3:0], Set_2bit, WL_EN, A[4:0], BL[31:0].
//
// Follows the chip: SCL, SDA, GL_RST inputs; TDC_cntr, Valid_cntr, Set_2bit,
// row address A and bit lines for masking as outputs. Own choices: the
// protocol (a plain shift register), the word layout and the WL_EN bit.
module init_register
  import dsipm_pkg::*;
(
  input  logic      scl,
  input  logic      sda,
  input  logic      gl_rst,
  output init_cfg_t cfg
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned CW = $clog2(INIT_BITS);

  logic [INIT_BITS-2:0] sr;   // first 44 bits; the 45th is taken from sda
  logic [CW-1:0]        cnt;

  always_ff @(posedge scl or posedge gl_rst) begin
    if (gl_rst) begin
      sr  <= '0;
      cnt <= '0;
      cfg <= '0;
    end else begin
      sr <= {sr[INIT_BITS-3:0], sda};
      if (cnt == CW'(INIT_BITS - 1)) begin
        cfg <= init_cfg_t'({sr, sda});
        cnt <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
