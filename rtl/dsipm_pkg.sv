// dsipm_pkg -- sizes, timing constants and shared types of the 32 x 32 dSiPM IC.
//
// The matrix is split into four identical quadrants of 16 x 16 pixels. Each
// quadrant time-stamps the first hit of a frame with a 12-bit TDC (7-bit coarse
// counter of reference-clock periods plus a 5-bit fine code from a 32-tap DLL),
// tags it with a 40-bit frame number and a validation bit, and ships its hit map
// over its own serial link. The sizes below are those of the chip; the analog
// delays (receiver, transmitter, front end) are this model's own choice, the
// 408 MHz system clock, 136 system clocks per 3 MHz frame and the DLL bin of one
// 32nd of the clock period follow the chip description.
package dsipm_pkg;
  timeunit 1ps; timeprecision 1fs;

  // Geometry
  localparam int unsigned N_QUAD      = 4;
  localparam int unsigned Q_ROWS      = 16;
  localparam int unsigned Q_COLS      = 16;
  localparam int unsigned CHIP_ROWS   = 32;
  localparam int unsigned CHIP_COLS   = 32;

  // Time stamping
  localparam int unsigned N_DE        = 32;   // delay elements in the DLL
  localparam int unsigned FINE_BITS   = 5;
  localparam int unsigned COARSE_BITS = 7;
  localparam int unsigned TDC_BITS    = COARSE_BITS + FINE_BITS;   // 12
  localparam int unsigned FC_BITS     = 40;   // frame counter

  // Serial time word: {valid, frame number, coarse, fine}
  localparam int unsigned TIME_WORD_BITS = 1 + FC_BITS + TDC_BITS; // 53

  // Initialization register layout (MSB first on SDA)
  localparam int unsigned INIT_BITS   = 2 + 4 + 1 + 1 + 5 + CHIP_COLS; // 45

  typedef struct packed {
    logic [1:0]           tdc_cntr;    // DLL calibration switches
    logic [3:0]           valid_cntr;  // 1 = AND, 0 = OR, one bit per tree level
    logic                 set_2bit;    // 1 = 2-bit hit counting
    logic                 wl_en;       // word lines enabled (mask write)
    logic [4:0]           addr;        // matrix row (0..31) for mask write
    logic [CHIP_COLS-1:0] bl;          // mask bits of the addressed row, 1 = off
  } init_cfg_t;

  typedef struct packed {
    logic                   valid;
    logic [FC_BITS-1:0]     fc;
    logic [COARSE_BITS-1:0] coarse;
    logic [FINE_BITS-1:0]   fine;
  } time_word_t;

  // Frame timing: FRAME CLK = SYSTEM CLK / 136 (408 MHz / 3 MHz)
  localparam int unsigned FRAME_SYS_CYCLES = 136;

  // Analog timing used by the behavioural models
  localparam realtime SYS_CLK_PERIOD_PS = 2451.0;                    // 408 MHz
  localparam realtime DE_DELAY_PS       = SYS_CLK_PERIOD_PS / N_DE;  // locked DLL bin
  localparam realtime RX_DELAY_PS       = 200.0;
  localparam realtime TX_DELAY_PS       = 300.0;
  localparam realtime FE_DELAY_PS       = 500.0;
  localparam realtime DEADTIME_PS       = 22000.0;                   // minimum hold-off
endpackage
