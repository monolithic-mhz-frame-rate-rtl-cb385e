// dsipm_ic -- the complete 32 x 32 dSiPM IC: four quadrants with their global
// periphery, the behavioural analog parts, and the test circuits.
//
// Inputs SYSTEM CLK (408 MHz), SHUTTER, FRAME CLK (3 MHz = SYSTEM CLK / 136),
// FRAME_RST (active low) and READ arrive on LVDS receivers. The serial
// initialization register (SCL, SDA, GL_RST) sets the TDC calibration
// switches, the validation tree, 1- or 2-bit hit counting, and writes pixel
// masks one matrix row at a time through the address decoder. The 40-bit
// frame counter counts FRAME CLK from the rising edge of SHUTTER.
//
// A frame: FRAME_RST low then high opens the acquisition window, READ falling
// closes it. In the window each quadrant time-stamps its first hit and counts
// hits per pixel. While READ is low everything is loaded into serializers;
// during the next frame (READ high) the four time words leave interleaved on
// the TIME link and each quadrant's hit map on its own HIT MAP link, both at
// two bits per system clock (816 Mbit/s), five links, about 4 Gbit/s.
//
// Analog parts are behavioural models: a spad_frontend per pixel (spad input
// carries the avalanche events of its four SPADs), a tdc_dll per TDC, LVDS
// receivers and transmitters. The test circuits are a stand-alone TDC
// (single-ended trigger in, parallel result out) and an RX -> TX chain.
//
// Quadrant q covers matrix rows 16*(q/2) .. 16*(q/2)+15 and columns
// 16*(q%2) .. 16*(q%2)+15; spad[row][col] uses the same numbering. This
// placement, the pin polarities and the test-circuit pins are this model's
// own choices; the block structure follows the chip's quadrant diagram.
//
// Lint notes: the quadrants' and the stand-alone TDC's "triggered" flags are
// left unread here (they have no pin on the chip). Shutter is used both as
// the frame counter's asynchronous clear and as the TDCs' synchronous count
// enable, which is its role on the chip.
module dsipm_ic
  import dsipm_pkg::*;
(
  input  logic sys_clk_p,   input  logic sys_clk_n,
  input  logic shutter_p,   input  logic shutter_n,
  input  logic frame_clk_p, input  logic frame_clk_n,
  input  logic frame_rst_p, input  logic frame_rst_n,
  input  logic read_p,      input  logic read_n,
  input  logic scl,
  input  logic sda,
  input  logic gl_rst,
  input  logic [CHIP_ROWS-1:0][CHIP_COLS-1:0][3:0] spad,
  output logic time_p,      output logic time_n,
  output logic [N_QUAD-1:0] hitmap_p,
  output logic [N_QUAD-1:0] hitmap_n,
  // test circuits
  input  logic                sa_trigger,
  output logic [TDC_BITS-1:0] sa_tdc,
  input  logic test_rx_p,   input  logic test_rx_n,
  output logic test_tx_p,   output logic test_tx_n
);
  timeunit 1ps; timeprecision 1fs;

  logic clk, shutter, frame_clk, frame_rst, read;
  init_cfg_t cfg;
  logic [CHIP_ROWS-1:0] wl;
  logic [FC_BITS-1:0]   fc;
  logic [2:0]           phase;
  logic                 hm_shift, tm_shift;
  logic [N_QUAD-1:0]    time_sout, hm_sdo, triggered;
  logic [N_QUAD-1:0][N_DE-1:0] taps;
  logic [CHIP_ROWS-1:0][CHIP_COLS-1:0] fe_out, mask;
  logic                 time_sdo, test_rx_out;

  // ---- LVDS inputs
  lvds_rx u_rx_clk   (.in_p(sys_clk_p),   .in_n(sys_clk_n),   .out(clk));
  lvds_rx u_rx_shut  (.in_p(shutter_p),   .in_n(shutter_n),   .out(shutter));
  lvds_rx u_rx_fclk  (.in_p(frame_clk_p), .in_n(frame_clk_n), .out(frame_clk));
  lvds_rx u_rx_frst  (.in_p(frame_rst_p), .in_n(frame_rst_n), .out(frame_rst));
  lvds_rx u_rx_read  (.in_p(read_p),      .in_n(read_n),      .out(read));

  // ---- global periphery
  init_register u_init (.scl(scl), .sda(sda), .gl_rst(gl_rst), .cfg(cfg));

  address_decoder #(.AW(5)) u_adec (.en(cfg.wl_en), .addr(cfg.addr), .wl(wl));

  frame_counter #(.FC_BITS(FC_BITS)) u_fc (
    .frame_clk(frame_clk), .shutter(shutter), .fc(fc));

  clock_divider u_cdiv (
    .clk(clk), .read(read), .phase(phase), .hm_shift(hm_shift), .tm_shift(tm_shift));

  // ---- pixel front ends
  for (genvar r = 0; r < CHIP_ROWS; r++) begin : g_fe_row
    for (genvar c = 0; c < CHIP_COLS; c++) begin : g_fe_col
      spad_frontend u_fe (.spad(spad[r][c]), .mask(mask[r][c]), .out(fe_out[r][c]));
    end
  end

  // ---- quadrants
  for (genvar q = 0; q < N_QUAD; q++) begin : g_quad
    localparam int unsigned R0 = Q_ROWS * (q / 2);
    localparam int unsigned C0 = Q_COLS * (q % 2);
    logic [Q_ROWS-1:0][Q_COLS-1:0] q_fe, q_mask;

    for (genvar r = 0; r < Q_ROWS; r++) begin : g_map
      assign q_fe[r] = fe_out[R0 + r][C0 +: Q_COLS];
      assign mask[R0 + r][C0 +: Q_COLS] = q_mask[r];
    end

    tdc_dll #(.N(N_DE)) u_dll (.ref_clk(clk), .tdc_cntr(cfg.tdc_cntr), .taps(taps[q]));

    quadrant u_quad (
      .clk        (clk),
      .frame_rst_n(frame_rst),
      .read       (read),
      .shutter    (shutter),
      .set_2bit   (cfg.set_2bit),
      .valid_cntr (cfg.valid_cntr),
      .wl         (wl[R0 +: Q_ROWS]),
      .bl         (cfg.bl[C0 +: Q_COLS]),
      .bl_n       (~cfg.bl[C0 +: Q_COLS]),
      .fe_out     (q_fe),
      .taps       (taps[q]),
      .fc         (fc),
      .hm_phase   (phase),
      .hm_shift   (hm_shift),
      .tm_shift   (tm_shift),
      .mask       (q_mask),
      .time_sout  (time_sout[q]),
      .hitmap_sdo (hm_sdo[q]),
      .triggered  (triggered[q])
    );

    lvds_tx u_tx_hm (.d(hm_sdo[q]), .out_p(hitmap_p[q]), .out_n(hitmap_n[q]));
  end

  // ---- TIME link
  time_mux u_tmux (.clk(clk), .phase(phase[0]), .q_sin(time_sout), .sdo(time_sdo));
  lvds_tx  u_tx_time (.d(time_sdo), .out_p(time_p), .out_n(time_n));

  // ---- test circuit: stand-alone TDC
  logic [N_DE-1:0] sa_taps;
  logic            sa_triggered;
  tdc_dll #(.N(N_DE)) u_sa_dll (.ref_clk(clk), .tdc_cntr(cfg.tdc_cntr), .taps(sa_taps));
  tdc #(.N_DE(N_DE), .COARSE_BITS(COARSE_BITS)) u_sa_tdc (
    .ref_clk    (clk),
    .frame_rst_n(frame_rst),
    .enable     (shutter),
    .trigger    (sa_trigger),
    .taps       (sa_taps),
    .triggered  (sa_triggered),
    .coarse     (sa_tdc[TDC_BITS-1:FINE_BITS]),
    .fine       (sa_tdc[FINE_BITS-1:0])
  );

  // ---- test circuit: RX -> TX chain
  lvds_rx u_test_rx (.in_p(test_rx_p), .in_n(test_rx_n), .out(test_rx_out));
  lvds_tx u_test_tx (.d(test_rx_out), .out_p(test_tx_p), .out_n(test_tx_n));
endmodule
