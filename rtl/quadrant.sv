// quadrant -- one of the four identical quadrants of the IC.
//
// A 16 x 16 pixel matrix drives 16 row wired-ORs. Their OR, gated by Read so
// that hits after the acquisition window do not count, triggers the TDC: the
// first hit after Frame_rst freezes the 12-bit time stamp and, through the
// trigger flip-flop, the FC latch holding the 40-bit frame number. The
// validation tree watches the row lines; its output is sampled on the system
// clock during the window and held as the frame's valid bit until Frame_rst.
// When Read falls the word {valid, frame number, coarse, fine} is loaded into
// the time serializer and the pixel counters into the row chains; both are
// shifted out while Read is high during the following frame, the time word to
// the chip's 4:1 TIME multiplexer and the rows through the quadrant's own
// 16:1 multiplexer to its HIT MAP link.
//
// Timing per frame (136 system clocks): hit map 256 bits in 128 clocks in
// 1-bit mode (512 bits over two frames in 2-bit mode); time word 53 bits in
// 106 clocks.
//
// Follows the chip's quadrant block diagram. Own choices: the Read gate on
// the trigger and the sampled, held valid bit.
module quadrant
  import dsipm_pkg::*;
(
  input  logic                          clk,          // system clock = TDC Ref Clock
  input  logic                          frame_rst_n,
  input  logic                          read,
  input  logic                          shutter,
  input  logic                          set_2bit,
  input  logic [3:0]                    valid_cntr,
  input  logic [Q_ROWS-1:0]             wl,
  input  logic [Q_COLS-1:0]             bl,
  input  logic [Q_COLS-1:0]             bl_n,
  input  logic [Q_ROWS-1:0][Q_COLS-1:0] fe_out,       // pixel front-end pulses
  input  logic [N_DE-1:0]               taps,         // DLL taps
  input  logic [FC_BITS-1:0]            fc,           // global frame counter
  input  logic [2:0]                    hm_phase,
  input  logic                          hm_shift,
  input  logic                          tm_shift,
  output logic [Q_ROWS-1:0][Q_COLS-1:0] mask,         // to the front ends
  output logic                          time_sout,    // Time Q<n>
  output logic                          hitmap_sdo,   // HIT MAP link (before TX)
  output logic                          triggered     // TDC trigger FF
);
  timeunit 1ps; timeprecision 1fs;

  logic [Q_ROWS-1:0]      row_or, row_sout;
  logic                   any_hit, trigger, valid_comb, valid_q;
  logic [COARSE_BITS-1:0] coarse;
  logic [FINE_BITS-1:0]   fine;
  logic [FC_BITS-1:0]     fc_held;
  time_word_t             word;

  pixel_matrix #(.ROWS(Q_ROWS), .COLS(Q_COLS)) u_matrix (
    .clk        (clk),
    .shift_en   (hm_shift),
    .frame_rst_n(frame_rst_n),
    .read       (read),
    .set_2bit_n (~set_2bit),
    .fe_out     (fe_out),
    .wl         (wl),
    .bl         (bl),
    .bl_n       (bl_n),
    .mask       (mask),
    .row_or     (row_or),
    .any_hit    (any_hit),
    .row_sout   (row_sout)
  );

  assign trigger = any_hit & read;

  tdc #(.N_DE(N_DE), .COARSE_BITS(COARSE_BITS)) u_tdc (
    .ref_clk    (clk),
    .frame_rst_n(frame_rst_n),
    .enable     (shutter),
    .trigger    (trigger),
    .taps       (taps),
    .triggered  (triggered),
    .coarse     (coarse),
    .fine       (fine)
  );

  fc_latch #(.FC_BITS(FC_BITS)) u_fc_latch (
    .en(~triggered),
    .d (fc),
    .q (fc_held)
  );

  validation_logic #(.N_ROWS(Q_ROWS)) u_valid (
    .r         (row_or),
    .valid_cntr(valid_cntr),
    .valid     (valid_comb)
  );

  always_ff @(posedge clk or negedge frame_rst_n) begin
    if (!frame_rst_n)             valid_q <= 1'b0;
    else if (read && valid_comb)  valid_q <= 1'b1;
  end

  assign word = '{valid: valid_q, fc: fc_held, coarse: coarse, fine: fine};

  time_serializer #(.WORD_BITS(TIME_WORD_BITS)) u_tser (
    .clk     (clk),
    .read    (read),
    .shift_en(tm_shift),
    .word    (word),
    .sout    (time_sout)
  );

  hitmap_mux #(.N_ROWS(Q_ROWS)) u_hmux (
    .clk    (clk),
    .phase  (hm_phase),
    .row_sin(row_sout),
    .sdo    (hitmap_sdo)
  );
endmodule
