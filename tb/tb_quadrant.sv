// tb_quadrant -- one quadrant end to end with the locked DLL model and the
// clock divider: per frame a burst of simultaneous pixel hits at a known
// instant, random masks, random validation settings and 1- or 2-bit mode.
// Checks the 53-bit time word (valid bit from a reference tree, latched
// frame number, coarse and fine stamp of the burst instant) and the full
// hit map from the DDR link, and that readout of 256 bits takes 128 clocks.
module tb_quadrant;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  localparam realtime T = SYS_CLK_PERIOD_PS, BIN = T / 32;

  logic clk = 1'b0, frame_rst_n = 1'b1, read = 1'b1, shutter = 1'b1, set_2bit = 1'b0;
  logic [3:0] valid_cntr = '0;
  logic [15:0] wl = '0, bl = '0, bl_n = '1;
  logic [15:0][15:0] fe_out = '0, mask;
  logic [31:0] taps;
  logic [39:0] fc = '0;
  logic [2:0] hm_phase;
  logic hm_shift, tm_shift, time_sout, hitmap_sdo, triggered;
  int checks = 0, failures = 0;
  int n_valid = 0, n_invalid = 0, n_masked_hits = 0, n_2bit = 0;

  logic [15:0][15:0] m_ref;
  int cnt_ref [16][16];

  tdc_dll u_dll (.ref_clk(clk), .tdc_cntr(2'b00), .taps(taps));
  clock_divider u_cdiv (.clk(clk), .read(read), .phase(hm_phase), .hm_shift(hm_shift), .tm_shift(tm_shift));
  quadrant dut (.*);

  always #(T / 2) clk = ~clk;

  function automatic logic ref_node(input logic [15:0] rows, input logic [3:0] cntr, input int lvl, input int lo);
    logic a, b;
    if (lvl == 0) return rows[lo];
    a = ref_node(rows, cntr, lvl - 1, lo);
    b = ref_node(rows, cntr, lvl - 1, lo + (1 << (lvl - 1)));
    return cntr[lvl-1] ? (a & b) : (a | b);
  endfunction

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d at %0t", what, got, exp, $realtime); end
  endtask

  initial begin
    #2000000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one frame: window with a burst, load, read out and check
  task automatic frame(input int npix, input logic two_bit, input logic [3:0] vc);
    int k, f, nb, pr[$], pc[$], nhits;
    logic [15:0] rows;
    logic [52:0] tw;
    logic [511:0] hm;
    time_word_t w;
    realtime e1, t0;
    logic [39:0] fc_frame;
    logic vexp;
    nb = two_bit ? 2 : 1;
    set_2bit = two_bit; valid_cntr = vc;
    fc_frame = {8'($urandom), 32'($urandom)}; fc = fc_frame;
    foreach (cnt_ref[r, c]) cnt_ref[r][c] = 0;
    // open the window in the middle of a low clock phase
    @(negedge clk); frame_rst_n = 1'b0; #(T / 4); frame_rst_n = 1'b1;
    @(posedge clk); e1 = $realtime;
    k = 1 + $urandom % 100; f = 1 + $urandom % 30;
    rows = '0;
    for (int i = 0; i < npix; i++) begin
      int r, c;
      r = (i == 0) ? $urandom % 16 : (pr[0] + i) % 16;   // cluster over neighbouring rows
      c = $urandom % 16;
      pr.push_back(r); pc.push_back(c);
    end
    #(e1 + (k - 1) * T + (f + 0.5) * BIN - $realtime);
    t0 = $realtime;
    nhits = two_bit ? 1 + $urandom % 4 : 1;
    for (int h = 0; h < nhits; h++) begin
      for (int i = 0; i < npix; i++) fe_out[pr[i]][pc[i]] = 1'b1;
      #3000;
      fe_out = '0;
      #3000;
    end
    foreach (pr[i]) begin
      if (!m_ref[pr[i]][pc[i]]) begin
        rows[pr[i]] = 1'b1;
        cnt_ref[pr[i]][pc[i]] = two_bit ? ((nhits > 3) ? 3 : nhits) : 1;
      end else n_masked_hits++;
    end
    fc = fc_frame + 1;                         // frame counter moves on after the hit
    vexp = ref_node(rows, vc, 4, 0);
    if (vexp) n_valid++; else n_invalid++;
    if (two_bit) n_2bit++;
    // close the window and load
    repeat (5) @(posedge clk);
    @(negedge clk); read = 1'b0; @(negedge clk); @(negedge clk); read = 1'b1;
    fork
      begin : time_rx
        for (int b = 52; b >= 0; b--) begin
          tw[b] = time_sout;
          @(posedge clk); @(posedge clk); @(negedge clk);
        end
      end
      begin : hm_rx
        for (int i = 0; i < 256 * nb; i += 2) begin
          @(posedge clk); #(T / 4); hm[i] = hitmap_sdo; #(T / 2); hm[i+1] = hitmap_sdo;
        end
      end
    join
    w = time_word_t'(tw);
    if (rows != 0) begin
      chk(w.coarse, k, "coarse");
      chk(w.fine, f, "fine");
      chk(w.fc, fc_frame, "latched frame number");
    end
    chk(w.valid, vexp, "valid");
    for (int i = 0; i < 256 * nb; i++) begin
      int round, row, col, bit_i;
      round = i / 16; row = i % 16;
      col = 15 - round / nb; bit_i = round % nb;
      chk(hm[i], (cnt_ref[row][col] >> bit_i) & 1, $sformatf("hit map row %0d col %0d bit %0d", row, col, bit_i));
    end
  endtask

  initial begin
    #1000;
    for (int r = 0; r < 16; r++) begin
      m_ref[r] = 16'($urandom) & 16'($urandom) & 16'($urandom);
      bl = m_ref[r]; bl_n = ~m_ref[r]; wl[r] = 1'b1; #100; wl[r] = 1'b0; #100;
    end
    @(negedge clk); read = 1'b0; @(negedge clk); read = 1'b1;
    frame(1, 1'b0, 4'b0000);     // single pixel, all OR: valid
    frame(1, 1'b0, 4'b0001);     // single pixel, pair AND: not valid
    frame(2, 1'b0, 4'b0001);
    frame(4, 1'b0, 4'b0011);
    frame(0, 1'b0, 4'b0000);     // empty frame
    for (int i = 0; i < 6; i++) frame(1 + $urandom % 6, 1'($urandom), 4'($urandom));
    frame(3, 1'b1, 4'b0000);
    chk(n_valid > 0, 1, "a valid frame occurred");
    chk(n_invalid > 0, 1, "a rejected frame occurred");
    chk(n_2bit > 0, 1, "a 2-bit frame occurred");
    $display("valid=%0d invalid=%0d masked_hits=%0d two_bit=%0d", n_valid, n_invalid, n_masked_hits, n_2bit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
