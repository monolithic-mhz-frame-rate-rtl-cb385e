// tb_dsipm_ic -- the whole IC at its real size (32 x 32 pixels, four
// quadrants, 408 MHz system clock, 3 MHz frames) driven only through its
// pins: LVDS clock and control pairs, the serial initialization register,
// SPAD avalanche stimulus, and the five serial output links.
//
// Sequence: global reset; masks written row by row (about 1 in 8 pixels
// off); Shutter on; continuous 1-bit frames of 136 system clocks, each
// readout running during the next acquisition window; then a switch to
// 2-bit mode with 272-clock windows. Every frame every quadrant gets a
// burst of simultaneous avalanches at a known instant; the checker decodes
// the TIME link (four interleaved 53-bit words) and the four HIT MAP links
// and compares them with expected values computed here: time stamp of the
// burst, frame number counted from the FRAME CLK edges driven here, valid
// bit from a reference AND/OR tree, hit counts including masking, dead-time
// loss and 2-bit saturation. The stand-alone TDC and the RX-TX test chain
// are exercised as well. Each mechanism is counted; one that never occurs
// is a failure.
module tb_dsipm_ic;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  localparam realtime T = SYS_CLK_PERIOD_PS, BIN = T / 32;
  localparam realtime SAMPLE = RX_DELAY_PS + TX_DELAY_PS + T / 4;  // first DDR half after a pad edge

  logic sys_clk = 1'b0, shutter = 1'b0, frame_clk = 1'b0, frame_rst = 1'b1, read = 1'b1;
  logic scl = 1'b0, sda = 1'b0, gl_rst = 1'b0;
  logic [31:0][31:0][3:0] spad = '0;
  logic time_p, time_n, test_tx_p, test_tx_n, sa_trigger = 1'b0, test_rx = 1'b0;
  logic [3:0] hitmap_p, hitmap_n;
  logic [11:0] sa_tdc;

  dsipm_ic dut (
    .sys_clk_p(sys_clk), .sys_clk_n(~sys_clk), .shutter_p(shutter), .shutter_n(~shutter),
    .frame_clk_p(frame_clk), .frame_clk_n(~frame_clk), .frame_rst_p(frame_rst), .frame_rst_n(~frame_rst),
    .read_p(read), .read_n(~read), .scl(scl), .sda(sda), .gl_rst(gl_rst), .spad(spad),
    .time_p(time_p), .time_n(time_n), .hitmap_p(hitmap_p), .hitmap_n(hitmap_n),
    .sa_trigger(sa_trigger), .sa_tdc(sa_tdc), .test_rx_p(test_rx), .test_rx_n(~test_rx),
    .test_tx_p(test_tx_p), .test_tx_n(test_tx_n));

  always #(T / 2) sys_clk = ~sys_clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_stamps = 0, n_valid = 0, n_rejected = 0, n_masked = 0, n_deadtime_lost = 0;
  int n_multi_count = 0, n_saturated = 0, n_empty = 0, n_fc_step = 0, n_mode_switch = 0;
  int n_sa_tdc = 0, n_testchain = 0, n_frames_checked = 0;

  logic [31:0][31:0] m_ref;
  longint fc_count = 0;

  typedef struct {
    bit         hit;
    bit         valid;
    int         coarse, fine;
    longint     fc;
    int         cnt [16][16];
  } qexp_t;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin failures++; if (failures < 30) $display("FAIL %s: got %0d exp %0d at %0t", what, got, exp, $realtime); end
  endtask

  function automatic logic ref_node(input logic [15:0] rows, input logic [3:0] cntr, input int lvl, input int lo);
    logic a, b;
    if (lvl == 0) return rows[lo];
    a = ref_node(rows, cntr, lvl - 1, lo);
    b = ref_node(rows, cntr, lvl - 1, lo + (1 << (lvl - 1)));
    return cntr[lvl-1] ? (a & b) : (a | b);
  endfunction

  // ---- initialization register (SCL half period in ps)
  task automatic init_word(input init_cfg_t w, input realtime half);
    for (int i = INIT_BITS - 1; i >= 0; i--) begin
      sda = w[i]; #(half); scl = 1'b1; #(half); scl = 1'b0;
    end
  endtask

  task automatic write_masks();
    init_cfg_t w;
    w = '0;
    for (int r = 0; r < 32; r++) begin
      w.addr = 5'(r); w.bl = m_ref[r];
      w.wl_en = 1'b0; init_word(w, 1000.0);
      w.wl_en = 1'b1; init_word(w, 1000.0);
      w.wl_en = 1'b0; init_word(w, 1000.0);
    end
  endtask

  // ---- frame clock: rising at the start of every 136-clock frame
  task automatic frame_clock_edge();
    frame_clk = 1'b1;
    if (shutter) fc_count++;
    fork begin #(T * 68); frame_clk = 1'b0; end join_none
  endtask

  // ---- link receivers: sample the DDR pairs following pad edge e0
  task automatic check_frame(input qexp_t e [4], input int nb, input string tag);
    logic [211:0] ts;
    logic [3:0][511:0] hm;
    time_word_t w;
    for (int i = 0; i < 128 * nb; i++) begin
      @(posedge sys_clk); #(SAMPLE);
      if (i < 106) ts[2*i] = time_p;
      for (int q = 0; q < 4; q++) hm[q][2*i] = hitmap_p[q];
      #(T / 2);
      if (i < 106) ts[2*i+1] = time_p;
      for (int q = 0; q < 4; q++) hm[q][2*i+1] = hitmap_p[q];
    end
    for (int q = 0; q < 4; q++) begin
      logic [52:0] tw;
      for (int b = 0; b < 53; b++) tw[52 - b] = ts[4 * b + q];
      w = time_word_t'(tw);
      chk(w.valid, e[q].valid, $sformatf("%s q%0d valid", tag, q));
      if (e[q].hit) begin
        chk(w.coarse, e[q].coarse, $sformatf("%s q%0d coarse", tag, q));
        chk(w.fine, e[q].fine, $sformatf("%s q%0d fine", tag, q));
        chk(w.fc, e[q].fc, $sformatf("%s q%0d frame number", tag, q));
        if (w.coarse == e[q].coarse && w.fine == e[q].fine) n_stamps++;
      end
      for (int i = 0; i < 256 * nb; i++) begin
        int round, row, col, bi;
        round = i / 16; row = i % 16; col = 15 - round / nb; bi = round % nb;
        chk(hm[q][i], (e[q].cnt[row][col] >> bi) & 1, $sformatf("%s q%0d hit map r%0d c%0d b%0d", tag, q, row, col, bi));
      end
    end
    n_frames_checked++;
  endtask

  // ---- stimulus of one acquisition window; e1 = first counted clock edge
  task automatic stimulate(input realtime e1, input logic [3:0] vc, input logic two_bit, output qexp_t e [4]);
    for (int q = 0; q < 4; q++) begin
      int npix, k, f, nburst, r0, c0, pr[$], pc[$];
      logic [15:0] rows;
      realtime tq;
      r0 = 16 * (q / 2); c0 = 16 * (q % 2);
      foreach (e[q].cnt[r, c]) e[q].cnt[r][c] = 0;
      npix = ($urandom % 8 == 0) ? 0 : 1 + $urandom % 5;
      k = 1 + $urandom % 100; f = 1 + $urandom % 30;
      nburst = two_bit ? 1 + $urandom % 4 : 1;
      for (int i = 0; i < npix; i++) begin
        pr.push_back(i == 0 ? $urandom % 16 : (pr[0] + i) % 16);
        pc.push_back($urandom % 16);
      end
      rows = '0;
      foreach (pr[i]) begin
        if (m_ref[r0 + pr[i]][c0 + pc[i]]) n_masked++;
        else begin
          rows[pr[i]] = 1'b1;
          e[q].cnt[pr[i]][pc[i]] = two_bit ? ((nburst > 3) ? 3 : nburst) : 1;
        end
      end
      if (two_bit && nburst > 3 && rows != 0) n_saturated++;
      if (two_bit && nburst > 1 && rows != 0) n_multi_count++;
      e[q].hit = (rows != 0);
      e[q].valid = ref_node(rows, vc, 4, 0);
      e[q].coarse = k; e[q].fine = f; e[q].fc = fc_count;
      if (rows == 0) n_empty++;
      else if (e[q].valid) n_valid++;
      else n_rejected++;
      // avalanche instants: internal trigger at E1 + (k-1)T + (f+0.5)BIN
      tq = e1 + RX_DELAY_PS - FE_DELAY_PS + (k - 1) * T + (f + 0.5) * BIN;
      for (int b = 0; b < nburst; b++) begin
        automatic realtime tb = tq + b * 30000.0;        // 30 ns apart: beyond the dead time
        automatic int qq = q;
        automatic int nn = npix;
        automatic int prr[$] = pr, pcc[$] = pc;
        automatic bit lose = (b == 0) && (npix > 0);
        fork begin
          #(tb - $realtime);
          for (int i = 0; i < nn; i++) spad[16 * (qq / 2) + prr[i]][16 * (qq % 2) + pcc[i]][$urandom % 4] = 1'b1;
          #200;
          for (int i = 0; i < nn; i++) spad[16 * (qq / 2) + prr[i]][16 * (qq % 2) + pcc[i]] = '0;
          if (lose) begin
            // a second avalanche 10 ns later falls into the dead time
            #10000;
            spad[16 * (qq / 2) + prr[0]][16 * (qq % 2) + pcc[0]][1] = 1'b1;
            #200;
            spad[16 * (qq / 2) + prr[0]][16 * (qq % 2) + pcc[0]] = '0;
          end
        end join_none
      end
      if (npix > 0 && !m_ref[r0 + pr[0]][c0 + pc[0]]) n_deadtime_lost++;
    end
  endtask

  // ---- one acquisition window of nframes frame clocks
  //      cycle 0: FRAME CLK rises, Read falls (load); cycle 2: Read rises
  //      (readout of the previous window starts); cycle 3: Frame_rst low,
  //      released mid-cycle: the new window opens. Late in the window, after
  //      the hits, the configuration for the next window is written.
  task automatic window(input int nframes, input logic [3:0] vc, input logic two_bit,
                        input qexp_t prev [4], input bit check_prev, input int prev_nb,
                        input init_cfg_t next_cfg, output qexp_t cur [4]);
    realtime e1, t0;
    @(negedge sys_clk);
    t0 = $realtime;
    frame_clock_edge();
    read = 1'b0;
    @(negedge sys_clk); @(negedge sys_clk); read = 1'b1;
    if (check_prev) begin
      automatic qexp_t p [4] = prev;
      automatic int nb = prev_nb;
      fork check_frame(p, nb, "frame"); join_none
    end
    @(negedge sys_clk); frame_rst = 1'b0; #(T / 4); frame_rst = 1'b1;
    @(posedge sys_clk); e1 = $realtime;
    stimulate(e1, vc, two_bit, cur);
    for (int f = 1; f < nframes; f++) begin
      automatic realtime tf = t0 + f * FRAME_SYS_CYCLES * T;
      fork begin #(tf - $realtime); frame_clock_edge(); end join_none
    end
    #(e1 + 118 * T - $realtime);
    init_word(next_cfg, 200.0);
    #(t0 + nframes * FRAME_SYS_CYCLES * T - T - $realtime);
  endtask

  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    qexp_t prev [4], cur [4];
    init_cfg_t cfg_now, cfg_next;
    int prev_nb;
    bit have_prev;
    #1000;
    gl_rst = 1'b1; shutter = 1'b1; #1000; gl_rst = 1'b0; shutter = 1'b0;
    for (int r = 0; r < 32; r++) m_ref[r] = 32'($urandom) & 32'($urandom) & 32'($urandom);
    write_masks();
    checks++;
    if (dut.mask !== m_ref) begin failures++; $display("FAIL mask write through the initialization register"); end
    // ---- RX-TX test chain
    for (int i = 0; i < 64; i++) begin
      test_rx = 1'($urandom); #(RX_DELAY_PS + TX_DELAY_PS + 100);
      checks++;
      if (test_tx_p !== test_rx || test_tx_n !== ~test_rx) begin failures++; $display("FAIL RX-TX chain"); end
      else n_testchain++;
      #500;
    end
    shutter = 1'b1; #5000;
    // ---- 1-bit windows of one frame; the last one switches to 2-bit mode
    cfg_now = '0;
    have_prev = 0; prev_nb = 1;
    for (int n = 0; n < 8; n++) begin
      cfg_next = '0;
      cfg_next.valid_cntr = (n < 1) ? 4'b0000 : (n < 3) ? 4'b0001 : 4'($urandom);
      cfg_next.set_2bit = (n == 7);
      window(1, cfg_now.valid_cntr, 1'b0, prev, have_prev, prev_nb, cfg_next, cur);
      prev = cur; have_prev = 1; prev_nb = cfg_next.set_2bit ? 2 : 1;
      cfg_now = cfg_next;
    end
    n_mode_switch++;
    // ---- 2-bit windows of two frames
    for (int n = 0; n < 5; n++) begin
      cfg_next = cfg_now;
      window(2, cfg_now.valid_cntr, 1'b1, prev, have_prev, prev_nb, cfg_next, cur);
      prev = cur; prev_nb = 2;
    end
    // last readout
    @(negedge sys_clk); frame_clock_edge(); read = 1'b0;
    @(negedge sys_clk); @(negedge sys_clk); read = 1'b1;
    check_frame(prev, prev_nb, "last");
    // ---- stand-alone TDC
    for (int i = 0; i < 8; i++) begin
      realtime e1;
      int k, f;
      k = 1 + $urandom % 120; f = 1 + $urandom % 30;
      @(negedge sys_clk); frame_rst = 1'b0; #(T / 4); frame_rst = 1'b1;
      @(posedge sys_clk); e1 = $realtime;
      #(e1 + RX_DELAY_PS + (k - 1) * T + (f + 0.5) * BIN - $realtime);
      sa_trigger = 1'b1; #1000; sa_trigger = 1'b0;
      chk(sa_tdc, k * 32 + f, "stand-alone TDC");
      if (sa_tdc == 12'(k * 32 + f)) n_sa_tdc++;
    end
    n_fc_step = int'(fc_count);
    $display("stamps=%0d valid=%0d rejected=%0d empty=%0d masked=%0d deadtime_lost=%0d multi=%0d saturated=%0d mode_switch=%0d fc=%0d sa_tdc=%0d testchain=%0d frames=%0d",
             n_stamps, n_valid, n_rejected, n_empty, n_masked, n_deadtime_lost, n_multi_count, n_saturated,
             n_mode_switch, n_fc_step, n_sa_tdc, n_testchain, n_frames_checked);
    chk(n_stamps > 0, 1, "time stamps happened");
    chk(n_valid > 0, 1, "validated events happened");
    chk(n_rejected > 0, 1, "rejected events happened");
    chk(n_empty > 0, 1, "empty quadrant frames happened");
    chk(n_masked > 0, 1, "masked-pixel avalanches happened");
    chk(n_deadtime_lost > 0, 1, "dead-time losses happened");
    chk(n_multi_count > 0, 1, "2-bit multi-hit counts happened");
    chk(n_saturated > 0, 1, "2-bit saturation happened");
    chk(n_mode_switch > 0, 1, "mode switch happened");
    chk(n_fc_step > 1, 1, "frame counter advanced");
    chk(n_sa_tdc > 0, 1, "stand-alone TDC measured");
    chk(n_testchain > 0, 1, "RX-TX chain passed data");
    chk(n_frames_checked, 13, "frames read out and checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
