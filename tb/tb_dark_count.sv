// tb_dark_count -- dark-count accumulation on one quadrant, run the way the
// chip is operated: back-to-back frames of exactly 136 system clocks (3 MHz at
// 408 MHz), each frame's data read out while the next frame acquires.
//
// Every pixel has its own dark-count probability per frame (a few hot pixels
// much higher). Dark avalanches arrive at random instants in the first 120
// reference periods of each window, on a random one of the pixel's four SPADs,
// through the behavioural front ends, so two avalanches of one pixel within
// the dead time give one pulse. The hottest pixels are masked after the
// first quarter of the run. The hit maps of all frames are accumulated per
// pixel and compared with the stimulus; every frame's time word must carry
// the frame number (from the 40-bit frame counter on FRAME CLK), the stamp of
// the earliest accepted avalanche and the valid bit of a reference AND/OR tree
// evaluated on the overlapping front-end pulses at each clock edge. Half-way
// the validation switches from all-OR (every dark hit valid) to pair-AND
// (only coincident hits in rows 2k and 2k+1 are valid), so that isolated
// dark hits are rejected; the run must see empty, valid and rejected frames,
// counts lost in the dead time and masked counts.
// Frame layout: READ low for 2 clocks (load), FRAME_RST low for a quarter
// clock on the next falling edge, FRAME CLK rising with READ falling.
module tb_dark_count;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  localparam realtime T = SYS_CLK_PERIOD_PS, BIN = T / N_DE;
  localparam int NFRAMES = 600;
  localparam int NHOT    = 6;

  logic clk = 1'b0, frame_rst_n = 1'b1, read = 1'b1, shutter = 1'b1, set_2bit = 1'b0;
  logic frame_clk = 1'b0;
  logic [3:0] valid_cntr = '0;
  logic [15:0] wl = '0, bl = '0, bl_n = '1;
  logic [15:0][15:0][3:0] spad = '0;
  logic [15:0][15:0] fe_out, mask;
  logic [31:0] taps;
  logic [39:0] fc;
  logic [2:0] hm_phase;
  logic hm_shift, tm_shift, time_sout, hitmap_sdo, triggered;
  int checks = 0, failures = 0;

  tdc_dll u_dll (.ref_clk(clk), .tdc_cntr(2'b00), .taps(taps));
  clock_divider u_cdiv (.clk(clk), .read(read), .phase(hm_phase), .hm_shift(hm_shift), .tm_shift(tm_shift));
  frame_counter u_fc (.frame_clk(frame_clk), .shutter(shutter), .fc(fc));
  for (genvar r = 0; r < 16; r++) begin : g_r
    for (genvar c = 0; c < 16; c++) begin : g_c
      spad_frontend u_fe (.spad(spad[r][c]), .mask(mask[r][c]), .out(fe_out[r][c]));
    end
  end
  quadrant dut (.clk(clk), .frame_rst_n(frame_rst_n), .read(read), .shutter(shutter), .set_2bit(set_2bit),
                .valid_cntr(valid_cntr), .wl(wl), .bl(bl), .bl_n(bl_n), .fe_out(fe_out), .taps(taps),
                .fc(fc), .hm_phase(hm_phase), .hm_shift(hm_shift), .tm_shift(tm_shift), .mask(mask),
                .time_sout(time_sout), .hitmap_sdo(hitmap_sdo), .triggered(triggered));

  always #(T / 2) clk = ~clk;

  // expected result of one frame, queued when its window closes
  typedef struct {
    logic [15:0][15:0] hits;
    logic              any, valid;
    int                code;
    longint            fc;
  } frame_exp_t;
  frame_exp_t exp_q[$];

  real    p_dark [16][16];
  logic [15:0][15:0] m_ref = '0;
  int     acc_ref [16][16], acc_dut [16][16];
  int     n_frames_checked = 0, n_empty = 0, n_valid = 0, n_rejected = 0, n_deadtime = 0, n_masked = 0;
  int     n_events = 0;
  longint fc_edges = 0;

  task automatic chk(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d at %0t", what, got, exp, $realtime);
    end
  endtask

  function automatic logic ref_node(input logic [15:0] rows, input logic [3:0] cntr, input int lvl, input int lo);
    logic a, b;
    if (lvl == 0) return rows[lo];
    a = ref_node(rows, cntr, lvl - 1, lo);
    b = ref_node(rows, cntr, lvl - 1, lo + (1 << (lvl - 1)));
    return cntr[lvl-1] ? (a & b) : (a | b);
  endfunction

  // Receiver: after each rising edge of READ, capture the 53-bit time word
  // and the 256-bit hit map of the previous window and check them.
  initial begin
    logic [52:0]  tw;
    logic [255:0] hm;
    time_word_t   w;
    frame_exp_t   e;
    int           n_reads = 0;
    forever begin
      @(posedge read);                     // on a falling clock edge
      fork
        for (int b = 52; b >= 0; b--) begin
          tw[b] = time_sout;
          @(posedge clk); @(posedge clk); @(negedge clk);
        end
        for (int i = 0; i < 256; i += 2) begin
          @(posedge clk); #(T / 4); hm[i] = hitmap_sdo; #(T / 2); hm[i+1] = hitmap_sdo;
        end
      join
      n_reads++;
      if (n_reads == 1) continue;          // loaded before the first window
      e = exp_q.pop_front();
      w = time_word_t'(tw);
      chk(w.valid, e.valid, "valid");
      if (e.any) begin
        chk({w.coarse, w.fine}, e.code, "time stamp of earliest dark hit");
        chk(w.fc, e.fc, "frame number");
      end
      for (int i = 0; i < 256; i++) begin
        int row, col;
        row = i % 16; col = 15 - i / 16;
        chk(hm[i], e.hits[row][col], $sformatf("hit map r%0d c%0d", row, col));
        acc_dut[row][col] += int'(hm[i]);
      end
      n_frames_checked++;
    end
  end

  always @(posedge frame_clk) if (shutter) fc_edges++;

  // one frame of 136 clocks; acquisition window opens after FRAME_RST
  task automatic frame();
    frame_exp_t e;
    realtime    e1, t_ev[$], t_first;
    int         r_ev[$], c_ev[$];
    realtime    t_last [16][16];
    realtime    p_start [$], p_end [$];
    int         p_row [$];
    longint     fc_now;
    // READ falls: load; FRAME CLK rises with it
    @(negedge clk); read = 1'b0; frame_clk = 1'b1;
    @(negedge clk); @(negedge clk); read = 1'b1;
    @(negedge clk); frame_rst_n = 1'b0; e1 = $realtime + T / 2;
    #(T / 4); frame_rst_n = 1'b1;
    fc_now = fc_edges;
    // dark events of this window
    foreach (t_last[r, c]) t_last[r][c] = -1.0e12;
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        if ($urandom_range(0, 999999) < int'(p_dark[r][c] * 1.0e6)) begin
          int nev = 1 + (($urandom % 4) == 0);       // now and then two in one frame
          for (int j = 0; j < nev; j++) begin
            int k = 1 + $urandom % 120, f = $urandom % 32;
            t_ev.push_back(e1 + (k - 1) * T + (f + 0.5) * BIN - FE_DELAY_PS);
            r_ev.push_back(r); c_ev.push_back(c);
          end
        end
    // expected outcome: sort by time, apply mask and dead time
    e.hits = '0; e.any = 1'b0; e.code = 0; e.fc = fc_now; t_first = 1.0e12;
    for (int i = 0; i < t_ev.size(); i++)
      for (int j = i + 1; j < t_ev.size(); j++)
        if (t_ev[j] < t_ev[i]) begin
          realtime tt = t_ev[i]; int rr = r_ev[i], cc = c_ev[i];
          t_ev[i] = t_ev[j]; r_ev[i] = r_ev[j]; c_ev[i] = c_ev[j];
          t_ev[j] = tt; r_ev[j] = rr; c_ev[j] = cc;
        end
    for (int i = 0; i < t_ev.size(); i++) begin
      int r = r_ev[i], c = c_ev[i];
      n_events++;
      if (m_ref[r][c]) begin n_masked++; continue; end
      if (t_ev[i] < t_last[r][c] + FE_DELAY_PS + DEADTIME_PS) begin n_deadtime++; continue; end
      t_last[r][c] = t_ev[i];
      e.hits[r][c] = 1'b1;
      p_start.push_back(t_ev[i] + FE_DELAY_PS); p_end.push_back(t_ev[i] + FE_DELAY_PS + DEADTIME_PS);
      p_row.push_back(r);
      if (!e.any || t_ev[i] < t_first) begin
        t_first = t_ev[i];
        e.code = int'($floor((t_ev[i] + FE_DELAY_PS - e1 + T) / BIN));
      end
      e.any = 1'b1;
    end
    // valid: reference tree on the row lines at every clock edge of the window
    e.valid = 1'b0;
    for (int n = 0; n < 134; n++) begin
      realtime te = e1 + n * T;
      logic [15:0] rows = '0;
      foreach (p_start[i]) if (p_start[i] < te && te < p_end[i]) rows[p_row[i]] = 1'b1;
      if (ref_node(rows, valid_cntr, 4, 0)) e.valid = 1'b1;
    end
    if (!e.any) n_empty++; else if (e.valid) n_valid++; else n_rejected++;
    foreach (e.hits[r, c]) acc_ref[r][c] += int'(e.hits[r][c]);
    // fire the avalanches
    for (int i = 0; i < t_ev.size(); i++) begin
      automatic realtime ti = t_ev[i];
      automatic int ri = r_ev[i], ci = c_ev[i], si = $urandom % 4;
      fork begin
        #(ti - $realtime);
        spad[ri][ci][si] = 1'b1; #200; spad[ri][ci][si] = 1'b0;
      end join_none
    end
    exp_q.push_back(e);
    // rest of the frame: 136 clocks from the fall of READ
    repeat (64) @(negedge clk);
    frame_clk = 1'b0;
    repeat (68) @(negedge clk);
  endtask

  initial begin
    // dark-count probabilities: most pixels low, a few hot ones
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        p_dark[r][c] = 0.001 + 0.004 * ($urandom % 1000) / 1000.0;
    for (int h = 0; h < NHOT; h++) p_dark[$urandom % 16][$urandom % 16] = 0.05 + 0.10 * h;
    foreach (acc_ref[r, c]) begin acc_ref[r][c] = 0; acc_dut[r][c] = 0; end
    // Shutter low clears the frame counter; all pixels enabled
    #100; shutter = 1'b0;
    #900;
    for (int r = 0; r < 16; r++) begin
      bl = '0; bl_n = '1; wl[r] = 1'b1; #100; wl[r] = 1'b0; #100;
    end
    shutter = 1'b1;                         // start of the measurement
    for (int n = 0; n < NFRAMES; n++) begin
      if (n == NFRAMES / 4) begin
        // mask the hot pixels (those above 4 %), between two frames
        @(negedge clk);
        for (int r = 0; r < 16; r++) begin
          for (int c = 0; c < 16; c++) m_ref[r][c] = (p_dark[r][c] > 0.04);
          bl = m_ref[r]; bl_n = ~m_ref[r]; wl[r] = 1'b1; #100; wl[r] = 1'b0; #100;
        end
      end
      if (n == NFRAMES / 2) valid_cntr = 4'b0001;   // pairs of neighbouring rows
      frame();
    end
    frame();                                // one more window so the last one is read
    @(negedge clk); read = 1'b0; @(negedge clk); @(negedge clk); read = 1'b1;
    repeat (140) @(negedge clk);
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++)
        chk(acc_dut[r][c], acc_ref[r][c], $sformatf("accumulated hits r%0d c%0d", r, c));
    chk(n_frames_checked, NFRAMES + 1, "frames read out");
    chk(n_empty > 0, 1, "empty frames happened");
    chk(n_valid > 0, 1, "valid dark frames happened");
    chk(n_rejected > 0, 1, "rejected dark frames happened");
    chk(n_deadtime > 0, 1, "dark counts lost in the dead time");
    chk(n_masked > 0, 1, "masked hot-pixel dark counts");
    $display("frames=%0d events=%0d empty=%0d valid=%0d rejected=%0d deadtime_lost=%0d masked=%0d",
             n_frames_checked, n_events, n_empty, n_valid, n_rejected, n_deadtime, n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5_000_000_000.0);                     // 5 ms, about 15,000 frames
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
