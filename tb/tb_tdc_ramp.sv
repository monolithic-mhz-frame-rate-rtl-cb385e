// tb_tdc_ramp -- time-ramp characterisation of the stand-alone TDC (TDC logic
// plus its own DLL, as on the chip's test structure).
//
// The trigger is swept across the dynamic range, one trigger per frame:
//  * a coarse ramp in 23 ps steps from just after Frame_rst to the end of
//    the 128th reference period (about 13,600 frames), and
//  * a fine ramp in 1 ps steps over two reference periods.
// Every result must equal the ideal code floor((t - E1 + T) / BIN), where E1
// is the first reference edge after Frame_rst and BIN = T / 32. Points within
// 0.5 ps of a bin boundary are not compared. Along the ramp the code must
// never decrease. From the coarse ramp the width of every bin is measured
// (hits x step); the testbench checks that every code of the range occurs, and
// reports the largest DNL and INL in LSB, which for the ideal locked DLL
// model must stay within one ramp step.
module tb_tdc_ramp;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  localparam realtime T = SYS_CLK_PERIOD_PS, BIN = T / N_DE;
  localparam int      NCODES = 1 << TDC_BITS;

  logic ref_clk = 1'b0, frame_rst_n = 1'b1, enable = 1'b1, trigger = 1'b0;
  logic [N_DE-1:0]        taps;
  logic                   triggered;
  logic [COARSE_BITS-1:0] coarse;
  logic [FINE_BITS-1:0]   fine;
  int checks = 0, failures = 0;
  int hist [NCODES];

  tdc_dll u_dll (.ref_clk(ref_clk), .tdc_cntr(2'b00), .taps(taps));
  tdc dut (.ref_clk(ref_clk), .frame_rst_n(frame_rst_n), .enable(enable), .trigger(trigger),
           .taps(taps), .triggered(triggered), .coarse(coarse), .fine(fine));

  always #(T / 2) ref_clk = ~ref_clk;

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // One frame: release Frame_rst a quarter period before a rising edge (E1),
  // trigger at E1 + dt, return the 12-bit code.
  task automatic shot(input realtime dt, output int code);
    realtime e1;
    @(negedge ref_clk); frame_rst_n = 1'b0;
    e1 = $realtime + T / 2;
    #(T / 4); frame_rst_n = 1'b1;
    #(e1 + dt - $realtime);
    trigger = 1'b1; #500; trigger = 1'b0;
    code = {coarse, fine};
  endtask

  // Ideal code of a trigger dt after E1; -1 if dt is too close to a boundary.
  function automatic int ideal(input realtime dt);
    realtime x = (dt + T) / BIN;
    int      c = int'($floor(x));
    if (x - c < 0.5 / BIN || c + 1 - x < 0.5 / BIN) return -1;
    return c;
  endfunction

  initial begin
    int code, prev, exp, npts, first, last;
    realtime dt, step;
    real w, dnl, inl, max_dnl, max_inl, cum;

    frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1;   // first clear
    foreach (hist[i]) hist[i] = 0;

    // coarse ramp over the whole range
    step = 23.0; prev = -1; npts = 0;
    for (dt = -T / 4 + 10.0; dt < 127 * T - 1.0; dt += step) begin
      shot(dt, code);
      exp = ideal(dt);
      if (exp >= 0) chk(code, exp, $sformatf("code at %0.1f ps", dt));
      if (code < prev) chk(code, prev, "ramp monotonic");
      prev = code; hist[code]++; npts++;
    end

    // fine ramp: 1 ps steps over periods 2 and 3
    prev = -1;
    for (dt = T; dt < 3 * T; dt += 1.0) begin
      shot(dt, code);
      exp = ideal(dt);
      if (exp >= 0) chk(code, exp, $sformatf("fine ramp at %0.1f ps", dt));
      if (code < prev) chk(code, prev, "fine ramp monotonic");
      prev = code;
    end

    // bin widths from the coarse ramp (skip first and last, partly swept)
    first = int'($ceil((T - T / 4 + 10.0) / BIN)) + 1;
    last  = NCODES - 2;
    max_dnl = 0.0; max_inl = 0.0; cum = 0.0;
    for (int c = first; c <= last; c++) begin
      checks++;
      if (hist[c] == 0) begin
        failures++;
        if (failures < 20) $display("FAIL code %0d never seen", c);
      end
      w   = hist[c] * step / BIN;
      dnl = w - 1.0;
      cum += dnl;
      inl = cum;
      if ((dnl < 0 ? -dnl : dnl) > max_dnl) max_dnl = (dnl < 0 ? -dnl : dnl);
      if ((inl < 0 ? -inl : inl) > max_inl) max_inl = (inl < 0 ? -inl : inl);
    end
    checks++;
    if (max_dnl > step / BIN + 1e-6) begin
      failures++; $display("FAIL max DNL %0.3f LSB", max_dnl);
    end
    checks++;
    if (max_inl > step / BIN + 1e-6) begin
      failures++; $display("FAIL max INL %0.3f LSB", max_inl);
    end
    $display("ramp points=%0d codes %0d..%0d bin=%0.2f ps max|DNL|=%0.3f LSB max|INL|=%0.3f LSB",
             npts, first, last, BIN, max_dnl, max_inl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40_000_000_000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
