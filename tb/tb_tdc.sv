// tb_tdc -- quadrant TDC with the locked DLL model: random trigger instants
// across the 128-period (313.7 ns) range must give coarse = number of
// reference periods started since Frame_rst and fine = DLL bin of the
// trigger within its period; the result must hold until the next Frame_rst,
// a second trigger must not disturb it, and nothing counts without Shutter.
module tb_tdc;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  localparam realtime T = SYS_CLK_PERIOD_PS, BIN = T / 32;

  logic ref_clk = 1'b0, frame_rst_n = 1'b1, enable = 1'b1, trigger = 1'b0;
  logic [31:0] taps;
  logic triggered;
  logic [6:0] coarse;
  logic [4:0] fine;
  int checks = 0, failures = 0;

  tdc_dll u_dll (.ref_clk(ref_clk), .tdc_cntr(2'b00), .taps(taps));
  tdc dut (.ref_clk(ref_clk), .frame_rst_n(frame_rst_n), .enable(enable), .trigger(trigger),
           .taps(taps), .triggered(triggered), .coarse(coarse), .fine(fine));

  always #(T / 2) ref_clk = ~ref_clk;

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // Release Frame_rst in the middle of a low phase, trigger k periods later
  // at bin f (plus half a bin), check the stamp.
  task automatic measure(input int k, input int f, input logic en);
    realtime e0;
    @(negedge ref_clk); frame_rst_n = 1'b0; enable = en;
    #(T / 4); frame_rst_n = 1'b1;
    @(posedge ref_clk); e0 = $realtime;              // first counted edge E1
    #(e0 + (k - 1) * T + (f + 0.5) * BIN - $realtime);
    trigger = 1'b1; #1000; trigger = 1'b0;
    chk(int'(triggered), 1, "trigger FF set");
    chk(int'(coarse), en ? k : 0, "coarse");
    chk(int'(fine), f, "fine");
    repeat (10) @(posedge ref_clk);
    trigger = 1'b1; #1000; trigger = 1'b0;             // later hits ignored
    chk(int'(coarse), en ? k : 0, "coarse held");
    chk(int'(fine), f, "fine held");
  endtask

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge ref_clk);
    for (int f = 1; f < 31; f++) measure(1 + f, f, 1'b1);
    for (int i = 0; i < 60; i++) measure(1 + ($urandom % 127), 1 + ($urandom % 30), 1'b1);
    measure(127, 30, 1'b1);                             // end of the 313.7 ns range
    measure(50, 10, 1'b0);                              // no Shutter: no coarse count
    // Frame_rst clears the result
    @(negedge ref_clk); frame_rst_n = 1'b0; #100;
    chk(int'(triggered), 0, "Frame_rst clears trigger FF");
    chk(int'(coarse), 0, "Frame_rst clears coarse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
