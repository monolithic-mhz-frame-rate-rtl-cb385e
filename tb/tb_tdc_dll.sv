// tb_tdc_dll -- checks the locked DLL model: tap i is the reference clock
// delayed by i bins of one 32nd of the 408 MHz period, so the latched taps
// at phase k*bin + bin/2 hold the circular run of ones ending at tap k.
module tb_tdc_dll;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime T = 2451.0, BIN = T / 32;
  logic ref_clk = 1'b0;
  logic [31:0] taps;
  int checks = 0, failures = 0;

  tdc_dll dut (.ref_clk(ref_clk), .tdc_cntr(2'b00), .taps(taps));

  always #(T / 2) ref_clk = ~ref_clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] exp;
    realtime edge_t;
    repeat (4) @(posedge ref_clk);
    edge_t = $realtime;
    for (int k = 0; k < 32; k++) begin
      #(edge_t + k * BIN + BIN / 2 - $realtime);
      for (int i = 0; i < 32; i++) exp[i] = (((k - i) % 32 + 32) % 32) < 16;
      checks++;
      if (taps !== exp) begin failures++; $display("FAIL phase %0d: taps %h exp %h", k, taps, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
