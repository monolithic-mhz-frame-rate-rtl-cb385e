// tb_fc_latch -- transparent while enabled, holds the value present when the
// enable falls.
module tb_fc_latch;
  timeunit 1ps; timeprecision 1fs;
  logic en = 1'b1;
  logic [39:0] d = '0, q, held;
  int checks = 0, failures = 0;

  fc_latch dut (.en(en), .d(d), .q(q));

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 100; i++) begin
      en = 1'b1;
      d = {8'($urandom), 32'($urandom)}; #10; checks++;
      if (q !== d) begin failures++; $display("FAIL transparent"); end
      held = d; en = 1'b0; #10;
      repeat (3) begin
        d = {8'($urandom), 32'($urandom)}; #10; checks++;
        if (q !== held) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
