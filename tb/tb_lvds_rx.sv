// tb_lvds_rx -- checks the behavioural LVDS receiver: output follows the
// sign of the differential input after the delay, holds when both legs are
// equal.
module tb_lvds_rx;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime D = 200.0;
  logic in_p = 1'b0, in_n = 1'b1, out;
  int checks = 0, failures = 0;

  lvds_rx #(.DELAY(D)) dut (.in_p(in_p), .in_n(in_n), .out(out));

  task automatic chk(input logic exp, input string what);
    checks++;
    if (out !== exp) begin failures++; $display("FAIL %s: got %0b exp %0b", what, out, exp); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic b, prev;
    #1000; chk(1'b0, "initial low");
    prev = 1'b0;
    for (int i = 0; i < 200; i++) begin
      b = 1'($urandom);
      in_p = b; in_n = ~b;
      #(D - 50); chk(prev, "old value before delay");
      #100;      chk(b, "new value after delay");
      // both legs equal: hold
      // both legs equal at the opposite level: output must hold
      in_n = in_p; #(D + 100); chk(b, "hold when no differential");
      in_p = ~b; in_n = ~b; #(D + 100); chk(b, "hold when both legs flip");
      in_p = b; in_n = ~b; #500;
      prev = b;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
