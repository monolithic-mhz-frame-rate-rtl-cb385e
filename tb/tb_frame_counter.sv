// tb_frame_counter -- counts FRAME CLK edges only while Shutter is high,
// restarts at zero with each Shutter, and carries across all 40 bits.
module tb_frame_counter;
  timeunit 1ps; timeprecision 1fs;
  logic frame_clk = 1'b0, shutter = 1'b0;
  logic [39:0] fc;
  int checks = 0, failures = 0;

  frame_counter dut (.frame_clk(frame_clk), .shutter(shutter), .fc(fc));

  task automatic tick(input int n); repeat (n) begin #100 frame_clk = 1'b1; #100 frame_clk = 1'b0; end endtask
  task automatic chk(input logic [39:0] exp, input string what);
    checks++;
    if (fc !== exp) begin failures++; $display("FAIL %s: fc=%0d exp %0d", what, fc, exp); end
  endtask

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #50; tick(5); chk(0, "held while Shutter low");
    shutter = 1'b1;
    for (int i = 1; i <= 300; i++) begin tick(1); chk(40'(i), "counting"); end
    shutter = 1'b0; #10; chk(0, "cleared by Shutter low");
    shutter = 1'b1; tick(7); chk(7, "restart");
    // carry across the full width: force near wrap
    shutter = 1'b0; #10; shutter = 1'b1;
    dut.fc = 40'hFF_FFFF_FFFE;
    tick(1); chk(40'hFF_FFFF_FFFF, "top count");
    tick(1); chk(40'h0, "wraps after 2^40 frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
