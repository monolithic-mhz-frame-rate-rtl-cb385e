// tb_spad_frontend -- checks the behavioural pixel front end: delay from
// avalanche to Out, pulse length equal to the dead time, avalanches during
// the dead time lost, any of the four SPADs fires, masked pixel silent.
module tb_spad_frontend;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime DT = 22000.0, FD = 500.0;

  logic [3:0] spad = '0;
  logic       mask = 1'b0;
  logic       out;
  int checks = 0, failures = 0;

  spad_frontend #(.DEADTIME(DT), .FE_DELAY(FD)) dut (.spad(spad), .mask(mask), .out(out));

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b exp %0b at %0t", what, got, exp, $realtime); end
  endtask

  task automatic fire(input int i);
    spad[i] = 1'b1; #100; spad[i] = 1'b0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    for (int s = 0; s < 4; s++) begin
      fork fire(s); join_none
      #(FD - 50); chk(out, 1'b0, "before FE delay");
      #100;       chk(out, 1'b1, "after FE delay");
      // second avalanche during dead time is lost
      #5000; fork fire((s + 1) % 4); join_none
      #(DT - 5000 - 100); chk(out, 1'b1, "still dead");
      #200;               chk(out, 1'b0, "recovered after dead time");
      #(FD + 1000);       chk(out, 1'b0, "lost avalanche gave no pulse");
      #2000;
    end
    // masked pixel
    mask = 1'b1;
    fork fire(2); join_none
    #(FD + 1000); chk(out, 1'b0, "masked pixel silent");
    mask = 1'b0; #30000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
