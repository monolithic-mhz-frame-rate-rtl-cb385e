// tb_lvds_tx -- checks the behavioural LVDS transmitter: complementary
// outputs following the input after the delay, at 816 Mbit/s.
module tb_lvds_tx;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime D = 300.0, UI = 1225.5;
  logic d = 1'b0, out_p, out_n;
  int checks = 0, failures = 0;

  lvds_tx #(.DELAY(D)) dut (.d(d), .out_p(out_p), .out_n(out_n));

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [255:0] bits, got;
    #2000;
    bits = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    fork
      for (int i = 0; i < 256; i++) begin d = bits[i]; #(UI); end
      begin
        #(D + UI / 2);
        for (int i = 0; i < 256; i++) begin
          got[i] = out_p;
          checks++;
          if (out_n !== ~out_p) begin failures++; $display("FAIL out_n not complementary at bit %0d", i); end
          #(UI);
        end
      end
    join
    checks++;
    if (got !== bits) begin failures++; $display("FAIL stream mismatch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
