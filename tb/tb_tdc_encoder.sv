// tb_tdc_encoder -- every one of the 32 circular runs of 16 ones decodes to
// the index of its last one; a bubble elsewhere picks the lowest end.
module tb_tdc_encoder;
  timeunit 1ps; timeprecision 1fs;
  logic [31:0] therm;
  logic [4:0]  code;
  int checks = 0, failures = 0;

  tdc_encoder dut (.therm(therm), .code(code));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 32; k++) begin
      for (int i = 0; i < 32; i++) therm[i] = (((k - i) % 32 + 32) % 32) < 16;
      #10;
      checks++;
      if (code !== 5'(k)) begin failures++; $display("FAIL k=%0d code=%0d", k, code); end
    end
    // bubble: run ending at 20 plus a stray one at 3 -> 3 wins
    therm = '0; for (int i = 5; i <= 20; i++) therm[i] = 1'b1; therm[3] = 1'b1;
    #10; checks++;
    if (code !== 5'd3) begin failures++; $display("FAIL bubble code=%0d", code); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
