// tb_clock_divider -- phase counts 0..7 from the first clock after Read
// rises, restarts whenever Read goes low; hit-map shift every 8th clock,
// time shift every 2nd.
module tb_clock_divider;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, read = 1'b0, hm_shift, tm_shift;
  logic [2:0] phase;
  int checks = 0, failures = 0;

  clock_divider dut (.clk(clk), .read(read), .phase(phase), .hm_shift(hm_shift), .tm_shift(tm_shift));

  always #1225 clk = ~clk;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int run = 0; run < 5; run++) begin
      int n;
      @(negedge clk); read = 1'b0; @(negedge clk); @(negedge clk); read = 1'b1;
      n = 20 + run * 7;
      for (int i = 0; i < n; i++) begin
        checks += 3;
        if (phase !== 3'(i % 8))             begin failures++; $display("FAIL phase %0d at %0d", phase, i); end
        if (hm_shift !== ((i % 8) == 7))     begin failures++; $display("FAIL hm_shift at %0d", i); end
        if (tm_shift !== ((i % 2) == 1))     begin failures++; $display("FAIL tm_shift at %0d", i); end
        @(negedge clk);
      end
    end
    read = 1'b0; #10; checks++;
    if (hm_shift || tm_shift) begin failures++; $display("FAIL shifts while Read low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
