// tb_hitmap_mux -- random bits of 16 row streams must leave on both clock
// halves in row order 0..15, two rows per system clock, eight clocks per
// round, one clock after they are presented.
module tb_hitmap_mux;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime T = 2451.0;
  logic clk = 1'b0, sdo;
  logic [2:0] phase = '0;
  logic [15:0] row_sin = '0;
  int checks = 0, failures = 0;

  hitmap_mux dut (.clk(clk), .phase(phase), .row_sin(row_sin), .sdo(sdo));

  always #(T / 2) clk = ~clk;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] bits;
    @(negedge clk);
    for (int n = 0; n < 100; n++) begin
      bits = 16'($urandom);
      for (int p = 0; p < 8; p++) begin
        phase = 3'(p); row_sin = bits;
        @(posedge clk); #(T / 4);
        checks++; if (sdo !== bits[2*p])   begin failures++; $display("FAIL round %0d row %0d", n, 2*p); end
        #(T / 2);
        checks++; if (sdo !== bits[2*p+1]) begin failures++; $display("FAIL round %0d row %0d", n, 2*p+1); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
