// tb_time_mux -- random bits of four quadrant streams must leave on both
// clock halves in the order q0, q1, q2, q3 per bit, one system clock after
// they are presented.
module tb_time_mux;
  timeunit 1ps; timeprecision 1fs;
  localparam realtime T = 2451.0;
  logic clk = 1'b0, phase = 1'b0, sdo;
  logic [3:0] q_sin = '0;
  int checks = 0, failures = 0;

  time_mux dut (.clk(clk), .phase(phase), .q_sin(q_sin), .sdo(sdo));

  always #(T / 2) clk = ~clk;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [3:0] bits;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      bits = 4'($urandom);
      for (int p = 0; p < 2; p++) begin
        phase = p[0]; q_sin = bits;
        @(posedge clk); #(T / 4);
        checks++; if (sdo !== bits[2*p])   begin failures++; $display("FAIL bit %0d q%0d", n, 2*p); end
        #(T / 2);
        checks++; if (sdo !== bits[2*p+1]) begin failures++; $display("FAIL bit %0d q%0d", n, 2*p+1); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
