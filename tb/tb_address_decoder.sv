// tb_address_decoder -- every address gives exactly its word line; no word
// line without enable.
module tb_address_decoder;
  timeunit 1ps; timeprecision 1fs;
  logic en;
  logic [4:0] addr;
  logic [31:0] wl;
  int checks = 0, failures = 0;

  address_decoder dut (.en(en), .addr(addr), .wl(wl));

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int a = 0; a < 32; a++) begin
        en = e[0]; addr = 5'(a); #10; checks++;
        if (wl !== (e ? (32'd1 << a) : 32'd0)) begin failures++; $display("FAIL en=%0d a=%0d wl=%h", e, a, wl); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
