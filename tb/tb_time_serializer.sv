// tb_time_serializer -- loads while Read is low, sends the 53-bit word MSB
// first one bit per shift enable, then zeros; the word presented after the
// load does not disturb the transfer.
module tb_time_serializer;
  timeunit 1ps; timeprecision 1fs;
  localparam int W = 53;
  logic clk = 1'b0, read = 1'b1, shift_en = 1'b0, sout;
  logic [W-1:0] word, sent;
  int checks = 0, failures = 0;

  time_serializer #(.WORD_BITS(W)) dut (.clk(clk), .read(read), .shift_en(shift_en), .word(word), .sout(sout));

  always #1225 clk = ~clk;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 20; n++) begin
      word = {21'($urandom), 32'($urandom)}; sent = word;
      @(negedge clk); read = 1'b0; @(negedge clk); @(negedge clk); read = 1'b1;
      word = ~word;
      for (int i = W - 1; i >= 0; i--) begin
        checks++;
        if (sout !== sent[i]) begin failures++; $display("FAIL word %0d bit %0d", n, i); end
        shift_en = 1'b1; @(negedge clk); shift_en = 1'b0; @(negedge clk);
      end
      repeat (5) begin
        checks++;
        if (sout !== 1'b0) begin failures++; $display("FAIL zero fill"); end
        shift_en = 1'b1; @(negedge clk); shift_en = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
