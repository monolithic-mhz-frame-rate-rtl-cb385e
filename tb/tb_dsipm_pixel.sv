// tb_dsipm_pixel -- checks one pixel's digital part: SRAM mask write and
// hold, masking of hits, 1-bit hit buffer, 2-bit saturating counter, Read
// gating of counting, Frame_rst clear, serializer load and shift in both
// modes, and the wired-OR output.
module tb_dsipm_pixel;
  timeunit 1ps; timeprecision 1fs;
  logic clk = 1'b0, shift_en = 1'b0, fe_out = 1'b0, frame_rst_n = 1'b0, read = 1'b1;
  logic set_2bit_n = 1'b1, wl = 1'b0, bl = 1'b0, bl_n = 1'b1, data_in = 1'b0;
  logic mask, wired_or, data_out;
  int checks = 0, failures = 0;

  dsipm_pixel dut (.*);

  always #1225 clk = ~clk;

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0b exp %0b at %0t", what, got, exp, $realtime); end
  endtask

  task automatic write_mask(input logic m);
    bl = m; bl_n = ~m; wl = 1'b1; #100; wl = 1'b0; bl = ~m; bl_n = m; #100;
  endtask

  task automatic pulse(input int n);
    repeat (n) begin fe_out = 1'b1; #500; fe_out = 1'b0; #500; end
  endtask

  // close window, load, return the two serializer bits after shifts
  task automatic load_and_shift(input int nbits, output logic [1:0] got);
    @(negedge clk); read = 1'b0;
    @(negedge clk); @(negedge clk); read = 1'b1;
    got[0] = data_out;
    if (nbits > 1) begin
      data_in = 1'b0; shift_en = 1'b1; @(negedge clk); shift_en = 1'b0;
      got[1] = data_out;
    end else got[1] = 1'b0;
  endtask

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [1:0] got;
    #3000;
    write_mask(1'b0); chk(mask, 1'b0, "mask written 0");
    write_mask(1'b1); chk(mask, 1'b1, "mask written 1");
    bl = 1'b0; bl_n = 1'b1; #100; chk(mask, 1'b1, "mask holds without WL");
    // masked: no wired-OR, no count
    frame_rst_n = 1'b1; #100;
    fe_out = 1'b1; #100; chk(wired_or, 1'b0, "masked pixel drives no wired-OR"); fe_out = 1'b0; #100;
    load_and_shift(1, got); chk(got[0], 1'b0, "masked pixel counted nothing");
    write_mask(1'b0);
    // 1-bit mode
    frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1; #100;
    fe_out = 1'b1; #100; chk(wired_or, 1'b1, "wired-OR follows hit"); fe_out = 1'b0; #500;
    pulse(2);
    load_and_shift(1, got); chk(got[0], 1'b1, "1-bit mode hit flag");
    // 1-bit mode serial pass-through: data_in appears after one shift
    data_in = 1'b1; shift_en = 1'b1; @(negedge clk); shift_en = 1'b0; data_in = 1'b0;
    chk(data_out, 1'b1, "1-bit chain shifts data_in");
    // no hit
    frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1; #100;
    load_and_shift(1, got); chk(got[0], 1'b0, "1-bit mode no hit");
    // 2-bit mode, counts 0..3 and saturation
    set_2bit_n = 1'b0;
    for (int n = 0; n <= 5; n++) begin
      frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1; #100;
      pulse(n);
      load_and_shift(2, got);
      chk(got[0], 1'(((n > 3) ? 3 : n) & 1), "2-bit Q1");
      chk(got[1], 1'(((n > 3) ? 3 : n) >> 1), "2-bit Q2");
    end
    // counting stops when Read is low
    frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1; #100;
    pulse(1);
    read = 1'b0; pulse(1); #100;
    @(negedge clk); @(negedge clk); read = 1'b1;
    chk(data_out, 1'b1, "count 1 (Q1)");
    data_in = 1'b0; shift_en = 1'b1; @(negedge clk); shift_en = 1'b0;
    chk(data_out, 1'b0, "hit while Read low not counted (Q2)");
    // 2-bit chain: data_in appears after two shifts
    data_in = 1'b1; shift_en = 1'b1; @(negedge clk); data_in = 1'b0;
    chk(data_out, 1'b0, "2-bit chain: not after one shift");
    @(negedge clk); shift_en = 1'b0;
    chk(data_out, 1'b1, "2-bit chain: after two shifts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
