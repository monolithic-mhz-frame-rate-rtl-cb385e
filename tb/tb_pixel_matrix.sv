// tb_pixel_matrix -- 16 x 16 quadrant matrix: random masks written row by
// row, random hits in 1-bit and 2-bit mode; row wired-ORs and the quadrant
// wired-OR follow unmasked hits only, and each row chain delivers its
// pixels' counts, highest column first (Q1 before Q2 in 2-bit mode).
module tb_pixel_matrix;
  timeunit 1ps; timeprecision 1fs;
  localparam int R = 16, C = 16;
  logic clk = 1'b0, shift_en = 1'b0, frame_rst_n = 1'b1, read = 1'b1, set_2bit_n = 1'b1;
  logic [R-1:0][C-1:0] fe_out = '0, mask;
  logic [R-1:0] wl = '0, row_or, row_sout;
  logic [C-1:0] bl = '0, bl_n = '1;
  logic any_hit;
  int checks = 0, failures = 0;

  logic [R-1:0][C-1:0] m_ref;
  int cnt_ref [R][C];

  pixel_matrix #(.ROWS(R), .COLS(C)) dut (.*);

  always #1225 clk = ~clk;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic frame_reset();
    frame_rst_n = 1'b0; #100; frame_rst_n = 1'b1; #100;
    foreach (cnt_ref[r, c]) cnt_ref[r][c] = 0;
  endtask

  // hit pixel (r, c) n times; check the wired-ORs during the first pulse
  task automatic hit(input int r, input int c, input int n, input logic two_bit);
    for (int k = 0; k < n; k++) begin
      fe_out[r][c] = 1'b1; #200;
      if (k == 0) begin
        checks += 2;
        if (row_or[r] !== !m_ref[r][c]) begin failures++; $display("FAIL row_or[%0d] for pixel %0d/%0d", r, r, c); end
        if (any_hit !== !m_ref[r][c])   begin failures++; $display("FAIL any_hit for pixel %0d/%0d", r, c); end
      end
      fe_out[r][c] = 1'b0; #200;
      if (!m_ref[r][c]) cnt_ref[r][c] = two_bit ? ((cnt_ref[r][c] == 3) ? 3 : cnt_ref[r][c] + 1) : 1;
    end
  endtask

  task automatic read_out(input logic two_bit);
    int nb;
    logic exp;
    nb = two_bit ? 2 : 1;
    @(negedge clk); read = 1'b0; @(negedge clk); @(negedge clk); read = 1'b1;
    for (int k = 0; k < C * nb; k++) begin
      for (int r = 0; r < R; r++) begin
        exp = 1'((cnt_ref[r][C - 1 - k / nb] >> (k % nb)) & 1);
        checks++;
        if (row_sout[r] !== exp) begin failures++; $display("FAIL row %0d bit %0d got %0b", r, k, row_sout[r]); end
      end
      shift_en = 1'b1; @(negedge clk); shift_en = 1'b0;
    end
  endtask

  initial begin
    #1000;
    for (int r = 0; r < R; r++) begin
      m_ref[r] = C'($urandom) & C'($urandom) & C'($urandom);   // about 1 in 8 masked
      bl = m_ref[r]; bl_n = ~m_ref[r]; wl[r] = 1'b1; #100; wl[r] = 1'b0; #100;
    end
    bl = '0; bl_n = '1;
    checks++; if (mask !== m_ref) begin failures++; $display("FAIL mask readback"); end
    // 1-bit mode frames
    for (int f = 0; f < 4; f++) begin
      frame_reset();
      for (int h = 0; h < 40; h++) hit($urandom % R, $urandom % C, 1 + $urandom % 2, 1'b0);
      #100; checks++; if (any_hit !== 1'b0) begin failures++; $display("FAIL any_hit idle"); end
      read_out(1'b0);
    end
    // 2-bit mode frames
    set_2bit_n = 1'b0;
    for (int f = 0; f < 3; f++) begin
      frame_reset();
      for (int h = 0; h < 40; h++) hit($urandom % R, $urandom % C, 1 + $urandom % 4, 1'b1);
      read_out(1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
