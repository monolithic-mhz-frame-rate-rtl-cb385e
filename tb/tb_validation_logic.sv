// tb_validation_logic -- random row patterns under all 16 AND/OR settings,
// compared with a recursive reference of the tree, plus the two extremes
// (all OR accepts a single row, all AND needs every row).
module tb_validation_logic;
  timeunit 1ps; timeprecision 1fs;
  logic [15:0] r;
  logic [3:0]  valid_cntr;
  logic        valid;
  int checks = 0, failures = 0;

  validation_logic dut (.r(r), .valid_cntr(valid_cntr), .valid(valid));

  // reference: value of the gate at level lvl covering rows [lo, lo + 2^lvl)
  function automatic logic ref_node(input logic [15:0] rows, input logic [3:0] cntr,
                                    input int lvl, input int lo);
    logic a, b;
    if (lvl == 0) return rows[lo];
    a = ref_node(rows, cntr, lvl - 1, lo);
    b = ref_node(rows, cntr, lvl - 1, lo + (1 << (lvl - 1)));
    return cntr[lvl-1] ? (a & b) : (a | b);
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) begin
      for (int k = 0; k < 200; k++) begin
        valid_cntr = 4'(c);
        case (k % 4)
          0: r = 16'($urandom);
          1: r = 16'(1 << ($urandom % 16));
          2: r = 16'(3 << (2 * ($urandom % 8)));
          default: r = ~16'(1 << ($urandom % 16));
        endcase
        #10; checks++;
        if (valid !== ref_node(r, valid_cntr, 4, 0)) begin
          failures++; $display("FAIL cntr=%b r=%h valid=%0b", valid_cntr, r, valid);
        end
      end
    end
    valid_cntr = 4'b0000; r = 16'h0100; #10; checks++;
    if (valid !== 1'b1) begin failures++; $display("FAIL all-OR single row"); end
    valid_cntr = 4'b1111; r = 16'hFFFE; #10; checks++;
    if (valid !== 1'b0) begin failures++; $display("FAIL all-AND missing row"); end
    r = 16'hFFFF; #10; checks++;
    if (valid !== 1'b1) begin failures++; $display("FAIL all-AND all rows"); end
    // first level AND, rest OR: neighbouring pair fires
    valid_cntr = 4'b0001; r = 16'h0030; #10; checks++;
    if (valid !== 1'b1) begin failures++; $display("FAIL pair 5/4"); end
    r = 16'h0018; #10; checks++;
    if (valid !== 1'b0) begin failures++; $display("FAIL rows 4/3 are not a pair"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
