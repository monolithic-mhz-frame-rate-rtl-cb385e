// tb_init_register -- 45-bit words shifted in on SCL/SDA (MSB first) appear
// on cfg only after the 45th bit, field by field; GL_RST clears everything.
module tb_init_register;
  timeunit 1ps; timeprecision 1fs;
  import dsipm_pkg::*;
  logic scl = 1'b0, sda = 1'b0, gl_rst = 1'b0;
  init_cfg_t cfg;
  int checks = 0, failures = 0;

  init_register dut (.scl(scl), .sda(sda), .gl_rst(gl_rst), .cfg(cfg));

  task automatic send(input logic [INIT_BITS-1:0] w, input logic check_hold);
    init_cfg_t cfg_before;
    cfg_before = cfg;
    for (int i = INIT_BITS - 1; i >= 0; i--) begin
      sda = w[i]; #500; scl = 1'b1; #500; scl = 1'b0;
      if (check_hold && i == 1) begin
        checks++;
        if (cfg !== cfg_before) begin failures++; $display("FAIL cfg changed cfg_before the last bit"); end
      end
    end
  endtask

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [INIT_BITS-1:0] w;
    init_cfg_t e;
    #100; gl_rst = 1'b1; #100; gl_rst = 1'b0; #100;
    checks++; if (cfg !== '0) begin failures++; $display("FAIL reset"); end
    for (int n = 0; n < 30; n++) begin
      w = {13'($urandom), 32'($urandom)};
      send(w, 1'b1);
      e = init_cfg_t'(w);
      checks += 6;
      if (cfg.tdc_cntr   !== e.tdc_cntr)   begin failures++; $display("FAIL tdc_cntr"); end
      if (cfg.valid_cntr !== e.valid_cntr) begin failures++; $display("FAIL valid_cntr"); end
      if (cfg.set_2bit   !== w[38])        begin failures++; $display("FAIL set_2bit"); end
      if (cfg.wl_en      !== w[37])        begin failures++; $display("FAIL wl_en"); end
      if (cfg.addr       !== w[36:32])     begin failures++; $display("FAIL addr"); end
      if (cfg.bl         !== w[31:0])      begin failures++; $display("FAIL bl"); end
    end
    // reset in the middle of a word, then a full word
    for (int i = 0; i < 10; i++) begin sda = 1'b1; #500; scl = 1'b1; #500; scl = 1'b0; end
    gl_rst = 1'b1; #100; gl_rst = 1'b0;
    checks++; if (cfg !== '0) begin failures++; $display("FAIL reset mid-word"); end
    w = {13'h1ABC, 32'hDEADBEEF}; send(w, 1'b0);
    checks++; if (cfg !== init_cfg_t'(w)) begin failures++; $display("FAIL word after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
