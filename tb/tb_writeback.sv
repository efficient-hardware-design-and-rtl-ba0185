// tb_writeback: the write-back MUX for an ALU instruction, a load, a key
// load of each half, a store, a bubble and a write to $0.
module tb_writeback;
  import mips_pkg::*;
  memwb_t memwb;
  wb_t    wb;
  int checks = 0, failures = 0;

  writeback dut (.*);

  task automatic try(input string name, input ctrl_t c, input logic v, input logic [4:0] d,
                     input logic we, input logic [31:0] data, input logic klo, input logic khi);
    memwb = '{valid: v, ctrl: c, alu_y: 32'h1111_2222, mem_y: 32'h3333_4444, dest: d};
    #1;
    checks++;
    if (wb.reg_we !== we || (we && (wb.data !== data || wb.reg_wa !== d)) ||
        wb.key_we_lo !== klo || wb.key_we_hi !== khi || ((klo || khi) && wb.data !== data)) begin
      failures++;
      $display("FAIL: %s -> we=%b data=%h klo=%b khi=%b", name, wb.reg_we, wb.data, wb.key_we_lo, wb.key_we_hi);
    end
  endtask

  initial begin
    ctrl_t c;
    c = CTRL_NOP; c.reg_write = 1;                     try("alu", c, 1, 5'd3, 1, 32'h1111_2222, 0, 0);
    c = CTRL_NOP; c.reg_write = 1; c.mem_to_reg = 1;   try("lw", c, 1, 5'd6, 1, 32'h3333_4444, 0, 0);
    c = CTRL_NOP; c.key_load = 1;                      try("lklw", c, 1, 5'd0, 0, 32'h3333_4444, 1, 0);
    c = CTRL_NOP; c.key_load = 1; c.key_upper = 1;     try("lkuw", c, 1, 5'd0, 0, 32'h3333_4444, 0, 1);
    c = CTRL_NOP; c.mem_write = 1;                     try("sw", c, 1, 5'd0, 0, 32'h0, 0, 0);
    c = CTRL_NOP; c.reg_write = 1;                     try("bubble", c, 0, 5'd3, 0, 32'h0, 0, 0);
    c = CTRL_NOP; c.reg_write = 1;                     try("r0", c, 1, 5'd0, 0, 32'h0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
