// tb_id_stage: decode stage checks.  Register and key writes through the
// write-back port, operand read with write-through, immediate sign and zero
// extension, destination selection, the jump and CRYPT redirects with their
// targets, CryptEn set by CRYPT 1 only when `commit` is high and cleared by
// CRYPT 0, and the CryptEn tag attached to decoded instructions.
module tb_id_stage;
  import mips_pkg::*;
  logic clk = 1'b0, rst, commit, redirect, crypt_en;
  ifid_t ifid;
  wb_t wb;
  idex_t idex_d;
  logic [31:0] redirect_pc;
  logic [63:0] key;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  id_stage dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [4:0] r, input logic [31:0] d, input logic lo, input logic hi);
    @(negedge clk);
    wb = '{reg_we: (r != 0), reg_wa: r, data: d, key_we_lo: lo, key_we_hi: hi};
    @(negedge clk);
    wb = '0;
  endtask

  initial begin
    rst = 1; commit = 0; ifid = '0; wb = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    check(!crypt_en && key == 0, "reset state");
    wr(5'd2, 32'h0000_0007, 0, 0);
    wr(5'd3, 32'hffff_fff0, 0, 0);
    wr(5'd0, 32'h5450414c, 1, 0);
    wr(5'd0, 32'h4b495241, 0, 1);
    check(key == 64'h4b4952415450414c, $sformatf("key %h", key));
    // add $5,$2,$3
    ifid = '{valid: 1, pc: 32'd88, instr: 32'h00432820};
    #1 check(idex_d.rs_val == 7 && idex_d.rt_val == 32'hffff_fff0 && idex_d.dest == 5 &&
             idex_d.ctrl.reg_write && !redirect, "add decode");
    // Write-through: $2 written by write-back in the same cycle.
    wb = '{reg_we: 1, reg_wa: 2, data: 32'h1234, key_we_lo: 0, key_we_hi: 0};
    #1 check(idex_d.rs_val == 32'h1234, "write-through");
    @(negedge clk) wb = '0;
    // addi $1,$0,-8 : sign extension, destination rt
    ifid.instr = 32'h2001fff8;
    #1 check(idex_d.imm_ext == 32'hffff_fff8 && idex_d.dest == 1, "addi sign extension");
    // ori $1,$0,0xfff8 : zero extension
    ifid.instr = 32'h3401fff8;
    #1 check(idex_d.imm_ext == 32'h0000_fff8, "ori zero extension");
    // sw writes nothing
    ifid.instr = 32'hac040038;
    #1 check(idex_d.dest == 0 && idex_d.ctrl.mem_write, "sw decode");
    // bubble
    ifid.valid = 0;
    #1 check(idex_d.ctrl == CTRL_NOP && idex_d.dest == 0, "bubble");
    // j 22 at 160
    ifid = '{valid: 1, pc: 32'd160, instr: 32'h08000016};
    #1 check(redirect && redirect_pc == 32'd88, $sformatf("jump target %0d", redirect_pc));
    // crypt 1 at 48, not committed yet
    ifid = '{valid: 1, pc: 32'd48, instr: 32'hfc000001};
    #1 check(redirect && redirect_pc == 32'd56, "crypt redirect");
    @(negedge clk);
    check(!crypt_en, "CryptEn set without commit");
    commit = 1;
    @(negedge clk) commit = 0;
    check(crypt_en, "CryptEn not set by CRYPT 1");
    ifid.instr = 32'h00432820;
    #1 check(idex_d.crypt, "CryptEn tag missing");
    ifid.instr = 32'hfc000000;
    commit = 1;
    @(negedge clk) commit = 0;
    check(!crypt_en, "CryptEn not cleared by CRYPT 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
