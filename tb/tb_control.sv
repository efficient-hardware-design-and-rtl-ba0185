// tb_control: decodes every instruction of the example program (hand
// encodings taken from its memory image) plus the remaining supported
// R-type, immediate and branch forms, and an unknown opcode, and compares the
// fields and control bits with expected values written out by hand.
module tb_control;
  import mips_pkg::*;
  logic [31:0] instr;
  fields_t     fields;
  ctrl_t       ctrl;
  int checks = 0, failures = 0;

  control dut (.*);

  // Expected: reg_write, reg_dst_rd, alu_src_imm, alu_op, mem_read, mem_write,
  // key_load, key_upper, branch, branch_ne, jump, crypt.
  task automatic try(input string name, input logic [31:0] w, input logic rw, input logic rd,
                     input logic imm, input alu_op_e op, input logic mr, input logic mw,
                     input logic kl, input logic ku, input logic br, input logic bne,
                     input logic j, input logic cr);
    instr = w;
    #1;
    checks++;
    if (ctrl.reg_write !== rw || ctrl.reg_dst_rd !== rd || ctrl.alu_src_imm !== imm ||
        ((rw || br) && ctrl.alu_op !== op) || ctrl.mem_read !== mr || ctrl.mem_write !== mw ||
        ctrl.key_load !== kl || ctrl.key_upper !== ku || ctrl.branch !== br ||
        ctrl.branch_ne !== bne || ctrl.jump !== j || ctrl.crypt !== cr ||
        ctrl.mem_to_reg !== mr) begin
      failures++;
      $display("FAIL: %s (%h) ctrl=%p", name, w, ctrl);
    end
  endtask

  initial begin
    //   name            word          rw rd im op        mr mw kl ku br bn j  cr
    try("addi $1,$0,104", 32'h20010068, 1, 0, 1, ALU_ADD,  0, 0, 0, 0, 0, 0, 0, 0);
    check_fields(6'd8, 5'd0, 5'd1, 16'd104);
    try("lklw 0($1)",     32'hf8200000, 0, 0, 1, ALU_ADD,  0, 0, 1, 0, 0, 0, 0, 0);
    try("lkuw 0($1)",     32'hf8210000, 0, 0, 1, ALU_ADD,  0, 0, 1, 1, 0, 0, 0, 0);
    try("nop",            32'h00000000, 1, 1, 0, ALU_SLL,  0, 0, 0, 0, 0, 0, 0, 0);
    try("crypt 1",        32'hfc000001, 0, 0, 0, ALU_ADD,  0, 0, 0, 0, 0, 0, 0, 1);
    checks++; if (fields.target != 26'd1) begin failures++; $display("FAIL: crypt target"); end
    try("add $2,$0,$0",   32'h00001020, 1, 1, 0, ALU_ADD,  0, 0, 0, 0, 0, 0, 0, 0);
    try("add $5,$2,$2",   32'h00422820, 1, 1, 0, ALU_ADD,  0, 0, 0, 0, 0, 0, 0, 0);
    check_rfields(5'd2, 5'd2, 5'd5);
    try("lw $6,0($5)",    32'h8ca60000, 1, 0, 1, ALU_ADD,  1, 0, 0, 0, 0, 0, 0, 0);
    try("slt $7,$2,$1",   32'h0041382a, 1, 1, 0, ALU_SLT,  0, 0, 0, 0, 0, 0, 0, 0);
    try("beq $7,$0,8",    32'h10e00008, 0, 0, 0, ALU_SUB,  0, 0, 0, 0, 1, 0, 0, 0);
    try("j 22",           32'h08000016, 0, 0, 0, ALU_ADD,  0, 0, 0, 0, 0, 0, 1, 0);
    checks++; if (fields.target != 26'd22) begin failures++; $display("FAIL: j target"); end
    try("sw $4,56($0)",   32'hac040038, 0, 0, 1, ALU_ADD,  0, 1, 0, 0, 0, 0, 0, 0);
    try("sub",            32'h00221822, 1, 1, 0, ALU_SUB,  0, 0, 0, 0, 0, 0, 0, 0);
    try("and",            32'h00221824, 1, 1, 0, ALU_AND,  0, 0, 0, 0, 0, 0, 0, 0);
    try("or",             32'h00221825, 1, 1, 0, ALU_OR,   0, 0, 0, 0, 0, 0, 0, 0);
    try("xor",            32'h00221826, 1, 1, 0, ALU_XOR,  0, 0, 0, 0, 0, 0, 0, 0);
    try("nor",            32'h00221827, 1, 1, 0, ALU_NOR,  0, 0, 0, 0, 0, 0, 0, 0);
    try("sltu",           32'h0022182b, 1, 1, 0, ALU_SLTU, 0, 0, 0, 0, 0, 0, 0, 0);
    try("srl",            32'h00021902, 1, 1, 0, ALU_SRL,  0, 0, 0, 0, 0, 0, 0, 0);
    try("sra",            32'h00021903, 1, 1, 0, ALU_SRA,  0, 0, 0, 0, 0, 0, 0, 0);
    try("andi",           32'h3022ffff, 1, 0, 1, ALU_AND,  0, 0, 0, 0, 0, 0, 0, 0);
    checks++; if (!ctrl.imm_zext) begin failures++; $display("FAIL: andi zext"); end
    try("ori",            32'h3422ffff, 1, 0, 1, ALU_OR,   0, 0, 0, 0, 0, 0, 0, 0);
    try("slti",           32'h2822ffff, 1, 0, 1, ALU_SLT,  0, 0, 0, 0, 0, 0, 0, 0);
    try("lui",            32'h3c021234, 1, 0, 1, ALU_LUI,  0, 0, 0, 0, 0, 0, 0, 0);
    try("bne",            32'h14220003, 0, 0, 0, ALU_SUB,  0, 0, 0, 0, 1, 1, 0, 0);
    try("unknown op 20",  32'h50221234, 0, 0, 0, ALU_ADD,  0, 0, 0, 0, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_fields(input logic [5:0] op, input logic [4:0] rs, input logic [4:0] rt,
                              input logic [15:0] imm);
    checks++;
    if (fields.op != op || fields.rs != rs || fields.rt != rt || fields.imm != imm) begin
      failures++; $display("FAIL: I fields %p", fields);
    end
  endtask

  task automatic check_rfields(input logic [4:0] rs, input logic [4:0] rt, input logic [4:0] rd);
    checks++;
    if (fields.rs != rs || fields.rt != rt || fields.rd != rd || fields.funct != 6'd32) begin
      failures++; $display("FAIL: R fields %p", fields);
    end
  endtask

  initial begin
    #10000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
