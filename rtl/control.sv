// control: instruction decoder and main control unit.
//
// Splits the 32-bit instruction into its R/I/J fields and produces the
// control bundle (ctrl_t) that travels down the pipeline: destination
// select, ALU operation and operand source, memory read/write, write-back
// source, branch/jump, and the three processor-specific instructions:
//   LKLW  op 62, rt = 0 : key[31:0]  <= mem[rs + imm] (low word, never decrypted)
//   LKUW  op 62, rt = 1 : key[63:32] <= mem[rs + imm]
//   CRYPT op 63         : CryptEn <= (target != 0)
// These two opcodes and the rt selector were read off the published memory
// image of the example program.  The rest of the supported subset (add,
// addu, sub, subu, and, or, xor, nor, slt, sltu, sll, srl, sra, addi, addiu,
// slti, sltiu, andi, ori, xori, lui, lw, sw, beq, bne, j) is this design's
// choice; any other encoding decodes as a no-operation.  Combinational.
module control
  import mips_pkg::*;
(
  input  logic [31:0] instr,
  output fields_t     fields,
  output ctrl_t       ctrl
);
  always_comb begin
    fields.op     = instr[31:26];
    fields.rs     = instr[25:21];
    fields.rt     = instr[20:16];
    fields.rd     = instr[15:11];
    fields.shamt  = instr[10:6];
    fields.funct  = instr[5:0];
    fields.imm    = instr[15:0];
    fields.target = instr[25:0];
  end

  always_comb begin
    ctrl = CTRL_NOP;
    unique case (fields.op)
      OP_RTYPE: begin
        ctrl.reg_write  = 1'b1;
        ctrl.reg_dst_rd = 1'b1;
        ctrl.uses_rs    = 1'b1;
        ctrl.uses_rt    = 1'b1;
        unique case (fields.funct)
          FN_SLL:          begin ctrl.alu_op = ALU_SLL; ctrl.shift_imm = 1'b1; ctrl.uses_rs = 1'b0; end
          FN_SRL:          begin ctrl.alu_op = ALU_SRL; ctrl.shift_imm = 1'b1; ctrl.uses_rs = 1'b0; end
          FN_SRA:          begin ctrl.alu_op = ALU_SRA; ctrl.shift_imm = 1'b1; ctrl.uses_rs = 1'b0; end
          FN_ADD, FN_ADDU: ctrl.alu_op = ALU_ADD;
          FN_SUB, FN_SUBU: ctrl.alu_op = ALU_SUB;
          FN_AND:          ctrl.alu_op = ALU_AND;
          FN_OR:           ctrl.alu_op = ALU_OR;
          FN_XOR:          ctrl.alu_op = ALU_XOR;
          FN_NOR:          ctrl.alu_op = ALU_NOR;
          FN_SLT:          ctrl.alu_op = ALU_SLT;
          FN_SLTU:         ctrl.alu_op = ALU_SLTU;
          default:         ctrl = CTRL_NOP;
        endcase
      end
      OP_ADDI, OP_ADDIU, OP_SLTI, OP_SLTIU, OP_ANDI, OP_ORI, OP_XORI, OP_LUI: begin
        ctrl.reg_write   = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.uses_rs     = (fields.op != OP_LUI);
        unique case (fields.op)
          OP_SLTI:  ctrl.alu_op = ALU_SLT;
          OP_SLTIU: ctrl.alu_op = ALU_SLTU;
          OP_ANDI:  begin ctrl.alu_op = ALU_AND; ctrl.imm_zext = 1'b1; end
          OP_ORI:   begin ctrl.alu_op = ALU_OR;  ctrl.imm_zext = 1'b1; end
          OP_XORI:  begin ctrl.alu_op = ALU_XOR; ctrl.imm_zext = 1'b1; end
          OP_LUI:   ctrl.alu_op = ALU_LUI;
          default:  ctrl.alu_op = ALU_ADD;
        endcase
      end
      OP_LW: begin
        ctrl.reg_write   = 1'b1;
        ctrl.alu_src_imm = 1'b1;
        ctrl.mem_read    = 1'b1;
        ctrl.mem_to_reg  = 1'b1;
        ctrl.uses_rs     = 1'b1;
      end
      OP_SW: begin
        ctrl.alu_src_imm = 1'b1;
        ctrl.mem_write   = 1'b1;
        ctrl.uses_rs     = 1'b1;
        ctrl.uses_rt     = 1'b1;
      end
      OP_LK: begin
        ctrl.alu_src_imm = 1'b1;
        ctrl.key_load    = 1'b1;
        ctrl.key_upper   = fields.rt[0];
        ctrl.uses_rs     = 1'b1;
      end
      OP_BEQ, OP_BNE: begin
        ctrl.alu_op    = ALU_SUB;
        ctrl.branch    = 1'b1;
        ctrl.branch_ne = (fields.op == OP_BNE);
        ctrl.uses_rs   = 1'b1;
        ctrl.uses_rt   = 1'b1;
      end
      OP_J:     ctrl.jump  = 1'b1;
      OP_CRYPT: ctrl.crypt = 1'b1;
      default:  ctrl = CTRL_NOP;
    endcase
  end
endmodule
