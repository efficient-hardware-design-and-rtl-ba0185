// mips_pkg: types and constants shared by the encrypted MIPS pipeline.
//
// Holds the opcode and function-code map, the ALU operation enum, the
// control bundle produced by the decoder and the contents of the four
// pipeline registers (IF/ID, ID/EX, EX/MEM, MEM/WB).  The standard MIPS
// encodings follow the usual R/I/J formats (op[31:26], rs[25:21], rt[20:16],
// rd[15:11], shamt[10:6], funct[5:0], imm[15:0], target[25:0]).  The two
// processor-specific opcodes are taken from the published memory image of the
// example program: opcode 62 is the key load (LKLW when rt = 0, LKUW when
// rt = 1) and opcode 63 is CRYPT, whose 26-bit field is the enable flag.
package mips_pkg;

  localparam int XLEN = 32;

  // Main opcodes (instr[31:26]).
  localparam logic [5:0] OP_RTYPE = 6'd0;
  localparam logic [5:0] OP_J     = 6'd2;
  localparam logic [5:0] OP_BEQ   = 6'd4;
  localparam logic [5:0] OP_BNE   = 6'd5;
  localparam logic [5:0] OP_ADDI  = 6'd8;
  localparam logic [5:0] OP_ADDIU = 6'd9;
  localparam logic [5:0] OP_SLTI  = 6'd10;
  localparam logic [5:0] OP_SLTIU = 6'd11;
  localparam logic [5:0] OP_ANDI  = 6'd12;
  localparam logic [5:0] OP_ORI   = 6'd13;
  localparam logic [5:0] OP_XORI  = 6'd14;
  localparam logic [5:0] OP_LUI   = 6'd15;
  localparam logic [5:0] OP_LW    = 6'd35;
  localparam logic [5:0] OP_SW    = 6'd43;
  localparam logic [5:0] OP_LK    = 6'd62;  // LKLW (rt=0) / LKUW (rt=1)
  localparam logic [5:0] OP_CRYPT = 6'd63;  // CRYPT <flag>

  // R-type function codes (instr[5:0]).
  localparam logic [5:0] FN_SLL  = 6'd0;
  localparam logic [5:0] FN_SRL  = 6'd2;
  localparam logic [5:0] FN_SRA  = 6'd3;
  localparam logic [5:0] FN_ADD  = 6'd32;
  localparam logic [5:0] FN_ADDU = 6'd33;
  localparam logic [5:0] FN_SUB  = 6'd34;
  localparam logic [5:0] FN_SUBU = 6'd35;
  localparam logic [5:0] FN_AND  = 6'd36;
  localparam logic [5:0] FN_OR   = 6'd37;
  localparam logic [5:0] FN_XOR  = 6'd38;
  localparam logic [5:0] FN_NOR  = 6'd39;
  localparam logic [5:0] FN_SLT  = 6'd42;
  localparam logic [5:0] FN_SLTU = 6'd43;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR,
    ALU_SLT, ALU_SLTU, ALU_SLL, ALU_SRL, ALU_SRA, ALU_LUI
  } alu_op_e;

  // Operand source chosen by the forwarding unit.
  typedef enum logic [1:0] {
    FWD_NONE  = 2'd0,  // value read in ID
    FWD_EXMEM = 2'd1,  // ALU result of the instruction one ahead
    FWD_MEMWB = 2'd2   // write-back value of the instruction two ahead
  } fwd_e;

  // Instruction fields (R, I and J formats overlaid).
  typedef struct packed {
    logic [5:0]  op;
    logic [4:0]  rs;
    logic [4:0]  rt;
    logic [4:0]  rd;
    logic [4:0]  shamt;
    logic [5:0]  funct;
    logic [15:0] imm;
    logic [25:0] target;
  } fields_t;

  // Control bundle produced by the decoder.
  typedef struct packed {
    logic    reg_write;   // writes rt or rd
    logic    reg_dst_rd;  // destination is rd (R-type), else rt
    logic    alu_src_imm; // operand B is the extended immediate
    logic    imm_zext;    // zero-extend the immediate (andi/ori/xori)
    logic    shift_imm;   // shift amount from shamt
    alu_op_e alu_op;
    logic    mem_read;    // lw
    logic    mem_write;   // sw
    logic    mem_to_reg;  // write-back takes the load data
    logic    key_load;    // lklw / lkuw
    logic    key_upper;   // lkuw
    logic    branch;      // beq / bne
    logic    branch_ne;   // bne
    logic    jump;        // j
    logic    crypt;       // CRYPT
    logic    uses_rs;
    logic    uses_rt;
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '{alu_op: ALU_ADD, default: 1'b0};

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    logic [31:0] instr;
  } ifid_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic        crypt;     // CryptEn the instruction was decoded under
    logic [31:0] pc;
    logic [31:0] rs_val;
    logic [31:0] rt_val;
    logic [31:0] imm_ext;
    logic [4:0]  rs;
    logic [4:0]  rt;
    logic [4:0]  dest;      // rd or rt, 0 when nothing is written
    logic [4:0]  shamt;
  } idex_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic        crypt;
    logic [31:0] alu_y;     // result or memory address
    logic [31:0] store_val; // forwarded rt
    logic [4:0]  dest;
  } exmem_t;

  typedef struct packed {
    logic        valid;
    ctrl_t       ctrl;
    logic [31:0] alu_y;
    logic [31:0] mem_y;
    logic [4:0]  dest;
  } memwb_t;

  // Write-back request to the register file and the key register.
  typedef struct packed {
    logic        reg_we;
    logic [4:0]  reg_wa;
    logic [31:0] data;
    logic        key_we_lo;
    logic        key_we_hi;
  } wb_t;

endpackage
