// id_stage: instruction decode stage.
//
// Contains the decoder/controller, the register file, the 64-bit key
// register, the immediate extender and the CryptEn flag.  From the IF/ID
// register it forms the next ID/EX contents (`idex_d`): control bundle,
// register operands, extended immediate, destination register and the
// CryptEn value the instruction was decoded under, which later selects
// plain or encrypted memory access for that instruction.  The write-back
// request (`wb`) writes the register file or one half of the key register.
//
// Jumps and CRYPT are resolved here: `redirect` is high for a valid j
// (target {pc[31:28], target, 00}) or CRYPT (target pc + 8, so the next block
// is fetched again under the new mode).  CryptEn takes the CRYPT operand's
// truth value on the clock edge where `commit` is high, i.e. when the CRYPT
// instruction actually leaves decode (not stalled, not flushed).  There is no
// branch delay slot.  The immediate is sign-extended except for andi, ori and
// xori.  Reset clears the registers, the key and CryptEn.
module id_stage
  import mips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  ifid_t       ifid,
  input  wb_t         wb,
  input  logic        commit,       // the decode-stage instruction moves to EX
  output idex_t       idex_d,
  output logic        redirect,
  output logic [31:0] redirect_pc,
  output logic        crypt_en,
  output logic [63:0] key
);
  fields_t     f;
  ctrl_t       c;
  logic [31:0] rs_val, rt_val;
  logic [31:0] pc_next;

  control u_control (.instr(ifid.instr), .fields(f), .ctrl(c));

  register_file #(.NREGS(32), .WIDTH(32)) u_regfile (
    .clk, .rst, .ra1(f.rs), .ra2(f.rt), .rd1(rs_val), .rd2(rt_val),
    .we(wb.reg_we), .wa(wb.reg_wa), .wd(wb.data)
  );

  key_register u_key (
    .clk, .rst, .we_lo(wb.key_we_lo), .we_hi(wb.key_we_hi), .wd(wb.data), .key
  );

  assign pc_next = ifid.pc + 32'd8;

  always_comb begin
    idex_d.valid   = ifid.valid;
    idex_d.ctrl    = ifid.valid ? c : CTRL_NOP;
    idex_d.crypt   = crypt_en;
    idex_d.pc      = ifid.pc;
    idex_d.rs_val  = rs_val;
    idex_d.rt_val  = rt_val;
    idex_d.imm_ext = c.imm_zext ? {16'd0, f.imm} : {{16{f.imm[15]}}, f.imm};
    idex_d.rs      = f.rs;
    idex_d.rt      = f.rt;
    idex_d.dest    = (ifid.valid && c.reg_write) ? (c.reg_dst_rd ? f.rd : f.rt) : 5'd0;
    idex_d.shamt   = f.shamt;
  end

  assign redirect    = ifid.valid && (c.jump || c.crypt);
  assign redirect_pc = c.jump ? {pc_next[31:28], f.target, 2'b00} : pc_next;

  always_ff @(posedge clk) begin
    if (rst)                                 crypt_en <= 1'b0;
    else if (commit && ifid.valid && c.crypt) crypt_en <= (f.target != 26'd0);
  end
endmodule
