// encrypted_mips: five-stage pipelined 32-bit MIPS that executes DES-encrypted
// programs and keeps its data encrypted in memory.
//
// Stages and pipeline registers:
//   IF  (if_stage)  PC, instruction memory, instruction decrypt core, CryptEn MUX
//   ID  (id_stage)  controller, register file, key register, extender, CryptEn
//   EX              ALU, forwarding muxes, branch comparison and target
//   MEM (mem_stage) store encrypt core, data memory, load decrypt core
//   WB  (writeback) result MUX to the register file or the key register
// with IF/ID, ID/EX, EX/MEM and MEM/WB registers between them.
//
// Hazards: the forwarding unit bypasses EX/MEM and MEM/WB results into EX;
// the hazard detection unit inserts one bubble for a load followed by a
// dependent instruction; jumps and CRYPT redirect fetch from ID (one slot
// flushed), taken branches redirect from EX (two slots flushed), with no
// delay slots.  Branch target = PC + 8 + sign-extended immediate (a byte
// displacement); jump target = {PC[31:28], target, 00}.  Every instruction
// occupies one 64-bit block and the PC steps by 8.
//
// Crypto timing: each DES core needs 16 cycles.  While the fetch-side
// decryption or an encrypted load/store is in progress the whole pipeline
// is frozen (`freeze`), so an encrypted instruction costs at least 16 cycles
// and an encrypted memory access 16 more.  Software must leave two
// instructions between the last key load and CRYPT (asserted below), since
// the key register has no bypass.
//
// The stage contents, the three DES cores and the new instructions follow the
// processor description and its published example; the freeze-based crypto
// timing, branch resolution in EX and the program load port are this
// design's choices.  Reset is synchronous and active high.
module encrypted_mips
  import mips_pkg::*;
#(
  parameter int IMEM_BYTES = 1024,
  parameter int DMEM_BYTES = 1024
) (
  input  logic        clk,
  input  logic        rst,
  // program load port (instruction memory), used while rst is high
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [63:0] load_block,
  // observation
  output logic [31:0] dbg_pc,
  output logic        dbg_crypt_en,
  output logic [63:0] dbg_key
);
  ifid_t  ifid;
  idex_t  idex, idex_d;
  exmem_t exmem;
  memwb_t memwb;
  wb_t    wb;

  logic        if_ready, mem_ready, freeze, advance, load_use;
  logic [31:0] if_pc, if_instr;
  logic        id_redirect, id_redirect_eff, commit;
  logic [31:0] id_redirect_pc;
  logic        crypt_en;
  logic [63:0] key;
  fwd_e        fwd_a, fwd_b;
  logic [31:0] op_a, op_b_reg, op_b, alu_y, br_target;
  logic        alu_zero, ex_taken;
  logic [31:0] mem_rdata;

  assign freeze  = !if_ready || !mem_ready;
  assign advance = !freeze;

  // ---------------------------------------------------------------- IF
  if_stage #(.IMEM_BYTES(IMEM_BYTES)) u_if (
    .clk, .rst,
    .stall(freeze || load_use),
    .redirect(advance && (ex_taken || id_redirect_eff)),
    .redirect_pc(ex_taken ? br_target : id_redirect_pc),
    .crypt_en, .key,
    .pc(if_pc), .instr(if_instr), .ready(if_ready),
    .load_we, .load_addr, .load_block
  );

  always_ff @(posedge clk) begin
    if (rst)                                  ifid <= '0;
    else if (advance) begin
      if (ex_taken || id_redirect_eff)        ifid <= '0;
      else if (!load_use)                     ifid <= '{valid: 1'b1, pc: if_pc, instr: if_instr};
    end
  end

  // ---------------------------------------------------------------- ID
  id_stage u_id (
    .clk, .rst, .ifid, .wb, .commit, .idex_d,
    .redirect(id_redirect), .redirect_pc(id_redirect_pc), .crypt_en, .key
  );

  hazard_detection_unit u_hazard (
    .idex_mem_read(idex.valid && idex.ctrl.mem_read), .idex_rt(idex.dest),
    .ifid_rs(idex_d.rs), .ifid_rt(idex_d.rt),
    .uses_rs(idex_d.valid && idex_d.ctrl.uses_rs), .uses_rt(idex_d.valid && idex_d.ctrl.uses_rt),
    .stall(load_use)
  );

  assign id_redirect_eff = id_redirect && !load_use && !ex_taken;
  assign commit          = advance && !load_use && !ex_taken;

  always_ff @(posedge clk) begin
    if (rst)                          idex <= '0;
    else if (advance) begin
      if (ex_taken || load_use)       idex <= '0;
      else                            idex <= idex_d;
    end
  end

  // ---------------------------------------------------------------- EX
  forwarding_unit u_fwd (
    .idex_rs(idex.rs), .idex_rt(idex.rt),
    .exmem_rd(exmem.dest), .exmem_reg_write(exmem.valid && exmem.ctrl.reg_write),
    .memwb_rd(memwb.dest), .memwb_reg_write(wb.reg_we),
    .fwd_a, .fwd_b
  );

  always_comb begin
    unique case (fwd_a)
      FWD_EXMEM: op_a = exmem.alu_y;
      FWD_MEMWB: op_a = wb.data;
      default:   op_a = idex.rs_val;
    endcase
    unique case (fwd_b)
      FWD_EXMEM: op_b_reg = exmem.alu_y;
      FWD_MEMWB: op_b_reg = wb.data;
      default:   op_b_reg = idex.rt_val;
    endcase
    op_b = idex.ctrl.alu_src_imm ? idex.imm_ext : op_b_reg;
  end

  alu u_alu (
    .a(op_a), .b(op_b), .shamt(idex.ctrl.shift_imm ? idex.shamt : 5'd0),
    .op(idex.ctrl.alu_op), .y(alu_y), .zero(alu_zero)
  );

  assign ex_taken  = idex.valid && idex.ctrl.branch && (alu_zero ^ idex.ctrl.branch_ne);
  assign br_target = idex.pc + 32'd8 + idex.imm_ext;

  always_ff @(posedge clk) begin
    if (rst)          exmem <= '0;
    else if (advance) exmem <= '{valid: idex.valid, ctrl: idex.ctrl, crypt: idex.crypt,
                                 alu_y: alu_y, store_val: op_b_reg, dest: idex.dest};
  end

  // ---------------------------------------------------------------- MEM
  mem_stage #(.DMEM_BYTES(DMEM_BYTES)) u_mem (
    .clk, .rst, .exmem, .advance, .key, .rdata(mem_rdata), .ready(mem_ready)
  );

  always_ff @(posedge clk) begin
    if (rst)          memwb <= '0;
    else if (advance) memwb <= '{valid: exmem.valid, ctrl: exmem.ctrl, alu_y: exmem.alu_y,
                                 mem_y: mem_rdata, dest: exmem.dest};
  end

  // ---------------------------------------------------------------- WB
  writeback u_wb (.memwb, .wb);

  assign dbg_pc       = if_pc;
  assign dbg_crypt_en = crypt_en;
  assign dbg_key      = key;

  // Software rule: two instructions between the last key load and CRYPT.
  a_key_settled_before_crypt: assert property (@(posedge clk) disable iff (rst)
    (ifid.valid && idex_d.ctrl.crypt) |->
      !(idex.valid && idex.ctrl.key_load) && !(exmem.valid && exmem.ctrl.key_load));

endmodule
