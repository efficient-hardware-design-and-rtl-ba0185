// tb_random_program: differential test of the pipeline in both modes.
//
// Random programs of 110 instructions each are generated in the
// testbench: twelve run in plain mode and four in encrypted mode.  They use registers $1..$6 so that nearly every instruction
// depends on one of the few before it, which exercises both forwarding
// paths and the load-use interlock.  The instruction mix is R-type ALU
// operations, shifts, immediates, lui, lw and sw to a 64-byte window, and
// forward beq/bne that skip one instruction.  Each program ends with a
// marker store to address 1000.  A one-instruction-at-a-time model in the
// testbench executes the same program.  When the marker store reaches memory
// the pipeline's registers and data window must equal the model's.
//
// An encrypted program starts with a plain prologue that loads the key from
// data memory (lklw/lkuw), waits two NOPs and executes crypt 1.  Everything
// after it, the marker included, is stored DES-encrypted, one instruction per
// 64-bit block.  Its loads and stores use whole 8-byte blocks: a store writes
// DES({32'h0, rt}) and a load returns the low word of the decrypted block.
// These programs exercise the freeze while a DES core is busy, together with
// forwarding and load-use stalls.  The DES routine of the model is built from
// the standard's tables.  It is first checked against the example program's
// known plaintext/ciphertext pair.
module tb_random_program;
  import mips_pkg::*;

  localparam int N = 110;

  logic clk = 1'b0;
  logic rst;
  logic        load_we;
  logic [31:0] load_addr;
  logic [63:0] load_block;
  logic [31:0] dbg_pc;
  logic        dbg_crypt_en;
  logic [63:0] dbg_key;
  int checks = 0, failures = 0;
  int n_load_use = 0, n_fwd = 0, n_taken = 0, n_frozen = 0;

  always #1 clk = ~clk;

  encrypted_mips dut (.*);

  always @(posedge clk) if (!rst) begin
    if (dut.advance && dut.load_use) n_load_use++;
    if (dut.advance && dut.idex.valid && (dut.fwd_a != FWD_NONE || dut.fwd_b != FWD_NONE)) n_fwd++;
    if (dut.advance && dut.ex_taken) n_taken++;
    if (dut.freeze) n_frozen++;
  end

  function automatic logic [31:0] r_type(input int rs, input int rt, input int rd, input int sh, input int fn);
    return {6'd0, 5'(rs), 5'(rt), 5'(rd), 5'(sh), 6'(fn)};
  endfunction
  function automatic logic [31:0] i_type(input int op, input int rs, input int rt, input int imm);
    return {6'(op), 5'(rs), 5'(rt), 16'(imm)};
  endfunction

  localparam logic [63:0] KEY = 64'h4b4952415450414c;

  // DES of one block under KEY (FIPS 46-3), encrypt or decrypt.
  function automatic logic [63:0] des(input logic [63:0] d, input bit dec);
    logic [55:0] cd;
    logic [47:0] ks [16];
    logic [63:0] x;
    logic [31:0] l, r, t;
    cd = des_pkg::pc1(KEY);
    for (int i = 0; i < 16; i++) begin
      cd = des_pkg::rot_cd(cd, des_pkg::SHIFT_T[i] == 2, 1'b0);
      ks[i] = des_pkg::pc2(cd);
    end
    x = des_pkg::ip(d);
    l = x[63:32]; r = x[31:0];
    for (int i = 0; i < 16; i++) begin
      t = r;
      r = l ^ des_pkg::feistel(r, ks[dec ? 15 - i : i]);
      l = t;
    end
    return des_pkg::fp({r, l});
  endfunction

  function automatic logic [31:0] random_instr(input bit allow_branch, input bit crypt);
    int k, rs, rt, rd;
    int fns [11] = '{32, 33, 34, 35, 36, 37, 38, 39, 42, 43, 0};
    k = $urandom_range(0, 11);
    rs = $urandom_range(1, 6); rt = $urandom_range(1, 6); rd = $urandom_range(1, 6);
    case (k)
      0, 1, 2:  return r_type(rs, rt, rd, 0, fns[$urandom_range(0, 9)]);
      3:        return r_type(0, rt, rd, $urandom_range(0, 31), 2 + $urandom_range(0, 1) - 2 * $urandom_range(0, 1));
      4:        return i_type(8 + $urandom_range(0, 3), rs, rt, $urandom);
      5:        return i_type(12 + $urandom_range(0, 2), rs, rt, $urandom);
      6:        return i_type(15, 0, rt, $urandom);
      7, 8:     return i_type(35, 0, rt, crypt ? 8 * $urandom_range(0, 7) : 4 * $urandom_range(0, 15));
      9, 10:    return i_type(43, 0, rt, crypt ? 8 * $urandom_range(0, 7) : 4 * $urandom_range(0, 15));
      default:  return allow_branch ? i_type(4 + $urandom_range(0, 1), rs, rt, 8)
                                    : r_type(rs, rt, rd, 0, 32);
    endcase
  endfunction

  // Reference model: architectural state after running prog[0..N-1].  In
  // encrypted mode memory is kept as plaintext blocks, m_blk, and m_mem is
  // filled with their ciphertext at the end.
  logic [31:0] m_regs [32];
  logic [7:0]  m_mem  [64];
  logic [63:0] m_blk  [8];
  bit          m_wr   [8];

  function automatic logic [31:0] m_load(input int a);
    return {m_mem[a + 3], m_mem[a + 2], m_mem[a + 1], m_mem[a]};
  endfunction

  task automatic model(input logic [31:0] prog [N], input bit crypt);
    int pc;
    foreach (m_regs[i]) m_regs[i] = 0;
    foreach (m_mem[i])  m_mem[i] = 0;
    foreach (m_blk[i])  m_blk[i] = des(64'd0, 1'b1);
    foreach (m_wr[i])   m_wr[i] = 0;
    if (crypt) m_regs[7] = 32'd512;
    pc = 0;
    while (pc < N) begin
      logic [31:0] w, a, b, y, imm_s, imm_z;
      logic [5:0] op;
      logic [4:0] rs, rt, rd, sh;
      logic wr;
      int dst;
      w = prog[pc]; op = w[31:26]; rs = w[25:21]; rt = w[20:16]; rd = w[15:11]; sh = w[10:6];
      a = m_regs[rs]; b = m_regs[rt];
      imm_s = {{16{w[15]}}, w[15:0]}; imm_z = {16'd0, w[15:0]};
      wr = 1; dst = rt; y = 0;
      pc++;
      case (op)
        6'd0: begin
          dst = rd;
          case (w[5:0])
            6'd32, 6'd33: y = a + b;
            6'd34, 6'd35: y = a - b;
            6'd36: y = a & b;
            6'd37: y = a | b;
            6'd38: y = a ^ b;
            6'd39: y = ~(a | b);
            6'd42: y = ($signed(a) < $signed(b)) ? 1 : 0;
            6'd43: y = (a < b) ? 1 : 0;
            6'd0:  y = b << sh;
            6'd2:  y = b >> sh;
            6'd3:  y = $signed(b) >>> sh;
            default: wr = 0;
          endcase
        end
        6'd8, 6'd9: y = a + imm_s;
        6'd10: y = ($signed(a) < $signed(imm_s)) ? 1 : 0;
        6'd11: y = (a < imm_s) ? 1 : 0;
        6'd12: y = a & imm_z;
        6'd13: y = a | imm_z;
        6'd14: y = a ^ imm_z;
        6'd15: y = {w[15:0], 16'd0};
        6'd35: y = crypt ? m_blk[int'(w[15:0]) / 8][31:0] : m_load(int'(w[15:0]));
        6'd43: begin
          wr = 0;
          if (crypt) begin
            m_blk[int'(w[15:0]) / 8] = {32'd0, b};
            m_wr[int'(w[15:0]) / 8] = 1;
          end else begin
            for (int i = 0; i < 4; i++) m_mem[int'(w[15:0]) + i] = b[8*i +: 8];
          end
        end
        6'd4: begin wr = 0; if (a == b) pc++; end
        6'd5: begin wr = 0; if (a != b) pc++; end
        default: wr = 0;
      endcase
      if (wr && dst != 0) m_regs[dst] = y;
    end
    if (crypt)
      for (int i = 0; i < 8; i++)
        if (m_wr[i]) for (int j = 0; j < 8; j++) m_mem[8*i + j] = des(m_blk[i], 1'b0)[8*j +: 8];
  endtask

  // Instruction memory block n of a program; an encrypted program has a
  // six-instruction plain prologue.
  function automatic logic [63:0] image(input logic [31:0] prog [N], input bit crypt, input int n);
    logic [31:0] pro [6];
    int k;
    pro = '{i_type(8, 0, 7, 512), i_type(62, 7, 0, 0), i_type(62, 7, 1, 8), 32'd0, 32'd0, {6'd63, 26'd1}};
    if (!crypt) begin
      if (n < N) return {32'd0, prog[n]};
      if (n == N) return {32'd0, i_type(43, 0, 0, 1000)};
      return 64'd0;
    end
    if (n < 6) return {32'd0, pro[n]};
    k = n - 6;
    if (k < N) return des({32'd0, prog[k]}, 1'b0);
    if (k == N) return des({32'd0, i_type(43, 0, 0, 1000)}, 1'b0);
    return 64'd0;
  endfunction

  initial begin
    logic [31:0] prog [N];
    bit crypt;
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_block = '0;
    checks++;
    if (des({32'd0, 32'hcb97f7ee}, 1'b0) !== 64'h10539160018d5ff7) begin
      failures++;
      $display("FAIL: model DES does not reproduce the known ciphertext");
    end
    for (int t = 0; t < 16; t++) begin
      crypt = (t >= 12);
      for (int i = 0; i < N; i++) prog[i] = random_instr(i < N - 2, crypt);
      model(prog, crypt);
      rst = 1'b1;
      for (int i = 0; i < 1024; i++) dut.u_mem.u_dmem.mem[i] = 8'h00;
      for (int i = 0; i < 4; i++) begin
        dut.u_mem.u_dmem.mem[512 + i] = KEY[8*i +: 8];
        dut.u_mem.u_dmem.mem[520 + i] = KEY[32 + 8*i +: 8];
      end
      for (int a = 0; a < 1024; a += 8) begin
        @(negedge clk);
        load_we = 1'b1; load_addr = a; load_block = image(prog, crypt, a / 8);
      end
      @(negedge clk) load_we = 1'b0;
      repeat (2) @(negedge clk);
      rst = 1'b0;
      while (!(dut.u_mem.mem_we && dut.exmem.alu_y == 32'd1000)) @(negedge clk);
      // The instruction before the marker is in write-back; let it retire.
      repeat (2) @(negedge clk);
      checks++;
      if (dbg_crypt_en !== crypt) begin
        failures++;
        $display("FAIL: program %0d CryptEn = %b", t, dbg_crypt_en);
      end
      for (int r = 0; r < 32; r++) begin
        checks++;
        if (dut.u_id.u_regfile.regs[r] !== m_regs[r]) begin
          failures++;
          $display("FAIL: program %0d register $%0d = %h, model %h", t, r, dut.u_id.u_regfile.regs[r], m_regs[r]);
        end
      end
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (dut.u_mem.u_dmem.mem[i] !== m_mem[i]) begin
          failures++;
          $display("FAIL: program %0d byte %0d = %h, model %h", t, i, dut.u_mem.u_dmem.mem[i], m_mem[i]);
        end
      end
    end
    $display("load-use stalls=%0d forwarded operands=%0d taken branches=%0d frozen cycles=%0d",
             n_load_use, n_fwd, n_taken, n_frozen);
    checks += 4;
    if (n_frozen == 0)   begin failures++; $display("FAIL: no DES freeze"); end
    if (n_load_use == 0) begin failures++; $display("FAIL: no load-use stall"); end
    if (n_fwd == 0)      begin failures++; $display("FAIL: no forwarding"); end
    if (n_taken == 0)    begin failures++; $display("FAIL: no taken branch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
