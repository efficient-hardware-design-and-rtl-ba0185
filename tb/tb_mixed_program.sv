// tb_mixed_program: second end-to-end program, at the default sizes, that
// exercises what the published example does not: every ALU operation, lui and
// the zero-extended immediates, a bne loop, a plain store and load followed
// by a dependent instruction, switching encryption on (CRYPT 1) and off
// again (CRYPT 0), and reading back in plain mode the cipher block that an
// encrypted store produced.  The program (tb/mixed_imem.hex, 36 blocks, the
// instructions between CRYPT 1 and CRYPT 0 inclusive encrypted with the key
// 4b4952415450414c) uses the published data image for the key words and the
// encrypted array.  Expected register values and the cipher block
// 3102d58647ed70c6 were computed with an independent software model.
module tb_mixed_program;
  import mips_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic        load_we;
  logic [31:0] load_addr;
  logic [63:0] load_block;
  logic [31:0] dbg_pc;
  logic        dbg_crypt_en;
  logic [63:0] dbg_key;
  logic [63:0] image [36];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  encrypted_mips dut (.*);

  localparam logic [31:0] EXP [32] = '{32'h00000000, 32'h00000068, 32'h00000000, 32'h00000000,
    32'h00000000, 32'h00000000, 32'h00000000, 32'h00000000, 32'h12345678, 32'h23456780,
    32'hfedcba98, 32'hcc8a8807, 32'hedcba988, 32'h0edcba98, 32'h317131f8, 32'h02044600,
    32'h337577f8, 32'h00000001, 32'h00000000, 32'h00000001, 32'h0000a900, 32'h1234a987,
    32'h12345678, 32'h2468acf0, 32'hda04fa52, 32'hec3950ca, 32'h47ed70c6, 32'h3102d586,
    32'h00000000, 32'h00000000, 32'h00000000, 32'h00000000};
  localparam logic [63:0] EXP_CIPHER = 64'h3102d58647ed70c6;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int n_crypt_on, n_crypt_off, n_br_taken, n_load_use, n_enc_load, n_enc_store, n_plain_store;
  always @(posedge clk) if (!rst) begin
    if (dut.commit && dut.ifid.valid && dut.idex_d.ctrl.crypt &&  dut.ifid.instr[0] && !dut.crypt_en) n_crypt_on++;
    if (dut.commit && dut.ifid.valid && dut.idex_d.ctrl.crypt && !dut.ifid.instr[0] &&  dut.crypt_en) n_crypt_off++;
    if (dut.advance && dut.ex_taken)  n_br_taken++;
    if (dut.advance && dut.load_use)  n_load_use++;
    if (dut.u_mem.dec_start)          n_enc_load++;
    if (dut.u_mem.enc_start)          n_enc_store++;
    if (dut.u_mem.mem_we && !dut.exmem.crypt) n_plain_store++;
  end

  initial begin
    logic [63:0] got;
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_block = '0;
    $readmemh("tb/mixed_imem.hex", image);
    for (int i = 0; i < 1024; i++) dut.u_mem.u_dmem.mem[i] = 8'h00;
    $readmemh("tb/paper_dmem.hex", dut.u_mem.u_dmem.mem);
    for (int a = 0; a < 1024; a += 8) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = a; load_block = (a / 8 < 36) ? image[a / 8] : 64'd0;
    end
    @(negedge clk) load_we = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    while (!(dut.u_mem.mem_we && dut.exmem.alu_y == 32'd96)) @(negedge clk);
    for (int r = 0; r < 32; r++)
      check(dut.u_id.u_regfile.regs[r] == EXP[r],
            $sformatf("register $%0d = %h, expected %h", r, dut.u_id.u_regfile.regs[r], EXP[r]));
    check(!dbg_crypt_en, "CryptEn still set");
    @(negedge clk);
    for (int i = 0; i < 8; i++) got[8*i +: 8] = dut.u_mem.u_dmem.mem[64 + i];
    check(got == EXP_CIPHER, $sformatf("cipher at 64 = %h", got));
    check({dut.u_mem.u_dmem.mem[203], dut.u_mem.u_dmem.mem[202], dut.u_mem.u_dmem.mem[201],
           dut.u_mem.u_dmem.mem[200]} == 32'h12345678, "plain store at 200");
    check({dut.u_mem.u_dmem.mem[99], dut.u_mem.u_dmem.mem[98], dut.u_mem.u_dmem.mem[97],
           dut.u_mem.u_dmem.mem[96]} == 32'h3102d586, "plain store at 96");
    check(dut.u_mem.u_dmem.mem[100] == 8'h00, "plain store wrote more than 4 bytes");
    $display("crypt on=%0d off=%0d  taken branches=%0d  load-use=%0d  enc loads=%0d stores=%0d  plain stores=%0d",
             n_crypt_on, n_crypt_off, n_br_taken, n_load_use, n_enc_load, n_enc_store, n_plain_store);
    check(n_crypt_on == 1,    "CRYPT 1 count");
    check(n_crypt_off == 1,   "CRYPT 0 count");
    check(n_br_taken == 3,    "taken branches != 3 (two bne, one beq)");
    check(n_load_use >= 1,    "no load-use stall");
    check(n_enc_load == 1,    "encrypted loads != 1");
    check(n_enc_store == 1,   "encrypted stores != 1");
    check(n_plain_store == 2, "plain stores != 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
