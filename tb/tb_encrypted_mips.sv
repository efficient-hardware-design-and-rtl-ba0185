// tb_encrypted_mips: end-to-end run of the published example program at the
// default sizes.
//
// The instruction image (tb/paper_imem.hex, 22 blocks) loads the key base
// address, loads the two key words with LKLW/LKUW, waits two NOPs, enables
// encryption with CRYPT 1, and then runs 15 DES-encrypted instructions that
// sum seven encrypted 32-bit words of the data image (tb/paper_dmem.hex) in a
// loop and store the sum encrypted at byte address 56.  Expected values are
// the published results: registers $1..$7 = 7, 7, 0, cb97f7ee, 30, da04fa52,
// 0; key register 4b4952415450414c; bytes 56..63 = f7 5f 8d 01 60 91 53 10
// (the cipher block 10539160018d5ff7, little-endian); the encrypted input
// array at 0..55 untouched.
//
// The test stops when the final store writes memory, before any instruction
// fetched after it can retire.  It also counts how often each pipeline
// mechanism occurred (plain and decrypted fetches, key loads, the CRYPT mode
// switch, encrypted loads and stores, load-use stalls, both forwarding
// paths, taken and not-taken branches, jumps, freeze cycles) and fails any
// that never happened.  The cycle count is printed.
module tb_encrypted_mips;
  import mips_pkg::*;

  logic clk = 1'b0;
  logic rst;
  logic        load_we;
  logic [31:0] load_addr;
  logic [63:0] load_block;
  logic [31:0] dbg_pc;
  logic        dbg_crypt_en;
  logic [63:0] dbg_key;

  int checks = 0, failures = 0;
  int cycles = 0;
  logic [63:0] image [22];

  always #1 clk = ~clk;   // 2-unit clock period, as in the published run

  encrypted_mips dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Mechanism counters.
  int n_plain_fetch, n_dec_fetch, n_key_load, n_crypt_on, n_enc_load, n_enc_store;
  int n_load_use, n_fwd_exmem, n_fwd_memwb, n_br_taken, n_br_not, n_jump, n_freeze;

  always @(posedge clk) if (!rst) begin
    cycles++;
    if (dut.advance && !dut.load_use && dut.if_ready && !dut.crypt_en) n_plain_fetch++;
    if (dut.u_if.des_start)                                        n_dec_fetch++;
    if (dut.wb.key_we_lo || dut.wb.key_we_hi)                      n_key_load++;
    if (dut.commit && dut.ifid.valid && dut.idex_d.ctrl.crypt && !dut.crypt_en) n_crypt_on++;
    if (dut.u_mem.dec_start)                                       n_enc_load++;
    if (dut.u_mem.enc_start)                                       n_enc_store++;
    if (dut.advance && dut.load_use)                               n_load_use++;
    if (dut.advance && dut.idex.valid && (dut.fwd_a == FWD_EXMEM || dut.fwd_b == FWD_EXMEM)) n_fwd_exmem++;
    if (dut.advance && dut.idex.valid && (dut.fwd_a == FWD_MEMWB || dut.fwd_b == FWD_MEMWB)) n_fwd_memwb++;
    if (dut.advance && dut.ex_taken)                               n_br_taken++;
    if (dut.advance && dut.idex.valid && dut.idex.ctrl.branch && !dut.ex_taken) n_br_not++;
    if (dut.advance && dut.id_redirect_eff && dut.idex_d.ctrl.jump) n_jump++;
    if (dut.freeze)                                                n_freeze++;
  end

  localparam logic [31:0] EXP_REGS [8] = '{32'h0, 32'h7, 32'h7, 32'h0,
                                           32'hcb97f7ee, 32'h30, 32'hda04fa52, 32'h0};
  localparam logic [63:0] EXP_CIPHER = 64'h10539160018d5ff7;
  localparam logic [63:0] EXP_KEY    = 64'h4b4952415450414c;

  initial begin
    logic [7:0] din [56];
    logic [63:0] got;
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_block = '0;
    $readmemh("tb/paper_imem.hex", image);
    for (int i = 0; i < 1024; i++) dut.u_mem.u_dmem.mem[i] = 8'h00;
    $readmemh("tb/paper_dmem.hex", dut.u_mem.u_dmem.mem);
    for (int a = 0; a < 1024; a += 8) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = a; load_block = (a / 8 < 22) ? image[a / 8] : 64'd0;
    end
    @(negedge clk) load_we = 1'b0;
    for (int i = 56; i < 64; i++) check(dut.u_mem.u_dmem.mem[i] == 8'h00, "location 56 not empty before the run");
    for (int i = 0; i < 56; i++) din[i] = dut.u_mem.u_dmem.mem[i];
    repeat (2) @(negedge clk);
    rst = 1'b0;
    // Run until the store to address 56 leaves the memory stage.
    while (!(dut.u_mem.mem_we && dut.exmem.alu_y == 32'd56)) @(negedge clk);
    for (int r = 0; r < 32; r++)
      check(dut.u_id.u_regfile.regs[r] == ((r < 8) ? EXP_REGS[r] : 32'd0),
            $sformatf("register $%0d = %h", r, dut.u_id.u_regfile.regs[r]));
    check(dbg_key == EXP_KEY, $sformatf("key = %h", dbg_key));
    check(dbg_crypt_en, "CryptEn not set");
    @(negedge clk);
    for (int i = 0; i < 8; i++) got[8*i +: 8] = dut.u_mem.u_dmem.mem[56 + i];
    check(got == EXP_CIPHER, $sformatf("cipher at 56 = %h", got));
    for (int i = 0; i < 56; i++) check(dut.u_mem.u_dmem.mem[i] == din[i], "input array modified");
    $display("cycles from reset release to the final store: %0d", cycles);
    $display("fetch plain=%0d decrypted=%0d  key loads=%0d crypt on=%0d  enc loads=%0d enc stores=%0d",
             n_plain_fetch, n_dec_fetch, n_key_load, n_crypt_on, n_enc_load, n_enc_store);
    $display("load-use=%0d fwd exmem=%0d memwb=%0d  branch taken=%0d not=%0d  jumps=%0d  freeze cycles=%0d",
             n_load_use, n_fwd_exmem, n_fwd_memwb, n_br_taken, n_br_not, n_jump, n_freeze);
    check(n_plain_fetch > 0, "no plain fetch");
    check(n_dec_fetch > 0,   "no decrypted fetch");
    check(n_key_load == 2,   "key loads != 2");
    check(n_crypt_on == 1,   "CRYPT mode switch count != 1");
    check(n_enc_load == 7,   "encrypted loads != 7");
    check(n_enc_store == 1,  "encrypted stores != 1");
    check(n_load_use > 0,    "no load-use stall");
    check(n_fwd_exmem > 0,   "no EX/MEM forwarding");
    check(n_fwd_memwb > 0,   "no MEM/WB forwarding");
    check(n_br_taken == 1,   "taken branches != 1");
    check(n_br_not == 6,     "not-taken branches != 6");
    check(n_jump == 6,       "jumps != 6");
    check(n_freeze > 0,      "no crypto freeze");
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
