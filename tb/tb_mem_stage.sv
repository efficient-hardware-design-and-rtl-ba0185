// tb_mem_stage: memory stage checks with the example key.  A plain store
// writes four bytes and a plain load returns them at once; key loads return
// the plain low word even with the CryptEn tag set; an encrypted load of the
// block at 48 returns da04fa52 after 17 cycles; an encrypted store of
// cb97f7ee at 56 writes the cipher block 10539160018d5ff7 little-endian after
// 17 cycles, and memory is written only when the stage advances.
module tb_mem_stage;
  import mips_pkg::*;
  logic clk = 1'b0, rst, advance, ready;
  exmem_t exmem;
  logic [63:0] key;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mem_stage dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic exmem_t op(input string kind, input logic crypt, input logic [31:0] addr,
                                input logic [31:0] val);
    exmem_t e;
    e = '0;
    e.valid = 1; e.crypt = crypt; e.alu_y = addr; e.store_val = val;
    case (kind)
      "lw": begin e.ctrl.mem_read = 1; e.ctrl.mem_to_reg = 1; e.ctrl.reg_write = 1; e.dest = 6; end
      "sw": e.ctrl.mem_write = 1;
      "lk": e.ctrl.key_load = 1;
      default: ;
    endcase
    return e;
  endfunction

  // Present an operation, wait for ready, let it advance; return the wait.
  task automatic run(input exmem_t e, output int n, output logic [31:0] y);
    exmem = e; advance = 0; n = 0;
    #1;
    while (!ready && n < 100) begin @(negedge clk); n++; end
    y = rdata;
    advance = 1;
    @(negedge clk);
    advance = 0; exmem = '0;
  endtask

  initial begin
    int n;
    logic [31:0] y;
    logic [63:0] got;
    rst = 1; advance = 0; exmem = '0; key = 64'h4b4952415450414c;
    for (int i = 0; i < 1024; i++) dut.u_dmem.mem[i] = 0;
    $readmemh("tb/paper_dmem.hex", dut.u_dmem.mem);
    repeat (2) @(negedge clk);
    rst = 0;
    run(op("sw", 0, 200, 32'hcafef00d), n, y);
    check(n == 0, "plain store waited");
    check(dut.u_dmem.mem[200] == 8'h0d && dut.u_dmem.mem[203] == 8'hca, "plain store bytes");
    run(op("lw", 0, 200, 0), n, y);
    check(n == 0 && y == 32'hcafef00d, $sformatf("plain load %h", y));
    run(op("lk", 1, 104, 0), n, y);
    check(n == 0 && y == 32'h5450414c, $sformatf("key load low %h", y));
    run(op("lk", 1, 112, 0), n, y);
    check(n == 0 && y == 32'h4b495241, $sformatf("key load high %h", y));
    run(op("lw", 1, 48, 0), n, y);
    check(y == 32'hda04fa52, $sformatf("encrypted load %h", y));
    check(n == 17, $sformatf("encrypted load latency %0d", n));
    run(op("lw", 1, 0, 0), n, y);
    check(y == 32'h0c2a9960, $sformatf("encrypted load 0: %h", y));
    exmem = op("sw", 1, 56, 32'hcb97f7ee);
    repeat (5) @(negedge clk);
    check(dut.u_dmem.mem[56] == 8'h00, "store wrote before it finished");
    run(op("sw", 1, 56, 32'hcb97f7ee), n, y);
    for (int i = 0; i < 8; i++) got[8*i +: 8] = dut.u_dmem.mem[56 + i];
    check(got == 64'h10539160018d5ff7, $sformatf("encrypted store %h", got));
    check(n == 12, $sformatf("encrypted store remaining wait %0d", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
