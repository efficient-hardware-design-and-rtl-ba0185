// tb_if_stage: fetch of the example's first blocks in plain mode (ready at
// once, PC steps by 8, low word taken), then with CryptEn high and the
// example key: the encrypted blocks at 56, 64 and 160 must come out as
// addi $1,$0,7 / add $2,$0,$0 / j 22 after exactly 17 cycles (16 for the
// core, one to present the result).  Also checks that `stall` holds the PC
// and instruction and that a redirect loads the new PC.
module tb_if_stage;
  logic clk = 1'b0, rst, stall, redirect, crypt_en, ready, load_we;
  logic [31:0] redirect_pc, pc, instr, load_addr;
  logic [63:0] key, load_block;
  logic [63:0] image [22];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  if_stage dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Wait for ready, return the number of cycles waited (0 = ready at once).
  task automatic wait_ready(output int n);
    n = 0;
    while (!ready && n < 100) begin @(negedge clk); n++; end
  endtask

  initial begin
    int n;
    rst = 1; stall = 1; redirect = 0; redirect_pc = 0; crypt_en = 0; key = 64'h4b4952415450414c;
    load_we = 0; load_addr = 0; load_block = 0;
    $readmemh("tb/paper_imem.hex", image);
    for (int b = 0; b < 128; b++) begin
      @(negedge clk) load_we = 1; load_addr = 8 * b; load_block = (b < 22) ? image[b] : 64'd0;
    end
    @(negedge clk) load_we = 0; rst = 0;
    @(negedge clk);
    check(ready && pc == 0 && instr == 32'h20010068, $sformatf("plain fetch 0: %h", instr));
    stall = 0;
    @(negedge clk);
    check(ready && pc == 8 && instr == 32'hf8200000, $sformatf("plain fetch 8: %h", instr));
    stall = 1;
    repeat (3) @(negedge clk);
    check(pc == 8 && instr == 32'hf8200000, "stall does not hold");
    // Switch to encrypted mode and redirect to the first encrypted block.
    crypt_en = 1; redirect = 1; redirect_pc = 56;
    @(negedge clk) redirect = 0;
    wait_ready(n);
    check(pc == 56 && instr == 32'h20010007, $sformatf("decrypt 56: %h", instr));
    check(n == 17, $sformatf("decrypt latency %0d, expected 17", n));
    repeat (2) @(negedge clk);
    check(ready && instr == 32'h20010007, "decrypted instruction not held under stall");
    stall = 0;
    @(negedge clk) stall = 1;
    wait_ready(n);
    check(pc == 64 && instr == 32'h00001020, $sformatf("decrypt 64: %h", instr));
    redirect = 1; redirect_pc = 160; stall = 0;
    @(negedge clk) redirect = 0; stall = 1;
    wait_ready(n);
    check(pc == 160 && instr == 32'h08000016, $sformatf("decrypt 160: %h", instr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
