// tb_instruction_memory: loads random 64-bit blocks through the load port
// and reads them back at aligned and unaligned byte addresses, comparing with
// a byte-array model (little-endian, wrap-around at the end).
module tb_instruction_memory;
  localparam int BYTES = 1024;
  logic clk = 1'b0;
  logic [31:0] addr, load_addr;
  logic [63:0] block, load_block, e;
  logic load_we;
  logic [7:0] model [BYTES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  instruction_memory dut (.*);

  initial begin
    load_we = 0; load_addr = 0; load_block = 0; addr = 0;
    for (int a = 0; a < BYTES; a += 8) begin
      @(negedge clk);
      load_we = 1; load_addr = a; load_block = {$urandom, $urandom};
      for (int i = 0; i < 8; i++) model[a + i] = load_block[8*i +: 8];
    end
    @(negedge clk) load_we = 0;
    for (int n = 0; n < 300; n++) begin
      addr = (n < 128) ? 32'(8 * n) : $urandom;
      #1;
      for (int i = 0; i < 8; i++) e[8*i +: 8] = model[(addr + i) % BYTES];
      checks++;
      if (block !== e) begin failures++; $display("FAIL: addr %0d: %h expected %h", addr, block, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
