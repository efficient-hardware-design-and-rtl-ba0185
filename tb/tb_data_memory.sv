// tb_data_memory: 400 random 4-byte and 8-byte writes at random byte
// addresses, each followed by a read of a random address, against a
// byte-array model; plus the example cipher block stored at 56 and read
// back byte by byte.
module tb_data_memory;
  localparam int BYTES = 1024;
  logic clk = 1'b0;
  logic [31:0] addr;
  logic we, wide;
  logic [63:0] wdata, rdata, e;
  logic [7:0] model [BYTES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  data_memory dut (.*);

  initial begin
    we = 1; wide = 1;
    for (int a = 0; a < BYTES; a += 8) begin
      @(negedge clk) addr = a; wdata = '0;
    end
    foreach (model[i]) model[i] = 0;
    @(negedge clk);
    addr = 56; wdata = 64'h10539160018d5ff7; wide = 1; we = 1;
    for (int i = 0; i < 8; i++) model[56 + i] = wdata[8*i +: 8];
    @(negedge clk) we = 0;
    checks++;
    if (dut.mem[56] != 8'hf7 || dut.mem[63] != 8'h10) begin failures++; $display("FAIL: byte order"); end
    repeat (400) begin
      addr = $urandom % BYTES; wdata = {$urandom, $urandom}; wide = $urandom_range(0, 1); we = 1;
      for (int i = 0; i < 8; i++) if (wide || i < 4) model[(addr + i) % BYTES] = wdata[8*i +: 8];
      @(negedge clk);
      we = 0; addr = ($urandom_range(0, 1) == 1) ? addr : $urandom % BYTES;
      #1;
      for (int i = 0; i < 8; i++) e[8*i +: 8] = model[(addr + i) % BYTES];
      checks++;
      if (rdata !== e) begin failures++; $display("FAIL: addr %0d: %h expected %h", addr, rdata, e); end
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
