// tb_register_file: reset clears all 32 registers; 500 random cycles of
// simultaneous write and two reads are compared with a software copy of the
// registers, including $0 staying zero and same-cycle write-through.
module tb_register_file;
  logic clk = 1'b0, rst;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic we;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  register_file dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] expect_rd(input logic [4:0] ra);
    if (ra == 0) return 0;
    if (we && wa == ra) return wd;
    return model[ra];
  endfunction

  initial begin
    rst = 1'b1; we = 1'b0; wa = '0; wd = '0; ra1 = '0; ra2 = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int r = 0; r < 32; r++) begin
      ra1 = 5'(r); #1 check(rd1 == 0, $sformatf("r%0d not cleared", r));
    end
    repeat (500) begin
      @(negedge clk);
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = ($urandom_range(0, 3) == 0) ? wa : 5'($urandom); ra2 = 5'($urandom);
      #1;
      check(rd1 == expect_rd(ra1), $sformatf("rd1 r%0d = %h", ra1, rd1));
      check(rd2 == expect_rd(ra2), $sformatf("rd2 r%0d = %h", ra2, rd2));
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
    end
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
