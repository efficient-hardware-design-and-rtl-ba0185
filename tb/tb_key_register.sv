// tb_key_register: reset clears the key; LKLW and LKUW style writes update
// only their own half; the example key 4b4952415450414c is built from its two
// words; random half writes follow a software model.
module tb_key_register;
  logic clk = 1'b0, rst, we_lo, we_hi;
  logic [31:0] wd;
  logic [63:0] key, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  key_register dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rst = 1'b1; we_lo = 0; we_hi = 0; wd = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    check(key == 0, "not cleared");
    we_lo = 1; wd = 32'h5450414c;
    @(negedge clk) we_lo = 0; check(key == 64'h000000005450414c, "low word");
    we_hi = 1; wd = 32'h4b495241;
    @(negedge clk) we_hi = 0; check(key == 64'h4b4952415450414c, "high word");
    wd = 32'hdeadbeef;
    @(negedge clk) check(key == 64'h4b4952415450414c, "write without enable");
    model = key;
    repeat (100) begin
      we_lo = $urandom_range(0, 1); we_hi = $urandom_range(0, 1); wd = $urandom;
      if (we_lo) model[31:0] = wd;
      if (we_hi) model[63:32] = wd;
      @(negedge clk) check(key == model, $sformatf("key %h expected %h", key, model));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
