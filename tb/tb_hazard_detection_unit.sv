// tb_hazard_detection_unit: the stall output is compared with the load-use
// rule for directed cases (the example's lw $6 / add $4,$4,$6 pair, $0, an
// unused operand) and 1000 random combinations.
module tb_hazard_detection_unit;
  logic idex_mem_read, uses_rs, uses_rt, stall;
  logic [4:0] idex_rt, ifid_rs, ifid_rt;
  int checks = 0, failures = 0;

  hazard_detection_unit dut (.*);

  task automatic try(input logic mr, input logic [4:0] lt, input logic [4:0] s, input logic [4:0] t,
                     input logic us, input logic ut, input logic exp);
    idex_mem_read = mr; idex_rt = lt; ifid_rs = s; ifid_rt = t; uses_rs = us; uses_rt = ut;
    #1 checks++;
    if (stall !== exp) begin
      failures++;
      $display("FAIL: mr=%b rt=%0d rs=%0d rt=%0d us=%b ut=%b stall=%b", mr, lt, s, t, us, ut, stall);
    end
  endtask

  initial begin
    try(1, 6, 4, 6, 1, 1, 1);   // lw $6 ; add $4,$4,$6
    try(1, 6, 6, 4, 1, 1, 1);
    try(0, 6, 4, 6, 1, 1, 0);   // not a load
    try(1, 0, 0, 0, 1, 1, 0);   // $0
    try(1, 6, 4, 6, 1, 0, 0);   // rt not read
    try(1, 6, 6, 4, 0, 1, 0);   // rs not read
    try(1, 6, 4, 5, 1, 1, 0);
    repeat (1000) begin
      logic mr, us, ut;
      logic [4:0] lt, s, t;
      mr = $urandom_range(0, 1); us = $urandom_range(0, 1); ut = $urandom_range(0, 1);
      lt = 5'($urandom_range(0, 3)); s = 5'($urandom_range(0, 3)); t = 5'($urandom_range(0, 3));
      try(mr, lt, s, t, us, ut, mr && lt != 0 && ((us && s == lt) || (ut && t == lt)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
