// tb_forwarding_unit: operand source selection checked for directed cases
// (younger EX/MEM result wins over MEM/WB, $0 never forwarded, no write means
// no forward) and 1000 random register combinations.
module tb_forwarding_unit;
  import mips_pkg::*;
  logic [4:0] idex_rs, idex_rt, exmem_rd, memwb_rd;
  logic exmem_reg_write, memwb_reg_write;
  fwd_e fwd_a, fwd_b;
  int checks = 0, failures = 0;

  forwarding_unit dut (.*);

  function automatic fwd_e expect_src(input logic [4:0] r);
    if (r == 0) return FWD_NONE;
    if (exmem_reg_write && exmem_rd == r) return FWD_EXMEM;
    if (memwb_reg_write && memwb_rd == r) return FWD_MEMWB;
    return FWD_NONE;
  endfunction

  task automatic try(input logic [4:0] s, input logic [4:0] t, input logic ew, input logic [4:0] er,
                     input logic mw, input logic [4:0] mrd);
    idex_rs = s; idex_rt = t; exmem_reg_write = ew; exmem_rd = er; memwb_reg_write = mw; memwb_rd = mrd;
    #1;
    checks += 2;
    if (fwd_a != expect_src(s)) begin failures++; $display("FAIL: fwd_a %s", fwd_a.name()); end
    if (fwd_b != expect_src(t)) begin failures++; $display("FAIL: fwd_b %s", fwd_b.name()); end
  endtask

  initial begin
    try(5, 5, 1, 5, 1, 5);  // both stages write $5: EX/MEM wins
    try(5, 3, 0, 5, 1, 5);
    try(0, 0, 1, 0, 1, 0);
    try(2, 3, 1, 3, 1, 2);
    repeat (1000) try(5'($urandom_range(0, 3)), 5'($urandom_range(0, 3)), 1'($urandom),
                      5'($urandom_range(0, 3)), 1'($urandom), 5'($urandom_range(0, 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
