// forwarding_unit: operand bypass selection for the execute stage.
//
// For each ALU operand (rs, rt) it compares the source register of the
// instruction in execute with the destination of the instruction in memory
// access (EX/MEM) and in write-back (MEM/WB).  The younger match wins; $0 is
// never forwarded.  The result selects the ALU operand, the branch comparison
// operand and the store data.  Combinational; classic two-level forwarding.
module forwarding_unit
  import mips_pkg::*;
(
  input  logic [4:0] idex_rs,
  input  logic [4:0] idex_rt,
  input  logic [4:0] exmem_rd,
  input  logic       exmem_reg_write,
  input  logic [4:0] memwb_rd,
  input  logic       memwb_reg_write,
  output fwd_e       fwd_a,
  output fwd_e       fwd_b
);
  function automatic fwd_e pick(input logic [4:0] src);
    if (exmem_reg_write && exmem_rd != 5'd0 && exmem_rd == src) return FWD_EXMEM;
    if (memwb_reg_write && memwb_rd != 5'd0 && memwb_rd == src) return FWD_MEMWB;
    return FWD_NONE;
  endfunction

  assign fwd_a = pick(idex_rs);
  assign fwd_b = pick(idex_rt);
endmodule
