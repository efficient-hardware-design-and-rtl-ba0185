// writeback: the write-back multiplexer.
//
// Chooses the load data or the ALU result for the register file according to
// the instruction's mem_to_reg control, and steers the data of a key load
// (LKLW/LKUW) to the lower or upper half of the key register instead of the
// register file.  Bubbles (valid = 0) write nothing.  Combinational.
module writeback
  import mips_pkg::*;
(
  input  memwb_t memwb,
  output wb_t    wb
);
  always_comb begin
    wb.data      = (memwb.ctrl.mem_to_reg || memwb.ctrl.key_load) ? memwb.mem_y : memwb.alu_y;
    wb.reg_we    = memwb.valid && memwb.ctrl.reg_write && memwb.dest != 5'd0;
    wb.reg_wa    = memwb.dest;
    wb.key_we_lo = memwb.valid && memwb.ctrl.key_load && !memwb.ctrl.key_upper;
    wb.key_we_hi = memwb.valid && memwb.ctrl.key_load &&  memwb.ctrl.key_upper;
  end
endmodule
