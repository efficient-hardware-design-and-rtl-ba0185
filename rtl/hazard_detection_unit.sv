// hazard_detection_unit: load-use interlock.
//
// When the instruction in execute is a load that writes register rt and the
// instruction in decode reads that register, the loaded value cannot be
// forwarded in time.  `stall` then holds the PC and the IF/ID register for
// one cycle and a bubble enters ID/EX; after that the value is forwarded from
// MEM/WB.  Combinational.  The classic textbook rule is used; key loads write
// no general register and never stall.
module hazard_detection_unit (
  input  logic       idex_mem_read,  // load in execute that writes idex_rt
  input  logic [4:0] idex_rt,
  input  logic [4:0] ifid_rs,
  input  logic [4:0] ifid_rt,
  input  logic       uses_rs,
  input  logic       uses_rt,
  output logic       stall
);
  assign stall = idex_mem_read && idex_rt != 5'd0 &&
                 ((uses_rs && ifid_rs == idex_rt) || (uses_rt && ifid_rt == idex_rt));
endmodule
