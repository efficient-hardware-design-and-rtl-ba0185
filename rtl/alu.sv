// alu: the 32-bit arithmetic logic unit of the execute stage.
//
// Purely combinational.  `op` (from the decoder) selects add, subtract, the
// four bitwise operations, signed and unsigned set-less-than, the three
// shifts (amount in `shamt`) and load-upper-immediate (b << 16).  Additions
// wrap without an overflow trap.  `zero` flags a zero result.  Which
// operations exist is this design's choice; the processor description only
// says the ALU performs the arithmetic and logical operation named by the
// control unit.
module alu
  import mips_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [4:0]  shamt,
  input  alu_op_e     op,
  output logic [31:0] y,
  output logic        zero
);
  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_NOR:  y = ~(a | b);
      ALU_SLT:  y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU: y = {31'd0, a < b};
      ALU_SLL:  y = b << shamt;
      ALU_SRL:  y = b >> shamt;
      ALU_SRA:  y = $unsigned($signed(b) >>> shamt);
      ALU_LUI:  y = {b[15:0], 16'd0};
      default:  y = a + b;
    endcase
  end
  assign zero = (y == 32'd0);
endmodule
