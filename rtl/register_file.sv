// register_file: the 32 x 32-bit general-purpose registers of the decode stage.
//
// Two combinational read ports (rs and rt) and one write port driven by the
// write-back stage on the rising clock edge.  Register 0 always reads zero and
// ignores writes.  A read of the register being written in the same cycle
// returns the new value, so an instruction in decode sees the result of the
// instruction in write-back without a third forwarding path.  The synchronous
// active-high reset clears every register, matching the description of a
// reset that initialises all processor sub-units to zero.
module register_file #(
  parameter int NREGS = 32,
  parameter int WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [$clog2(NREGS)-1:0] ra1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  output logic [WIDTH-1:0]         rd1,
  output logic [WIDTH-1:0]         rd2,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  logic [WIDTH-1:0]         wd
);
  logic [WIDTH-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we && wa != '0) begin
      regs[wa] <= wd;
    end
  end

  always_comb begin
    rd1 = (ra1 == '0) ? '0 : (we && wa == ra1) ? wd : regs[ra1];
    rd2 = (ra2 == '0) ? '0 : (we && wa == ra2) ? wd : regs[ra2];
  end
endmodule
