// data_memory: byte-addressed data RAM accessed as 64-bit blocks.
//
// `rdata` is the little-endian block of the eight bytes at addr .. addr+7
// (combinational read).  On a rising edge with `we` high the low four bytes
// of `wdata` are written, or all eight when `wide` is high: plain stores write
// one 32-bit word, encrypted stores write the 64-bit cipher block with its
// lowest byte at addr.  Addresses wrap modulo BYTES.  The 1024-byte default
// matches the size of the memory in the published simulation.  Contents are
// not reset; a data image may be placed in `mem` with $readmemh.
module data_memory #(
  parameter int BYTES = 1024
) (
  input  logic        clk,
  input  logic [31:0] addr,
  input  logic        we,
  input  logic        wide,
  input  logic [63:0] wdata,
  output logic [63:0] rdata
);
  localparam int AW = $clog2(BYTES);

  logic [7:0] mem [BYTES];

  always_comb begin
    for (int i = 0; i < 8; i++) rdata[8*i +: 8] = mem[AW'(addr[AW-1:0] + AW'(i))];
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < 8; i++)
        if (wide || i < 4) mem[AW'(addr[AW-1:0] + AW'(i))] <= wdata[8*i +: 8];
    end
  end
endmodule
