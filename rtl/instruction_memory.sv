// instruction_memory: byte-addressed instruction store read 64 bits at a time.
//
// Returns the eight bytes at addr .. addr+7 as one little-endian block (byte
// addr in bits 7:0).  Each block holds one instruction in its low word: plain
// instructions are zero-padded, encrypted ones are DES cipher blocks of the
// zero-padded word.  Read is combinational (an asynchronous ROM, as FPGA
// distributed RAM provides); addresses wrap modulo BYTES.  A 64-bit load port
// (`load_we`, `load_addr`, `load_block`, written on the rising edge) lets a
// host place the program image before reset is released; the processor itself
// never writes here.  The size and the load port are this design's choice.
module instruction_memory #(
  parameter int BYTES = 1024
) (
  input  logic        clk,
  input  logic [31:0] addr,
  output logic [63:0] block,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [63:0] load_block
);
  localparam int AW = $clog2(BYTES);

  logic [7:0] mem [BYTES];

  always_comb begin
    for (int i = 0; i < 8; i++) block[8*i +: 8] = mem[AW'(addr[AW-1:0] + AW'(i))];
  end

  always_ff @(posedge clk) begin
    if (load_we) begin
      for (int i = 0; i < 8; i++) mem[AW'(load_addr[AW-1:0] + AW'(i))] <= load_block[8*i +: 8];
    end
  end
endmodule
