// key_register: the 64-bit DES key register beside the register file.
//
// LKLW writes the lower 32 bits and LKUW the upper 32 bits, each from the
// write-back stage on the rising clock edge, so the key is {upper, lower}.
// The key drives all three DES cores and stays unchanged for the rest of the
// program once loaded.  Synchronous active-high reset clears it.  There is no
// bypass: software leaves two NOPs between the last key load and CRYPT.
module key_register (
  input  logic        clk,
  input  logic        rst,
  input  logic        we_lo,
  input  logic        we_hi,
  input  logic [31:0] wd,
  output logic [63:0] key
);
  always_ff @(posedge clk) begin
    if (rst) begin
      key <= '0;
    end else begin
      if (we_lo) key[31:0]  <= wd;
      if (we_hi) key[63:32] <= wd;
    end
  end
endmodule
