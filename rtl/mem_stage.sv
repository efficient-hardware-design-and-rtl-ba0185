// mem_stage: memory access with store encryption and load decryption.
//
// Holds the data memory and two DES cores, one encrypting and one
// decrypting, plus the store-side multiplexer and load-side demultiplexer
// selected by the instruction's CryptEn bit.
//   plain lw   : low word of the block at the address, ready at once
//   plain sw   : writes the 32-bit rt value (4 bytes)
//   crypt lw   : block -> decrypt core -> low word of the plaintext
//   crypt sw   : {32'h0, rt} -> encrypt core -> 8-byte cipher block written
//   lklw/lkuw  : low word of the block, never decrypted (the key is stored
//                in plain text)
// An encrypted access starts its core in state IDLE, waits 16 cycles in WAIT
// with `ready` low (the top freezes the pipeline), holds the result in DONE,
// and returns to IDLE when the pipeline advances.  Memory is written only in
// the cycle the store leaves the stage (`advance`).
//
// The datapath (encrypt core before the memory, decrypt core after it,
// CryptEn-selected MUX/DEMUX) follows the processor description.  The
// zero-padded {0, rt} store format and the low-word load result match the
// published example results; the sequencer is this design's choice.
module mem_stage
  import mips_pkg::*;
#(
  parameter int DMEM_BYTES = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  exmem_t      exmem,
  input  logic        advance,
  input  logic [63:0] key,
  output logic [31:0] rdata,
  output logic        ready
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_DONE} state_e;

  state_e      state;
  logic        crypt_op, mem_we;
  logic [63:0] rblock, wblock, enc_y, dec_y, res_q;
  logic        enc_start, dec_start, enc_done, dec_done, enc_busy, dec_busy;

  assign crypt_op = exmem.valid && exmem.crypt && (exmem.ctrl.mem_read || exmem.ctrl.mem_write);

  data_memory #(.BYTES(DMEM_BYTES)) u_dmem (
    .clk, .addr(exmem.alu_y), .we(mem_we), .wide(exmem.crypt), .wdata(wblock), .rdata(rblock)
  );

  des_core u_encrypt (
    .clk, .rst, .start(enc_start), .decrypt(1'b0), .key, .din({32'd0, exmem.store_val}),
    .dout(enc_y), .busy(enc_busy), .done(enc_done)
  );

  des_core u_decrypt (
    .clk, .rst, .start(dec_start), .decrypt(1'b1), .key, .din(rblock),
    .dout(dec_y), .busy(dec_busy), .done(dec_done)
  );

  always_comb begin
    enc_start = (state == S_IDLE) && crypt_op && exmem.ctrl.mem_write;
    dec_start = (state == S_IDLE) && crypt_op && exmem.ctrl.mem_read;
    unique case (state)
      S_IDLE:  ready = !crypt_op;
      S_WAIT:  ready = 1'b0;
      default: ready = 1'b1;
    endcase
    rdata  = (exmem.crypt && exmem.ctrl.mem_read) ? res_q[31:0] : rblock[31:0];
    wblock = exmem.crypt ? res_q : {32'd0, exmem.store_val};
    mem_we = exmem.valid && exmem.ctrl.mem_write && advance && ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      res_q <= '0;
    end else if (advance && ready) begin
      state <= S_IDLE;
    end else begin
      unique case (state)
        S_IDLE: if (enc_start || dec_start) state <= S_WAIT;
        S_WAIT: if (enc_done || dec_done) begin
                  res_q <= enc_done ? enc_y : dec_y;
                  state <= S_DONE;
                end
        default: ;
      endcase
    end
  end

  a_one_core: assert property (@(posedge clk) disable iff (rst) !(enc_busy && dec_busy));
  a_frozen_while_wait: assert property (@(posedge clk) disable iff (rst)
    state == S_WAIT |-> !advance);

endmodule
