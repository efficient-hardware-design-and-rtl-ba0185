// if_stage: instruction fetch with on-the-fly instruction decryption.
//
// Holds the program counter, the instruction memory, one DES core in decrypt
// mode and the CryptEn multiplexer.  Every instruction occupies one 64-bit
// block, so the PC steps by 8.  With CryptEn low the low word of the fetched
// block is the instruction and `ready` is high at once.  With CryptEn high
// the block is handed to the DES core (state WAIT, `ready` low, 16 cycles) and
// the low word of the decrypted block is held in a buffer (state HAVE) until
// the pipeline takes it.  The PC advances when `stall` is low and `ready` is
// high, or jumps to `redirect_pc` when `redirect` is high; either returns the
// stage to FETCH for the new PC.  The top freezes the pipeline while `ready`
// is low, so a redirect never arrives during WAIT (asserted).
//
// The PC/memory/decrypt/MUX structure follows the processor description; the
// block format (one zero-padded instruction per block) follows its published
// memory image, and the three-state fetch sequencer is this design's choice.
module if_stage
  import mips_pkg::*;
#(
  parameter int IMEM_BYTES = 1024
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        stall,
  input  logic        redirect,
  input  logic [31:0] redirect_pc,
  input  logic        crypt_en,
  input  logic [63:0] key,
  output logic [31:0] pc,
  output logic [31:0] instr,
  output logic        ready,
  // program load port of the instruction memory
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [63:0] load_block
);
  typedef enum logic [1:0] {S_FETCH, S_WAIT, S_HAVE} state_e;

  state_e      state;
  logic [63:0] block, plain;
  logic [31:0] buf_q;
  logic        des_start, des_busy, des_done;

  instruction_memory #(.BYTES(IMEM_BYTES)) u_imem (
    .clk, .addr(pc), .block, .load_we, .load_addr, .load_block
  );

  des_core u_decrypt (
    .clk, .rst, .start(des_start), .decrypt(1'b1), .key, .din(block),
    .dout(plain), .busy(des_busy), .done(des_done)
  );

  always_comb begin
    des_start = (state == S_FETCH) && crypt_en && !redirect;
    unique case (state)
      S_FETCH: begin ready = !crypt_en; instr = block[31:0]; end
      S_WAIT:  begin ready = 1'b0;      instr = buf_q;       end
      default: begin ready = 1'b1;      instr = buf_q;       end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc    <= '0;
      state <= S_FETCH;
      buf_q <= '0;
    end else if (redirect) begin
      pc    <= redirect_pc;
      state <= S_FETCH;
    end else if (!stall && ready) begin
      pc    <= pc + 32'd8;
      state <= S_FETCH;
    end else begin
      unique case (state)
        S_FETCH: if (des_start) state <= S_WAIT;
        S_WAIT:  if (des_done) begin
                   buf_q <= plain[31:0];
                   state <= S_HAVE;
                 end
        default: ;
      endcase
    end
  end

  // The pipeline is frozen while a decryption is in flight.
  a_no_redirect_in_wait: assert property (@(posedge clk) disable iff (rst)
    state == S_WAIT |-> !redirect);

endmodule
