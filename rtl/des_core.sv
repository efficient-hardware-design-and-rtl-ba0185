// des_core: iterative DES block cipher with a start/done handshake.
//
// Encrypts or decrypts one 64-bit block under a 64-bit key (the eight parity
// bits are ignored, as in the standard).  The core computes one Feistel round
// per clock: the cycle in which `start` is high performs round 1 directly on
// the initial permutation of `din`, the next 15 cycles perform rounds 2..16,
// and `done` is high for one cycle 16 cycles after `start`; `dout` then holds
// the result until the next start.  Round keys are produced on the fly by
// rotating the C and D halves left (encryption) or right (decryption), so no
// key table is stored.  `key`, `din` and `decrypt` are sampled only in the
// start cycle.  A start while `busy` is ignored.
//
// The processor uses three of these cores: one decrypting fetched
// instructions and one each encrypting stores and decrypting loads.  The port
// list (64-bit data and key, start, encrypt/decrypt select, 64-bit result)
// follows the processor description; the one-round-per-cycle structure is
// this design's choice.
module des_core
  import des_pkg::*;
(
  input  logic        clk,
  input  logic        rst,      // synchronous, active high
  input  logic        start,
  input  logic        decrypt,  // 1: decrypt, 0: encrypt
  input  logic [63:0] key,
  input  logic [63:0] din,
  output logic [63:0] dout,
  output logic        busy,
  output logic        done
);

  logic [31:0] l_q, r_q;
  logic [55:0] cd_q;
  logic [3:0]  rnd_q;    // index of the round performed next
  logic        dec_q;

  logic        first;
  logic        dec;
  logic [63:0] ip_in;
  logic [31:0] l_in, r_in;
  logic [55:0] cd_in, cd_rot;
  logic [3:0]  rnd;
  logic        two, right;

  assign first = start && !busy;
  assign dec   = first ? decrypt : dec_q;
  assign ip_in = ip(din);
  assign l_in  = first ? ip_in[63:32] : l_q;
  assign r_in  = first ? ip_in[31:0]  : r_q;
  assign cd_in = first ? pc1(key)     : cd_q;
  assign rnd   = first ? 4'd0         : rnd_q;

  // Encryption round i rotates left by SHIFT_T[i]; decryption round 0 uses
  // C0D0 unchanged (the 16 left rotations total 28) and round i > 0 rotates
  // right by SHIFT_T[16-i].
  always_comb begin
    right = dec;
    if (dec) two = (rnd == 4'd0) ? 1'b0 : (SHIFT_T[16 - int'(rnd)] == 2);
    else     two = (SHIFT_T[int'(rnd)] == 2);
    cd_rot = (dec && rnd == 4'd0) ? cd_in : rot_cd(cd_in, two, right);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      l_q   <= '0;
      r_q   <= '0;
      cd_q  <= '0;
      rnd_q <= '0;
      dec_q <= 1'b0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (first || busy) begin
        l_q   <= r_in;
        r_q   <= l_in ^ feistel(r_in, pc2(cd_rot));
        cd_q  <= cd_rot;
        rnd_q <= rnd + 4'd1;
        dec_q <= dec;
        busy  <= (rnd != 4'd15);
        done  <= (rnd == 4'd15);
      end
    end
  end

  // Output swap (R16 || L16) and final permutation.
  assign dout = fp({r_q, l_q});

endmodule
