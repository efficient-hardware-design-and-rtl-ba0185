# Encrypted MIPS: a five-stage MIPS pipeline that runs DES-encrypted code

This is a 32-bit MIPS processor whose program and data can stay encrypted in
memory. The instruction memory holds DES cipher blocks. The fetch stage
decrypts each block before decoding it. Loads decrypt what they read, and
stores encrypt what they write. Plain-text data never appears in memory, and
encrypted code is useless without the 64-bit key.

The pipeline is the classic five stages: IF, ID, EX, MEM, WB, with forwarding
and a load-use interlock. Three things are added to it:

* a **64-bit key register** beside the register file;
* **three DES cores**: a decryptor in IF, and an encryptor and a decryptor
  around the data memory in MEM;
* a mode flag, **CryptEn**. It selects at each of those three places whether
  data goes through the DES core or around it.

Three new instructions drive this:

| instruction  | encoding                            | effect                                   |
|--------------|-------------------------------------|------------------------------------------|
| `lklw off(rs)` | op = 62 (0x3E), rt = 0, imm = off   | key[31:0]  <= low word of mem[rs+off]    |
| `lkuw off(rs)` | op = 62 (0x3E), rt = 1, imm = off   | key[63:32] <= low word of mem[rs+off]    |
| `crypt b`      | op = 63 (0x3F), target = b          | CryptEn <= (b != 0); re-fetch next block |

The design follows Singh and Kumar, "Efficient Hardware Design and
Implementation of Encrypted MIPS Processor". That paper describes the
organisation and gives one worked example, but no encodings or timing. Where
this RTL had to decide something itself, the section
[Where this RTL departs from or extends the description](#where-this-rtl-departs-from-or-extends-the-description)
says so.

## Memory format: one instruction per 64-bit block

DES works on 64-bit blocks, so both memories are read 64 bits at a time.

* Memories are byte-addressed and **little-endian**. The byte at address `a`
  is bits 7:0 of the block read at `a`.
* Each instruction occupies a whole 8-byte block, in the **low word**. The
  high word is zero. An encrypted instruction is
  `DES_encrypt(key, {32'h0, instr})`.
* The **PC steps by 8**.
* **Branch target** = PC + 8 + sign-extended immediate. The immediate is a
  byte displacement, so `beq ..., 16` skips one instruction.
* **Jump target** = `{PC[31:28], target, 2'b00}`. `j 22` goes to byte 88,
  which is block 11.
* There are no delay slots. The instruction after a taken branch or jump is
  flushed.

The paper's text speaks of packing two instructions into one block. Its
published memory image, however, decrypts to exactly one instruction per
block with a zero high word, and its loop only works that way. This RTL
follows the image.

Data uses the same block format when CryptEn is on:

* an encrypted `sw rt` stores the 8-byte cipher of `{32'h0, rt}`;
* an encrypted `lw` reads 8 bytes, decrypts them and returns the low word.

With CryptEn off, `lw` and `sw` move an ordinary 4-byte word. Key loads
always read the plain low word, because the key itself is kept unencrypted
in data memory.

## What CryptEn changes, and when

CryptEn lives in the decode stage. A `crypt` instruction does two things
when it leaves ID:

* it sets or clears CryptEn;
* it redirects fetch to its own PC + 8.

The block after `crypt` has usually been fetched already in the old mode.
The redirect drops it and fetches it again in the new mode. This costs one
slot.

Each instruction also carries the CryptEn value it was decoded under down
the pipeline. A load or store therefore uses the mode in force where it
stands in the program. A `crypt` further down the program does not change an
older load or store that is already in EX or MEM.

**Key loading rule.** The key register has no bypass. It is written at the
end of the WB cycle of `lkuw`. The first encrypted fetch starts in the cycle
after `crypt` leaves ID, and a DES core samples the key in its start cycle.
For that fetch to see the new key, `lkuw` must be in WB while `crypt` is in
ID. So **two instructions (NOPs) must separate the last key load from
`crypt`**, as in the example program. An assertion in `encrypted_mips`
checks this.

## DES cores and the pipeline freeze

`des_core` is iterative. It computes one Feistel round per clock and
produces the round keys on the fly, by rotating the C and D halves left to
encrypt and right to decrypt.

* In the cycle in which `start` is high it performs round 1.
* `done` pulses 16 cycles after `start`.
* `dout` holds the result until the next start.

The fetch stage and the memory stage each wrap their cores in a small
sequencer. The sequencer starts the core, waits, then latches the result and
offers it. An encrypted fetch or encrypted memory access is therefore ready
**17 cycles** after it is presented.

While any sequencer is waiting, `ready` is low. `freeze = !if_ready ||
!mem_ready` then holds every pipeline register and the PC. This is the
simplest correct rule. Its cost is that no other work overlaps a DES
operation, so an encrypted instruction costs about 17 cycles.

## Hazards

* **Forwarding** (`forwarding_unit`): the rs and rt operands in EX can take
  the ALU result in EX/MEM, or the write-back value in MEM/WB. The younger
  value wins, and `$0` is never forwarded. The forwarded rt value is also
  used as the store data and as the branch comparison operand.
* **Load-use** (`hazard_detection_unit`): a `lw` in EX whose destination the
  instruction in ID reads holds PC and IF/ID for one cycle and inserts a
  bubble into ID/EX.
* **Register file** write-through: a register written by WB in the same
  cycle is read with its new value in ID.
* **Control**: `j` and `crypt` redirect from ID and flush IF/ID. Taken
  branches are resolved in EX, which flushes IF/ID and ID/EX.

## The example program

The paper's demonstration program is in `tb/paper_imem.hex`, and its data
in `tb/paper_dmem.hex`. Both are byte-exact copies of the published memory
images. Decrypted with the key `4b4952415450414c` ("KIRATPAL"), the program
reads:

```
  0  addi $1,$0,104      plain: base address of the key
  8  lklw 0($1)          key low  word  <- 0x5450414c
 16  addi $1,$1,8
 24  lkuw 0($1)          key high word  <- 0x4b495241
 32  nop
 40  nop
 48  crypt 1             everything below is DES-encrypted
 56  addi $1,$0,7
 64  add  $2,$0,$0
 72  addi $3,$0,0
 80  addi $4,$0,0
 88  add  $5,$2,$2       Loop: $5 = 8*$2 + $3
 96  add  $5,$5,$5
104  add  $5,$5,$5
112  add  $5,$5,$3
120  lw   $6,0($5)       encrypted load, decrypted low word
128  add  $4,$4,$6
136  addi $2,$2,1
144  slt  $7,$2,$1
152  beq  $7,$0,16       exit after 7 iterations
160  j    Loop
168  sw   $4,56($0)      encrypted store of the sum
```

The program adds up the seven encrypted words at 0, 8, ..., 48. Their sum is
`cb97f7ee`. Stored encrypted, it becomes the block `10539160018d5ff7` at
bytes 56..63. The final registers are:

| register | value    |
|----------|----------|
| $1       | 7        |
| $2       | 7        |
| $3       | 0        |
| $4       | cb97f7ee |
| $5       | 30       |
| $6       | da04fa52 |
| $7       | 0        |

All of these match the published results. The paper's text once gives the
sum as `cba767ee`, but its register dump and its plain-text value both say
`cb97f7ee`.

This RTL takes **1664 cycles** from reset release to the final store.
The published run finishes at 2688 ps with a 2 ps clock, which is 1344
cycles. The difference comes from timing the paper does not describe: how
DES latency overlaps the pipeline, and how many cycles the core takes.

Each of the mechanisms above happens in this run:

| mechanism                 | count       |
|---------------------------|-------------|
| plain fetches             | 8           |
| decrypted fetches         | 85          |
| key loads                 | 2           |
| mode switch               | 1           |
| encrypted loads           | 7           |
| encrypted store           | 1           |
| load-use stalls           | 7           |
| EX/MEM forwards           | 44          |
| MEM/WB forwards           | 8           |
| branches taken / not taken | 1 / 6      |
| jumps                     | 6           |
| frozen cycles             | 1564 of 1664 |

## Modules

| module | stage | role |
|--------|-------|------|
| `encrypted_mips` | top | pipeline registers (typed structs), EX datapath, branch resolution, freeze/stall/flush |
| `if_stage` | IF | PC, `instruction_memory`, decrypting `des_core`, CryptEn MUX, fetch sequencer |
| `instruction_memory` | IF | 1 KiB byte array, 64-bit little-endian read, program load port |
| `id_stage` | ID | `control`, `register_file`, `key_register`, immediate extension, CryptEn, jump/CRYPT redirect |
| `control` | ID | field split and control bundle (`ctrl_t`) |
| `register_file` | ID | 32 x 32, two reads, one write, reset to zero, write-through |
| `key_register` | ID | 64-bit key, written a half at a time |
| `hazard_detection_unit` | ID | load-use stall |
| `forwarding_unit` | EX | operand source select |
| `alu` | EX | add, sub, and, or, xor, nor, slt, sltu, sll, srl, sra, lui |
| `mem_stage` | MEM | `data_memory`, encrypting and decrypting `des_core`s, store MUX, load DEMUX, sequencer |
| `data_memory` | MEM | 1 KiB byte array, 64-bit read, 4- or 8-byte write |
| `writeback` | WB | result MUX, key-register write steering |
| `des_core` | IF, MEM | iterative DES, 16 cycles |
| `mips_pkg`, `des_pkg` | | shared types, opcodes, DES tables and round functions |

Supported instructions:

* R-type: add, addu, sub, subu, and, or, xor, nor, slt, sltu, sll, srl, sra;
* immediate: addi, addiu, slti, sltiu, andi, ori, xori, lui;
* memory: lw, sw;
* control: beq, bne, j;
* new: lklw, lkuw, crypt.

Any other encoding executes as a no-operation. Additions wrap and never
trap.

### Top-level interface

| port | direction | width | meaning |
|------|-----------|-------|---------|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous, active high; clears PC, pipeline, registers, key, CryptEn (not the memories) |
| `load_we` | in | 1 | program load into instruction memory, one 8-byte block per cycle; use while `rst` is high |
| `load_addr` | in | 32 | byte address of the block being loaded |
| `load_block` | in | 64 | block being loaded |
| `dbg_pc` | out | 32 | fetch PC |
| `dbg_crypt_en` | out | 1 | CryptEn |
| `dbg_key` | out | 64 | key register |

Parameters: `IMEM_BYTES` and `DMEM_BYTES`, both 1024. There is no port for
preloading the data memory. Testbenches put an image into
`u_mem.u_dmem.mem` with `$readmemh`.

## Simulating

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=N failures=M`. Run them from the directory that holds
`rtl/` and `tb/`, because the hex files are opened by relative path.
For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/mips_pkg.sv rtl/des_pkg.sv tb/tb_encrypted_mips.sv \
    --top-module tb_encrypted_mips -o sim
./obj_dir/sim
```

* `tb_encrypted_mips` runs the example program at the default sizes and
  checks every register, the key, the cipher block at 56 and the untouched
  input array. It also counts the mechanisms listed above and fails any that
  never happened.
* `tb_mixed_program` runs a second program, `tb/mixed_imem.hex`, covering
  what the example does not:
  * every ALU operation, `lui`, and the zero-extended immediates;
  * a `bne` loop and a `beq` skip;
  * a plain store and load, followed by a dependent instruction;
  * switching encryption on and off again (`crypt 1` ... `crypt 0`);
  * reading in plain mode the cipher block that an encrypted store wrote.

  The instructions from `crypt 1` to `crypt 0` inclusive are encrypted.
* `tb_random_program` generates random programs of 110 instructions each:
  twelve in plain mode and four in encrypted mode. They use ALU, shift,
  immediate, `lui`, `lw`, `sw` and forward-branch instructions on six
  registers, so most operands are forwarded and load-use stalls are frequent.
  An instruction-by-instruction model inside the testbench runs each program
  too. The registers and the data window must match the model's.
  * An encrypted program starts with the plain key-load prologue and
    `crypt 1`.
  * Its loads and stores then use whole blocks, so every fetch and memory
    access freezes the pipeline while a DES core works.
  * The model's DES is checked first against the example's
    plaintext/ciphertext pair.

  Use `+verilator+seed+N` to vary the programs.
* The unit testbenches (`tb_des_core`, `tb_alu`, `tb_if_stage`,
  `tb_mem_stage`, ...) check each module against independently computed
  values. The DES vectors include the standard textbook vector and the
  example's own plaintext/ciphertext pair. The latency checks pin down the
  16- and 17-cycle figures.

To run your own program, assemble it into one instruction per 8-byte block.
Encrypt the blocks that follow your `crypt 1` with any DES implementation
and your key. Then load the blocks through `load_*` during reset. Put the key
words in data memory as plain 32-bit words, 8 bytes apart.

## Where this RTL departs from or extends the description

How far each part can be trusted:

* **Follows the published example exactly.** The block format, byte order,
  the opcodes of `lklw`/`lkuw`/`crypt`, and the branch and jump target
  rules. All of them were recovered by decrypting the published memory image
  with the published key, and the whole example reproduces the published
  results.
* **Follows the description in structure.** The three DES cores and where
  they sit, the CryptEn MUX/DEMUX, the key register written from WB, the
  forwarding unit, the hazard detector, and the two-NOP key rule.
* **This design's own choices**, because the description says nothing about
  them:
  * the iterative DES core (one round per cycle, 16 cycles);
  * freezing the whole pipeline during DES operations;
  * branch resolution in EX, jumps in ID, and no delay slots;
  * the per-instruction CryptEn tag and the re-fetch after `crypt`;
  * the instruction subset beyond the example;
  * memory sizes (data memory 1 KiB as in the published simulation;
    instruction memory also 1 KiB);
  * synchronous reset and the program load port.
* **Not reproduced.** The cycle count of the published run (1344; here
  1664), the FPGA results (218 MHz and the resource counts on a Virtex-6),
  and the quoted instruction throughput of 19 Mbit/s.
