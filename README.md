# A pipelined MIPS processor that runs enciphered code

This is a 32-bit, five-stage MIPS pipeline that keeps its program and its
data in memory under Triple-DES. Each fetched instruction block is deciphered
between the instruction memory and the decoder. Each word loaded from data
memory is deciphered on its way to the register file, and each word stored is
enciphered before it reaches memory. Anyone who reads the memories sees only
cipher blocks. The keys are held inside the processor and are loaded by two
added instructions. A third added instruction, `CRYPT`, switches the ciphers
on or off. A program therefore starts in clear code, loads its keys, executes
`CRYPT 1` and carries on in enciphered code.

The RTL reconstructs the "MIPS cryptography processor based on T-DES" design
published by K. P. Singh and S. Parmar. It follows that description and the
memory images printed with it. Where the description says nothing, this RTL
makes its own choices, and they are listed in the sections below. The two
example programs of the publication run unmodified on this RTL and produce
the published results bit for bit (see *Verification*).

The design has two variants, selected by one parameter:

| `ENCRYPTED` | name | instruction path | load path | store path |
|---|---|---|---|---|
| 1 (default) | encrypted processor | decrypt | decrypt | encrypt |
| 0 | decrypted processor | encrypt | encrypt | decrypt |

The variants are the same hardware with the direction of every cipher core
reversed. In the rest of this text "decipher" means the direction that
recovers clear values, whichever variant is meant.

## Block diagram

```
             +-------------------- CryptEn (mode register, set by CRYPT in ID) ------------------+
             |                                   |                         |                     |
   PC --> Instruction --+--> T-DES --+      Register file            +--> T-DES --+         T-DES
   (+8)    memory 64b   |            v      + key register            |            v           |
                        +---------> MUX -> IF/ID -> ID/EX -> ALU -> EX/MEM ---> MUX -> Data --> DEMUX --> MEM/WB -> WB MUX
                                             ^        ^                                 memory                  |
                                 hazard detector   forwarding unit <--------------------------------------------+
```

| stage | RTL | contents |
|---|---|---|
| IF | `fetch_stage` | PC, `instr_mem`, one `tdes_core`, bypass multiplexer |
| ID | `mips_crypto`, `control_unit`, `regfile`, `key_register`, `hazard_detector` | decode, register read, jump resolution, CRYPT |
| EXE | `alu` (with `hybrid_adder`), `forwarding_unit` | ALU, operand bypass, branch resolution |
| MEM | `mem_stage` | `data_mem`, store-path `tdes_core`, load-path `tdes_core`, multiplexer and demultiplexer |
| WB | `wb_stage` | write-back multiplexer, key-word routing |

The top module `mips_crypto` holds the four pipeline registers and the stall
and flush logic. Shared types live in `mips_pkg` (opcodes, the control word,
forwarding selections). The DES tables and round functions live in `des_pkg`.

## Memory format: one instruction per 64-bit block

DES enciphers 64-bit blocks, so both memories are 64 bits wide. The PC
advances by 8. A block holds one 32-bit value in its low half, and the high
half is zero. This holds for instructions and data, in clear and in cipher
form. Within a block the bytes are little-endian. A clear instruction
`addi $1,$0,104` is therefore stored as the bytes `68 00 01 20 00 00 00 00`.
An enciphered instruction is the 64-bit cipher of `0x00000000_20010068`.

The publication also speaks of packing two instructions into one block. Its
own memory images never do this: every enciphered block there deciphers to a
single instruction over a zero word. This RTL follows the images. The high
half of a deciphered instruction block is ignored.

Memories are 1 KiB each (a 10-bit byte address), with a combinational read
port, so on an FPGA they map to distributed RAM. `IMEM_BYTES` and
`DMEM_BYTES` change their sizes.

## The added instructions

| instruction | encoding | effect |
|---|---|---|
| `LKLW` / `LKUW off(rs)` | opcode `0x3E`, I-type, `rt` = key word 0..5 | key word `rt` ← low word of data block at `rs + off`, always read in clear |
| `CRYPT n` | opcode `0x3F`, J-type, 26-bit argument | cipher mode ← (`n` ≠ 0) |

The key words are numbered key1 low, key1 high, key2 low, key2 high, key3
low, key3 high. The publication describes `LKLW` and `LKUW` as two
instructions. In its program image both carry the same opcode, and only the
`rt` field (0 to 5) tells the six loads apart. This is also how the decoder
here treats them. The key words are written in the WB stage. Nothing forwards
a key to the cipher cores, so software has to leave a few NOPs between the
last key load and `CRYPT`. The example program uses four.

The remaining instructions are the usual MIPS-I integer subset: the R-type
ALU operations and shifts, `ADDI(U)`, `SLTI(U)`, `ANDI`, `ORI`, `XORI`,
`LUI`, `LW`, `SW`, `BEQ`, `BNE` and `J`. Words the decoder does not know
execute as NOPs. There are no exceptions.

Control-flow targets are as follows:

- **Branch** (`BEQ`, `BNE`): PC + 8 + sign-extended offset, with the offset
  in bytes.
- **Jump** (`J`): `{PC[31:28], target, 2'b00}`.

The text of the publication does not state these two rules. They are the
only ones under which its program image branches and jumps to its own labels.

## Cipher mode and how it meets the pipeline

This is the part of the design that is least like a textbook MIPS.

**Switching.** `CRYPT` is decoded in ID. The cipher-mode register changes
when `CRYPT` leaves ID. The fetch unit also sees a `CRYPT` that is still in
ID, so the block right after `CRYPT` is already fetched in the new mode. The
program image relies on this: `CRYPT 1` sits at address 160 and the first
enciphered block at 168. A load or store takes the mode that was in force
when it passed ID and carries it down the pipeline.

**The cipher core.** `tdes_core` computes the three DES passes as one chain
of 48 Feistel rounds on a single 64-bit register. It runs `RPC` rounds per
clock (default 2). The keying is EDE:

- encrypt: E_K3(D_K2(E_K1(x)))
- decrypt: D_K1(E_K2(D_K3(x)))

The round keys are computed from the key and the round number as they are
needed, so no key schedule is stored. The core starts on a one-cycle `start`
pulse. `done` rises 48/`RPC` clock edges later and stays high until the next
start.

**Fetch in cipher mode.** When the PC reaches a new block, the fetch unit
starts its core in the first cycle. The instruction becomes valid 1 + 48/RPC
cycles later (25 at the default). Until then the fetch unit sends bubbles
into IF/ID. A redirect abandons a run in progress. In clear mode the fetch
unit delivers one instruction per cycle.

**Data in cipher mode.** A cipher load reads the 64-bit block and deciphers
it in the load-path core. A cipher store zero-extends the register to 64
bits, enciphers it in the store-path core and writes the whole block. During
the 1 + 48/RPC cycles of the cipher run, the MEM stage raises `busy`. IF,
IF/ID, ID/EX and EX/MEM then hold, and bubbles enter MEM/WB. While ID/EX is
held, the operands of the instruction in EXE are refreshed from the
forwarding network every cycle. This matters when the producer of an operand
retires during the stall: without the refresh, its result would be lost.
With cipher-mode fetch as built, instructions are too far apart for this
case to occur. The refresh keeps the stall correct without relying on that.
Clear loads and stores move the 32-bit half of the block selected by address
bit 2.

Table 3 of the publication gives a latency of 21 cycles per instruction and
a throughput of 636 Mbit/s, which is 64 bits every 21 cycles at 209 MHz. The
48 rounds cannot be split evenly over 21 cycles. `RPC` = 2 (24 round cycles)
is the nearest whole choice. Other divisors of 48 trade area against
latency: `RPC` = 3 gives 16 round cycles, and `RPC` = 48 gives one
fully-unrolled cycle. The example program then reaches its final store after
a different number of cycles. The publication's waveform shows its result
after 16232 ps at a 4 ps clock. This RTL takes 1996 cycles; the paper's
scale is unclear, so nothing was matched to it.

## Hazards

- **Forwarding.** The ALU result of the instruction in MEM, or else the
  write-back value in WB, is bypassed into EXE. This feeds the ALU, the
  branch comparator, the store data and the base address of the key loads.
  The register file writes through, which covers the path from WB to ID.
- **Load-use stall.** When a load in EXE feeds the instruction in ID, the
  hazard detector holds PC and IF/ID for one cycle and inserts a bubble into
  ID/EX.
- **Branches** are resolved in EXE. When taken, they flush IF/ID and ID/EX,
  which costs two cycles. **Jumps** are resolved in ID and flush IF/ID, which
  costs one cycle. There are no delay slots. The publication names both a
  flush mechanism and a NOP-filled delayed jump; its program has no NOPs
  after its branches, so flushing is what is built.
- **Cipher stalls** in IF and in MEM, as described above. A MEM stall takes
  precedence over everything else, and a redirect waits until it ends.

## Loading the memories

Reset (`rst`) is synchronous and active high. It clears the PC, the pipeline,
the registers, the keys and the cipher mode, but not the memories. While
`rst` is high, a host can reach both memories over a 32-bit bus:

- `ext_addr`: byte address of a 32-bit half block.
- `ext_wdata` / `ext_rdata`: data to and from the processor. These two ports
  take the place of the publication's single bidirectional bus.
- Four controls: `ext_we`, `ext_re`, `ext_imem`, `ext_dmem`.

When `rst` is released, execution starts at address 0. The publication gives
the two reset polarities in two places. The one used here matches its
waveforms, where the processor runs while reset is low. The publication also
mentions writing registers over the bus; that is not provided.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values worked out separately. These come from a behavioural model in the
testbench, from known-answer vectors or from hand-computed results.

- `tdes_core_tb` uses the classic single-DES example
  (key 133457799BBCDFF1, 0123456789ABCDEF → 85E813540F0AB405), the
  publication's store vector (0x38 → 0x2542b17039a61551 with keys 0, 0,
  0x4b4952415450414c) and its decrypt vector (→ 0x2c824fe86704fd6e), plus
  random three-key vectors. It runs both directions and checks the latency.
- `mips_crypto_tb` is the full design at default parameters. It runs the
  array-sum program of the publication's encrypted-processor example: 21
  clear blocks, then 15 enciphered ones. The program sums seven enciphered
  array elements (2, 4, …, 14) and stores the enciphered sum. The test
  checks registers r1 to r7 against the published register window, the three
  keys, and the stored block 0x2542b17039a61551. A second, clear program
  covers the load-use stall and a taken `BNE`. The test counts forwarding
  from both stages, load-use stalls, branch and jump flushes, cipher fetch
  waits, cipher loads and stores, key loads and mode switches. It fails if
  any of them never occurs.
- `mips_crypto_dec_tb` runs the same program with the decrypted-processor
  images (`ENCRYPTED` = 0) and expects the block 0x2c824fe86704fd6e.
- `mips_crypto_random_tb` runs 24 random programs, half in clear mode and
  half in cipher mode. Each loads random keys and runs about 50 random ALU,
  immediate, shift, load, store, forward-branch and forward-jump
  instructions over r0 to r7. It compares the registers with an
  instruction-set model in the testbench. For the cipher-mode programs, a
  separate `tdes_core` instance in the testbench enciphers the code. The
  model needs no cipher, because a word stored enciphered and loaded back
  returns unchanged.

One limit of these tests: in cipher mode every instruction waits for its own
decipherment, so instructions arrive at least 25 cycles apart. Operand
hazards then cannot meet a cipher stall in MEM, and the operand refresh
described under *Data in cipher mode* is never exercised.

The program and data images are `tb/prog_enc_*.hex` and `tb/prog_dec_*.hex`.
They hold one 64-bit block per line, in word-address order, with the data
image running up to the keys at 104 to 151. They are the publication's
memory images. One byte of the encrypted image, at address 236, is printed
as `ED`. It must be `BD`, since only then does the block decipher to the
`lw $6,0($5)` the program needs. The file has `BD`.

To simulate, for example the end-to-end test, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    --top-module mips_crypto_tb rtl/mips_pkg.sv rtl/des_pkg.sv tb/mips_crypto_tb.sv
./obj_dir/Vmips_crypto_tb
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. The
testbenches read the `.hex` files by paths relative to that directory.

## What is not reproduced

- The timing and area figures (209 MHz on a Virtex-6, about 69k LUTs and 10k
  registers) belong to the authors' VHDL on an FPGA. They are not a property
  of this RTL.
- The 21-cycle latency: see *Cipher mode* above.
- Packing two instructions per block: see *Memory format* above.
- Writing registers over the load bus.
