# Crypto-RV: a buffered multi-algorithm hash and cipher co-processor

Hash and cipher kernels run badly on a plain RISC-V core. The state and message words keep
moving between memory and registers, and those loads and stores take most of the cycles.
This co-processor keeps everything a kernel touches in a 128-word, 64-bit-wide internal
**Buffer** that all crypto units read in parallel. A larger 1024-word **Data Memory (DM)**
sits between the Buffer and the host. Three shared-datapath units do the arithmetic:

| Unit | Algorithms | Work per command | Cycles, start to done |
|---|---|---|---|
| `sha2_sm3_unit` | SHA-256, SM3 (two independent 32-bit lanes), SHA-512 | one compression | 65 (SHA-256/SM3), 81 (SHA-512) |
| `sha3_unit` | Keccak-f[1600] for SHA3-256, SHA3-512, SHAKE-128, SHAKE-256 | one permutation, two rounds per cycle | 12 |
| `aes_haraka_unit` | AES-128 encryption and decryption, Haraka-256, Haraka-512 (v2), Haraka-512 permutation | one block | 44 (11 passes through 4 stages) |

Every unit copies its operands out of the Buffer in the cycle it starts. So while a unit
computes, the transfer engine can already write the next message block into the Buffer.
This is the design's **double buffering**, and it is what lets long streams run at compute
speed. A small command sequencer drives all of this from a program held in instruction
memory. In the complete system a RISC-V pipeline with custom instructions would do that
job.

The RTL is SystemVerilog-2017. It is synthesizable apart from the assertions, and it is
verified against independent software references: Python `hashlib`, a reference AES, and a
Haraka v2 model.

## Block diagram

```
            64-bit DMA port                       32-bit PIO port
                 |                                     |
        +--------v---------+                  +--------v--------+
        | data_memory      |                  | pio_regs        |--> instr_mem (1024 x 32)
        | 1024 x 64, 2-port|                  | CTRL/STATUS/    |        |
        +--------^---------+                  | counters        |        v
                 | port b                     +-----------------+  crypto_controller
        +--------v---------+   write port a                        (fetch, decode, issue,
        | address_calc     |----------------+                       operand addressing,
        | (LOAD / STORE)   |                |                       result write-back)
        +------------------+       +--------v---------+                   |
                                   | internal_buffer  |<-- write port b --+
                                   | 128 x 64 flops   |
                                   +--------+---------+
                                            | all 128 words, read in parallel
                      +---------------------+---------------------+
                      v                     v                     v
               sha2_sm3_unit           sha3_unit           aes_haraka_unit
```

`crypto_rv_top` connects these blocks. Its ports are the DMA port (`dma_we`, `dma_addr`,
`dma_wdata`, `dma_rdata`, one-cycle read latency), the PIO port (`pio_we`, `pio_re`,
`pio_addr`, `pio_wdata`, `pio_rdata`, one-cycle read latency) and `irq`, which is high once
the program has halted. The system around it is not included: an AXI manager, the ARM host
and DDR4 memory. The host is expected to reach the two ports through its own AXI bridge.

## Memories

* **Data Memory** (`data_memory`): 1024 × 64-bit, true dual-port, synchronous read. Port a
  belongs to the host and port b to the transfer engine. Transfers wrap from word 1023 to
  word 0, so a program can treat DM as a ring that the host refills behind it.
* **Buffer** (`internal_buffer`): 128 × 64-bit flip-flops with two write ports.
  * Port a is for the transfer engine.
  * Port b is for result write-back, and wins when both ports write the same word. An
    assertion flags that case.
  * All 128 words are outputs, so each unit can read its whole operand in one cycle: 16
    message words, 8 state words, 25 Keccak lanes or 8 AES words. This wide read is the
    point of the Buffer.
* **Instruction memory** (`instr_mem`): 1024 × 32-bit. The host writes it over PIO and the
  sequencer reads it.

## The command program

A program is a list of 32-bit words in instruction memory. The top four bits of each word
are the opcode. The encoding belongs to this design.

| Op | Code | Fields | Effect |
|---|---|---|---|
| HALT | 0 | – | stop; STATUS.halted and `irq` go high |
| LOAD | 1 | [27:18] DM address, [17:11] Buffer address, [10:4] length−1 | copy 1–128 words DM → Buffer |
| STORE | 2 | same | copy Buffer → DM |
| SHA2 | 3 | [27:26] mode (0 SHA-256, 1 SM3, 2 SHA-512), [25:19] state base `sb`, [18:12] message base `mb`, [11:5] constant base `kb` | compress B[mb..mb+15] into B[sb..sb+7] |
| SHA3 | 4 | [27:26] mode (0 SHA3-256, 1 SHAKE-128, 2 SHAKE-256, 3 SHA3-512), [25] init, [24] absorb, [23:17] `mb`, [16:10] output base `ob`, [9:5] output words `n` | one sponge step, then copy `n` state words to B[ob..] |
| AES | 5 | [27:25] mode (0 AES-128, 1 Haraka-256, 2 Haraka-512, 3 Haraka-512 permutation, 4 AES-128 decryption), [24:18] input base, [17:11] key/RC base, [10:4] output base | one block |
| WAIT | 6 | [1] compute engine, [0] transfer engine | stall until the named engines are idle |

### Issue rules

The sequencer fetches one command per cycle and issues it on the next cycle. It stalls
when a command cannot issue. There are two engines:

* the **transfer engine**, which runs LOAD and STORE;
* the **compute engine**, which is the three units together with the result write-back.
  The write-back copies one word per cycle into the Buffer after the unit's `done`.

The rules:

* LOAD and STORE wait only for the transfer engine.
* A crypto command waits for both engines. It needs its operands complete, and only one
  unit result can be in write-back at a time.
* Nothing stops a LOAD from following a crypto command at once. The LOAD then runs while
  the unit computes, which is the overlap the design is built for.
* The program must not overwrite a region that a running unit will write back. It must also
  put a `WAIT 2` (compute) before storing a result.

Three counters are visible over PIO:

* STALL: cycles in which a fetched command waited.
* OVLP: cycles in which a transfer and a unit ran at the same time.
* CMDS: commands issued.

A typical two-lane SHA-256 stream looks like this:

```
LOAD  K   -> B[0..63]
LOAD  IV  -> B[64..71]
LOAD  M1  -> B[72..87]
SHA2  256, sb=64, mb=72, kb=0
LOAD  M2  -> B[88..103]      ; overlaps the compression of M1
SHA2  256, sb=64, mb=88, kb=0 ; waits until M1 is done and written back
LOAD  M3  -> B[72..87]       ; overlaps M2
...
WAIT  2
STORE B[64..71] -> DM
HALT
```

## Register map (PIO, word addresses)

| Address | Name | Access |
|---|---|---|
| 0x000–0x3FF | instruction memory | write |
| 0x800 | CTRL | write bit 0 = 1: start the program at word 0 (ignored while running) |
| 0x801 | STATUS | bit 0 running, bit 1 halted |
| 0x802 | STALL | stall cycles of the last or current run |
| 0x803 | OVLP | transfer/compute overlap cycles |
| 0x804 | CMDS | commands issued |
| 0x805 | CYCLES | clock cycles since the start |

A read returns data one cycle after the cycle with `pio_re` high.

## SHA-256 / SM3 / SHA-512 unit

Each command compresses one block: `state_out = F(state_in, block)`. The unit is built
from three parts.

* **Message expander.** A 16-word sliding window that produces one new schedule word each
  cycle: the SHA σ0/σ1 sums, or the SM3 P1 expansion.
* **Compressor.** One round per cycle.
  * SHA-2 uses the Σ, Ch and Maj functions.
  * SM3 uses SS1/SS2, FF/GG, the <<<9 and <<<19 rotations of the B and F words, and the P0
    permutation.
  * A mode register selects between them.
* **Feed-forward.** Runs after the last round: addition for SHA-2, XOR for SM3.

Word layout in the two modes:

* SHA-512: full 64-bit words, 80 rounds.
* SHA-256 and SM3: each 64-bit Buffer word holds two 32-bit words, lane 0 in bits [31:0]
  and lane 1 in bits [63:32]. The two lanes are two independent messages that the unit
  compresses side by side, in 64 rounds.

The unit keeps no round constants. In each round it outputs the round number on `k_idx`
and reads B[kb + k_idx]. The host must place these tables in DM and load them:

* SHA-256: K[j] in bits [31:0]. K[j] is the first 32 bits of the fractional part of the
  cube root of the (j+1)-th prime.
* SHA-512: K[j] as 64 bits, built the same way. It needs 80 Buffer words.
* SM3: `T_j <<< (j mod 32)` in bits [31:0], with T_j = 0x79CC4519 for j < 16 and
  0x7A879D8A otherwise.

Bits [63:32] of these words are ignored in the 32-bit modes. The testbenches read the two
SHA tables from `tb/sha256_k.hex` and `tb/sha512_k.hex`, and compute the SM3 table.

## SHA3 / SHAKE unit

The 1600-bit state register sits behind two full Keccak rounds (θ ρ π χ ι) chained in
logic, so the 24 rounds take 12 cycles. An input mux chooses between an external state (on
the first cycle) and the fed-back register. The 24 ι constants are computed at elaboration
from the standard LFSR.

The sponge itself is handled by the sequencer. A SHA3 command builds the permutation input
as `(init ? 0 : current_state) XOR (absorb ? B[mb .. mb+rate-1] : 0)` and zero-extends it
to 25 lanes. The rate is 17 words for SHA3-256 and SHAKE-256, 21 words for SHAKE-128 and 9 words for
SHA3-512.
After the permutation it copies `n` lanes (up to 25) to B[ob..]. The command sequences are:

* Absorbing block *i*: `init` = (i == 0), `absorb` = 1.
* Squeezing: `init` = 0, `absorb` = 0. Each such command permutes again and emits the next
  `n` words.

Software supplies the padding: the domain byte (0x06 for SHA3, 0x1F for SHAKE) and a final
0x80 in the last byte of the rate. The lane order is x + 5y, little-endian bytes, as in
FIPS 202.

## AES-128 / Haraka unit

The unit has four 128-bit lanes. Lane i is Buffer words {2i+1, 2i}, with byte 0 in bits
[7:0]. Each pass of the pipeline is one AES round:

1. **SubBytes.**
2. **ShiftRows + MixColumns.** A bypass skips MixColumns in the last AES-128 round.
3. **AddRoundKey.** On the first pass an initialize mux takes the input block in place of
   the stage-2 result.
4. **Output stage.** In Haraka modes the mix layer (MIX2 or MIX4, made of 32-bit
   unpack-lo/hi shuffles) runs after every second AES round. After the final pass, the
   Davies-Meyer feed-forward (XOR with the input) and the Haraka-512 truncation run.

A command makes 11 passes. The first is key whitening (AES) or a plain load (Haraka). The
remaining 10 are AES rounds. Haraka v2 runs 5 rounds of 2 AES rounds per lane.

Decryption uses the *equivalent inverse cipher*, whose round order matches the three
stages. Stage 1 applies the inverse S-box. Stage 2 applies InvShiftRows and InvMixColumns,
with the same last-round bypass. Stage 3 adds the round key. For this to work, the middle
round keys must be passed through InvMixColumns beforehand, which software does when it
prepares the key table.

Keys and round constants come from the Buffer. In pass p the unit reads eight words at
`kb + key_addr`:

| Mode | key_addr in pass p | Table in the Buffer |
|---|---|---|
| AES-128 | 2p | RK0..RK10: 22 words of expanded key, made by software |
| AES-128 decryption | 2p | RK10, InvMixColumns(RK9) … InvMixColumns(RK1), RK0: 22 words |
| Haraka-256 | 4(p−1) | 20 RCs × 128 bits: 40 words |
| Haraka-512 | 8(p−1) | 40 RCs: 80 words |

Haraka's round constants can be derived from a public seed. Mode 3 (Haraka-512
permutation) returns all 512 bits without feed-forward or truncation, so a program can
chain it to produce RC words inside the co-processor.

Output sizes:

* AES and AES decryption: 2 words.
* Haraka-256: 4 words.
* Haraka-512: 4 words (the 256-bit truncation: high half of lanes 0 and 1, low half of
  lanes 2 and 3).
* Permutation: 8 words.

The testbenches use pseudo-random RCs from a xorshift64 generator with the standard
Haraka structure, because the standard RC values are a table of numbers. The hardware
takes whatever RCs the Buffer holds.

## Timing summary

| Event | Cycles |
|---|---|
| Command fetch + issue | 2 per command, plus stalls |
| LOAD of n words | n + 1 (DM read latency), transfer engine busy |
| STORE of n words | n |
| SHA2 compression | 65 / 81, plus 8 write-back |
| SHA3 permutation | 12, plus n write-back |
| AES / Haraka block | 44, plus 2/4/8 write-back |

The full end-to-end test takes 1389 cycles. It runs 50 commands covering every mode, with
two-block messages on SHA-256/SM3 and SHA-512, and 42-word SHAKE output.

## Cost of one complete operation

`tb_crypto_rv_table` runs each algorithm once, at the message sizes used in the published
comparison, as a complete program:

1. load the constants or keys;
2. load the message (a second block is loaded while the first is compressed);
3. compute;
4. write back and store the result.

The counts are from start to halt.

| Operation | Message | Cycles here | Published total |
|---|---|---|---|
| SHA-256 | 64 B (2 blocks) | 259 | 146 |
| SM3 | 64 B (2 blocks) | 259 | 144 |
| SHA-512 | 128 B (2 blocks) | 307 | 263 |
| SHAKE-128 | 100 B in, 32 B out | 51 | 265 |
| SHAKE-256 | 100 B in, 32 B out | 47 | 261 |
| SHA3-256 | 64 B | 47 | 261 |
| SHA3-512 | 64 B | 47 | not published |
| AES-128 | 16 B | 83 | 98 |
| Haraka-256 | 32 B | 109 | 110 |
| Haraka-512 | 64 B | 151 | 205 |

Where the time goes differs by algorithm:

* **SHA-2/SM3.** Loading the 64- or 80-word constant table costs 65–81 cycles on every
  single-message run, and each block adds 8 write-back cycles. A stream of messages pays
  for the table only once (see below).
* **Sponge.** One load and a 12-cycle permutation.
* **AES and Haraka.** The key or RC table load plus 44 cycles.

The published totals are shown for orientation only: the instruction set and the host
interface differ.

## Streaming: Data Memory as a ring

Two streaming patterns are what the double buffering is for. Both run in
`tb_crypto_rv_stream` at full size.

* **Long-message chaining.** The constants and the chaining state stay in the Buffer. Blocks
  alternate between two Buffer slots: block i+1 is loaded while block i is compressed. DM
  is a ring of 64-block slots. The host polls CMDS and rewrites a slot once its block has
  been loaded, so the message length is not bounded by DM. Two 237-block SHA-256 messages,
  one per lane, take 17,884 cycles. The compressions alone take 237 × 65 = 15,405 cycles,
  so the run spends about 1.16× the compute time. The 17-cycle loads are hidden entirely;
  what remains is 8 cycles of write-back and 2 of command issue per block.
* **Many-hash.** Each command hashes two short messages. Every pair arrives as a 24-word
  record (two-lane IV and block) and leaves as 8 digest words. Records flow through a ring
  in DM[64:783] and digests through a ring in DM[784:1023], which the host drains while the
  program runs. 120 instances take 5,256 cycles, about 88 per pair.
* **Long sponge inputs.** Absorbing works the same way: block i+1 is loaded while block i
  is permuted. Here the 17- or 21-word load (18–22 cycles) is longer than the 12-cycle
  permutation, so the transfer sets the pace. A 20-block SHA3-256 message and a 6-block
  SHAKE-128 message take 609 cycles together, about 23 cycles per block.

The co-processor has no flow control towards the host. A program runs at full speed, and
the host must keep ahead of it by watching CMDS. The command index at which each slot is
consumed is known from the program.

## Where this design departs from the published architecture

* **Sequencer instead of a RISC-V pipeline.** The published design issues these operations
  as custom instructions in a RISC-V pipeline. Here a small sequencer runs a command list
  with its own encoding. The data path underneath is the same: Buffer, units, address
  calculation and DM.
* **SHA-2/SM3 round in one cycle.** The original splits each round into a four-stage
  pipeline with one adder per stage, for a short critical path. Here a whole round is
  computed in one cycle. The throughput is the same (one round per cycle), but the
  combinational path is longer.
* **AES/Haraka unit with one block in flight.** A command goes through the four stages one
  after another, so each AES round costs four cycles.
* **Haraka round counts.** This design implements Haraka v2: 10 AES rounds per lane, which
  is 20 lane-rounds for Haraka-256 and 40 for Haraka-512. The published text quotes 32 and
  64 "rounds", which matches no Haraka variant.
* **SHA3 family.** The published list of primitives includes SHA3-512, which is provided as
  SHA3 mode 3. A "SHAKE-512" also appears in one sentence there, but no such standard
  function exists, so it has no mode.
* **Host interface.** DMA and PIO are plain memory and register ports, not AXI.
* **Haraka RC generation.** There is no built-in controller for it. The permutation mode
  is provided as the primitive.
* **Cycle counts.** They are not matched cycle for cycle to the published totals (for
  example 146 cycles for a 64-byte SHA-256), because those include host data movement that
  is not specified.

## Files

`rtl/` holds one module or package per file. Everything imports `crypto_rv_pkg`, which must
be compiled first.

| File | Content |
|---|---|
| crypto_rv_pkg.sv | sizes, command encoding, mode enums, AES/Keccak/SHA functions, S-box and ι constants computed at elaboration |
| data_memory.sv, instr_mem.sv, internal_buffer.sv | memories |
| address_calc.sv | LOAD/STORE transfer engine |
| sha2_sm3_unit.sv, sha3_unit.sv, aes_haraka_unit.sv | crypto units |
| crypto_controller.sv | sequencer, operand selection, write-back |
| pio_regs.sv | PIO register file |
| crypto_rv_top.sv | top level |

`tb/` holds:

* one self-checking testbench per module, `tb_<module>.sv`;
* the workload tests `tb_crypto_rv_table.sv` (one operation per algorithm) and
  `tb_crypto_rv_stream.sv` (streaming);
* `tb_crypto_pkg.sv` with message generators, padding helpers and expected digests;
* the two K tables.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Simulating

Run from the project root, since the testbenches read `tb/*.hex` by relative path. For
example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/crypto_rv_pkg.sv rtl/*.sv tb/tb_crypto_pkg.sv tb/tb_crypto_rv_top.sv \
  --top-module tb_crypto_rv_top -o sim
./obj_dir/sim
```

A unit testbench needs only the package files and its module, for example
`rtl/crypto_rv_pkg.sv tb/tb_crypto_pkg.sv rtl/sha3_unit.sv tb/tb_sha3_unit.sv`.
`tb_crypto_rv_top` runs the top at its default sizes in a few seconds.

Expected values in `tb_crypto_pkg.sv` come from standard implementations:

* SHA-256, SHA-512, SHA3-256 and SHAKE-128/256 from a FIPS reference library;
* SM3 from an independent implementation;
* AES from a reference cipher;
* Haraka from a software model of Haraka v2 using the same RCs.

The message bytes follow `byte(seed, i) = (seed + 13 i + (i >> 3)) mod 256`.
