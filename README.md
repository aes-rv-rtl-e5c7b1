# AES-RV: a RISC-V core with an AES instruction extension

Doing AES in software on a small RISC-V core costs hundreds of thousands of
cycles per handful of blocks. Most of that time goes into moving bytes around,
not into the cipher. AES-RV tackles this in three ways:

* **A wide buffer set next to the pipeline.** It holds the key, the IV and up
  to 61 data blocks.
* **A specialized AES unit (SAU).** One custom instruction runs a whole
  sequence of blocks in ECB, CBC, CFB or CTR mode, with a 128-, 192- or
  256-bit key.
* **A ping-pong data memory.** The host fills and empties one half while the
  core works on the other.

This repository holds synthesizable SystemVerilog for the whole accelerator:

* the five-stage pipeline;
* the buffer set and the unit that fills and drains it;
* the SAU and its multi-mode AES core (controller, key expansion, four-stage
  cipher loop);
* the instruction and data memories;
* the run/done state machine;
* an AXI4-Lite slave for the host.

It also holds self-checking testbenches for every module, an end-to-end test
over AXI, and a workload test. The workload test streams 8,192 CBC blocks and
100,000 random blocks per mode through the accelerator.

The host processor is not part of the RTL. It is the CPU that compiles the
program and schedules the data. The testbenches play its role through the
AXI port.

## How a job runs

1. **Load the program (once).** The host writes a RISC-V program into the
   instruction memory.
2. **Write the job.** For each job, the host writes these words into one half
   of the data memory: the key, the IV and the plaintext blocks.
3. **Start.** The host writes CONTROL with the start bit and the half
   (0 = first, 1 = last).
4. **Run.** The state controller latches the half, clears the pipeline to
   PC 0 and lets the core run. A typical program has six custom instructions:

   ```
   buf.latch  r8, r20     # r8 = DM word address, r20 = amount
   buf.load               # DM -> buffers (key, IV, blocks)
   aes128.cbc r5          # r5 = number of blocks
   buf.latch  r8, r20     # point at the IV/results area
   buf.store              # buffers -> DM (chaining value + ciphertext)
   ecall                  # end of program: raises done
   ```

5. **Finish.** When `ecall` reaches writeback, the state controller shows
   `done` in STATUS. The host then reads the results.

In the ping-pong schedule the host never waits for the core. While job *j*
runs on one half, the host does two things in the other half:

* reads the results of job *j−1*;
* writes the input of job *j+1*.

The program uses data-memory addresses in the first half. The core XORs the
latched half bit into the top address bit of every data access. So the same
program serves both halves without change.

## The custom instructions

| opcode  | funct3 | meaning |
|---------|--------|---------|
| 0101011 | 000 | latch base address (rs1) and amount (rs2) |
| 0101011 | 001 | load: data memory → buffers |
| 0101011 | 010 | store: buffers → data memory |
| 0001011 | mode | AES-128 on rs1 blocks |
| 1001011 | mode | AES-192 on rs1 blocks |
| 1101011 | mode | AES-256 on rs1 blocks |

The mode field is funct3: 000 ECB, 001 CFB, 010 CBC, 011 CTR.

For latch, load and store:

* The base is a data-memory **word** address.
* The amount register holds two fields:
  * bits [8:0]: the word count, 1–256, where 0 means 256;
  * bits [23:16]: the first buffer index. This lets a store start at the IV
    area instead of at the key.
* By convention programs pass the base in r8 and the amount in r20. The
  decoder takes whatever registers the instruction names.

Custom instructions write no destination register.

## Buffer set and layout

The buffer set is 256 × 32-bit registers. It has three paths:

* **Word path** (one word per cycle): used by the buffer access unit, which
  streams words to and from data memory port A.
* **Parallel read**: the SAU reads all 256 words at once. It therefore sees a
  whole block, or the whole key, in a single cycle.
* **Block write**: the SAU writes 128-bit results back four words at a time.

The SAU expects this layout:

| words | content |
|-------|---------|
| 0–7   | key (the first 4, 6 or 8 words are used) |
| 8–11  | IV, chaining value or counter |
| 12+4k … 15+4k | block k, k = 0 … 60 |

Each result overwrites its plaintext. When the run ends, the final chaining
value (the next counter, in CTR mode) goes back to words 8–11. So
`store 4+4n words from buffer 8` returns everything the host needs to continue
the stream with the next job. Byte order follows FIPS-197: the first byte of a
block is bits [127:120] of the word group, and word 12+4k holds the most
significant word of block k.

## The specialized AES unit

The SAU wraps the AES core with the mode logic. V is the IV/chaining register
and E is the AES core.

| mode | core input | result | next V |
|------|-----------|--------|--------|
| ECB | P | E(P) | — |
| CBC | P ⊕ V | E(P ⊕ V) | result |
| CFB | V | E(V) ⊕ P | result |
| CTR | V | E(V) ⊕ P | V + 1 (128-bit) |

CFB is the full 128-bit feedback variant. Only encryption is provided.
Decryption in ECB and CBC would need the inverse cipher, which this design
does not describe. CTR decryption is the same operation as CTR encryption,
so CTR streams can be decrypted as they are. CFB decryption would also need
the feedback taken from the input rather than the result; that path is not
built.

Inside the AES core, the three parts work like this:

* **Controller.** Turns the key size into the round count (10/12/14). It runs
  the key expansion before the first block of an instruction only. Later
  blocks reuse the stored schedule.
* **Key expansion.** Produces one schedule word per cycle with the usual
  RotWord / SubWord / round-constant recurrence. The round constant comes
  from repeated doubling in GF(2⁸), not from a table.
* **Cipher.** Four registers cut the round loop:
  * before SubBytes;
  * after SubBytes;
  * after ShiftRows;
  * after MixColumns.

  The last round leaves the loop after ShiftRows through the final
  AddRoundKey. One block is in flight at a time, because CBC and CFB need
  each result before the next input exists. A round therefore takes four
  cycles.

The S-box is computed rather than stored: inversion in GF(2⁸) as x²⁵⁴,
followed by the affine map. This keeps the RTL free of tables. A ROM would be
a drop-in replacement for `aesrv_pkg::sbox`.

### Latencies (clock edges from the start pulse)

| operation | AES-128 | AES-192 | AES-256 | formula |
|-----------|---------|---------|---------|---------|
| key expansion | 40 | 46 | 52 | 4(Nr+1) − Nk |
| one block through the cipher | 39 | 47 | 55 | 4Nr − 1 |
| SAU, n blocks | 43n + 42 | 51n + 48 | 59n + 54 | (key exp. + 3) + n(4Nr + 3) − 1 |
| buffer load / store of N words | N+1 / N | | | one word per cycle |

Measured on complete jobs, including program overhead and a checksum loop,
the core finishes a 4-block job in 425, 463 and 501 cycles for 128-, 192- and
256-bit keys. The mode does not change the count. In long streams of 61-block
jobs the core is busy about 60 cycles per block. This figure counts the load,
the key expansion and the store for each job.

## The pipeline and how custom instructions stall it

The core is a classic five-stage RV32I pipeline:

* **IF**: PC register and a registered instruction-memory read.
* **ID**: decode and register-file read, with write-through.
* **EX**: ALU, branch resolution and the custom instructions.
* **MEM**: data memory port A.
* **WB**: writeback.

Hazards are handled like this:

* **Forwarding.** Results are forwarded into EX from MEM (ALU and link
  values) and from WB (anything, load data included).
* **Load-use stall.** A load followed at once by a consumer stalls ID for one
  cycle.
* **Taken branches and jumps.** They resolve in EX and squash the two younger
  instructions.
* **Halt.** `ecall`/`ebreak` ends the program. Fetch stops once the halt
  leaves ID, and the state controller raises `done` when it reaches WB.
* **FENCE** is a no-op. There are no CSRs, interrupts or exceptions. An
  undecodable instruction is treated as a bubble.

The custom instructions need the most care:

* **Latch** takes one EX cycle.
* **Load, store and AES** issue their start pulse on the first EX cycle.
  They then hold IF, ID and EX until the unit is idle again. A one-bit
  "already started" flag in EX keeps the start from repeating while the
  instruction sits there.
* **MEM and WB** keep draining, which is why they receive bubbles. That
  empties data-memory port A before the buffer unit uses it. It also means
  any register an older instruction was writing is written before the next
  instruction reads it.
* The buffer unit and the SAU are never busy together. An assertion in
  `aesrv_core` checks this.

The register file has 32 entries. The block diagram prints "128×32b" for it,
but 5-bit register fields can only address 32.

## Host interface

The host interface is AXI4-Lite: single beats, 18-bit byte addresses, 32-bit
data. Bits [17:16] select the region.

| byte address | region |
|--------------|--------|
| 0x0_0000–0x0_3FFF | instruction memory, 4,096 words, write only |
| 0x1_0000–0x1_7FFF | data memory, 8,192 words (first half 0x1_0000, last half 0x1_4000), byte strobes |
| 0x2_0000 | CONTROL: bit0 = start (self-clearing), bit1 = half |
| 0x2_0004 | STATUS: bit0 = done, bit1 = running |

Any other address answers SLVERR.

Timing and bandwidth:

* A write completes in about four cycles and a read in about five.
* The data memory is true dual-port. Port A belongs to the core and port B to
  the bus, so host traffic never stalls the core.
* The host moves one word per transaction. A DMA engine sits on the host
  side: it simply issues many such transactions.

## Sizes and parameters

All defaults are the sizes the accelerator was described with, except where
noted.

| parameter | default | where |
|-----------|---------|-------|
| `NUM_BUF` | 256 | buffer set, SAU, buffer unit, core, top |
| `DM_AW` | 13 (8,192 words, two halves of 4,096) | data memory, core, top |
| `IM_AW` | 12 (4,096 words; depth not given, chosen so that the memories total 12 BRAM36 tiles) | instruction memory, top |
| `NUM_REGS` | 32 | register file |

## Where this design departs from, or adds to, the original description

* **The store code is an addition.** Buffer→memory stores use funct3 010,
  which this design adds. The description names only the latch and load
  codes, yet says data moves both ways.
* **AES-256 uses opcode 1101011.** The instruction-format figure labels the
  third opcode group "192", while the text says the three groups are 128,
  192 and 256. This design follows the text.
* **The buffer-to-memory path moves one word per cycle.** Buffers are said to
  "load and store large amounts of data in just one cycle". Here that holds
  for the SAU side, which reads all 256 words in parallel. A single-ported
  32-bit data memory cannot do more than one word per cycle.
* **Several interfaces are this design's own.** Nothing is specified for the
  following:
  * the buffer layout;
  * the first-buffer field in the amount register;
  * the write-back of the chaining value;
  * the 128-bit CTR counter;
  * the halt convention (`ecall`);
  * the AXI address map.
* **Cycle counts are lower than the published ones.** The published 4-block
  jobs take 1,129 to 1,525 cycles; this RTL takes 425 to 501. The published
  program and cycle breakdown are not given, so the difference cannot be
  traced. Likely causes are a longer program (for example software key
  handling or per-block buffer instructions) and slower buffer transfers.
* **Throughput is not comparable either.** Streamed throughput at the
  published 241 MHz would be about 510–570 Mbit/s for the core alone, against
  the published 95.88 Mbit/s. The published number is measured at system
  level.
* **Resource counts differ.** The RTL keeps the buffer set and the 60-word
  key schedule in flip-flops, about 12,600 flip-flop bits in coarse
  synthesis. The published core uses 7,548 flip-flops. How the original maps
  its buffers is not known.
* **Decryption is absent**, as is everything the host CPU does: compiling the
  program, scheduling the data and driving DMA.

## Simulating

Everything runs in plain Verilator 5. There are no vendor models and no
external files. Packages come first on the command line:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/aesrv_pkg.sv tb/aes_ref_pkg.sv tb/rv_asm_pkg.sv tb/aesrv_prog_pkg.sv \
    rtl/*.sv tb/tb_aes_rv_top.sv --top-module tb_aes_rv_top
./obj_dir/Vtb_aes_rv_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself.
Each also has a watchdog that counts a failure if it hangs.

| testbench | what it exercises |
|-----------|-------------------|
| `tb_aes_key_expansion`, `tb_aes_cipher`, `tb_aes_multimode_core` | random keys and blocks of all sizes against an independent reference model (`tb/aes_ref_pkg.sv`, itself checked against the FIPS-197 and SP 800-38A vectors), exact latencies |
| `tb_aes_core_controller` | sequencing with and without key expansion, exact cycle counts |
| `tb_sau` | all four modes and three key sizes, multi-block runs, IV write-back and chaining across calls, latency formula |
| `tb_buffer_set`, `tb_buffer_access_unit` | word and block ports; random base addresses, lengths and first buffer indices, cycle counts |
| `tb_regfile`, `tb_alu`, `tb_basic_controller`, `tb_spec_controller` | random and directed checks of the RV32I pieces and the custom decode |
| `tb_state_controller`, `tb_instr_mem`, `tb_data_mem`, `tb_axi_manager` | start/clear/run/done protocol, memory ports and byte enables, the AXI map and SLVERR |
| `tb_aesrv_core` | the core with behavioural memories: 24 programs over every mode and key size in both halves; counts load-use stalls, taken branches and the three kinds of hold |
| `tb_aes_rv_top` | the whole accelerator at default sizes over AXI: a dispatcher plus twelve routines, 26 jobs in the ping-pong schedule, with counts of host accesses overlapping a run and of every mechanism above |
| `tb_aes_rv_workloads` | 8,192-block AES-128-CBC stream plus 100,000 random blocks for each mode; prints core cycles per block (about a minute of simulation) |

`tb/rv_asm_pkg.sv` contains a tiny assembler, one function per instruction.
`tb/aesrv_prog_pkg.sv` builds the test programs from it. To write your own
program, call those functions and store the words into the instruction memory
through the AXI port.
