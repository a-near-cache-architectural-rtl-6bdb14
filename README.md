# Crypto-Near-Cache: compute-enabled SRAM next to every last-level-cache slice

Cryptographic kernels (AES, Keccak/SHA-3, the NTT behind Kyber and Dilithium)
are long sequences of wide bitwise operations on data that already sits in the
cache. Moving that data through the on-chip network to a core, or out to an
accelerator, costs more than the arithmetic. The idea here is to put a small
compute-enabled SRAM array right beside each slice of the last-level cache.
That array is the **CNC unit**.

- The unit loads 512-bit cache blocks from its slice in two cycles.
- It computes in place by opening two wordlines at once (bitline computing).
- It writes the result back into the slice.

A core starts all of this with four custom RISC-V instructions. The operation
sequence itself is a program of 16-bit *commands*. Commands are loaded into a
command array once and then reused, so a whole AES encryption costs the core
two instructions: load the commands, then run them.

This repository holds the synthesizable SystemVerilog for:

- the CNC unit;
- the core-side path that turns a CNC instruction into a request packet;
- the interconnect that carries requests to the right slice;
- a 4-core / 4-slice top, `cnc_system`;
- a self-checking testbench for every module.

## 1. System organisation

```
 core 0..3                                 crossbar              cache slice 0..3
 ┌───────────────────────────────┐     ┌──────────────┐     ┌───────────────────────────┐
 │ decode ─ execute ─ memory     │ req │ round-robin  │ req │ CNC ctrl ─ CNC array 16kB │
 │ (CNC    (rs1+imm)  (DTLB, PA, │────▶│ per slice    │────▶│     │       sense amps    │
 │  ext.)             align,hash)│◀────│ per core     │◀────│  command array 16kB       │
 └───────────────────────────────┘ done└──────────────┘ resp│  ⇅ data-array port        │
                                                            └───────────────────────────┘
```

### What the core does with a CNC instruction

`cnc_core_ext` handles a CNC instruction in three steps:

1. It decodes the instruction.
2. It adds `rs1` and the immediate to get the virtual address.
3. It asks the data TLB for a translation. It bypasses the L1 cache.

Next it builds the request address from the physical address:

- For the block instructions, it aligns the address to the 64-byte block.
- For `SW_CNC`, it keeps the address unaligned.

A destination hash then picks the home slice from that address.

Finally it packs everything into one request:

| Field | Content |
|---|---|
| `nc` | 3-bit CNC signal |
| `alg` | 5-bit algorithm code |
| `addr` | physical address |
| `wdata` | 32-bit write data |
| `core` | issuing core |
| `dest` | home slice |

### What happens at the slice

The crossbar (`cnc_noc`) delivers the request to the CNC unit of that slice
(`cnc_slice`). When the unit finishes, it sends a completion back to the
issuing core on `done_valid` / `done_nc`.

### Parallelism

Slices work independently. A core does not wait for a completion before it
issues its next CNC instruction. One core can therefore start algorithm runs on
all four slices back to back.

### Hash and routing

The hash XOR-folds all physical-address bits above the 64-byte offset into
log2(`NUM_SLICES`) bits. Consecutive blocks therefore go to different slices,
and every byte of a block goes to the same slice.

`SW_CNC` is routed by its own word address, so its word ends up in the CNC
unit of that word's slice. To collect data for one computation, software
chooses addresses in the same slice.

### Parts outside the design

These parts connect through ports of `cnc_system`:

- the core pipeline (fetch, register file, ALU);
- the data TLB and its page-table walker;
- the cache slice itself (tags, MESI state, directory, MSHR, data array).

Each slice's data array is reached through a small port. The port carries:

- `dc_csb`, `dc_web`, `dc_oeb`: active-low chip select, write enable and output enable;
- `dc_addr`: the block address;
- `dc_rdata` / `dc_wdata`: 512-bit read and write data;
- `dc_miss`: a flag returned the cycle after each access;
- `dc_miss_rsp`: a one-cycle pulse when the MSHR has brought the block in.

On a miss the CNC unit waits for `dc_miss_rsp` and then repeats the access.
This port protocol is a choice of this design; the cache slice itself is reused
from an existing cache design.

## 2. The four instructions

All four use the RISC-V S-type layout with the custom opcode `0101011`.

| bits | 31:25 | 24:20 | 19:15 | 14:12 | 11:7 | 6:0 |
|---|---|---|---|---|---|---|
| SW_CNC    | imm[11:5] | rs2 | rs1 | 010 | imm[4:0] | 0101011 |
| RD_D2CNC  | imm[11:5] | 00000 | rs1 | 011 | imm[4:0] | 0101011 |
| LD_CMD    | imm[11:5] | 00000 | rs1 | 100 | imm[4:0] | 0101011 |
| ALG_CNC   | imm[11:5] | alg[4:0] | rs1 | 101 | imm[4:0] | 0101011 |

- **SW_CNC** writes the 32-bit register `rs2` into the CNC array. It takes 1 cycle at the slice.
- **RD_D2CNC** copies the 64-byte block at `rs1+imm` from the cache into the next free CNC row. It takes 2 cycles on a hit.
- **LD_CMD** appends that block, 32 commands, to the command array. It takes 2 cycles on a hit.
- **ALG_CNC** runs the loaded program. It then writes CNC row 0 back to the cache block at `rs1+imm`.

Algorithm codes are 0–10:

| Code | Algorithm |
|---|---|
| 0 | AES-128 |
| 1 | AES-256 |
| 2 | Keccak-1600 |
| 3 | NTT-128 |
| 4 | NTT-256 |
| 5–7 | Kyber512 / 768 / 1024 |
| 8–10 | Dilithium2 / 3 / 5 |

Codes above 10 are not decoded as CNC instructions. The 3-bit CNC signal sent
with a request is:

| Code | Signal |
|---|---|
| 0 | SW |
| 1 | RD |
| 2 | LD |
| 3 | AES |
| 4 | KECCAK |
| 5 | NTT |
| 6 | KYBER |
| 7 | DILITHIUM |

The unit treats the five algorithm families alike. What it computes is entirely
the loaded command program; the code only labels the completion.

## 3. Inside a CNC unit

### 3.1 Array and bitline computing (`cnc_array`)

The array is 256 rows × 512 columns (16 kB) with two row decoders.

- **One wordline open:** a normal read.
- **Two wordlines open (`act2`):** the bit line BL discharges unless both cells
  hold 1, so its sense amplifier reads the AND of the two rows. The complement
  line BLB reads their NOR.

The model gives `bl_and` and `blb_nor` one cycle after the row addresses, like
a synchronous SRAM macro. Writes are either a whole row, or 32-bit words under
a 16-bit word mask. If a write and a read hit the same row in the same cycle,
the read returns the new data.

### 3.2 Sense-amplifier row (`cnc_sense_amp`)

Each column has one flip-flop, `D_out`, and two 4:1 multiplexers. The first
multiplexer picks one of four logic results, built from the two sense outputs:

| Result | How it is formed |
|---|---|
| AND | BL directly |
| OR | NOT of BLB |
| XOR | NOR of BL and BLB |
| NOR | BLB directly |

The second multiplexer picks what the flip-flop loads next. There are four
choices:

- the logic result;
- the left neighbour `D[n-1]` (shift left one column);
- the right neighbour `D[n+1]` (shift right one column);
- the bit-extension value.

Bit extension (`ext_bit`) divides the row into computing blocks of a chosen
width. Inside every block, it copies one column over the whole block. This is
how a sign or carry bit is spread across a word.

The supported block widths are 16, 25, 32, 64, 128, 256, 512 and 8 columns
(codes 0–7). If the width does not divide 512, for example 25 columns, the
columns after the last whole block keep their values.

### 3.3 Commands

A command is 16 bits: `{op[15:12], addr[11:4], ctrl[3:0]}`.

| command | op | addr | ctrl | effect |
|---|---|---|---|---|
| rd_row   | 0001 | src  | 1000 | FF ← row[src] |
| wr_row   | 0010 | dst  | x000 | row[dst] ← FF |
| shift    | 0011 | N    | 1x d 0 | FF shifted N columns; d = 1 right, 0 left; zero fill |
| act_row  | 1011 | src1 | 0001 | remember src1 as the first operand |
| logic_op | 1001 | src2 | 0 oo 0 | FF ← row[src1] op row[src2]; oo: 00 AND, 01 OR, 10 XOR, 11 NOR |
| ext_bit  | 1111 | col  | www 0 | in every block of width code www, copy column col (mod width) over the block |

Notes on the format:

- A logic operation is always `act_row` followed by `logic_op`. The pair opens
  both wordlines in one cycle.
- A shift moves one column per cycle.
- A command that matches none of the formats does nothing. It raises
  `illegal_cmd` while it is decoded.

Example program: XOR rows 5 and 7, then sign-extend the lowest bit of every
16-bit word into row 0.

```
act_row  5          {1011, 0x05, 0001}
logic_op 7, XOR     {1001, 0x07, 0100}
ext_bit  0, w=16    {1111, 0x00, 0000}
wr_row   0          {0010, 0x00, 0000}
```

### 3.4 Command array (`cnc_cmd_array`, `cnc_cmd_decoder`)

The command array is 256 × 512 bits, which holds 8,192 commands. Command `i`
lives in row `i/32`, slot `i%32`.

- Each `LD_CMD` writes one block of 32 commands to the next row. After 256
  blocks the array is full: further blocks are dropped and `cmd_ovf` is raised.
- The first `LD_CMD` after an algorithm run starts a new program at row 0.
- An `ALG_CNC` with no `LD_CMD` in between runs the same program again. This
  is how kernels are reused.

### 3.5 Control module and its timing (`cnc_ctrl`)

The control module is one state machine:

```
IDLE → DC_CHK → (MISS_WAIT → DC_REQ → DC_CHK)   for RD_D2CNC / LD_CMD
IDLE → ALG_RUN → WB_RD → WB_WR → WB_CHK (→ WB_WAIT → WB_WR)   for ALG
```

`SW_CNC` finishes in the cycle it is accepted.

**Write pointer.** A word pointer places the loaded data:

- It starts at row 0.
- `SW_CNC` fills consecutive 32-bit words.
- `RD_D2CNC` first rounds the pointer up to a whole row, then fills that row.
- After an algorithm the pointer returns to row 0.

Software therefore lays out a computation's inputs in the order it sends them.

**Command pipeline.** During `ALG_RUN` commands go through three stages, one
command per cycle:

| Stage | Work |
|---|---|
| F | read the command array |
| E | decode and open the wordline(s) |
| S | load / shift / extend the flip-flops, or write a row |

A shift by N columns stays N cycles in S and holds F and E for N−1 cycles. A
row written in S can be read by the next command in E in the same cycle: the
array forwards it.

**Write-back.** After the last command, the controller:

1. reads row 0;
2. writes it to the data array at the request's block address;
3. retries after a miss response if the block is not present.

**Latencies.** Each latency is counted from the cycle the request is accepted
at the slice to the cycle its completion is visible:

| request | cycles |
|---|---|
| SW_CNC | 1 |
| RD_D2CNC, LD_CMD (hit) | 2 |
| ALG_CNC, N commands, S extra shift cycles, write-back hit | N + S + 7 |
| any miss | plus the miss service time |

A slice accepts a new request only after its previous completion has been taken
by the crossbar. `done_ready` at a core must therefore not wait for that core's
own pipeline to advance.

### 3.6 ECC (`cnc_ecc`)

Each 32-bit word of every array row has one even-parity check bit, kept in a
small table beside the array. The check bits are written whenever the array
is written, whatever the source: a register word, a cache block, or a
sense-amplifier result after a logic op, shift or bit extension. So a shifted
result is protected as soon as `wr_row` stores it.

Every array read is checked in the cycle its bitlines are valid:

- **One wordline.** Each word read must match its stored parity. This catches
  a flipped bit in stored data.
- **Two wordlines (a logic operation).** The XOR of the two operands is
  rebuilt from the bitlines as `~(BL | BLB)`. Its parity must equal the XOR of
  the two operands' check bits. Parity is linear in XOR, so this compares the
  check bits of the result with those of the operands. AND, OR, XOR and NOR
  are all derived from the same bitline pair.

A word is checked only after it has been written since reset, because the
array itself is not cleared. Any mismatch raises the slice's `ecc_err` for one
cycle. Errors are detected, not corrected, and there is no scrubbing.

## 4. Computing blocks and what fits

The array is one wide SIMD register file. Software chooses how to read it: as
*computing blocks* of n rows × m columns, with all blocks in the same columns
forming a tile. Every command acts on a whole 512-bit row, so all tiles compute
together.

The hardware only needs to know the block width in one place, the `ext_bit`
command. The layouts a program can use at the default size:

| workload | block | tiles | fits |
|---|---|---|---|
| AES-128 / AES-256 | 4 × 32 | 16 | yes (AES-128 program 5,900 commands ≤ 8,192) |
| Keccak-1600 | 64 × 25 | 20 (500 columns) | yes (7,000 commands) |
| NTT-128 | 128 × 16 | 32 | yes |
| NTT-256, Kyber512, Dilithium2 | 256 × 16 | 32 × 16-bit lanes | yes, uses all 256 rows |
| NTT-512 / NTT-1024 | 2 or 4 tiles of 256 × 16 | — | yes |

Throughput scales with the number of slices. At 16-bit lanes, one array runs 32
instances and the default four-slice system runs 128.

- An evaluation system with 16 arrays (512 instances) needs `NUM_SLICES = 16`.
  `tb_cnc_scale16` runs that configuration.
- One with 64 arrays needs `NUM_SLICES = 64`. That size also needs a wider
  slice-id field (`SLICE_ID_W`, 4 bits by default) in `cnc_pkg`.

The AES-256 command count is not known. Scaling AES-128 by its round count
suggests it is slightly larger than the command array.

## 5. Interface of `cnc_system`

The parameters are `NUM_CORES = 4`, `NUM_SLICES = 4`, `ROWS = 256`,
`COLS = 512` and `CMD_ROWS = 256`. All ports are unpacked arrays indexed by core
or slice.

| per core | dir | meaning |
|---|---|---|
| `instr_valid`, `instr[31:0]` | in | instruction in the decode stage |
| `rf_rs1`, `rf_rs2` | out | register numbers to read |
| `rs1_val`, `rs2_val` | in | their values, same cycle |
| `stall` | out | hold the CNC instruction in decode |
| `tlb_req`, `tlb_vaddr` | out | translation request, held until `tlb_ack` |
| `tlb_ack`, `tlb_paddr` | in | translation done, may be in the same cycle |
| `done_valid`, `done_nc`, `done_ready` | out/out/in | completion of a CNC instruction |

| per slice | dir | meaning |
|---|---|---|
| `dc_csb`, `dc_web`, `dc_oeb`, `dc_addr`, `dc_wdata` | out | data-array access |
| `dc_rdata`, `dc_miss` | in | one cycle after the access |
| `dc_miss_rsp` | in | miss resolved, repeat the access |
| `cnc_state`, `cmd_ovf`, `illegal_cmd`, `ecc_err` | out | status |

Timing of the core path:

- A CNC instruction that does not stall is offered to the crossbar three cycles
  after it appears in decode.
- Each of the execute and memory stages holds one CNC instruction.
- A transfer through the crossbar takes no extra cycle.

Reset is asynchronous and active low. The SRAM contents are not reset.

## 6. How the design relates to the published description

**Taken from the paper.** These follow the published description directly:

- the four instructions and their encodings;
- the 3-bit CNC signal;
- the 256 × 512 array and command array;
- dual-wordline bitline computing;
- the sense-amplifier gate set: NOT and NOR gates, two 4:1 multiplexers and a flip-flop with neighbour shift;
- the six command formats and their fixed bits;
- the two-cycle block transfer and one command per cycle;
- miss handling through the MSHR;
- the core datapath: address generation, TLB, L1 bypass, alignment, hash;
- the 4-core / 4-slice organisation.

**Choices of this design where the description is silent:**

- the meaning of the "x" bits in the command formats (operation select, shift
  direction, width code);
- the bit positions inside a command;
- the XOR-fold hash;
- the algorithm and CNC-signal numbering;
- the command pipeline and the ALG latency;
- row 0 as the result row;
- the write-pointer rules;
- one block per `LD_CMD`;
- a completion channel back to the core;
- the data-array handshake;
- a crossbar instead of the cache's router mesh.

The request packet goes in one transfer, not as 64-bit flits.

**Smaller differences:**

- The description relies on software to allocate block-aligned buffers. Here
  the core aligns the address of the block instructions itself.
- The cache slice's tag, coherence and MSHR handling is folded into the single
  `dc_miss` / `dc_miss_rsp` pair of the data-array port.
- Data is loaded in row order only: words fill a row, and blocks take whole
  rows. Any other placement is done by the command program (`rd_row` /
  `wr_row`).
- The scratch rows a program uses for intermediate values are a software
  convention. The description reserves six such rows.

**ECC.** The published description gives the ECC check only as a function:
compare the result's check bits with the operands'. The code (one parity bit
per 32-bit word), where it sits and the error flag are this design's choices
(section 3.6). Correction and scrubbing are not built.

**One conflict.** The datapath description takes the `SW_CNC` write data from
rs1, while the instruction table takes it from rs2. This design follows the
table.

**Not built:**

- the barrel-shifter and adder extensions, evaluated only as alternatives;
- the cryptographic command programs themselves.

The testbenches use random command programs checked against a reference model.
They are not AES or NTT programs.

## 7. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>`. Each has a watchdog.
They need Verilator 5 with `--timing`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
          -Irtl -Itb rtl/cnc_pkg.sv tb/tb_cnc_system.sv --top-module tb_cnc_system
./obj_dir/Vtb_cnc_system
```

| testbench | what it establishes |
|---|---|
| `tb_cnc_array` | AND/NOR sensing, word and row writes, write-read forwarding |
| `tb_cnc_sense_amp` | the four logic results, shifts both ways, bit extension at all widths |
| `tb_cnc_cmd_array` | command packing and one-cycle read |
| `tb_cnc_cmd_decoder` | all 65,536 command words against the format table |
| `tb_cnc_ctrl` | cycle-exact controls for each request type, miss wait, command overflow, an ALG program with a 3-cycle shift and the write-back |
| `tb_cnc_slice` | one CNC unit with a model cache slice: random programs against the reference model, latencies, misses, program reuse |
| `tb_cnc_ecc` | parity stored on writes, single- and two-row reads checked word by word against a model while random bits are flipped in the array |
| `tb_cnc_inst_decode` | random instructions against the encoding table |
| `tb_cnc_dest_hash` | the fold, block locality, spread over slices |
| `tb_cnc_core_ext` | request contents and order under TLB delays, stalls and back-pressure; the 3-cycle unloaded timing |
| `tb_cnc_noc` | delivery, ordering, round-robin fairness under a hot spot, response routing |
| `tb_cnc_system` | the full-size system end to end: four cores running jobs on four slices in parallel, contention on one slice, responses contending at one core; every written-back block and every array checked against per-slice reference models, and each mechanism (read and write-back misses, TLB waits, stalls, arbitration, response contention, shift stalls, logic ops, bit extension, program reuse, parallel slices, ECC detection of a flipped bit) required to occur |

A further testbench, `tb_cnc_kernels`, runs cryptographic kernels written as
command programs on the full-size system. It uses the same instruction
sequence software would: `RD_D2CNC` / `SW_CNC`, `LD_CMD`, `ALG_CNC`. Four
kernels run at the same time on four slices:

- **Kyber coefficient addition mod 3329, 32 lanes.** The addition is
  bit-parallel, with carries moved by `shift` and masked at lane boundaries.
  The reduction uses `ext_bit` to spread each lane's sign and picks the result
  with AND/NOR/OR. It is 411 commands.
- **The Keccak χ step** on a five-lane plane.
- **The Keccak θ step** on all 25 lanes. The 64-bit lane rotation is a
  one-column shift, with the bit that crosses a lane masked off, ORed with
  each lane's bit 63. That bit is spread by `ext_bit` and masked to bit 0.
  It is 227 commands.
- **AES AddRoundKey** on four 128-bit states, with the key written by
  `SW_CNC`.

Each kernel then runs a second time on new data without reloading its
commands. Each run must take exactly N + 7 cycles at the slice. Keccak's
ρ, π and ι steps and the NTT's multiplications are not written out as
programs.

`tb_cnc_scale16` builds the system with 16 slices (four cores), the array
count of the 16 MB evaluation cache. Every slice runs the Kyber addition
kernel on its own 32 coefficient pairs, so 512 additions run in parallel
(CNC-512). Each core loads and starts four slices without waiting for
completions. The testbench checks every slice's result, that each run takes
N + 7 cycles, and that all 16 slices are in `ALG_RUN` at the same time. The
whole batch finishes in about 750 cycles.

Two files support the testbenches:

- `tb/l2_slice_model.sv` is a behavioural stand-in for the cache slice's data
  array. It has a per-block present bit and a fixed miss latency.
- `tb/cnc_ref.svh` is the reference CNC unit the testbenches compare against.
- `tb/cnc_prog.svh` builds command words and the Kyber addition program.

`tb_cnc_system` uses the top at its default size and runs in well under a
minute.
