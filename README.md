# LUTstructions: reconfigurable instructions built from self-loading LUT fabrics

A RISC-V core has a small, fixed set of instructions. This design adds
instructions whose logic is not fixed: each one is a *bitstream* for a tiny
FPGA fabric that lives inside the core next to the ALU. Bitstreams sit in
ordinary memory, one after another, and the core fetches them on demand
through its own cache hierarchy, the same way it fetches code and data.
An instruction whose bitstream is already in a fabric executes like a
pipelined functional unit (5 cycles, one per cycle). An instruction whose
bitstream is not there (an *implementation miss*) stalls while the fabric
is reprogrammed, which takes 32 cycles at the default sizes.

Two ideas make that fast enough:

* **A fabric shaped for instructions.** It is a 32 x 32 mesh of LUT4_4
  cells (four-input, four-output look-up tables) in which data only moves
  left to right. Operands enter on the left, the result leaves on the
  right, and there is no routing network: LUTs route signals themselves
  over diagonal wires. Because nothing flows backward, compulsory pipeline
  registers can be put every S columns, and the fabric has a fixed latency
  and meets timing for any bitstream.
* **Configuration through the logic wires, in parallel.** To program the
  fabric, every LUT is reset to the identity table, so the mesh becomes a
  wide shift register. Configuration words then travel over the normal
  data wires, and the fabric is cut into P segments that load at the same
  time. At P = 16 the fabric takes 2048 bits per cycle, and a bitstream
  loads in 32 cycles.

The RTL here is the reconfigurable-instruction unit: the fabrics, the
*instruction disambiguator* that manages them, and the *bitstream cache*
(BL1). The RISC-V core, its L1 instruction and data caches, the last-level
cache and the memory system are not part of it. The unit connects to them
through plain ports.

```
                 core (issue custom-3 R-type, rs1, rs2)      result (rd, value)
                                   |                               ^
   +-------------------------------v-------------------------------+-----+
   | lutstructions_top                                                   |
   |  +-----------------------------------------------------------+      |
   |  | instr_disambiguator  (direct-mapped, SLOTS slots)         |      |
   |  |    tags, miss FSM, result tracking                        |      |
   |  |    +------------+  +------------+                         |      |
   |  |    | lut_fabric |  | lut_fabric |  ...  (one per slot)    |      |
   |  |    +------------+  +------------+                         |      |
   |  +----------------------------^------------------------------+      |
   |                               | 4W*P = 2048 bit/cycle               |
   |  +----------------------------+------------------------------+      |
   |  | bitstream_cache (BL1): 16 x 8 KiB, direct mapped          |      |
   |  +----------------------------^------------------------------+      |
   +-------------------------------|-------------------------------------+
                                   | 256 bit/cycle refill
                         last-level cache / memory
```

## Files

| file | contents |
|---|---|
| `rtl/lut_pkg.sv` | instruction format (`rtype_t`), custom-3 opcode, latency and bitstream-size functions |
| `rtl/lut4_4.sv` | one LUT4_4 cell |
| `rtl/lut_fabric.sv` | W x Y mesh, register placement, pipelined and parallel configuration |
| `rtl/instr_disambiguator.sv` | slot cache, miss handling, fabrics |
| `rtl/bitstream_cache.sv` | BL1 |
| `rtl/lutstructions_top.sv` | the unit |
| `tb/fabric_ref_pkg.sv` | reference model of a fabric and the bitstream generator |
| `tb/llc_model.sv` | behavioural last-level cache that serves bitstreams |
| `tb/tb_*.sv`, `tb/fabric_tester.sv`, `tb/workload_runner.sv` | testbenches |

## The LUT4_4 cell

A LUT4_4 is four LUT4s with shared inputs. Its table has 16 entries of 4
bits. The entry address is `{in3, in2, in1, in0}` and the entry drives
`out3..out0`. One cell holds 64 configuration bits, so a 32 x 32 fabric
holds 65 536 bits, which is an 8 KiB bitstream.

The table has no separate programming port. The cell has two controls:

* `cfg_clear` loads the identity table (entry *e* holds *e*). In this
  state `out_i = in_i`, which is the bypass mode used during configuration.
* `cfg_we` stores the cell's current 4-bit *input* into entry `cfg_entry`.

## The mesh

Row *r*, input *j* of a column is bit `4r+j` of a 4W-bit column vector.
From one column to the next:

| input of row r | comes from (previous column) |
|---|---|
| in1, in2 | out1, out2 of row r (straight) |
| in0 | out3 of row r-1 (diagonal down); row 0: its own out0 |
| in3 | out0 of row r+1 (diagonal up); row W-1: its own out3 |

So out0 goes one row up and out3 one row down. A signal can move at most
one row per column. A cell can compute up to four functions of four
inputs and also pass signals on, so the LUTs do the routing.

Operands enter column 0: `rs1[r]` on in1 of row *r* and `rs2[r]` on in2.
`funct3[i]` is driven on in0 of rows 0..2, so one bitstream can hold up to
eight related instructions. All other column-0 inputs are 0. The result is
out1 of every row of the last column.

### Register placement (S)

Every column has a 4W-bit register after it. In operating mode a column's
register is used only if the column is an S-th column, `(c+1) % S == 0`,
or the last column. Other columns bypass their register through a 2:1
multiplexer. The latency is therefore `ceil(Y/S)` cycles:

| S | 1 | 2 | 4 | 7 (default) | 8 | 16 | 32 |
|---|---|---|---|---|---|---|---|
| latency (Y = 32) | 32 | 16 | 8 | **5** | 4 | 2 | 1 |

S sets the longest combinational path: S LUTs plus wires. A bitstream
cannot create a path longer than that, so the fabric meets the same timing
for any bitstream. The fabric has no state of its own: an instruction is a
fixed-length pipeline from two registers to one.

## Configuration: the part that needs care

### Mechanism

1. **Clear.** `cfg_clear` loads the identity table into every LUT of the
   fabric in one cycle.
2. **Stream.** With `cfg_mode = 1`, every column register is in use, and
   the first column of each of the P segments takes its own 4W-bit slice
   of `cfg_data` instead of the previous column's output. Each segment has
   YS = Y/P columns and takes 16*YS words. Word *k* of a segment belongs to
   segment column `YS-1-k/16`, so the rightmost column is loaded first. It
   becomes entry `k % 16` of every LUT in that column.
3. **Write on arrival.** A word needs *d* cycles to reach the column *d*
   places into its segment. It passes through identity LUTs and registers
   on the way. A small tag (valid bit and word index) moves through the
   same register stages. When the tag at a column names that column, the
   column writes the word into its LUTs. The columns on the way are still
   identity tables, and a column that is already loaded gets no further
   writes, so it does not matter what passes through it. Gaps in
   `cfg_valid` are allowed.
4. **Done.** The last word is for each segment's first column and is
   written in the cycle it arrives, so `cfg_done` pulses in that cycle.
   Loading takes exactly `16*Y/P` cycles: 512 at P = 1 and 32 at P = 16.

P must be a power of two no larger than Y/2. The fabric checks this when
it is elaborated.

### The zig-zag and the bit swap

In identity mode the diagonals do not keep a bit in its lane. A bit on
row *r*'s in0 leaves on out0 and arrives on row *r-1*'s in3. One column
later it is back on row *r*'s in0. The wire permutation between columns,
π, is its own inverse: it swaps `(4r+3, 4(r+1)+0)` for every *r* and keeps
every other wire in place. The word for a column at odd distance *d* from
its segment's first column must therefore be sent with those pairs
swapped. The bitstream generator does this, not the hardware. This is why
every segment must have an even number of columns.

### Bitstream format

With `table[r][c][e]` the 4-bit entry *e* of the LUT at row *r*, column *c*:

```
YS = Y/P, words per segment = 16*YS
for word k, segment p:
    d = YS-1 - k/16            column offset inside the segment
    c = p*YS + d               absolute column
    v[4r+3:4r] = table[r][c][k%16]      for every row r
    if d is odd: v = π(v)
row k (4W*P bits) = { v(segment P-1), ..., v(segment 1), v(segment 0) }
bitstream = row 0 at the lowest bits, then row 1, ...; 16*YS rows
```

In memory, bit *i* of the bitstream is bit `i % 8` of byte
`base + n*8192 + i/8`. Bitstream *n* belongs to the instruction whose
funct7 is *n*. `fabric_ref::cfg_row()` in `tb/fabric_ref_pkg.sv` is this
formula in SystemVerilog. Mapping a circuit onto the tables (synthesis to
LUT4_4 cells, placement and routing) is outside this RTL.

## Instruction disambiguator

Instructions use the RISC-V R-type format on the custom-3 opcode:

| bits | 31:25 | 24:20 | 19:15 | 14:12 | 11:7 | 6:0 |
|---|---|---|---|---|---|---|
| field | funct7 = bitstream index | rs2 | rs1 | funct3 (fabric operand) | rd | 1111011 |

The disambiguator is a direct-mapped cache of SLOTS fabrics. The slot
index is the low `log2(SLOTS)` bits of funct7, and the tag is the full
funct7.

* **Hit.** `iss_ready` rises in the same cycle and the operands enter the
  fabric. `res_valid`, `res_rd` and `res_data` appear `ceil(Y/S)` cycles
  later. A hit can issue every cycle. A shift register of (valid, slot, rd)
  entries selects which fabric's output becomes the result.
* **Miss.** `iss_ready` stays low and the core must hold the instruction.
  The controller waits until no result of the target slot is still in
  flight. It then invalidates the slot, clears its LUTs, requests
  `bs_base + funct7*8192` from BL1 and streams the returned words into the
  fabric. After `cfg_done` it writes the tag, and the held instruction
  issues as a hit. With the bitstream in BL1 and nothing in flight, the
  instruction issues 36 cycles after the miss. Four of those cycles are the
  request and the memory read; 32 are the configuration.

The operands go to every fabric at once. Only the result is multiplexed.

## Bitstream cache (BL1)

BL1 sits beside the L1 instruction and data caches. It has 16 sets, and
each block holds one whole 8 KiB bitstream (128 KiB in total). It is
direct mapped. The storage is one memory with rows of `max(256, 4W*P)` =
2048 bits. Refill beats from the last-level cache are 256 bits and are
written into their slice of a row through a write strobe. A row is read
out in one cycle as one configuration word.

* Request: `req_valid/req_ready` with a byte address, accepted when BL1 is
  idle.
* Hit: 32 words on `rsp_valid`, one per cycle, beginning two cycles after
  acceptance. `rsp_last` marks the last word.
* Miss: one block request to the last-level cache (`mem_req_*`, block
  aligned). BL1 then accepts 256 beats in address order on
  `mem_rsp_valid`, with gaps allowed, and then streams the block as on a
  hit.

At 150 MHz the 2048-bit link carries 38.4 GB/s.

## Top-level interface (`lutstructions_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, synchronous active-low reset |
| `bs_base[31:0]` | in | bitstream library base (a core control register, e.g. 0x100000) |
| `iss_valid`, `iss_instr`, `iss_rs1`, `iss_rs2` | in | instruction from the core. It must be held until `iss_ready`, and only custom-3 is allowed (both are assertions) |
| `iss_ready` | out | instruction accepted |
| `res_valid`, `res_rd`, `res_data` | out | result, ceil(Y/S) cycles after acceptance |
| `mem_req_valid/addr/ready`, `mem_rsp_valid/data` | | BL1 refill link to the last-level cache |
| `evt_id_hit/miss/loaded`, `evt_bl1_hit/miss` | out | one-cycle event pulses for performance counters |

Parameters and their defaults:

| parameter | default | meaning |
|---|---|---|
| `SLOTS` | 2 | fabrics in the disambiguator (power of two, up to 128) |
| `W`, `Y` | 32, 32 | rows (operand width) and columns of a fabric |
| `S` | 7 | register placement; latency `ceil(Y/S)` = 5 |
| `P` | 16 | configuration parallelism; `16*Y/P` = 32-cycle load |
| `BL1_SETS` | 16 | BL1 blocks |
| `FILL_W` | 256 | refill width |

The defaults are the published baseline (two slots, a 16-block BL1,
32 x 32 fabrics). P = 16 and S = 7 are the published point with a 32-cycle
load and a 5-cycle instruction. Configurations explored there (S from 1 to 32, P from
1 to 16, up to 128 slots) are the same RTL with other parameter values.

## What is this design's own

The following have the behaviour described for the architecture, but their
implementation was chosen here:

* The LUT write mechanism: one entry per cycle from the cell's own inputs,
  placed by a tag that travels with the data, and the word and entry order.
* The straight edge wires at the top and bottom rows. The register after
  the last column, which gives 5 cycles at S = 7.
* The operand wires: rs1 on in1, rs2 on in2, funct3 on in0 of rows 0..2.
  The result is taken from out1.
* The slot index taken from the low funct7 bits. The wait for in-flight
  results to drain before a slot is reloaded. All ready/valid handshakes.
* BL1 is direct mapped, refills a whole block before streaming it, and
  has a two-cycle read start.
* A stride of 8 KiB between bitstreams, matching the 8 KiB block size. An
  address map drawn for the prototype shows bitstream 1 at 0x100400, which
  is 1 KiB. That spacing holds only if the address counts 64-bit words.
* Synthesis removes the registers of segment-end columns when S does not
  place one there. No path uses them: in configuration mode the next column
  is a segment head, which takes `cfg_data`, and in operating mode they are
  bypassed. All other columns keep their register, as the architecture
  requires for configuration.

## Verification

Each testbench checks itself and prints `TB_RESULT checks=N failures=M`.
Build any of them with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/lut_pkg.sv tb/fabric_ref_pkg.sv rtl/lut4_4.sv rtl/lut_fabric.sv \
  rtl/instr_disambiguator.sv rtl/bitstream_cache.sv rtl/lutstructions_top.sv \
  tb/llc_model.sv tb/tb_lutstructions_top.sv --top-module tb_lutstructions_top
./obj_dir/Vtb_lutstructions_top
```

| testbench | what it shows |
|---|---|
| `tb_lut4_4` | identity table after clear, entry writes, clear priority |
| `tb_lut_fabric` | four fabrics (32x32 S=7 P=16; 8x8 S=1 P=1; 8x8 S=8 P=2; 6x12 S=5 P=2). Random tables loaded with and without gaps, every output compared with the reference model, exact 16*Y/P load time, ceil(Y/S) latency at one operation per cycle, a ripple-carry adder bitstream checked against a+b, and a routed bitstream (a different bit permutation per operand, then XOR) checked against the permutations |
| `tb_bitstream_cache` | 60 requests over 24 bitstreams: hits, cold and conflict misses, gaps in refill, every word, the two-cycle hit start |
| `tb_instr_disambiguator` | default sizes with a behavioural BL1: results, latency 5, a 32-cycle load, evictions, back-to-back hits |
| `tb_lutstructions_top` | the whole unit at default sizes with a behavioural last-level cache and six bitstreams. It counts slot hits, misses, evictions, BL1 hits and misses, stalls, back-to-back issues and both funct3 behaviours, and requires each at least once. It also checks the 36-cycle miss penalty |
| `tb_fabric_dse` | the same tests on four full-size 32x32 fabrics at the corners of the S/P space: (S, P) = (1, 1), (4, 4), (16, 8), (32, 16). This gives latencies 32, 8, 2 and 1 cycles and loads of 512, 128, 64 and 32 cycles |
| `tb_workloads` | STREAM-style loops on a 1-slot and a 2-slot unit (below) |

The reference model (`fabric_ref`) evaluates the mesh column by column
from the wiring table above and generates bitstreams with the formula
above. Three bitstreams are checked against plain SystemVerilog
expressions that do not use the model: the adder (`a+b`), the AND/XOR
chain (`funct3[0] ? a&b : a^b`) and the permutation. The permutation
bitstream moves every bit of `a` and every bit of `b` to a row given by
two independent random permutations, and the last column XORs the two
results. Each operand is routed through an odd-even transposition
network with one round per column. In any column, `a` swaps across the
row pairs of one parity and `b` across the pairs of the other parity.
So the two operands never need the same diagonal, and every diagonal of
every column is in use.

### Loop workloads

The system-level experiment for this architecture runs a loop that calls a
soft instruction: popcount, a bit permutation with XOR, and both in turn on
a core reduced to one slot so that every call misses. The popcount
bitstream comes from a synthesis and routing flow that is not part of this
RTL. `tb_workloads` therefore uses the adder as the arithmetic instruction.
The bit-manipulation instruction is the routed permutation bitstream. It
applies a different permutation to each operand and then XORs them. There
are N = 48 calls per loop:

| unit | single-instruction loop | alternating loop |
|---|---|---|
| 2 slots | N + 5 cycles, no misses | 2N + 5 cycles, no misses |
| 1 slot | one miss, then one call per cycle | a miss on every call, about 41 cycles per call (36 + waiting for the previous result) |

## Limits

* The fabric holds no state between calls. That is a property of the
  architecture: all state stays in the core's registers.
* Only R-type use is wired: two W-bit operands, funct3 and one result.
  The mesh itself has 4W input wires and 4W output wires, so wider uses
  (more operands, several results, vector registers) only need other
  operand and result wiring in the disambiguator.
* The core, its L1 instruction and data caches, the last-level cache and
  the AXI path to memory are not included. The testbenches stand in for
  the core (issue and result) and for the last-level cache.
