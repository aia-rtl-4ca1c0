# AIA accelerator mesh: Knuth-Yao sampling cores with shared registers

Markov-chain Monte Carlo inference on probabilistic graphical models (Bayes
nets, Markov random fields) spends its time in two places: drawing a value
for one random variable from a small discrete distribution that is known
only up to a scale factor, and fetching the current values of that
variable's neighbours in the graph. This design attacks both inside a
4x4 mesh of small RISC-V cores:

* **Sampling without normalization.** Each core has a Knuth-Yao sampler that
  walks the binary expansions of integer weights bit column by bit column.
  Instead of dividing by the sum of the weights, it pads the distribution
  with one extra "rejection" weight so that the total becomes a power of two.
  A walk that lands on the padding item simply starts again. No cumulative
  sums, no division, no normalized table in memory.
* **Neighbours in registers, not in memory.** Each core's 64-word register
  file is split into a shared half (x0..x31) and a private half (R32..R63).
  The four mesh neighbours (north, south, west, east) can read any shared
  register in a single cycle. A core that has just computed a variable's new
  value leaves it in a register, and the cores holding neighbouring
  variables read it directly as an ALU operand.

A third extension, a one-cycle lookup-table interpolator, evaluates
functions such as exp and log from a table stored in the private registers.

The RTL in `rtl/` covers the accelerator side of the SoC. This is the mesh
clock domain with 16 cores, a 128 KB global buffer, its interconnect, an
event unit for barriers and a host-facing interconnect. It also includes
the two clock-domain-crossing FIFOs through which the host side reaches
the mesh. The host processor, its memories and peripherals, the mesh DMA
engine and the analog parts (PLL, regulator, pads) are not included. The
top brings out their connection points as ports.

## Block map

```
 soc_clk domain              |  mesh_clk domain
                             |
 host_req ──► aia_cdc_fifo ──┼──► aia_mesh_interco ──┬──► core scratchpads (host port)
 host_rsp ◄── aia_cdc_fifo ◄─┼───        (FSM)       ├──► aia_event_unit (MASK/COUNT)
                             |                       ├──► FETCH / DONE control regs
                             |                       └──► aia_tcdm_interco ──► aia_global_buffer
                             |                                ▲  ▲              (16 x 8 KB banks)
 dma_req/rsp ────────────────┼────────────────────────────────┘  │
                             |   AC0  AC1  AC2  AC3 ─────────────┘ (top row only)
                             |   AC4  AC5  AC6  AC7      each AC = aia_ac:
                             |   AC8  AC9  AC10 AC11       3-stage RV32I+MUL pipeline
                             |   AC12 AC13 AC14 AC15       aia_regfile (64 words)
                             |   N/S/W/E register links    aia_ky_sampler + aia_lfsr
                             |   between adjacent ACs      aia_interp
                             |                             8 KB imem, 32 KB dmem (aia_sram)
```

| file | role |
|---|---|
| `aia_pkg.sv` | opcodes, custom-instruction fields, CSR addresses, ALU ops, directions, bus structs, address map |
| `aia_top.sv` | two async FIFOs + the mesh; the top of the hierarchy |
| `aia_mesh.sv` | 4x4 cores, neighbour links, routing of core data accesses |
| `aia_ac.sv` | one accelerator core with its scratchpads |
| `aia_regfile.sv` | 64-word RF with neighbour, sampler and interpolator ports |
| `aia_ky_sampler.sv` | non-normalized Knuth-Yao sampler |
| `aia_lfsr.sv` | 32-bit LFSR random-bit source |
| `aia_interp.sv` | one-cycle LUT interpolation |
| `aia_event_unit.sv` | barrier unit |
| `aia_global_buffer.sv`, `aia_sram.sv` | banked buffer, memory arrays |
| `aia_tcdm_interco.sv` | bank arbitration onto the global buffer |
| `aia_mesh_interco.sv` | host access decoder for the mesh |
| `aia_cdc_fifo.sv` | Gray-pointer asynchronous FIFO |

## The Knuth-Yao sampler with a rejection item

### The idea

Write each weight `m[i]` in binary, one per row, most significant bit on
the left. Read the resulting bit matrix column by column. It describes a
binary tree: column `j` lists the leaves at depth `j+1`, and a random walk
down the tree, one fair coin per level, hits row `i` with probability
`m[i] / 2^W`. Knuth and Yao showed that this uses close to the entropy of
the distribution in coin flips. The catch is that the weights must sum to
exactly `2^W`.

This sampler does not normalize. It adds one weight

    m[N] = 2^ceil(log2(S)) - S,     S = m[0] + ... + m[N-1],

so that the N+1 weights sum to a power of two. If the walk ends on row N,
the draw is thrown away and the walk restarts from the root with fresh
bits. Conditioned on not hitting row N, each row `i < N` comes out with
probability `m[i] / S`, which is the wanted distribution. The padding
weight is less than `S`, so the expected number of restarts is below one.

### The walk, in hardware

A distance counter `d` encodes the position inside the current tree level.
At each level the unit takes:

* the column vector `n`, which is bit `W-1-level` of every weight plus the
  padding weight's bit on top (row N);
* one random bit `rb` from the LFSR.

It then computes

    d' = 2d + !rb - popcount(n)

If `d' >= 0`, the walk goes one level deeper with `d = d'`. If `d' < 0`, the
walk has reached a leaf: the result is the `(-d')`-th set bit of `n`,
counted from the top (row N first, then row N-1 down to row 0). For
example, with `n = 1011_0101` the 1st..5th set bits are rows 7, 5, 4, 2, 0.
If that row is N, the unit pulses `reject` and restarts at the first
column with `d = 0`.

The walk starts at the most significant column of `2^W`. The unit uses a
3-state machine:

| state | work per cycle | cycles |
|---|---|---|
| IDLE | wait for `start` (from the `sample` instruction in execute) | — |
| SUM | read one weight through the RF's row port, accumulate `S` | N |
| WALK | read one bit column through the RF's column port, one random bit, update `d` | one per bit drawn |

`done` is a combinational pulse in the cycle of the last bit. Together with
the cycle that issues `start`, a sample takes `1 + N + bits` cycles. The
core's testbench checks exactly this count against a software walk that
uses the same random bits. A zero size or an all-zero distribution returns
0 after `N + 1` cycles without drawing bits.

Worked trace, which the sampler testbench reproduces cycle by cycle.
The distribution is m = (1, 1, 1), so S = 3 and the padding weight is 1.
The total is 4 = 2^2, and every weight is `01`. The columns, from the most
significant, are `n = 0000` then `1111`. With seed 12 the LFSR yields
0, 0, 1, 0:

| step | n | rb | d' | outcome |
|---|---|---|---|---|
| 1 | 0 | 0 | 1 | descend |
| 2 | F | 0 | −1 | 1st set bit from top = row 3 = padding → reject, restart |
| 3 | 0 | 1 | 0 | descend |
| 4 | F | 0 | −3 | 3rd set bit from top = row 1 → result 1 |

### Where the weights live

The distribution sits in the private half of the register file: weight `i`
is the low `VAL_W` = 16 bits of R(32+i), with up to 31 weights (`SU.size`
is 5 bits). The register file has two ports just for the sampler:

* a row port that reads one whole private word;
* a column port that returns bit `b` of all 32 private words at once.

The column port is why the weights are stored one per row: a column is
then a plain wiring pattern across registers.

### Instruction and CSRs

`sample rd` (custom opcode, f8 = 2) starts the walk from the execute stage.
Fetch and decode are frozen until the result is written to `rd` (x1..x31,
a shared register, so neighbours can read it at once).

* `SU.seed` (CSR 0x7D1) loads the LFSR. A zero seed is replaced by 1.
* `SU.size` (CSR 0x7D2) gives N.

The LFSR is a 32-bit Galois register with polynomial
x^32 + x^22 + x^2 + x + 1 and advances by one bit per bit drawn.

## Register sharing between neighbours

Every core's register file has one extra read port on its shared half.
All four neighbours compete for it. A priority decoder grants one
request per cycle, in the order north, south, west, east. The losers see
`gnt` low and hold their request, and their decode stage stalls until
granted. A request towards the edge of the array (for example, north from
the top row) is granted at once and reads 0.

The custom arithmetic instruction with f8 = 1 takes its first operand from
the neighbour in direction f3 instead of from its own rs1. The direction
codes are 0 west (the "left" neighbour), 1 east, 2 north and 3 south.
The read happens in decode, like an ordinary register read. A value the
neighbour writes in the same cycle is passed through (write-first
bypass), so the reading core sees the newest value.

Why the shared half is x0..x31 and not R32..R63: any ordinary RISC-V
instruction then produces a value the neighbours can read, with no extra
move. The example the design is meant for is a pixel core summing its
four neighbours' labels with four neighbour-operand adds and no memory
traffic.

## Instruction set

Base: RV32I integer instructions (LUI, AUIPC, JAL, JALR, branches, OP-IMM,
OP), MUL, word-only LW/SW, CSRRW/S/C and their immediate forms, and ECALL.
ECALL halts the core and raises its `done` bit. Other encodings execute as
no-ops.

Custom instructions use the custom-0 major opcode (`0001011`) in R-type
layout:

| bits | field | f8 = 0 private | f8 = 1 shared | f8 = 2 SU | f8 = 3 IU |
|---|---|---|---|---|---|
| 31:29 | f8 | 0 | 1 | 2 | 3 |
| 28:25 | f7 | op 0..9 | op 0..9 | 0 | 0 |
| 24:20 | rs2 | rs2[4:0] | rs2 | 0 | 0 |
| 19:15 | rs1 | rs1[4:0] | shared register read from the neighbour | 0 | rs1 |
| 14:12 | f3 | {rd[5], rs1[5], rs2[5]} | direction | 0 | 0 |
| 11:7 | rd | rd[4:0] | rd | rd | rd |

The ten operations are: 0 add, 1 sub, 2 mul, 3 sll, 4 srl, 5 sra, 6 and,
7 or, 8 xor, 9 slt. With f8 = 0, f3 adds a sixth index bit to every
register field, so any of the 64 registers can be read or written. This is
how a program fills the private half with weights or a table.

## Interpolation unit

`lut rd, rs1` treats rs1 as a fixed-point number with F fraction bits.
The CSR at 0x7D0 holds F in bits [28:24] and the precision code in
bits [6:5]; code 0..3 selects 4-, 8-, 16- or 32-bit entries. At reset the
entries are 8 bits and F = 8.

The table is packed into the 1024 bits of R32..R63, entry k at bits
`[k*P +: P]`. The unit computes:

    int = rs1 >> F,   frac = rs1 mod 2^F,   offset = int * P
    y0 = entry(int),  y1 = entry(int+1)
    rd = y0 + (frac * (y1 - y0)) >>> F

The two entries come through two dedicated RF read ports. Everything is
combinational, so the result is written in the execute cycle. Entry
indexes wrap around the table.

## Memory system and host access

Each core has an 8 KB instruction memory (fetch from address 0) and a 32 KB
data scratchpad. Core data addresses are decoded by region:

| address | target | latency seen by the core |
|---|---|---|
| 0x1xxx_xxxx | own data scratchpad | 1 cycle, never blocked |
| 0x2000_0000 + | global buffer, **top-row cores only** | request held until the bank grants; data 1 cycle later |
| 0x3000_0000 | event unit: BARRIER 0x00, MASK 0x04, COUNT 0x08 | BARRIER held until all cores in MASK arrive |
| other | nothing: granted at once, reads 0 | — |

Cores outside the top row that address the global buffer also get an
immediate grant and read 0.

The global buffer has 16 banks of 8 KB, word-interleaved (bank = word
address mod 16). `aia_tcdm_interco` gives each bank to one master per
cycle, round robin. It has six masters: the four top-row cores, the host
path and the DMA port. Masters on different banks proceed in parallel.

**Barriers.** A core arrives at a barrier by storing to BARRIER. The event
unit withholds the grant until every core in MASK is storing there. It
then grants them all in the same cycle and increments COUNT. A waiting
core simply sits in its execute stage, with no polling and no interrupt.

**Host access.** The host sees the mesh through a 65-bit request FIFO
(write enable, address, data) and a 32-bit response FIFO. Both are
asynchronous, with Gray-coded pointers and two-flop synchronizers, depth 4.
`aia_mesh_interco` serves one request at a time, in four steps: accept,
issue, capture, push. A write therefore occupies it for 2 mesh cycles and
a read for 4. Its address map:

| address | target |
|---|---|
| 0x1cc0_0000 + (bit 15 = 0) | instruction memory of core cc |
| 0x1cc0_8000 + | data scratchpad of core cc |
| 0x2000_0000 + | global buffer |
| 0x3000_0004 / 0x08 | event unit MASK / COUNT |
| 0x3000_0010 | FETCH: per-core run enable; a 0 holds the core in reset |
| 0x3000_0014 | DONE: per-core halted flag (read only) |

Unmapped reads return 0.

## Core pipeline

Three stages:

* **Fetch:** synchronous instruction-memory read.
* **Decode:** register read, neighbour-port request, immediate generation.
* **Execute:** ALU, branch resolution, memory access, CSR and write-back.

Stalls come from several sources:

* A taken branch or jump flushes the two younger instructions.
* A load takes two execute cycles.
* An external access waits for its grant.
* A neighbour read that loses arbitration holds decode.
* `sample` holds the pipeline for its whole walk.

## How the design departs from the published description

* **y1 in the interpolator.** The published formula shifts the table by
  `offset + fraction` for the second entry. For the published example
  (8-bit entries, 8 fraction bits) that equals `offset + P`, and only
  `offset + P` gives linear interpolation between neighbouring entries.
  This design uses `offset + P`.
* **One distance unit per cycle.** The published block diagram draws
  sixteen distance units. The published timing diagram shows one column
  per cycle, and that is what is built. A pre-pass of N cycles sums the
  weights before the walk. At N = 2..4 a sample therefore costs about 6–8
  cycles rather than the ~4 implied by the published peak rate
  (1.27 GS/s on 16 cores at 300 MHz).
* **Register file write ports.** One write port instead of the two drawn.
* **CDC FIFO depth.** The FIFOs are 4 deep rather than the 3 slots drawn,
  because the Gray-code pointers need a power of two.
* **Choices where nothing is published.** These are all this design's own:
  the priority order N > S > W > E; the direction codes beyond
  "0 = left"; the order of the ten operations; the major opcode; the
  address map; the barrier mechanism; the control registers; edge
  behaviour; 16-bit sampler weights; the LFSR polynomial; the 3-stage
  pipeline.
* **Not built:**
  * the host RISC-V core, the SoC interconnect, 192 KB of SoC memory,
    the peripherals and debug;
  * the mesh DMA engine (only its port on the global-buffer interconnect
    exists, as `dma_req`/`dma_rsp` on the top);
  * clocking, regulators and pads.
* **Memories** are behavioural arrays standing for SRAM macros. The full
  configuration holds 16 × (8 + 32) KB + 128 KB = 768 KB of them.

## Capacity for the target workloads

At default parameters the mesh holds 512 KB of core scratchpad, 128 KB of
global buffer and one distribution of up to 31 items per core.

* **Bayes nets.** Standard benchmark Bayes nets, from cancer (5 nodes) to
  link (724 nodes, about 14 k table entries, about 57 KB as 32-bit
  fixed-point), fit with room to spare. Their largest variable domains
  (11 states in hailfinder) fit the 31-item limit.
* **Penguin.** A 500×333 two-label segmentation (166,500 pixels) fits
  when each pixel's observation and label are packed into 16 bits
  (333 KB).
* **Art.** A 384×288 sixteen-label stereo problem fits at one 32-bit word
  per pixel (442 KB).

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. `tb/aia_asm_pkg.sv`
holds a small assembler for the base and custom instructions and two
reference models: a bit-exact LFSR and a software Knuth-Yao walk.

| testbench | what it checks |
|---|---|
| `tb_aia_ky_sampler` | published trace; random distributions of 1..31 items against the software walk (result, bits drawn, rejections, latency `N + bits` from start to done); power-of-two totals; zero cases |
| `tb_aia_lfsr` | reset value, seed load with the zero-seed guard, stepping only when asked, long run against a bitwise model |
| `tb_aia_regfile` | all ports; x0; bypass; neighbour priority and grants |
| `tb_aia_interp` | all four precisions against a reference formula, random operands |
| `tb_aia_ac` | runs a program on one core: custom ALU ops with 6-bit indexes; neighbour operands with random grants; `sample` results and exact stall cycles; `lut`; CSRs; branches; external accesses with random grants |
| `tb_aia_event_unit` | barriers with masks |
| `tb_aia_tcdm_interco` | six random masters against a memory model; one grant per bank; no starvation; equal share under full load |
| `tb_aia_cdc_fifo` | order and data across unrelated clocks, full and empty |
| `tb_aia_mesh_interco` | random traffic to every region, back-pressure, and cycle counts |
| `tb_aia_mesh` | a 2×2 mesh running a whole program, with DMA traffic in parallel |
| `tb_aia_top` | the full 16-core design at default sizes, end to end (below) |
| `tb_aia_mrf_workload` | Gibbs-sampling MRF labelling on the full design (below) |

`tb_aia_top` runs the full design with no parameter overrides. It loads one
program into all 16 cores through the FIFOs and starts them. Each core:

1. passes a barrier;
2. reads all four neighbours;
3. writes and reads the global buffer;
4. draws 16 samples;
5. does a table lookup;
6. passes a second barrier;
7. halts.

The host then checks every result against values computed in the
testbench. The testbench also counts, and requires at least once:

* request-FIFO back-pressure;
* barrier waits;
* lost neighbour arbitration;
* edge reads;
* bank conflicts;
* sampler rejections and stalls;
* lookups;
* branch flushes;
* refused global-buffer accesses.

`tb_aia_mrf_workload` runs a small instance of the target workload on the
full design: MRF labelling of a 4x4 image by chromatic Gibbs sampling.
Each core holds one pixel. Cores of one checkerboard colour update while
the other colour waits at a barrier. An update goes like this:

1. Read the four neighbours' labels through the register links.
2. For each label, compute the energy: the data term plus a Potts
   penalty per disagreeing neighbour.
3. Turn each energy into a weight with `lut`, from a 64-entry decaying
   table in R48..R63.
4. Write the weights to R32 and up.
5. Draw the new label with `sample`.

It runs six sweeps with 2 labels (segmentation) and with 16 labels.
Every label drawn is checked against a software model that uses the same
random bits. The testbench also prints the mesh cycles per sweep, which
is about 175 cycles with 2 labels and 910 with 16, including barrier and
host-polling overhead.

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/aia_pkg.sv tb/aia_asm_pkg.sv tb/tb_aia_top.sv --top-module tb_aia_top
./obj_dir/Vtb_aia_top
```

Replace `tb_aia_top` with any other testbench name. The unit testbenches
that do not use the assembler need only `rtl/aia_pkg.sv` and their own
file.
