# GRIP: a graph-neural-network inference accelerator in SystemVerilog

A graph neural network (GNN) layer computes a new feature vector for every
vertex. To do that it collects messages from the vertex's neighbours, combines
them, multiplies the result by a weight matrix and applies a non-linearity.
On CPUs and GPUs this is slow for low-latency inference. Each vertex touches
thousands of neighbour features with little reuse, so caches and DRAM bandwidth
limit it long before arithmetic does.

GRIP splits every layer into three phases. Each phase has its own execution unit
and its own on-chip memories:

| phase | unit | work |
|---|---|---|
| edge-accumulate | edge unit | for every edge (u, v): `m = gather(h_u, h_v)`, then `e_v = reduce(e_v, m)` |
| vertex-accumulate | vertex unit | `a_v += W^T e_v` (dense matrix-vector) |
| vertex-update | update unit | `h'_v = activate(a_v)` |

The edge phase is limited by memory bandwidth and the vertex phase by arithmetic.
Giving each phase its own hardware lets it be sized for its own bottleneck. A
host sends commands; the units run concurrently and synchronise only through
explicit barriers.

This repository holds synthesizable RTL for the whole accelerator (top module
`grip_top`), a self-checking testbench for every block and an end-to-end
testbench. The end-to-end test runs one layer at full size.

## 1. Data and number format

All datapath values are 16-bit signed fixed point, Q8.8: eight integer bits and
eight fraction bits. Additions and multiplications saturate to the 16-bit range.
A product is formed at full width and shifted right by 8. The multiplier array
sums its 16 products at full width and saturates once. The package `grip_pkg`
holds the types and helpers (`qadd`, `qmul`, `sat16`).

The unit of storage is a *line* of 32 elements (512 bits). This is the width of
one DRAM channel port and of one crossbar beat. A feature slice of 64 elements
(the tile width `f`) is therefore two lines, or *beats*.

## 2. How a layer is run

The host cuts the graph into *nodeflow partitions*. A partition is the
bipartite graph between a set of source vertices and a tile of `m = 12`
destination vertices, restricted to a 64-element column of the features. For
each tile the host sends a program like the one the end-to-end testbench uses:

```
LOAD  (per channel)  edge lists and source features -> nodeflow source banks
LOAD                 weights -> global weight buffer
BARRIER
FILL                 weight slice -> tile-buffer half 0
EDGE                 gather/reduce over all edges -> edge-accumulator half 0
BARRIER
VERTEX (cooperative) half 0 x weights -> vertex accumulator
FILL                 next weight slice -> tile-buffer half 1 (overlaps the VERTEX)
BARRIER
VERTEX (parallel)    ...
BARRIER
UPDATE               activate -> nodeflow buffer (next layer's features)
BARRIER
STORE (per channel)  results -> DRAM
```

When a tile's incoming edges are spread over several source partitions (the
host chunks source vertices as well as destinations), one `EDGE` command runs per
non-empty partition of that column, only the first with `clear` set, so all edges
of every destination are reduced before the `VERTEX` command. Loading the next
partition's features overlaps the current `EDGE` through the free addresses of
the banks. Long feature vectors take several column tiles. Each further `EDGE`/`VERTEX`
pair accumulates into the same vertex-accumulator half, with `init` clear. Almost
every buffer has two halves, and each command names the half it uses. This lets
the host, for example, load or reduce the next tile while the vertex unit works
on the current one.

### Command format

A command is 128 bits: `{op[3:0], arg[123:0]}`. `arg` is a packed struct per
opcode (`grip_pkg`):

| op | struct | fields |
|---|---|---|
| `LOAD`/`STORE` | `mem_cmd_t` | channel, target (source features, source edges, destination features, global weight buffer), DRAM line address, buffer address, line count |
| `FILL` | `fill_cmd_t` | tile half, weight-buffer word, tile word, word count |
| `EDGE` | `ea_cmd_t` | accumulator half, clear, use R0, gather op, reduce op, gather constant, vertex-list base, sources per lane, feature offset, beats, destination base and stride |
| `VERTEX` | `va_cmd_t` | edge-acc half, vertex-acc half, init, parallel, vertices, input chunks (16), output chunks (32 or 16), first output chunk, tile half and address |
| `UPDATE` | `upd_cmd_t` | vertex-acc half, vertices, 32-element chunks, ReLU or LUT, destination (nodeflow / edge acc / vertex acc), destination half, nodeflow base and stride |
| `CFG` | `cfg_cmd_t` | activation register address and value |
| `BARRIER`, `NOP` | - | - |

## 3. Control unit (`control_unit`)

Commands enter a 16-deep FIFO. The unit dequeues them strictly in order. It
issues each command to its target without waiting for it to finish. The
targets are the four memory channels, the fill engine, the edge unit, the
vertex unit and the update unit.

A command whose target is still busy waits at the head of the FIFO. Commands
behind it wait too. A `BARRIER` leaves the head only when no unit is busy.
`CFG` and `NOP` complete immediately.

The 64-bit status register is laid out as follows:

| bits | content |
|---|---|
| [31:0] | number of commands completed |
| [35:32] | opcode of the last completed command |
| [63:56] | one busy bit per unit |

## 4. Edge unit (`edge_unit`)

This is the bandwidth-bound phase. It has three parts:

- **N = 4 prefetch lanes** (`prefetch_lane`). Each lane owns one nodeflow source
  bank, and so one DRAM channel. Its stages are:
  - P0: dequeue the next source vertex from the vertex list.
  - P1: iterate over that vertex's outgoing edges.
  - P2: read the source feature, one beat at a time.

  Each beat becomes a crossbar message `{dst, coef, beat, data}`.
- **A 4×4 crossbar** (`xbar`). It routes each beat to reduce lane `dst mod 4`.
  Each output arbitrates round-robin and pushes back on the losers. `conflict`
  flags a cycle in which two lanes wanted the same output.
- **M = 4 reduce lanes** (`reduce_lane`). Each lane owns the destination
  vertices `v` with `v mod 4` equal to its index. Its stages are:
  - R0: read the destination feature (optional).
  - R1: gather PE.
  - R2: read the edge accumulator.
  - R3: reduce PE.
  - R4: write back.

  The lane accepts one beat per cycle. A beat that hits the same accumulator
  entry as one of the two beats ahead of it takes that value by forwarding from
  R4 or from the line just written. The `bypass` output pulses when this
  happens. An entry not written since the tile was cleared reads as "first",
  and the message then replaces it.

Gather ops: `h_u`, `h_v`, `h_u + h_v`, `h_u * h_v`, `c * h_u`.
Reduce ops: sum, max, and mean. Mean is a sum of messages each scaled by the edge
coefficient, which the host sets to `1/deg(v)`. Edge records also carry a general
coefficient (e.g. GCN normalisation).

**Edge memory layout** (this design's). Each source bank has 1024 32-bit words,
stored as 64 lines of 16 words.

| record | position | fields |
|---|---|---|
| vertex-list entry `s` | word `vlist_base + s` | `{feat_addr[7:0], first[9:0], count[7:0]}` |
| edge record | from word `first` | `{dst[3:0], coef[15:0]}` |

The feature line of beat `b` of vertex `s` is `feat_addr + feat_off + b`.

The **edge accumulator** (`eacc_bank` × 4) holds the `12 × 64` tile, which is
1.5 KiB per half, double buffered. Each entry has a written bit, so a tile is
cleared in one cycle. The vertex unit reads it 16 elements at a time; unwritten
entries read as zero.

## 5. Vertex unit and the weight path

This is the compute-bound phase. The pieces:

- **Multiplier array** (`mat_array`): 16 × 32 weight-stationary PEs, built from
  two 16×16 blocks. An input vector of 16 elements is broadcast along the rows,
  and the 32 columns are summed by adder trees.
  - The latency is exactly six cycles: three to distribute, one to multiply, two
    to reduce.
  - *Cooperative* mode: both blocks see the same vertex and produce 32 outputs.
  - *Parallel* mode: each block takes a different vertex and produces 16 outputs.
    The same 16×16 weights are written into both blocks.
  - Every PE has two weight registers (banks). Each input carries the bank it
    uses, so the spare bank can be reloaded while inputs are still in flight.
    `busy[b]` reports that bank `b` is still needed.
- **Vertex unit** (`vertex_unit`). The loop order is: output chunk, then input
  chunk, then the vertices of the tile. A weight block is therefore loaded once
  and reused by all (up to 12) vertices. This is *vertex-tiling*, and it
  multiplies the effective weight bandwidth by the tile size.
  - The unit issues from bank `cur` only while the sequencer marks that bank
    full.
  - It pulses `release_bank` with the last vertex of a block.
  - A cycle spent waiting for weights is a *weight stall* (`wstall`).
  - Results are added into the vertex accumulator (`vacc`) in the cycle they
    leave the array. There is no read-after-write hazard to manage.
- **Global weight buffer** (`global_weight_buffer`): 2 MiB. It reads 64 weights
  per cycle (16384 words) and is written in 512-bit halves from DRAM.
- **Tile buffer** (`tile_buffer`): two halves of 64 KiB (512 words each).
- **Weight sequencer** (`weight_seq`) has two engines:
  - The *fill* engine copies a weight slice from the global buffer into a tile
    half.
  - The *feed* engine streams blocks from the tile half into the array's spare
    bank, in the vertex unit's loop order. A block is 8 words in cooperative
    layout (word `j` holds rows `2j`, `2j+1` × 32 columns) or 4 words in
    parallel layout (rows `4j..4j+3` × 16 columns). A bank is written only when
    it is neither full nor busy.

## 6. Update unit and the activation function (`update_unit`, `activate_pe`)

The update unit reads the vertex accumulator one 32-element line per cycle. It
passes each line through 32 activate PEs and writes the result, one cycle later,
to one of three places:

- the nodeflow source bank `v mod 4`, at line `base + (v div 4)·stride + chunk`,
  as features for the next layer;
- the edge accumulator, for programs that chain;
- the vertex accumulator.

Each activate PE is either ReLU or a two-level lookup table with linear
interpolation:

- The input is converted to Q4.12.
- Inside `±2^a`, a 33-entry table spaced `2^(a+1)/32` apart is used.
- Inside `±2^b`, a 9-entry table spaced `2^(b+1)/8` apart is used.
- Beyond `±2^b`, each sign separately either clamps to the end table entry or
  applies a linear function `s·x + i`.

`a` and `b` are 0..3. The tables, ranges and overflow modes are set with `CFG`
commands:

| addresses | register |
|---|---|
| 0..32 | level-1 table |
| 33..41 | level-2 table |
| 42 | a |
| 43 | b |
| 44 | overflow mode: bit 0 positive linear, bit 1 negative linear |
| 45..48 | positive slope, positive intercept, negative slope, negative intercept |

## 7. Memory controller (`mem_ctrl`, `mem_chan`)

There is one engine per DRAM channel. Channel `i` serves nodeflow source bank
`i` and destination bank `i`, so each prefetch lane streams from its own
channel. All transfers are bulk commands scheduled by the host. The units never
wait on DRAM.

- `LOAD` streams read requests and writes the in-order responses into the
  target buffer.
- `STORE` reads feature lines of the source bank and writes them out.
- Only one channel at a time may write the global weight buffer. It holds a lock
  for the whole transfer.

The DRAM port of each channel works as follows:

- A request `{we, addr, wdata}` is taken on `valid && ready`.
- Read data returns in order on `rsp_valid`, without back-pressure.
- Addresses count 512-bit lines.

The DRAM controllers and devices themselves are outside the design.

## 8. Top level (`grip_top`)

`grip_top` wires the blocks as above. Its ports are the host command queue, the
status register, four DRAM channel ports and a 6-bit `events` vector. The
vector has one pulse per mechanism, for performance counting:

| bit | event |
|---|---|
| 0 | weight stall |
| 1 | reduce-lane forwarding |
| 2 | crossbar conflict |
| 3 | barrier wait |
| 4 | parallel-mode issue |
| 5 | cooperative-mode issue |

### Default sizes

| parameter | value | origin |
|---|---|---|
| prefetch lanes / DRAM channels | 4 | paper |
| reduce lanes | 4 | this design |
| crossbar width | 32 elements | paper |
| tile `m × f` | 12 × 64 | paper |
| PE array | 16 × 32, 6-cycle latency | paper |
| global weight buffer | 2 MiB, 64 weights/cycle | paper |
| tile buffer | 2 × 64 KiB | paper |
| nodeflow source bank | 16 KiB features + 4 KiB edges (× 4 = the paper's 4 × 20 KiB) | split is this design's |
| nodeflow destination bank | 4 KiB × 4 | this design |
| vertex accumulator | 2 × 12 × 512 elements | this design (widest evaluated layer) |
| command FIFO | 16 | this design |
| activate PEs | 32 | this design |

## 9. Where this RTL departs from the paper, and what it leaves out

Where the paper is silent, this design makes its own choices:

- The command encoding, buffer layouts, handshakes, the status layout and the
  event port.
- Forwarding in the reduce lanes. The paper does not discuss the accumulator
  hazard.
- Round-robin crossbar arbitration.
- Per-entry written bits to clear the edge accumulator.
- The Q8.8 binary point. The paper gives only "16-bit fixed point".

Where the paper conflicts with itself:

- It describes N + M nodeflow memories in the text but lists only four in its
  parameter table. This design builds four source banks plus four separate
  destination banks.
- Its pipeline figure shows R0 as a destination-feature read, while its caption
  speaks of source features. The destination read was built.

What is not built:

- The DRAM controllers, PHYs and devices; a behavioural channel model
  (`tb/dram_model.sv`) stands in for them in simulation.
- The host.
- The nodeflow construction and sampling, which the host does offline.
- Clocking, power and other physical aspects of the 28 nm implementation.

Limits of what was built:

- The activation ranges are limited to `a, b ≤ 3` so that they fit Q4.12.
- The vertex accumulator holds one tile at up to 512 outputs. Wider layers need
  several programs.
- The evaluated models (GCN, GraphSAGE-max, GIN, G-GCN with a 602-512-256 layer
  shape and 25/10 samples) fit these sizes when each program loads its own
  weight matrices. The largest single matrix, 602 × 602, is about 0.7 MiB.

## 10. Simulation and verification

Every block has a self-checking testbench in `tb/`. Each one compares the block
against an independent model and ends with a `TB_RESULT checks=N failures=M`
line. To run one, for example the full accelerator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/grip_pkg.sv tb/tb_grip_top.sv --top-module tb_grip_top
obj_dir/Vtb_grip_top
```

`tb_grip_top` runs at the default sizes: the full 2 MiB weight buffer and all
lanes. The program:

1. Builds random nodeflow partitions on all four channels.
2. Loads them and a 64 × 96 weight slice.
3. Reduces with weighted sums.
4. Multiplies in cooperative mode and then in parallel mode.
5. Applies ReLU.
6. Stores the result.

The testbench then compares the DRAM contents with its own model of the same
arithmetic. It fails if any of the six events never occurs. It takes about a
minute to build and run.

The unit testbenches go further on each block:

- random graphs and all gather/reduce operations on the edge unit;
- forwarding and back-pressure on the reduce lane;
- the exact six-cycle latency and bank swapping on the array;
- the LUT tables against a reference on the activation;
- lock serialisation under random DRAM back-pressure on the memory controller;
- in-order issue and barrier semantics on the control unit.

The RTL is clean under `verilator --lint-only -Wall` except for warnings about
unused bits. These are spare fields of the packed command structs and the
unused flag bits of the vertex-list records, and they are intentional.

Both verilator and the slang front end of yosys accept every file. A yosys
synthesis run of the whole top, of the vertex accumulator (`vacc`, three
combinational read ports on 2 x 12 x 16 lines) and of the multiplier array did
not finish within 15 minutes; the smaller blocks synthesise in seconds, the
update unit with its 32 activate PEs in about three minutes. A production flow
would map the buffers onto SRAM macros.
