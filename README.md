# SAGAR: a self-configuring reconfigurable systolic array for GEMM

A single large systolic array is efficient only when the matrices it multiplies are at least as
large as the array; many small arrays are efficient for small or skinny matrices but re-read the
same operands many times. SAGAR keeps both options in one piece of hardware. Its 16384 MACs are
built as a 32 x 32 grid of small 4 x 4 systolic cells, and every cell can take its operands either
from its neighbour (so cells chain into one larger array) or from its own dedicated link to the
on-chip buffers (so it starts a new, independent array). Loading a configuration register regroups
the grid into equal partitions anywhere from 4 x 4 to 128 x 128 MACs, in output-stationary,
weight-stationary or input-stationary dataflow. Which configuration to use for a given GEMM is
chosen by a small neural network, AdaptNet, evaluated on a dedicated core (AdaptNetX) next to the
array: it maps the GEMM dimensions (M, N, K) to one of 858 configuration classes.

This RTL implements the complete datapath and control: MACs, cells, bypass links and their
configuration register, banked double-buffered operand buffers with read collation, the output
buffer, per-partition controllers and address generation, the AdaptNetX core with its weight
SRAM, the class-to-configuration table, and the top-level sequence
"recommend, set multiplexers, partition the workload, run".

## 1. Numbers

| Item | Value |
|---|---|
| Array | 32 x 32 systolic cells, 4 x 4 MACs each (128 x 128 MACs) |
| Operands / accumulators | 8-bit signed / 32-bit |
| Partition shapes | 2^a x 2^b cells, a, b in 0..5, all partitions equal |
| Dataflows | OS, WS, IS |
| Operand buffers (A and B) | 32 slices x 32 banks x 1 KB each, double buffered |
| Output buffer | 32 slices x 32 banks x 1 KB, 32-bit words, accumulate on write |
| Bypass link latency | 3 flops per link (one per 8 cells of distance) |
| Configuration register | 2 x 32 x 31 = 1984 mux-select bits |
| AdaptNetX | 2 units x 256 multipliers, 128 hidden nodes, 858 classes |
| AdaptNetX SRAM | 3 x 10240 x 8 B embeddings + 986 x 256 B weights = 492 KB |
| Recommendation latency | 508 cycles at full size |

The numbers the design takes from the paper are the array size, the cell size, the 1 KB banks,
double buffering, the flop every 8 cells, the network shape (128 hidden nodes, 858 classes), and
the 512 multipliers in two units. Operand precision, the embedding size, the exact data layouts
and the configuration encoding are this design's own choices.

## 2. Module map

```
sara_top
 +- sara_adaptnetx            recommendation network core
 |   +- sara_anx_unit x2      256-wide dot-product unit
 +- sara_config_table         class ID -> configuration
 +- sara_bypass_config        configuration register -> mux selects
 +- sara_rsa_array            32 x 32 cells
 |   +- sara_systolic_cell    4 x 4 MACs + edge muxes
 |   |   +- sara_mac
 |   +- sara_bypass_link x3   per cell: A in, B in, C out
 +- sara_part_ctrl x1024      one per cell, active at partition corners
 +- sara_link_agu x1024       per-cell link address generation
 +- sara_operand_buffer x64   32 slices for A, 32 for B
 +- sara_output_buffer x32
```

`sara_pkg` holds the shared types: the MAC operation code, the configuration
`array_cfg_t {df, log2h, log2w}`, the GEMM dimensions, the controller broadcast `part_ctl_t`
and the derived geometry `geom_t` with the function `derive()` that computes it.

## 3. The MAC and the two datapaths

Each MAC has a horizontal operand register, a vertical register, an accumulator and a stationary
operand register. The controller broadcasts one operation per cycle to all MACs of a partition:

| Operation | Effect |
|---|---|
| `OP_CLEAR` | zero accumulator and forwarding registers |
| `OP_OS_MAC` | acc += left x top; forward left to the right, top downwards |
| `OP_DRAIN` | bottom output = acc; acc <= value from above (shift the column down) |
| `OP_LOAD` | stationary <= top; forward top downwards |
| `OP_ST_MAC` | bottom <= top + left x stationary; forward left |

Output stationary keeps C in the accumulators: A streams in from the left, B from the top, both
skewed by one cycle per row/column, and after K + H + W - 2 MAC cycles the accumulators are
shifted out of the bottom of the partition in H drain cycles.

Weight stationary loads a H x W tile of B (reduction index k down the rows, n across the
columns) in H cycles, then streams rows of A from the left; partial sums flow down and leave the
bottom row, one output row per cycle. Reduction tiles (K > H) are summed in the output buffer
with accumulate-on-write.

Input stationary uses the same datapath on the transposed problem, C^T = B^T A^T: the host stores
B^T where A would go and A^T where B would go, the array sees dimensions (N, M, K), and the
result appears in the output buffer as C^T.

## 4. Cells, bypass links and reconfiguration

A systolic cell is 4 x 4 MACs plus two multiplexers: on the left edge each row selects the
right edge of the left neighbour cell or the cell's own horizontal bypass link; on the top edge
each column selects the bottom edge of the cell above or the cell's vertical bypass link. The
bottom edge of every cell drives both the cell below and the cell's output link. Every cell thus
owns three links: A in, B in and C out. Only cells on a partition edge use them: the left column
reads A, the top row reads B, the bottom row writes C.

`sara_bypass_config` turns a configuration into mux selects. For cell (i, j) the horizontal
select is 1 exactly when j is a multiple of the partition width in cells (2^log2w), the vertical
select when i is a multiple of 2^log2h. The register stores one bit per internal cell boundary
per direction and per row/column, 1984 bits in all. The paper quotes a 3968-bit vector; that
count also covers a shared vertical link that carries both B in and C out, which this design
replaces with a separate output link and therefore needs no select for.

The links are long wires, up to 31 cells. Each carries 3 flops (one per 8 cells). All links get
the same 3 flops, whatever their distance, so every partition sees the same read latency
(1 cycle SRAM + 3 link = 4 cycles) and write latency (4 + 3 = 7 cycles) and all partitions can
run one common schedule.

## 5. Scheduling and workload partitioning (the hard part)

A configuration with partitions of h x w cells gives H = 4h by W = 4w MACs per partition and
PR = 32/h by PC = 32/w partitions. Every cell has a controller (`sara_part_ctrl`), but only the
one at a partition's top-left corner starts; the operation it chooses is propagated cell to cell
along the partition (down the left column, then along each row), one register per hop, so MAC
operations reach each cell in step with the skewed operand wavefront. All corner controllers run
the same schedule in lockstep; partition (pr, pc) works on different tiles of C.

**Output stationary.** C is tiled in H x W tiles. Tile row tm = u * PR + pr and tile column
tn = v * PC + pc go to partition (pr, pc) in step (u, v), for u < SU = ceil(ceil(M/H)/PR) and
v < SV = ceil(ceil(N/W)/PC). Each step takes

    1 (clear) + (K + H + W - 2) (MAC) + H (drain) + 8 (flush)

cycles, where the flush covers the 7-cycle write latency plus one cycle. The whole GEMM takes
SU x SV steps.

**Weight / input stationary.** For each column step v and reduction tile tk < KT = ceil(K/H),
the partition loads the B tile (H cycles), then streams MC rows of A, where
MC = ceil(ceil(M/4)/PR) x 4 is the number of A rows per partition row; partition row pr handles
the interleaved row set m = ((i/4) x PR + pr) x 4 + i mod 4. One step takes

    H (load) + (MC + H + W) (stream and drain) + 8 (flush)

cycles, and there are SV x KT steps. Steps with tk > 0 accumulate into the output buffer.

**Address generation.** Each cell's `sara_link_agu` turns the broadcast (`part_ctl_t`: phase,
schedule counter tau, tile indices and base addresses) into per-lane requests. The skew is built
in: lane x of the A link in output-stationary mode asks for reduction index k = tau - x. Any
request for an element outside the matrices is not issued and the buffer returns zero, so
partial edge tiles and the systolic fill/drain need no special case.

**Data layouts.** The host places operands so that partitions that need the same data ask the
same bank for the same word in the same cycle:

| Data | Slice | Lane | Word in slice |
|---|---|---|---|
| A, OS | (m / 4) mod 32 | m mod 4 | u x K + k |
| B, OS | (n / 4) mod 32 | n mod 4 | v x K + k |
| A, WS | pr x h + (k / 4) mod h | k mod 4 | (k / H) x MC + i |
| B, WS | (n / 4) mod 32 | n mod 4 | v x KT x H + k |
| C | (n / 4) mod 32 | n mod 4 | bank (m/4) mod 32, word ((n/128) x ZM + m/128) x 4 + m mod 4 |

with ZM = ceil(M/128). The word address is split into bank (upper bits) and row (lower bits),
one unified address space per slice.

**Read collation.** When partitions share an operand (for example all partitions in a row of
partitions read the same A rows in output-stationary mode), several links of a slice request the
same word in the same cycle. The operand buffer serves each distinct (bank, lane, word) once and
broadcasts it; `n_req` and `n_access` count requests and actual bank accesses per cycle, and the
top accumulates them into `rd_requests` / `rd_accesses`. Two requests for different words of one
bank would be a conflict; the layouts above never produce one, and an assertion checks this.

## 6. Buffers

`sara_operand_buffer` is one slice: 32 banks of 1 KB, each bank split into 4 byte lanes
(one per MAC row of a cell) and two halves. The links read the active half while the host fills
the other; `swap` exchanges them. Reads have one cycle of latency. Any link of the slice can
read any bank of the slice.

`sara_output_buffer` is one slice of 32 banks x 64 words x 4 lanes x 32 bits. Output links write
with optional accumulate. Because a cell column's bottom cells in different partitions write
different rows m, they always hit different banks. The host reads one word (4 lanes) per cycle.

## 7. AdaptNetX

The network has three inputs (M, N, K). Each is looked up in its own embedding table
(8 signed bytes per entry, one row per value, values above 10239 clamped), giving a 24-entry
vector plus a constant 1 that carries the biases. Layer 1 is a dense layer of 128 neurons with
ReLU, an arithmetic right shift by `hid_shift` and saturation to 0..127. Layer 2 has 858 outputs;
the core returns the index of the largest one (softmax does not change the ranking).

The two `sara_anx_unit`s each hold the current layer's input vector and take one 256-byte weight
row per cycle: 256 multipliers, a registered product stage, and a binary adder tree into a
registered result, 2 cycles of latency and one neuron per cycle per unit. A query takes
5 cycles of embedding lookup, 64 + 429 issue cycles for the two layers, and pipeline/turnaround
cycles, 508 cycles in total (the paper reports 576 for its schedule).

The weights are not part of the RTL: the host writes embeddings (`anx_wr_sel = 0`, one 64-bit row
per write) and weight rows (`anx_wr_sel = 1`, 32 words of 8 bytes per row; rows 0..127 are
layer 1, rows 128..985 layer 2). `sara_config_table` maps the class to a configuration; it is
host-writable and resets to an enumeration of the 108 shape/dataflow combinations
(class c: dataflow c mod 3, log2h = (c/3) mod 6, log2w = (c/18) mod 6). The paper does not list
its class-to-configuration mapping, so a trained table must be loaded with the trained weights.

## 8. Top-level sequence and host interface

`sara_top` runs one GEMM per `start` pulse:

1. Unless `cfg_force` is set, AdaptNetX infers a class from `dims`; the class table gives the
   configuration (`class_id`, `infer_cycles`).
2. The configuration is written into the bypass register (`cfg_used`).
3. The corner controllers start and run the schedule (`run_cycles`).
4. `done` pulses when all controllers are idle.

Before `start` the host writes A and B into the fill halves (`a_wr_*`, `b_wr_*`: slice, word
address, 4 bytes) and pulses `buf_swap`; afterwards it reads C with `c_rd_slice` / `c_rd_addr`
(one cycle latency). All ports are plain signals, packed structs or unpacked arrays.

Inference runs before each GEMM; the paper overlaps inference for the next layer with the
current layer's execution, which this design does not do.

## 9. Capacity

Per operand lane each slice holds 4096 words in its active half. A GEMM fits in one pass when
ceil(M/128) x K <= 4096, ceil(N/128) x K <= 4096 and ceil(M/128) x ceil(N/128) <= 16 (output
banks of 64 words). Of the paper's synthetic workloads, all fit except the square 1024 and 2048
cases; larger GEMMs must be split by the host, using accumulate-on-write across K splits.

## 10. Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_sara_mac` | all six operations against a model, every cycle |
| `tb_sara_systolic_cell` | 4 x 4 cell with random ops, edge data and mux selects against a MAC-grid model |
| `tb_sara_bypass_link` | data unchanged, exactly 3 cycles late |
| `tb_sara_bypass_config` | every select for all 108 configurations, reset state, hold without load |
| `tb_sara_rsa_array` | 4 x 4 cells of 2 x 2 MACs against a cycle model with links, random ops and shapes |
| `tb_sara_operand_buffer` | double buffering, read data, collation counts, conflict flag (full size slice) |
| `tb_sara_output_buffer` | random writes / accumulates, host readback, conflict flag |
| `tb_sara_part_ctrl` | busy length and operation counts against the schedule formulas |
| `tb_sara_link_agu` | every lane's request and address against the layout rules |
| `tb_sara_anx_unit` | 256-wide dot products, 2-cycle latency, tags |
| `tb_sara_adaptnetx` | class against a reference network with random weights, query latency |
| `tb_sara_config_table` | reset mapping, registered lookup, host writes |
| `tb_sara_top` | end-to-end GEMMs, see below |

`tb_sara_top` (with the shared `sara_tb_body.svh`) runs the whole accelerator at a reduced size:
4 x 4 cells of 4 x 4 MACs (16 x 16 MACs), AdaptNetX with 16 classes, 16 hidden nodes and 32-wide
units. It runs GEMMs in all three dataflows on monolithic, fully distributed and mixed partition
shapes, with sizes that are not multiples of the tiles and with K split over several reduction
tiles, plus one GEMM whose configuration AdaptNetX chooses. It checks every element of C against a
reference product, the configuration used, the run length against the schedule formula, that no
bank conflict occurred, and that each mechanism (each dataflow, each kind of partitioning,
inference, read collation, partial tiles, K accumulation, buffer swap, reconfiguration) was
exercised. Its independent model of the data layouts writes the operands through the host ports.

This 16 x 16-MAC configuration is the largest simulated end to end. The full-size design
(16384 MACs, 2 MB of operand buffers, 1 MB of output buffer, 492 KB AdaptNetX SRAM) passes lint
and elaboration with all default parameters, but compiling a cycle simulator for it takes longer
than ten minutes, so there is no full-size simulation run.

Simulating with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sara_pkg.sv \
  $(ls rtl/*.sv | grep -v pkg) tb/tb_sara_top.sv --top-module tb_sara_top
./obj_dir/Vtb_sara_top
```

`sara_pkg.sv` must come first on the command line.

## 11. Differences from the paper

* Separate vertical output link per cell instead of one shared vertical link for B and C; hence
  a 1984-bit instead of 3968-bit configuration vector.
* All partitions of one configuration have the same power-of-two shape.
* All bypass links have 3 flops regardless of distance, so all partitions share one schedule.
* Recommendation inference is not overlapped with the previous GEMM.
* The class-to-configuration mapping and the network weights are loaded by the host; the
  reset table is an enumeration, not a trained mapping.
* Operand precision, embedding width and data layouts are not given by the paper and are this
  design's choice.
* Synthesis of the full-size top did not complete within a ten-minute run.
