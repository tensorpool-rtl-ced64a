# TensorPool: a 64-Tile shared-L1 cluster with latency-tolerant tensor engines

TensorPool puts 16 GEMM tensor engines and 256 small cores on one 4 MiB L1
scratchpad. Every core and every engine can reach every one of the 2048 banks
directly, with no copies between private memories. The catch is the
interconnect. A bank in the engine's own Tile answers in one cycle. A bank in
another Group is 9 cycles away and has to be shared with everyone else. A
tensor engine needs a 512-bit line from memory almost every cycle to keep its
256 multipliers busy.

The design rests on two ideas:

- **The engine is built to tolerate latency.** Every operand stream has a
  reorder buffer and a table of outstanding lines, so the engine can keep many
  requests in flight and does not care in what order they come back.
- **The network is narrow and cheap, and wide lines are rebuilt at the far
  end.** A 512-bit read leaves the engine's Tile as one request carrying only
  its first address (a *burst*). The target Tile expands it into 16 bank
  reads and sends the data back K = 4 words at a time. A 512-bit write leaves
  as 8 beats of J = 2 words.

This repository gives synthesizable SystemVerilog for the full cluster memory
system and the tensor engines:

- all 2048 L1 banks;
- the Tile, SubGroup and Group crossbars with their pipeline registers;
- the Burst-Grouper and Burst-Distributor;
- the tensor engine: a 32 × 8 FP16 FMA array, its streamer and its controller.

The RISC-V cores are not included; their load/store ports are top-level ports.
Neither are their instruction caches, the DMA engine, or the L2 interconnect.
The largest simulated configuration is the full 64-Tile cluster, with 16
engines and 256 core ports, at its default parameters.

## Hierarchy

```
tensorpool   4 Groups, 12 × (16x16 crossbar) between Groups
 └ tp_group      4 SubGroups, 12 × (4x4 crossbar) between SubGroups, 2+2 spill registers
    └ tp_subgroup   4 Tiles, one 4x4 crossbar, spill registers at the boundary
       └ tp_tile       32 banks, local crossbar, 4 core ports, 7 out + 7 in remote ports
          └ tp_redmule   tensor engine (Tile 0 of every SubGroup only)
```

**Address map.** Byte addresses are 22 bits (4 MiB):

| Bits | Field |
|---|---|
| [1:0] | byte |
| [6:2] | bank in the Tile |
| [12:7] | Tile = {group, subgroup, tile} |
| [21:13] | row in the bank (512 rows of 32 bits) |

A 64-byte line, which is what the engine reads and writes, lies in 16
neighbouring banks of a single Tile. Consecutive lines alternate between the
two halves of a Tile, and then move on to the next Tile. A row-major matrix
is therefore spread over many Tiles. This interleaving is this design's
choice.

**Remote ports.** Every Tile has seven outbound and seven inbound remote
ports:

| Port | Goes to |
|---|---|
| 0 | the other Tiles of the own SubGroup |
| 1–3 | SubGroup +1, +2, +3 of the own Group |
| 4–6 | Group +1, +2, +3 |

Each port is a valid/ready request channel plus a valid/ready response
channel. The crossbar for distance *d* connects the Tiles of unit *s* to the
Tiles of unit (*s*+*d*) mod 4. Crossbars route on the target Tile index and
arbitrate round-robin.

**Latency.** Spill registers, two-entry buffers with registered valid and
ready, cut every boundary. A core load, counted from request handshake to
data, takes:

| Target | Cycles |
|---|---|
| Own Tile | 1 |
| Own SubGroup | 3 |
| Own Group | 5 |
| Another Group | 9 |

The top-level testbench measures exactly these numbers. The registers are
placed as follows:

- one at the Tile boundary on every outbound request;
- one on the response leaving the Burst-Distributor;
- one each way at the SubGroup boundary;
- two each way at the Group boundary.

Because the path from one Tile to the next always passes a register whose
outputs are flops, the cluster has no combinational loop. Verilator still
reports UNOPTFLAT on the ready/valid vectors, because it treats a whole
vector as one signal.

## The remote path: Burst-Grouper, Burst-Distributor and K/J

This is where the design departs most from a plain crossbar, and it is what
lets one engine draw on memory spread over 64 Tiles.

**Burst-Grouper** (`tp_burst_grouper`, in the initiating Tile).

- *Reads.* A wide engine read for another Tile becomes one narrow request:
  the first word address, a burst flag, and the engine's tag.
- *Writes.* A wide write becomes 16/J = 8 requests. Each carries J = 2 words,
  their byte enables and a word offset.
- The requests then enter the Tile's remote request arbiter
  (`tp_remote_req_arbiter`). It picks one of the five sources (4 cores and the
  engine) per outbound port, round-robin.

**Burst-Distributor** (`tp_burst_distributor`, one per inbound port of the
target Tile).

- It is a master of the target Tile's local crossbar.
- For a burst read it asks the crossbar for all 16 banks of the line at once.
  The local crossbar grants a multi-bank access only when every bank is free.
- It then returns the 16 words as 4 response beats of K = 4 words. Each beat
  carries the tag and its word offset.
- A grouped write is a single 2-bank crossbar access and returns one
  acknowledge beat.
- A narrow core access passes through as one word.
- The distributor takes its next request during the last beat of the current
  one, so a port streams without gaps.

**Transactions table** (`tp_te_trans_table`, back in the engine). It collects
the K-word beats by tag and offset. When all 16 words of a line are present,
it commits the line to the reorder buffer of its stream and frees the tag.
Lines from the engine's own Tile skip the table: the local crossbar returns
the whole line in one cycle.

**Response arbiter** (`tp_remote_rsp_arbiter`). It gives each destination in
the Tile one response per cycle, chosen round-robin over the seven ports.
Destinations are the four cores and the engine. A core that gets a local bank
response in the same cycle takes no remote one, because a core has a single
response port.

### Departure: remote bandwidth into one engine

The response arbiter delivers **one K-word beat per cycle** to the engine,
which is 16 bytes per cycle. A 64-byte line from another Tile therefore
occupies the engine's response input for 4 cycles. The engine consumes about
one W line every 4 cycles, plus X and Y lines. When most of a GEMM's operands
live in other Tiles, the engine is fed at the rate of its W stream alone, and small jobs reach only about a quarter of its peak.

The reference analysis of this architecture assumes several remote ports
deliver to the engine in the same cycle. It reports about 98% FMA
utilisation for a single engine at 512³ with K = 4, and about 89% with 16
engines.

Measured here:

| Testbench | Job | Placement | Cycles | MAC-issue cycles | Utilisation |
|---|---|---|---|---|---|
| `tb_tp_redmule` | 64×64×64 | spread | 3619 | 1024 | 28% |
| `tb_tensorpool` | 32×64×64 | spread, next to a second engine | — | — | 24% |

The engine array itself is not the limit. With data always available,
`tb_tp_te_engine` shows one W line every 4 cycles and close to 100% issue.

Widening the engine's response input to several beats per cycle would remove
this limit. That would take a multi-beat merge port on the transactions table
and a wider response arbiter. It is not built.

## The tensor engine

**Array and schedule** (`tp_te_engine`). R = 32 rows by C = 8 columns of FP16
FMAs, each with P = 3 pipeline stages. The job is Z = Y + X·W, computed in
output tiles of 32 × 32.

Each FMA has 3 pipeline stages and one feedback register. That gives four
accumulations in flight, which are interleaved. In the four cycles of one
k-step:

- FMA (*i*, *c*) works on output columns 4*c*, 4*c*+1, 4*c*+2, 4*c*+3, one
  per cycle;
- the X element X[*i*][*k*] stays put for those four cycles;
- one 32-element W line (row *k* of W) is used up every four cycles.

At *k* = 0 the addend is taken from Y rather than from the feedback. The
result of the last *k* is written into the Y/Z buffer, at the place where Y
came from.

**Buffers.**

- X buffer: two sets of 32 lines, each 32 *k* wide.
- W: a 4-line FIFO.
- Y/Z buffer: two sets, so the next tile's Y is loaded while the previous
  tile's Z drains.

**Stalls.** If an X set or a W line is missing at the start of a k-step, the
whole array freezes through a clock enable on every stage. At a tile boundary
the array keeps running with bubbles, so the previous tile drains.

**FMA** (`tp_fma_fp16`).

- IEEE binary16 a·b + c, rounded once, to nearest even.
- Subnormals are supported. NaN results are the canonical 0x7E00.
- Stage 1 forms the exact product. Stage 2 aligns and adds. Stage 3
  normalises and rounds.

**Streamer** (`tp_te_streamer`). It walks the job tile by tile:

- Output tiles are taken row block by row block.
- Within a row block, the column block starts at `W_START` and wraps around
  to 0. Engines that share one W can then start on different columns and do
  not all hit the same banks. This loop-back changes only the order of the
  tiles, never the result.
- For each tile it issues X lines (32 rows per 32-wide k chunk), W lines
  (rows 0 … N−1 of the column block) and Y lines.
- It stores Z lines from a 32-entry Z FIFO.
- The four streams share the engine's single 512-bit port, round-robin, one
  request per cycle.
- Each load stream has a 16-entry reorder buffer (`tp_te_rob`). A slot is
  reserved when the request leaves, so lines reach the engine in request
  order whatever order the memory answers in.
- Up to 16 remote lines are in flight (tags of the transactions table).
- Stores count acknowledges: one for a local line, 8 for a remote one. The
  job ends only when every Z line is acknowledged.

**Controller** (`tp_te_ctrl`). A core of the Tile programs the engine through
32-bit registers:

| Index | Register | Meaning |
|---|---|---|
| 0 | X_ADDR | byte address of X (M × N, row-major, 64-byte aligned) |
| 1 | W_ADDR | byte address of W (N × K) |
| 2 | Y_ADDR | byte address of Y (M × K) |
| 3 | Z_ADDR | byte address of Z (M × K); may equal Y_ADDR |
| 4 | M | rows of X and Z, multiple of 32 |
| 5 | N | inner dimension, multiple of 32 |
| 6 | K | columns of W and Z, multiple of 32 |
| 7 | W_START | first column block (0 … K/32−1) |
| 8 | TRIGGER | write: start the job |
| 9 | STATUS | read: number of finished jobs |

A one-cycle interrupt pulse marks the end of a job. The top level also exports
two counters per engine: MAC-issue cycles and stall cycles. The register
layout is this design's own.

## What is not here

- **RISC-V cores, their instruction caches and the shared divide/square-root
  units.** Their memory ports are top-level ports of `tensorpool`, and each
  engine's configuration port is a top-level port too. Softmax, layer
  normalisation, depthwise convolution and matrix transposes, which run on
  the cores, cannot run in this RTL. The GEMM parts of those workloads can.
- **DMA engine, AXI interconnect and L2.**
- **The 3D-stacked physical arrangement.** It has no RTL meaning.
- **Only the J = 2, K = 4 configuration.** It is a package parameter
  (`tp_pkg`). The other widths studied in the reference analysis (J = 2 with
  K = 2, and J = 4 with K = 4) are not exercised.

## Sizing

All the reference workloads fit the 4 MiB L1 at the default parameters, with
all dimensions multiples of 32:

| Workload | L1 use |
|---|---|
| GEMM 512³, FP16 | X, W, Y, Z at 512 KiB each = 2 MiB |
| GEMM 512 × 1024 × 512 | 3 MiB |
| 8 independent 256³ GEMMs | fits only with Z written over Y |

Only what the engines run is timed here.

## Simulating

Everything is plain SystemVerilog-2017 and simulates with Verilator 5 (with
`--timing`). From the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tensorpool \
          -y rtl -y tb +libext+.sv -Irtl rtl/tp_pkg.sv tb/tb_tensorpool.sv -j 4
./obj_dir/Vtb_tensorpool
```

Replace `tb_tensorpool` with any testbench name. Every testbench checks its
results itself and ends with a line `TB_RESULT checks=<n> failures=<n>`. Each
has a watchdog.

Build and run times:

- The full cluster testbench takes about six minutes to build with four
  compile jobs (over ten with two) and about half
  a minute to run.
- All the others build in well under a minute.

| Testbench | What it checks |
|---|---|
| `tb_tp_fma_fp16` | FMA against an independent double-precision reference rounded to FP16 bit by bit; 3-cycle latency and enable hold |
| `tb_tp_te_engine` | full 32×8×3 array on random integer matrices; 4N cycles per tile; random stalls and Z back-pressure |
| `tb_tp_fifo`, `tb_tp_spill_reg` | ordering, full/empty, throughput, against a queue model |
| `tb_tp_te_rob` | out-of-order commits, in-order release |
| `tb_tp_te_trans_table` | K-beat merging in random order, unique tags, own-Tile lines on their own commit port |
| `tb_tp_te_ctrl` | register read/write, trigger, status, interrupt |
| `tb_tp_l1_bank` | byte-enable writes, one-cycle reads |
| `tb_tp_local_xbar` | all-or-nothing wide grants, conflicts, fairness, data |
| `tb_tp_burst_grouper`, `tb_tp_burst_distributor` | burst and J-beat encoding, K-beat responses, back-pressure |
| `tb_tp_xbar`, `tb_tp_remote_req_arbiter`, `tb_tp_remote_rsp_arbiter` | routing, round-robin fairness, no loss or duplication |
| `tb_tp_redmule` | whole engine on a memory model with random latency and out-of-order answers: 64×64×64 with `W_START` = 1 and 32×96×32, Z against a software GEMM |
| `tb_tensorpool` | full cluster, see below |

`tb_tensorpool` checks:

- core load latencies of 1, 3, 5 and 9 cycles;
- two engines computing at once, one of them with loop-back;
- core traffic hammering the same banks during the GEMMs.

It also reports how often each mechanism was exercised: bursts, grouped write
beats, K-beats, reorder events and bank conflicts.
