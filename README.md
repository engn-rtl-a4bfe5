# EnGN: a ring-reduce accelerator for graph neural networks

A graph neural network (GNN) layer computes a new feature vector for every
vertex of a graph from its own features and those of its in-neighbours. Most
GNN models can be written in the same three steps:

1. **Feature extraction.** Multiply each vertex's input property vector (often
   hundreds or thousands of elements) by a learned weight matrix. The result is
   a short vector, for example 16 elements.
2. **Aggregate.** For every edge `src -> dst`, fold the source's extracted
   vector into the destination's accumulator. The fold is a sum, max or min.
3. **Update.** Add a bias, apply an activation function, and apply any
   element-wise arithmetic the model needs (gates, products).

Step 1 is a dense matrix product. Step 2 is a sparse, irregular scatter
driven by the edge list. On a CPU or GPU, step 2 is limited by memory: every
edge makes a random access to the destination's vector. EnGN's answer is to
run all three steps on one two-dimensional PE array:

- Each **row** of the array owns one vertex.
- Each **column** owns one output feature dimension.
- Each column is wired as a **ring**. During aggregation the extracted source
  features circulate through the ring. Every row picks out the features of its
  in-neighbours as they pass by. No random memory access to feature data
  happens during the aggregate at all.

This repository is a SystemVerilog implementation of that accelerator core.
It contains:

- the 128 x 16 PE array with its register files and per-PE post-processing
  units;
- the edge parser that steers the rings;
- the degree-aware vertex cache;
- the on-chip banks;
- the vector unit;
- an instruction-driven controller.

Everything is parameterised. The defaults are the published configuration
where one exists. Data is 32-bit fixed point (Q16.16).

## 1. Block diagram

```
            host / DMA side (write ports, result read-back)
   |            |            |            |              |
   v            v            v            v              v
 instr buf   property     weight       edge banks     result bank <----+
   |         bank         bank         (one per row)     |   ^          |
   v         128 lanes    16 lanes        |              |   |          |
controller   |            |               v              |   |          |
 (sequencer)-+------------+----------> edge parser       |   |          |
   |         |            |            (agg_en, slot     |   |          |
   |         v            v             per row)         |   |          |
   |     +------------------------------------+          |   |          |
   +---->| RER PE array 128 rows x 16 columns  |<--DST----+  DAVC       VPU
         |  MAC, SRC RF, DST RF[4], ring reg,  |  window   (pinned       (32 lanes,
         |  drain reg, XPE per PE              |  load     vertices)     line pairs)
         +------------------------------------+               ^          ^
                      | drain (row 0 out)                      |          |
                      +------------> result bank ---------------+----------+
```

| Module | Role |
|---|---|
| `engn_pkg` | Widths, sizes, `data_t`, `edge_t`, `pe_ctrl_t`, `instr_t`; fixed-point helpers. |
| `engn_pe` | One PE: a MAC, the SRC register, four DST slots, the ring register, the drain register and an XPE. |
| `engn_xpe` | Per-PE post-processing: rounding shift, bias, activation. |
| `engn_rer_array` | The ROWS x COLS grid of PEs, with the column rings and drain chains. |
| `engn_pe_controller` | The edge parser: one read pointer per edge bank; decides aggregate enables tick by tick. |
| `engn_davc` | The degree-aware vertex cache. Direct-mapped; lines are pinned by the host. |
| `engn_property_bank`, `engn_weight_bank` | Feature inputs: one word per row, and one word per column. |
| `engn_edge_bank` | One edge list per PE row. |
| `engn_result_bank` | Line store, one line per vertex (COLS words). |
| `engn_vpu` | 2*COLS-lane element-wise unit. |
| `engn_controller` | Instruction buffer and sequencer. |
| `engn_top` | Wires it all together. |

## 2. The PE and its register files

Each PE holds these 32-bit registers:

| Register | Written by | Purpose |
|---|---|---|
| `acc` | MAC | Running dot product of the vertex's property with one weight column. |
| `SRC` | `src_latch` | The extracted feature of the row's source vertex, for the current source batch. |
| `DST[0..3]` | aggregate / window load | Accumulators for the four destination vertices the row owns in the current window. |
| ring (shadow SRC) | `ring_load` / `ring_shift` | The feature currently passing this PE on the column ring. |
| drain (shadow DST) | `drain_load` / `drain_shift` | The updated output on its way out of the array. |

Separate shadow registers let the ring and the drain work while the SRC and
DST registers are being refilled. The published PE has SRC and DST register
files, each with a shadow copy. Here that is four DST slots and one shadow
register each.

Behind the DST slot chosen for draining sits the **XPE**. It is
combinational:

1. round with `(x + 2^(s-1)) >>> s` when the shift `s` is non-zero;
2. add the bias;
3. apply the activation: none, ReLU, or a piecewise-linear sigmoid
   `clip(x/4 + 1/2, 0, 1)`.

One control word (`pe_ctrl_t`) is broadcast to every PE. Only these signals
differ from row to row:

- the aggregate enable and its DST slot, both from the edge parser;
- the DST write enable, used during the window load.

When a window load and an aggregate would hit the same DST slot in the same
cycle, the window-load write wins. The controller never issues both at once.

## 3. Ring-edge-reduce: how edges drive the array

This is the heart of the design and the least obvious part.

### 3.1 Batches and windows

The graph is processed in tiles:

- A **source batch** is ROWS = 128 consecutive source vertices. After feature
  extraction, row `r` holds in its SRC registers the 16-element feature of
  source `r` of the batch.
- A **destination window** is ROWS x DST_SLOTS = 512 destination vertices.
  Destination `d` of the window lives in row `d % 128`, slot `d / 128`.

Each (window, batch) pair needs its own shard of edges. A software pass
prepares the shards and puts edge `(s, d)` into the **edge bank of row
`d % 128`**. The destination row therefore reads only its own bank. Putting
every edge of one destination into one bank is what avoids write conflicts:
no two rows ever update the same DST register.

### 3.2 The ring schedule

At the start of the aggregate (`ring_load`), every ring register copies its
SRC register. After that, on every **tick**, every ring register takes the
value of the PE one row further down, that is row `r+1`. The last row takes
from row 0. Features move one row up per tick, so at tick `t`:

```
ring register of row r holds the feature of source (r + t) mod ROWS
```

After ROWS ticks, every source feature has passed every row once. That is
one revolution.

### 3.3 The edge parser

The parser (`engn_pe_controller`) keeps one read pointer per bank. In every
tick, for every row `r`:

- If the entry at the head of row `r`'s bank is an edge whose source equals
  `(r + t) mod ROWS`, the parser raises `agg_en[r]` with slot `dst / ROWS`.
  Every PE of the row then performs `DST[slot] = op(DST[slot], ring)` for its
  own column. The pointer then moves to the next entry.
- Otherwise the row idles for this tick.

When a row's head entry has `valid = 0`, that row is finished. When all rows
are finished, the parser pulses `done`. It reports:

- `ticks`: the number of ring shifts used;
- `idle_slots`: the number of row-ticks with no aggregate, counting rows that
  had already finished.

Edges are taken strictly in bank order and at most one per row per tick. As a
result, the order of edges inside a bank decides the cost.

### 3.4 A worked example

Take a 3-row array with 3 sources (0, 1, 2) and 6 destinations in two slots.
Each bank holds three edges, written as (src, dst):

| bank (row) | original order | reorganized order |
|---|---|---|
| 0 | (0,0) (2,0) (1,3) | (0,0) (1,3) (2,0) |
| 1 | (2,1) (1,4) (0,4) | (1,4) (2,1) (0,4) |
| 2 | (0,2) (2,5) (1,5) | (2,5) (0,2) (1,5) |

Row `r` sees source `(r + t) mod 3` at tick `t`:

| row | tick 0 | tick 1 | tick 2 |
|---|---|---|---|
| 0 | 0 | 1 | 2 |
| 1 | 1 | 2 | 0 |
| 2 | 2 | 0 | 1 |

**Original order.**

- Row 0 takes (0,0) at tick 0. Source 2 arrives at tick 2, so (2,0) is taken
  then. Source 1 next arrives at tick 4, so (1,3) is taken at tick 4.
- Rows 1 and 2 each take their edges at ticks 1, 3 and 5.
- The batch needs 6 ticks. Of the 18 row-ticks, 9 are idle.

**Reorganized order.** Each bank is sorted into the order in which the
sources pass that row. Every row then consumes one edge per tick: 3 ticks, no
idle slot.

The reorganization is done once, offline, per shard: sort each bank by
`(src - r) mod ROWS`. In the hardware, the only difference between the two
cases is how long the aggregate takes. Both produce the same sums. The
testbench of the parser checks both cases tick by tick.

In general, the cost of a shard depends on the order of its banks:

- **Reorganized, no repeated source in a bank:** one revolution, at most
  ROWS ticks. The exact count is one more than the latest arrival tick of
  any edge.
- **Reorganized, with repeats:** each repeat of a source within a bank
  costs one more revolution.
- **Original order:** every edge whose source has already passed the row
  waits for the next revolution. In the worst case that is one revolution
  per edge.

In the 128 x 16 full-size test, the same random shard takes 362 ticks
reorganized against 842 in original order.

## 4. Feature extraction: streaming the property

A vertex's input property can have any length `F`. To keep the array
independent of `F`, the property bank stores the properties **transposed**:

- bank word `k` holds element `k` of the 128 properties of a batch, one lane
  per row;
- weight word `k` holds row `k` of the weight matrix, one lane per column.

A FEATURE instruction streams `k = 0 .. F-1`. In cycle `k`, PE `(r, c)` adds
`prop[k][r] * w[k][c]` to its accumulator. After `F` cycles the accumulator
holds the dot product, which is latched into SRC. The instruction takes
`F + 2` cycles: one for the synchronous read and one for the latch. Every PE
is busy in every streaming cycle, whatever `F` is.

A property longer than the 1024-word bank is split into chunks. Chunks after
the first are issued with `func[0] = 1`, which keeps the accumulator instead
of clearing it.

**Stage order.** With a sum aggregate, `A(XW)` and `(AX)W` give the same
result. The aggregate costs `E x F` operations in the first order and
`E x H` in the second, where `F` is the input dimension and `H` the output
dimension. The published design therefore aggregates in the smaller
dimension. This design has no hardware for that choice: the program makes
it. To aggregate raw properties first, the program does the following:

1. Run FEATURE with an identity block as the weight chunk. This copies 16
   property dimensions into SRC.
2. Run AGG and UPDATE into the result bank.
3. Once the host has moved the aggregated properties back into the property
   bank, run the real FEATURE.

## 5. Destination values: DST window, DAVC and result bank

Before a window is aggregated, its 512 DST accumulators must be filled. The
`LOAD_DST` instruction does this one vertex per cycle, in one of two ways:

- **Clear.** Write the identity of the aggregate operator: 0 for sum, the
  most negative value for max, the most positive value for min. Used for the
  first source batch of a window.
- **Reload.** Look the vertex up in the DAVC. On a hit, take the cached line.
  On a miss, take the line from the result bank. Used to continue a window
  whose partial result was written back earlier.

The **DAVC** (degree-aware vertex cache) holds only vertices that an offline
pass found to have high in-degree. These vertices are read back most often.

- The host pins them with `davc_fill_*`. Nothing is ever evicted by the
  hardware.
- The tag is the vertex id. The line is `vid % LINES`, so lookup is
  direct-mapped. Two pinned vertices must not share a line; the host is
  responsible for that.
- Whenever the result bank is written, a line that hits in the DAVC is
  rewritten too. A hit therefore always returns the latest value.

The top level counts hits and misses.

**Note:** in this RTL the result bank answers in one cycle, as the DAVC does.
The DAVC therefore saves result-bank reads here but no cycles. In a real chip
the result bank is the large, slow level.

## 6. Update: XPE drain and VPU

`UPDATE` writes a finished window back:

1. Read the bias line from the weight bank.
2. For each DST slot, load every drain register through its XPE in one cycle.
3. Shift the drain chain up for ROWS cycles. Row 0 leaves the array each
   cycle and is written as result-bank line `a + slot*ROWS + cycle`.

A window of ROWS x SLOTS vertices therefore takes `2 + SLOTS*(ROWS+1)` cycles.

The **VPU** handles what is not a per-PE activation, for example the gates of
Gated-GCN, the products of GRN, and max/min of a pooling step. It works on
result-bank lines two at a time (2 x 16 = 32 lanes) and supports:

- `add`, `sub`, `mul`, `max`, `min`, `relu`;
- a piecewise-linear sigmoid `clip(x/4 + 1/2, 0, 1)`;
- a piecewise-linear tanh `clip(x, -1, 1)`.

Operands come from line pairs `a+2p` and `b+2p`. The result goes to `c+2p`.
Each pair takes 8 cycles: the result bank has one read port, and a pair needs four line reads.

## 7. Instructions and a program

An instruction (`instr_t`) has these fields: opcode (4 bits), `func`
(4 bits), `shift` (5 bits), and `a`, `b`, `c`, `len` (16 bits each).

| Opcode | Does | Fields | Cycles |
|---|---|---|---|
| `OP_LOAD_DST` | fill the DST window | `a` = first vertex; `func[0]` = clear; `func[3:2]` = operator | ROWS*SLOTS |
| `OP_FEATURE` | stream one batch's properties | `a` = property base; `b` = weight base; `len` = F; `func[0]` = accumulate | F + 2 |
| `OP_AGG` | ring-edge-reduce one shard | `a` = edge-bank base; `func[1:0]` = operator | ticks + 2 |
| `OP_UPDATE` | XPE and drain to the result bank | `a` = first vertex; `b` = bias line; `func[1:0]` = activation; `shift` | 2 + SLOTS*(ROWS+1) |
| `OP_VPU` | element-wise operation on line pairs | `a`, `b`, `c`; `len` = pairs; `func` = operation | 8 per pair |
| `OP_END` | stop and pulse `done` | - | - |

Each instruction also costs one fetch cycle. A window with two source batches
looks like this:

```
LOAD_DST  a=0   func=clear|SUM          // window = vertices 0..511
FEATURE   a=0   b=0  len=F              // batch 0 -> SRC
AGG       a=0        func=SUM           // shard (window 0, batch 0)
FEATURE   a=F   b=0  len=F              // batch 1
AGG       a=E1       func=SUM           // shard (window 0, batch 1)
UPDATE    a=0   b=bias func=RELU shift=0
VPU       a=... b=... c=... len=... func=MUL
END
```

The sequence encodes both the tiling (which windows and batches, in which
order) and the stage order. A compiler is expected to produce it.

## 8. Sizes

| Parameter | Default | Published |
|---|---|---|
| PE array `ROWS x COLS` | 128 x 16 | 128 x 16 |
| Data | 32-bit fixed point, Q16.16 | 32-bit fixed point; fraction split not given |
| DST slots per PE | 4 | not given |
| VPU lanes | 32 | 32 |
| DAVC | 1024 lines x 64 B = 64 KB | 64 KB |
| Property bank | 1024 x 128 words = 512 KB | total on-chip memory 1600 KB, split not given |
| Weight bank | 1024 x 16 words = 64 KB | |
| Edge banks | 128 x 512 entries x 4 B = 256 KB | |
| Result bank | 11264 lines x 64 B = 704 KB | |
| Instruction buffer | 256 entries | not given |

The four banks and the DAVC add up to the published 1600 KB. The PE
registers (about 64 KB) come on top.

At 1 GHz, the 2048 MACs give 4096 GOP/s, which is the peak quoted in the
published text. A summary table in the same publication prints 6144 GOP/s.
The array alone does not reach that figure, and this design follows the
4096.

An edge entry is 32 bits:

- bit 31: `valid`;
- bits 30..16: source row within the batch;
- bits 15..0: destination within the window.

## 9. Where this RTL departs from the published design

Taken from the published design:

- the three-stage model;
- the 128 x 16 array, with one row per vertex and one column per dimension;
- column rings, and edge banks per row;
- in-order edge parsing, with the worked example reproduced exactly;
- the transposed property streaming;
- SRC and DST register files with shadow copies;
- an XPE per PE with activation, bias and rounding;
- a 64 KB DAVC pinned to high-degree vertices, with misses going to the
  result bank;
- a 32-lane VPU, and a controller with an instruction buffer;
- 32-bit fixed point.

This design's own choices:

- the Q16.16 format, and the hard-sigmoid and hard-tanh approximations;
- four DST slots;
- the bank depths and the 32-bit edge entry with an end marker;
- the instruction set and its timing;
- the direct-mapped DAVC;
- a VPU that works on result-bank line pairs;
- the drain chain that empties the array through row 0;
- asynchronous active-low reset;
- single-cycle banks.

Left out, because they sit outside the core or are not specified closely
enough to build:

- high-bandwidth DRAM and its memory controller;
- the DMA and the prefetcher that stream tiles into the banks;
- the format converter (for example CSR to edge list).

The banks' write ports and the result-bank read port are brought out to the
top level where those units would connect.

Graph tiling, the choice of stage order, the edge reorganization and the
choice of DAVC vertices are offline software steps. Apart from the order
sensitivity of the parser, no hardware depends on them.

Consequences:

- A whole graph (for example Cora: 2708 vertices x 1433 features, about
  15 MB) does not fit the 1600 KB on chip. It runs only if an outside agent
  reloads the banks tile by tile between programs.
- Cycle counts here exclude all off-chip traffic.
- Result-bank latency is one cycle (see section 5).

## 10. Verification and simulation

Every module has a self-checking testbench in `tb/`. Each compares against a
model written independently in the testbench and ends with a line
`TB_RESULT checks=N failures=M`.

Highlights:

- **`tb_engn_pe_controller`**:
  - the worked example of section 3.4, with the exact tick of every edge,
    6 and 3 ticks, and 9 and 0 idle slots;
  - random 8-row edge lists checked against a tick-by-tick replay.
- **`tb_engn_controller`**: the exact cycle count of every instruction.
- **`tb_engn_top`** (8 x 4 array, 2 slots, small banks): a complete program
  with two source batches and a max-aggregate window. It uses DAVC hits and
  misses, the ReLU clip, ring wrap-around, idle ticks and every opcode. It
  counts each of these and fails if any never happened. Results are compared
  against a software GNN layer in Q16.16.
- **`tb_engn_top_full`**: the same flow with every parameter at its default
  (128 x 16, 4 slots, full banks). It runs in a few minutes.
- **`tb_engn_workload`** (16 x 4 array): a complete tiled layer over a
  128-vertex graph. The testbench acts as the DMA: between short programs it
  reloads the banks chunk by chunk and shard by shard. Partial results go
  back to the result bank and are reloaded for the next source batch. It
  runs five profiles. Each keeps a published dataset's input dimension and
  average in-degree:

  | Model | Input dimension | Average in-degree | Notes |
  |---|---|---|---|
  | GCN | 1433 | 3.9 | computed in two accumulated chunks |
  | GCN | 500 | 4.5 | |
  | GraphSAGE-pool | 300 | 76.7 | max aggregate |
  | Gated-GCN | 96 | 26.9 | VPU gate `y * hsigmoid(y)` |
  | R-GCN | 47 | 8.1 | one relation |

  Every output and every aggregate's tick count is checked.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/engn_pkg.sv rtl/engn_*.sv tb/tb_engn_top.sv \
    --top-module tb_engn_top -o sim && ./obj_dir/sim
```

Replace the testbench and top name for any other block. The package must come
first. All testbenches are plain SystemVerilog. They read no files and use
only `$urandom` for stimulus.

To change the size, override the `engn_top` parameters. `ROWS` and `COLS`
also set the edge-bank count, the ring length and the VPU width.

Verilator's lint reports no circuit problems. The non-fatal warnings that
remain are all understood:

- The DST-slot indexes are 4 bits wide but index only DST_SLOTS entries.
  The value is always in range.
- The controller's 16-bit addresses are wider than the banks. The unused
  upper bits are reported.
- Some package constants are unused in a given module.
- Some locals share a name with a package constant.
- `rst_n` is used both as the asynchronous reset and in the `disable iff`
  of the top-level assertions.
