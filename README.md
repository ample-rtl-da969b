# AMPLE — an event-driven, mixed-precision GNN inference accelerator in SystemVerilog

Real graphs have node degrees that vary by orders of magnitude. An accelerator that moves
nodes through aggregation and transformation in lock-step makes cheap nodes wait behind
expensive ones. This design avoids that. Every node in flight has its own hardware context,
called a *nodeslot*, and each node moves through the pipeline on its own:

1. The host fills any free nodeslot.
2. The node's neighbours are fetched.
3. The node is given aggregation cores of its own numerical precision for as long as it needs them.
4. Its aggregated vector is multiplied by the layer weights.
5. The nodeslot is freed and raises an interrupt.

Nodes of different degree and different precision (float32, int8, int4) overlap freely. The
precision of each node is chosen outside the accelerator, for example float for high-degree
nodes and int8 for the rest.

This repository gives synthesizable RTL for the whole datapath and control, along with
self-checking testbenches. It follows the architecture of the AMPLE accelerator (FPGA, Alveo
U280 class, HBM-attached). Where the original description stops short of an implementation, this
RTL makes its own choices. Those choices are listed below and in the opening comment of each file.

## The life of a node

```
 host ──AXI-Lite──▶ NID ──start──▶ Feature Bank (Fetch Tags) ◀──AXI4 x HBM_BANKS── HBM
                     │  ▲               │ messages (neighbour embeddings)
          AGE request│  │done           ▼
                     └▶ AGE: AGM per nodeslot ─▶ mesh(float) / mesh(int8) / mesh(int4)
                                                   AGCs ─▶ BMs ─▶ Aggregation Buffer
                     FTE(float) FTE(int8) FTE(int4) ◀── Weight Bank ◀──AXI4── weights
                          └──────── updated embeddings ──▶ out_wr port
```

A nodeslot moves through four states: `EMPTY → PREFETCH → AGGREGATION → TRANSFORMATION → EMPTY`.

- **EMPTY → PREFETCH.** The host writes the slot's fields, then writes LAUNCH. The slot's Fetch Tag starts.
- **PREFETCH → AGGREGATION.** The Fetch Tag signals that the AGE can start. This happens when all neighbour embeddings have arrived, or when its Message Queue is full (see *partial response*). The NID then offers the slot to the Aggregation Engine. A round-robin arbiter offers one slot per cycle. The AGE accepts the slot only if its precision's mesh has enough idle cores and an idle Buffering Manager. Otherwise the allocation *stalls* and another slot gets the next turn.
- **AGGREGATION → TRANSFORMATION.** The Buffering Manager has written the full aggregated vector into the Aggregation Buffer.
- **TRANSFORMATION → EMPTY.** The FTE of the node's precision has taken the node into a batch and written its updated embedding. The node's IRQ bit is set at this point.

## Host interface (NID register map)

All registers are 32 bits wide, at byte addresses on a 12-bit AXI-Lite port.
NW = ceil(NODESLOTS/32), which is 2 at the default size.

| Address | Name | Access | Meaning |
|---|---|---|---|
| 0x000 | IN_FEATURES | rw | Input features per node for the current layer |
| 0x004 | OUT_FEATURES | rw | Output features per node |
| 0x008 | AGG_FUNC | rw | 0 = sum (GCN, GIN), 1 = mean (GraphSAGE) |
| 0x00C | FEATURE_BASE | rw | Base of the float embedding table |
| 0x0F0 | FEATURE_STRIDE | rw | Bytes from the table of precision p to that of p+1 |
| 0x010 | WEIGHT_BASE | rw | Base of the weight matrices |
| 0x014 | CTRL | w: bit0 starts the weight load; r: bit0 = loading | |
| 0x018 + 4k | AVAILABLE[k] | r | Bit s = nodeslot 32k+s is EMPTY |
| 0x018 + 4·NW + 4k | IRQ[k] | r / write-1-to-clear | Bit s = nodeslot finished. The `irq` output is the OR of all bits. |
| 0x100 + 0x20·s | NODE_ID, PRECISION, NEIGHBOURS, ADJ_PTR, OUT_PTR, LAUNCH, STATE | | Nodeslot s, at offsets +0x00 … +0x18 |

Notes on the registers:

- PRECISION is 0 for float, 1 for int8 and 2 for int4.
- Writes to a nodeslot that is not EMPTY are ignored.
- AVAILABLE is a read-only view of the slot states. The host never writes it.

One layer of host software looks like this:

1. Write the layer registers.
2. Write CTRL=1, then wait for CTRL to read 0.
3. Loop until every node is done:
   - Read AVAILABLE and IRQ.
   - Clear the IRQ bits that are set.
   - Program and launch a free slot for each remaining node.

`tb/tb_ample_top_body.svh` contains exactly this loop.

## Memory layout expected in HBM

Every feature element is one 32-bit word. Float values are IEEE binary32. int8 and int4 values
are held sign-extended to 32 bits.

- **Adjacency list of a node.** `NEIGHBOURS` 32-bit neighbour IDs, stored contiguously at `ADJ_PTR`.
- **Embedding of node v in precision p.** Stored at `FEATURE_BASE + p·FEATURE_STRIDE + v·IN_FEATURES·4`. Each precision therefore has its own copy of the table.
- **Weights.** Element (o, i) of the precision-p matrix is at `WEIGHT_BASE + ((p·OUT + o)·IN + i)·4`.
- **Output.** Output o of a node is written to `OUT_PTR + 4·o` through the `out_wr_*` valid/ready port.

## Prefetcher: Fetch Tags and the partial response

Each nodeslot owns a Fetch Tag (`fetch_tag.sv`). A tag works in two stages:

1. It reads bursts of neighbour IDs into a 16-entry Address Queue.
2. Each queued ID becomes a one-embedding burst into the Message Queue. The Message Queue holds 256 words, which is four 64-feature embeddings.

A tag keeps at most one burst in flight. Feature bursts take priority, so the Address Queue drains.

The Message Queue is deliberately smaller than the largest neighbourhood. If a node has more
neighbours than fit, the tag does not wait. Once nothing is in flight and the queue cannot take
another embedding, it raises `agg_ready` anyway and pulses `partial_evt`. This is the **partial
response**. Aggregation then starts, and as the AGE drains the queue the tag carries on fetching.
With this mechanism a node of any degree up to 65,535 runs through a 4-embedding buffer.

Fetch Tags are grouped by HBM bank (`feature_bank.sv`). At the defaults there are 32 groups of 2
tags. Each group has a round-robin arbiter and one AXI4 read master, so up to 32 bursts are in
flight at once. Read data is steered back to the tag that owns the group's outstanding burst.

## Aggregation Engine: packets, meshes and on-the-fly allocation

This is the least conventional part of the design.

### Meshes and packets

Each precision has its own mesh network (`agg_mesh.sv`). At the default 4×4 size:

- Column 0 holds four Buffering Managers (BMs), one per row.
- Columns 1–3 hold twelve Aggregation Cores (AGCs). AGC a sits at row a/3, column a%3+1.
- The meshes of different precisions never exchange traffic.

Routers (`noc_router.sv`) have five ports, 4-flit input FIFOs, XY dimension-order routing and
wormhole switching. Once a head flit wins an output, that output stays locked to the same input
until the tail flit passes.

A packet is a head flit, then any number of body flits, then a tail flit. Each flit is 34 bits:
a 2-bit type plus 32 bits of data. The head flit has this layout:

| bits | 31:28 | 27:24 | 23:16 | 15 | 14:13 | 12:9 | 8:6 | 5:3 | 2:0 |
|---|---|---|---|---|---|---|---|---|---|
| field | dest row | dest col | nodeslot | last neighbour | function | BM row | slice | slice count | reserved |

### Allocation

Each slice of AGC_FEATURES = 16 features is handled by its own AGC. A node with F input features
therefore needs ceil(F/16) AGCs of its precision plus one BM.

The allocator (`age.sv`) grants a request in the same cycle if enough resources are idle. It
takes the lowest-numbered idle AGCs and gives that set to the node's Aggregation Manager (AGM)
as a bit mask. If resources are missing, the request stalls. AGCs and BMs are returned as soon
as their part is done, so a later node can reuse them while other nodes are still running.

### Data flow

1. **AGM (`agm.sv`).** There is one AGM per nodeslot. It reads its Fetch Tag's Message Queue and sends each neighbour's embedding as one packet per slice, to the AGC that owns that slice. The packets of the last neighbour carry the *last* flag. A per-mesh round-robin arbiter, held for whole packets, picks which AGM injects next at router (0,0).
2. **AGC (`agc.sv`).** Each AGC adds the incoming body flits into 16 accumulators. After the last neighbour it divides by the neighbour count if the function is mean. It then sends one result packet to its BM and reports itself free.
3. **BM (`bm.sv`).** The BM writes each body of slice c to Aggregation Buffer word c·16+k. After it has received `slice count` tails, it reports the node done.

### Arithmetic

- Float adds and multiplies round toward zero and flush subnormals to zero.
- The float mean is a true divide by the neighbour count, with the same rounding. Results can differ from a round-to-nearest reference by one ulp.
- Integer aggregation uses 32-bit two's-complement sums. The integer mean truncates toward zero.

## Aggregation Buffer and Feature Transformation Engine

The Aggregation Buffer (`aggregation_buffer.sv`) has one row of 64 words per nodeslot. It has one
write port per mesh and combinational read ports for the FTEs.

There is one FTE per precision (`fte.sv`). Each is a 4×4 output-stationary systolic array:

- Row r of the array holds node r of a batch of up to 4 nodes.
- Column c computes output feature 4t+c of tile t.
- Aggregated features enter from the left, delayed by r cycles on row r. Weights enter from the top, delayed by c cycles on column c. The operands therefore meet along the diagonals.
- Accumulators are cleared at the start of each tile. After streaming, the 16 results are written out one per cycle.

Timing:

- A batch takes `tiles·(1 + IN + R + C − 2 + R·C) + 1` cycles from pick to done, where tiles = ceil(OUT/C). At the defaults (IN = OUT = 64, R = C = 4) this is 16·87+1 = 1393 cycles for up to four nodes.
- A batch only starts once the Weight Bank (`weight_bank.sv`) has loaded all three 64×64 matrices.
- The Weight Bank loads one row per burst.

## Parameters

| Parameter (ample_top) | Default | Origin |
|---|---|---|
| NODESLOTS | 64 | Number of nodeslots in the original design |
| HBM_BANKS | 32 | HBM banks / concurrent Fetch Tag groups in the original design |
| NUM_PREC | 3 | float, int8, int4 |
| MESH_ROWS × MESH_COLS | 4 × 4 | Own choice (12 AGCs + 4 BMs per precision) |
| AGC_FEATURES | 16 | Own choice |
| MAX_FEATURES, MAX_OUT | 64, 64 | Own choice: sizes of the Aggregation Buffer rows and weight matrices |
| SYS_ROWS × SYS_COLS | 4 × 4 | Own choice |
| ADDR_Q_DEPTH, MSG_Q_DEPTH | 16, 256 words | Own choice |

The meshes of all precisions have the same size here. The original design lets the share of each
precision be set at build time. With `NUM_PREC = 2` only float and int8 are built.

## Where this RTL departs from, or goes beyond, the original architecture

- **Instruction Prefetcher.** The original block diagram fetches node instructions from a DRAM channel. That block is not built: nodeslots are programmed only over AXI-Lite.
- **Model operations not built.** There is no residual connection, normalization or activation, and integer outputs are not re-quantised. The output is the raw matrix product of the aggregated vector.
- **AVAILABLE mask.** The original text is inconsistent about who clears the available mask. In the host pseudocode the host writes 0; elsewhere the accelerator deasserts it. Here it is purely a status view driven by the accelerator.
- **Own choices.** The following are not taken from the original:
  - the register map and the head-flit format
  - the mesh placement
  - lowest-index allocation
  - queue depths, batch and array sizes
  - the per-precision embedding tables
  - one 32-bit word per feature in memory
- **Input feature limit.** A layer can have at most 64 input features. The datasets the original evaluates (Cora 1,433; CiteSeer 3,703; PubMed 500; Flickr 500; Reddit 602; Yelp 300 input features) therefore do not fit their first layer without raising MAX_FEATURES. That means larger Aggregation Buffer rows, weight memories and more AGCs per mesh. Node count and degree are not limited by the hardware beyond the 16-bit NEIGHBOURS field.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block's outputs against a
model written independently in the testbench and prints `TB_RESULT checks=N failures=M`.

- `tb_ample_top` runs the whole design at reduced size (8 slots, 3×3 meshes, 16 features).
- `tb_ample_top_full` runs it at every default (64 slots, 32 HBM ports) on an 80-node random graph over two layers:
  - a sum layer with 64 → 64 features
  - a mean layer with 33 → 33 features
  - nodes in all three precisions

  It compares every output word with a reference. It also fails if any of these mechanisms never occurred: partial responses, allocation stalls, FTE batches of more than one node, and nodeslot reuse.
- Behavioural memory models live in `tb/axi_mem_model.sv`. Unwritten words read back as `word_address ^ 0xA5A50000`, with random ready gaps and latency.
- `tb_fte` checks the batch latency formula above cycle-exactly.

Simulating with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Itb -y rtl -y tb \
  rtl/ample_pkg.sv tb/tb_ample_top.sv --top-module tb_ample_top -o sim
./obj_dir/sim
```

Replace `tb_ample_top` with any testbench name. The full-size test runs in about two minutes.
The end-to-end tests use small integer data, so float results are exact. In `tb_agc` and
`tb_age`, float means are compared with a small tolerance.
