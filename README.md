# GNNerator in SystemVerilog

A graph neural network layer has two halves. **Feature extraction** is a dense
matrix product: every node's feature vector times a weight matrix. **Aggregation**
is sparse and irregular: every node combines the features of its neighbours. The two
halves need different hardware.

This accelerator builds one engine for each half and lets them work at the same time:

- a **Dense Engine** built around a 64 x 64 systolic array;
- a **Graph Engine** built from 32 graph processing elements (GPEs).

A small controller makes whichever engine consumes the other's results wait exactly
as long as it needs to.

The second idea is **feature-dimension blocking**. The Graph Engine aggregates only
one block of B feature dimensions at a time (B = 64 by default). As a result, many
more nodes fit on chip at once. The Dense Engine pays for this: it has to store and
reload partial sums between blocks. The RTL supports both ways of running:

- blocked: B is smaller than the feature length;
- unblocked: B equals the feature length.

All arithmetic is on 32-bit two's-complement integers. The design this follows is
rated in floating-point operations; integers of the same 4-byte size keep the memory
sizes the same and keep the RTL simple.

## How a layer is laid out in memory

Three off-chip memories sit outside the design: Feature DRAM, Weight DRAM and Edge
DRAM. Their ports come out of `gnnerator_top`. Every port uses the same handshake:

- A request is taken when `req_valid` and `req_ready` are both high.
- Read data come back in request order on `rsp_valid`.
- The response side has no back-pressure.

**Features** are stored node-major, one node after another.

- A Graph Engine word holds 32 elements (1024 bits).
- A Dense Engine word holds 64 elements (2048 bits).
- The two engines address the same Feature DRAM. Dense word `a` is graph words `2a`
  (low half) and `2a+1`.
- Node `v`, graph word `k` of an array at `base` lives at `base + v*wpn + k`.
- Feature lengths are therefore padded to a multiple of 64.

**Weights** are stored so that row `i` (an input dimension) and output word `t` sit at
`w_base + i*out_tiles + t`.

**Edges** are pre-sharded in software:

- The nodes are cut into S intervals of `shard_n` nodes each.
- Shard (s, c) holds the edges from source interval s to destination interval c.
- Each edge is one 32-bit `edge_t` holding `{src, dst}` as 16-bit indices local to their
  intervals. The memory width therefore matches the edge size exactly.
- A shard table at `edge_tab_base` holds two words per shard, at
  `edge_tab_base + 2*(c*S + s)`: the offset of the shard's first edge from `edge_base`,
  and its edge count.

## Graph Engine

`graph_engine` runs one aggregation pass. For every node v in every block of
dimensions it computes

    out[v] = reduce( h[v], apply(h[u], h[v]) for every edge u -> v )

with these operations:

- `apply`: pass-u, add, multiply or subtract;
- `reduce`: sum, max or min.

Starting from `h[v]` gives the "neighbours and the node itself" aggregation that
GCN, Graphsage and its pooling variant use.

**Traversal.** `graph_engine_ctrl` walks the shards destination-major within each
dimension block:

    for block b, for destination interval c, for source interval s: shard (s, c)

While interval c is being processed, its aggregates stay on chip. Each one is written
back to Feature DRAM once, after the last source interval.

**Scratchpads.** The engine has four scratchpads, all double-buffered (`pingpong_ram`):

| buffer | contents | default size |
|---|---|---|
| metadata | the shard's edge list | 2 x 2^21 x 32 bit (16 MiB) |
| src | source features of the shard, current block | 2 x 8192 x 1024 bit |
| dsti | input features of the destination interval | 2 x 8192 x 1024 bit |
| acc | running aggregates of the destination interval | 2 x 8192 x 1024 bit |

A `pingpong_ram` has two sides:

- the compute side reads and writes bank `sel`;
- the load side reads and writes the other bank.

At B = 64 a feature bank holds 4096 nodes, so an interval may be up to 4096 nodes.

**Lock-step pipeline.** The controller runs in steps. In step j, the Shard Compute Unit
aggregates shard j-1 from the compute banks. At the same time the loader does four
things in order on the other banks:

1. It writes back the column finished in the previous step (`shard_writeback_unit`).
2. It waits for `load_allow` from the accelerator controller.
3. It loads shard j's edge list (`shard_edge_fetch_unit`) and source features
   (`shard_feature_fetch_unit`) in parallel.
4. If shard j opens a new column, it loads that column's destination features. These
   go into both dsti and acc, so each aggregate starts as the node's own feature.

A step ends when both sides are done; then the bank selects flip:

- Edge and source banks alternate every shard.
- Destination banks alternate every column.

`col_done` and `col_cnt` report finished columns.

**Shard Compute Unit.** This is the hardest part to follow. It has `NUM_GPE` GPEs.

- GPE g takes edges g, g+G, g+2G, ... of the shard (`edge_fetcher`).
- For each edge and each of the `wpb` words of the block, the GPE reads the source and
  destination-input words (`feature_fetcher`, asynchronous reads).
- It applies the binary operation and holds the result in a register.

`xbar_arbiter` routes each result to the reduce lane that owns its destination:

- Lane `dst mod G` owns destination `dst`. Two lanes therefore never write the same
  aggregate, and the aggregate memory can have one write port per lane.
- When several GPEs want the same lane in one cycle, the lane grants them round-robin.
  The others keep their result and stall (`arb_stall`).
- Each lane reads the current aggregate, reduces it with the routed word and writes it
  back in the same cycle. An update can therefore immediately follow another to the
  same node without a hazard.

Without conflicts, a shard of E edges takes `ceil(E/G)*wpb` cycles plus 2 cycles to
start and finish.

## Dense Engine

`dense_engine` executes `dense_task_t` commands. A task multiplies a block of input
words of `node_cnt` nodes by the matching weight rows and adds the result into the
output array. Its `first` and `last` flags control the partial sums and the activation.

For every output word t and input word r of the block, the engine runs these phases:

1. **Load weights.** It loads a 64 x 64 weight tile into the Weight Buffer.
2. **Load inputs.** It loads input word r of every node into the Input Buffer.
3. **Reload partial sums.** Unless this is the very first block, it reloads the
   partial sums (output word t of every node) into the Activations Buffer. This reload
   is what dimension blocking costs.
4. **Shift weights.** It shifts the tile into the systolic array over 64 cycles. The
   array is weight-stationary, fed from the top, with row 63 loaded first.
5. **Stream.** One node per cycle goes through the array. Inputs are skewed so that
   row i sees a node i cycles later, and outputs are deskewed.
   - The latency is ROWS+COLS-1 cycles.
   - The `activation_unit` adds the reloaded partial sum and applies ReLU after the
     last block.
6. **Store.** It writes the Activations Buffer back to Feature DRAM.

`dense_dram_ctrl` is a strided stream mover over two ports:

- the Feature DRAM port, read and write;
- the Weight DRAM port, read only.

The three buffers are 8192 x 2048 bits each, 6 MiB in total.

## Accelerator controller and the two orders

`gnnerator_ctrl` starts the Graph Engine and generates the Dense Engine's tasks. Then
it stalls the consumer.

- **Graph first** (GCN, Graphsage: aggregate, then transform).
  - Dense task k covers block `b = k / S` of destination interval `c = k mod S`.
  - It reads the aggregated array and accumulates into the output, with partial sums
    reloaded for b > 0 and ReLU after the last block.
  - Task k is held (`de_stall`) until the Graph Engine has written back more than k
    columns.
  - Because the Graph Engine finishes a column of one block at a time, the Dense
    Engine can start after the first column instead of after the whole pass.
- **Dense first** (GraphsagePool: transform, then max-pool).
  - Dense task s transforms interval s completely.
  - The Graph Engine reads the result. Before loading shard (s, c) it is held
    (`ge_stall`) until the Dense Engine has finished intervals 0 .. max(s, c). The
    maximum is needed because the destination features are loaded too.

`done` pulses when both engines are finished. Two calls with different `order` values
switch modes without a reset.

## Where this departs from the paper's design

- **Dense Engine buffers.** They are single-buffered, and the engine's load, compute
  and store phases run one after another. The described design double-buffers them.
  The results do not change, but throughput does. Results also cannot go from the
  output buffer straight back to the input buffer.
- **Mean aggregation.** Graphsage's mean is computed as a sum. No unit divides by the
  neighbour count.
- **Special Function Unit.** The unit drawn in the Graph Engine has no stated function
  and is not built.
- **Numbers and sizes.**
  - Arithmetic is integer, not floating point.
  - The 2 TFLOPs of the Graph Engine are read as 32 GPEs x 32 lanes x 2 operations at
    an assumed 1 GHz.
  - The Graph Engine memories total 22 MiB against the stated 24 MiB.
- **This design's own choices.** The split of memory sizes, the port handshake, the
  edge and shard-table formats, the task format, the lock-step schedule and the
  arbitration policy are all this design's own.

## Files and simulation

- `rtl/gnn_pkg.sv` holds the shared types: `gnn_cfg_t`, `ge_cfg_t`, `dense_task_t`,
  `edge_t`, and the apply and reduce functions.
- Every other file in `rtl/` is one module.
- `rtl/gnnerator_top.sv` is the top.

Every `tb/tb_<module>.sv` is a self-checking testbench that prints
`TB_RESULT checks=... failures=...`. These are helpers, not tests:

- `tb/tb_dram.sv` and `tb/tb_feature_dram.sv` are behavioural memory models.

The end-to-end tests:

- `tb/tb_gnnerator_top.sv` is an 8 x 8 array with 4 GPEs of 4 lanes.
- `tb/tb_gnnerator_top_full.sv` uses every default parameter.

Both run a random graph through a graph-first GCN-like stage and then a dense-first
pooling stage. They compare every output word with a reference and check that every
mechanism happened at least once: both stalls, partial-sum reloads, reduce conflicts
and the mode switch.

To run one:

    verilator --binary --timing --assert -y rtl -y tb rtl/gnn_pkg.sv \
        tb/tb_gnnerator_top.sv --top-module tb_gnnerator_top -o sim
    obj_dir/sim

The full-size test builds in about a minute and a half and simulates in under a
second of wall time. Large parts of the default design are memory, which a synthesis
flow would map to SRAM macros:

- 16 MiB metadata buffer with 32 asynchronous read ports;
- 32-write-port aggregate buffers.

Written as arrays, these make logic synthesis of the full-size top very slow. Tools
that only elaborate and lint it finish in seconds.
