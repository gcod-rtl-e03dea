# GCoD accelerator in SystemVerilog

## The idea

A graph convolutional layer computes `X' = act(A · X · W)`: a combination
step (`X · W`, features times weights) and an aggregation step (`A · (XW)`,
summing each node's neighbours). The adjacency matrix `A` of a real graph is
very sparse and very irregular, so the aggregation is hard to run well on
parallel hardware.

GCoD fixes this from both ends. At training time the graph is reordered and
pruned until `A` becomes two parts:

* **a denser part**: dense blocks on the diagonal. Each block is a subgraph of
  nodes with similar degree, and blocks are grouped by class.
* **a sparser part**: a small, irregular set of non-zeros off the diagonal.

The accelerator then has one branch for each part. They run at the same time:

* **Denser branch.** Several identical *chunks*. Each chunk owns one diagonal
  block and its rows of `X·W`. A chunk does sparse-times-dense products from a
  coordinate (COO) list. It needs no data from other chunks.
* **Sparser branch.** One sub-accelerator walks the off-diagonal non-zeros
  column by column in compressed-sparse-column (CSC) order. For column `c` it
  needs row `c` of `X·W`. That row usually sits in some chunk's weight buffer
  already, so the branch asks the chunks for it (*query-based weight
  forwarding*). It reads off-chip memory only when no chunk has the row.

At the end the two branches' partial outputs are added row by row and the
activation is applied (*output synchronisation*).

The default configuration has four sub-accelerators: three chunks and one
sparser branch. Each has 1024 lanes, so there are 4096 multiply-add PEs in
all. Arithmetic is 32-bit fixed point.

## Datapath arithmetic

Every value is a signed Q16.16 number: 16 integer bits and 16 fraction bits.

* **Multiply.** A product is the full 64-bit product shifted right
  arithmetically by 16, then truncated to 32 bits.
* **Add.** Sums wrap; there is no saturation.
* **PE.** One PE computes `a·w + (add_sel ? acc : 0)`. The second input of
  the adder is either the partial sum or a constant zero.
* **SpMM engine.** `LANES` PEs side by side. The engine has two modes:
  * *element-wise*: lane `i` computes `in[i]·w[i] + acc[i]`.
  * *inner product*: an adder tree sums all lanes.
* **Sparse work.** For a single non-zero, lane 0 of the input (the non-zero's
  value) is broadcast to every PE. One non-zero times one weight row then
  takes one cycle for the whole feature vector.

The activation unit has three modes:

* pass-through;
* ReLU, which gates a value to zero when its sign bit is set;
* a 256-entry lookup table over `[-8, 8)`, for other functions. Entry `k`
  covers inputs `-8 + k/16 ... -8 + (k+1)/16`. Inputs outside the range clamp
  to the first or last entry. The host writes the table, so it can hold
  sigmoid, tanh, ELU and so on.

## Buffers and the index buffer

Each chunk has four buffers:

| buffer | default size | contents |
|---|---|---|
| FBuf | 8192 entries | COO entries `{row, col, value}` |
| WBuf | 256 rows × 1024 lanes | dense weight rows |
| OBuf | 256 rows × 1024 lanes | output rows, each with a valid bit |
| IdxBuf | two ranges | see below |

The IdxBuf holds two `(base, count)` ranges:

* **Weight range.** WBuf address `k` holds global weight row `base + k`.
  A query for row `r` hits when `base ≤ r < base + count`. The hit's address
  is `r - base`. This is the whole lookup that forwarding needs: a subtract
  and a compare, with no tag memory.
* **Output range.** OBuf address `k` holds node `base + k`. This range is
  also how the sparser branch finds which chunk owns a node at sync time.

All buffers have synchronous reads of one cycle. The memories have no reset;
only the valid bits and the registers are reset.

## One layer, step by step

The host (not part of this RTL) drives the accelerator. It loads buffers
through one load port (`ld_we`, `ld_target`, `ld_unit`, `ld_addr`,
`ld_data`) and issues four operations on `cmd_op`.

1. **Load.** For each chunk, the host writes:
   * the tile's features `X` into FBuf, as COO entries `{node, feature, x}`;
   * `W` into WBuf, one row per input feature;
   * the IdxBuf ranges.

   For the sparser branch, it writes the off-diagonal part of `A` in CSC form:
   * column pointers `colptr[0..N]`;
   * entries `{row, value}`.
2. **OP_COMBINE.** Every chunk runs its COO list through the engine:
   `OBuf[row] += x · WBuf[col]`. One entry is taken per cycle, and a
   three-stage pipeline gives one result per cycle.
   * A read-after-write on the same OBuf row is resolved by a one-entry
     bypass. This happens whenever two consecutive entries share a row.
   * Entries whose row or column falls outside the chunk's ranges are counted
     as `dropped` and otherwise ignored.
3. **OP_FORWARD.** Every chunk copies OBuf (now its rows of `X·W`, optionally
   activated) into WBuf. It also sets its weight range to its output range and
   clears OBuf.
   * This is the *efficiency-aware* order of the paper: combination first,
     row by row, with the result kept on chip so that aggregation uses it
     directly.
   * After this step, each chunk's WBuf holds exactly the `X·W` rows of its
     own nodes. That is also what the sparser branch will ask for.
4. **Load the adjacency blocks.** The host loads each chunk's diagonal block
   of `A` into FBuf as COO entries `{row, col, a}`, with global node numbers.
5. **OP_AGGREGATE.** Both branches start together.
   * The chunks compute `OBuf[row] += a · WBuf[col]` over their blocks.
   * The sparser branch does the following for every column `c` of its CSC
     slice:
     1. It reads `colptr[c]` and `colptr[c+1]`. An empty column is skipped in
        two cycles, without a query.
     2. It asks the forwarding unit for row `c`. Every chunk checks its IdxBuf
        at the same time, and the lowest-numbered hit answers one cycle later
        with the WBuf row.
     3. On a miss it raises `hbm_req`/`hbm_row` and waits for `hbm_rvalid`.
     4. It streams the column's non-zeros, one per cycle:
        `SOBuf[row] += a · XW[c]`. This pipeline has the same bypass as the
        chunks.
     5. If `n_sample` is non-zero and the column has more entries than that,
        a 16-bit LFSR picks `n_sample` entries at random instead of all of
        them. Picks are with replacement. This is GraphSAGE's neighbour
        sampling.

   When both branches are done, the controller starts the output sync.
   * It walks `n_rows` rows from `first_row`.
   * For each row it reads the owning chunk's OBuf and the sparser branch's
     OBuf in the same cycle. A row that a buffer never wrote reads as zero.
   * It adds the two rows, applies `out_act`, and emits the result on
     `out_valid`, `out_row` and `out_data`, one row per cycle.
6. **OP_CLEAR.** Empties every chunk's OBuf before the next layer.

A layer with more nodes, edges or input features than the buffers hold is
run as several passes of the steps above, each over one tile. The host
chooses the tiles.

## Timing

* **Chunk.** One COO entry per cycle, plus about 4 cycles to fill and drain
  the pipeline. A copy takes one cycle per row plus 2.
* **Sparser branch, per column.**
  * empty column: 2 cycles;
  * non-empty column: 2 cycles to read the pointers, 2 for a forwarded row
    (or 2 plus the memory latency for a miss), 1 to start the sampler, then
    one non-zero per cycle, plus 3 to drain.

  So a column costs about 8 + nnz cycles. Query latency is not overlapped
  with the previous column: only one query or memory read is in flight.
* **Output sync.** One row per cycle, with two cycles of latency.
* **Counters.** `op_cycles` counts the cycles of the last operation.
  `fwd_hits`, `fwd_misses`, `hbm_reads`, `cols_skipped`, `cols_sampled` and
  `dropped` count events.

## Where this RTL departs from the paper, or fills gaps

Follows the paper:

* the two branches;
* one sub-accelerator per class group in the denser branch;
* COO input with dense weights in the chunks;
* CSC and distributed (column-wise) aggregation in the sparser branch;
* forwarding by checking an index buffer's range, with off-chip memory as
  the fallback;
* skipping of empty columns;
* sampling with a linear shift register;
* ReLU by gating, other activations by lookup table;
* an output sync in the sparser branch;
* 4096 PEs and 32-bit fixed point.

This design's own choices, where the paper says nothing:

* the Q16.16 format, truncation and wrap-around;
* equal lanes per sub-accelerator. The paper sizes each sub-accelerator in
  proportion to its workload, but gives no numbers.
* three chunks;
* all buffer depths. The defaults come to about 9.2 MB on chip, which sits
  within the 9 MB BRAM + 33 MB URAM of the FPGA the paper uses.
* the table size and range of the lookup-table activation;
* the LFSR polynomial (x^16+x^14+x^13+x^11+1) and seed (0xACE1), and sampling
  with replacement;
* lowest-index priority among chunks when forwarding;
* the operation set and the controller FSM;
* the copy step that turns combination results into forwarding sources;
* the `(base, count)` encoding of the index buffer;
* the load port and the simple valid-only row-read protocol to off-chip
  memory;
* one non-zero per cycle in every branch;
* the activation applied after the two branches are summed.

Not built:

* **The *resource-aware* pipeline order.** This is the column-wise,
  aggregation-first schedule the paper offers for layers whose `X·W` does not
  fit on chip. The paper gives only the schedule, not the hardware that
  switches to it.
* **The DMA engines and the HBM controller.** The top brings out a load port
  and a row-read port where they would connect.
* **The host and the compiler.** These partition the graph and produce the
  COO/CSC streams.
* **Column-level parallelism in the sparser branch.** The paper's
  distributed aggregation takes "column(s)" per cycle; here one non-zero per
  cycle is taken.
* **The sampling unit in the chunks.** It is drawn in every sub-accelerator,
  but only the sparser branch has one. Chunks read COO lists whose columns
  are not grouped.
* **The 8-bit, 10240-PE variant.**
* **Attention (GAT) and residual (ResGCN) arithmetic.** Only the SpMM parts
  of those models map onto this datapath.

## Workload capacity

One pass holds:

* 768 nodes in the chunks (256 per chunk) and 768 in the sparser branch;
* 8192 COO entries per chunk;
* 8192 off-diagonal entries;
* 256 input features per chunk;
* up to 1024 output features.

Indices are 16 bits, so they are local to a tile.

The paper's datasets range from Cora (2,708 nodes, 1,433 features) to Reddit
(232,965 nodes, 114.6 M edges). None fits in one pass. Cora needs 4 node
tiles × 6 feature tiles; Reddit needs hundreds of node tiles. Every hidden
size used (16, 64, 8×8 heads, 128) fits in the 1024 lanes.

## Verification

Every module has a self-checking testbench in `tb/`. Each one:

* compares the outputs with a reference model written independently in the
  testbench;
* counts checks and failures;
* ends with `TB_RESULT checks=N failures=M`;
* stops itself with a watchdog.

There are two end-to-end testbenches. Both run a full layer (combine,
forward, load the blocks, aggregate and sync) on a random block-diagonal
graph, and compare every output row with a software model of the arithmetic.

* **`tb_gcod_top`** runs at small sizes: 8 lanes, 48 nodes.
* **`tb_gcod_top_full`** runs the top with every parameter at its default:
  1024 lanes, 3 chunks, 768 nodes.
  * The whole graph yields 787,213 checks.
  * Combination takes 773 cycles.
  * Aggregation with sync takes 6,937 cycles, with 611 forwarded rows,
    3 off-chip reads and 154 skipped columns.

Both end-to-end benches count each mechanism and fail if any of them never
happened:

* forwarding hits;
* forwarding misses that go off chip;
* skipped columns;
* sampled columns;
* pipeline bypasses;
* ReLU clamping.

To simulate one with Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
  --top-module tb_gcod_top rtl/gcod_pkg.sv tb/tb_gcod_top.sv
./obj_dir/Vtb_gcod_top
```

`tb_gcod_top_full` builds in about a minute and runs in a few seconds. Both
end-to-end benches share their body, `tb/tb_gcod_top_body.svh`; they differ
only in the size parameters at the top of each file.

## Changing it

`LANES`, `NUM_CHUNKS`, the buffer depths and `N_NODES` are parameters of
`gcod_top`. The rules for changing them:

* The sparser branch covers nodes `0 .. N_NODES-1`. CSC entries with a
  higher row are counted as dropped, and such rows get no off-diagonal part
  at sync time. Keep `N_NODES` at least `NUM_CHUNKS × ODEPTH` so that every
  chunk row can receive one.
* The widths of indices and of the data type live in `gcod_pkg`.

At 1024 lanes the wide row buses (32,768 bits) make synthesis slow. Verilator
also warns about the `'0` replications on them; the warnings are harmless.
