# SPA-GCN for SimGNN: a streaming sparse GCN pipeline for graph-similarity queries

This design computes the SimGNN similarity score of a pair of small graphs, such as
molecules with a few dozen atoms. Each graph passes through three graph-convolution
(GCN) layers, `H' = ReLU(A'·H·W + b)`. An attention pooling stage turns the node
embeddings into one graph embedding. A neural tensor network (NTN) and a two-layer fully
connected network (FCN) then reduce the two embeddings to one score.

Small graphs give too little work per layer to keep a large engine busy. The design
therefore does not reuse one engine for all layers. It builds every stage as its own
hardware, with its own parallelism, and links the stages with FIFOs:

```
 memory words ──► prefetcher ──┬──► parameter bus ──► every weight / bias buffer
                               ├──► features ─► GCN layer 1 ─► GCN layer 2 ─► GCN layer 3 ─► Att ─► NTN+FCN ─► score
                               └──► edges ────► layer 1 ──────► layer 2 ─────► layer 3
```

Each stage starts as soon as data reaches it. Layer outputs never go back to memory.
Edges are read once and handed from layer to layer. While the attention stage finishes
the first graph of a query, the GCN layers already work on the second graph. Queries of
a batch follow one another with no gap.

Zeros are skipped throughout. The input features are one-hot atom labels. After the
ReLU, about half of each layer's outputs are zero. Each layer therefore carries only
non-zero values, each tagged with its (row, column) address. Its schedule is built so
that this irregular stream still keeps the multipliers busy on most cycles.

All arithmetic is 32-bit signed fixed point with 16 fraction bits (Q15.16).

## Inside a GCN layer

A layer (`gcn_layer`) is a chain: pruner → MULT → product FIFO → ACG. An edge FIFO runs
alongside the chain.

### Pruner: P lanes, zeros dropped

The previous stage delivers up to `P` addressed elements per beat. The pruner tests each
element and pushes only the non-zero ones into that lane's own FIFO. A beat is accepted
only when every FIFO it must write has room. Each lane therefore stays in order and
nothing is lost. An end-of-graph token goes into every lane FIFO, so each lane sees the
graph boundary.

### MULT: outer-product feature transformation

The weight matrix `W` (`F_IN × F_OUT`) sits in a local buffer. The node embedding `H`
arrives as a stream in column order. Each arriving element `h[n][k]` is used for all its
products before it is dropped: `h[n][k]·W[k][j]` for every `j`. A SIMD processing
element (PE) produces `SIMD` of those products per cycle, so one element occupies its PE
for `F_OUT/SIMD` cycles (a *slot*).

`DF` PEs run side by side. PE `d` serves node rows with `row mod DF = d`, one memory bank
of the accumulator each. Two PEs therefore never write the same bank.

The arbiter picks one element per PE at the start of each slot:

* A next-turn pointer walks the `P` lane FIFOs round robin and moves on by one FIFO
  every slot.
* Starting at that pointer, a PE takes the first non-empty FIFO whose head element is
  in its bank.
* Before the element goes out, the *prev-iter* table is consulted. This table is
  indexed by node row and holds the iteration in which that row was last updated.
  If fewer than `DEP = L_ADD + 1` iterations have passed, the accumulator's
  read-add-write of that row may still be in flight. The element is held and a bubble
  goes down the pipe (`bubble`).
* Otherwise the element is issued and the current iteration is written into the table.

Multiplies take `LMUL` cycles. Each output word carries, for every PE lane, the
products and their (row, column block) address. The address lets the accumulator place
any word without needing to know which PE made it.

### ACG: accumulate, aggregate, read out

The ACG handles one graph in three phases.

1. **Feature-transformation accumulate.**
   * The `DF` SIMD adders add each product word into the features buffer `X`
     (`NODES × F_OUT`).
   * The adder takes `LADD` cycles, from read to write-back.
   * The phase ends when the MULT's end-of-graph word arrives.
2. **Aggregation.**
   * Edges `(src, dst, w)` of the normalized adjacency matrix `A' = D^-1/2 (A+I) D^-1/2`
     stream in from the edge FIFO.
   * Each edge is applied to all features of `dst`, `SIMD_AGG` per cycle, as
     `O[dst] += w·X[src]` into the out-features buffer `O`.
   * The multiply-add takes `LMUL + LADD` cycles.
   * Each edge is forwarded to the next layer once it is used. No edge memory is
     needed.
3. **Readout.**
   * `O` is read column by column, `P_OUT` nodes per beat.
   * The bias is added and ReLU applied.
   * The results go to the next layer's pruner, or to the attention stage.
   * A final beat carries the node count.

The host orders edges so that equal destinations are far apart. FIFOs between modules
can still bring two updates of the same address closer together than the adder latency.
To catch this, the ACG also compares every new update address with the updates still in
its pipelines and holds the input on a match (`raw_stall`). This interlock is this
design's own addition. The MULT's prev-iter check alone cannot see what the FIFO between
the two modules does to the spacing.

The buffers are not cleared between graphs. A valid bit per row and column block marks
what the current graph has written. Anything unmarked reads as zero, and the bits are
reset at the end of each graph.

### Per-layer sizes

| layer | F_IN→F_OUT | SIMD (FT) | SIMD (aggregation) | DF | P (input lanes) |
|-------|-----------|-----------|--------------------|----|-----------------|
| 1     | 29→64     | 32        | 32                 | 2  | 8               |
| 2     | 64→32     | 32        | 32                 | 1  | 2               |
| 3     | 32→16     | 16        | 16                 | 1  | 2               |

The parallelism is the original architecture's best-performing configuration. The
feature widths (29 one-hot labels, then 64/32/16) are SimGNN's own sizes for the AIDS
molecule set.

## Graph boundaries and overlap

Graphs are separated by tokens, not by a central controller.

* The memory stream closes each graph with an `EOG` word carrying the node count.
* The prefetcher turns it into an end-of-graph feature beat and an end-of-graph edge.
* Every module passes the token on after it has finished the graph.

A layer can therefore hold graph *g*'s readout while the previous layer already works
on graph *g+1*. Each stage works on one graph at a time.

## Attention pooling (`att_module`)

For a graph with node embeddings `h_n` (F = 16 wide), the stage computes:

```
c   = tanh( (1/N) · W_att · Σ_n h_n )
a_n = sigmoid( h_nᵀ · c )
h_G = Σ_n a_n · h_n
```

It runs these steps in order:

1. Repack the column-major layer-3 output into a node buffer.
2. Form `W_att·h_n` one node and one output feature per cycle (F multipliers), and
   accumulate the sum over nodes.
3. Scale by `1/N` (one division per graph) and apply `tanh` to each feature.
4. Take one dot product and one sigmoid per node.
5. Form the matrix-vector product `H·a`.

From the end-of-graph beat to `h_G` takes `N·F + F + 2N + 2` cycles.

## NTN and FCN (`ntn_fcn`)

The first graph embedding of a query is stored. The second one starts the scoring:

```
s_k   = ReLU( h1ᵀ·W_k·h2 + V_k·[h1;h2] + b_k )     k = 1..16
z_o   = ReLU( Σ_k Wf1[o][k]·s_k + bf1[o] )          o = 1..16
score = Σ_o Wf2[o]·z_o + bf2
```

The units run in this order:

1. `h1ᵀ·W_k` for one (k, i) per cycle.
2. The product with `h2`, together with `V_k·[h1;h2]`, for one k per cycle.
3. The bias and ReLU.
4. FCN1, one neuron per cycle.
5. The FCN2 reduction.

From the second embedding to the score takes `K·F + K + F_FC + 2` cycles. The score
leaves with its query number.

## Sigmoid and tanh

`sigmoid_unit` is the PLAN piecewise-linear sigmoid. It uses breakpoints at 1, 2.375
and 5 and slopes of 1/4, 1/8 and 1/32, all shifts and adds. Its largest error is about
0.019. `tanh_unit` computes `2·sigmoid(2x) − 1`, with a largest error of about 0.04.
Both have one register stage.

## Getting data in: the word stream and the parameter bus

All input arrives on one valid/ready stream of 66-bit words, `{tag, a[15:0], b[15:0], data[31:0]}`:

| tag   | a            | b          | data              |
|-------|--------------|------------|-------------------|
| PARAM | target       | address    | weight or bias    |
| FEAT  | node         | feature    | non-zero input feature |
| EDGE  | source node  | dest. node | normalized weight of A' |
| EOG   | node count   | –          | –                 |

### Order

1. All parameters come first. The prefetcher puts each one on a registered broadcast
   bus, and each buffer picks its own target.
2. Then come the queries. Each graph is a list of non-zero features in column order
   (all nodes of feature 0, then feature 1, and so on).
3. Next comes its edge list. The list includes self loops, and equal destinations
   are spread apart.
4. An EOG word closes the graph.
5. A query is two graphs in a row.

### Weight layouts

| target | meaning | address |
|--------|---------|---------|
| `PT_W1/2/3` | GCN weights | `k·F_OUT + j` |
| `PT_B1/2/3` | GCN biases | `j` |
| `PT_WATT` | attention weights | `i·F + k` |
| `PT_WNTN` | NTN tensor | `(k·F + i)·F + j` |
| `PT_VNTN` | NTN linear term | `k·2F + m` |
| `PT_BNTN` | NTN bias | `k` |
| `PT_WFC1` | FCN1 weights | `o·K + k` |
| `PT_BFC1` | FCN1 biases | `o` |
| `PT_WFC2` | FCN2 weights | `o` |
| `PT_BFC2` | FCN2 bias | `0` |

The host's work is:

* computing `A'`;
* dropping zero input features;
* spreading equal edge destinations apart;
* packing the stream.

The end-to-end testbench shows all of it.

## Control and observation

`control_unit` frames a batch:

* `start` opens the prefetcher, which fetches for `num_queries` queries.
* Each score written out is counted in `queries_done`.
* `done` rises after the last score.
* `cycles` counts the kernel cycles.

The top also reports:

* `graphs_read`;
* one strobe per layer for each of pruned zeros (`ev_zero_dropped`), arbiter bubbles
  (`ev_bubble`) and ACG interlock stalls (`ev_raw_stall`).

## Parameters and limits

Sizes shared by all modules are in `spa_pkg`. The per-layer numbers above are there too,
along with:

* the operator latencies, `L_MUL = 4` and `L_ADD = 7`, the figures of the Alveo
  U280 build (the Kintex KU15P build has 5 and 8; `gcn_layer` takes them as
  `LMUL`/`LADD`, and the MULT's RAW distance follows as `LADD + 1`);
* the graph limits, `MAX_NODES = 64` and `MAX_EDGES = 512` (directed edges, self loops
  included).

A graph larger than the limits does not fit. `NODE_W`/`FEAT_W` (8 bits) bound node and
feature indices at 255. The AIDS molecules average 25.6 nodes and 27.6 edges, which is
about 81 directed entries with self loops. They fit with a wide margin.

## Where this departs from the original architecture

* **Number format.** Q15.16 fixed point. The operator latencies are those of the
  floating-point units the original used, kept as pipeline depths.
* **Activation functions.** Piecewise-linear sigmoid and tanh instead of a vendor math
  library.
* **ACG interlock.** Added, as described above.
* **Pruner position.** The pruner sits at the input of each layer, and layer 1 receives
  pre-pruned features. The pruner at the end of layer *l* and the one at the start of
  layer *l+1* are the same circuit.
* **NTN activation.** The NTN applies ReLU after its bias, as drawn in the original
  block diagram, although the formula there writes a sigmoid. FCN1 uses ReLU. No
  sigmoid is applied to the final score.
* **Memory interface.** The tagged stream and the broadcast parameter bus are this
  design's own. The original only says that the prefetcher reads everything and
  distributes the weights.
* **Control unit.** It only frames batches. Each module sequences itself, and graph
  boundaries travel as tokens.
* **Scale-out.** A single pipeline. The original estimates the gain from several copies
  on separate memory channels; that would be several instances of `spa_simgnn_top`.
* **Not built.** The pairwise node-similarity histogram branch of SimGNN is not part of
  the accelerator.

## Verification

Each block has a self-checking testbench in `tb/`. Reference arithmetic lives in
`tb/spa_ref_pkg.sv` and is written independently of the RTL. What each testbench covers:

| testbench | what it checks |
|-----------|----------------|
| `tb_pruner` | lane order, zero dropping, drop counts, back-pressure when full |
| `tb_gcn_mult` | every product, address and bank rule; that updates of one row are ≥ DEP iterations apart; issue rate against the busier bank's element count |
| `tb_gcn_acg` | `ReLU(A'·X + b)` for random sparse products and edges, edge forwarding, interlock |
| `tb_prefetcher` | routing of every tag, lane choice, eog ordering, back-pressure |
| `tb_sigmoid_unit`, `tb_tanh_unit` | a sweep against the exact functions within 0.02 / 0.04, and monotonicity |
| `tb_att_module` | `h_G` and the latency formula |
| `tb_ntn_fcn` | the score and the latency formula |
| `tb_control_unit` | batch framing |
| `tb_gcn_layer_ku15p` | a whole layer-1 GCN layer with the slower 5-cycle multiply / 8-cycle add of the KU15P build, dense random inputs, back-pressure; every output element exact |
| `tb_spa_simgnn_top` | the full design at its default sizes (see below) |

`tb_spa_simgnn_top` runs a batch of 8 queries of AIDS-like graphs (2 to 40 nodes, rings
and chains, one-hot labels) with random weights. The memory stream has random gaps and
the output has random back-pressure. Each score must match a bit-exact model of the
whole network. The testbench also requires each of these to have happened at least
once:

* pruned zeros;
* arbiter bubbles;
* ACG interlock stalls;
* GCN/attention overlap and GCN/NTN overlap;
* memory and output back-pressure;
* batch completion.

A run measures about 4,000 cycles per query.

To simulate one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/spa_pkg.sv tb/spa_ref_pkg.sv \
          tb/tb_spa_simgnn_top.sv --top-module tb_spa_simgnn_top -o sim
./obj_dir/sim
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

How far to trust the results:

* Simulation covers function and cycle behaviour only.
* No timing closure or resource fit on an FPGA has been attempted.
* The buffers are written as plain arrays. A synthesis tool must map them to block RAM
  for the sizes to be practical.
