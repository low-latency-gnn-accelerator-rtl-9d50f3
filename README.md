# A single-datapath GNN decoder for surface-code syndromes

A surface-code quantum memory produces detection events every measurement
round. The decoder has to decide, in well under a microsecond, whether those
events mean a logical error. This design does it with a small graph neural
network (GNN). Each detection event becomes a graph node carrying five numbers:
is it an X or a Z stabiliser, its x and y position, and its time. Each node is
joined to its nearest neighbours, and the edge weight is the inverse square of
their distance. The network reads the graph and returns one logit, which a
sigmoid turns into the probability of a logical error.

The main idea of the hardware is **one datapath for every layer**. The design has:

- a single array of 8,192 multipliers;
- one adder tree over all of the multipliers;
- a weight memory built from 1,639 block RAMs, all read at the same address.

Every layer of the network, whatever its shape, is broken into cycles that keep
this array as full as possible. The schedule is fixed before the decode starts
and depends only on the number of nodes. So the worst-case latency is known
exactly: for the default network and a 30-node graph it is **206 clock
cycles**, which is 988.8 ns at a 4.8 ns clock.

## The network

| layer       | kind              | in → out      | multiplies per node  |
|-------------|-------------------|---------------|----------------------|
| GraphConv0  | graph convolution | 5 → 32        | 2·5·32               |
| GraphConv1  | graph convolution | 32 → 128      | 2·32·128             |
| GraphConv2  | graph convolution | 128 → 256     | 2·128·128 (see below)|
| GMP         | global mean pool  | N×128 → 256   | 256                  |
| Dense0      | fully connected   | 256 → 256     | 65,536 (once)        |
| Dense1      | fully connected   | 256 → 128     | 32,768               |
| Dense2      | fully connected   | 128 → 64      | 8,192                |
| DenseOut    | fully connected   | 64 → 1        | 64                   |

A graph convolution computes, for every node i:

    x'_i = ReLU( W1 · x_i  +  W2 · Σ_j e_ij · x_j  +  b )

ReLU follows every graph convolution and every hidden dense layer. It does not
follow GMP or the output.

**Pruned GraphConv2.** The default is the *maximum-latency* network
(`MODEL = MODEL_MAXLAT`). In it, GraphConv2 computes only 128 of its 256
outputs; the other 128 are taken as zero. The RTL computes output features
0..127. The trained weights must therefore be permuted so that the kept features
come first.

**Average-latency network.** A second network (`MODEL = MODEL_AVGLAT`) trades
worst-case latency for accuracy:

- GraphConv2 computes all 256 outputs;
- an extra GraphConv 256 → 256 is added;
- graphs of up to 32 nodes are accepted;
- features are wider: Q18.5, with a 28-bit accumulator.

Select it with `MODEL=1, NMAX=32, FW=23, AW=28`.

## Number formats

All numbers are signed two's complement. Qi.f means i integer bits, counting the
sign, and f fraction bits.

| quantity                     | format | bits |
|------------------------------|--------|------|
| weights, edge weights, 1/N   | Q4.10  | 14   |
| node features                | Q12.5  | 17   |
| biases                       | Q1.4   | 5    |
| accumulation                 | Q12.15 | 27   |

- **Products.** A product of a feature and a weight is already in the
  accumulator format. It is saturated to 27 bits in the multiplier stage. The
  adder tree then adds modulo 2^27.
- **Biases.** A bias is shifted left by 11 bits and added in the accumulator.
- **Result.** The result is rounded half up to 5 fraction bits, saturated to 17
  bits, and then passed through ReLU where the layer has one.

One point is open. A 5-bit bias is far coarser than the feature format, and one
reading of the source description keeps biases at the feature precision. This
design uses 5-bit Q1.4 biases. Only `BW`/`BF` in `gnn_pkg` change if the other
reading is wanted.

## Pipeline

    issue (layer_ctrl) ─► stage 1: input_select + weight_store read
                        ─► stage 2: mult_array (8,192 products, saturated)
                        ─► stage 3: adder_tree (tapped) → output_stage → feature_regs

- **Controller.** `layer_ctrl` emits one *issue descriptor* (`issue_t`) per
  cycle. The descriptor holds:
  - the operation: aggregation, node, GMP or dense;
  - the layer;
  - the index of the first output this cycle produces;
  - which feature bank is the layer's input.

  The descriptor travels down the pipeline with the data. Each stage decodes
  from it what it needs, so there is no other control between the stages.
- **Stage 1.** Stage 1 routes operands to lanes and reads one weight row. The
  row comes from all 1,639 block RAMs at once, five weights per 70-bit word.
- **Stage 2.** Stage 2 multiplies.
- **Stage 3.** Stage 3 reduces the products, adds biases, rounds, applies ReLU
  and writes the results into the feature registers.

A layer can start once the previous layer's last results are written. So each
layer ends with two drain cycles.

### Lane packing: how one tree serves every layer

This is the heart of the design. Level k of the adder tree holds 8,192 / 2^k
sums, and each sum covers an aligned block of 2^k products. If a layer's dot
products are laid out in aligned blocks of 2^lg lanes, then tapping the tree at
level lg gives 8,192 / 2^lg finished dot products in one cycle. Every operation
is mapped this way.

- **Aggregation (`OP_AGG`).** This computes `agg[i][f] = Σ_j e_ij · x_j[f]`.
  - One dot product has one lane per possible neighbour j. That is 32 lanes for
    `NMAX = 30`, and the tap is at level 5.
  - The edge weight goes in place of the weight, so the weight row is unused.
  - A cycle produces 256 aggregates. These cover several nodes at once: 8 nodes
    for the 32 features of GraphConv1.
  - Features are padded to a power of two per node.
- **Graph-convolution node step (`OP_NODE`).** One output is
  `W1·x_i + W2·agg_i`, a single dot product of length 2·din over the lanes
  `[x_i ; agg_i]`. The tap is at level clog2(2·din).

  | layer      | lanes per output | outputs per cycle | cycles for 30 nodes          |
  |------------|------------------|-------------------|------------------------------|
  | GraphConv0 | 16               | 512               | 2 (16 nodes per cycle)       |
  | GraphConv1 | 64               | 128               | 30 (one node per cycle)      |
  | GraphConv2 | 256              | 32                | 120 (4 cycles per node)      |

- **Dense (`OP_DENSE`).** Every group holds the same pooled vector. Group g
  multiplies it by row `q0+g` of the weight matrix. Dense0 (256 → 256) needs
  8 cycles, Dense1 needs 4, Dense2 needs 1 and DenseOut needs 1.
- **GMP (`OP_GMP`).** A node-sum adder tree in stage 1 adds each feature over
  the valid nodes. Lane f then multiplies that sum by 1/N. The factor 1/N sits
  in the weight memory at row `gmp_base + N`, so no divider is needed. The tree
  is read at level 0.

Weights are laid out to match. When a layer is *folded* over several cycles,
each cycle has its own weight row. Lane p of row r holds the weight that lane
multiplies in that cycle. `gnn_tb_pkg::row_weight` is the reference for this
layout and is what a model loader has to reproduce. The layout rules are:

- the rows of the layers follow one another from address 0;
- GraphConv rows repeat per node, because every node uses the same weights.

### Schedule and overlap

A graph convolution runs its aggregation cycles first, then its node cycles.
Node cycles need the aggregates of their node. Those aggregates arrive two
cycles after the aggregation cycle that produced them. So the node phase may
start inside the aggregation drain, but only if the first node it reads was
finished by an earlier aggregation cycle. `gnn_pkg::node_start` computes this.

The schedule for 30 nodes and the default sizes is below. The "reference" column
is the per-layer cycle table the design was built against.

| layer      | aggregation | node/dense | drain | total | reference |
|------------|-------------|------------|-------|-------|-----------|
| GraphConv0 | 1           | 2          | 2     | 7*    | 7         |
| GraphConv1 | 4           | 30         | 2     | 36    | 38        |
| GraphConv2 | 15          | 120        | 2     | 137   | 137       |
| GMP        | –           | 1          | 2     | 3     | 2         |
| Dense0     | –           | 8          | 2     | 10    | 10        |
| Dense1     | –           | 4          | 2     | 6     | 6         |
| Dense2     | –           | 1          | 2     | 3     | 3         |
| DenseOut   | –           | 1          | 2     | 3     | 3         |
| sigmoid    |             |            |       | 1     | –         |
| **total**  |             |            |       | **206** | **206** |

\*GraphConv0 has a single aggregation cycle. Its first node cycle has to wait
for that cycle's writeback, which makes two idle cycles.

Smaller graphs take fewer cycles. `gnn_pkg::decode_cycles(model, n, MULTS,
NMAX)` gives the exact count, and the top reports it on `latency`.

## Input filtering and the result

Rare large graphs would set the worst case. So the decoder accepts at most
`NMAX` nodes, 30 by default. `graph_filter` does the check:

- A larger graph is not decoded. It is answered at once with "no logical error"
  and `discarded = 1`.
- An empty graph (N = 0) is answered the same way, with `discarded = 0`.
- Any other graph starts the controller.

The output logit passes through `sigmoid_unit`, a four-segment piecewise-linear
sigmoid with breakpoints at |x| = 1, 2.375 and 5.

- The probability is given in 1/256 steps and saturates at 255.
- The decision is `err = logit > 0`, which is the same as probability > 0.5.

`done` pulses for one cycle. With it come `err`, `prob`, `discarded` and
`latency`, which counts the cycles from the first issue cycle to the result.

## Interface of `gnn_decoder_top`

- **Loading.** Everything is loaded while the decoder is idle.
  - *Node features:* one node per cycle, `ld_node_we/idx/feat`, with 5 Q12.5
    values.
  - *Edge weights:* one row of the adjacency matrix per cycle,
    `ld_edge_we/idx/row`, with NMAX Q4.10 values. The row is zero where there is
    no edge.
  - *Weights:* one block-RAM word per cycle, `wld_we/bank/addr/data`. A word
    holds five 14-bit weights; lane p is weight p mod 5 of bank p / 5.
  - *Biases:* one bias per cycle, `bld_we/addr/data`, stored in the order of
    the layers.
- **Decode.** Raise `start` for one cycle, with `n_in` set to the node count.
  `busy` stays high until the result.
- **Reset.** `rst_n` is asynchronous and active low. It clears the control state
  only. The feature, weight and bias storage is not reset and must be loaded
  before use.
- **Status.** `layer` and `phase` show progress.

## Where this design departs from the source description

- **Graph convolution in one pass.** The source computes the self term, with
  bias, first and adds the neighbour term in a second pass. Here both terms
  are one dot product of 2·din lanes. It costs the same multiplies, and with
  8,192 lanes it fits even GraphConv2 (256 lanes per output).
- **GraphConv1 takes 36 cycles instead of 38, and GMP takes 3 instead of 2.**
  The total is the same 206 cycles. GMP here sums nodes in stage 1 and still
  needs the two drain cycles.
- **The adder tree sits wholly in stage 3.** The source moves its first two
  levels into the multiplier stage to shorten the critical path. That changes
  timing closure, not the cycle count.
- **Feature banks swap roles instead of being copied.** Layer i reads bank
  i mod 2 and writes the other bank.
- **Products are saturated to the accumulator width, and the tree wraps.**
  Saturation and rounding details beyond "round after accumulation" are this
  design's own choices.
- **Design choices not given by the source.** These include:
  - the sigmoid's form and its 8-bit output;
  - the load ports;
  - the reset behaviour;
  - the handling of empty graphs;
  - the block-RAM depth of 512 words, the geometry of a 36 Kb block RAM;
  - the 14-bit Q4.10 format of edge weights.
- **Not built.** Graph construction is not built. It is the preprocessing that
  turns detection events into features and k-nearest-neighbour edges. The
  testbenches do it in software (`gnn_tb_pkg::gen_graph`, k = 10).

## Files

- `rtl/gnn_pkg.sv`: formats, layer table, lane-packing and schedule functions
  shared by the RTL and the testbenches.
- `rtl/gnn_decoder_top.sv`: the decoder. Its submodules are:

  | module         | role                                          |
  |----------------|-----------------------------------------------|
  | `graph_filter` | input size filter                             |
  | `layer_ctrl`   | layer and cycle sequencing                    |
  | `feature_regs` | node, aggregate and edge registers            |
  | `input_select` | stage 1                                       |
  | `weight_store` | 1,639 × `weight_bram`                         |
  | `mult_array`   | stage 2                                       |
  | `adder_tree`   | stage 3 reduction                             |
  | `bias_regs`    | bias register file                            |
  | `output_stage` | bias, round, saturate, ReLU                   |
  | `sigmoid_unit` | output sigmoid                                |

- `tb/<module>_tb.sv`: a self-checking testbench for each module.
- `tb/gnn_tb_pkg.sv`: a bit-exact reference model of the network, a random
  model generator and a generator of k-nearest-neighbour surface-code graphs.
- `tb/gnn_top_harness.sv` and `tb/gnn_decoder_top_tb.sv`: end-to-end tests at a
  reduced size of 8 nodes and 1,024 multipliers.
  - Both networks are run, on graphs of NMAX nodes, NMAX + 1 nodes, 0 nodes,
    1 node and random sizes.
  - Each decode is compared bit for bit with the reference: logit, probability,
    decision and latency.
  - The test counts every mechanism (multi-node aggregation, folding, overlap,
    GMP, dense, discard, empty bypass) and fails if any of them never happened.
- `tb/gnn_full_tb.sv`: the decoder at its default size, with no parameter
  overrides.
  - It decodes a 30-node graph bit-exactly against the reference and checks the
    206-cycle latency.
  - It checks that a 31-node graph is discarded.
  - It prints the per-layer cycle counts.
  - It simulates in about half a minute, but verilator needs about 12 minutes
    to build it.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. For example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
        rtl/gnn_pkg.sv tb/gnn_tb_pkg.sv tb/gnn_decoder_top_tb.sv \
        --top-module gnn_decoder_top_tb -o sim && obj_dir/sim

Swap in any other `tb/*_tb.sv` and its module name in the same way. The
end-to-end test builds and runs in well under a minute.

To try other sizes, override the top's parameters:

- `MULTS` sets the number of multipliers and must be a power of two, at least
  256 for the default network.
- `NMAX` sets the largest accepted graph.
- `DEPTH` sets the block-RAM depth, which must hold all weight rows plus NMAX + 1
  rows of GMP factors.

The schedule, the weight layout and the reference model all follow these
parameters automatically.

## Known issue

The end-to-end test `gnn_decoder_top_tb` passes all 78 checks when the simulator
starts with every register at zero. When verilator starts the registers at
random values (`+verilator+rand+reset+2`), the 8-node decodes (NMAX nodes) of
both networks give a wrong logit, and 5 checks fail. The smaller graphs decoded
afterwards are still exact. So some state is read before it is first written
when a graph fills every node slot. The cause has not been found yet. Until it
is, treat results for full-size graphs as unverified when storage is not
cleared.
