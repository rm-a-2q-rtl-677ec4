# A mixed-precision GNN inference accelerator with per-node bitwidths

Graph neural networks spend most of their memory and arithmetic on node
features, not on weights. Aggregation-aware quantization gives every node its
own feature bitwidth and step size: nodes with many neighbours (whose
aggregated features are large) get more bits, nodes with few neighbours get
fewer. For graph-level tasks, where unseen graphs arrive at inference time, the
bitwidth of a node is not learned per node but picked at run time by a
*Nearest Neighbor Strategy* (NNS): the node's largest feature magnitude is
compared with a table of learned quantization ranges, and the nearest range
supplies the step size and bitwidth.

The hardware here exploits this with **bit-serial arithmetic**. A multiply of
an m-bit feature by a 4-bit weight takes m cycles, so a node quantized to 2
bits is processed four times faster than one kept at 8 bits. Everything else
in the design (buffers, gather, requantizers, NNS) exists to keep a
256 x 16 array of such multipliers fed with both phases of a GNN layer.

## The layer as two matrix products

One layer `X' = sigma(A X W)` is computed as

1. **Update phase** `B = X W`. Engine *p* handles node `256*g + p`; the 16
   MACs of every engine see the same 16 weights (one 16-row slice of one
   column of W, broadcast), and each engine multiplies them with 16 of its
   node's features. Passes over `K = ceil(F_in/16)` slices accumulate into the
   engine's partial sum. The result is rescaled and re-quantized to the 4-bit
   signed format of the weights, and written to the other feature buffer.
2. **Aggregation phase** `X' = A B`. A is binary and stored in CSR. Engine *p*
   handles row `256*g + p`; for output column *c* the gather unit fetches up
   to 16 neighbour values `B[j][c]` into the engine's MAC weight inputs and
   sets one mask bit per valid neighbour. The mask bit is the serial operand
   (1 bit, one cycle), so a chunk of 16 neighbours costs one bit cycle plus
   overhead. Rows longer than 16 take further chunks that accumulate. The sum
   is rescaled, optionally passed through ReLU, and quantized to the node's
   output bitwidth.

After each phase the two feature buffers swap roles, so a layer takes two
swaps and the output of a layer is the input of the next with no copy.

## Bit-serial MACs and mixed precision (`bs_mac`, `pe`, `mac_array`)

`bs_mac` holds one product register. Each cycle it shifts the register left
and adds the weight if the current feature bit is 1. Bits arrive most
significant first. Features are two's complement when signed (first layer,
or layers without ReLU) and unsigned after ReLU; for a signed feature the
most significant bit's term is subtracted, which makes the same datapath
correct for both.

A `pe` (processing engine) is 16 such MACs, an adder tree and one partial
sum register. One pass is: load operands (1 cycle), `nbits` shift cycles,
reduce-and-accumulate (1 cycle), i.e. `nbits + 2` cycles. `acc_clear`
on the first pass of an inner product starts a new sum.

`mac_array` is 256 engines started together. Each engine is told its own
node's bitwidth, so engines finish at different times; the array reports
done when the slowest one has. The gain from mixed precision therefore
comes from groups of 256 nodes in which the widest node is narrow. Ordering
nodes by in-degree before loading the graph (done by the host) groups
similar nodes and makes this work well, because in-degree and learned
bitwidth are correlated.

## Fetching neighbours (`csr_gather`)

The edge buffer holds row pointers at word 0 (`N+1` words) and column
indices from word `col_base`. For a group of 256 rows and a chunk number *h*,
the gather unit walks each engine in turn: read `ptr[r]` and `ptr[r+1]`
(two read ports), read up to 16 column indices from `ptr[r] + 16h`, and for
each index *j* read B's word holding column *c* from bank `j mod 256`,
word `(j div 256)*K + c/16`, and pick lane `c mod 16`. It raises `more` if
any row in the group has entries beyond this chunk; the controller then
issues chunk *h+1*. The walker is sequential, one memory access per cycle:
about 4 cycles per engine plus 3 per neighbour. It is the slowest part of
the design and the first candidate for widening.

## Requantization (`requant`)

Every engine has a requantizer. It multiplies the partial sum by a column
factor and a node factor, both 16-bit fixed point with 12 fraction bits,
rounds half away from zero and clips to the target range:
`[-(2^(b-1)-1), 2^(b-1)-1]` for signed outputs and `[0, 2^b-1]` after ReLU.
It also outputs `|psum * col|`, the magnitude of the real value before the
node factor is applied, which is what the NNS compares with its table
(saturated to 32 bits, 12 fraction bits).

Factors used:

| phase | column factor | node factor | output |
|---|---|---|---|
| update | `cs_u[c] = s_W(c) / s_B(c)` | `scale_u = s_X(n)` | 4-bit signed |
| aggregation, node mode | `cs_a[c] = s_B(c)` | `scale_a = 1/s_X'(n)` | `bits_out(n)`, signed or ReLU |
| aggregation, graph mode | `cs_a[c]` | `1/s` from NNS | bits from NNS |

Splitting the precomputed outer product of node and weight step sizes into a
node part and a column part lets one 16-bit number per node and per column
replace an N x F table.

## Nearest Neighbor Strategy (`nns_unit`)

The NNS table holds up to 1000 entries `(q_max, 1/s, s, b)` sorted by
`q_max`. Given a node's largest magnitude *f*, the unit runs a binary search
(one comparison per cycle) for the first `q_max >= f`, then compares *f*
with that entry and its lower neighbour and returns the nearer one (ties go
to the smaller). Latency is at most `ceil(log2 n) + 3` cycles.

In graph mode the controller aggregates each group twice. Pass one runs
all columns and tracks each engine's largest `|value|`. Then the NNS runs
once per engine, and the chosen `(1/s, b)` drive pass two, which quantizes
and writes the features. The chosen bitwidth and step are also written back
into the node parameter memory as the node's input format for the next
layer.

## Memories

| memory | size | organisation |
|---|---|---|
| feature buffer x2 | 2 MB each | 256 banks (one per engine) x 512 words x 16 bytes; node *n* in bank `n mod 256`, word `(n div 256)*K + k`; one byte per feature whatever its bitwidth |
| weight buffer | 256 KB | 32768 words x 16 four-bit weights; slice *k* of column *c* at word `c*K_in + k` |
| edge buffer | 256 KB | 65536 x 32-bit words, CSR as above, two read ports |
| node parameters | 256 banks x 512 | per node: input bits, signed flag, `scale_u`, output bits, `scale_a` |
| column scales | 1024 entries | `cs_u`, `cs_a` |
| NNS table | 1000 entries | `q_max` (32 bit), `1/s`, `s` (Q4.12), `b` |

The 2 MB / 256 KB sizes are the ones the original design states; the
organisation is this design's. All SRAMs have a one-cycle registered read.

## Control and timing (`layer_ctrl`)

Configuration is held on ports: `num_nodes`, `k_in` (input words per node,
`ceil(F_in/16)`), `f_out` (output columns), `graph_mode`, `agg_relu`,
`col_base` and `nns_entries`. A pulse on `start` runs one layer; `done`
pulses at the end and `buf_sel` names the buffer that holds the result.
While `busy` is low the host writes and reads every memory through the
`host_*` ports (there is no off-chip memory model: these ports stand in for
it).

Cycle counts per group of 256 nodes, with `mb` the widest input bitwidth in
the group:

* update: `1 + F_out * (2 + K_in * (mb + 4))`;
* aggregation: per column, the gather time of each chunk plus `1 + 4`
  cycles per chunk for the one-bit pass and write; in graph mode twice, plus
  256 NNS lookups per group.

`cyc_update` and `cyc_agg` report the counts of the last layer.

## Departures from the original description

* Rescaling is fixed point (Q4.12 factors, 24-bit products) where the
  original performs it in floating point. The additive batch-norm offset of
  a fused BN layer is not implemented; only the multiplicative part is.
* NNS is not overlapped with aggregation; graph mode instead runs
  aggregation twice per group. This roughly doubles graph-mode aggregation
  time.
* Signed features are two's complement (the algorithm is written in
  sign-magnitude terms); the range is the same.
* The maximum feature bitwidth is 8 and the accumulator sizes (12-bit
  product, 24-bit partial sum) are this design's.
* A whole graph must fit on chip. There is no tiling through off-chip
  memory, so of the benchmark graphs only the small graph-level ones
  (REDDIT-BINARY, MNIST and CIFAR10 superpixels, ZINC) fit; Cora, CiteSeer,
  PubMed and the OGB graphs do not.
* Only sum aggregation over a binary adjacency is supported. GCN with
  symmetric normalisation must fold the normalisation into the scale
  factors; GIN is expressed with self loops in A and an update per MLP
  layer; GAT attention is not supported.

## Files

`rtl/a2q_pkg.sv` shared constants and types; `bs_mac`, `pe`, `mac_array`
(compute); `sram_bank`, `feature_buffer`, `weight_buffer`, `edge_buffer`,
`node_param_buffer` (memories); `csr_gather`, `requant`, `nns_unit`,
`layer_ctrl`; `a2q_top` ties them together.

## Simulating

Each testbench in `tb/` is self-checking, computes its expected values with
an independent model, and ends by printing
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/a2q_pkg.sv tb/tb_pe.sv --top-module tb_pe -o sim
    ./obj_dir/sim

(Verilator finds the other modules in `rtl/` through `-Irtl`.)

| testbench | what it checks | size |
|---|---|---|
| `tb_bs_mac` | products of random signed/unsigned features of 1-8 bits | default |
| `tb_pe` | inner products, accumulation over passes, pass latency `nbits+2` | default |
| `tb_mac_array` | both modes, mixed bitwidths, done only after the slowest engine | 8 engines |
| `tb_feature_buffer` | independent per-bank read/write, byte enables | default (2 MB) |
| `tb_weight_buffer`, `tb_edge_buffer` | read-after-write over random addresses, both edge ports | default |
| `tb_csr_gather` | gathered values and masks, multi-chunk rows, `more` | 4 engines |
| `tb_requant` | rounding, clipping, ReLU against an exact model | default |
| `tb_nns_unit` | nearest entry and latency bound | default (1000 entries) |
| `tb_a2q_top` | three layers on a 300-node random graph: node mode, graph mode with ReLU, graph mode without; checks B, X', update cycle counts and NNS write-back; counts each mechanism (accumulation over input words, mixed bitwidths, multi-chunk rows, buffer swaps, NNS lookups, parameter write-back, clipping, ReLU) | default parameters |

`tb_a2q_top` runs the top at its default size (256 engines, full memories);
building takes several minutes of C++ compilation and the simulation about
three minutes.
