# A decision-tree autoencoder for nanosecond anomaly detection

A first-level trigger at a hadron collider has a few hundred nanoseconds and an
FPGA to decide whether to keep a collision. This design adds an anomaly detector
to such a trigger. It uses no model of what new physics looks like. It learns
what ordinary events look like and flags events that it cannot reproduce well.

The detector is an autoencoder built from decision trees instead of a neural
network. A forest of `T` trees is trained offline on ordinary events. Each tree
cuts the `V`-dimensional input space into boxes ("bins"). Each bin stores one
representative point: the per-variable median of the training events that fell
into it. At run time an event `x` lands in one bin of every tree. Each tree
answers with that bin's stored point `x̂_t`. The anomaly score is the total L1
distance between the event and all the answers:

    score(x) = Σ_t Σ_v | x_v − x̂_t,v |

Events like the training sample land in small, dense bins whose medians are
close to them, so they score low. Unusual events land in large, sparse bins, or
far from the median of their bin, so they score high. A trigger then keeps
events whose score is above a threshold. Choosing that threshold is outside this
design.

The RTL here runs one event per clock. The score appears 6 clocks after the
event: 30 ns at 200 MHz. The default size is the benchmark configuration: a
search for Higgs decays to two photons and two jets, with `V = 8` inputs, `T = 30`
trees of depth `D = 6`, and 8-bit signed integers.

## Encoding and decoding in one step

In a conventional autoencoder, the encoder produces a latent vector and a
separate decoder expands it again. For a decision tree, the "latent value" is
the number of the bin that the event falls in. Decoding means looking up that
bin's stored estimate. The hardware never forms the bin number. It does both
steps at once:

1. **All cuts at once** (`ddte_find_bin`, stage 1). A tree of depth `D` has
   `2^D − 1` internal nodes. Each node holds a cut `x[var] < thr`. All
   `2^D − 1` comparators work in parallel on the same event. Nothing waits for
   the outcome of a node above it.
2. **All paths at once** (`ddte_find_bin`, stage 2). Each of the `2^D` leaves is
   reached by exactly one root-to-leaf path. That path is an AND of `D` cut
   outcomes: "true" at some nodes, "false" at others. All `2^D` ANDs are
   evaluated in parallel. Because the cuts split the space with no gaps and no
   overlaps, exactly one AND is true. The result is a one-hot vector
   `path_hit`. An assertion checks that it is one-hot.
3. **Estimate selection** (`ddte_return_est`). Each leaf's estimate vector is
   ANDed with its `path_hit` bit, and the results are ORed together. The output
   is the estimate of the one true path. No binary bin index and no multiplexer
   tree indexed by it appear anywhere.

Worked example (the two-variable tree used in `tb_ddte`, values 0…127):

    root:            x1 < 65 ?
      true  ->  leaf, estimate (27, 25)
      false ->  x2 < 22 ?
                  true  -> leaf, estimate (112, 11)
                  false -> leaf, estimate (96, 106)

For `x = (55, 70)`, the cut `x1 < 65` is true. Only the path through the "true"
branch of the root is satisfied, so the output is `x̂ = (27, 25)`. That tree's
distance is `|55−27| + |70−25| = 73`. The cut `x2 < 22` is also evaluated, but
no satisfied path uses it.

### How a trained tree is stored

Training can stop a branch before depth `D` when its bin would hold too few
events. The hardware always has a full depth-`D` tree. A branch that stopped
early at a node is stored by writing the same estimate into every leaf below
that node. The cuts inside that subtree then make no difference. Any tree of
depth ≤ `D` can be stored this way.

Nodes are numbered in heap order. The root is 0. The children of node `n` are
`2n+1` when the cut is false and `2n+2` when it is true. Leaf `l` is the node
`2^D − 1 + l`. Read MSB first, the bits of `l` give the outcome at each level:
1 means the cut was true. At level `k`, the path of leaf `l` passes through
node `(2^k − 1) + (l >> (D−k))`. `ddte_find_bin` builds its AND gates from
exactly this formula.

### Loading a forest

Each tree has two writable tables. The node table holds `var` (`clog2 V` bits)
and `thr` (`N` bits) for each node. The leaf table holds `V × N` bits for each
leaf. Both are loaded through one write port on the top level. Each clock with
`cfg_we = 1` writes one entry:

| signal        | meaning                                                        |
|---------------|----------------------------------------------------------------|
| `cfg_tree`    | which tree, 0 … T−1                                            |
| `cfg_is_leaf` | 0: internal node, 1: leaf                                      |
| `cfg_idx`     | node number 0 … 2^D−2 (heap order) or leaf number 0 … 2^D−1    |
| `cfg_var`     | node: index of the variable that is cut                        |
| `cfg_thr`     | node: threshold, signed; the cut is `x[var] < thr`             |
| `cfg_est`     | leaf: estimate vector, `V` signed `N`-bit values               |

At the defaults, a full forest takes `30 × (63 + 64) = 3810` writes. The tables
are not reset, so load the whole forest before sending events. A write affects
events that enter the trees on the following clock. Events already in the pipe
may see a mix of old and new entries. Assertions flag writes to a tree, node or
variable that does not exist.

## Pipeline

```
x ──► ae_bus_tap ──┬──► ddte[0] ──┐
      (1 clock)    ├──► ddte[1] ──┤   x̂_t
                   │     …        ├──────► distance_processor ──► score
                   ├──► ddte[T-1]─┘        distance_unit × T (1)
                   │   (3 clocks)          distance_sum     (1)
                   └──► ae_pipe (3 clocks) ──► x
```

| clock | stage                                   | module              |
|-------|-----------------------------------------|---------------------|
| 1     | capture the event, fan it out           | `ae_bus_tap`        |
| 2     | all `2^D − 1` cuts of every tree        | `ddte_find_bin`     |
| 3     | all `2^D` path ANDs, one-hot bin flag   | `ddte_find_bin`     |
| 4     | select the estimate of the flagged bin  | `ddte_return_est`   |
| 5     | L1 distance of each tree                | `distance_unit`     |
| 6     | sum over trees                          | `distance_sum`      |

An event presented with `in_valid` in one clock gives `score` with `out_valid`
six clocks later. A new event may be presented every clock. There is no
back-pressure. The copy of `x` that the distance units need travels through a
three-register delay (`ae_pipe`), so it meets the estimates derived from it.
`tree_dist`, each tree's share of the score, is registered with the score and
comes out with it. It is a diagnostic output that this design adds.

The published description gives the total latency as 6 clock ticks (30 ns) in
its resource table. One sentence of its text says "10 clock ticks (30 ns)". Ten
ticks at 200 MHz would be 50 ns, so this design follows the 6-tick figure. How
those six ticks divide between stages is this design's choice.

## Numbers and widths

Every variable and every estimate is an `N`-bit two's-complement integer
(`N = 8`, range −128 … 127). The reference implementation uses 8-bit signed
integers. Inputs must already be quantised into this range, for example a
momentum scaled from 0 … p_T,max. Cuts compare signed values.

Each difference `x_v − x̂_v` is formed at `N+1` bits. Its magnitude then fits
`N` bits unsigned. All sums are exact, with no saturation or wrap:

* one tree: `DW = clog2(V · (2^N − 1) + 1)` = 11 bits at the defaults
  (maximum 2040)
* score: `SW = clog2(T · (2^DW − 1) + 1)` = 16 bits at the defaults
  (reachable maximum 61200, checked in `tb_autoencoder_processor`)

## Files

All files are in `rtl/`:

| file                          | what it is                                             |
|-------------------------------|--------------------------------------------------------|
| `ae_pkg.sv`                   | default sizes, latency, width functions                |
| `autoencoder_processor.sv`    | top level                                              |
| `ae_bus_tap.sv`               | input register and fan-out                             |
| `ddte.sv`                     | one tree engine: `ddte_find_bin` + `ddte_return_est`   |
| `ddte_find_bin.sv`            | cut comparators, parallel decision paths, node table   |
| `ddte_return_est.sv`          | leaf table, AND-OR estimate selection                  |
| `distance_processor.sv`       | `T` × `distance_unit` + `distance_sum`                 |
| `distance_unit.sv`            | L1 distance of one tree                                |
| `distance_sum.sv`             | sum of the per-tree distances                          |
| `ae_pipe.sv`                  | delay line for the copy of `x`                         |

Parameters of the top: `V`, `T`, `D`, `N`. Their defaults come from `ae_pkg`.
The other widths are derived from them.

## Evaluated configurations and their sizes

| configuration                                  | V   | T  | D  | fits the defaults? |
|------------------------------------------------|-----|----|----|--------------------|
| diphoton + dijet benchmark (and its cross-check signal, and the contaminated-training variants, which change only the table contents) | 8 | 30 | 6 | yes: these are the defaults |
| 56-variable collider anomaly dataset           | 56  | 30 | 4  | no; set `V=56, D=4` |
| 26-variable version of it                      | 26  | 30 | 4  | no; set `V=26, D=4` |
| two-variable toy, depth 4 / 6 / 8              | 2   | 1  | ≤8 | tree size up to D=6 only; its values (up to ≈250) exceed signed 8 bits |
| handwritten-digit demonstration                | 784 | 1  | 20 | no: 2^20 leaves × 784 × 8 bits of estimates is not buildable as tables |

At the defaults, the tables hold `30 × 63 × (3 + 8)` node bits plus
`30 × 64 × 64` leaf bits, 144,256 bits in all.

## Where this RTL departs from the published design

* **Writable tables instead of constants.** The reference flow generates the
  engines from C code by high-level synthesis, with the trained cuts and
  medians as constants. It reports about 15k flip-flops, 63k LUTs and no block
  RAM for the benchmark. Here the forest sits in writable register tables
  loaded at run time. This suits simulation and reloading. A forest with its
  values fixed at synthesis would be much smaller, because the synthesis tool
  could fold each comparator against its constant. Resource figures of this
  RTL are therefore not comparable with the published ones.
* **Internal structure is this design's own.** The published description
  gives the block diagram (bus tap, T tree engines with find-bin and
  return-estimate halves, per-tree distances, sum), the metric, the sizes,
  the precision, the total latency and the interval. The pipeline split, the
  AND-OR decoding, the table layout, the configuration port, the valid
  signalling and the reset behaviour are choices made here.
* **The 26-variable build** is reported at 7 ticks. This RTL keeps its fixed 6
  stages at every size, so timing closure at 200 MHz for larger `V` or `T` is
  not established.
* **Training is not included.** Choosing each cut's variable and threshold by
  sampling the training distributions, and computing the per-bin medians, is
  offline software. The hardware only receives its output.
* **One inconsistency in the illustration of the worked example.** Its tree
  and grid put (112, 11) in the bin `x1 ≥ 65, x2 < 22`. Its path drawing
  labels that path differently. The tree and grid are followed here.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches compare
against `ae_ref_pkg`, a reference model that walks each tree node by node from
the root. That is a different algorithm from the parallel-path hardware. Every
testbench checks the latency in clocks as well as the values, and ends with a
`TB_RESULT checks=… failures=…` line.

| testbench                    | covers                                                             |
|------------------------------|--------------------------------------------------------------------|
| `tb_autoencoder_processor`   | whole design at default size. Two random forests with early-stopped branches. 7,500 events at full rate and with gaps. Reprogramming. Ties on a threshold. The largest possible score. Each of these mechanisms is counted and must occur. |
| `tb_ae_workloads`            | whole design at V=56/D=4, V=26/D=4 and V=2/T=1/D=8                  |
| `tb_ddte`                    | the worked example above, cut boundaries, random default-size trees |
| `tb_ddte_find_bin`           | one-hot path flags against the tree walk, 63 of 64 leaves reached   |
| `tb_ddte_return_est`         | every leaf's estimate selected                                       |
| `tb_distance_unit`, `tb_distance_sum`, `tb_distance_processor` | exact sums including extreme values |
| `tb_ae_bus_tap`              | capture and hold of the input register                              |

Random forests stand in for trained ones: the testbenches check the arithmetic
and the timing, not physics performance.

To run one, for example the full-size test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ae_pkg.sv tb/ae_ref_pkg.sv tb/tb_autoencoder_processor.sv \
    --top-module tb_autoencoder_processor
./obj_dir/Vtb_autoencoder_processor
```

Replace the testbench name for the others. `tb_ae_workloads` also needs
`tb/ae_workload_bench.sv`, which verilator finds through `-Itb`. The simulator
is two-state. The design resets only its valid flags, and the testbenches
initialise everything else they read.
