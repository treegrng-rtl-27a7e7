# TreeGRNG: a Gaussian random number generator built from a binary tree of coin flips

Bayesian neural networks need Gaussian random numbers inside every neuron, so
the generator has to be small and cheap. The usual methods (Box-Muller,
Ziggurat, Hadamard-transform/central-limit generators) need adders,
multipliers, look-up tables or memories. The TreeGRNG needs none of these.
An N-bit Gaussian sample is produced by a walk down a binary tree of depth N.
At each node a biased coin decides left (bit 0) or right (bit 1). The bias of
every node is fixed at design time, so each coin is a comparison of a uniform
random number with a **constant**. Synthesis reduces such a comparison to a
handful of gates. In its default configuration the generator gives one 8-bit
Gaussian sample per clock and contains:

* 8 LFSRs of 8 to 15 bits (92 flip-flops);
* 56 constant comparators;
* 56 pipeline flip-flops;
* a chain of 7 small multiplexers.

This repository holds synthesizable SystemVerilog for the generator, with its
optional variants, and self-checking testbenches for Verilator.

## 1. From a PDF to a tree of thresholds

Cut the output range into 2^N equal bins and number them 0 … 2^N−1. Bin *b*
is reached by the path whose left/right decisions, read from the root, are
the bits of *b* with the MSB first. A node at level *L* (the root is level 0)
with path prefix *p* covers the bins `[p·w, (p+1)·w)`, where `w = 2^(N−L)`.
Its left child covers the lower half of those bins. For the output to follow
a PDF *f*, the node must go left with probability

    P_left(L, p) = Area_left / Area_combined
                 = ∫ f over the left child's bins / ∫ f over the node's bins

The probability of reaching a bin is the product of the choices along its
path. These products telescope to the area of the bin, so the tree
reproduces the PDF exactly, up to how finely the probabilities are
quantised.

The Gaussian is cut off at ±4σ. The 2^N bins therefore have mean 2^(N−1) and
sigma 2^(N−3) in index units. For N = 8 the bins are σ/32 wide.

Each probability becomes a `THR_W`-bit threshold:

    T(L, p) = round( P_left(L, p) · (2^THR_W − 1) )

The coin compares a uniform `THR_W`-bit number *u* with *T*. It goes right
(bit 1) when `u ≥ T` and left when `u < T`.

For a 3-level tree the left probabilities are:

| Node | Left probability |
|------|------------------|
| root | 50 % |
| 0 | 4.54 % |
| 1 | 95.46 % |
| 00 | 5.80 % |
| 01 | 28.48 % |
| 10 | 71.52 % |
| 11 | 94.20 % |

The 8-level tree with 8-bit thresholds and the optimisations of section 3
uses these 56 thresholds:

| level | comparators | thresholds |
|---|---|---|
| 0 | 1 | 128 |
| 1 | 1 | 12 |
| 2 | 2 | 15, 73 |
| 3 | 4 | 39, 58, 83, 112 |
| 4 | 8 | 72, 79, 86, 93, 100, 108, 116, 124 |
| 5 | 16 | 97, 99, …, 127 (steps of 2) |
| 6 | 16 | 112, 113, …, 127 |
| 7 | 8 | 120, 121, …, 127 |

The thresholds are computed while the design elaborates, by the functions in
`treegrng_pkg`. `gauss_int` evaluates the Gaussian integral as a Taylor
series, `∫₀ˣ e^(−t²/2) dt = Σ (−1)ⁿ x^(2n+1) / (2ⁿ n! (2n+1))`, and
`node_threshold` forms the ratio of areas and rounds it. The 1/√(2π) factor
cancels in the ratio. No table is stored anywhere. Changing `N_LEVELS` or
`THR_W` recomputes every constant.

To use a different PDF, replace `gauss_int` with that PDF's integral (its
CDF up to a constant factor). The symmetry optimisation below is valid only
for PDFs that are symmetric about the centre of the range.

## 2. Hardware of the plain tree

```
 LFSR 0 ──► [≥ T_root] ───────────────────────────────┬──────────────► index[N-1] (MSB)
 LFSR 1 ──► [≥ T_1,0] [≥ T_1,1] ──► mux (sel: MSB) ───┴─┬────────────► index[N-2]
 LFSR 2 ──► [≥ T_2,0] … [≥ T_2,3] ──► mux (sel: 2 MSBs) ┴─ …  ───────► index[N-3]
 …
```

* **One LFSR per level** (`lfsr`). The LFSR of level *i* is a maximal-length
  Fibonacci LFSR of `THR_W + i` bits. Its low `THR_W` bits are the uniform
  number of that level. Every level has a different length, so the combined
  period, the least common multiple of 2^len − 1 over the levels, is
  enormous. Every LFSR has its own non-zero seed. The seed is loaded by
  one clock edge with `rst` high.
* **Comparator bank per level** (`cmp_bank` built from `coinflip`). All
  comparators of a level see the same uniform number and compare it with
  their constant thresholds in parallel.
* **Multiplexer chain** (`level_mux`). The bits already decided name the node
  that the walk has reached. The multiplexer of level *i* uses them to pick
  that node's comparator output. This chain is the critical path: LFSR 0,
  then one multiplexer per level, down to the LSB.

In the plain tree level *i* has 2^i comparators, 255 in all for 8 levels.
The testbenches build this form with `SYMMETRY=0` and `CLUSTER_LOG2=0`.

## 3. The Gaussian-specific reductions

These two reductions are what bring the cost down from exponential to
roughly linear in N. The testbenches check both carefully.

### Symmetry

The Gaussian is symmetric about the centre of the range. Node *p* and its
mirror node *~p* (bitwise complement of the prefix) cover mirror-image bin
ranges. So the mirror node's probability of going left is the first node's
probability of going right. The mirror therefore needs no comparator of its
own: its decision is the **inverted** output of node *p*'s comparator.

With `SYMMETRY=1`:

* Only the nodes of the left half of the curve (prefix MSB 0) have
  comparators.
* In `level_mux`, a prefix whose MSB is 1 is complemented and selects the
  mirror's comparator, and the result is inverted.
* The root is its own mirror and keeps its comparator.

This halves the comparators with no change in the output distribution.

### Clustering

Deep in the tree, neighbouring nodes have nearly equal thresholds: a node
splits two bins of width σ/32, and the left probability stays close to ½.
`CLUSTER_LOG2` holds one nibble per level, the base-2 logarithm of how many
adjacent nodes share one comparator. Node *p* uses comparator
`p >> CLUSTER_LOG2[level]`.

The default is `64'h0000_0000_3100_0000`: clusters of 2 nodes at level 6 and
of 8 nodes at level 7. This gives 1 + 1 + 2 + 4 + 8 + 16 + 16 + 8 = 56
comparators. The plain tree has 255, and symmetry alone gives 128.

The shared threshold is the pooled probability of the cluster,
`Σ Area_left / Σ Area_combined` over its nodes. With 8-bit thresholds this is
the same number that each node in the cluster rounds to on its own. Unlike
symmetry, clustering does approximate the distribution. At 8-bit thresholds
and beyond the effect is small (see section 6).

## 4. Pipelining, timing and the alternative level structure

| parameter | default | effect |
|---|---|---|
| `PIPELINE` | 1 | registers the comparator outputs (56 flip-flops by default), separating the comparison stage from the multiplexer stage |
| `MUX_PIPE` | 0 | adds one register in the middle of the multiplexer chain, for long sample widths (see below) |
| `MUX_FIRST` | 0 | levels 1 … N−1 select their threshold first and then use one general comparator (`thr_mux_cmp`); fewer comparators, longer path; not allowed together with `PIPELINE` or `MUX_PIPE` |

With `MUX_PIPE=1`:

* the index bits of levels 0 … N/2−1 are registered;
* the comparator outputs of the lower levels are delayed by one more clock,
  so that they stay aligned with those bits.

A new sample appears on every clock in every configuration. Latency is
counted from the clock edge that loads the LFSR state a sample is made of.
It is `1 + PIPELINE + MUX_PIPE` clocks:

* 1 without pipelining, where the sample is combinational from the LFSR
  registers;
* 2 with the default comparator pipeline.

After `rst` is released, the first valid sample comes from the seeds. By
default it appears one clock after the release.

## 5. Interface of `treegrng`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst` | in | 1 | synchronous, active high. One edge loads all seeds. A reset in mid-run restarts the identical sequence. |
| `valid` | out | 1 | `!rst` delayed by the pipeline depth. The generator must have seen at least one reset edge. |
| `index` | out | N | tree path as offset binary; bin 0 is −4σ |
| `sample` | out | N | `index` with its MSB inverted: two's complement with N−3 fraction bits, in units of σ. For N = 8 this is fixed⟨3,5⟩. The value is the lower edge of the bin. |

Parameters: `N_LEVELS` (default 8, range 3…16), `THR_W` (default 8), `SYMMETRY`,
`CLUSTER_LOG2`, `PIPELINE`, `MUX_PIPE`, `MUX_FIRST`.

Each LFSR is `THR_W + level` bits long. The table of feedback polynomials
covers 2 to 24 bits, so `THR_W + N_LEVELS − 1` must not exceed 24.

An output with a mean and sigma of your choice needs an adder and a
multiplier after `sample`, as for any fixed Gaussian source. That stage is
not included.

## 6. How far it can be trusted

Every testbench compares the design with a behavioural reference model,
`tb/treegrng_ref.sv`. The model has its own integer LFSR copies and its own
thresholds, from Simpson integration of `exp(−x²/2)` at run time. It walks
the tree node by node.

* **`tb_treegrng`** runs the default configuration end to end for 2^20
  samples. It checks:
  * every sample against the model, one clock late for the pipeline;
  * one valid sample per clock;
  * the two's complement output;
  * that `valid` is low during reset;
  * the exact latency of the first sample after reset;
  * that a second reset restarts the same sequence;
  * that mirrored nodes and shared comparators are both used, and how often.

  Measured on the histogram: mean 127.62 (ideal 127.5) and sigma 31.92
  (ideal 32). The histogram is 0.0006 (KS distance) from the model's exact
  distribution.
* **`tb_treegrng_variants`** runs, each for 2^18 samples:
  * the optimised pipelined tree and the plain non-pipelined tree, at
    threshold widths 4, 6, 8, 10, 12 and 14;
  * the 3-level example tree;
  * a 12-bit tree with the mid-multiplexer register;
  * an 8-bit tree with multiplexers first.

  It prints the Kolmogorov-Smirnov distance of each configuration's exact
  distribution from the Gaussian. Each bin stands for its centre, so even
  perfect thresholds leave about 0.0062:

  | threshold bits | 4 | 6 | 8 | 10 | 12 | 14 |
  |---|---|---|---|---|---|---|
  | optimised | 0.0547 | 0.0160 | 0.0084 | 0.0069 | 0.0064 | 0.0063 |
  | plain | 0.0756 | 0.0236 | 0.0104 | 0.0069 | 0.0064 | 0.0063 |

  The published figure for the optimised 8-bit generator is 0.0082. At 4 and
  6 bits the ordering of the two curves differs from published plots. That
  depends on how ties in rounding and clusters are resolved, which is a
  choice made here.
* **`tb_cmp_bank`** checks the thresholds:
  * the 3-level split probabilities, using 14-bit thresholds;
  * the comparator counts per level;
  * the clustered thresholds, against the model.
* **`tb_lfsr`**, **`tb_coinflip`**, **`tb_level_mux`** and **`tb_thr_mux_cmp`**
  check their blocks exhaustively. `tb_lfsr` checks the maximal period, the
  seed loading and the shift step; the others apply every input combination.

Known limitations:

* **Rounding bias.** Quantising the probabilities leaves a small bias: the
  root threshold 128 out of 255 sends 50.2 % of samples right, which moves
  the mean to about 127.6.
* **Serial correlation.** Each LFSR advances one bit per clock, so a level's
  uniform numbers on consecutive clocks are shifted copies of each other. A
  level's decision bits are therefore essentially that LFSR's bit sequence.
  Successive samples are not independent in the strict sense. The
  statistics above do not show it.
* **Short LFSRs.** With 4-bit thresholds the LFSRs are 4 to 11 bits long.
  Their periods share factors, so the levels are not independent, and the
  histogram misses the independent-levels model by a KS distance of 0.012.
  This is reported and not treated as an error. From 6 bits up the effect is
  below the statistical noise.

## 7. What follows the published design and what was chosen here

Taken from the published description:

* the tree algorithm and the threshold formula;
* the ±4σ range and the fixed⟨3,5⟩ output;
* one LFSR per level, with different lengths and unique seeds reloaded in one
  clock after reset;
* the ≥ comparators and the multiplexers after them;
* the symmetry reduction with inverted outputs;
* the cluster sizes (2 at level 6, 8 at level 7);
* pipeline registers behind the comparators, and optionally inside the
  multiplexer chain;
* the multiplexer-first option;
* the default configuration: 8 levels, 8-bit thresholds, optimised and
  pipelined.

Chosen here, because the description leaves them open:

* the LFSR form (Fibonacci), its polynomials, lengths (`THR_W + level`) and
  seeds;
* round-to-nearest quantisation;
* the value of a clustered threshold (the pooled ratio);
* which half of the tree keeps the comparators: the left half, as the text
  says. One published drawing labels the kept level-2 comparators "20" and
  "22", which would be nodes 00 and 10.
* the meaning of a comparator output. Right is `u ≥ T`, with *T* derived from
  the left area. One drawing writes the node-0 test as `S ≥ 95.45 %·MAX`; the
  formula is followed.
* where the mid-multiplexer register splits the chain (at level N/2);
* the internals of the multiplexer-first level;
* the `valid` flag and the synchronous reset.

Not built:

* run-time programmable thresholds, a larger alternative that trades area
  for the ability to change the PDF;
* the mean/sigma adjustment stage.

## 8. Files and simulation

`rtl/`:

| file | contents |
|---|---|
| `treegrng_pkg.sv` | configuration, threshold maths, LFSR polynomials and seeds |
| `lfsr.sv` | per-level LFSR |
| `coinflip.sv` | one constant comparator |
| `cmp_bank.sv` | comparators of a level |
| `level_mux.sv` | multiplexer of a level |
| `thr_mux_cmp.sv` | multiplexer-first level |
| `treegrng.sv` | top |

`tb/`: one testbench per block, `tb_treegrng_variants.sv`, and the reference
model `treegrng_ref.sv`.

Run from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/treegrng_pkg.sv tb/tb_treegrng.sv --top-module tb_treegrng
./obj_dir/Vtb_treegrng
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. Each
one finishes in about a second.
