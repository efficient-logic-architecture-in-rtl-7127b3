# A data-parallel GBDT trainer in SystemVerilog

Gradient boosting decision trees (GBDT) are trained one tree at a time. Each
node of a tree needs a pass over its samples that jumps around the training
set: sample *i* of a node can be anywhere in memory. On a CPU or GPU those
accesses go to DRAM, where a random access costs much more than a sequential
one. This design keeps the whole training set in on-chip SRAM. There a random
read costs the same single clock as a sequential one. The samples are spread
over many identical **training engines** that work in parallel.

The RTL trains binary classifiers with the cross-entropy loss. It uses
xgboost's exact greedy split search on features that were binned to 8 bits
beforehand. It follows the training-engine and data-parallel architecture of
Tanaka, Kasahara and Kobayashi, "Efficient logic architecture in training
gradient boosting decision tree for high-performance and edge computing".
That paper gives the block structure and the dataflow. Most widths,
encodings, handshakes and the arithmetic pipeline are this implementation's
own choices, and they are listed in the section on departures below.

Default configuration (the published main configuration):

| parameter | default | meaning |
|---|---|---|
| `N_ENGINES` | 64 | training engines |
| `N_SAMPLES` | 157 | samples per engine (64 × 157 = 10,048 training samples) |
| `N_FEATURES` | 28 | features per sample (the Higgs data set has 28) |
| `MAX_DEPTH` | 1 | tree depth |
| `N_TREES` | 100 | trees per training run |
| `SUBSAMPLE_Q8` | 128 | row subsampling probability × 256 (0.5) |
| `LAMBDA_Q` | 4096 | L2 regularisation λ in Q.12 (1.0) |
| `GAMMA_Q` | 0 | minimum split gain γ in Q.12 |
| `ETA_Q` | 1229 | learning rate in Q.12 (0.3; the source gives no value, so xgboost's default is used) |

At these defaults a simulated training run of 100 trees takes 154,102
cycles. That is 1.54 ms at the 100 MHz clock the design was published with.
The published FPGA measurement was 2.5 ms.

## Data representation

* **Features** are 8-bit bin indices. Bins 0–254 are ordered values (for
  example quantile bins computed off-chip). Bin 255 means "missing". A
  categorical feature can be mapped to bins the same way. Binning is not part
  of the hardware.
* **Per-sample state** (`state_t` in `gbdt_pkg`): the score (the running sum of
  leaf weights, 24-bit Q11.12), the gradient g and the hessian h (16-bit
  Q3.12), and the label.
* **Loss**: p = σ(score), g = p − y, h = p(1 − p). σ is the piecewise-linear
  "PLAN" approximation, built from shifts and adds:
  0.25|x| + 0.5 below 1, |x|/8 + 0.625 below 2.375, |x|/32 + 0.84375 below 5,
  and 1 beyond. Negative x is mirrored.
* **Histogram sums** are 32-bit and gains are 64-bit. Nothing overflows at the
  default size: 10,048 samples × |g| ≤ 1.0 stays below 2^26 in Q.12.
* **Tree nodes** (`node_t`) hold a leaf flag, the missing-value direction, the
  feature index, the threshold (bin ≤ threshold goes left) and the leaf weight.

## Structure

```
gbdt_top
├── control            one per chip: sequences every step for all engines
├── split_gain         one per chip: adds the engines' histograms, finds the best split
└── training_engine    × N_ENGINES
    ├── data_memory
    │   ├── pointer_memory   two banks of sample indices (node ranges)
    │   ├── feature_memory   N_SAMPLES rows of N_FEATURES bins
    │   └── state_memory     score, g, h, label per sample
    ├── histogram_calc       per-feature gradient histograms of the current node
    ├── classification       data split and gradient update
    └── model_memory         the current tree, one RAM per depth
```

Every engine has its own model-memory copy, so the data split and the update
read the tree locally. The split-gain unit writes each new node into all of
them at once.

## How a tree is trained

`control` drives all engines with one-cycle command pulses. It waits until
every engine (or the split-gain unit) has answered with a `done` pulse.

1. **Start of a run** (`train_start`): a gradient update with `init_scores`
   sets every score to 0 and recomputes g and h. This makes a new run start
   from scratch, even right after the previous one.
2. **Tree initialisation** (`init`), run in parallel in every engine:
   * The pointer memory walks the engine's samples. It keeps each sample with
     probability `SUBSAMPLE_Q8`/256, using a 16-bit LFSR with a different seed
     per engine. The kept indices are packed into bank 0, and their count
     (`init_count`) becomes the root's range `[0, init_count)`.
   * The model memory marks every node as a leaf of weight 0.
   * The histograms are swept to zero.
3. **Node training** (`hist_start`): each engine streams its part of the
   node's range through the pointer memory. Each sample's row comes back from
   the feature memory and its g, h from the state memory. g and h are then
   added to bin `row[f]` of the histogram of every feature f, all in the same
   cycle. The node totals G and H are also accumulated.
4. **Split gain** (`sg_start`): see the next section. The result is written to
   every engine's model memory.
5. **Data split** (`split_start`, non-leaf nodes only): each engine rereads the
   node's samples and tests the branch condition. It writes each sample index
   into the *other* pointer bank: left-going samples from the start of the
   range upwards, right-going ones from the end downwards. The meeting point
   `mid` splits the children's ranges into `[start, mid)` and `[mid, end)`.
   Nodes of depth d live in bank d mod 2, so a depth's ranges never overlap
   the ranges being written.
6. Steps 3–5 repeat depth by depth, left to right. Children of a leaf are
   skipped.
7. **Gradient update** (`update_start`): every sample of every engine (not
   only the subsampled ones) is looked up in the finished tree. The lookup is
   a pipeline with one depth per clock, because each depth has its own
   model-memory RAM. The leaf weight is added to the score (saturating), and
   g and h are recomputed and written back.
8. After `N_TREES` trees `train_done` pulses.

## The split-gain unit

This is the only place where the engines' results meet, and the most
involved block. For one node it performs a 256-cycle scan that covers every
feature in parallel:

* It broadcasts a bin number to all engines. The missing bin 255 comes first,
  then bins 0…254. Every engine returns that bin of all its feature
  histograms one cycle later and clears it at the same time. That clearing is
  what readies the histograms for the next node.
* One stage adds the `N_ENGINES` values per feature. The next stage keeps the
  prefix sums GL and HL per feature. The missing-bin sums Gm and Hm are
  remembered.
* Each bin t is a candidate threshold. It is evaluated twice: once with the
  missing samples sent right (L = prefix) and once with them sent left
  (L = prefix + missing). With R = total − L, the score is
  `GL²/(HL+λ) + GR²/(HR+λ) − G²/(H+λ)`, which is twice xgboost's gain. A
  candidate is valid only if HL > 0 and HR > 0.
* Each feature keeps its best candidate. Ties keep the earlier threshold and
  the missing-right option.
* At the end the best feature is chosen. The node becomes a leaf if it is at
  `MAX_DEPTH`, has no valid candidate, or the best score is ≤ 2γ. A leaf gets
  the weight `−η · G/(H+λ)`.

The result is written `N_BINS + 6` cycles after `sg_start`. The divisions are
combinational 64-bit dividers, four per feature. This is the costliest logic
in the design. Pipelining or sharing them would be the first thing to change
for a faster clock.

## Timing

All counts are in clock cycles from the command pulse to `done`, with n the
number of samples involved:

| step | cycles |
|---|---|
| pointer initialisation | n + 2 |
| model memory initialisation | 2^MAX_DEPTH + 1 |
| histogram clear | 257 (sets the length of `init`) |
| histogram build | n + 4 (2 for an empty node) |
| split gain | 262 |
| data split | n + 5 |
| gradient update | N_SAMPLES + MAX_DEPTH + 5 |

Throughput is one sample per cycle in every streaming step. The 256-bin scan
of the split-gain unit dominates shallow trees: at depth 1 three scans are
needed per tree (the root and two leaves). That gives about 1,540 cycles per
tree at the default size.

## Host interface (`gbdt_top`)

* Before training, load every sample: `load_en`, `load_engine`, `load_addr`,
  `load_row` (N_FEATURES bins) and `load_label`, one sample per cycle. Loading
  also writes the sample's initial state. Set `num_samples` to the number of
  samples per engine. All engines hold the same number.
* Pulse `train_start`. `busy` stays high until `train_done`, and `tree_idx`
  counts the finished trees.
* Every node that is trained appears for one cycle on `model_wr`, together
  with `model_tree`, `model_depth`, `model_idx` (node n at depth d has
  children 2n and 2n+1) and `model_node`. Collecting these gives the whole
  ensemble, because the chip itself keeps only the current tree.

Reset `rst_n` is asynchronous and active low. Only control registers are
reset; the memories are initialised by the steps above.

## Testbenches

Each module in `rtl/` has a self-checking testbench `tb/<module>_tb.sv`. It
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog. The
end-to-end tests share `tb/gbdt_top_check.svh`. That file holds a software
model of the whole algorithm: the same LFSR subsampling, histogram, integer
gain and division, leaf weight and PLAN sigmoid. Every node and the final
state of every sample must match it exactly.

* `gbdt_top_tb`: 2 engines × 16 samples, 3 features, depth 2, 4 trees, two
  training runs back to back. It also requires that each mechanism happens at
  least once:
  * a split;
  * a leaf at the maximum depth and one above it;
  * both missing-value directions;
  * missing values routed by a split;
  * samples dropped by subsampling;
  * retraining.
* `gbdt_top_single_tb`: the basic configuration with a single training
  engine, 24 samples, 4 features, depth 3, 3 trees, two runs. The same
  mechanisms are required.
* `gbdt_top_full_tb`: every parameter at its default (64 × 157 samples,
  28 features, 100 trees). It also checks the run against 250,000 cycles,
  the published 2.5 ms at 100 MHz. Verilator needs several minutes to build
  it; the run itself takes about 15 s.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gbdt_pkg.sv tb/gbdt_top_tb.sv --top-module gbdt_top_tb -o sim
./obj_dir/sim
```

## Departures from the published design and open points

* The published architecture names the blocks and the dataflow but gives no
  widths, encodings, handshakes or arithmetic. Everything in "Data
  representation", the command/done handshake, the two-bank pointer scheme,
  the read-and-clear histograms and the split-gain pipeline belongs to this
  implementation.
* The learning rate is not given at the source; 0.3 is used. The number of
  features is not given either; 28 matches the Higgs data set.
* Where the subsampling happens is not specified. Here it is done while the
  pointer table is initialised, once per tree.
* Resetting the scores at `train_start` is an addition. It makes repeated
  runs independent of one another.
* The published system also holds 10,048 validation samples and reports AUC
  per tree. No hardware for that is described, and none is built here.
* Feature binning is done off-chip, as in the original.
* The memories are plain arrays: 1-cycle synchronous reads for the data
  memories and asynchronous reads for the histogram memories (distributed
  RAM). Mapping them onto particular FPGA or ASIC RAMs is left to
  synthesis.
* The published capacity estimate of about 1.08 M samples assumes the
  device's full UltraRAM. The default `N_SAMPLES` holds only the 10,048
  samples of the evaluated configuration.
