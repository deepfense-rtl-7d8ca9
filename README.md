# Online adversarial-sample detection beside a DNN accelerator

A neural-network classifier can be fooled by an input that has been changed
only slightly but on purpose. This design sits next to such a classifier (the
*victim*) and decides, for every sample, whether the sample looks like an
attack. It uses two kinds of checker, or *defenders*, and combines their
verdicts:

* A **latent defender** is a second copy of the victim network. It was
  retrained offline so that, at some internal layer, the features of clean
  samples gather tightly around one center per class. A PCA projection shrinks
  those features to a few dimensions (10 here). If the projected features sit
  too far from the center of the class the victim predicted, the sample is
  flagged.
* The **input defender** rebuilds the raw input vector (for example an 8×8
  patch of pixels, 64 values) from a few atoms of a dictionary learned for the
  predicted class. It uses Orthogonal Matching Pursuit (OMP). Clean inputs
  rebuild well. If too much energy is left over in the residual, the sample is
  flagged.
* **Fusion** turns the binary verdicts into a probability of attack with a
  noisy-OR rule, and raises an alarm when that probability reaches 0.5.

All the offline work is done in software and loaded as plain numbers:

* training the defenders, the PCA, the class centers and the dictionaries;
* choosing the thresholds from a false-positive budget;
* estimating the per-defender weights.

The RTL is the online part only.

## Flow of one sample

```
              +--------------+  pred   +--------------------+  d[0..N_LAT-1]
 sample ----> |  victim_dnn  |-------> | latent_defender xN |---------+
   |          +--------------+    |    +--------------------+         v
   |                              |    +--------------------+  +-----------------+
   +----------------------------- | -> |  input_defender    |->| noisy_or_fusion |-> prob, alarm
        (input vector)            +--> +--------------------+  +-----------------+
                                              d[N_LAT]
```

`deepfense_top` runs this as a small state machine:

1. **Victim.** Runs the victim network, then takes the arg-max to get `pred`.
2. **Defenders.** Starts every defender at once with `pred`, then waits until
   all of them are done. The defenders are separate hardware instances and run
   in parallel.
3. **Fusion.** Runs noisy-OR fusion over the decision vector `d`.
4. **Done.** Pulses `done`. `pred`, `d`, `prob` and `alarm` hold until the
   next `start`.

Each defender needs the predicted class, which is why the victim runs first.

## The DNN kernel (`dnn_kernel`, `pu_dot_tree`)

The same engine serves three networks:

* the victim network (`victim_dnn`, which adds a sequential arg-max);
* every latent defender network;
* the PCA projection. PCA is `T = X·W_L`, which is just one more dense layer
  without ReLU, appended to the defender's layer list.

The engine runs layers one after another from a small layer table. It
supports three kinds of layer:

* dense (fully connected);
* square convolution, with stride 1 and no padding;
* 2×2 max-pooling, with stride 2.

Dense and convolution layers have an optional ReLU. Each table entry has:

* the layer type;
* for dense layers, the input and output sizes;
* for convolution and pooling layers, the input and output channel counts,
  the input map width and the kernel width;
* a ReLU flag;
* the base address of the layer's weights;
* the base address of its biases.

The table type is `layer_desc_t` in `deepfense_pkg`. Feature maps are stored
channel first: element `(ch, y, x)` is at `ch·img² + y·img + x`. So a dense
layer after a convolution stage sees the usual flattened vector.

**Parallelism.** There are `N_PU` processing units, and each makes one output
neuron. Each PU multiplies `N_PE` inputs per cycle and sums them with a binary
adder tree (`pu_dot_tree`). With the defaults (4×8), the engine reads one
32-weight word per cycle.

**Weight layout.** The weight BRAM stores words of `N_PU·N_PE` weights. For
output group `g` (neurons `4g..4g+3`) and input chunk `c` (inputs `8c..8c+7`):

* the word address is `w_base + g·ceil(in/N_PE) + c`;
* lane `u·N_PE + e` holds the weight from input `8c+e` to neuron `4g+u`.

Weight lanes beyond the layer's edge meet a zero input, so whatever they hold
does not matter.

**Convolution.** A convolution uses the same datapath and the same word
format. It runs every output group and chunk once for each output pixel
`(oy, ox)`. A chunk is now one kernel tap `(ky, kx)` of one group of `N_PE`
input channels:

* chunk `c = (ky·ksz + kx)·ceil(in_ch/N_PE) + icc`;
* lane `e` of that chunk reads input `(icc·N_PE + e, oy + ky, ox + kx)`.

A convolution layer takes `OW²·G·C + 3` cycles, where
`OW = img − ksz + 1` and `C = ksz²·ceil(in_ch/N_PE)`.

**Max-pooling.** Pooling does not use the processing units. It reads one
window element per cycle and writes the maximum after four. A pooling layer
takes `2 + 4·ch·OW²` cycles, where `OW = floor(img/2)`.

**Activations.** Activations alternate between two buffers, A and B. The host
writes the input into A; layer 0 writes B, layer 1 writes A, and so on.

**Timing.** The weight BRAM has a one-cycle read. A dense layer takes
`ceil(out/N_PU)·ceil(in/N_PE) + 3` cycles. `done` comes `1 + Σ(layer cycles)`
cycles after the start edge.

For example, the MNIST benchmark victim is
1×28×28 → 20C5 → MP2 → 50C5 → MP2 → 500FC → 10FC, where 20C5 is a 5×5
convolution with 20 output channels and MP2 is 2×2 max-pooling. Its layers
take:

* conv1: 72 003 cycles;
* pool1: 11 522 cycles;
* conv2: 62 403 cycles;
* pool2: 3 202 cycles;
* 800→500 dense layer: 12 503 cycles;
* 500→10 dense layer: 192 cycles.

That is about 162 k cycles, or 1.1 ms at 150 MHz.

**Number format.** The format is this design's choice:

* 16-bit signed values with 8 fraction bits;
* 40-bit accumulation at full precision;
* then a floor shift by 8 and saturation back to 16 bits.

## Latent defender (`latent_defender`, `center_mem`, `l2_distance`)

The latent defender has three parts:

* a `dnn_kernel` that runs the defender network plus its PCA layer;
* `center_mem`, which holds one 10-element center per class and one threshold
  per class;
* `l2_distance`, which walks the first `L_DIM` outputs of the last layer, one
  dimension per cycle, and adds up `(t_i − c_i)²`.

**Decision.** The defender flags the sample when the squared distance is above
the squared threshold of the predicted class. The square root is never taken.
The threshold is set offline, from the fraction of clean samples that should
pass.

**Timing.** The distance step adds `L_DIM + 1` cycles after the network.

**Class.** The class is captured at `start`, so `cls` may change while the
defender runs.

## Input defender and its OMP core (`input_defender`, `omp_kernel`, `dictionary_mem`, `seq_divider`)

This is the hardest part of the design.

**Dictionaries.** `dictionary_mem` keeps `N_ATOMS` atoms of `N` elements for
every class. The elements are spread cyclically over `P` lanes, so each read
returns one `P`-element chunk, one cycle after it is asked for.

**The OMP loop.** For each of the `K` iterations (the sparsity level), the core
does four steps:

1. **Correlate.** It computes `<res, D_j>` for every atom of the class, with
   one shared `P`-lane multiplier and adder tree. This takes `N/P` cycles per
   atom, pipelined behind the BRAM read.
2. **Select.** It adds to the support set the atom with the largest
   `|<res, D_j>|` that is not already in the set. Ties go to the lower index.
3. **Orthogonalize.** It orthogonalizes the new atom against the basis built so
   far, using modified Gram–Schmidt. For each earlier basis vector `u_j`, it
   subtracts `(<u_j,u>/<u_j,u_j>)·u_j` from `u`.
4. **Update the residual.** It sets `res -= (<res,u_t>/<u_t,u_t>)·u_t`.

**What the loop avoids.** This is least-squares OMP without forming the sparse
coefficients. Only the size of the residual matters for the decision, so the
coefficients are never needed. The basis is kept unnormalized, together with
the squared norm of each basis vector. So there is no square root: each
projection costs one division.

**The division.** The division is done by `seq_divider`, a signed radix-2
restoring divider. It takes 64 iterations, truncates toward zero, and returns
0 when the divisor is 0. A zero divisor happens when an atom is a linear
combination of atoms already picked.

**Output.** The core outputs `energy = ||res||²`. `input_defender` flags the
sample when `energy` is above the threshold of the class. A threshold on
residual energy is the same as a threshold on reconstruction PSNR, only
inverted.

**Numbers.** These are this design's choices:

* elements have 12 fraction bits;
* dot products are kept at 48 bits with 24 fraction bits;
* coefficients are `trunc((dot << 12) / norm)`, saturated to 32 bits;
* every updated element is floor-shifted and saturated to 16 bits.

The testbenches model this arithmetic bit for bit.

**Timing.** Let `CH = N/P` and `DV = 67` (the divider plus hand-over).
Iteration `t`, counting from 0, takes:

```
(N_ATOMS·CH + 2) + (CH + 1) + t·(2·CH + 2 + DV) + (CH + 3) + (2·CH + 2 + DV)
```

The final energy pass adds `CH + 2`, and there are 3 cycles of start and done.

At the defaults (128 atoms, 64 elements, 8 lanes, K = 8) this is about
11 400 cycles, or 76 µs at 150 MHz.

The `N_ATOMS·CH` correlation term dominates. This matches the usual OMP cost
estimate `n(kl + k²)` spread over `P` lanes.

**Input vector.** The defender checks one `N`-element vector that the host
loads (`CFG_PATCH`). Cutting an image into patches, and combining the verdicts
of several patches, is left to the host.

## Fusion (`noisy_or_fusion`)

**The rule.** Each defender `n` has a weight `P_n`, the probability that its
flag is right, estimated offline. Only the defenders that flagged the sample
count:

```
prob = 1 − ∏ (1 − P_n)^(d_n)
alarm = prob ≥ 0.5
```

**Number format.** `P_n` and `prob` are unsigned, with `PW = 16` fraction bits
plus one integer bit, so 1.0 = 65536.

**How it runs.** One defender is folded in per cycle with
`prod = floor(prod·(1 − P_n))`. `done` comes `N_DEF + 1` cycles after
`start`.

## Configuration port

Everything is loaded through one write port, `cfg` (`cfg_wr_t`). In a system,
this port stands in for the processor or DMA that copies the offline results
from DRAM into the on-chip memories. The port has these fields:

* `we` (write enable);
* `kind` (what is being written);
* `unit` (which engine);
* `addr`, `lane` and `data`.

How each field is read depends on `kind`. The full table is in the header of
`rtl/deepfense_top.sv`. The most used cases are:

* Unit 0 is the victim, and unit `n` is latent defender `n`.
* For dictionaries, `unit` is the class, `addr` the atom and `lane` the
  element.
* For `P_n`, `addr` is the defender index. Latent defenders come first and the
  input defender is last.

## Parameters (defaults)

| parameter | default | meaning |
|---|---|---|
| `N_LAT` | 1 | latent defenders. With the one input defender, that makes 2 in all. Up to 15 are addressable |
| `N_CLASS` | 10 | classes |
| `N_PU`, `N_PE` | 4, 8 | output and input parallelism of every DNN kernel |
| `FRAC` | 8 | DNN fraction bits |
| `MAX_LAYERS`, `MAX_ACT` | 8, 16384 | layer-table size and activation-buffer depth |
| `WMEM_WORDS`, `BMEM_DEPTH` | 13824, 1024 | weight words (32 weights each) and biases, per kernel |
| `L_DIM` | 10 | PCA dimensions |
| `N_ATOMS`, `N_VEC`, `P_OMP`, `K_SPARSE` | 128, 64, 8, 8 | dictionary size, vector length, OMP lanes, sparsity |
| `OMP_FRAC` | 12 | OMP fraction bits |
| `PW` | 16 | fusion probability fraction bits |

These values come from the design description: 10 classes, 10 PCA dimensions,
64-element (8×8) patches, and one latent plus one input defender. The rest are
this design's choice. The memories are sized so that each DNN kernel holds the
whole MNIST victim plus a 10×10 PCA layer:

* 13 795 weight words;
* 7 layers;
* a largest feature map of 20×24×24 values.

That costs about 16.6 Mbit of RAM at the defaults. The SVHN network
(…-1000FC-500FC-10FC) needs about 56 k weight words and 1580 biases. It runs
once `WMEM_WORDS` and `BMEM_DEPTH` are raised.

## Where this design departs from the original proposal

* **Global average pooling and padded or strided convolutions are not
  built.** The CIFAR-10 network, which ends in global average pooling, cannot
  run. The MNIST and SVHN networks can.
* **Only the parallel layout is built.** The original framework can also run
  several defenders one after another on shared hardware. This design has one
  hardware instance per defender.
* **The arithmetic is fixed point.** The original describes floating-point
  cost. All formats, and the rounding and saturation rules, are choices
  documented above.
* **The thresholds are squared.** The distance threshold is stored as a
  squared L2 distance. The input-defender threshold is stored as a
  residual-energy threshold rather than a PSNR. Both give the same decisions as
  the originals.
* **Ties are broken by this design's own rules.** When scores are equal, the
  arg-max, the OMP atom choice and the `>` versus `≥` comparisons are this
  design's choice. A sample exactly on a threshold passes. Fusion alarms at
  exactly 0.5.
* **Offline tasks are not in the RTL.** Training, dictionary learning, the
  choice of thresholds and the customization of parallelism for a device are
  software tasks. The host processor and DRAM are outside the RTL as well.
* **No timing closure was done.** There is no clock-speed result, including
  for the 150 MHz FPGA clock the original reports. The longest paths are the
  8-input multiply and adder tree, and one step of the 64-bit divider.

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against an independent reference written in plain SystemVerilog. It
prints `TB_RESULT checks=N failures=M` and has a cycle watchdog. Wherever a
latency is documented above, the testbench also checks the cycle count
exactly.

**Shared code.** `tb/tb_ref_pkg.sv` holds a hash-based generator for
pseudo-random weights and inputs, and a reference forward pass with the same
fixed-point rules. `tb/tb_top_body.svh` holds the stimulus and the checks
shared by the two whole-design benches.

**What each testbench covers:**

| testbench | covers |
|---|---|
| `tb_pu_dot_tree` | random vectors, extremes |
| `tb_dnn_kernel` | 3 dense layers at odd sizes, ReLU on and off, saturation, latency |
| `tb_dnn_conv` | convolution → max-pooling → dense, with partial channel groups and an odd map size, latency |
| `tb_pca_layer` | dense layer without ReLU used as PCA, signed outputs |
| `tb_center_mem`, `tb_dictionary_mem` | write and read of every word |
| `tb_l2_distance`, `tb_latent_defender` | distances and decisions at threshold−1 and threshold, latency |
| `tb_seq_divider` | all sign cases, divide by zero, latency |
| `tb_omp_kernel`, `tb_input_defender` | bit-exact OMP reference at reduced size, latency |
| `tb_victim_dnn` | arg-max, including ties |
| `tb_noisy_or_fusion` | all decision patterns, the 0.5 boundary |
| `tb_deepfense_top` | reduced sizes with two latent defenders, 16 samples |
| `tb_deepfense_full` | every default parameter, 4 samples |

**How the whole-design benches work.** The two whole-design benches load all
the memories through `cfg` and compute the expected prediction, distances and
residual energies. They then place each threshold either just below or exactly
at the reference value, so that every defender both flags and passes samples.
Their `P_n` values (0.9 and 0.4) make sure that both outcomes happen: some
samples raise the alarm, and on others a flag is outvoted.

Each of these outcomes is counted, and a failure is counted if any never
happens:

* latent flag and latent pass;
* input flag and input pass;
* alarm and quiet;
* a suppressed flag;
* at least two different predicted classes.

**Running a bench.** With plain Verilator, list the package files first, then
the RTL, then the bench:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_deepfense_top \
  rtl/deepfense_pkg.sv rtl/*.sv tb/tb_ref_pkg.sv tb/tb_deepfense_top.sv
./obj_dir/Vtb_deepfense_top
```

Use the same command for any other bench. (`rtl/deepfense_pkg.sv` matches
`rtl/*.sv` too; list it first anyway so it compiles before the modules.)
`tb_deepfense_full` runs in a few seconds of simulation. It uses dense
networks of the MNIST tail's size (800→500→10). The whole MNIST victim
(about 430 k weight loads and 162 k compute cycles) has also been simulated
on `victim_dnn` at the default sizes. Its prediction and cycle count matched
the reference, but that run takes about five minutes, so the bench is not
included.

**Lint warnings that stand.** Verilator's lint reports some warnings that are
kept on purpose:

* Some bits of wide intermediate results are unused, such as the low bits of
  a saturated product and the spare bit of the divider's remainder.
* The reset is used both in the flip-flops and in the assertions'
  `disable iff`.
