# AMS-HD: a binary hyperdimensional classifier for acute mountain sickness

Acute mountain sickness (AMS) shows up in a handful of signals that a wearable
or phone can collect: blood-oxygen saturation (SpO2), heart rate, and where the
person is in their ascent (event and time stage). AMS-HD decides "AMS" or
"no AMS" from such a sample with hyperdimensional computing (HDC): every
sample is mapped into a long binary vector, a *hypervector* (HV) of D bits, and
classification is a nearest-neighbour search among one stored HV per class.
All the arithmetic is XOR, counting and comparison, so the classifier fits
in a small corner of an FPGA fabric: one block RAM, no multipliers, and a
result 16 clock cycles after the first feature arrives.

This repository holds synthesizable SystemVerilog for the fabric part of
that design, at its main published configuration: D = 256, two classes, a
thermometer (unary) feature encoding, and position HVs from a Sobol-seeded
pseudo-LFSR with threshold 0.65. The processor-side preprocessing that
normalises raw sensor values into [0,1), and the processor-to-fabric link, are
not included; the top level exposes the ports where they would connect.

## The data path at a glance

```
 feature f_j ──► thermometer encoder ──► F_j ─┐
                                               XOR ──► B_j ──► per-bit counters ──► majority ──► sample HV H
 position chain (pseudo-LFSR) ─────────► P_j ─┘
                                                                              ┌─ train: add H to class counters,
                                                                              │          commit → class memory
 H ───────────────────────────────────────────────────────────────────────────┤
                                                                              └─ infer: Hamming distance to every
                                                                                         class HV, smallest wins
```

A sample is N_FEATURES normalised features (4 by default: SpO2, heart rate,
event stage, time stage). They enter one per clock.

## Encoding a sample

**Feature HV (thermometer code).** A feature value f in [0,1) becomes a D-bit
vector whose bit k is 1 when f > k/D. So f = 0 gives all zeros, f close to 1
gives all ones, and two nearby values share most bits. The Hamming distance
between two feature HVs is therefore proportional to the difference of the
values. In hardware this is D constant comparators working in parallel,
with no clock involved (`feature_hv_gen`). Features are 16-bit unsigned fractions
(f = code / 65536), and bit k is computed exactly as `code * D > k * 65536`.

**Binding.** The feature HV is XORed with a *position HV* P_j that belongs to
the feature's slot j (`hv_bind`). Without it, an SpO2 of 0.8 and a heart rate
of 0.8 would contribute identical vectors. With it, each slot lives in its own
near-orthogonal region of the space.

**Bundling.** The bound HVs B_0..B_{N-1} of one sample are superimposed by
counting, for each bit position, how many of them have a 1 there, and setting
the output bit when that count is above half of N (`pop_threshold`). This is
the binary counterpart of summing bipolar vectors and taking the sign. With
an even N a tie gives 0. The result is the sample HV.

## The position HV generator

This is the least conventional part of the design and the one whose exact
contents are least specified, so it is described in detail here.

Instead of storing one random D-bit position HV per feature slot, the design
produces them on the fly from a chain of D flip-flops FF_0..FF_{D-1}, a
structure between an LFSR and a multiple-input signature register:

```
next[0] = en     ^ (mask[0] & q[D-1])
next[k] = q[k-1] ^ (mask[k] & q[D-1])        k = 1 .. D-1
```

Every cycle the register shifts by one place. The bit leaving the last stage is
fed back into each stage whose *feedback mask* bit is 1. The register state is
the position HV. The first position HV is the *initial seed*, and each step
gives the next one, so M positions cost M cycles and D flip-flops, whatever M
is. `en` is a serial input XORed into stage 0; the encoder ties it to 0, so
the chain runs autonomously from the seed.

Mask and seed are fixed D-bit patterns built from Sobol low-discrepancy
sequences and a threshold th that sets the share of ones (0.65 by default):

```
mask[k] = ( s1(k+1) <  th )
seed[k] = ( s2(k)   >= 1 - th )
```

Here s1 is the first Sobol dimension (the van der Corput sequence: the
bit-reversal of k as a binary fraction), and s2 is the second dimension
(direction numbers v_{j+1} = v_j XOR (v_j >> 1), combined by the bits of k). Both are
evaluated as 32-bit fractions by constant functions in `amshd_pkg`, so the
patterns exist only as elaboration-time constants: no table is stored, and
changing D or th regenerates them. At D = 256 and th = 0.65 the mask begins
`110…` and ends in `1`, and the seed begins `011…` and ends in `0`; these are
the leading and trailing bits shown for the original design. The rest of the
bits, and the mapping from Sobol points to bits itself, are this
implementation's reconstruction. The original only states that the seeds and
masks come from Sobol sequences. A different mapping would yield different,
equally valid position HVs. It would change trained models but not the
structure.

The testbench checks the chain against an independent model step by step,
and also checks that the position HVs it produces are close to orthogonal:
the mean normalised Hamming distance between 16 successive states at D = 256
is about 0.50.

Inside the encoder, feature j is bound with the state after j steps (P_0 =
seed). After the last feature of a sample the chain is reloaded with the
seed, so that every sample sees the same position HVs.

## Training: accumulating class HVs

Learning is single-pass and needs no gradients (`class_trainer`). Each class
owns a set of D counters (16 bits each by default) and a sample count n_c. A
training sample HV is added to its class's counters in one cycle. A *commit*
turns the counters into binary class HVs by the same majority rule as
bundling (bit = count > floor(n_c/2)) and writes them into the class memory,
one class per cycle. A single training sample per class is already a usable
model (one-shot), and more samples refine it (few-shot). A *clear* empties
all counters to start a new model. Counters saturate rather than wrap.

The class memory (`class_memory`) holds one D-bit word per class (2 × 256
bits by default). It has one write port, one registered read port and no
reset, which is the shape of a block RAM; a model must be committed before
the first inference.

## Inference: Hamming-distance search

`similarity_search` captures the query HV and reads the class HVs one per
cycle through the single read port. Each class HV is XORed with the query,
and the ones are counted by `popcount_pipe`, a binary adder tree with one
register stage per level (clog2(D) = 8 levels at D = 256). A new class
enters the tree every cycle, so the classes overlap in the pipeline. A
running minimum over the tree outputs keeps the class with the smallest
distance, the most similar one. On equal distance the lower class index
wins, i.e. "no AMS" (class 0). The result carries both the class and its
distance.

## Timing

At full rate, an inference result appears this many clock edges after the
edge that accepts the first feature of its sample:

```
latency = N_FEATURES + NUM_CLASSES + clog2(D) + 2
        = 4 + 2 + 8 + 2 = 16          (defaults)
```

The edges break down as follows:
- N_FEATURES edges, one per feature, each adding a bound HV to the bundling
  counters.
- One edge at which the search takes the sample HV.
- NUM_CLASSES + clog2(D) + 1 edges inside the search. These cover the class
  reads, the class memory's read register and the levels of the popcount
  tree. The 16 cycles at
D = 256 equal the latency reported for the original FPGA build. For D = 128
this formula gives 15 cycles where the original reports 14, so the original
pipeline is one register shorter somewhere. Where that register sits is not
known, and this implementation does not try to remove one.

Throughput: the search is busy for NUM_CLASSES + clog2(D) + 2 cycles per
query. The feature stream stalls (`s_ready` low) when the next sample is
encoded before the search is free. A training sample costs N_FEATURES
cycles, and a commit costs NUM_CLASSES cycles. An inference that is ready
while a commit is writing the memory waits until the commit is done, so it
never sees a half-written model.

## Top-level interface (`amshd_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `s_valid`, `s_ready` | in/out | 1 | feature stream handshake, one feature per beat, feature 0 first |
| `s_feature` | in | FEAT_W (16) | normalised feature, value = code / 2^FEAT_W |
| `s_mode` | in | 1 | `MODE_INFER` (0) or `MODE_TRAIN` (1); sampled on the last beat of a sample |
| `s_label` | in | clog2(NUM_CLASSES) | class of a training sample; sampled on the last beat |
| `cmd_clear` | in | 1 | one-cycle pulse: empty the class counters |
| `cmd_commit` | in | 1 | one-cycle pulse: write the class HVs to the class memory |
| `train_busy` | out | 1 | a commit is in progress |
| `result_valid` | out | 1 | one-cycle pulse per inference |
| `result_class` | out | clog2(NUM_CLASSES) | predicted class; 0 = no AMS |
| `result_dist` | out | clog2(D+1) | Hamming distance to the predicted class HV |
| `ams_led` | out | 1 | registered indicator: last prediction was not class 0 |

Parameters (all with defaults, set on `amshd_top` and passed down):

| Parameter | Default | Origin |
|---|---|---|
| `D` | 256 | published FPGA configuration |
| `NUM_CLASSES` | 2 | published FPGA configuration (binary AMS / no AMS) |
| `TH_PERMILLE` | 650 | Sobol threshold 0.65 of the published configuration |
| `N_FEATURES` | 4 | chosen here (SpO2, heart rate, event, time) |
| `FEAT_W` | 16 | chosen here |
| `SAMPLE_CNT_W` | 16 | chosen here (training counter width) |

The RTL also runs the other evaluated sizes by setting parameters: D from 128
up to 10000 (class memory of NUM_CLASSES × D bits, a popcount tree of
clog2(D) levels), and four severity classes (none, mild, moderate, severe)
with `NUM_CLASSES = 4`. The complete top has been simulated at D = 256 and at D = 512 with two
classes, and at D = 128 with two and with four classes. Sizes from 1024 up
were not simulated.

## Where this RTL departs from, or adds to, the original design

- **Number and width of features.** The original lists SpO2, heart rate and
  event/time information but not the exact feature vector or its fixed-point
  format. This implementation uses four 16-bit features.
- **Sobol patterns.** As explained above, only the printed leading and
  trailing bits of mask and seed are reproduced with certainty.
- **Latency at D = 128.** 15 cycles here against 14 in the original. At
  D = 256 both give 16.
- **Thresholds.** The original says "threshold", and its software description
  binarises class HVs against random numbers. This hardware uses a fixed
  majority for both bundling and training. Ties go to 0.
- **Control.** The stream handshake, the mode/label sideband, the
  commit/clear commands, the seed reload per sample, the tie rule of the
  search and the reset style are all choices made here; the original does not
  describe them.
- **Parallel position generators.** The original mentions that the chain can
  be replicated with other seeds and masks, to make several position HVs per
  cycle. With one feature per cycle a single chain is enough, so none is
  replicated.
- **Not included.** The processor-side normalisation of raw sensor data, the
  high-speed link between processor and fabric, and the board LED driver.
  The latter is just the `ams_led` output here.

## Verification

Each module has a self-checking testbench in `tb/` that compares it against
an independent reference in `tb_ref_pkg`. The reference computes the Sobol
points in floating point, the thermometer code by real comparison, and
popcounts and LFSR steps bit by bit. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

- `tb_feature_hv_gen`: the rule f > k/D at D = 256 with 16-bit features
  and at D = 100 with 8-bit features. It covers edge values, exact level
  boundaries and random values, and checks the thermometer shape.
- `tb_hv_bind`: random and corner vectors, and that binding twice with the
  same key restores the input.
- `tb_pop_threshold`: random bundles of 1 to 7 HVs, every threshold, clear,
  clear-with-add and counter saturation.
- `tb_class_memory`: write/read-back one clock after the request, held read
  data without a read enable, and no disturbance of other words.
- `tb_position_hv_gen`: the reset seed and the mask, step-by-step agreement
  with the reference, the `en` input, load, and near-orthogonality of the
  generated HVs.
- `tb_popcount_pipe`: counts, tags and the clog2(D)-cycle latency at D = 256
  and D = 100.
- `tb_hv_encoder`: sample HVs against the reference with random back-pressure.
- `tb_similarity_search`: distances, arg-min, ties and the latency at
  D = 256 / 2 classes and D = 100 / 4 classes.
- `tb_class_trainer`: few-shot class HVs, commit sequencing and clear, at
  D = 64 / 4 classes.
- `tb_amshd_top`: the whole classifier at its default parameters. It uses a
  synthetic cohort in which "no AMS" samples have high SpO2 and moderate
  heart rate, and "AMS" samples low SpO2 and high heart rate, with noise. The
  test trains, clears, retrains, commits and runs 63 inferences. It checks
  every class and distance against a software model of the pipeline, and
  checks the 16-cycle latency. It also requires that each mechanism occurs:
  training, commit, clear, both predictions, the LED turning on and off,
  stream stalls, and an inference held back by a running commit. The
  synthetic data is not clinical data, so its accuracy figure only shows that
  the classifier separates two well-separated groups.
- `tb_amshd_workloads` (with its helper `amshd_workload_run`): the whole
  classifier at three other evaluated configurations, run in parallel:
  - D = 128 with two classes, latency 15;
  - D = 128 with four severity classes and threshold 0.75, latency 17;
  - D = 512 with two classes, latency 17.

  Each run trains, commits and classifies synthetic samples. Every result is
  checked against the reference model, and the latency against the formula
  above. Larger sizes were not simulated.

## Simulating

With Verilator 5, from the repository root, for example for the top level:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_amshd_top rtl/amshd_pkg.sv tb/tb_ref_pkg.sv tb/tb_amshd_top.sv -o sim
./obj_dir/sim
```

Replace `tb_amshd_top` with any other testbench name. Each testbench
simulates in seconds. Building `tb_amshd_workloads` takes about a minute,
because it holds three copies of the design.

## Files

| File | Contents |
|---|---|
| `rtl/amshd_pkg.sv` | default sizes, `mode_e`, Sobol and pattern functions |
| `rtl/feature_hv_gen.sv` | thermometer feature encoder |
| `rtl/position_hv_gen.sv` | Sobol-seeded pseudo-LFSR position generator |
| `rtl/hv_bind.sv` | XOR binding |
| `rtl/pop_threshold.sv` | per-bit counters with threshold (bundling) |
| `rtl/hv_encoder.sv` | feature stream to sample HV |
| `rtl/class_trainer.sv` | class counters, commit to memory |
| `rtl/class_memory.sv` | class HV storage (block-RAM style) |
| `rtl/popcount_pipe.sv` | pipelined adder-tree popcount |
| `rtl/similarity_search.sv` | Hamming-distance arg-min over the classes |
| `rtl/amshd_top.sv` | the complete classifier |
| `tb/tb_ref_pkg.sv` | independent reference functions for the testbenches |
| `tb/tb_*.sv` | one testbench per module, plus `tb_amshd_workloads` for other sizes |
| `tb/amshd_workload_run.sv` | one trained-and-queried configuration, used by `tb_amshd_workloads` |
