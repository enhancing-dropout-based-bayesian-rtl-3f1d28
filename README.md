# Multi-exit dropout Bayesian neural network: the Bayesian datapath in SystemVerilog

A Bayesian neural network gives a prediction together with an estimate of how
uncertain that prediction is. The cheap way to get one is dropout at inference
time: run the network several times with different parts of it switched off
and average the answers, so that the spread between runs shows the
uncertainty. Two ideas make this affordable on an FPGA:

* **Multi-exit, partial dropout.** The network gets several exits (classifier
  branches) at different depths. Only the exit branches are stochastic: each
  starts with a dropout layer, and everything before it (the "backbone") runs
  once per input. Its output is cached and re-used for every Monte-Carlo (MC)
  sample. With `N_EXIT` exits and `N_PASS` passes per exit an input gets
  `N_SAMPLE = N_EXIT * N_PASS` predictions, and they are averaged with equal
  weights.
* **Spatial and temporal mapping of the MC samples.** The samples of one exit
  can run on separate copies of the exit hardware (spatial: low latency, more
  area), one after another on a single copy (temporal: small, slower), or any
  mix of the two.

Two kinds of dropout layer are supported: **Monte-Carlo dropout** (MCD), which
draws a random keep/drop decision for every activation, and **Masksembles**,
which uses a fixed set of binary masks loaded before inference, one per
sample, so no random numbers are needed.

This RTL implements the part of such an accelerator that is specific to the
Bayesian, multi-exit scheme: the caches, the MC engines with their dropout
layers, the mapping of samples onto engines, and the ensemble. The ordinary
network layers (convolution, pooling, dense, the classifier) are expected to
come from a standard NN layer generator. They attach through stream ports.

## Data flow for one input

```
 backbone layers ──feat[e]──► feature_cache ──► MC engine 0 ──drop[e][0]──► exit layers ──pred[e][0]──┐
 (external)                   (one per exit)  ├─► MC engine 1 ──drop[e][1]──► exit layers ──pred[e][1]──┤
                                              └─► ...                                                   ├─► ensemble_avg ──► res
                                                                                                        │   (mean, class)
                              ...one bayes_exit per exit e...                                           ┘
```

1. For each exit `e` the backbone streams the `FEAT_SIZE[e]` activations that
   enter that exit's dropout layer into `feat_*[e]`. The exit's
   `feature_cache` stores them.
2. The cache replays the tensor in `N_ROUND = ceil(N_PASS / N_ENGINE)` rounds.
   In each round every element goes to all `N_ENGINE` engines in the same
   cycle.
3. Each engine applies its dropout layer and streams the result out on
   `drop_*[e][k]` to the exit's remaining layers (external). `drop_sample`
   says which MC sample the tensor belongs to.
4. The exit layers return one `N_CLASS` prediction vector per sample on
   `pred_*[e][k]`.
5. `ensemble_avg` adds up all `N_SAMPLE` vectors of the input, divides by
   `N_SAMPLE`, and offers the mean vector and its argmax on `res_*`.

The exits run independently and at the same time. An exit with a smaller
tensor finishes early and may start on the next input. The ensemble keeps
that early input's vectors out of the current average (see below).

## Mapping MC samples onto engines

This is the part that is easiest to get wrong when changing the design.

* Engine `k` of an exit computes sample `s = r * N_ENGINE + k` in round `r`.
* If `N_ENGINE` does not divide `N_PASS`, an engine whose `s` would be
  `>= N_PASS` does not take part in the last round. Its input valid stays low,
  and the broadcast ignores its ready.
* **Lockstep broadcast.** An element leaves the cache only in a cycle in which
  every taking-part engine can accept it. One stalled exit-layer stream
  therefore stalls all engines of that exit. The engines never drift apart,
  and one cache read port is enough.
* `N_ENGINE = 1` is purely temporal: the clones are concatenated in time on
  one engine. `N_ENGINE = N_PASS` is purely spatial: one round.

Example, `N_PASS = 5`, `N_ENGINE = 2` (three rounds):

| round | engine 0 | engine 1 |
|-------|----------|----------|
| 0     | sample 0 | sample 1 |
| 1     | sample 2 | sample 3 |
| 2     | sample 4 | idle     |

The cache has two phases. In FILL it accepts `FEAT_SIZE` elements, one per
cycle. In REPLAY it sends `N_ROUND` copies back to back. Only after the last
copy does it accept the next input's tensor. Without stalls, an exit needs
`FEAT_SIZE` fill cycles and `N_ROUND * FEAT_SIZE` replay cycles. The engine
output is one cycle later. So with enough engines (spatial mapping) the
latency no longer grows with the number of samples, while with one engine it
grows linearly.

Each engine's MCD random generator has its own seed, `engine_seed(e, k)` in
`bnn_pkg`. The seed is never zero, so parallel samples see independent random
streams.

## The dropout layers

Both layers handle one activation per cycle. Each has a single output
register: latency is one cycle, and `in_ready = !out_valid || out_ready`. The
`last` flag passes through with the final element of a tensor.

**Monte-Carlo dropout (`mcd_layer`).** For each activation `x` a uniform
number `u` is drawn. The output is 0 if `u > keep_rate`, otherwise
`x * keep_rate`. `keep_rate` and `u` are unsigned Q0.16 fractions
(code / 65536). The product is shifted right by 16 (arithmetic) back to the
activation format, which truncates. `keep_rate` is a run-time input, meant to
be set before a model runs and held.

Kept values are *multiplied* by the keep rate, as the published pseudocode of
the layer does. "Inverted dropout" would divide instead. If the network was
trained with that convention, fold the factor into the next layer's weights.

**MCD granularity.** By default every activation gets its own draw, as in the
published pseudocode. The method's prose describes MCD as dropping whole
channels instead. Set `N_CH` (`MCD_CH[e]` at the top) to the channel count to
get that. The layer then expects channel-innermost order: all channels of one
pixel, then the next pixel, as a channels-last stream delivers them. The
first `N_CH` elements of a tensor each draw a number and store their
channel's keep bit. Every later element reuses its channel's bit and draws
nothing. The position restarts after `last`.

The random numbers come from `xorshift_rng`: a 32-bit xorshift state (shifts
13, 17, 5; period 2^32 − 1) whose top 16 bits are the current number. It
advances once per draw.

**Masksembles (`masksembles_layer`).** The layer holds `MASK_NUM` masks of
`MASK_SIZE` bits. The `i`-th element of a tensor passes if
`mask[mask_index][i]` is 1 and becomes 0 otherwise. `i` is counted inside the
layer and wraps every `MASK_SIZE` elements. An assertion checks that `last`
comes exactly at the wrap. Inside an engine `mask_index` is the round number,
so an engine stores only the masks of the samples it computes. At the top,
the masks are written by (exit, sample, position) through `mask_wr_*`, one
bit per cycle, before the first input. Any mask generation method (for
example the Masksembles "scale" construction) runs off-chip.

The dropout kind is a build-time parameter (`DROPOUT = DROP_MCD` or
`DROP_MASK`). A generated accelerator holds one kind.

## Ensembling across exits (`ensemble_avg`)

Every exit has a quota of `N_PASS` vectors per input. A return channel is
ready only while its exit's quota is not yet met and no finished result is
waiting to be read. This is what keeps an exit that runs ahead from putting
its next input's vectors into the current average. When engines of one exit
deliver in the same cycle, they are granted in engine order within the
remaining quota. Once every quota is met, the result register is loaded:

* `res_mean[c] = (sum of the N_SAMPLE vectors)[c] / N_SAMPLE`, signed,
  rounded toward zero;
* `res_class` is the index of the largest mean (lowest index on a tie).

It is offered from the next cycle until `res_ready`.

One condition is assumed and not checked: each exit must return its vectors
in input order. This holds when each exit-layer instance processes its
tensors in order, as a streaming layer does.

## Top level: `me_bnn_top`

| parameter | default | meaning |
|---|---|---|
| `DROPOUT` | `DROP_MCD` | kind of dropout layer |
| `N_EXIT` | 2 | number of exits |
| `N_PASS` | 3 | MC samples per exit |
| `N_ENGINE` | 3 | parallel MC engines per exit (3 = fully spatial) |
| `N_CLASS` | 10 | length of a prediction vector |
| `FEAT_SIZE[N_EXIT]` | `'{1176, 400}` | elements of the cached tensor of each exit |
| `MCD_CH[N_EXIT]` | `'{0, 0}` | MCD granularity per exit: 0 = per element, else channel count (6 and 16 for LeNet-5) |

The defaults describe a LeNet-5-style network on a 10-class task. It has two
exits, one after each pooling stage: 6×14×14 = 1176 and 16×5×5 = 400
activations. There are three MC samples per exit, all in parallel. If you
change `N_EXIT`, give `FEAT_SIZE` a matching list.

| port group | direction | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous, active-low reset |
| `keep_rate` | in | MCD keep rate, Q0.16 |
| `mask_wr_en/exit/sample/addr/bit` | in | Masksembles mask load, one bit per cycle |
| `feat_valid/ready/data[e]` | in/out/in | cached tensor for exit `e` from the backbone |
| `drop_valid/ready/data/last/sample[e][k]` | out/in/out/out/out | dropped-out tensor of engine `k` to the exit layers |
| `pred_valid/ready/data[e][k][c]` | in/out/in | prediction vector of one sample back from the exit layers |
| `res_valid/ready/mean[c]/class` | out/in/out/out | ensemble result |

All streams use valid/ready. A transfer happens on a rising edge where both
are high. Activations are 16-bit signed fixed point. The binary point is for
the surrounding layers to choose, since this datapath only zeroes, scales,
adds and divides.

Files in `rtl/`: `bnn_pkg` (types, xorshift step, seeds), `xorshift_rng`,
`mcd_layer`, `masksembles_layer`, `feature_cache`, `mc_engine` (one engine:
the dropout layer of the chosen kind plus the sample tag), `bayes_exit` (a
cache and its engines), `ensemble_avg` and `me_bnn_top`.

## How far this follows the published design

Taken from the published design:

* multi-exit branches, each starting with a dropout layer, with the backbone
  output cached and cloned;
* the spatial, temporal and mixed mapping of MC samples onto engines;
* the MCD rule, including the scale by `keep_rate`, and the need for a
  hardware random generator;
* the Masksembles rule, with masks supplied as inputs;
* the equal-weight average over exits and samples;
* the default sample count (three), and that the final design runs its
  engines in parallel.

Choices made here where the description stops:

* the valid/ready stream protocol and `last` flags;
* the xorshift generator and the seeding;
* the Q0.16 rate format and truncation;
* the channel-innermost order assumed by channel-granular MCD;
* a single-buffer cache that does not overlap fill and replay;
* the lockstep broadcast;
* the bit-serial mask port;
* the ensemble quota, fixed-point division and argmax output;
* two exits, and the LeNet-5 tensor sizes.

Not done here: skipping the exit-layer work on activations that a fixed mask
zeroes. The method points out this opportunity for Masksembles. It belongs to
the exit layers, which are outside this RTL.

Outside this RTL:

* the backbone and exit layers (convolution, pooling, dense, softmax), which
  come from a standard HLS layer library;
* mask generation;
* confidence-threshold early exiting, which the method uses only when
  evaluating accuracy in software;
* host I/O.

The published accelerator is HLS-generated and ran at 181 MHz on a Kintex
UltraScale XCKU115. This RTL has not been through an FPGA flow, so no timing
or resource figure is claimed for it.

Sizes: the defaults hold a full-channel LeNet-5 (MNIST) workload. Larger
backbones (ResNet-18, VGG-11 at 32×32 inputs) produce cached tensors of
thousands of elements, which need `FEAT_SIZE` set accordingly. A 100-class
task needs `N_CLASS = 100`. The cache is written as an array with an
asynchronous read, which suits distributed RAM. For block RAM, register the
read and prefetch one element.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares
against a reference computed in the testbench itself, such as its own
xorshift model, the mask bits, or sums of the vectors it sent. Each ends by
printing `TB_RESULT checks=N failures=M`.

* `tb_xorshift_rng`: the sequence, holding while disabled, and the spread
  over [0, 1).
* `tb_mcd_layer`: 30 tensors of 100 elements under random stalls, through
  an element-granular and a channel-granular (5 channels) instance. It also
  checks the drop rate against `1 − keep_rate` and that 100 elements pass in
  101 cycles.
* `tb_masksembles_layer`: three masks under random stalls, and one tensor in
  `MASK_SIZE + 1` cycles.
* `tb_feature_cache`: order, round tags, `last`, and fill and replay cycle
  counts.
* `tb_mc_engine`: both dropout kinds side by side, plus the round tag.
* `tb_bayes_exit`: 5 samples on 2 engines (idle engine in the last round),
  every sample exactly once, and the stall-free cycle count.
* `tb_ensemble_avg`: 30 inputs, with exits running ahead. It requires that
  the quota stall and result back-pressure each happen.
* `tb_me_bnn_top`: four builds end to end, over three inputs each: MCD
  spatial, Masksembles temporal, MCD mixed, and per-channel MCD mixed. `me_bnn_harness` stands in
  for the backbone, the exit layers (`exit_head_model`, a simple per-class
  sum with random back-pressure) and the result reader. It checks every
  dropped element, prediction and result. It also requires that each
  mechanism occurs: parallel engines, later rounds, MCD drops and keeps,
  reused channel keep bits, mask zeros, exit-layer stalls, quota stalls and result back-pressure.
* `tb_me_bnn_full`: the top at its default parameters, through two complete
  inputs.

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_me_bnn_top \
    -y rtl -y tb +libext+.sv rtl/bnn_pkg.sv tb/tb_me_bnn_top.sv
./obj_dir/Vtb_me_bnn_top
```

Every testbench finishes in seconds. When writing a new testbench for this
two-state simulator, note two things:

* reset or initialise everything that is read;
* after changing an input with a blocking assignment, let time pass (`#1`)
  before sampling a combinational output such as `in_ready`.
