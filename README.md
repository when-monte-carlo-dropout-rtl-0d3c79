# Multi-exit Monte-Carlo Dropout core

A Bayesian neural network gives a prediction together with how uncertain it
is. Monte-Carlo Dropout (MCD) is a cheap way to get one: dropout stays on at
inference time, and the same input is run several times with fresh random
masks. The spread of the results measures the uncertainty, and their mean is
the calibrated prediction. Run naively, each extra sample costs a whole
forward pass.

This design cuts that cost in two ways:

* **Multi-exit.** The network has several exits, so one forward pass gives
  several predictions.
* **Dropout only near the exits.** Only the last few layers before each exit
  get dropout. Everything before the first MCD layer is deterministic, so it
  is computed once per input. Only the short random tail is re-run for each
  sample.

With `N_exit` exits, total FLOPs `F_main` of the shared body and `F_exit` of
all the exits, `N` samples cost about `F_main + (N / N_exit) * F_exit`. A
single-exit network needs `N * (F_main + F_exit)` for the same samples.

The RTL here is the part of such an accelerator that is specific to this
scheme:

| part | file | job |
|---|---|---|
| dropout layer | `rtl/mcd_layer.sv`, `rtl/mcd_rng.sv` | streaming MCD with its own random generator |
| tensor cache | `rtl/tensor_cache.sv` | holds the deterministic tensor and replays it |
| MC engine | `rtl/mc_engine.sv` | a chain of `N_MCD` dropout layers, looping out to the layers between them |
| exit branch | `rtl/mc_branch.sv` | cache plus MC engines: spatial/temporal mapping of the samples |
| ensemble | `rtl/ensemble_avg.sv` | equally weighted mean of all predictions |
| top | `rtl/me_bayes_top.sv` | one branch per exit plus the ensemble |
| shared | `rtl/mcd_pkg.sv` | defaults, LFSR constants, seed function |

The convolution, pooling and dense layers are not in this RTL. That covers
the backbone and each exit's classifier. They are ordinary quantised layers,
such as those an hls4ml-style generator produces, and they connect to the
ports described below.

## The MCD layer

Each element `x` of the incoming stream meets one fresh uniform random number
`r` and the keep rate `k`:

```
out = (r > k) ? 0 : x * k
```

Four hardware parts do this. A random number generator makes `r`. A
comparator tests `r > k`. A multiplier forms `x * k`. A two-way multiplexer
picks 0 or the product.

Note that a kept element is multiplied by `k`. Many software dropout layers
divide by `k` instead. This design follows the multiply-by-`k` definition.
The two differ by a constant factor of `k^2`, and a following linear layer's
weights can absorb that factor.

Arithmetic:

* `x` is a signed 16-bit fixed-point number. The binary point can be
  anywhere, because the output keeps it.
* `k` and `r` are unsigned 16-bit fractions (value / 65536).
* The 33-bit product is shifted right arithmetically by 16, which is a floor.
  The low 16 bits are kept. Since `k < 1`, the result always fits.
* The generator is a 16-bit Galois LFSR for x^16 + x^14 + x^13 + x^11 + 1.
  Its period is 65535, and it visits every non-zero value once per period.
* The probability of keeping an element is therefore `k / 65535`. `k = 0`
  drops everything and `k = 0xFFFF` keeps everything.

The layer is a one-stage pipeline that takes one element per clock. Its
input is ready whenever its output register is empty or being read. The LFSR
advances only on an accepted element. Each element's mask therefore depends
only on its position in the stream, never on back-pressure, and a software
model can reproduce every output bit-exactly.

## Caching, cloning and the two mappings

This is the part of the design that takes most explaining.

The tensor that leaves the last deterministic layer of an exit is the same
for every MC sample. `tensor_cache` stores it once, in its LOAD phase, as
`TENSOR_LEN` words in arrival order. It then replays the tensor in its
REPLAY phase.

An **MC engine** (`mc_engine`) is the random tail of the exit. Here that
tail is a chain of `N_MCD` MCD layers (one by default). The ordinary layers
between them, and the classifier after the last one, are external:

* MCD layer `j` streams out on `mid_out[j]` to external layer `j`.
* That layer's result comes back on `mid_in[j]` into MCD layer `j+1`, as
  `MID_LEN[j]` elements per sample.
* The engine counts the returned elements to rebuild each sample's tag and
  last flag.
* With `N_MCD = 1` the `mid_*` ports are width-one placeholders: their
  outputs are held at 0 and their inputs are ignored.

`mc_branch` has `N_SPATIAL` engines. Every MCD layer of every engine and exit
has its own LFSR seed.

* **Clone.** Every replayed element goes to all engines in the same clock. It
  leaves the cache only when every engine can take it (the cache's ready is
  the AND of the engines' readies). The engines therefore run in lock-step
  and each sees the whole tensor in order. Because their seeds differ, they
  draw different masks and so produce different samples.
* **Spatial mapping** (`N_SPATIAL = N_SAMPLE`). One replay produces all
  samples in parallel. The latency does not depend on the number of samples,
  but the number of engines, and so the resources, grows with it.
* **Temporal mapping** (`N_SPATIAL = 1`). The copies are concatenated: the
  cache replays the tensor `N_SAMPLE` times through one engine. Resources
  stay constant and the latency grows linearly.
* **Mix.** Any `N_SPATIAL` that divides `N_SAMPLE` works. The cache replays
  `N_ROUND = N_SAMPLE / N_SPATIAL` times. In round `r`, engine `e` produces
  MC sample `r * N_SPATIAL + e`. That index goes out on `mc_sample` with
  every element, so the classifier copy behind engine `e` knows which sample
  it is computing.

`out_last` / `mc_last` mark the last element of each round.

Timing of one exit with one MCD layer per engine, with no stalls:

* The tensor loads in `TENSOR_LEN` clocks, one element per clock.
* Replay starts the next clock.
* The last masked element is taken `N_ROUND * TENSOR_LEN + 1` clocks after
  the last input element.

For example, with 20-element tensors the measured figures are 21 clocks
spatial (3 samples on 3 engines), 61 temporal (3 on 1) and 41 mixed (4 on 2).

Load and replay do not overlap. The cache accepts the next tensor only after
its last round has been read out.

## Ensemble

Each exit classifier returns one vector of `N_CLASS` scores per sample, on
`pred_valid`/`pred_score`. `ensemble_avg` works like this:

* Any number of vectors up to `N_IN` may arrive in the same clock.
* It adds them into full-width accumulators and counts them.
* In the clock the count reaches `N_TOTAL = N_EXIT * N_SAMPLE`, it divides
  each sum by `N_TOTAL` (truncating toward zero), and clears the
  accumulators.
* `avg_valid` pulses for one clock on the next edge, with the result on
  `avg_score`.

The mean of scores is taken, not of probabilities. If a softmax is wanted,
it belongs at the end of each exit classifier.

## Top level: `me_bayes_top`

Port groups. `[X]` is per exit and `[X][E]` is per exit and engine. All
streams are valid/ready.

| ports | direction | meaning |
|---|---|---|
| `keep_rate[15:0]` | in | keep rate; registered while all exits are idle, so it is constant for one input |
| `feat_valid/ready/data[X]` | in | the deterministic tensor of each exit, exactly `TENSOR_LEN[x]` elements |
| `mc_valid/ready/data/last/sample/dropped[X][E]` | out | masked stream of each engine, to its classifier copy |
| `mid_out_valid/ready/data/last[X][E][J]` | out | MCD layer `j` of an engine, to the external layer after it (only with `N_MCD > 1`) |
| `mid_in_valid/ready/data[X][E][J]` | in | that external layer's result, into MCD layer `j+1` |
| `pred_valid, pred_score[X][E][N_CLASS]` | in | scores from that classifier (no back-pressure) |
| `avg_valid, avg_score[N_CLASS]` | out | ensemble prediction |
| `busy[X]` | out | exit branch holds or replays a tensor |

Default parameters:

| parameter | default | origin |
|---|---|---|
| `N_SAMPLE` | 3 | MC samples of the evaluated LeNet-5 design |
| `N_SPATIAL` | 3 | the final design maps its samples spatially, one engine each |
| `N_EXIT` | 2 | two exits, as in the method's illustration; the exit count of the final design is not published |
| `TENSOR_LEN` | `'{1176, 400}` | LeNet-5 after its first (6x14x14) and second (16x5x5) pooling layer; the real channel counts are not published |
| `N_CLASS` | 10 | MNIST |
| `DATA_W`, `SCORE_W` | 16 | the largest of the searched widths 4/6/8/16 |
| `N_MCD` | 1 | the latency study uses one MCD layer |
| `MID_LEN` | all 1 | per exit and external layer; unused while `N_MCD = 1` |

With these defaults, the core holds 25 552 bits of cache. After the tensors
arrive, it needs 1177 clocks for the larger exit.

## What is not here, and where this departs from the method

* **No convolution, pooling or dense layers.** The backbone and the exit
  classifiers are outside. Their weights, channel counts and bit widths for
  the published designs are not given.
* **Several MCD layers need external help.** The method can put several MCD
  layers in front of an exit, with ordinary layers between them. The core
  chains up to `N_MCD` of them, but the layers between them are outside and
  are reached through the `mid_*` ports. Each must return a fixed
  `MID_LEN` elements per sample, in sample order.
* **Invented details.** The random generator's type, the number formats, the
  stream handshake, the cache organisation (no double buffering) and the
  seeds are this design's own choices.
* **Ensemble placement.** Whether the ensemble mean is computed on the chip
  is also this design's choice.
* **No early exiting.** Confidence-threshold early exiting, which the method
  uses in its accuracy study, is not built.
* **Compile-time sample count.** The number of samples is fixed when the
  design is built: any `N_SAMPLE` with `N_SPATIAL` dividing it. It is not
  selectable at run time.

## Simulating

Every testbench checks its block against reference models written separately
from the RTL, in `tb/mcd_ref_pkg.sv`. Each one prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/mcd_pkg.sv tb/mcd_ref_pkg.sv tb/me_bayes_top_full_tb.sv \
    --top-module me_bayes_top_full_tb -o sim && ./obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `mcd_rng_tb` | LFSR sequence, hold, reseed, full period of 65535, uniform top bit |
| `mcd_layer_tb` | bit-exact outputs under random stalls; keep rates 0, 0.5, 0.875, 1; one element per clock |
| `tensor_cache_tb` | three replay rounds under back-pressure; input refused during replay; occupancy `LEN + N_ROUND*LEN` |
| `mc_branch_tb` | spatial (3/3), temporal (3/1) and mixed (4/2) branches; sample tags; latency `N_ROUND*LEN + 1`; a deep branch with three MCD layers per engine and pair-summing layers between them |
| `ensemble_avg_tb` | means of bunched random vectors, including extreme values; result timing |
| `me_bayes_top_tb` | reduced end to end: 2 exits, 4 samples on 2 engines, two MCD layers per engine with an identity layer between them, keep-rate switching, back-pressure |
| `me_bayes_top_full_tb` | the top at its default parameters, two inputs, stall-free latency |

The end-to-end tests use `tb/me_bayes_checker.sv`. It drives the tensors and
stands in for the exit classifiers: score `c` is the sum of the elements at
indices congruent to `c` modulo `N_CLASS`. It also checks every masked
element and the final mean. It counts how often each mechanism occurred
(dropped and kept elements, stalls, replay rounds, keep-rate switches,
elements looped through the layers between MCD layers) and fails if one
never did.
