# Low-precision SGD with double sampling: an FPGA-style training pipeline

Stochastic gradient descent on a dense linear model is usually limited by
memory bandwidth rather than arithmetic. Every step reads a whole sample but
does only two multiply-adds per feature with it. Storing the samples at 1, 2,
4 or 8 bits instead of 32 cuts that traffic by 4 to 32 times. The catch is
that the obvious low-precision gradient is biased. For least squares,

    g = a (a.x - b)

and if `a` is replaced by one stochastically rounded copy `Q(a)`, the
expectation of `Q(a) Q(a)^T` gains a positive diagonal term (the rounding
variance). SGD then converges to the wrong model. The fix used here is
**double sampling**. Every feature is quantized twice, independently:

    g = Q''(a) (Q'(a).x - b)

Because `Q'` and `Q''` are independent and each is unbiased, `E[g]` equals the
full-precision gradient. The cost is a second low-precision copy of each
feature, which is still far less data than one 32-bit copy.

This repository holds synthesizable SystemVerilog for a streaming pipeline
that performs this update. It reads one 64-byte cache line of quantized
samples per clock cycle and keeps the model on chip. It supports 1-, 2-, 4- and
8-bit samples and mini-batches. The structure follows a published FPGA
design: lane counts, stages, latency and throughput. Everything the published
description leaves open was filled in here and is listed under
[Departures and choices](#departures-and-choices).

## 1. What is in a cache line

### Feature lines

Each feature takes one field of `2*QBITS` bits: the code of `Q'(a)` in the low
`QBITS` bits and the code of `Q''(a)` in the high `QBITS` bits. Feature `p` of a
line sits at bits `[p*2*QBITS +: 2*QBITS]`.

| QBITS | bits per feature | features per 64B line | lanes K | groups per line | input rate |
|------:|-----------------:|----------------------:|--------:|----------------:|-----------:|
| 1     | 2                | 256                   | 128     | 2               | 32B/cycle  |
| 2     | 4                | 128                   | 128     | 1               | 64B/cycle  |
| 4     | 8                | 64                    | 64      | 1               | 64B/cycle  |
| 8     | 16               | 32                    | 32      | 1               | 64B/cycle  |

A *group* is the K features that go through the datapath together in one
cycle. At 1 bit a line holds 256 features but the datapath stays 128 lanes
wide, so each line is split into two halves. Those halves take two cycles,
and the 1-bit pipeline is therefore compute bound.

A `QBITS`-bit code `c` stands for the level `(2c - s)/s` in `[-1, 1]`, where
`s = 2^QBITS - 1`. These are the `s+1` evenly spaced points from -1 to +1, so
1-bit samples are +-1 and 2-bit samples are -1, -1/3, +1/3, +1. The hardware
multiplies by the odd integer `2c - s`. The factor `1/s` and the scale `M` that
maps the raw data into `[-1, 1]` are left to the host (section 4).

A sample uses `ceil(n / (K * groups_per_line))` whole lines. The lanes past the
last feature may hold anything: the datapath masks them both in the dot
product and in the update. This masking matters at 1 bit, where no level is
zero.

### Label lines

A label line carries 16 labels `b` as signed 32-bit numbers. Label `j` is at
bits `[j*32 +: 32]` and belongs to the j-th of the next 16 samples. An epoch's
stream is therefore:

    label line (samples 0..15), lines of sample 0, ..., lines of sample 15,
    label line (samples 16..31), lines of sample 16, ...

The last label line of an epoch may be only partly used. The pipeline tells
label lines from feature lines by counting, so no tag bits are spent.

## 2. The pipeline

```
 line_data ──► line_frontend ──► group (K lanes: Q' codes, Q'' codes)
 (64B)           (Q1: split)        │               │
                                    │               └──► a fifo (Q'') ─────────┐
 label lines ──► b fifo ─────┐      ▼                                          │
                             │   s0 register ◄── x memory (word = group)       │
                             │      ▼                                          │
                             │   K multipliers  Q'_i * x_i                     │
                             │   adder tree, log2(K) levels                    │
                             │   accumulator over the groups of a sample       │
                             │      ▼  Q'(a).x                                 │
                             └──► subtract b, shift by gamma_shift             │
                                    ▼  err = gamma (Q'(a).x - b)               │
                                 K multipliers err * Q''_i  ◄──────────────────┘
                                 K subtractors  x_loading_i - err*Q''_i
                                    ▼
                                 x loading memory ──(batch end: copy)──► x memory
```

Blocks, by file in `rtl/`:

| module | role |
|---|---|
| `line_frontend` | hands feature lines on as groups; for QBITS = 1 it issues the lower half, then the upper half |
| `dot_product` | K fixed-point multipliers, registered binary adder tree, accumulator with feedback |
| `sync_fifo` | show-ahead FIFO; used as the **a fifo** (Q'' groups) and the **b fifo** (label lines) |
| `gradient_calc` | one subtractor and one arithmetic right shift: `gamma = 2^-gamma_shift` |
| `model_update` | K multipliers and K saturating subtractors, one group per cycle, with forwarding |
| `model_ram` | one model memory: **x** (read by the dot product) or **x loading** (written by the update) |
| `sgd_controller` | label/feature sorting, group and sample counters, the batch-end stall and copy |
| `zipml_sgd_top` | wires the above together and holds the host model port |
| `zipml_pkg` | shared constants and the lane-count and level-decoding functions |

### Timing of one sample

Take cycle `t` as the cycle in which a sample's last group leaves the front
end. The stages below are registered, and the cycle in which each result is
available is:

| cycle | what happens |
|---|---|
| t | group leaves the front end; x word read issued; Q'' pushed into the a fifo |
| t+1 | group and x word meet; K products formed |
| t+2 ... t+1+log2K | adder-tree levels |
| t+2+log2K | accumulator adds the last group sum |
| t+3+log2K | `dot_valid`; the label is selected and `Q'(a).x - b` is shifted |
| t+4+log2K | `err_valid`: update issues group 0 (a-fifo pop, x-loading read, K products) |
| **t+5+log2K** | group 0 of the sample written into x loading |

That gives **log2(K)+5 cycles**, which is 12 cycles at K = 128, 11 at 64 and 10
at 32. Group g of the sample is written g cycles later. The next sample's
groups stream in behind it without a pause, so within a mini-batch the input
takes one line per cycle (QBITS = 1: one line per two cycles).

The update stage is never overrun. A sample of G groups occupies the update
stage for G cycles. It also took at least G cycles to enter, so consecutive
`err_valid` pulses are at least G cycles apart.

### Forwarding in the update stage

The model memories read with one cycle of latency. On a read and a write to
the same word in the same cycle they return the *old* word. This only matters
when a sample is a single group (n <= K). In that case consecutive samples
update word 0 in consecutive cycles. The second sample's read then coincides
with the first sample's write. `model_update` detects this case and uses the
word it is writing in place of the stale memory output (`bypass_hit`).

## 3. Mini-batches: two copies of the model

The dot product reads **x**, and the update writes **x loading**. During a
mini-batch, x stays fixed. Each sample's gradient is therefore computed
against the same model and subtracted from x loading, so at the end of the
batch

    x_loading = x - sum over the batch of gamma * g_k

which is a mini-batch step with the average folded into gamma. When
`batch_size` samples have entered (or the epoch's last sample), the
controller:

1. stops accepting lines (`line_ready` low; the *stall*);
2. waits until the last update of the batch has been written;
3. copies x loading into x, one word per cycle for the words in use;
4. resumes.

A batch boundary therefore costs roughly `log2(K) + 7 + 2*G` cycles (G groups
per sample). For batch size 1 this dominates. For 16 or more it is small
next to `batch_size * G` cycles of streaming.

## 4. Numbers and scales

| quantity | format |
|---|---|
| model entry x | signed 32-bit, binary point chosen by the host |
| label b | signed 32-bit, same scale as the dot product |
| Q'(a).x | signed 64-bit sum of `(2c - s) * x` |
| err | `(dot - b) >>> gamma_shift`, saturated to signed 32 bits |
| new x | `x - err * (2c'' - s)`, saturated to signed 32 bits |

Suppose the raw features are scaled by one data-set-wide factor `M` so that
`a/M` is in `[-1, 1]`, and x has F fraction bits. The hardware integers then
relate to real values as follows:

    dot_int  = (s * 2^F / M) * (Q'(a) . x)
    b_int    = (s * 2^F / M) * b                    (host prepares this)
    x_new    = x - (s^2 / (M^2 * 2^gamma_shift)) * (Q'(a).x - b) * Q''(a)

The real step size is therefore `s^2 / (M^2 * 2^gamma_shift)`. The host picks
`gamma_shift` to get the step it wants. Adding one to it halves the step in
a later epoch. The testbenches use
`gamma_shift = ceil(log2(2 * s^2 * batch_size * n))` in the first epoch and
add one in each later epoch.

## 5. Using the top level

Parameters of `zipml_sgd_top`: `QBITS` (1, 2, 4, 8; default 2), `MAX_FEATURES`
(model size; default 8192), `X_W` = 32, `ACC_W` = 64, `B_DEPTH` (label-line
FIFO depth; default 4). K and the memory depth (`MAX_FEATURES / K`, 64 words
by default) follow from these.

| port | meaning |
|---|---|
| `start` | one-cycle pulse while `busy` is low: run one epoch |
| `n_features`, `num_samples`, `batch_size`, `gamma_shift` | epoch configuration; hold stable while `busy` |
| `busy`, `done` | epoch in progress; one-cycle pulse after the last batch copy |
| `line_valid`, `line_ready`, `line_data[511:0]` | cache-line stream (label and feature lines) |
| `mdl_wr_en`, `mdl_rd_en`, `mdl_addr`, `mdl_wr_data`, `mdl_rd_data` | host access to the model while idle; a write goes to both x and x loading, a read returns x one cycle later |

Procedure: reset (`rst_n` low, asynchronous), write the initial model through
the `mdl_*` port, then for each epoch set the configuration, pulse `start`,
stream the lines and wait for `done`. Read the trained model back through
`mdl_*`.

Immediate assertions in the RTL flag protocol errors in simulation: FIFO
overflow and underflow, an update arriving while the previous one is still
being issued, a missing label when a dot product finishes, and a copy that
overlaps with streaming or updates.

## 6. Departures and choices

The published description gives the block diagram, the lane counts per
precision, the statement that gamma is applied by a bit shift, the
mini-batch decision between the two model copies, the latency (log(K)+5
cycles; 12 cycles at 1 bit) and the throughput (64B/cycle; 32B/cycle at 1
bit). The following are this design's own choices:

- **Two full samples per feature.** The lane counts in the published
  pipeline (128/64/32 features per line at 2/4/8 bits) imply `2*QBITS` bits
  per feature, i.e. two complete codes. The accompanying text also sketches a
  denser encoding: a base level plus one bit per extra sample. That encoding
  would give other lane counts and is not used.
- **Level encoding** `(2c - s)/s` and one global data scale folded into gamma
  and b. The source lets the scale vary per vector.
- **Label lines** of 16 labels ahead of every 16 samples. The source only
  shows that labels come from the cache-line stream into a FIFO.
- **Widths**: 32-bit model and labels, a 64-bit accumulator, and saturation
  on err and on the model.
- **Batch end**: drain, then copy word by word while the input is stalled.
  The copy mechanism is not described.
- **Masking** of lanes beyond the last feature.
- **Forwarding** in the update stage.
- **Host model port**, start/busy/done handshake and asynchronous reset.
- **Model size** of 8192 features. This holds all the regression and
  classification data sets the method was evaluated on (up to 5,000 features)
  but not a 128^3-voxel tomography volume.

- **No regularization.** The update is plain least squares. A classifier
  trained as a least-squares SVM uses labels of +-1 with no `c*x` term.
  Adding that term would take a second multiplier per lane, which the
  published pipeline does not show.

Not built: the 32-bit floating-point version of the pipeline, which serves
only as the baseline. Also not built: the memory system and link that deliver
cache lines, and the quantization of the data, which happens before training
on the host.

## 7. Verification

Every module has a self-checking testbench in `tb/`, and each prints
`TB_RESULT checks=N failures=M`:

| testbench | checks |
|---|---|
| `tb_sync_fifo` | random push/pop against a queue: head, count, full, empty |
| `tb_model_ram` | read latency, read-first on collisions, hold when not reading |
| `tb_line_frontend` | pass-through at 2 bits; half order and 2-cycle rate at 1 bit |
| `tb_dot_product` | sums with masks and gaps; `dot_valid` exactly log2(K)+2 cycles after the last group |
| `tb_gradient_calc` | shift, sign and saturation; one-cycle latency |
| `tb_model_update` | memory contents, write timing, masking, forwarding used |
| `tb_sgd_controller` | line sorting, group indices, stall, copy order, label index, b-fifo pops, done |
| `tb_zipml_sgd_top` | four pipelines (1, 2, 4, 8 bits) training end to end, plus one with mini-batches of a single sample |
| `tb_zipml_full` | default configuration, 100 and 5000 features, all 64 model words |
| `tb_zipml_workloads` | default configuration at 8, 10, 12, 90 and 1000 features, mini-batches of 16 |

The end-to-end benches share `zipml_harness`. It builds a random
regression problem, quantizes every feature twice with stochastic rounding,
and streams label and feature lines with and without gaps. After every epoch
it compares the whole model bit for bit with a golden model written in the
testbench. It also checks the log2(K)+5 latency for every sample, the input
rate in a gap-free batch, and that the training loss on the unquantized data
falls. The top-level benches fail if any mechanism never occurred: batch
copy, stall, repeated label lines, forwarding, and the 1-bit split.

Run a testbench with Verilator 5 from the repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/zipml_pkg.sv tb/tb_zipml_full.sv --top-module tb_zipml_full -Mdir obj
./obj/Vtb_zipml_full
```

Any other testbench works the same way with its own file and top-module name.
Verilator finds the other modules through `-Irtl -Itb`. All of them finish in
well under a second of simulation time. A lint run is
`verilator --lint-only -Wall -Irtl rtl/zipml_pkg.sv rtl/zipml_sgd_top.sv`.
The remaining lint warnings are about unused status signals and bits. Each
testbench was also run against a deliberately broken copy of its module, and
each one failed.

What the tests do not show: timing closure or resource use on a real FPGA,
or behaviour with a real memory system that delivers lines out of order.
Convergence is checked only for falling loss over a few epochs of a few dozen
samples, not against the published convergence curves.
