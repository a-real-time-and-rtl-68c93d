# Deep spike detection with two compressed 1-D CNNs

Extracellular neural recordings contain more than spikes. Some channels show
only noise. Even active channels contain artefacts: distorted events, often
from neurons far from the electrode, that corrupt later spike sorting. Deep
spike detection puts two small convolutional neural networks in front of the
sorter:

* **CNN1 (channel selection)** looks at a channel's signal, down-sampled by
  10. It decides whether the channel carries neural activity at all.
* **CNN2 (artefact removal)** looks at individual 66-sample event windows
  from the selected channels. It separates real spikes from artefacts.

Only spike events from selected channels go on to feature extraction and
clustering. That later stage is not part of this hardware.

Both CNNs have the same structure. This is a 1-D CNN that was compressed by
filter pruning, network projection and 4-bit quantization until it had only
**419 parameters (210 bytes)**. Projection replaces each wide layer with a
"project in -> narrow layer -> project out" sandwich. That cuts parameters,
but it creates 10-channel intermediate feature maps between the narrow
layers. The key hardware idea is the **fused processing block**. It never
builds those maps: it computes projection-out, ReLU, max-pool and
projection-in together, one input position at a time.

This RTL implements the two-CNN detector: every CNN block, the batch memory,
the down-sampler and the gating between the two networks. It is
synthesizable SystemVerilog with self-checking testbenches.

## The network

Each CNN takes a 66-sample batch of 10-bit samples and produces three class
scores. Layer by layer (lengths × channels):

| Stage | Hardware block | Layers it computes | Output |
|---|---|---|---|
| 0 | `signal_memory` | input layer | 66 |
| 1 | `conv_block` Conv1 | 1×3 convolution, zero padding 1 | 66 |
| 2 | `fused_block` FPB1 | Conv1 projection out (1→10), ReLU, Conv2 projection in (10→1) | 66 |
| 3 | `conv_block` Conv2 | 1×3 convolution, no padding | 64 |
| 4 | `fused_block` FPB2 | Conv2 projection out (1→10), ReLU, max-pool 2, Conv3 projection in (10→1) | 32 |
| 5 | `conv_block` Conv3 | two 1×3 filters, no padding | 2 × 30 |
| 6 | `fused_fc_block` FPB3 | Conv3 projection out (2→10), ReLU, max-pool 2, FC projection in (150→2) | 2 |
| 7 | `classifier` | FC projection out (2→3), ReLU, arg-max instead of SoftMax | 3 scores + class |

Parameter count: 4 + 31 + 4 + 31 + 8 + 332 + 9 = 419.

## Arithmetic

All activations are 10-bit two's-complement numbers with 6 fractional bits.
All weights and biases are 4-bit two's-complement numbers with 2 fractional
bits (range −2 … 1.75). A layer forms its sum of products at full precision
in a 24-bit accumulator. The bias is added shifted left by 6, so that it
lines up with the products. The sum is then shifted right by 2, which rounds
toward −∞, and saturated to 10 bits. In integer terms, for activations `a`
and parameters `w`, `b`:

    y = clip( floor( (64*b + Σ w*a) / 4 ), −512, 511 )

The fused blocks apply the same step to each projection-out value before
its ReLU. The helpers live in `dsd_pkg` (`mul`, `bias`, `requant`, `relu`,
`max2`).

The widths (10-bit data, 4-bit parameters) are the design's. The binary-point
positions, floor rounding and saturation are choices made here. A trained
parameter set has to be quantized to match them.

## The fused processing block

Take FPB1. The unfused layers would compute, for every input position `j`
and projection row `i = 0..9`:

    c[i][j] = w[i]·a[j] + b[i]          (projection out: 66 × 10 map)
    d[i][j] = max(0, c[i][j])           (ReLU)
    e[j]    = b' + Σ_i w'[i]·d[i][j]    (projection in: back to 66 × 1)

`e[j]` depends only on `a[j]`. So a **mapper** can produce one output from
one input in 10 cycles, one row per cycle:

* a MAC computes `w[i]·a[j] + b[i]`;
* a ReLU follows;
* a second MAC multiplies by `w'[i]` and adds into an accumulation register.

In the last row the projection-in bias is added and the result is written to
the output array. Many mappers run side by side on different positions. The
three parameter vectors `w`, `b` and `w'` sit in shifting arrays that rotate
by one cell per cycle, so every mapper sees row `i` at the head of the
arrays. A batch uses a multiple of 10 shifts, so the arrays end in load
order.

With max-pooling (FPB2) each output uses two neighbouring inputs. The mapper
then has two projection-out MACs and a comparator ahead of the
projection-in MAC ("two-to-one mapping").

FPB3 is different. Its projection-in half belongs to the fully connected
layer, so each of its two outputs is a 150-term dot product over all 15
pooled positions × 10 rows. Each FPB3 mapper handles one pooled position per
round. It has:

* four projection-out MACs: 2 columns × 2 input channels;
* two FC MACs, one for each output.

It accumulates its share of both dot products across all of its rounds. In
the last cycle the five partial sums and the FC bias are added. The FC
weight order is `wfc[k][p][i]`: output `k`, pooled position `p`, row `i`.

Mapper counts follow the MAC budget of 44, 33 and 30 MACs for FPB1–3. Each
count gives 3 rounds of 10 cycles:

| Block | MACs per mapper | Mappers | Outputs | Rounds × 10 cycles |
|---|---|---|---|---|
| FPB1 | 2 | 22 | 66 | 3 → 30 |
| FPB2 | 3 | 11 | 32 | 3 → 30 (one idle slot) |
| FPB3 | 6 | 5 | 15 pooled positions | 3 → 30 |

How the MACs are grouped into mappers is this design's reading of the MAC
counts.

## Convolution blocks

A convolution block copies its input, zero-padded if configured, into
shifting arrays. Each cycle, an engine of three MACs in series reads the
three leading cells of an array. Its chain is bias + v2·w2, then + v1·w1,
then + v0·w0. The engine writes one result at the running address of the
result array, and the array shifts by one.

Each block has 6 MACs, that is two engines:

| Block | Engines used as | Shifting arrays | Compute cycles |
|---|---|---|---|
| Conv1 (66 → 66, padded) | two halves of the output | 2 × 35 | 33 |
| Conv2 (66 → 64) | two halves: cells 0–33 and 32–65 | 2 × 34 | 32 |
| Conv3 (32 → 2×30) | one engine per filter, sharing one array | 1 × 32 | 30 |

All three are the same module, `conv_block`, with parameters `IN_LEN`,
`PAD`, `N_FILT` and `N_SEG`.

## Handshake and pipeline timing

There is no central controller. Each link between neighbouring blocks uses
four signals:

* **ready** (producer output, level): the producer's result array holds a
  finished batch. It drives the consumer's **ready_in**.
* **fetched** (consumer output, one-cycle strobe): the consumer copies the
  producer's array in this cycle. It drives the producer's **fetch**, and
  the producer drops `ready` on the next edge.

A block starts a batch when `ready_in` is high and its own result has been
taken (possibly in the same cycle). The result array doubles as the output
array. A busy block therefore holds its upstream neighbour, and back-pressure
propagates without any extra buffering. Assertions in each block check the
rules: `fetch` only while `ready`, and `ready` held until `fetch`.

In the paper's drawing, all four arrows point down the pipeline. Here
`fetched` travels up, from consumer to producer, because a producer needs
that acknowledgement to know its result was taken.

Cycle counts, with a single clock:

* A batch takes 33 + 30 + 32 + 30 + 30 + 30 + 3 compute cycles, plus one
  handshake cycle per stage. That is **195 cycles** from a stored batch to
  its class.
* The pipeline accepts a new batch every **34 cycles** in steady state
  (Conv1's 33 cycles + 1). The paper reports a 42-cycle classification
  delay, which is 16.8 µs at 2.5 MHz. This design meets 42 cycles as a
  per-batch interval, not as an end-to-end latency (see below).
* Writing a batch into the signal memory takes 66 cycles (one sample per
  cycle). Streamed input is therefore limited by the write port, not by the
  network. At real sampling rates (66 samples per 2.5 ms) the clock is far
  faster than needed.

## Around the networks

* **`signal_memory`**: a ring of `DEPTH` batch slots (524 by default, the size
  of the test set used with the prototype). Samples are written one at a
  time. A complete slot is offered as a whole 66-sample array. `s_ready`
  falls when the ring is full. With `run` low, complete batches are held
  back, so a test set can be loaded first and then classified back to back.
* **`decimator`**: keeps the first of every 10 valid samples. There is no
  anti-alias filter. It feeds CNN1's memory, so one CNN1 batch spans 660 raw
  samples.
* **`cnn1d`**: one complete network (memory + 7 blocks).
* **`deep_spike_detector`** (top):
  * `raw_*` → decimator → CNN1;
  * `ev_*` → CNN2; event windows are cut by an external spike detector,
    which is not part of this design;
  * `ch_active` follows CNN1's last decision (`NEURAL_CLASS`, default 0);
  * `ev_keep` marks a CNN2 decision that is not `ARTEFACT_CLASS` (default 2)
    while the channel is active.

  The class indices depend on how the networks were trained, so they are
  parameters.

### Parameter loading

Each block stores its own parameters. A load port (`p_we`, `p_addr` 9 bits,
`p_data` 4 bits; at the top also `p_cnn` to pick the network) writes one
4-bit word per cycle. Each block decodes its own address range:

| Address | Block | Contents, in order |
|---|---|---|
| 0–3 | Conv1 | w0 w1 w2, b |
| 4–34 | FPB1 | projection-out w[0..9], b[0..9], projection-in w'[0..9], b' |
| 35–38 | Conv2 | w0 w1 w2, b |
| 39–69 | FPB2 | as FPB1 |
| 70–77 | Conv3 | filter 0 w0..w2, filter 1 w0..w2, b0, b1 |
| 78–409 | FPB3 | w[i][c] at 78+2i+c, b[i] at 98+i, wfc[k][p][i] at 108+150k+10p+i, bfc at 408, 409 |
| 410–418 | classifier | w[n][c] at 410+2n+c, b[n] at 416+n |

Write parameters only while the pipeline is idle: the fused blocks rotate
their parameter registers while they compute.

## Where this design departs from, or adds to, the paper

* **Clocking.** The paper describes the blocks as self-timed, without a
  global clock, but measures them on an FPGA at 2.5 MHz. Here everything is
  synchronous to one clock; only the handshakes are local.
* **Handshake wiring.** The acknowledgement goes upstream, as described
  above.
* **Latency.** The paper's 42-cycle classification delay cannot be an
  end-to-end figure for seven stages of about 30 cycles each. Here it is
  compared with the batch interval (34 cycles). The end-to-end latency is
  195 cycles.
* **Number format.** The binary points, rounding and saturation are this
  design's choices (see Arithmetic).
* **SoftMax** is replaced by arg-max, which picks the same class. Scores are
  output as ReLU values, and ties go to the lower index.
* **Conv1 padding and engine split.** The paper gives Conv2's split (two
  34-long arrays). Conv1's zero padding and split, and Conv3's
  one-engine-per-filter, are inferred from the layer sizes and the
  6-MAC budget.
* **Mapper organisation** of FPB2 and FPB3, and FPB3's accumulation of the
  FC layer across mappers, are inferred from the MAC counts.
* **Requantization between the two MACs of a mapper** (to 10 bits, before
  ReLU) is a choice.
* **Signal memory organisation, the `run` input, the parameter load port,
  the decimator without filter and the gating rule** are this design's own.
* **Not built:** the prototype's "scoreboard", which is named in its
  resource table but never described; the spike detector that cuts CNN2's
  event windows; the PC-side PCA and k-means clustering. No trained weights
  are included. The networks must be loaded with a quantized parameter set
  before use.

## Workloads

The prototype was scored on a test set of 524 batches of 66 samples. The
default signal memory holds exactly that: 524 × 66 × 10 bit = 345,840 bits.
The whole set is classified in 524 × 34 + 195 ≈ 18,000 cycles, or about
7.2 ms at 2.5 MHz. `tb_testset_524` runs that size with synthetic windows,
because the recorded data set is not included.

The accuracy figures come from the Wave_Clus simulated recordings (Easy1,
Easy2, Difficult1, Difficult2 at noise levels 0.05–0.4, about 3,300–3,500
spikes each). The recording lengths are not given with the results. Assume
the usual 60 s at 24 kHz. Then the event network needs about 58 windows
per second, each costing 66 write cycles and one 34-cycle slot. At 2.5 MHz
that is far below capacity, so the design keeps up in real time. Channel
selection over 576 channels means reusing one detector channel by channel:
576 × (66 + 34) cycles ≈ 23 ms. No 576-way input multiplexer is built.

## Simulating

Each testbench in `tb/` prints `TB_RESULT checks=N failures=M` and stops
itself. Packages must be read first. For example, the end-to-end test at
default sizes:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
      rtl/dsd_pkg.sv tb/tb_ref_pkg.sv tb/tb_deep_spike_detector.sv \
      --top-module tb_deep_spike_detector -o sim
    ./obj_dir/sim

`-y` lets Verilator find every other module by its file name. The same
command works for any testbench: change the last file and the top module.
The end-to-end test takes about half a minute to build and run.

`tb_ref_pkg` holds an integer reference model, written independently of the
RTL's package. It covers the rounding rule, the fused mapping and the whole
network (`cnn_ref`). All testbenches compare against it.

| Testbench | What it checks |
|---|---|
| `tb_conv_block1/2/3` | each convolution configuration against the reference; result exactly 33/32/30 cycles after fetch; stalls with a waiting batch; stray parameter writes ignored |
| `tb_fused_block1/2` | FPB1 and FPB2 (one-to-one and two-to-one mapping), 30-cycle timing, stalls |
| `tb_fused_block3` | FPB3 with all 332 parameters random, 30-cycle timing |
| `tb_classifier` | scores, arg-max with forced ties, 3-cycle timing |
| `tb_signal_memory` | fill to full, overflow ignored, `run` hold, in-order read with wrap-around |
| `tb_decimator` | keeps samples 0, 10, 20, … under random input gaps |
| `tb_cnn1d` | 24 batches through a whole network, bit-exact against `cnn_ref`: first with random parameters, then with jittered polarity-detector parameters on spike, noise and artefact windows (all three classes must occur); steady interval ≤ 42 cycles (measures 34); back-pressure |
| `tb_testset_524` | a full signal memory: 524 synthetic windows stored, the memory must then refuse samples, all 524 classified bit-exact against `cnn_ref` within 524 × 42 cycles plus latency (measures 34 per batch) |
| `tb_deep_spike_detector` | both networks at default sizes with a hand-built "polarity detector" parameter set, so that channel selection turns on and off and events are kept, dropped as artefacts, or dropped because the channel is off; also checks decimation and stalls |

## Files

* `rtl/dsd_pkg.sv`: formats, arithmetic helpers, address map.
* `rtl/conv_engine.sv`: three-MAC convolution engine.
* `rtl/conv_block.sv`: convolution block.
* `rtl/mapper.sv`: one-to-one / two-to-one mapper.
* `rtl/fused_block.sv`: FPB1 and FPB2.
* `rtl/fused_fc_block.sv`: FPB3.
* `rtl/classifier.sv`: classifier.
* `rtl/signal_memory.sv`: batch memory.
* `rtl/decimator.sv`: down-sampler.
* `rtl/cnn1d.sv`: one network.
* `rtl/deep_spike_detector.sv`: the two-network top.
* `tb/`: the testbenches above, plus `tb_ref_pkg.sv` and the shared cores
  `conv_block_tb_core.sv` and `fused_block_tb_core.sv`.
