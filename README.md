# A channel gating convolution accelerator in SystemVerilog

Most output activations of a ReLU network end up at zero. A convolution
still spends the full multiply-accumulate budget on them. *Channel gating*
cuts that waste at run time with no extra weights. Each output activation is
first computed over a small slice of its input channels (the **base path**). A
cheap comparison of this partial sum against a learned threshold then decides
whether the activation is worth finishing. Only activations that pass go on to
the remaining input channels (the **conditional path**). The rest keep their
partial sum as an approximation:

    y = f(W_p * x_p)                 if  d = s(W_p * x_p) = 0
    y = f(W_p * x_p + W_r * x_r)     otherwise

The decision `d` comes from a step function, so in hardware it is a comparator.
The base path is a dense computation and so is the conditional path, once the
surviving activations are packed together. Both map well onto an ordinary
array of multiply-accumulate units.

This repository holds RTL for an accelerator that runs one such convolution
layer. It is built from the published description of channel gating networks
(CGNets). That description defines the arithmetic completely but gives the
hardware only in outline: a TPU-like array, added comparators, and a data
layout suited to sparse data movement. Everything below the outline is this
design's own. The section "Relation to the published scheme" lists what
follows the scheme and what was chosen here.

## Channel groups: which inputs form the base path

The input channels of a layer are cut into `G` equal groups, and so are the
output channels. An output channel of group `i` uses input group `i` as its
base path and the other `G-1` groups as its conditional path. The base path
therefore covers a fraction `1/G` of the work, and every input channel is a
base input for exactly one output group. Seen alone, the base path is an
ordinary grouped convolution.

With `G = 1` the base path is the whole convolution and there is no
conditional path. The engine then works as a plain dense accelerator, which is
useful as a reference point.

An optional **channel shuffle** can be applied when results are written back.
Output channel `o = g*n + m` (group `g`, index `m`, `n = C_out/G`) is stored as
channel `m*G + g`. Each input group of the next layer then holds channels from
every output group of this one.

## The gates

**Activation-wise gate** (`cg_act_gate`). Batch normalisation of the partial
sum is folded into one integer threshold per output channel, computed by the
host as `thr = Delta*sqrt(Var) + E` in partial-sum units. The gate depends on
the network's activation function:

* ReLU: `d = (x >= thr_lo)`
* tanh/sigmoid (saturating activations): `d = (thr_lo <= x <= thr_hi)`.
  Activations outside the band would land in the flat tails anyway.

`x == thr` counts as passing, because the step function is 1 at zero.

**Channel-wise gate** (`cg_channel_gate`). Suppose that after the base pass
fewer than `tau_count` positions of an output channel passed the first gate.
Then the whole channel skips its conditional path, and its conditional weights
are never needed. `tau_count` is the host's `ceil(tau_c * h_out * w_out)` for a
per-layer fraction `tau_c`. Setting `tau_count = 0` turns this gate off.

## How a layer runs

`cg_accel` handles one output channel at a time. The `LANES` (default 16)
multiply-accumulate lanes of `cg_mac_array` each own one output position. All
lanes share the weight word of the current step and read their own input
word.

1. **Base pass.** The output positions are taken `LANES` at a time. For
   each tile, the lanes accumulate over `(C_in/G) * K * K` terms: the channels
   of the own group times the kernel window. Taps that fall in the zero padding
   are skipped per lane.
2. **Gate and provisional write.** The gate compares each lane's partial
   sum with the channel's threshold. Every position is written to the output
   buffer as `f(partial sum)` right away. Positions with `d = 1` are appended,
   together with their partial sum, to the compaction queue (`cg_compactor`).
   The decisions are counted for the channel-wise gate.
3. **Channel-wise decision.** After the last tile, the channel either
   keeps or drops its conditional path.
4. **Conditional pass.** The queue is drained `LANES` entries at a time,
   so every lane again holds an effective position and no lane idles on a
   gated-off one. Each lane is loaded with its stored partial sum and
   accumulates over the `(C_in - C_in/G) * K * K` remaining terms. It then
   overwrites its output word with `f(full sum)`.

The positions that took the conditional path never appear contiguous in the
output plane. This is why the queue carries each entry's position (`pix`,
`oy`, `ox`) as well as its partial sum.

### Timing

Every state of the sequencer takes a fixed number of cycles, except the
conditional write, which waits out output-bank collisions. A layer therefore
takes exactly

    cycles = 1 + sum over output channels of
               ( 3 + T * (B + 3) + [conditional] * (Q * (R + 3) + S) )

where `T = ceil(h_out*w_out / LANES)` base tiles, `B = (C_in/G)*K*K` base
terms, `R = (C_in - C_in/G)*K*K` conditional terms, and
`Q = ceil(effective / LANES)` conditional batches. "Conditional" means `G > 1`,
the channel was kept, and at least one position was effective. Each tile or
batch costs 3 extra cycles: one to load the lanes, one for the memory read
latency, and one to gate or write. `S` counts the output-bank stalls of the
conditional batches (see "Datapath and memories"). It is one cycle for each
write beyond the first that a batch sends to its busiest bank. The testbenches
check this count exactly.

The conditional work therefore shrinks in proportion to the number of gated-off
activations. Its overhead is the rounding up to whole batches, plus the bank
stalls. In
the full-size test (64→64 channels, 32×32, 3×3, `G = 8`), 29471 of 65536
activations were effective and 2 channels were dropped. The layer took
1,254,966 cycles, of which about 2,000 were bank stalls. A dense pass with
the same 16 lanes needs 2,359,296 MAC cycles.

### Where the cycles go on real layer shapes

The ideal time of a gated layer is its multiplications divided by the number
of multipliers. The engine loses time against that ideal in two ways:

* the 3 overhead cycles per tile or batch;
* the last conditional batch of each channel, which is only partly filled.

The second loss dominates when few positions per channel pass the gate. With
a strict threshold on a small output plane, an output channel may have only one
or two effective positions. It still pays for a full batch of
`(C_in - C_in/G)*K*K` cycles, with most lanes idle. Batches never mix output
channels, because all lanes share one weight word.

`tb_cg_workloads` shows this on one 3×3 convolution from each residual stage
of ResNet-18 on ImageNet. It uses `G = 8` and sets thresholds at two standard
deviations above each channel's mean partial sum. Times are in cycles on 16
lanes; dense means the same lanes with no gating.

| stage | dense | measured | ideal | effective |
|---|---|---|---|---|
| 64 ch, 56×56 | 7,225,344 | 1,100,251 (6.6×) | 1,046,210 (6.9×) | 4541 of 200704 |
| 128 ch, 28×28 | 7,225,344 | 1,135,981 (6.4×) | 1,047,123 (6.9×) | 2285 of 100352 |
| 256 ch, 14×14 | 7,667,712 | 1,484,165 (5.2×) | 1,047,438 (7.3×) | 1145 of 50176 |
| 512 ch, 7×7 | 9,437,184 | 2,841,687 (3.3×) | 1,059,660 (8.9×) | 621 of 25088 |
| total | 31,555,584 | 6,562,084 (4.8×) | 4,200,431 (7.5×) | |

The early stages run close to the ideal. In the last stage, about one position
per channel is effective, and the partly filled batches cost more than half of
the time. The data are random, so these fractions are not those of a trained
network. A trained network with a looser threshold keeps more positions per
channel, which narrows the gap.

## Datapath and memories

| unit | module | role |
|---|---|---|
| MAC lanes | `cg_mac_array` of `cg_pe` | 8×8-bit signed multiply, 32-bit accumulate; `load` sets the sum to 0 (base) or to the stored partial sum (conditional) |
| activation gate | `cg_act_gate` | one comparator pair per lane |
| channel gate | `cg_channel_gate` | popcount of the decisions plus one comparison |
| compaction queue | `cg_compactor` | circular queue taking up to `LANES` entries per cycle (prefix count of the decision mask) and giving out `LANES` per pop |
| output stage | `cg_act_fn` | ReLU (or a hard clip in bounded mode), arithmetic right shift by `out_shift`, saturation to 8 bits |
| shuffle | `cg_shuffle` | output channel index remap |
| buffers | `cg_mem` | synchronous memories: input map (`LANES` read ports), weights, thresholds, and each output bank |
| output banks | `cg_obuf_banked` | output map as `LANES` single-write-port banks, with per-bank arbitration of the lanes' writes |

The output map is interleaved over `LANES` banks: word `a` sits in bank
`a mod LANES`. Each bank has one write port. When several lanes address one
bank, the lowest-numbered lane writes first and the others retry in the next
cycle. A base tile writes `LANES` consecutive words, which fall in `LANES`
different banks, so it always finishes in one cycle. An assertion checks this.
The effective positions of a conditional batch are scattered, so two of them
can share a bank. The batch then stays in its write state for one extra cycle
per collision in its busiest bank. On the layers tabulated above this costs
well under 1 % of the run time.

Memory layouts are channel-major:

    input  [ci][iy][ix]      address (ci*h_in + iy)*w_in + ix
    weight [co][ci][ky][kx]  address ((co*c_in + ci)*k + ky)*k + kx
    output [ch][oy][ox]      address ch*h_out*w_out + oy*w_out + ox

In the output layout, `ch` is the shuffled index when shuffling is on.

Default sizes (parameters of `cg_accel`) are big enough for the 3×3 layers of
ResNet-18 on ImageNet:

| parameter | default | why |
|---|---|---|
| `LANES` | 16 | MAC lanes |
| `FM_DEPTH`, `OUT_DEPTH` | 262144 | 64×56×56 = 200704 words |
| `W_DEPTH` | 2359296 | 512×512×3×3 |
| `PIX_DEPTH` | 4096 | 56×56 = 3136 positions per channel |
| `MAX_COUT` | 1024 | threshold entries (MobileNet pointwise layers) |

## Using it

Configuration (`cg_pkg::layer_cfg_t`) has these fields:

* the layer shape: `c_in`, `c_out`, `h_in`, `w_in`, `h_out`, `w_out`, `k`, `stride`, `pad`;
* `log2_g`, giving `G = 2**log2_g`;
* `gate_mode` (`GATE_RELU` or `GATE_BOUNDED`);
* `shuffle_en`;
* `tau_count`;
* `out_shift`.

`G` is set per layer, so each layer or residual module of a network can use
its own group count and thresholds. `c_in` and `c_out` must be multiples of `G`, and the output plane must fit in
`PIX_DEPTH`. Assertions in `cg_accel` check both at `start`.

A run looks like this:

1. Write the input map through `fm_we/fm_waddr/fm_wdata`, the weights through
   `w_*`, and each output channel's `thr_lo`/`thr_hi` through `thr_*`.
2. Drive `cfg` and pulse `start`. `busy` stays high until `done` pulses.
3. Read the result through `out_raddr`; `out_rdata` follows one cycle later.
4. Read `stats` (`cg_stats_t`), which holds:
   * the cycle count;
   * base and conditional MAC cycles;
   * the number of effective activations and of activations that actually ran
     the conditional path;
   * skipped channels;
   * `weight_words`, the distinct weight words the layer needed. This is `W_p`
     for every channel plus `W_r` only for kept channels. It is the traffic a
     host streaming weights from DRAM would see.

The accelerator does not compute residual additions, pooling or the stem
layers' large planes. A host combines layers into a network.

## Verification

Each module has a self-checking testbench in `tb/`, and each one prints
`TB_RESULT checks=N failures=M`.

* `tb_cg_act_gate`, `tb_cg_channel_gate`, `tb_cg_mac_array`,
  `tb_cg_compactor`, `tb_cg_mem`, `tb_cg_obuf_banked`, `tb_cg_act_fn` and
  `tb_cg_shuffle` compare
  each unit with an independent software model, using random and edge-case
  stimulus.
* `tb_cg_accel` runs eight small layers through the whole accelerator (4 lanes,
  small buffers). Together they cover:
  * gating, the conditional pass and partly filled batches;
  * channels dropped and kept by the channel-wise gate;
  * shuffle, the bounded gate and `G = 1`;
  * stride 2, zero padding, 1×1 and 3×3 kernels;
  * output bank collisions in conditional batches;
  * a reset between layers.

  The testbench checks every output word, all statistics and the exact cycle
  count against a software model of the equations above. It also fails if any
  of these mechanisms never occurred.
* `tb_cg_accel_full` runs one CIFAR-10 ResNet-18-shaped layer (64→64, 32×32,
  3×3, `G = 8`, shuffle, `tau` = 5 %) on the accelerator with all default
  parameters. It takes a few seconds.
* `tb_cg_workloads` runs layer shapes of the evaluated networks with all
  default parameters, again checking every output word and cycle count. The
  layers are:
  * ResNet-18 on CIFAR-10, with `G = 8`, `T = 2.0` and with `G = 16`, `T = 3.0`;
  * VGG-16 and binary VGG-11 on CIFAR-10, with `G = 8`, `T = 1.0` (the binary
    layer uses ±1 features and weights);
  * the four ResNet-18 ImageNet stages tabulated above.

  Each output channel gets the threshold a trained network's merged gate would
  use: `thr = E[x] + T*sqrt(Var(x))` over that channel's partial sums. The test
  prints dense, measured and ideal times for each layer.

  It also sweeps the channel-wise gate on the CIFAR-10 ResNet-18 layer over
  `T` ∈ {1.5, 2.0} and `tau_c` ∈ {0, 0.05, 0.10, 0.20}, and reports how many
  fewer weight words the layer needed. This reduction is capped at `G`,
  because `W_p` is always read. With random data, every channel passes the gate
  at about the same rate, so all channels are kept or all are skipped together,
  and the reduction jumps from 1× to 8×. A trained network spreads its
  channels out and gives intermediate values. The whole test takes about a
  minute.

The shared model and host tasks are in `tb/cg_accel_tb_body.svh`. To run a
test with Verilator from the repository root:

    verilator --binary --timing --assert -Irtl -y rtl rtl/cg_pkg.sv \
        tb/tb_cg_accel.sv --top-module tb_cg_accel -Mdir obj
    ./obj/Vtb_cg_accel

Replace `tb_cg_accel` with any other testbench name. Every testbench has a
watchdog that reports a failure if the simulation hangs.

## Relation to the published scheme

These parts follow the published description:

* the split of input channels into a base and a conditional path by channel
  group, with output group `i` taking input group `i` as its base;
* the selection rule of Eq. 1;
* the two step-function gates, with batch normalisation merged into the
  threshold;
* the channel-wise gate and its equality rule;
* reusing the base-path partial sum instead of recomputing it;
* the idea that gating costs only comparators next to a dense MAC array;
* the ShuffleNet-style channel shuffle.

These are choices of this design:

* **Array organisation.** The published accelerator uses a TPU-like systolic
  array whose size and dataflow are not given. Here there is a single row of 16
  lanes with the weight broadcast to all lanes, working on one output channel
  at a time. Throughput figures are therefore not comparable with the
  published ones.
* **Sparse data movement.** The published design uses a custom data layout
  and memory banking, which are not described. Here a compaction queue packs
  the effective positions of one output channel at a time (the timing
  section shows what that costs on small planes). The output buffer is
  banked by low-order address interleaving, as described above. The input
  buffer is still an idealised memory in which each of the 16 read ports
  reaches every word. A silicon version would have to bank it too. Base tiles
  read mostly consecutive words, but a conditional batch reads 16 scattered
  positions.
* **Number formats.** 8-bit signed activations and weights, 32-bit sums,
  integer thresholds, and requantisation by an arithmetic shift with
  saturation. The published model is only described as quantized.
* **Activation function.** For saturating activations the output stage clips
  at the 8-bit limits. It does not evaluate tanh or sigmoid.
* **Host interface.** Write ports, a read port, the configuration struct and
  the statistics counters are all this design's own.
* **Layer coverage.** Not supported: depthwise convolutions (MobileNet),
  output planes above 4096 positions (the ImageNet stem), residual additions
  and pooling.

Training-time parts of the scheme are outside the hardware: the smooth gate
approximation, the two batch normalisations and knowledge distillation. At
inference they leave only the thresholds.
