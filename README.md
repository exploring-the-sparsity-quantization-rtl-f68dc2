# A hybrid dense/sparse accelerator for direct-coded spiking VGG9

A spiking neural network (SNN) that uses *direct coding* feeds the raw image
into its first layer at every timestep. It does not turn pixels into spike
trains first. That reaches good accuracy in very few timesteps (two here),
but the two halves of the network look very different:

* **The input layer** sees multi-bit pixels that are all non-zero. It is an
  ordinary dense convolution and is best done by a systolic array.
* **Every later layer** sees binary spike maps, and most of their bits are
  zero. Scanning those maps densely wastes most of the work. Here, each spike
  is an *event* that updates only the neurons it reaches.

This RTL implements an accelerator built on that split:

* one **dense core** for the input layer;
* one **sparse core** per later layer.

Each sparse core holds a number of **neural cores** (NCs) that is sized to
that layer's spike workload. The layers form a pipeline that runs at the
same time, each layer on its own core, and pass spike trains to each other
through on-chip **Spike RAMs**. Weights and biases are 4-bit integers (int4).
Membrane potentials use fixed point.

The network is VGG9:

```
64C3 - 112C3 - MP2 - 192C3 - 216C3 - MP2 - 480C3 - 504C3 - 560C3 - MP2 - 1064 - P
```

Here `XC3` is a 3x3 convolution with X filters, `MP2` is 2x2 max-pooling,
and `1064` and `P` are fully connected (FC) layers. `P` is an output
*population*: several output neurons vote for each class. The neurons are
leaky integrate-and-fire (LIF) neurons with leak β = 0.15 and threshold
θ = 0.5.

The defaults are the CIFAR-100 configuration:

* a 32x32x3 input image;
* T = 2 timesteps;
* P = 5000 output neurons;
* (1, 28, 12, 54, 16, 72, 70, 19, 4) cores per layer. The first entry is the
  dense core's single PE row; the other eight are NC counts.

## Layers and cores

| layer | core | in -> out channels | map | cores (default) | channels per NC (SLOTS) | pooling after |
|---|---|---|---|---|---|---|
| CONV_1_1 | dense core `u_dc` | 3 -> 64 | 32x32 | 1 PE row | - | - |
| CONV_1_2 | `u_conv1_2` | 64 -> 112 | 32x32 | 28 | 4 | yes |
| CONV_2_1 | `u_conv2_1` | 112 -> 192 | 16x16 | 12 | 16 | - |
| CONV_2_2 | `u_conv2_2` | 192 -> 216 | 16x16 | 54 | 4 | yes |
| CONV_3_1 | `u_conv3_1` | 216 -> 480 | 8x8 | 16 | 30 | - |
| CONV_3_2 | `u_conv3_2` | 480 -> 504 | 8x8 | 72 | 7 | - |
| CONV_3_3 | `u_conv3_3` | 504 -> 560 | 8x8 | 70 | 8 | yes |
| FC1 | `u_fc1` | 560x4x4 -> 1064 | - | 19 | 56 | - |
| FC2 | `u_fc2` | 1064 -> P | - | 4 | 1250 | - |

Each output channel count must divide evenly by its core count. This holds
for every configuration the design was sized for (see *Configurations*).

## Numbers: fixed point and the LIF step (`snn_pkg`, `lif_update`, `const_mult`)

All neuron arithmetic is fixed point:

* Membrane potentials are 24-bit signed values with 8 fractional bits (Q8).
  In Q8, θ = 0.5 is `128` and β = 0.15 is `38/256`.
* A stored int4 weight `w` stands for `w * 0.125`. It is *dequantised* to Q8
  as `w * 32`.
* Dequantisation and leak are multiplications by constants. `const_mult`
  builds each one from shifts and adds, with no hardware multiplier:
  `y = (x * C) >>> CFRAC`, with one shifted copy of `x` per set bit of `C`.

The same `lif_update` block serves both cores. For one neuron and one
timestep:

```
u      = stored + I + bias*32        // I: the input summed over all input channels
spike  = (u > 128)
u_r    = u - 128*spike               // reset by subtraction
stored = (u_r * 38) >>> 8            // leak, applied before storing
```

The leak is applied to the potential *after* the reset, and the result is
what the neuron carries into the next timestep. The next step therefore
computes `β(u - sθ) + I + b`. The usual LIF equation, `βu + I - sθ`, leaks
before it resets. Where the two differ, this design follows the description
of the hardware's activation unit.

Fixed point replaces the floating-point neuron arithmetic of the original
implementation. Its range is ±32768 neuron units, which no realistic input
reaches.

## Dense core: a 27-wide systolic array (`dense_core`)

The input layer has 3 input channels and a 3x3 filter, so each output pixel
is a 27-term dot product.

**PE array (`dc_pe_array`, `dc_pe`).** The core has `ROWS` rows of 27 PEs.
Each row holds the weights of one output channel, so the weights stay put
(weight-stationary).

* PE `k` holds tap `k = c*9 + ky*3 + kx`.
* Partial sums move one PE to the right per cycle. PE 0 adds to zero.
* Pixels move one row down per cycle.

**Image buffers (`dc_image_buffer`).** The image is held in flip-flops, one
buffer per input channel. For the output pixel `(row, col)` they present all
27 taps at once. A tap outside the image reads as zero (padding 1, so the
output map is the same size as the input).

**Staggering.** Tap `k` is delayed by `k` cycles, so each PE receives its
pixel in the same cycle as the partial sum that belongs to that pixel. One
output pixel then enters the array per cycle. Its sum leaves row `r` after
`27 + r` cycles.

**Control (`dc_control`).** The control walks through groups of `ROWS`
output channels. For each group:

1. **LOADW**: load the weights of the group's rows.
2. **FEED / DRAIN**, once per timestep: stream the 1024 output pixels, then
   let the pipeline empty.
3. **WRITE**: write the rows' spike trains to the Spike RAM.

The EN signal of row `r` is the feed-valid signal delayed by `26 + r`
cycles.

**Activation (`dc_activ`).** Each row has an activation unit that keeps one
map of membrane potentials. On every EN cycle it runs `lif_update` on one
pixel:

* `I = psum*32 >>> 8`;
* the stored potential reads as 0 in timestep 0 (the `rst` of the paper).

Timesteps loop *inside* channel groups. This way one map of state per row
is enough.

Latency for one image, with `G = 64/ROWS` groups:

```
1 + G * (1 + T * (1024 + 27 + 2*ROWS + 1))  cycles   (= 134 977 at the defaults)
```

`tb_dense_core` checks this count exactly.

## Spike RAMs: timestep-major spike trains (`spike_ram`)

* Each word of a Spike RAM is one whole spike map of one channel at one
  timestep.
* A layer with `N` channels uses `T*N` words. The train for timestep `t` and
  channel `ch` is at address `t*N + ch`.
* Reads are synchronous, one cycle.

Both kinds of core use this layout. The dense core therefore produces
exactly what the first sparse core reads.

## Sparse core: from spike trains to neuron updates (`sparse_core`)

This is the part of the design that needs the most care. A sparse core runs
one layer for one image. Its steps are controlled by `sc_control`.

1. **Clear.** Every NC writes zero to all of its membrane potentials, one
   word per cycle.
2. **Per timestep `t`, per input channel `c`:** fetch train `t*C_in + c`.
   The compression routine turns it into events. Address generation turns
   each event into neuron updates, and the NCs accumulate them. Compression
   of the next trains overlaps with the accumulation of earlier events: the
   Spike Events FIFO sits between them.
3. **Drain.** Wait until compression, the FIFO, address generation and every
   NC pipeline are empty.
4. **Activate.** Each NC sweeps one of its channels through `lif_update`
   (bias, threshold, reset, leak) and builds its spike train. The trains
   pass through 2x2 max-pooling if the layer has it. They are then written,
   one core per cycle, to output address `t*C_out + channel`. This repeats
   for every slot.

### Compression (`sc_compress`)

The compression routine turns a spike train into event addresses.

* The map is cut into `CHUNK`-bit chunks (16 by default).
* Each cycle a priority encoder offers the lowest set bit of the current
  chunk as an event (`chunk*CHUNK + bit`).
* When the event is accepted, that bit is cleared (*bit reset*) and the
  chunk goes back through the MUX.
* An empty chunk makes the MUX load the next one.

Cost: one cycle per spike plus one per chunk.

### Spike Events (`spike_events`)

* A register FIFO of depth 16.
* Back-pressure: compression only pushes when the FIFO is not full.
* Assertions check that it never overflows and never underflows.

### Address generation (`sc_addr_gen`)

Output channels are spread over the NCs round robin: slot `j` of NC `i` is
channel `i + N*j`.

**CONV layers.** An event `(ch, row, col)` costs `9*SLOTS` cycles. In each
cycle, all NCs receive one broadcast update for:

* slot `j`;
* the neuron `(row-ky+1, col-kx+1)`;
* the weight of tap `(ky, kx)` of input channel `ch`.

Neurons outside the map still take their cycle, with the valid bit low.
The cost per event is therefore data-independent: `F * C_out / N` with
`F = 9`. This is exactly the per-layer workload model the core counts were
chosen from.

**FC layers.** An event costs `SLOTS` cycles. The input index is
`ch*H*W + pix`.

### Neural core (`neural_core`)

An NC owns two memories:

* the membrane memory: `SLOTS` maps, slot-major;
* the weight memory: `SLOTS * C_in * taps` int4 words.

Accumulation is a two-stage pipeline, one neuron per cycle:

1. read the potential and the weight;
2. add the dequantised weight and write the sum back.

An update of the neuron that was written in the cycle before would read a
stale word. A one-deep **bypass** register forwards the fresh value to it.

The activation sweep writes the leaked potentials back. They carry over to
the next timestep.

### Max-pooling (`maxpool`)

For binary spikes, 2x2 max-pooling is an OR over each window.

### Cost

Per timestep, a CONV layer takes about:

```
9*SLOTS*spikes + C_in*(3 + HW/CHUNK) + SLOTS*(HW + 2) + N*SLOTS
```

The terms are, in order: accumulation, fetching and compression,
activation, and output writes. `tb_snn_hybrid_full` checks the first term
exactly, layer by layer.

## Memories and clock gating (`gated_ram`, `clk_gate`)

An NC works on one output channel at a time, so most of its stored weights
sit idle at any moment. `gated_ram` lowers the power of its memories:

* Each memory is split into two banks, `[0, HALF-1]` and `[HALF, DEPTH-1]`.
  The most significant address bit picks the bank for both reads and writes.
* Each bank's clock passes through an AND gate (`clk_gate`). The bank sees
  clock edges only in cycles when it is addressed.
* The gate's enable is registered on the falling clock edge. It therefore
  cannot change while the clock is high, and the gated clock has no glitch.

For an FPGA, the behavioural arrays map to BRAM, LUTRAM or URAM. For an ASIC
they would be SRAM macros. The RTL names no vendor primitives.

## Layer scheduling and image overlap (`snn_hybrid_top`)

Each Spike RAM has a *full* flag:

* Layer `k` starts when its input RAM is full, its output RAM is not, and
  the layer is not already running.
* When layer `k` finishes, it marks its output full and its input empty.

The image buffer acts as layer 0's input:

1. load an image through `img_*`;
2. pulse `start`;
3. after `img_ready` returns, load the next image.

When `out_valid` rises, read the population spikes through `out_re/out_raddr`
(address `t*P + neuron`, one cycle of latency), then pulse `out_ack`.

Different images are in different layers at the same time. Throughput is
therefore set by the slowest layer, which is why the core counts are chosen
to balance the layers. `layer_busy[8:0]` shows which layers are running.

### Loading weights

Weights are loaded through plain write ports:

* **Dense core:** `dcw_we/dcw_ch/dcw_data[27]/dcb_data` writes one output
  channel's 27 taps and its bias.
* **Sparse layers:** `sw_we` writes one int4 weight. The destination is
  layer `sw_layer` (1..8), core `sw_nc`, word
  `(slot*C_in + ch)*taps + tap`, where `taps` is 9 for CONV and `H*W` for
  FC.
* **Sparse biases:** `sb_we` writes one bias to slot `sb_slot` of that
  core.

## Departures from the published design

* **Fixed point.** Potentials use 24-bit Q8 instead of floating point. The
  weight scale `0.125` (`W_SCALE_Q8 = 32`) and the dense-core output scale
  (`DC_SCALE_Q8 = 32`) are this design's choices. A trained model must be
  quantised to them.
* **Receptive field.** The description says a spike at `(row, col)` reaches
  the neurons from `(row-3, col-3)` to `(row, col)`. That range holds 16
  neurons, while a 3x3 filter reaches 9. This design uses the 9 neurons
  `(row-1..row+1, col-1..col+1)`, with zero padding, so that it matches the
  dense convolution.
* **Leak order.** See the LIF step above.
* **Timesteps.** T = 2 comes from the direct-coding results. The
  architecture drawing shows more timestep slots (0..4). T is a parameter.
* **Bypass.** The accumulation bypass, the membrane clear sweep, the
  full/empty layer handshake and the weight-load ports are this design's
  own choices.
* **Chunk width.** `CHUNK = 16` is a choice; the published description leaves the chunk width open.
* **Loop order.** In the dense core, timesteps loop inside channel groups.
  In the sparse core, trains are fetched one at a time.
* **Not built:**
  * the decoding of the output population into a class, which is left to
    the host;
  * the full-precision (fp32) variant, which was only a comparison point;
  * rate-coded input (T = 25, binary first layer).

## Configurations

The defaults are the CIFAR-100 "perf²" configuration. Other configurations
are parameter overrides of `snn_hybrid_top`:

* **CIFAR-10 and SVHN** use `P = 1000`.
* **Lightweight ("LW") core counts:**
  * SVHN: (1, 7, 1, 8, 2, 4, 14, 1, 2);
  * CIFAR-10: (1, 8, 4, 18, 6, 6, 20, 2, 1);
  * CIFAR-100: (1, 7, 3, 12, 4, 18, 16, 4, 1).

Every layer of these divides evenly. The default hardware can also run the
P = 1000 networks as they are, using 1000 of its 5000 output neurons.

Memory at the defaults:

* about 17.3 M int4 weights. FC1 (560·16·1064 = 9.5 M) and FC2
  (1064·5000 = 5.3 M) dominate;
* Spike RAMs of `T*N` words each, for example 128 words of 1024 bits after
  the input layer.

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog. The
simulator is Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb rtl/snn_pkg.sv tb/<tb>.sv --top-module <tb>
./obj_dir/V<tb> +verilator+rand+reset+2
```

`+verilator+rand+reset+2` starts registers at random values. This catches
state that is read before it is reset.

| testbench | what it checks |
|---|---|
| `tb_const_mult`, `tb_lif_update` | constant multiply and LIF step against integer models, including the boundary `u == θ` |
| `tb_dc_pe`, `tb_dc_pe_array` | MAC; array outputs and their 27 + r latency against a dot-product model |
| `tb_dc_image_buffer` | all 27 taps with padding, for every pixel |
| `tb_dc_activ` | per-pixel state across timesteps, the first-timestep reset, the done pulse |
| `tb_dense_core` | spike trains for random images and weights, Spike RAM addresses, exact latency |
| `tb_spike_ram`, `tb_gated_ram` | read/write behaviour, bank selection, gated clocks |
| `tb_sc_compress` | event order and the spikes + chunks cycle cost, under back-pressure |
| `tb_spike_events` | FIFO order, full/empty, against a queue model |
| `tb_sc_addr_gen` | update sequence and the 9·SLOTS (FC: SLOTS) cycle cost |
| `tb_neural_core` | accumulation with back-to-back hits (bypass), clear, activation |
| `tb_maxpool` | 2x2 OR |
| `tb_sparse_core` | one CONV and one FC layer against a full model, including pooling |
| `tb_snn_hybrid_top` | end to end at reduced size (16x16x3 input, 4 channels per conv layer, FC 6, population 4, two images back to back). The output population of each image is compared with a layer-by-layer model of the whole network; the test counts two images in flight, Spike Events stalls, bypass hits, use of both clock-gated memory regions, skipped out-of-map updates and FC updates, and fails if any never happened |
| `tb_snn_hybrid_full` | one image at the default (full) size: input layer against the model, exact update counts per layer, output available; prints per-layer latency |

The reduced end-to-end test runs in well under a minute. The full-size test
uses a dark image with a small bright patch and negative sparse biases, so
the activity stays sparse; it simulates in about three minutes. A dense
random image would need about 20 M cycles in the deep layers. In one such
run (cycles per layer, 10 ns each at 100 MHz):

| layer | input spikes | update cycles (9·SLOTS or SLOTS per spike) | layer latency |
|---|---|---|---|
| CONV_1_1 (dense) | - | - | 134 977 |
| CONV_1_2 | 281 | 10 116 | 23 370 |
| CONV_2_1 | 619 | 89 136 | 101 901 |
| CONV_2_2 | 3 600 | 129 600 | 133 185 |
| CONV_3_1 | 2 816 | 760 320 | 767 207 |
| CONV_3_2 | 7 992 | 503 496 | 505 963 |
| CONV_3_3 | 30 848 | 2 221 056 | 2 223 831 |
| FC1 | 8 064 | 451 584 | 454 129 |
| FC2 | 994 | 1 242 500 | 1 261 267 |

The sparse-layer weights in that run are arbitrary, so the spike counts say
nothing about a trained network. The table shows how the latency of a sparse
layer follows its input spike count times `9*SLOTS`, which is what the core
counts must balance.
