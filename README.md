# PointNet event reconstruction engine for a liquid-scintillator detector

KamLAND-Zen sees each physics event as flashes of light on 2,126 photomultiplier tubes
(1,879 inner, 247 outer). Every tube reports two numbers, the time the light arrived and
the charge it collected. Together with the tube's position (x, y, z), one event is a
cloud of 2,126 five-value points. Reconstruction turns that cloud into the event's vertex
(x, y, z) and its energy. This is normally done by an offline fit, so results appear only
about a day after the data are taken.

A PointNet network does the same mapping in one forward pass, and it is invariant to the
order of the points. It applies a small shared perceptron to every point, averages the
per-point features over the whole cloud, and regresses the result with a few dense
layers. This repository is synthesizable SystemVerilog for such an engine. It implements
the quantized network of the published FPGA demonstration (*Real-time Position
Reconstruction for the KamLAND-Zen Experiment using Hardware-AI Co-design*, Migala, Ku,
Li and Li). That demonstration built its accelerator with an external generator
framework, and the publication does not describe that accelerator's internals. The
network, its sizes and its number formats here are the publication's. The streaming
micro-architecture that computes them is this design's own, kept as simple as possible.

## The network

| stage | operation | size | activation after it |
|---|---|---|---|
| formatter | add the trigger label, order the features | 5 -> 6 per point | – |
| conv1 | 1x1 convolution (the same dense layer applied to each point) | 6 -> 64 | ReLU |
| conv2 | 1x1 convolution | 64 -> 64 | ReLU |
| conv3 | 1x1 convolution | 64 -> 512 | ReLU |
| pool | global average over the 2,126 points | 512 | none |
| dense1 | fully connected | 512 -> 256 | ReLU with slope 1/8 below zero |
| dense2 | fully connected | 256 -> 64 | ReLU with slope 1/8 below zero |
| dense3 | fully connected | 64 -> 6 | none |

The trigger label is 0 when a tube's time and charge are both exactly zero, meaning the
tube saw no light. The features enter the network in the order
x, y, z, label, time, charge. Of the six outputs, the first four are taken to be
x, y, z and energy. The other two are unused. The deployed model has six outputs, while
the model's mathematical description has four; the RTL follows the deployed model.
Batch normalisation, which the convolution layers of the deployed model carry in their
name, is assumed folded into their kernels and biases before loading. Dropout exists only
in training.

There are 185,088 kernels (6·64 + 64·64 + 64·512 + 512·256 + 256·64 + 64·6) and 966
biases. One event takes 79.3 million multiply-accumulates, 99.8 % of them in the three
pointwise layers.

## Number formats and the exact arithmetic

Everything is two's-complement fixed point with no integer bits. This matches the
deployed model (8-bit inputs, 8-bit kernels, 16-bit biases, zero integer bits).

| quantity | width | fraction bits | range |
|---|---|---|---|
| activation, input feature | 8 | 7 | −1 … 127/128 |
| kernel | 8 | 7 | −1 … 127/128 |
| bias | 16 | 15 | −1 … 1 − 2⁻¹⁵ |
| accumulator | 32 | 15 | |
| final output | 16 | 7 | −256 … 256 − 2⁻⁷ |

For output neuron *o* of any layer, in integer units:

```
acc  = b[o] + 2 * Σ_i x[i] * w[o][i]                  (product 2^-14 grid aligned to bias 2^-15 grid)
a    = ReLU:   max(acc, 0)
       leaky:  acc >= 0 ? acc : floor(acc / 8)
       none:   acc
y    = clamp(floor(a / 256), -2^(W-1), 2^(W-1) - 1)    (W = 8, or 16 for dense3)
```

The average pool computes `trunc(Σ_p x[p] / 2126)`, rounded toward zero. The hardware
multiplies the magnitude by `ceil(2^S / N)` with `S = 2·ceil(log2 N) + 8` (32 for
N = 2126) and shifts right by S. For any sum of N 8-bit values this gives exactly the
quotient, because `|sum|·N < 2^S`.

Raw readouts must already be scaled into 8-bit Q0.7 before they reach the engine. The
label "1" is coded as 127, the nearest value to 1.0. The publication states neither
point. Truncation and saturation are also this design's choices. With 8-bit operands, a
64-input final layer can never exceed 16 bits, so the outputs are never clipped.

`tb/pointnet_ref_pkg.sv` implements exactly these formulas with integer division. Every
testbench compares the RTL against it bit for bit.

## The layer engine (`xbundle_layer`)

All six layers are instances of one module. A 1x1 convolution over a point cloud is a
dense layer applied to each point in turn, so the pointwise layers see one input vector
per point, and the dense layers see one vector per event.

* **Input.** Elements arrive one per beat over a valid/ready stream and fill one half of a
  ping-pong buffer. While the engine works on one half, the producer fills the other.
  `in_ready` falls only when both halves hold vectors that have not been processed.
* **Compute.** The N_OUT neurons are computed in groups of `LANES`. In each cycle one input
  element is broadcast to the lanes. Each lane reads its kernel from its own bank:
  neuron *o* lives in bank `o % LANES`, at word `(o / LANES)·N_IN + i`. The read is
  registered, as in a block RAM, so a group takes `N_IN` issue cycles and one drain cycle.
  Each accumulator is preset to its neuron's bias.
* **Output.** The lanes' results pass through `xactivation` and leave one per beat.
  `out_last` marks the last neuron of the vector. A consumer that is not ready stalls the
  engine, which holds the offered value.

Timing without back-pressure: a vector occupies the engine for
`1 + (N_OUT/LANES)·(N_IN + 1 + LANES)` cycles. The same number is the latency from its
last input element to its last output, when the engine was idle before.

## Pooling and the event pipeline (`global_avg_pool`, `pointnet_top`)

The stages are joined by one-element valid/ready streams:

```
pt_* --> point_formatter --> conv1 --> conv2 --> conv3 --> global_avg_pool --> dense1 --> dense2 --> dense3 --> collector --> res_*
```

The pool receives conv3's 512 outputs of each point in channel order. It keeps one
20-bit running sum per channel. The first point of an event overwrites the sums, so no
clearing pass is needed. After the 2,126th point it emits the 512 averages and takes no
input while doing so. The dense layers of one event then run while the points of the
next event already flow through the pointwise layers. The collector gathers dense3's
six outputs into one `res_data` beat.

Throughput is set by conv3: `1 + 512·66 = 33,793` cycles per point with one lane, or
71.84 million cycles for an event. About 150,000 cycles of pool output and dense layers
follow. The full-size simulation measures 71,997,673 cycles from the first readout to the
result. The demonstration reports 436 ms per event but no clock frequency. This engine
would match that figure at about 165 MHz. `LANES` trades multipliers for time: the
pointwise and dense layers scale nearly as 1/LANES. The final layer always uses one lane.

## Interfaces

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (control state only, memories are not cleared) |
| `cfg_we` | in | 1 | write one kernel or bias |
| `cfg_layer` | in | 3 | 0..5 = conv1, conv2, conv3, dense1, dense2, dense3 (`layer_e`) |
| `cfg_bias` | in | 1 | 1: write bias `[cfg_row]`; 0: write kernel `[cfg_row][cfg_col]` |
| `cfg_row`, `cfg_col` | in | 10 | output neuron, input element |
| `cfg_wdata` | in | 16 | kernel in bits 7:0, or 16-bit bias |
| `pt_valid`, `pt_ready`, `pt_data` | in/out/in | 1/1/40 | one readout per beat: `pmt_point_t` {x, y, z, t, q}, 8 bits each, x at the top |
| `res_valid`, `res_ready`, `res_data` | out/in/out | 1/1/6×16 | the six outputs of an event, element 0 in the low bits |

Load the weights while no event is in flight; the port is not guarded. An event is
exactly `N_PTS` readouts. Events follow each other without any separator.

## Where this departs from the publication

* The accelerator actually deployed was generated by an external framework, and its
  structure is not published. The sequential lane engine here computes the same network
  but is not that accelerator, and its speed is not a claim about it.
* The trigger label is computed in hardware. The publication adds it in data
  preprocessing.
* Six outputs (deployed model) rather than four (model description); see above.
* The better-scoring quantization found in the publication's search (12 fraction and 8
  integer bits) could not be deployed there. This RTL implements the deployed 8-bit,
  zero-integer-bit variant.
* Rounding, saturation, the label value, input scaling, the interfaces, the weight port
  and the reset are not specified in the publication and are choices of this design.
* The host (board processor, DMA, batching of 16 events for the latency measurement) is
  outside this RTL. Its connections are the `cfg_*`, `pt_*` and `res_*` ports.

## Files

| file | content |
|---|---|
| `rtl/pointnet_pkg.sv` | sizes, formats, `act_e`, `layer_e`, `pmt_point_t` |
| `rtl/point_formatter.sv` | trigger label, feature order, serialisation |
| `rtl/xactivation.sv` | activation, shift and saturation |
| `rtl/xbundle_layer.sv` | layer engine (ping-pong buffer, lanes, weight banks) |
| `rtl/global_avg_pool.sv` | per-channel sums and exact division |
| `rtl/pointnet_top.sv` | the whole engine |
| `tb/pointnet_ref_pkg.sv` | bit-exact reference arithmetic |
| `tb/tb_*.sv`, `tb/*_harness.sv` | self-checking testbenches |

## Verification

Each testbench drives random data with random gaps and random back-pressure. It compares
every output with the reference package, checks the cycle counts given above, stops
itself with a watchdog, and prints `TB_RESULT checks=N failures=M`.

* `tb_xactivation` – 20,000 random and directed accumulators through all activations and both output widths.
* `tb_xbundle_layer` – three configurations (1, 2 and 4 lanes; ReLU, leaky and linear; 8- and 16-bit outputs), plus the latency formula.
* `tb_global_avg_pool` – small pools over several events, and one with the full 2,126 points.
* `tb_point_formatter` – label cases, feature order, and one readout every six cycles.
* `tb_pointnet_top` – the whole engine at reduced sizes (4 points, layers 4/4/8/6/4/6, 2 lanes), a batch of 16 events back to back. It requires that input stalls, result stalls, dark tubes, ReLU clipping, the leaky branch, saturation and overlapping events all occurred.
* `tb_pointnet_full` – one complete event at the default sizes. It loads all 185,088 kernels, runs 2,126 readouts, compares the six outputs, and checks the event latency window. It takes about one minute in Verilator.

The kernels are random, not trained, so the tests prove the arithmetic and the dataflow,
not the reconstruction accuracy.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/pointnet_pkg.sv tb/pointnet_ref_pkg.sv tb/tb_pointnet_top.sv --top tb_pointnet_top
./obj_dir/Vtb_pointnet_top
```

Replace `tb_pointnet_top` with any other testbench name. The `-I` paths let Verilator find
each module in the file of the same name.

To change the network size, override the `pointnet_top` parameters (`N_PTS`, `NC1`–`NC3`,
`ND1`, `ND2`, `NOUT`, `LANES`). `LANES` must divide every layer width except the last.
To change the number formats, override the `X_*`, `W_*`, `B_*`, `Y_*` parameters of
`xbundle_layer`; the shift and the bias alignment follow from the fraction bits.
