# STI-SNN accelerator in SystemVerilog

This is a streaming accelerator for convolutional spiking neural networks (SNNs). It runs every layer in a **single timestep**. Each neuron is an integrate-and-fire unit that sees its input spikes once, sums the weights of the inputs that spiked, compares the sum with a threshold and fires at most once. With one timestep, a neuron's membrane potential never has to be kept beyond the computation of that one output. The design uses that fact in two ways:

* The convolution engine is **output stationary**. A potential is built up inside the processing elements (PEs), turned into a spike and then discarded. No potential memory is read or written.
* The layers form a **layer-wise pipeline**. Every layer has its own hardware. The layers work on different images at the same time. They pass spikes to each other as compact *spike events*.

The RTL follows the architecture of the STI-SNN paper (Wang et al., "STI-SNN: A 0.14 GOPS/W/PE Single-Timestep Inference FPGA-based SNN Accelerator with Algorithm and Hardware Co-Design"). It is configured for that paper's main CIFAR-10 network, SCNN5. The RTL is an independent implementation. Wherever the paper leaves a detail open, the choice made here is described below and in the opening comment of each file.

## The network that is built

SCNN5 is `64c3-p2-128c3-p2-256c3-p2-256c3-p2-512c3-p2-fc` on 32x32 inputs. Its first convolution turns the image into spikes. It runs outside the accelerator, so the accelerator receives a 32x32x64 binary spike map. `sti_snn_top` then chains these stages:

| stage | module | map in -> out | parallel factor P | PEs |
|---|---|---|---|---|
| input pool | `sti_pool` | 32x32x64 -> 16x16x64 | - | - |
| conv 1 | `sti_layer` | 16x16x64 -> 8x8x128 | 4 | 36 |
| conv 2 | `sti_layer` | 8x8x128 -> 4x4x256 | 4 | 36 |
| conv 3 | `sti_layer` | 4x4x256 -> 2x2x256 | 2 | 18 |
| conv 4 | `sti_layer` | 2x2x256 -> 1x1x512 | 1 | 9 |
| classifier | `sti_fc` | 512 -> 10 | - | - |

Each conv stage is a 3x3 convolution with stride 1 and one pixel of zero padding, followed by 2x2 pooling. In total there are 99 PEs. Every conv stage needs the same number of cycles per frame, about 524k. That balance is the reason for the factors 4,4,2,1.

Between the stages, FIFOs (`sti_fifo`) carry spike events. Every link uses a valid/ready handshake. A stage that cannot accept data holds back the one before it, and nothing is dropped.

## Spike vectors and the order of work

The unit of data is the **spike vector**: the C spike bits of all channels at one pixel. Maps travel in raster order as streams of spike vectors, one vector per transfer.

Within a layer, `sti_conv_layer` computes one output pixel at a time, completely:

```
for each output pixel (raster order)            <- receptive field held in the PE array
  for g in 0 .. CO/P-1                          <- one group of P output channels
    for ci in 0 .. CI-1                         <- one cycle each
      every lane p reads the K*K weights of (out = g*P+p, in = ci)
      every PE adds its weight if bit ci of its spike vector is 1
    last ci: PEs hand their sums to the neuron, which fires or not
  all groups done: the CO-bit output vector leaves the layer
```

There is no multiplier anywhere. A PE holds one spike vector, and `index = ci` picks one bit of it. That bit decides whether the broadcast weight is added.

### Line buffer and PE array

`sti_line_buffer` is a chain of K-1 FIFOs, each as deep as the padded input row. An incoming vector goes to the bottom PE row directly, and also to the tail of the chain. Each FIFO's output feeds the PE row above and the next FIFO. Each push therefore delivers one column of K vertically aligned vectors.

Each PE row shifts that column in from the right and passes its vectors one PE to the left. After K pushes into a row, the K x K PEs hold a complete receptive field. Every later push moves the window one pixel to the right.

While a receptive field is computed, `in_ready` is low and the layer takes no input. The first K-1 rows and K-1 columns of each row only fill the window and produce no output.

### Output-channel parallelism

The K x K PE array is replicated P times. These *lanes* share the spike vectors, but each lane has its own weight bank. Lane p computes output channels p, p+P, p+2P, and so on.

Each bank word holds the K*K int8 weights of one (output, input) channel pair. Byte `kh*K+kw` belongs to the PE at row kh and column kw. The word address is `g*CI + ci`.

A weight read is issued one cycle before its use. The read therefore overlaps accumulation and costs no time.

### The neuron

In `sti_spike_gen`, an adder tree sums the K*K PE outputs of a lane. The result is registered. It is then compared with the layer threshold: the neuron fires when the sum is at least `vth`.

The spike bits of the P lanes are collected by `sti_genspk` at positions `g*P+p`. Once the last group is in, the whole output vector is released.

### Modes

`MODE` is a parameter of the conv layer and of `sti_layer`:

* `MODE_STD`: standard convolution, as described above.
* `MODE_DW`: depthwise convolution, which requires CI = CO. A group takes one cycle. Lane p uses input channel g*P+p. A PE outputs its weight when its spike bit is set, and does not accumulate across channels.
* `MODE_PW`: pointwise convolution, which requires K = 1. It accumulates like `MODE_STD`. The neuron compares the single PE's sum in the cycle it arrives, and skips the adder-tree register.

The SCNN5 top uses only `MODE_STD`. The other two modes are the building blocks of a depthwise-separable (MobileNet-style) network. They are tested on single layers and in a whole vMobileNet chain (see Testbenches).

## Cycle budget

For one output pixel, a conv layer needs:

* `(CO/P) * CI` cycles in the standard and pointwise modes;
* `CO/P` cycles in depthwise mode;
* plus a drain of about 4-5 cycles.

The drain is paid once per pixel, not once per output channel. The adder tree and threshold compare for one group run while the PEs already accumulate the next group. A straightforward reading of the paper's latency formula (`Ho*Wo*Co*(Ci*(T_rw+T_pe)+T_pes)`) charges the adder-tree time for every output channel; this design hides it.

Measured intervals in the small layer tests match this. For example, CI=8, CO=8, P=2 gives 37 cycles per pixel: 32 for the groups and channels, plus 5 for the drain.

For a whole frame, a layer needs `Ho*Wo*((CO/P)*CI + drain)` cycles, plus a little for the rows that only fill the window. In the pipeline, the slowest stage sets the frame interval. For SCNN5 every conv stage comes to about 524k cycles. At 200 MHz that is about 2.6 ms per image, or about 380 images per second. The same network with P = 1 everywhere would take about 2.1M cycles per frame, or about 10.5 ms.

In the full-size simulation the measured frame interval is 525,636 cycles, which equals the estimate. The end-to-end testbenches check that the interval lies within 0.9 to 1.3 times the estimate.

## Spike events

Between stages a map is sent as **events**. An event is `{last, row, col, sv}`:

* `last`: 1 bit;
* `row`: clog2(H) bits;
* `col`: clog2(W) bits;
* `sv`: C bits, the spike vector.

`sti_event_encoder` drops every all-zero vector, so the number of transfers falls with the spike rate. The last pixel of the frame is always sent, with `last = 1`. This lets the receiver close the frame even when the tail of the map is silent. The flag is an addition of this design; the event format without it is the paper's.

`sti_event_decoder` rebuilds the dense raster stream. It emits zero vectors for every position before the next event's (row, col), then the event's own vector. An assertion checks that a `last` event carries the last position.

## Classifier

`sti_fc` receives the final 1x1x512 map. It keeps 10 class potentials, one per class.

It scans a non-zero input vector one channel per cycle. For every channel whose spike is 1, it adds that channel's 10 weights to the class potentials. An all-zero vector costs one cycle.

At the end of the frame it presents the potentials and the index of the largest one. On a tie, the lowest index wins. The paper names this layer only as "fc". The structure described here is this design's own.

## Host interface

All configuration goes through one write bus on `sti_snn_top` (`host_we`, `host_sel`, `host_bank`, `host_addr`, `host_data`), decoded by `sti_control`:

| `host_sel` | effect |
|---|---|
| 0..3 | weight word of conv stage 1..4: bank = lane, addr = `g*CI + ci`, data[71:0] = 9 int8 weights, byte `kh*3+kw` |
| 4 | fc weights: addr = input neuron `(row*W + col)*C + ch`, data[79:0] = 10 int8 weights, byte = class |
| 0xE | threshold of conv stage `addr` (0..3), data = 24-bit signed value |
| 0xF | data bit 0 = 1 starts streaming, and 0 stops it; `ev_in_ready` stays low while stopped |

Writes are registered once inside `sti_control`. `frames_in` and `frames_out` count frames in and results out. `busy` is set while frames are in flight. `layer_busy[3:0]` shows which conv stages are computing.

Input spikes enter on `ev_in_valid`, `ev_in_ready` and `ev_in_data`, in the event format, with H = W = 32 and C = 64. A result appears as a one-cycle `res_valid` pulse, together with `score[0..9]` and `cls`.

## Where this design departs from the paper, or fills it in

* **Single timestep only.** The paper also describes storing membrane potentials for runs with more than one timestep. It uses that setting only as a comparison. That potential buffer is not built. The neuron keeps `en_vmem`, `vmem_in` and `vmem_out` ports for it, which the conv layer ties off.
* **No bias.** The neuron equation of the paper has a bias term, but its neuron datapath has no bias input. The datapath was followed.
* **Number of line-buffer FIFOs.** The paper's figure shows K-1 FIFOs, while its text says K. K-1 are used here, because the bottom PE row takes the input directly.
* **Pooling.** 2x2 OR pooling is as in the paper. It is built from a one-row buffer instead of the paper's two register banks. Odd sizes are floored.
* **Widths and layouts that are not given:** the 24-bit potential and accumulator; the weight-word and bank layout; the event `last` flag; the host register map; FIFO depth 16; padding 1; stride 1. All of these are this design's choices.
* **Processor side.** DRAM, the processor system and its AXI interconnect are not part of the RTL. Their traffic arrives through the host bus and the event input.
* **Network shape.** The top's spatial chain is fixed to SCNN5: 32x32 input and five 2x2 halvings. Channel counts and parallel factors are parameters. The paper's two MNIST networks are built from the same stages in testbenches (see below), but the RTL has no top for them.
* **Pointwise throughput.** A pointwise stage runs on one PE per lane, one input channel per cycle. For vMobileNet this gives about 31 images per second at 200 MHz, where the paper reports 290. The paper does not say how its pointwise layers reach that rate.

## Resources at default size

* Weight storage: 2.1 MB of int8 weights, about 17.2 Mbit. Conv stages 1 to 4 hold 0.59, 2.36, 4.72 and 9.44 Mbit; the fc layer holds 41 kbit. The memories are plain arrays with synchronous read, so they map to block RAM.
* Logic: about 19k flip-flops. About 14k of them are the spike-vector registers inside the 99 PEs, each as wide as its layer's input channel count.

## Testbenches

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog. The reference models in `tb/snn_ref_pkg.sv` compute pooling, padded convolution potentials, depthwise potentials and firing directly from the spike maps. They share nothing with the RTL.

* `tb_sti_conv_layer` and `tb_sti_layer` run standard, depthwise and pointwise layers against the reference. They also check the per-pixel cycle count.
* `tb_sti_snn_top` runs three frames through a reduced network: 4 input channels, 8 channels per layer, P = 4,2,2,1. It checks the following:
  * every class potential and class of every frame;
  * the frame counters;
  * that input back-pressure occurred;
  * that two or more stages were busy at once;
  * that the event encoding dropped zero vectors;
  * that the frame interval matches the estimate.
* `tb_sti_snn_top_full` runs the same checks on the unmodified default SCNN5 configuration with two frames. It loads all 2.1 MB of weights through the host bus first.

Two more end-to-end tests run the paper's MNIST networks on chains of `sti_layer`, `sti_fifo`, `sti_event_decoder` and `sti_fc`. The chains are built by `tb/wl_net.sv`:

| test | network | stages | measured frame interval |
|---|---|---|---|
| `tb_wl_scnn3` | 28x28 16c3-32c3-p2-32c3-p2-fc, first layer off-chip | two standard stages, P = 4 and 2 (54 PEs) | 104k cycles, 0.52 ms |
| `tb_wl_vmobilenet` | 28x28 16c3 followed by four blocks (dwc3 + c1) and fc | four depthwise and four pointwise stages, P = 1 (40 PEs) | 6.4M cycles, 32 ms |

Both tests make the same checks as the top tests, except the frame counters, which belong to `sti_control`. vMobileNet keeps its maps at 28x28, because the network lists no pooling.

In the SCNN5 top tests, each layer's threshold is the median potential of that layer, so about half of the neurons fire. The MNIST tests use the median plus one. Inputs are random spike maps: 40% of the pixels carry spikes, and in those a quarter of the channels spike.

To simulate one testbench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/sti_pkg.sv tb/snn_ref_pkg.sv tb/tb_sti_layer.sv --top-module tb_sti_layer
./obj_dir/Vtb_sti_layer
```

Add `tb/snn_ref_pkg.sv` only for the testbenches that import it: the conv layer, layer, top and network tests. Everything a test needs is generated inside the test from a fixed seed. No data files are read.
