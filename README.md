# A continuous-flow CNN pipeline with rate-matched hardware sharing

In a fully unrolled ("data-flow") CNN accelerator each layer gets its own
arithmetic, and pixels stream from layer to layer without ever visiting
external memory. The weak point of the naive version is the **data rate**.
A 2x2 max pool with stride 2 hands only one value in four to the next layer.
A stride-3 pool hands on one in nine. If every downstream filter still gets
its own hardware, most of that hardware is idle most of the time.

This design keeps every unit busy. Throughout this document the data rate
`r` of a layer boundary means the number of values that cross it per clock
cycle. If a layer has `d` channels of `f x f` pixels and stride `s`, then

    r_out = r_in * d_out / (d_in * s^2)

Where `r > 1`, the layer is widened: `ceil(r)` parallel streams. Where the
rate per channel is low, several channels are **interleaved** onto one
stream. One unit then serves them one after another, and its weights are
switched every cycle from a small ROM indexed by a configuration counter.
Registers inside a unit become `C` deep, so that `C` interleaved channels
never see each other's state. The result is one image accepted about every
`f*f` cycles, about the rate of an unshared design, with roughly a sixth of
the multipliers.

The RTL implements the five-layer example network completely: the units,
the layer controllers, the interleaving FIFOs, and flow control between
the layers. It is synthesizable SystemVerilog, and it matches a
bit-accurate reference model.

## The example network

| Layer | Operation | Input | Units | Rate in -> out |
|---|---|---|---|---|
| C1 | 5x5 conv, pad 2, 1 -> 8 channels, ReLU | 24x24x1 | 8 KPUs | 1 -> 8 |
| P1 | 2x2 max, stride 2 | 24x24x8 | 8 PPUs | 8 -> 2 |
| C2-IL | 8 FIFOs, two 4:1 muxes | | | 2 |
| C2 | 5x5 conv, pad 2, 8 -> 16 channels, ReLU | 12x12x8 | 32 KPUs, C = 4 | 2 -> 4 |
| P2-IL | 16 FIFOs, four 4:1 muxes | | | 4 |
| P2 | 3x3 max, stride 3 | 12x12x16 | 4 PPUs, C = 4 | 4 -> 4/9 |
| F1 | fully connected 256 -> 10 | 4x4x16 | 2 FCUs, j = 4, h = 5 | |

KPU is a kernel processing unit (one k x k convolution), PPU a pooling
unit, FCU a fully-connected unit. `cnn_top` wires these together. It
has 40 KPUs (1000 multipliers) and 2 FCUs (8 multipliers), and it holds
5960 weights and 24 biases.

## Kernel processing unit (`kpu`)

The convolution is computed in **transposed form**. Each incoming sample
`x` is multiplied by all `k*k` weights at once. The products are added into
a chain of partial sums, and the chain carries them forward in time:

* Between two taps of the same kernel row sits a delay of one pixel.
* Between kernel rows sits a line buffer of `L = f - k + 1` pixels.

When the bottom-right tap receives its sample, the chain output is the
full window sum. One output therefore leaves per input cycle, with no
window register and no wide adder tree.

With `C` interleaved channels, the stream carries `C` samples per pixel
position. Every delay is then multiplied by `C`: a one-pixel delay becomes
`C` registers, and a line buffer becomes `C*L`. The weight set is chosen by
`cfg`. The partial sums of different channels travel in separate slots of
the same registers, and the accumulation across channels happens later,
in `chan_accum`.

**Padding with no extra buffer.** Samples that fall into the zero border
are never stored. Each kernel column `i` has a 2:1 mux that forces its
product input to zero whenever the current sample would wrap across the
left or right image edge for that column. Call the current column `c`.
Column `i` is enabled unless

    c >= f - p + i    or    c < p - k + i + 1

where `p = (k-1)/2` is the padding. Column `j` of the kernel uses select
`pad[j mod k]`. The top and bottom border is handled in time, by the layer
controller.

## Layer controller and zero slots (`conv_ctrl`)

For top and bottom padding, the controller inserts `Z = (f+1)*p` cycles of
zero input between two frames. Those zeros act as the bottom border of one
frame and also as the top border of the next. The sequence repeats as `Z`
zero slots, then `f*f` data slots.

The output for data pixel `o` appears `Z` slots after pixel `o` enters.
The controller keeps a second row/column counter for the output side and
flags the output valid when both indices are multiples of the stride.

Signals:

* `en`: advances every register of the layer. It is high when the layer
  is not stalled and either a zero slot or an input sample is available.
* `in_ready` is low during zero slots.
* Padding selects, `cfg`, and the `zero` flag are produced here as well.

For the example, C1 spends 576 + 50 = 626 cycles per frame. C2 spends
4 * (144 + 26) = 680 cycles, because each of its 4 configurations also
passes through the zero slots. **The padding slots therefore make C2 the
bottleneck:** the design accepts one image per 680 cycles, not 576.

## Channel accumulation and bias (`chan_accum`, `relu_requant`)

Each C2 filter has two KPUs (one per input stream). Each KPU outputs, in
turn, its window sums for the 4 channels interleaved on its stream.
`chan_accum` works in three steps:

1. It adds the KPU outputs.
2. It keeps a running sum over the configurations. The buffer is `I`
   words deep, where `I` is the number of filters interleaved on the
   output; in this network `I = 1`.
3. After the last configuration it adds the filter bias and issues the
   result.

`relu_requant` then shifts the wide sum right, applies ReLU and saturates
to 8 bits. The bias bytes are scaled to the output units, i.e. shifted left
by the same amount as the requantisation shift.

## Interleavers (`interleaver`, `sync_fifo`)

A pool layer writes all its channels in the same cycle, but at low rate
and in bursts. The interleaver has one first-word-fall-through FIFO per
channel and `NOUT` multiplexers. Each mux steps through `NIN/NOUT` FIFOs,
one per cycle; a step is taken only when all of that step's FIFOs hold a
word. The step number is the `cfg` of the next layer. Two orders exist:

* In front of C2 the order is contiguous: stream 0 takes channels 0-3 and
  stream 1 takes channels 4-7.
* In front of P2 the order is strided: stream `g` takes channels `g`,
  `g+4`, `g+8` and `g+12`. This matches how C2's 16 filters are laid out
  over the four P2 units.

## Pooling (`ppu`, `pool_layer`)

The PPU has the same delay structure as the KPU, but each adder is
replaced by a max operation. There are `k*k - 1` max units and no
multipliers. The pool layer counts rows and columns of arriving samples
and flags valid outputs: windows fully inside the image and aligned to
the stride.

## Fully connected unit (`fcu`, `fc_layer`)

F1 receives four 8-bit features per group, from the four P2 streams. An
FCU holds one group for `h = 5` cycles. In each of those cycles it
multiplies the group with the weights of a different output neuron and
adds the products with a 4-input adder tree. It then adds the result
into an `h`-deep circular accumulator.

After all 64 groups, the five neuron sums come out on five consecutive
cycles. Each FCU therefore uses `h*d_in/j = 320` weight configurations.
Two FCUs in lockstep produce scores 0-4 and 5-9.

An FCU takes a new group only every `h` cycles. A 32-entry FIFO in front
of F1 absorbs the bursts from P2.

## Flow control

The rate equations assume perfect streams. In practice the zero slots and
the bursty pool outputs break that assumption, so this design adds
back-pressure:

* Every FIFO raises `almost_full` a few words before it is full.
* C2-IL's flag stalls C1, which then drops `in_ready`.
* P2-IL's flag stalls C2.
* F1's FIFO flag stalls P2.

A stall freezes every register of the layer through its `en`. This makes
the pipeline safe for any input timing, and a FIFO can never overflow.
This back-pressure is not part of the published scheme; it is this
design's own addition.

## Number format and weights

* Activations and weights are signed 8-bit.
* Internal sums are as wide as the worst case needs: 8 + 8 bits plus
  log2 of the number of terms.
* The final scores are 12-bit signed, with no activation.
* Requantisation shifts are fixed per layer: 9 for C1, 10 for C2, 7 for
  F1.

No trained weights are included. Every weight and bias byte is the low
byte of an integer hash:

    h  = (idx+1) * 0x9E3779B1
    h ^= seed * 0x85EBCA6B
    h ^= h >> 15
    h *= 0x2C1B3C6D
    h ^= h >> 13
    byte = h[7:0]

It is evaluated at elaboration time in `cf_pkg::param_byte`. Real weights
drop in by replacing the body of `weight_rom`, or the function. The index
layout is as follows:

* KPU of filter `f`, input channel `ch`, tap `t`: `(f*d_in + ch)*k*k + t`.
* F1 neuron `n`, feature `i`: `n*256 + i`. The features are flattened in
  (row, column, channel) order.

## Timing summary

| Block | Latency |
|---|---|
| `kpu`, `ppu` | Output registered: 1 enabled cycle after the last window sample. |
| `conv_layer` | Output 2 cycles after the enabling cycle of the bottom-right sample. |
| `fcu` | Neuron results one cycle after the positions of the classic schedule: results at cycles 7..11 for h = 5, with a new group accepted every 5 cycles. |
| `cnn_top` | In steady state one frame per 680 cycles. The last of a frame's five score pulses leaves about 245 cycles after its last pixel was accepted (measured at the default sizes). |

## Departures and limits

* Outputs of the KPU, PPU and FCU are registered. Each adds one cycle
  against a purely combinational output stage.
* Back-pressure (almost-full stalls) is added, as described above.
* FIFO depths are 16 per channel in the interleavers and 32 groups for
  F1. They were chosen by simulation and not derived.
* The requantisation shifts, bias scaling and weight contents are
  placeholders; see "Number format and weights".
* Only `p = (k-1)/2` padding and input rates `r_in >= 1` per
  convolutional layer are supported.
* Not built:
  * a single KPU serving several filters at very low rate;
  * the serial-to-parallel aggregation stage in front of an FCU;
  * depthwise-separable and average-pooling layers, and residual merges.

  These are needed for larger networks such as MobileNet or ResNet, but
  not for this one.

## Files

| File | Contents |
|---|---|
| `rtl/cf_pkg.sv` | Widths and the weight hash. |
| `rtl/delay_line.sv` | Enabled shift register. |
| `rtl/weight_rom.sv` | Constant weight table. |
| `rtl/kpu.sv`, `rtl/ppu.sv`, `rtl/fcu.sv` | Processing units. |
| `rtl/conv_ctrl.sv`, `rtl/conv_layer.sv`, `rtl/chan_accum.sv`, `rtl/relu_requant.sv` | Convolutional layer. |
| `rtl/pool_layer.sv` | Pooling layer. |
| `rtl/sync_fifo.sv`, `rtl/interleaver.sv` | Interleaving. |
| `rtl/fc_layer.sv` | Fully connected layer. |
| `rtl/cnn_top.sv` | The network. |
| `tb/tb_<block>.sv` | Self-checking testbenches, one per block. |
| `tb/tb_ref_pkg.sv`, `tb/tb_cnn_ref_pkg.sv` | Independent reference models: the hash and requantisation, and the whole network computed directly from the layer definitions. |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
For example:

    verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_kpu \
        rtl/cf_pkg.sv rtl/delay_line.sv rtl/weight_rom.sv rtl/kpu.sv \
        tb/tb_ref_pkg.sv tb/tb_kpu.sv && obj_dir/Vtb_kpu

The network tests are:

* `tb_cnn_top` uses small FIFOs, to force many stalls.
* `tb_cnn_top_full` runs at the default sizes. It also checks that the
  frame spacing stays at most 700 cycles.
* `tb_conv_workload` builds a stand-alone 28x28 layer with a 7x7 kernel,
  padding 3, and 8 -> 16 channels. It runs at input rates 2 (32 KPUs) and
  1 (16 KPUs). It checks every output, and checks that a frame takes
  exactly `C*(f*f + (f+1)*p)` cycles. Its build takes several minutes,
  mostly in the C++ compiler.

Both compare all ten scores of several random images with the reference
model. Each takes a few minutes to build and run.
