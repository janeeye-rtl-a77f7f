# JaneEye: an 8×8 MAC-array accelerator for event-based pupil tracking

An event camera reports brightness changes pixel by pixel rather than full
images. If you collect its events into small frames (80×60 here, one frame
per time window or per fixed number of events), a very small recurrent CNN
can find the pupil centre in each frame. That network is three convolutions,
a gated MLP, a "ConvJANET" recurrent layer (a ConvLSTM that keeps only the
forget gate), global max pooling and a 2-output fully connected layer. It has
about 17.6 K parameters and about 10.7 MFLOP per frame. To keep up with rapid
eye movements the frame rate has to reach the kHz range, so the accelerator
is built to do the bulk of that work, the multiply-accumulates, in a fraction
of a millisecond and at a few tens of milliwatts.

This RTL implements that accelerator core:

* a 64-PE multiply-accumulate array, organised as 8 output tiles of 8 PEs;
* an adder tree per tile that also adds the bias;
* a four-function activation core: bypass, ReLU, HardSigmoid and HardTanh;
* three SRAMs: 32 KB of activations, 64 KB of weights and 4 KB of biases;
* a data dispatcher that hides the SRAMs' 8-cycle read latency;
* a 12-state controller that runs a program of layers.

Weights are 8-bit Q1.7 and activations 16-bit Q5.11.

The organisation, the bus widths, the number formats, the memory sizes, the
latencies and the PE datapath follow a published description of the chip.
Everything that description leaves open is this design's own. This includes
the layer descriptor, the memory layouts, the command set between controller
and dispatcher, the flow control, the pipelining and the state list. The
departures are listed in the last sections.

## What one layer is

The array only does one thing. It computes a K×K convolution (K = 1…7) with
a stride (1…3) and zero padding, adds a bias, and applies one of the four
activation functions. A 1×1 convolution is K = 1. The fully connected layer
is K = 1 on a 1×1 feature map whose "channels" are the input vector.
Channels are handled in **groups of 8**: one activation word holds 8
channels of one pixel.

A layer is described by a `layer_cfg_t` (in `janeeye_pkg`):

| field | meaning |
|---|---|
| `k`, `stride`, `pad` | kernel size, stride, zero padding on every side |
| `in_h`, `in_w`, `out_h`, `out_w` | input and output map size (≤ 255) |
| `n_ig`, `n_og` | input and output channel groups of 8 (1…15) |
| `func` | `AF_BYPASS`, `AF_RELU`, `AF_HSIG`, `AF_HTANH` |
| `in_base`, `out_base` | word addresses in the activation SRAM |
| `w_base`, `b_base` | word addresses in the weight and bias SRAMs |

A layer runs as `n_og` **passes**, one per group of 8 output channels.
Output tile *t* produces output channel `8·og + t`. Within a pass, every
output pixel takes **S = n_ig·K·K steps**, one per input group and kernel
tap. Each step broadcasts one 128-bit activation word: lane *k* goes to PE *k*
of every tile. It also applies one 8-bit weight to each of the 64 PEs. After
the last step of a pixel, each PE holds the dot product for one input
channel lane. The tile's adder tree sums the 8 lanes and the bias.

## Arithmetic of one output value

For output channel *t* and input lane *k* of one pixel:

    psum[t][k]  = Σ over steps  w[t][k] (Q1.7) × a[k] (Q5.11)      32-bit, 18 fraction bits
    pe_out[t][k] = round_half_even(psum[t][k] / 2^7), saturated to 16 bits   (Q5.11)
    y[t]        = sat16( Σ_k pe_out[t][k] + bias[t] )
    out[t]      = f(y[t])

Rounding happens **per PE, before the adder tree**, because the chip's
16-bit rounding unit sits inside each PE. A result therefore differs slightly
from rounding the full 8-lane sum once. The activation functions, in Q5.11
(1.0 = 2048), are:

* HardSigmoid: 0 below −4, 1 above +4, otherwise `(x >>> 3) + 1024`;
* HardTanh: −1 below −2, +1 above +2, otherwise `x >>> 1`;
* ReLU: `max(x, 0)`.

The shifts round toward −∞.

## The two dataflows

Each PE has a 9-entry weight register. A 2:1 mux picks the multiplier's
weight, either from that register or straight from the weight bus.

* **Weight-stationary (WS)** is used when a pass needs no more than 9 steps
  (S ≤ 9), for example a 3×3 layer with one input group or a 1×1 layer
  with up to 9 groups. Before the pass, the dispatcher writes weight word *s*
  into register entry *s* of all 64 PEs (S SRAM reads). The pass then reads
  only activations, and every pixel reuses the same registers.
* **Output-stationary (OS)** is used when S > 9, for example 7×7 layers or
  3×3 layers over several input groups. A weight word is read for every step
  and streams past the register. Only the partial sum stays in the PE.

The controller chooses the mode per layer from S. When the mode differs from
the previous layer's in the same program, it spends 2 cycles in a flush state.
The first layer of a program never flushes. The array is already empty at a
layer boundary, so the flush costs only those 2 cycles.

## Memory layout

| memory | word | word address |
|---|---|---|
| activation, 2048 × 128 bit | 8 channels of one pixel, channel `8g+k` in bits `[16k+15:16k]` | `base + (y·w + x)·n_groups + g` |
| weight, 1024 × 512 bit | the 64 weights of one step | `w_base + og·S + s`, with `s = (g·K + ky)·K + kx` |
| bias, 256 × 128 bit | biases of output channels `8og…8og+7`, channel `8og+t` in bits `[16t+15:16t]` | `b_base + og` |

In a weight word, the weight from input channel `8g+k` to output channel
`8og+t` sits at bits `[64t+8k+7 : 64t+8k]`. Input channels that do not exist
(for example channels 3…7 of a 3-channel frame) are zero words or zero
weights. A depthwise convolution is expressed the same way, with the weights
off the diagonal set to zero. The zero-skipping logic then avoids most of
that work.

## The data dispatcher: keeping the array fed

All three SRAMs answer a read 8 cycles after the request. The dispatcher
handles this as follows:

1. **Issue.** Step counters (group, ky, kx) and a pixel scanner walk the
   output map in **8×8 blocks**. Blocks go left to right, then top to bottom;
   inside a block, pixels go row by row. For each step, the dispatcher
   computes the input coordinate `(oy·stride + ky − pad, ox·stride + kx − pad)`.
   If that coordinate is outside the map, the step is marked as padding and
   no read is issued. Otherwise it reads the activation word, plus the weight
   word in OS mode. A tag carrying padding/first/last/register index travels
   through an 8-stage delay line beside the read.
2. **Buffer.** Returning data and tags go into a 16-entry activation FIFO.
   Weight words go into a 16-entry weight FIFO. A credit counter allows at
   most 16 steps between issue and consumption, so the FIFOs can never
   overflow.
3. **Consume.** Whenever the head of the activation FIFO is present (and, in
   OS mode, the head of the weight FIFO), both are popped. They drive one MAC
   step of all 64 PEs.

The 16 credits exceed the 8-cycle latency. So after the first 8 or so cycles
of a pass, the array gets one step every cycle. Reads for the next pixel are
issued while the current pixel is being accumulated. The array only waits
(`ev_stall`) at the start of a pass.

Results come back from the activation core in issue order. The dispatcher
writes them to `out_base + (oy·out_w + ox)·n_og + og`. A second pixel scanner
runs in lock-step with the write-backs to produce those addresses.

## Timing

| path | latency |
|---|---|
| SRAM read | 8 cycles |
| last MAC step → PE result | 1 cycle |
| adder tree | 3 cycles |
| activation core | 2 cycles |
| pass start → first MAC step | about 10 cycles (SRAM 8 + FIFO) |

A pass of P output pixels takes about `P·S + 20` cycles. A WS pass adds
about S + 9 cycles for the weight-register load, and a bias load adds about
10 cycles. The end-to-end test, a 5-layer network with 11,234 MAC steps,
runs in 11,559 cycles, so 97% of the cycles carry a MAC step. A MAC step
keeps all 64 PEs busy only when both the input and the output channel
counts are multiples of 8.

The network test runs one frame of a JaneEye-Net-shaped network on a
24×16 input: 10 convolution and FC layers, in four layer programs. It
takes 56,666 busy cycles, and 56,065 of them are MAC steps (98%). Only the
single-pixel FC layer is dominated by the fixed overhead (60 cycles).

For scale: 10.7 MFLOP is about 5.35 M MACs, counting one MAC as two FLOPs.
On 64 PEs that is about 84 K cycles, or 0.21 ms at 400 MHz. This fits in
the 0.5 ms frame time of a 2000 frames/s rate.

## The controller

`top_controller` holds up to 16 layer descriptors, written over `cfg_we`
while the core is idle. On `start` it runs `n_layers` of them. It has 12
states:

| state | does |
|---|---|
| IDLE | waits for `start` |
| CFG | checks the descriptor (a zero kernel, stride, size or group count goes to ERROR) and picks WS or OS |
| FLUSH | 2 cycles, only when the mode changes |
| BIAS | tells the dispatcher to load the bias word of the current output group; waits for it to finish |
| WLOAD | WS only: the dispatcher fills the PE weight registers |
| PASS | the dispatcher computes every pixel of the current output group |
| NEXT_OG | goes to the next output group, or moves on |
| NEXT_LAYER | goes to the next layer, or moves on |
| READOUT | reads the first word of the last layer's output |
| XY_OUT | puts lanes 0 and 1 of that word on `pupil_x` and `pupil_y` |
| DONE | pulses `done` |
| ERROR | holds `error` until the next `start` |

Each BIAS, WLOAD, PASS and READOUT state issues a one-cycle `cmd_valid` and
waits for the dispatcher's `cmd_done`.

## Using the core

1. With the core idle, write the input frame into the activation SRAM
   (`host_act_*`), the weights (`host_w_*`) and the biases (`host_b_*`).
2. Write the layer table (`cfg_we`, `cfg_addr`, `cfg_data`).
3. Set `n_layers` and pulse `start`. `busy` stays high while the program
   runs.
4. At the end, `xy_valid` comes with `pupil_x` and `pupil_y` (Q5.11), then
   `done` pulses.

The `perf_*` outputs count, for the last run, all of the following:

* busy cycles;
* MAC steps;
* PE operations skipped because the activation was zero;
* stall cycles;
* mode switches;
* WS and OS layers.

While the core is busy, the dispatcher owns the activation SRAM's write port.

## What is not in this RTL

Parts of the network are not run by this hardware:

* the element-wise product of the gated MLP;
* the ConvJANET state update `c = f·c + (1−f)·c̃`;
* global max pooling.

The chip description names no unit that performs these, and the activation
core has only the four functions above. The core can run the convolutions,
the 1×1 convolutions, the gate pre-activations (through HardSigmoid and
HardTanh) and the FC layer. The host, or added hardware, must do the
element-wise steps between layer programs.

Also not modelled:

* The event-to-frame preprocessing. It happens before the frame reaches the
  accelerator.
* The I/O pads and how the chip is loaded. Host write ports stand in for
  the input and weight paths.
* Clocking and power.
* The SRAMs themselves. They are plain arrays with an 8-cycle read pipeline,
  not the foundry macros.

## Departures from the chip description

* **7×7 layers run output-stationary.** The description says convolutions
  are weight-stationary, with weights held for 49 cycles for a 7×7 kernel.
  It also gives the PE a 9 × 8-bit weight register, which cannot hold 49
  taps. This design follows the register size: any layer with more than 9
  steps per pixel streams its weights.
* **Fully connected layer.** The description maps it "row-stationary". Here
  it is a 1×1 convolution on a 1×1 map, 8 outputs per pass across the tiles.
* **No separate tile buffer.** The description mentions a 4 KB buffer for
  8×8×8 input tiles, and a prefetch that starts at a fixed cycle (48 of 64,
  or 376 of 392). Here the dispatcher's FIFOs prefetch continuously and the
  SRAM acts as the buffer. Pixels are still visited in 8×8 blocks.
* **Whole-frame storage.** The activation SRAM holds 2048 words of 8
  channels. One 80×60 map alone needs 4800 words, so a full-size frame
  cannot be held as one map in this layout. The description implies the
  feature maps are tiled in from outside, but does not say how. The tests
  use frames of 16×12 (end-to-end test) and 24×16 (network test).
* **Cycles per tile.** The description quotes 64 cycles per 8×8×8 tile for
  3×3 layers and 392 (8 × 49) for 7×7 layers, but does not say how the
  64 PEs reach that. Here the 64 PEs compute 8 input lanes × 8 output
  channels of one pixel per cycle. One pixel takes S cycles, so an 8×8
  tile takes 64·S cycles: 576 for a 3×3 layer with one input group, 3136
  for 7×7. The total work per frame is the same MAC count. The frame-rate
  estimate above is based on it.
* **Memory bandwidth.** The description quotes 3.2 GB/s in total at
  400 MHz, which is 8 bytes per cycle. The buses it draws are 128, 512 and
  128 bits wide. This design follows the drawn widths: each SRAM can return
  one full word per cycle.
* **Zero skipping** holds the PE's psum register when the activation is zero.
  This saves the same MAC operations but does not change the cycle count,
  as in the description.
* **Saturation.** Overflow saturates in the PE rounding and in the adder
  tree. The description does not say what happens on overflow.

## Files

| file | contents |
|---|---|
| `rtl/janeeye_pkg.sv` | widths, sizes, enums, `layer_cfg_t`, the rounding function |
| `rtl/pe.sv` | one PE |
| `rtl/adder_tree.sv` | 8-input + bias adder tree |
| `rtl/output_tile.sv` | 8 PEs + adder tree |
| `rtl/pe_array.sv` | 8 output tiles |
| `rtl/activation_core.sv` | 8-lane activation functions |
| `rtl/sram_1r1w.sv` | SRAM model with read latency |
| `rtl/sync_fifo.sv`, `rtl/tile_scan.sv` | dispatcher helpers |
| `rtl/data_dispatcher.sv` | address generation, FIFOs, write-back |
| `rtl/top_controller.sv` | layer FSM and layer table |
| `rtl/janeeye_top.sv` | the whole core |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the end-to-end and workload tests |

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and stops by itself, with a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/janeeye_pkg.sv rtl/*.sv \
        tb/tb_janeeye_top.sv --top-module tb_janeeye_top -Mdir obj
    ./obj/Vtb_janeeye_top

Replace the testbench name to run another one.

* `tb_janeeye_top` runs a 5-layer network at the default sizes:
  * a 7×7 layer (OS);
  * a stride-2 3×3 layer with two output groups (WS);
  * a 3×3 layer over two input groups (OS);
  * a 1×1 layer (WS);
  * a 1×1-map FC layer (WS).

  It compares every output word with its own model of the arithmetic, and
  checks the cycle count and the number of mode switches, zero skips,
  padding steps and stalls.
* `tb_janeeye_backbone` runs one frame of a JaneEye-Net-shaped network on
  a 24×16 input. The layers are:
  * conv 7×7, 3×3 and 3×3;
  * the gated MLP's two 1×1 convolutions;
  * the ConvJANET gates, each a depthwise 3×3 followed by a 1×1 with
    HardSigmoid or HardTanh;
  * the FC head.

  The testbench plays the host for the steps this hardware lacks:
  * the gating product;
  * building `[x, h_prev]`;
  * the state update;
  * max pooling.

  It checks every layer's output against a model, checks the final
  (x, y), and prints the MAC-cycle share of each program. The channel
  counts (8 and 16) are assumed, because the source gives none.

The unit testbenches cover each block on its own.
