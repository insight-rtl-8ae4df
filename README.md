# A bit-serial neuromorphic layer: factorized networks as time-delay networks

This RTL implements a neuromorphic way of evaluating a trained neural network
layer. Every weight gets its own small multiplier (a *synapse*). There is no
external weight memory and no time-sharing of processing elements. Two ideas
make this affordable:

1. **Factorization into a time-delay network.** A convolutional or
   fully-connected layer with weight tensor `C x KH x KW x F` is replaced by
   five thin sublayers (channel filter, vertical filter, horizontal filter,
   code generation, inverse transform). Low-rank approximation keeps their
   ranks `RC`, `RV`, `RF` small. The image then enters as a raster-order
   sequence, one pixel per time step. The vertical and horizontal filters
   become short 1-D filters over that sequence, built from delay elements:
   `W(KH-1)` of them per vertical input channel and `KW-1` per horizontal
   input channel. One set of synapses is therefore reused at every image
   position, and the input needs only one pixel per step.
2. **Bit-serial arithmetic.** A number is an `n`-bit two's-complement word
   with `m` fractional bits, sent one bit per clock, LSB first. A multiplier
   then needs about `n` full adders, and the wires between neurons are 1 bit
   wide.

The default configuration is the single-layer MNIST classifier: a 28x28
grey-scale image in, 10 class scores out. The layer is fully connected,
`KH = KW = 28`, factorized with ranks 4/6/6, with `n = 16` and `m = 7`. One
image takes 784 periods of 32 cycles (25 088 cycles). At 160 MHz that is
156.8 µs.

## Time: periods and phases

Everything in the design is timed by one free-running counter (`phase_gen`).
It divides time into **periods of 2n cycles**:

```
cycle in period   0 ........ n-1 | n ....... 2n-1
phase             phi0           | phi1
wires             word, LSB first| idle (0)
synapses          multiply       | keep multiplying (input sign repeated)
delay elements    shift          | hold
```

* **Synapse** (`synapse`). Each cycle it adds the weight, if the current input
  bit is 1, to its partial product `pp`. It sends out the LSB and keeps the rest
  shifted right arithmetically. The input word only lasts `n` cycles, so
  during phi1 the synapse feeds back the sign bit it latched at cycle `n-1`.
  Over the full period it thus emits the 2n-bit product of the sign-extended
  input and the weight, LSB first. Output bit `t` leaves in cycle `t` (zero
  latency). `pp` is ignored on cycle 0, so each period starts a new product.
* **k-input adder** (`kin_adder`). It counts the k product bits, adds the carry
  kept from the previous cycle, and emits the LSB. It also has zero latency,
  and the carry is discarded at the period start.
* **Bias** (`bias_circuit`). The weighted sum has 2m fractional bits and the
  bias has m. The bias is therefore injected shifted left by m: zeros for
  cycles 0..m-1, then the bias bits, then its sign.
* **Truncation by delay** (`pipe_regs`). The result word is bits `m..m+n-1`
  of the 2n-bit sum. Bit `m` leaves the adder in cycle `m`. A fixed delay of
  `2n-m` cycles moves it to cycle 0 of the *next* period. The n-bit result
  then appears in the next period's phi0, exactly where the next sublayer
  reads its input. The `m` low bits fall into the previous phi1 and are
  dropped. Rounding is floor (truncation), and overflow wraps.
* **ReLU** (`relu_act`). In LSB-first arithmetic the sign comes last. But the
  sign of the truncated word (sum bit `m+n-1`) enters the pad delay in cycle
  `m+n-1`. That is before the word's first bit leaves it in cycle `2n`. The
  sign is latched then, and a negative word leaves as zeros. This needs
  `1 <= m <= n`.
* **Neuron output** (`neuron`). The output is forced to 0 during phi1.

The net effect is that **every sublayer has a latency of exactly one period**.
All synapses in the system start a product on the same cycle. A word sent in
phi0 of period P by sublayer `s` is the input of sublayer `s+1` in phi0 of
period P+1.

A **delay element** (`delay_element`) is a 1-bit, n-stage shift register
that shifts only in phi0. While the word of period P shifts in, the word of
period P-1 shifts out of the far end, so it delays a sequence by one sample.
A `delay_line` chains `TAPS*SPACING` of them and taps every `SPACING`
elements. With `USE_RAM = 1` each stretch of `SPACING` elements between two
taps is instead one `sram_shift_reg`: a 1-bit memory of `SPACING*n` bits with
a circular pointer that advances in phi0. Its read is asynchronous, like the
LUT-RAM shift registers of an FPGA, so the delay is exactly that of the
flip-flop chain. The vertical filter, whose lines are `W(KH-1)` elements
long, uses the RAM form. The horizontal filter, with `KW-1` elements per
line, uses flip-flops.

## One factorized layer

`tdnn_layer` chains the five sublayers:

| sublayer | module | in -> out channels | window |
|---|---|---|---|
| channel filter | `pw_sublayer` | C -> RC | 1 sample |
| vertical filter | `tap_sublayer`, SPACING = W | RC -> RV | KH samples spaced W apart (a column) |
| horizontal filter | `tap_sublayer`, SPACING = 1 | RV -> RV | KW consecutive samples (a row) |
| code generation | `pw_sublayer` | RV -> RF | 1 sample |
| inverse transform | `pw_sublayer`, bias, optional ReLU | RF -> F | 1 sample |

Sample `t = yW + x` enters in period `t`, and its result leaves in period
`t+5`. A result is meaningful only where the `KH x KW` window ending at
`(y, x)` lies inside the image: `y >= KH-1` and `x >= KW-1`. The first such
result belongs to sample `W(KH-1) + KW-1`. For the fully-connected default,
only the last pixel, t = 783, gives a valid result. The windows of valid
positions only ever read samples of the same frame. Frames can therefore
follow one another without flushing the delay lines, and stale data from the
previous frame only reaches positions that are discarded anyway.

In `tap_sublayer`, input `c*KSIZE + k` of every neuron is kernel tap `k` of
channel `c`. It sees the sample delayed by `(KSIZE-1-k)*SPACING`, so tap 0 is
the top (left) pixel of the window. Every output channel is connected to
every input channel. The numbers of delay elements are
`W(KH-1)RC + (KW-1)RV` (3186 at the defaults) and the number of synapses is
`C*RC + RC*KH*RV + RV*KW*RV + RV*RF + RF*F` (1780).

## System: frame buffer, layer, output words

`insight_top` connects `phase_gen`, `frame_buffer` and `tdnn_layer`, and
adds an output deserializer.

* **Loading an image.** The host writes the image through
  `wr_en/wr_ch/wr_addr/wr_data` (address = `yW + x`). A `start` pulse
  streams it from the next period on: one pixel per channel per period, each
  channel read from its own memory bank. A `start` given while a frame is
  streaming queues the next frame with no gap.
* **Results.** Five periods later, the F output streams are collected into
  n-bit words. When the position is valid, `out_valid` pulses for one cycle
  (on the first cycle of the following period). `out_data[f]` then holds
  class/feature `f` and `(out_x, out_y)` names the window's bottom-right
  pixel. The time from the first pixel's period to that pulse is
  `(t + 6) * 2n` cycles for sample `t`.
* **Weights and biases** are loaded through one 1-bit scan chain
  (`wload`, `w_si`, `w_so`), `n` bits per register. The chain order runs from
  `w_si` to `w_so`: channel, vertical, horizontal, code and inverse sublayer.
  Inside a sublayer it goes neuron by neuron, each neuron's synapses in input
  order, then its bias. Shift the register nearest `w_so` first, each word
  LSB first. The chain is `n * (synapses + F)` = 28 640 bits long at the
  defaults.

Synthesized sizes at the defaults (coarse yosys synthesis) are about
64 k flip-flop bits and 61 k memory bits. The memory is the frame buffer
(12.5 k) and the vertical delay lines (48 k). Most of the flip-flops are in
the synapses (weight and partial-product registers).

## Parameters (top level)

| parameter | default | meaning | origin of the default |
|---|---|---|---|
| `C, H, W` | 1, 28, 28 | image channels and size | MNIST |
| `KH, KW` | 28, 28 | kernel; equal to H, W for a fully-connected layer | the single-layer classifier |
| `F` | 10 | outputs per position | 10 digit classes |
| `RC, RV, RF` | 4, 6, 6 | ranks of the factorization | chosen (see below) |
| `N` | 16 | word length n; period 2n | derived from 156.8 µs per 784-pixel image at 160 MHz |
| `M` | 7 | fractional bits m | given |
| `RELU` | 0 | ReLU on the last sublayer | the classifier has no activation |

The ranks are not published for any configuration. The published
delay-unit counts of the MNIST classifier all have the form
`27*(28*RC + RV)`. If `RV` is assumed to be at most 28, each count gives
exactly one rank pair:

| approximation error | delay units | (RC, RV) | fits the defaults |
|---|---|---|---|
| 10 % | 8316 | (10, 28) | no |
| 16 % | 7857 | (10, 11) | no |
| 31 % | 6588 | (8, 20) | no |
| 40 % | 5670 | (7, 14) | no |
| 51 % | 4779 | (6, 9) | no |
| 61 % | 3186 | (4, 6) | yes, these are the defaults |
| 82 % | 1566 | (2, 2) | yes, with unused synapses |

`RF` is never published. It is set equal to `RV`, as in the
CP-decomposition case. To run a row that does not fit the defaults, set `RC`
and `RV` to its pair.

## Where this RTL departs from the original design

* **Weights are programmable.** The original tool flow generates a netlist
  with the weights built in. In that netlist a connection whose weight is
  exactly 1 needs no synapse, so its parameter counts (e.g. 376 synapses at
  61 % error) are far below the 1780 synapses here. In this RTL every
  connection has a synapse and every weight is a register on the scan chain.
  The connection pattern is full: every output channel of the vertical and
  horizontal filters reads every input channel, as the sublayer weight
  tensors are written. A per-channel reading of those filters is also
  possible and would be sparser.
* **Only ReLU is built.** A sigmoid is mentioned as another choice, but no
  circuit for it is given.
* **Not built.** Max-pooling (and the subsampling it implies for the
  sequences), the final softmax/class decision, the UART host link and the
  display. The three-layer convolutional network (ConvNet2) therefore cannot
  be assembled from these blocks. One of its convolutional layers could be
  instantiated as a `tdnn_layer` with other parameters.
* **RAM shift registers are generic.** The original says only that the
  delay elements' shift registers are refined into SRAM-based ones. The
  circular buffer here, its zero power-up contents and the choice to use it
  for the vertical filter only are this design's.
* **Own choices.** Synchronous active-low reset of all datapath state. The
  output is forced to zero in phi1. Overflow wraps and rounding is floor.
  Bias and activation are only on the inverse-transform sublayer. The frame
  buffer's write port and start handshake, and the output deserializer with
  its position tags, are also this design's.

## Verification

Every module has a self-checking testbench in `tb/`. The arithmetic is
checked against `tb_ref_pkg`, a bit-true integer model: each neuron output is
bits `m..m+n-1` of the exact integer sum, plus `bias << m`, with an optional
ReLU. Samples before the first count as zero. Highlights:

* `tb_synapse`, `tb_kin_adder`, `tb_bias_circuit` compare every 2n-bit
  product and sum, including the most negative operands. They drive random
  junk on the inputs during phi1.
* `tb_sram_shift_reg` runs the RAM chain beside a flip-flop `delay_line` of
  the same length and checks that both give the delayed words in every cycle.
* `tb_neuron`, `tb_pw_sublayer`, `tb_tap_sublayer`, `tb_tdnn_layer` stream
  random sequences and compare every output word. They also check the scan
  chain's length and order.
* `tb_insight_top` runs the whole system at a reduced size (2 channels, 6x7
  image, 3x2 kernel, ReLU). It processes three frames: one, the same frame
  back-to-back, and a new one after idle. It checks every valid output, the
  count per frame, the first-output latency and one output per period. It
  also confirms that ReLU clamping, negative inputs, bias, back-to-back and
  after-idle frames all occurred.
* `tb_insight_full` uses the top at its defaults. It loads all 1790
  registers, processes one 28x28 image, checks the 10 outputs, and checks
  the latency of `(784+5)*32` cycles.
* `tb_workload_mnist` runs the classifier with ranks 2/2/2 and 6/9/9, the
  82 % and 51 % rows above. `tb_workload_conv` runs the first layer of the
  convolutional MNIST network: 5x5 kernel, 64 maps, ReLU, ranks 1/2/2, all
  576 positions checked. Its max-pooling is not modelled. Both use the
  helper `tb_top_runner`.

To run a testbench with Verilator (5.x), from the directory holding `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_insight_top \
    rtl/insight_pkg.sv tb/tb_ref_pkg.sv tb/tb_insight_top.sv
./obj_dir/Vtb_insight_top
```

Each testbench ends with `TB_RESULT checks=<n> failures=<n>`. The full-size
testbench builds in about half a minute and simulates in about a second.

To try another network shape, change the top's parameters. The ranks, kernel
and image size are independent, but these conditions must hold:
`1 <= M <= N`, `2N < 256`, and the window must fit inside the image. The
weights come from a factorization done off-chip. Their order on the scan
chain is the one given above, which `tb_ref_pkg::layer_ref` also uses.
