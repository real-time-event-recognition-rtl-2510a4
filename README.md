# A multiplier-free streaming CNN for fibre vibration event recognition

A phase-sensitive optical time-domain reflectometer (phi-OTDR) turns a long
optical fibre into thousands of vibration sensors. It launches a light pulse
every millisecond and digitises the Rayleigh backscatter along the fibre. One
sample for event recognition is a small spatial-temporal picture: **256 time
steps (1 ms apart) by 11 fibre positions (1.25 m apart)**, so 12.5 m of fibre
over 0.256 s. A 30–40 km fibre produces thousands of such samples every
quarter of a second. Each one has to be classified (hammer, air pick or
excavator in the reference data) before the next batch arrives.

This RTL is an accelerator for that classifier. It has three ideas:

1. **A very small network.** It is a 4-layer CNN with about 30 k parameters.
   A larger ResNet teacher trains it by knowledge distillation (that happens
   offline and is not part of the hardware).
2. **A layer pipeline held entirely on chip.** Each layer is its own block
   with its own small *activation buffer*. All blocks run at the same time,
   joined by pixel streams. No feature map is ever stored whole, and no
   external memory is used.
3. **No multipliers.** Every weight is reduced to a sign and at most three
   powers of two. A product then becomes three shifts and adds, which uses
   logic instead of DSP blocks. The exponents are stored as 3-bit
   offset-binary codes.

## The network

| block   | operation                        | input map    | output map   |
|---------|----------------------------------|--------------|--------------|
| conv1   | 3x3, stride 1, pad 1, ReLU       | 256 x 11 x 1 | 256 x 11 x 8 |
| pool1   | 2x2 max, stride 2                | 256 x 11 x 8 | 128 x 5 x 8  |
| conv2   | 3x3, stride 1, pad 1, ReLU       | 128 x 5 x 8  | 128 x 5 x 16 |
| pool2   | 2x2 max, stride 2                | 128 x 5 x 16 | 64 x 2 x 16  |
| conv3   | 3x3, stride 1, pad 1, ReLU       | 64 x 2 x 16  | 64 x 2 x 32  |
| pool3   | 2x2 average, stride 2            | 64 x 2 x 32  | 32 x 1 x 32  |
| conv4   | 3x3, stride 1, pad 1, ReLU       | 32 x 1 x 32  | 32 x 1 x 64  |
| fc      | flatten 2048 -> 3 scores, argmax | 32 x 1 x 64  | 3 + class    |

Maps are written rows x columns x channels. Rows are time and columns are
fibre position. Pooling drops an odd last row or column (11 -> 5 -> 2), which
is what makes the flattened size 64 x 32 x 1 = 2048.

Module map:

```
dvs_cnn_top
 ├─ conv_layer  u_conv1 ─ line_buffer (3 rows), shift_add x N*9
 ├─ pool_layer  u_pool1 ─ line_buffer (2 rows)
 ├─ conv_layer  u_conv2
 ├─ pool_layer  u_pool2
 ├─ conv_layer  u_conv3
 ├─ pool_layer  u_pool3 (AVG=1)
 ├─ conv_layer  u_conv4
 └─ fc_layer    u_fc    ─ shift_add x K*N
dvs_cnn_pkg: types (act_t, sweight_t, cfg_kind_e), widths, saturation
```

## Weights as shifts

### Number format

Activations are 16-bit signed fixed-point words (`act_t`). The design treats
them as plain integers. Eight fractional bits are the intended convention,
but nothing in the logic depends on where the binary point is. Biases use the
same format.

A weight is a 13-bit `sweight_t`:

```
 [12]     sign       1 = negative
 [11:9]   valid[2:0] shift parameter k present
 [8:0]    code[2:0]  three 3-bit codes c0 (bits 2:0), c1 (5:3), c2 (8:6)
```

Every layer also has one 4-bit *offset* `b`, shared by all its weights. The
weight's value is

```
w = (-1)^sign * sum over valid k of 2^(c_k - b)
```

so one layer can cover any eight consecutive powers of two. For example, with
`b = 8` the codes 0..7 stand for 2^-8 .. 2^-1.

### Producing the codes from a trained model (offline)

1. For each weight, take the sign. Write |w| in binary and keep its three
   most significant set bits. Their exponents are the weight's shift
   parameters. Fewer set bits leave the remaining slots empty (valid = 0).
2. For each layer, choose the offset b so that the smallest exponent kept
   across the layer maps to code 0. Add b to every exponent. An exponent
   that lands above 7 is clamped to 7.

Convolution biases are not converted. They are loaded as 16-bit words. If the
trained model has batch normalisation, fold it into the weights and biases
before step 1.

### How the hardware uses them

`shift_add` forms `sum_i ± ((I << c0) + (I << c1) + (I << c2))`, with empty
slots adding nothing. It shifts by the raw codes, so every partial product is
the exact value times 2^b. A layer adds all its terms first. Then it divides
by 2^b once, with an arithmetic right shift (rounding toward minus infinity).
After that it adds the bias and applies ReLU. Finally it saturates to 16
bits. The accumulator is 40 bits wide, so no term is ever rounded and the sum
cannot overflow. `tb_ref_pkg::wval` and `post` state the same arithmetic with
ordinary multiplication. The testbenches hold the design to it bit for bit.

## The activation buffer and the convolution schedule

This is the part that needs the most care.

A `line_buffer` stores P rows of the map as W column shift registers, each P
deep. An incoming pixel is steered to its column. That column shifts up by
one, the oldest entry drops out and the new pixel enters at the bottom. For
a row-major stream, each column therefore always holds the latest P rows
*that have reached that column*. Columns to the right of the newest pixel
still hold one row less.

`conv_layer` (P = 3) works on one output pixel (r, c) at a time:

- **Start condition.** The 3x3 window of (r, c) is complete once input pixel
  (min(r+1, H-1), min(c+1, W-1)) has arrived. At that point every column in
  the window has its newest row equal to min(r+1, H-1). The window row rr is
  then slot `rr - min(r+1,H-1) + 2` of the column. Rows and columns outside
  the map read as zero, which is the padding. On the last row the slots move
  down by one.
- **Holding input back.** Further input would push rows out of window
  columns, so `in_ready` drops once the needed pixel is in. There is one
  exception, the look-ahead: the next pixel is still taken while its column
  lies outside the current window (columns c-1..c+1). That overlaps input
  with computation. For the next output pixel it is exactly the pixel needed,
  so consecutive pixels follow each other without a gap. Only at a row change
  is there a bubble of one or two clocks. Maps one or two columns wide
  (conv3, conv4) never look ahead, because every column is in the window.
- **Computation.** One output channel m is issued per clock. All N x 9 taps go
  through their `shift_add` units in parallel and are summed. The sum is
  registered.
- **Post-processing.** In the next clock the layer removes the offset, adds
  the bias, applies ReLU and saturates. The result goes into slot m of the
  pixel being collected. When channel M-1 is written, the whole M-channel
  pixel moves to the output register (`out_valid`).
- Issue pauses while the output register is full and not being read. This is
  how back-pressure propagates upstream. The frame counters reset after the
  last pixel, so the next sample can follow directly.

`pool_layer` uses a two-row `line_buffer`. When the bottom-right pixel of a
2x2 window arrives (odd row, odd column), the other three values are already
buffered. The block reduces them on the spot to the maximum, or to the floor
of the mean.

`fc_layer` keeps no feature buffer. Each conv4 pixel (64 channels) is
multiplied into all three class sums in the clock it arrives. The flatten
order is channel-major: feature index = channel x 32 + pixel. The block adds
the bias after the 32nd pixel and reports the three saturated scores and the
index of the largest. Softmax does not change which score is largest, so it
is not computed.

## Timing and throughput

conv1 computes 8 channels of each of the 2816 input pixels at one channel per
clock, and it paces everything behind it. The later layers have less work per
clock of input and mostly wait. With input offered every clock, the
full-size testbench measures:

- **23,150 clocks** from the first input value to the result,
- **22,795 clocks** between successive samples (samples overlap in the
  pipeline).

At 303 MHz that would be 76 µs from input to result and a new sample every
75 µs, or 3,400 samples per 256 ms frame. That is 42 km of fibre at 12.5 m per sample. The reference FPGA
implementation of this architecture reports 25,112 cycles at 303 MHz
(0.083 ms), which is about 38.5 km. The clock rate this RTL can reach has
**not** been established. conv4 sums 288 shift-add terms in one clock, and
that path would need pipelining before 300 MHz is realistic.

Storage at the default size:

- 30,408 weights of 13 bits (395 kbit) and 123 bias words;
- activation buffers of 3 x 11 x 1, 3 x 5 x 8, 3 x 2 x 16 and 3 x 1 x 32
  words for the convolutions, plus 2-row buffers for pooling.

The weight arrays are written one word at a time and read a whole output
channel (N x 9 words) at a time. That suits registers or distributed RAM
better than a single block RAM port.

## Interface of `dvs_cnn_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `cfg_we` | in | 1 | write one parameter word this clock |
| `cfg_layer` | in | 3 | 0..3 conv1..conv4, 4 fc |
| `cfg_kind` | in | 2 | `CFG_WEIGHT`, `CFG_BIAS`, `CFG_OFFSET` |
| `cfg_addr` | in | 16 | weight or bias index |
| `cfg_data` | in | 16 | weight word in bits 12:0, bias word, or offset in bits 3:0 |
| `in_valid`/`in_ready`/`in_data` | in/out/in | 1/1/16 | sample values, row-major (time-major), 256 x 11 per sample |
| `out_valid`/`out_ready` | out/in | 1 | one result per sample |
| `out_score` | out | 3 x 16 | saturated class scores |
| `out_class` | out | 2 | index of the largest score |

Weight addresses:

- Convolution: `m*(N*9) + (n*3 + p)*3 + q`, for output channel m, input
  channel n, kernel row p (time) and kernel column q (position).
- FC: `k*2048 + channel*32 + pixel`.

Load every layer's weights, biases and offset before the first sample. The
weight memories are not cleared by reset.

All streams use valid/ready. A word moves on a clock edge where both are
high. Blocks never drop `valid` or change the data while waiting.

## What follows the source design and what is this implementation's own

Taken from the published architecture:

- the layer list, kernels, strides, padding and channel counts;
- one block per layer, each with its activation buffer, running as a
  pipeline with everything on chip;
- P-row line buffers with column shift registers and an input multiplexer;
- shift-and-add in place of multiply-accumulate;
- three shift parameters per weight, 3-bit codes and a per-layer offset.

Chosen here, because the source does not say:

- the activation function (ReLU after every convolution);
- the fixed-point format, the rounding (floor) and saturation;
- how an empty shift parameter is encoded (a valid bit per parameter, which
  makes the weight word 13 bits rather than 9 plus sign);
- biases kept as 16-bit words;
- the valid/ready handshakes and the parameter load port;
- the scheduling: one output channel per clock, the look-ahead rule, and
  dropping odd pooling edges;
- the flatten order and the argmax output.

The source implementation was generated by a high-level synthesis tool. This
RTL is an independent design of the same architecture, so its cycle counts
and resource use are its own. Not included: the optical front end, the ADC,
the step that cuts the ADC stream into 256 x 11 samples, and the offline
training, quantisation and encoding.

## Verification

Each testbench checks its block against a reference written with ordinary
integer multiplication and direct indexing. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_shift_add` | 3000 random activation/weight/sum cases, extremes, two chained units |
| `tb_line_buffer` | random writes to random columns, full content compared after each write |
| `tb_conv_layer` | three sizes (7x4x2->3 under random stalls, 6x1 padding on both sides, 8x11x1->8 free-running with the frame time checked), several frames each, a saturating row |
| `tb_pool_layer` | max pooling on 5x5 and 6x11, average pooling on 8x2, random stalls |
| `tb_fc_layer` | 6 pixels x 5 channels -> 3 classes, scores and class, one saturating sample |
| `tb_dvs_cnn_top` | full default size: all parameters loaded through the port, three samples back to back, every conv1 and conv4 output pixel and all results checked, results held stable while not taken (75,821 checks), latency checked against 25,112 clocks, and counts of input back-pressure, look-ahead reads, inter-layer stalls, output back-pressure, max/average pooling, ReLU clamping, saturation and empty shift parameters (each must occur) |

The weights in these tests are random codes, not a trained model. The
classification accuracy reported for the trained network has therefore not
been reproduced here. Only the arithmetic is verified.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dvs_cnn_top \
    rtl/dvs_cnn_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/*.sv
./obj_dir/Vtb_dvs_cnn_top +verilator+rand+reset+2
```

The full-size run takes under a minute to build and about a second to
simulate. Replace the top-module name to run another testbench.

## Changing the design

- **Map size and channel counts:** the parameters of `dvs_cnn_top`.
  `conv_layer` itself works for any width from one column up; its look-ahead
  only helps from three columns. Every pooling stage needs a map of at least
  2 x 2.
- **Shift parameters per weight and code width:** `NSHIFT` and `SHIFT_W` in
  `dvs_cnn_pkg`. The weight word grows to `1 + NSHIFT*(SHIFT_W+1)` bits and
  must fit `cfg_data` (16 bits).
- **Throughput:** the simplest lever is issuing several output channels of
  conv1 per clock, which is the only layer on the critical path.
- **Activation width:** `ACT_W` in the package. `ACC_W` must stay wide enough
  for the largest fan-in (2048 terms of `ACT_W + 2^SHIFT_W - 1` bits).
