# Shift-add CNN accelerator for distributed fiber vibration recognition

A phase-sensitive OTDR sends a probe pulse into a fiber every millisecond. It
records the backscattered light as 14-bit samples at 80 MSa/s. Vibrations near
the fiber (an excavator, a hammer, an air pick) show up as fluctuations in
these traces. A convolutional network classifies a window of 256 consecutive
traces (256 ms) over 11 fiber positions.

This RTL runs such a network on an FPGA without DRAM and without
multipliers. The key idea is a different way to store and apply each
trained weight. Every weight is approximated as

    w = s * (2^p1 + 2^p2 + ... + 2^pN)        s in {-1, +1}, p_k signed 6-bit

so a convolution output

    o = sum_i  x_i * w_i  =  sum_i  s_i * sum_k (x_i << p_k,i)

needs only barrel shifts and adders. A weight costs N small integers plus a
sign instead of a 32-bit float. With N = 2 (and N = 1 for the third
convolution, which tolerates it) the whole network fits in on-chip block RAM
and LUT RAM. No multiplier is needed anywhere on the data path.

## What is built

```
 ADC 14 bit ──► sample_averager ──► input_buffer ──► conv_1 ──► relu ──► MaxPool buffer
  (4 samples → 1 point,            (256 x 11,      (1→64 ch,
   80 MSa/s → 5 m per point)        two banks)       2 shift layers)
                                                                              │
   ┌──────────────────────────────────────────────────────────────────────────┘
   ▼
 maxpool ──► Conv buffer ──► conv_2 ──► relu ──► conv_3 buffer ──► conv_3 ──► residual add ──► fc_head ──► class
 (2x2)          │           (64→64,                                (64→64,        ▲            (3 scores,
                │            2 shift layers)                        1 shift layer) │             arg-max)
                └───────────────────────────── skip path ──────────────────────────┘
```

This is the stem and the first residual block of the network: conv_1, ReLU,
max pooling, conv_2, ReLU, conv_3 and the skip add. A fully-connected classifier
follows them. The full network has 15 convolution layers. The remaining 12 are
"similar" residual blocks, but their channel counts, strides and kernel sizes
are not known, so they are not built. Here the classifier takes the output of
the first residual block directly. Adding further blocks means instantiating
more `conv_shift_add` / `relu` / `fmap_buffer` / `residual_add` groups
between the residual add and `fc_head`.

Sizes at the defaults (`dvs_pkg`):

| quantity | value | origin |
|---|---|---|
| sensing sample | 14 bit unsigned | given |
| averaging | 4 samples per point | given |
| network input | 256 traces x 11 points | given |
| channels | 64 | derived: conv_3 has 36,864 = 64·64·3·3 weights |
| kernel | 3 x 3, stride 1, zero padding 1 | derived / chosen |
| shift layers | 2 (conv_1, conv_2, FC), 1 (conv_3) | given |
| shift count | 6-bit signed; −32 = "no term" | width given, code chosen |
| pooling | 2 x 2, stride 2 (256x11 → 128x5) | chosen |
| activations | 16-bit signed | chosen |
| accumulators | 64-bit, 16 fractional bits | chosen |
| classes | 3 | given |

## The shift-add layer

`conv_shift_add` is the core of the design and uses three small combinational
layers:

* **`shift_layer`** takes the nine activations of a 3x3 window and the
  nine shift counts of one term. It returns `x·2^p`: a left shift for p > 0,
  an arithmetic right shift for p < 0, and zero for the reserved code −32.
  The activation is first widened to 64 bits and scaled by 2^16. Right shifts
  therefore keep up to 16 fractional bits and round toward −∞ only beyond
  that.
* **`add_layer`** adds two shift-layer outputs element by element. N shift
  layers need N−1 of them, chained.
* **`sum_layer`** applies each weight's sign and adds the whole window into
  one number.

For conv_3 (N = 1) the add layer disappears and shift feeds sum directly.

### Schedule inside a layer

The layer walks the output positions (y, x) in raster order. For each input
channel it reads the 3x3 window from its source buffer, one word per cycle
(10 cycles including the read latency). Taps outside the map become zero.
Then it spends one cycle per output channel: that channel's weight word is
read from the layer's own weight memory, the window goes through
shift → add → sum, and the result is added into `acc[co]`. After the last
input channel, the 64 results are requantised and streamed out, one per
cycle. Requantising means `saturate16(acc >>> 16)`.

    cycles per frame = H·W·(CIN·(K²+1+COUT) + COUT) + 1

That is 387,585 cycles for conv_1 (256x11, 1→64) and 3,031,041 for conv_2 and
conv_3 (128x5, 64→64). One window of one channel per cycle is a deliberate
choice: it keeps the logic small and equal for every layer. A wider datapath
(several output channels per cycle) would divide these numbers.

### Weight word layout

Conv weight memory address `co·CIN + ci` holds nine taps, tap `t = ky·3 + kx`
at bit `t·TW`, with `TW = 1 + N·6`:

```
 bit 0          sign (1 = negative)
 bits 1..6      p_0
 bits 7..12     p_1          (N = 2 only)
```

`fc_head` uses the same per-weight field for each class `j` at bit `j·TW`. Its
address is the feature address `(c·H2 + y)·W2 + x`. The top loads
all four memories through one port: `wt_sel` 0 = conv_1, 1 = conv_2,
2 = conv_3, 3 = FC. `wt_data` is 117 bits wide; narrower layers take the low
bits. Converting trained floating-point weights into these codes is an
offline step and is not part of the RTL. That step describes a weight by the
positions of its non-majority binary digits, then keeps at most N of those
terms per weight. It must produce exactly this code: a sign and N shift counts,
with −32 for an unused term.

## Buffers and the frame pipeline

Each layer reads a complete feature map that the previous layer has finished
writing: "cache everything, then inject". The `fmap_buffer` between two layers
therefore holds one whole frame, addressed `(c·H + y)·W + x`. Its handshake:

1. A producer may start only when the buffer is `free`. Its `start` pulse
   `claim`s the buffer.
2. The last write (`wr_last`) makes it `full`.
3. The consumer reads through one of two synchronous read ports (data one
   clock after `rd_en`). When it is done, its `done` strobe `rel`eases the
   buffer.

Claiming at start matters. Without it, a producer can finish a frame and start
the next one before its last values, still in the ReLU register, have set
`full`. `done` is high during the layer's final state. The released buffer is
therefore already empty when the layer is idle again, so the layer cannot
restart on the same frame.

Since every stage has its own buffers, the stages work on successive frames
at the same time. conv_1 can process frame n+1 while conv_2 works on frame n.
There is one exception. The Conv buffer, which holds the input of the residual
block, is read twice: by conv_2 and, through its second port, by the residual
add that follows conv_3. It stays full until conv_3 is done, and a flag in
the top stops conv_2 from running on the same frame twice. conv_2 and conv_3
of one frame therefore run back to back. With the defaults this gives:

* first result about 6.8 M cycles after a frame arrives (27 ms at 250 MHz);
* a new result every ~6.35 M cycles in steady state (25 ms), far below the
  256 ms a frame takes to record.

`input_buffer` is the only buffer with two banks. Sensing data never stops,
so while conv_1 reads one bank the next frame fills the other. A frame that
starts while both banks are held is dropped as a whole and counted in
`frames_dropped`. Frames are consecutive, non-overlapping windows of 256
traces.

## Module list

| module | role |
|---|---|
| `dvs_pkg` | widths, sizes, `shift_term`, `requant`, `sat_add` |
| `shift_layer`, `add_layer`, `sum_layer` | combinational shift-add arithmetic |
| `conv_shift_add` | 3x3 convolution layer with weight memory and scheduler |
| `relu` | registered max(0, x) on the output stream |
| `maxpool` | 2x2 max pooling from a buffered map |
| `fmap_buffer` | whole-frame buffer, claim/full/free/rel handshake |
| `sample_averager` | 4:1 averaging of ADC samples, realigned by `adc_first` |
| `input_buffer` | ping-pong input frames, drop counter |
| `residual_add` | skip connection, saturating 16-bit add |
| `fc_head` | streaming fully-connected layer and arg-max |
| `dvs_cnn_top` | the assembled design |

Top-level interface: `adc_valid/adc_first/adc_data` (one sample per valid
cycle; `adc_first` on the first sample of each trace). `wt_*` is the weight
load. `result_valid` pulses with `result_class` (0..2) and `result_scores[3]`
(32-bit, scaled like the activations). All logic is on one clock, with an
active-low asynchronous reset.

## Where this departs from, or adds to, the source design

* Only the first seven layers and a classifier are built. The classifier's
  input size (64x128x5) is a consequence of that, not the real one.
* The quantisation of activations, the 64-bit accumulators, the handling of
  overflow and the rounding are this design's own choices. Large left shifts
  can overflow 64 bits only for |p| beyond about 30, which trained weights do
  not use.
* The weight sign is stored as an extra bit. The published storage budget
  counts only the 6-bit shift variables (12 bits per weight).
* No biases or batch normalisation are applied.
* A buffer in front of conv_3 is added. A 3x3 window needs neighbouring conv_2
  outputs that a pure stream cannot provide.
* Within a layer, computation is sequential over windows and channels rather
  than fully parallel. Across layers it is pipelined frame by frame.
* Weights are loaded at run time through a port. In an FPGA build the memories
  could equally be initialised with the bitstream.
* The optical front end, ADC, communication interface, display and PLL are
  outside this RTL.

## Simulating

All files are plain SystemVerilog-2017. Packages first, e.g. for the full
design test (all parameters at their defaults, two frames through the whole
chain, a third dropped, about 15 s):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dvs_cnn_top \
    -y rtl -y tb rtl/dvs_pkg.sv tb/dvs_ref_pkg.sv tb/tb_dvs_cnn_top.sv
./obj_dir/Vtb_dvs_cnn_top
```

Every module has a testbench `tb/tb_<module>.sv`, built the same way. Each
prints `TB_RESULT checks=N failures=M`. The reference arithmetic in
`tb/dvs_ref_pkg.sv` is written with multiplication and floor division rather
than shifts, so it checks the shift-add path independently. Weight codes come
from a hash of (layer, index), so loader and reference agree without tables.
The end-to-end test compares every class score of every frame with a
complete integer model of the network. It also confirms that a frame was
dropped, that conv_1 overlapped conv_2/conv_3 on different frames, that
"no term" codes and zero padding occurred, and that each stage ran exactly
once per frame.

`tb/tb_dvs_cnn_variants.sv` builds the design four times at a small size
(6x5 frames, 3 channels), using the harness `tb/dvs_variant_bench.sv`. The
four builds keep different numbers of shift terms: one in every layer, eight
in every layer, one only in conv_1, and one only in the classifier. Each build
is checked against the same reference model and against the latency given by
the layer schedule.

To change the network size, override `H`, `W`, `C`, `NS1`, `NS2`, `NS3` and
`NSF` on `dvs_cnn_top`. For more than two terms per weight, also widen
`WT_DW` to `9·(1 + 6·N)`. The full-size testbench takes its sizes from
`dvs_pkg`.
