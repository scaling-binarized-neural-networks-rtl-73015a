# A streaming binarized CNN accelerator for CIFAR-10

This is synthesizable SystemVerilog for a dataflow accelerator for binarized
neural networks (BNNs), built along the lines of the FINN architecture in
"Scaling Binarized Neural Networks on Reconfigurable Logic". A BNN uses
weights and activations of +1 or -1, stored as single bits (1 = +1, 0 = -1).
A dot product then becomes XNOR followed by a popcount. Batch normalisation
and the sign activation fold into one integer comparison against a
per-neuron threshold. Each layer is small enough to keep on chip, so the whole
network runs as a pipeline of engines, one per layer, with every parameter
held in on-chip memory.

The default build holds the padded CIFAR-10 network at scale 1 ("cnn(1)").
It needs 1.23 billion binary operations per 32x32 image. At 125 MHz it accepts
one image every 9216 cycles, which is 13.6 k images per second.

## Network and layer engines

```
image 32x32x3, 8 bit
 conv0  3x3, 3   -> 128   multiply-add with +-1 weights, threshold
 conv1  3x3, 128 -> 128   XNOR-popcount, threshold
 pool   2x2 OR
 conv2  3x3, 128 -> 256
 conv3  3x3, 256 -> 256
 pool   2x2 OR
 conv4  3x3, 256 -> 512
 conv5  3x3, 512 -> 512
 pool   2x2 OR
 fc6    8192 -> 1024
 fc7    1024 -> 1024
 fc8    1024 -> 10            raw popcounts, no threshold
 arg-max -> label
```

Every convolution pads each border with one pixel of value -1. Pooling comes
after the threshold, so it works on bits: the maximum of +-1 values is a
logical OR. The widths 128/256/512 and 1024 are parameters `C1`, `C2`, `C3`
and `FC` of `finn_cnn_top`. Halving them gives cnn(1/2), and quartering them
gives cnn(1/4).

| layer | X (neurons) | Y (inputs) | P | S | F^s = Y/S | F^n = X/P | pixels | cycles/frame |
|-------|------|------|----|-----|----|----|------|------|
| conv0 | 128  | 27   | 16 | 27  | 1  | 8  | 1024 | 9216 (window-limited) |
| conv1 | 128  | 1152 | 64 | 288 | 4  | 2  | 1024 | 8192 |
| conv2 | 256  | 1152 | 64 | 144 | 8  | 4  | 256  | 8192 |
| conv3 | 256  | 2304 | 64 | 288 | 8  | 4  | 256  | 8192 |
| conv4 | 512  | 2304 | 64 | 144 | 16 | 8  | 64   | 8192 |
| conv5 | 512  | 4608 | 64 | 288 | 16 | 8  | 64   | 8192 |
| fc6   | 1024 | 8192 | 16 | 64  | 128| 64 | 1    | 8192 |
| fc7   | 1024 | 1024 | 4  | 32  | 32 | 256| 1    | 8192 |
| fc8   | 10   | 1024 | 1  | 8   | 128| 10 | 1    | 1280 |

P (processing elements) and S (SIMD lanes per PE) set each layer's speed.
They are this design's choice. They balance layers 1 to 8 at 8192 cycles per
frame, which is below the 10416 cycles that 12 k images/s needs at 125 MHz.

## The matrix-vector-threshold unit (`mvtu`, `mvtu_pe`)

Each layer is one `mvtu`. It computes `out = threshold(W * in)` for an input
vector of Y elements and X neurons. The unit has P PEs, and each PE has S
lanes. The work is folded two ways:

- Synapse fold: a neuron's Y inputs are processed S at a time, in F^s = Y/S
  cycles.
- Neuron fold: each PE serves F^n = X/P neurons one after another.

So one vector takes F^s·F^n cycles. A convolution repeats this for every
output pixel. Neuron `n = nf*P + pe` is computed by PE `pe` during neuron
fold `nf`. Its S-bit weight slice `sf` is stored at address `nf*F^s + sf` in
that PE's weight memory, and its threshold at address `nf` in the threshold
memory.

A PE (`mvtu_pe`) is a short pipeline:

1. Read the weight and threshold memories (registered read, as in block RAM).
2. Compute the fold's partial sum: XNOR and popcount over the S lanes, or,
   for the 8-bit first layer, a sum of +x or -x chosen by each weight bit.
3. Add it to the accumulator. The accumulator restarts on the first fold of
   each neuron.
4. On the last fold, compare `acc >= threshold` to get the output bit.

The last layer is built with `THRESH = 0`. It emits the signed accumulators,
and `label_select` then picks the largest. Ties go to the lower class index.

Two buffers surround the PE array:

- A double input buffer. One Y-element vector fills while the other is
  reused F^n times.
- An output register that collects one neuron fold per pass and emits the
  whole X-bit vector as one beat.

If that register is still occupied when a new result completes, the whole PE
pipeline stalls until the consumer takes the result. The PEs are never out of
step with each other.

## Sliding window with streaming padding (`swu_pad`)

A convolution is computed as a matrix-vector product per output pixel. The
"vector" is the 3x3 window of the padded input, laid out in order
(ky, kx, channel). `swu_pad` builds it from a raster stream of pixels.

The padding is produced inside the window unit rather than by the previous
layer. Incoming pixels are written into one wide memory, one word per pixel.
The write address walks over the padded map. In the border region, a
multiplexer writes the padding word instead of a stream pixel, and no input
is consumed. A read address generator then reads each window's 9 pixels in
order.

Padding with -1 rather than 0 keeps the datapath binary: 0 is not a valid
BNN value, and representing it would need a third state. The padding word is
bit 0 for binary layers and all ones (integer -1) for 8-bit data. According
to the paper, -1 padding reaches the same accuracy as 0 padding (88.3% and
88.6% at scale 1), while no padding loses about 4%.

The memory holds K+1 = 4 padded rows used as a ring. Row r+1 is written while
rows r-2..r are read. An output row is read once its three rows are complete,
and its oldest row is then released. At the last row of a frame all three are
released, so the next frame starts cleanly. One window beat leaves per cycle,
so a convolution needs at least 9 cycles per output pixel. This limits conv0:
its PE fold is only 8 cycles, but it takes 9216 cycles per frame. That
makes 9216 cycles the interval of the whole pipeline.

## Streams, pooling and the top

All engines are linked by valid/ready streams. A beat moves when both
signals are high, and data is held while valid is high and ready is low.
Between engines:

- `stream_fifo` is a two-entry FIFO that can accept a beat in the same cycle
  it sends one while full.
- `pool_or` ORs 2x2 blocks. It keeps a half-row line buffer and one hold
  register, and emits on odd rows and odd columns.
- `conv_layer` pairs a `swu_pad` with an `mvtu`.

Each engine starts work as soon as its input arrives. Successive images
therefore overlap in the pipeline, and the latency is much shorter than the
number of frames in flight times the interval would suggest.

### Ports of `finn_cnn_top`

| port | meaning |
|------|---------|
| `img_valid/ready/data` | one pixel per beat, raster order, channel k at bits `k*8` (signed) |
| `cls_valid/ready/label/scores` | one beat per image: the arg-max class and all 10 scores (signed) |
| `cfg_we, cfg_layer, cfg_thresh, cfg_pe, cfg_addr, cfg_data` | parameter write port |
| `pad_write[5:0]` | a padding word is written in conv layer i this cycle |
| `stall[8:0]` | the PE array of layer i is stalled this cycle |

The parameter write port works as follows:

- `cfg_layer` selects the engine (0..8).
- `cfg_thresh` selects the threshold memory instead of the weight memory.
- `cfg_pe` and `cfg_addr` select the PE and the word, using the layout given
  above.
- Weights are S bits per word. Thresholds are T bits, signed.

Reset is asynchronous and active low. It does not clear the parameter
memories, so parameters survive a reset.

## Timing

- Interval: 9216 cycles per image at the default sizes. This is 13.6 k
  images/s at 125 MHz, the clock the paper reports for the KU115.
- Latency: about 34,000 cycles from the first pixel to the label in
  simulation, which is 270 µs at 125 MHz. The paper reports 671 µs for its
  build.
- Parameter load: 190,081 write cycles for the whole network through the
  configuration port.
- Memory: 14.02 Mbit of weights (the KU115 has 2160 block RAMs of 36 kbit).
  A synthesis pass infers about 14.2 Mbit of memory at the full size.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends with
a `TB_RESULT checks=... failures=...` line and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_mvtu_pe` | XNOR/popcount and multiply-add folds, threshold compare, against a model |
| `tb_mvtu` | binary and 8-bit units with random back-pressure; results, stalls and the F^s·F^n rate |
| `tb_swu_pad` | every window beat, including padding, for binary and multi-bit maps over several frames |
| `tb_pool_or` | OR pooling over random maps with stalls |
| `tb_stream_fifo` | ordering, full-and-read in the same cycle, back-pressure |
| `tb_label_select` | arg-max, ties, negative scores |
| `tb_finn_cnn_top` | the whole network at reduced size (8x8 image, narrow layers), 5 images |
| `tb_finn_cnn_full` | the default `finn_cnn_top` with no parameter overrides, 4 images |

Both end-to-end tests share `finn_tb_harness`, which works like this:

1. It builds a random network. Weights come from a hash of layer, neuron and
   index.
2. Each threshold is set to the median of that neuron's pre-activations over
   the test images, so that every layer keeps about half its outputs at +1
   and influences the result.
3. It loads the parameters through the configuration port and streams random
   8-bit images.
4. It compares every label and every score with a reference model. The model
   packs vectors into 64-bit words and does not share the RTL's folding.

The harness also counts the mechanisms the design depends on: padding writes
per conv layer, PE stalls, label back-pressure and overlapping frames. Any of
them that never occurs counts as a failure. Finally it checks the
steady-state interval against the largest per-layer fold.

Simulating with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/bnn_pkg.sv tb/tb_finn_cnn_top.sv \
  --top-module tb_finn_cnn_top
./obj_dir/Vtb_finn_cnn_top
```

Replace the top module name to run any other testbench. The full-size run
takes a few seconds of simulation after a C++ build of a few minutes.

Some warnings stand in the lint output on purpose:

- The assertions use `disable iff (!rst_n)` on the asynchronous reset.
- `cfg_addr`/`cfg_data` bits are unused by engines with narrow memories.

## Where this design departs from the paper, and what it assumes

- Topology: the paper names the network only as cnn(σ). The layer list above
  is the BinaryNet CIFAR-10 network at σ = 1. Its operation count (1233.9 M)
  matches the paper's 1234.1 M.
- P and S per layer are this design's own choice, since the paper does not
  list them. The interval is limited by conv0's one-beat-per-window-pixel
  window unit.
- The image is 8-bit signed per channel. The first layer multiplies by ±1
  weights and thresholds the integer sum.
- Classification (arg-max) is done on chip. The class scores are still
  output.
- The configuration port, the double input buffer, the whole-array stall,
  the two-entry FIFOs and the 4-row window memory are implementation choices.
- Not built:
  - the PCIe link, DMA and host software that feed images and parameters on
    the board;
  - the 0-padding and no-padding network variants (the top always pads with
    -1, though `swu_pad` has a `PAD` parameter);
  - the MNIST multilayer perceptrons of the earlier FINN work;
  - the matrix-multiple-vector PE that the paper proposes as future work for
    reusing weights across several images.
