# BinaryCoP: a streaming binary neural network for face-mask position classification

BinaryCoP classifies a 32x32 RGB face crop into one of four mask-wearing
classes: mask worn correctly, nose exposed, nose and mouth exposed, chin
exposed. The classifier is a binarized VGG-style CNN. Every weight and every
hidden activation is a single bit, so a multiply becomes an XNOR and an
accumulation becomes a popcount. A batch-norm followed by `sign()` becomes one
comparison with a precomputed threshold. The whole network fits in on-chip
memory, and it runs as a pipeline with one hardware stage per layer, so up to
one image per layer is in flight at once.

This repository holds synthesizable SystemVerilog for that accelerator, in
its small high-throughput configuration (called n-CNV below), and a
self-checking testbench for every unit and for the whole pipeline. The
arrangement of compute units follows the FINN style of BNN accelerator:
matrix-vector-threshold units with PE x SIMD parallelism, sliding-window
units, and OR-based max-pooling. Everything the published description leaves
open is filled in with simple choices: stream handshakes, buffer
organisation, the parameter-load port and widths. Those choices are listed in
"Where this RTL departs from or adds to the original design" below.

## The network

| Layer   | In -> out channels | Map size in -> out | PE | SIMD | Cycles per image |
|---------|--------------------|--------------------|----|------|------------------|
| Conv1_1 | 3 -> 16            | 32 -> 30           | 16 | 3    | 900 x 9 x 1 = 8100 |
| Conv1_2 | 16 -> 16           | 30 -> 28           | 16 | 16   | 784 x 9 x 1 = 7056 |
| pool    | OR 2x2             | 28 -> 14           |    |      | |
| Conv2_1 | 16 -> 32           | 14 -> 12           | 16 | 16   | 144 x 9 x 2 = 2592 |
| Conv2_2 | 32 -> 32           | 12 -> 10           | 16 | 32   | 100 x 9 x 2 = 1800 |
| pool    | OR 2x2             | 10 -> 5            |    |      | |
| Conv3_1 | 32 -> 64           | 5 -> 3             | 4  | 32   | 9 x 9 x 16 = 1296 |
| Conv3_2 | 64 -> 64           | 3 -> 1             | 1  | 32   | 1 x 18 x 64 = 1152 |
| FC1     | 64 -> 128          |                    | 1  | 4    | 16 x 128 = 2048 |
| FC2     | 128 -> 128         |                    | 1  | 8    | 16 x 128 = 2048 |
| FC3     | 128 -> 4           |                    | 1  | 1    | 128 x 4 = 512 |

All convolutions are 3x3, stride 1, without padding. Each layer except FC3 is
followed by thresholding (binarized batch-norm). FC3 outputs the four raw
scores, and the host picks the largest.

The cycle count of a layer is *output pixels x (K·K·Ci / SIMD) x (Co / PE)*.
The slowest layer sets the frame rate: Conv1_1, at 8100 cycles, gives 12,345
frames/s at 100 MHz. Resources were spread so that most layers come close to
that figure. This is rate matching: an under-provisioned layer would throttle
the whole pipeline. The deep layers have few operations but many weights, so
they get few PEs with large weight memories.

## Binary arithmetic

Activations and weights take values in {-1, +1} and are stored as 0/1. For
one output neuron with an input vector of MW bits:

* `matches = popcount(XNOR(activations, weights))`
* the ±1 dot product is `2·matches − MW`
* the hidden-layer output bit is `matches >= T`

The threshold `T` is computed offline from the batch-norm statistics of the
neuron. It folds batch-norm and `sign()` into one compare. A batch-norm with
negative scale would need the opposite comparison. The RTL assumes that case
has already been folded into the weights, by negating the neuron's weights
and adjusting `T`.

Max-pooling of {0,1} values is an OR, because a single 1 makes the window's
maximum 1.

The 8-bit input image is binarized the same way, with one threshold per
colour channel (`input_binarizer`). After that, Conv1_1 is an ordinary
XNOR layer.

## How a layer is computed: the MVTU

`mvtu` multiplies an MH x MW binary matrix by an MW-bit input vector. It holds
`PE` processing elements (`bnn_pe`), and each PE consumes `SIMD` columns per
cycle. The matrix is therefore folded twice:

* the synapse fold, `SF = MW / SIMD`: the number of words per row;
* the neuron fold, `NF = MH / PE`: the number of row groups. Row `n` belongs to
  PE `n % PE` in fold `n / PE`.

The unit performs one (fold, word) step per cycle, in this order:

```
for nf in 0..NF-1:            # neuron fold
  for sf in 0..SF-1:          # synapse fold, one word per cycle
    every PE p: acc_p += popcount(~(in_word[sf] ^ W_p[nf*SF + sf]))
  every PE p: result[nf*PE + p] = (acc_p >= T_p[nf])   # or the dot product
```

During fold 0 the words come straight from the input stream and are also
written to an SF-word input buffer. Folds 1 to NF−1 re-read that buffer, so
the input is taken once per vector. A vector costs exactly `SF·NF` cycles.
The packed result (MH bits, or MH signed 16-bit scores when `OUT_ACC=1`)
leaves one cycle after the last step. The unit stalls only when that output
register has not been taken yet.

Each PE owns its weight memory (`NF·SF` words of SIMD bits) and its threshold
memory (`NF` entries). This is a weight-stationary organisation: weights are
loaded once, before images flow.

## Feeding convolutions: the SWU

A convolution is the same matrix-vector product, taken once per output pixel
over its 3x3xCi window. `swu` turns the raster stream of pixels (one Ci-bit
pixel per beat, channel c in bit c) into those window vectors. For each output
pixel it emits the window in the order (ky, kx, channel word), as
`Ci/SIMD` words of SIMD bits per window position. Weight column
`(ky·3 + kx)·Ci + c` therefore lines up with the same activation bit.

The unit stores two whole frames in ping-pong. Frame *n+1* is written while
the windows of frame *n* are read, so neighbouring layers work on different
images at the same time. Writing takes one pixel per cycle while a bank is
free, and reading gives one word per cycle while a bank is full. With a
full-frame buffer, a layer can start only after its whole input map has
arrived. That is the main reason why the first-image latency is longer than
the sum of the layer cycle counts (see "Measured behaviour" below).

## Glue

* `maxpool_or` ORs each 2x2 window over two rows, using a half-width row
  buffer. It emits the pooled pixel when the window's bottom-right pixel
  arrives.
* `stream_dwc` splits a wide word (a whole layer output) into SIMD-bit words
  for the next fully-connected MVTU, lowest bits first. The beats of a
  multi-pixel map simply continue the same vector, which also flattens the
  map.
* Every connection is a valid/ready stream. A beat moves when both are high.
  A producer that has raised `valid` holds it and its data until `ready`;
  assertions in the units check this.

## Top level: `bincop_top`

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control state (the memories are not reset) |
| `cfg_we` | in | 1 | parameter write strobe |
| `cfg_layer` | in | 4 | 0 … N_CONV+N_FC−1: MVTUs in stream order (0–8 = Conv1_1 … FC3 by default); 9: input thresholds |
| `cfg_kind` | in | 1 | `CFG_WEIGHT` (0) or `CFG_THRESH` (1) |
| `cfg_pe` | in | 8 | PE inside the layer |
| `cfg_addr` | in | 16 | weight word `nf*SF + sf`, threshold `nf`, or input channel |
| `cfg_data` | in | 32 | weight word (low SIMD bits, bit b = column `sf*SIMD + b`) or threshold (a match count) |
| `in_valid/ready/data` | | 24 | one RGB pixel per beat, R in [7:0], G in [15:8], B in [23:16]; raster order, 1024 beats per image |
| `out_valid/ready/data` | | 4x16 | one beat per image; class c is the signed score at `[16c +: 16]` |

Load all parameters before sending images. The parameters of the top module
are the channel counts, `N_CONV` (6 or 5), `N_FC` (3 or 2), `PE_L[9]` and
`SIMD_L[9]`. The PE and SIMD values are listed per layer in pipeline order.
The defaults are n-CNV. Two other prototypes of the same family run on the
same RTL:

* **CNV**, the larger and more accurate prototype: override only the sizes.
  * channels 64/64/128/128/256/256;
  * FC layers 512/512/4;
  * PE counts 16, 32, 16, 16, 4, 1, 1, 1, 4;
  * SIMD lanes 3, 32, 32, 32, 32, 32, 4, 8, 1.
* **μ-CNV**, the smallest prototype: set `N_CONV = 5` and `N_FC = 2`.
  * Conv3_2 is dropped. The 3x3x64 output of Conv3_1 is flattened (pixel by
    pixel, channels inside a pixel) into a 576-bit vector for FC1 (128
    neurons).
  * The second FC layer, with 4 neurons, becomes the classifier.
  * PE counts 4, 4, 4, 4, 1, 1, 1.
  * SIMD lanes 3, 16, 16, 32, 32, 16, 1.

In the μ-CNV case, `cfg_layer` 0–6 address the seven MVTUs. Elaboration checks
reject a size in which SIMD does not divide a layer's width or PE does not
divide its height.

The processor that sends images, loads the parameters and picks the class
from the scores is outside this RTL. So is the camera.

## Measured behaviour in simulation

* Default (n-CNV) parameters, steady state: one result every **8100**
  cycles, equal to the Conv1_1 estimate. That is 12,345 frames/s at 100 MHz. The published board-level
  measurement is about 6400 frames/s. It includes the processor and data
  movement, which this RTL does not model.
* First-image latency: **27,640** cycles, or 0.28 ms at 100 MHz. The
  published figure is 0.31 ms.
* CNV parameters: one result every **32,768** cycles (FC1 and FC2 are the
  slowest), which is 3052 frames/s at 100 MHz. The published measurement for
  CNV is 3049 frames/s. The first-image latency is 216,412 cycles, or 2.16 ms,
  against a published 1.58 ms. The difference comes from the full-frame SWU
  buffers.
* μ-CNV parameters: one result every **32,400** cycles (Conv1_1 with only 4
  PEs), which is 3086 frames/s at 100 MHz. The published board measurement is
  1646 frames/s. The first-image latency is 89,498 cycles, or 0.89 ms, against
  a published 0.81 ms.

## Where this RTL departs from or adds to the original design

* **FC3 size.** The original design's latency estimate for FC3 (8192 cycles at
  PE 1, SIMD 1) implies that the last layer was padded to 64 rows. This RTL
  computes only the 4 real rows, which take 512 cycles. This does not change
  the frame rate, which Conv1_1 sets.
* **First-layer input.** The image is binarized by per-channel thresholds
  before Conv1_1, following the network equations. FINN-style designs often
  feed 8-bit pixels into a first layer with binary weights instead.
* **SWU buffering.** The SWU buffers whole frames in ping-pong, where a line
  buffer of K rows would be smaller. This costs latency, but not throughput.
* **Memory reads.** Weight and threshold memories are read combinationally,
  like distributed RAM. Mapping the large ones to block RAM would add one
  pipeline stage to the PE.
* **Designed here.** The stream handshake, the parameter-load port, the
  16-bit score width, the 8-bit pixel format and the reset behaviour were
  all chosen for this RTL.
* **Not provided.**
  * Offloading XNORs to DSP blocks, which is needed to fit μ-CNV on the
    smallest FPGA.
  * The host-side arg-max.

## Files and simulation

`rtl/` holds the following files, one unit per file:

* `bincop_pkg.sv`: shared functions and the configuration encoding;
* `bnn_pe.sv`;
* `mvtu.sv`;
* `swu.sv`;
* `maxpool_or.sv`;
* `stream_dwc.sv`;
* `input_binarizer.sv`;
* `bincop_top.sv`.

`tb/` holds one self-checking testbench per unit and three end-to-end
testbenches:

* `tb_bincop_top.sv`, at the default n-CNV size;
* `tb_bincop_cnv.sv`, with the CNV sizes;
* `tb_bincop_ucnv.sv`, with the μ-CNV sizes.

The three end-to-end testbenches differ only in their size constants. The
end-to-end tests do the following:

* draw random weights, thresholds and images;
* compute the expected scores with a behavioural model of the network;
* check the steady-state frame interval;
* count how often each pipeline mechanism occurred: input stalls, several
  images in flight, both SWU banks full, output back-pressure reaching the
  last MVTU. A mechanism that never happened counts as a failure.

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/bincop_pkg.sv \
          tb/tb_bincop_top.sv --top-module tb_bincop_top -Mdir obj
./obj/Vtb_bincop_top
```

Use the same pattern with `tb/tb_mvtu.sv` and the other testbenches. The
end-to-end test builds in seconds and simulates about 100,000 cycles.
