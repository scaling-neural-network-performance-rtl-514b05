# A streaming dataflow accelerator for quantized neural networks

Quantized neural networks (QNNs) use few-bit integers for weights and
activations, for example 1-bit weights and 2-bit activations (written W1A2).
Integer arithmetic that narrow costs a few LUTs per multiply-accumulate.
Most or all of the weights then fit in on-chip memory.

This design does not time-share one big datapath across the layers. It
builds **one hardware layer per network layer**. Every layer gets its own
line buffer, its own weight memory and its own compute array. All layers
run at the same time as a pipeline: pixels enter the first layer and class
scores leave the last one. How much compute each layer gets is set
separately, so that the layers take about the same number of cycles per
frame. The organisation is the one of the FINN framework, with three
extensions:

* **Per-layer precision.** Every layer has its own weight width, input
  and output activation widths, and accumulator width.
* **Multi-vector compute (MMVTU).** One weight read is used for M images at
  once. This multiplies throughput by M without adding weight-memory
  bandwidth.
* **Minimal sliding-window buffers.** Each layer buffers only the rows its
  kernel still needs, plus the rows being filled.

The default configuration is the DoReFa-Net for ImageNet classification
(an AlexNet-like network, W1A2 with 8-bit first and last layers). A complete
224x224 frame has been simulated through it bit-exactly (see Verification).

## Dataflow and stream format

```
 image ──► conv0 ──► conv1+pool ──► conv2 ──► conv3 ──► conv4+pool ──► fc0 ──► fc1 ──► fc2 ──► scores
           (one conv_layer per network layer, joined by valid/ready streams)

 conv_layer:  in ──► swu ──► mmvtu ──► [pool_unit] ──► out
                              ▲
                 cfg port ────┘ (weights, thresholds)
```

Every link is a valid/ready stream. A beat moves when `valid && ready`
on the rising clock edge. A beat carries **M images side by side**, and
lane `m` of every field belongs to image `m`. Feature maps travel pixel by
pixel in raster order, and frames follow each other with no gap. A pixel of
C channels takes C/P beats of P channels each, lowest channels first. Here
P is the PE count of the layer that produces the stream. The next layer
must therefore have `IN_PAR` equal to that PE count. `qnn_top` checks this,
and also checks channel counts and map sizes, when it elaborates.

A fully connected layer is a convolution whose kernel covers the whole
input map (K = N). Its "image" is a single output pixel, so the same
hardware handles both layer types.

## Number formats

| quantity | encoding |
|---|---|
| 1-bit weight | bipolar: bit 1 means +1 and bit 0 means −1; no multiplier is needed |
| W-bit weight, W > 1 | two's complement integer; a fixed-point scale is folded into the thresholds |
| activation (A bits) | unsigned level index 0 … 2^A−1 of a clipped ReLU quantized to 2^A levels |
| first-layer input | 8-bit unsigned pixel values, 3 channels |
| accumulator | signed, `prod_bits(W,A) + clog2(K·K·C+1) + 1` bits, wide enough for any exact dot product |
| thresholded output | the number of the 2^AO−1 thresholds that the accumulator reaches (`acc >= T`) |
| last-layer output | the raw signed accumulator, one class score per output channel |

Batch normalisation followed by the quantized activation is a monotone
step function of the accumulator. It can therefore be stored as one
ascending list of thresholds per output channel. With thresholds
`T0 ≤ T1 ≤ T2`, a 2-bit layer outputs 0, 1, 2 or 3.

## The MMVTU (`mmvtu`)

The matrix–vector–threshold unit multiplies a CO × (K·K·C) weight matrix
with each window vector. It is folded in two directions:

* **PE** processing elements each own CO/PE matrix rows. Output channel
  `nf·PE + p` belongs to PE `p` at neuron fold `nf`.
* **SIMD** columns are consumed per cycle. A vector takes
  SF = K·K·C/SIMD beats.

One output pixel therefore takes **SF · NF cycles**, with NF = CO/PE.
Each cycle performs **M·PE·SIMD** multiply-accumulates.

```
 fold index (nf*SF+sf) ─► weight_mem[p] ──SIMD·W──┐
                                                   ▼
 input vector (SIMD·A per image) ──► vector_mul ─► vector_sum ─► +acc ─► threshold_unit ─► out
                              (×M images, weights shared)        ▲             ▲
                                                                 acc     threshold_mem[p] (nf)
```

The unit has two pipeline stages. Stage 0 steps the fold counters and
issues the synchronous reads of the weight and threshold memories. Stage 1
multiplies, sums, accumulates, and on the last synapse fold thresholds the
result into the output register. During neuron fold 0 the input vector
comes from the stream and is also written into an SF-word input buffer.
The buffer replays it for neuron folds 1 … NF−1, so the upstream unit sends
each window only once. While the output register is full and not accepted,
the whole unit stalls, with memory read enables included.

With the output always ready, the unit sustains one fold per cycle. The
testbench measures 322 cycles for 20 vectors of 16 folds each.

Weight memory of PE `p`: `K·K·C·CO/(SIMD·PE)` words of `SIMD·W` bits.
Word `nf·SF + sf` holds the weights of row `nf·PE+p`, columns
`sf·SIMD … sf·SIMD+SIMD−1`. Threshold memory of PE `p`: CO/PE words, each
packing 2^AO−1 thresholds of ACC bits. It has no threshold memory when
`THRESH = 0`.

## The sliding window unit (`swu`)

The SWU turns the pixel stream into the window stream that the MMVTU
consumes, in this order:

```
for each output pixel (oy, ox):  for ky, kx in the kernel:  for each chunk of SIMD channels
```

This order is the MMVTU column order `(ky·K + kx)·C + c`.
`CHUNK_OUTER = 1` moves the chunk loop outermost, which is what the pooling
unit needs.

**Buffer organisation.** The line buffer is one memory. Each word holds a
whole pixel: all C channels of all M images, C·A·M bits. It holds
`RB = S·(⌈K/S⌉+1)` rows of N pixels. These are ⌈K/S⌉+1 stripes of S rows.
⌈K/S⌉ stripes cover the kernel height, and one more stripe collects new
input. Input rows are written into buffer rows in circular order. A small
assembly register gathers the C/IN_PAR beats of a pixel into one word
before it is written.

**Row release rule.** This is the part that lets input and output overlap.
Two global row counters are kept:

* `wrows`: the number of input rows completely written so far.
* `rlo_g`: the lowest input row that the current output row still needs.

The writer may start row `wrows` only while `wrows < rlo_g + RB`. Otherwise
it would overwrite a row that is still needed. The reader may start output
row `oy` once input row `min(N−1, oy·S−PAD+K−1)` of its frame is complete.
When an output row finishes, `rlo_g` moves forward by S rows. At the end of
a frame it jumps to row 0 of the next frame. The next frame's rows can
therefore already stream in while the last windows of a frame are read.
The buffer row of a needed image row is found by adding an offset to the
tracked buffer row of `rlo_g`, with at most one wrap-around. No division is
needed.

**Padding.** Window elements that fall in the PAD-pixel border read as 0.
The memory read is synchronous, so `out_data` comes straight from a register.

## Pooling (`pool_unit`)

Max pooling reuses the SWU in chunk-outer order. A running maximum then
reduces the PK·PK window elements of each channel chunk to one output
beat. Padding reads as 0. That value can never win, because activations are
unsigned.

## The default network: DoReFa-Net (`qnn_pkg::DOREFA_NET`)

| layer | input | kernel / stride / pad | output | W / A→AO | SIMD × PE | cycles per frame |
|---|---|---|---|---|---|---|
| conv0 | 224²×3 | 12 / 4 / 0 | 54²×96 | 8 / 8→2 | 3 × 32 | 1.26 M |
| conv1 + pool 3/2/1 | 54²×96 | 5 / 1 / 2 | 27²×256 | 1 / 2→2 | 32 × 32 | 1.75 M |
| conv2 | 27²×256 | 3 / 2 / 1 | 14²×384 | 1 / 2→2 | 16 × 8 | 1.35 M |
| conv3 | 14²×384 | 3 / 1 / 1 | 14²×384 | 1 / 2→2 | 16 × 16 | 1.02 M |
| conv4 + pool 3/2/0 | 14²×384 | 3 / 1 / 1 | 6²×256 | 1 / 2→2 | 16 × 8 | 1.35 M |
| fc0 | 6²×256 | 6 / 1 / 0 | 4096 | 1 / 2→2 | 8 × 4 | 1.18 M |
| fc1 | 4096 | 1 | 4096 | 1 / 2→2 | 16 × 1 | 1.05 M |
| fc2 | 4096 | 1 | 1000 scores | 8 / 2→raw | 4 × 1 | 1.02 M |

The feature-map sizes, channel counts, kernel sizes and precisions come
from the DoReFa-Net topology. The strides, paddings and pooling windows
were chosen to reproduce those map sizes. The folding (SIMD, PE) was
chosen to balance the layers at 1.0–1.75 M cycles per frame.

At these defaults the weights total 91.3 Mbit, 70 % of it in the FC
layers. The line buffers total 0.37 Mbit. One isolated frame has a latency
of 5.47 M cycles: the FC layers can only start once conv4 has finished.
When frames stream back to back, throughput is set by conv1: simulation
gives 1,749,600 cycles between frames, exactly conv1's 54²·75·8 folds,
or 143 frames/s at 250 MHz.

That throughput is far below the several thousand frames per second
reported for this network class. Reaching those rates needs far larger
SIMD × PE × M products. Those are parameters of the table, but the SWU
limits SIMD to a divisor of the channel count. For conv0, with 3 channels,
that is a real ceiling (see Departures).

The network's resource formulas relate to the parameters as follows:

* Line-buffer size (block RAMs): `M·(⌈K/S⌉+1)·⌈S·N/512⌉·⌈C·A/36⌉`.
* Weight memory (block RAMs): `PE·⌈WM·36/512⌉·⌈SIMD·W/36⌉`, with
  `WM = K²·C·C'/(SIMD·PE)`.
* LUT cost: `M·PE·SIMD·f(A,W)`.

The RTL realises exactly the memory shapes these formulas count. The
formulas themselves belong to the design-space tool and are not hardware.

## Loading weights and thresholds

`qnn_top` has a write port: `cfg_we`, `cfg_layer`, `cfg_sel`
(`SEL_WEIGHT`/`SEL_THRESH`), `cfg_pe`, `cfg_addr` and `cfg_data`.
`cfg_data` is as wide as the widest word of any layer, and each layer uses
its low bits. One word is written per cycle. Load everything before sending
images, because writes are not synchronised with the running computation.
At the defaults, loading takes about 7.0 M cycles. On an FPGA the memories
could instead be initialised with the bitstream.

## Departures from the reference design, and what is this design's own

* **Grouped convolutions are merged.** The DoReFa-Net topology draws
  conv0, conv2, conv3 and the conv4 input as two branches (48 + 48 and
  192 + 192 channels). Here each is one layer with the summed channel count,
  connecting every input channel to every output channel. This doubles the
  MACs and weights of conv1, conv3 and conv4 compared with a grouped
  version.
* **Not given, chosen here:**
  * strides, paddings and pooling windows (see the table above);
  * the folding;
  * M = 1 at the defaults (the testbenches use M = 2);
  * the stream handshake and channel order;
  * the window element order;
  * the number and meaning of the thresholds;
  * the synchronous active-low reset;
  * the weight write port;
  * accumulator widths (exact, rather than tuned per layer).
* **Last layer.** It outputs raw accumulators. Picking the winning class
  is left to the host.
* **Platform.** The AWS F1 shell (PCIe DMA and DDR) is not included. The
  image, score and load streams are the top-level ports.
* **Technology mapping.** LUT versus DSP use and the clock frequency
  (250 MHz in the estimates) are left to synthesis. No timing closure has
  been attempted.
* **SIMD limit.** SIMD must divide the channel count C, because a window
  beat never spans two kernel positions. This limits first-layer
  parallelism.
* **Counter wrap.** The SWU row counters are 32 bits and wrap after 2^32
  input rows.

## Files

| file | content |
|---|---|
| `rtl/qnn_pkg.sv` | `layer_cfg_t`, size functions, the `DOREFA_NET` layer table, `mem_sel_e` |
| `rtl/qnn_top.sv` | layer chain, configuration demultiplexer, elaboration checks |
| `rtl/conv_layer.sv` | SWU → MMVTU → optional pooling |
| `rtl/swu.sv`, `rtl/pool_unit.sv` | window generation, max pooling |
| `rtl/mmvtu.sv` | folded multi-vector compute core |
| `rtl/vector_mul.sv`, `rtl/vector_sum.sv`, `rtl/threshold_unit.sv` | datapath pieces |
| `rtl/weight_mem.sv`, `rtl/threshold_mem.sv` | per-PE memories, one write port and one synchronous read port |
| `tb/qnn_ref_pkg.sv` | integer reference model and the weight/threshold generator |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the network-level ones below |

A new network is a new `layer_cfg_t` table passed to `qnn_top` as `CFG`,
with `NL` set to its length. The elaboration checks report mismatched
neighbouring layers.

## Verification

Every testbench drives its unit and computes expected values independently
of the RTL: integer arithmetic in the testbench, or the layer model in
`qnn_ref_pkg`. Each testbench prints `TB_RESULT checks=N failures=F` and has
a watchdog. Weights and thresholds come from a hash of (layer, channel,
column), so no data files are needed. Thresholds are spread around zero,
scaled to the expected size of a dot product, so that all output levels
occur.

* `tb_vector_mul`, `tb_vector_sum`, `tb_threshold_unit`, `tb_weight_mem`,
  `tb_threshold_mem`: exhaustive-style random checks of the leaf units.
* `tb_mmvtu`: M = 2, bipolar/thresholded and 4-bit/raw variants, random
  stalls, and a check of the one-fold-per-cycle rate.
* `tb_swu`: three frames with stride 2 and padding 1, one channel per input
  beat. It also checks that the writer was held off by a full buffer and
  that input and output overlapped.
* `tb_pool_unit`, `tb_conv_layer`: window maxima, and a full layer against
  the reference.
* `tb_qnn_top`: a three-layer network with M = 2 over three frames. It uses
  an 8-bit first layer with pooling, a strided bipolar layer, and an FC
  layer with raw scores. It counts output stalls, input stalls, frame
  overlap and differing image lanes, and fails if any of them never
  happened.
* `tb_qnn_w1a1`, `tb_qnn_w2a2`, `tb_qnn_w4a4`, `tb_qnn_w8a8`: the same
  small network with hidden layers at each precision of the DoReFa-Net
  study.
* `tb_qnn_top_full`: the default DoReFa-Net, two 224×224×3 frames back
  to back, all 2×1000 scores compared, and the interval between the two
  frames checked against the slowest layer's fold count. It takes about
  3 minutes of simulation after a 1-minute build.
* Every end-to-end test that streams several frames also checks that
  frames finish no further apart than the slowest unit's cycle count
  (plus 10 %).

To run one, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/qnn_pkg.sv tb/qnn_ref_pkg.sv tb/tb_qnn_top.sv --top-module tb_qnn_top -o sim
./obj_dir/sim
```

The simulations are two-state. Everything that is read is reset or written
first.
