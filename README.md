# On-sensor track-state inference: a streaming quantised network in RTL

A charged particle crossing a thin, finely segmented silicon pixel sensor
leaves a cluster of charge. The shape of that cluster, and the way it builds
up over the first few nanoseconds, says where the particle crossed the sensor
and at which angles. A small neural network can read this from the cluster and
report the track's local position `(x, y)`, its two incidence angles
`(alpha, beta)` and the uncertainty of all four. If this runs on the sensor's
readout chip, a single layer of silicon already delivers a track seed with a
credible error window. Later stages then search only a small window for
matching hits, instead of every combination of hits.

This repository holds synthesizable SystemVerilog for that network as a
streaming pipeline:

- **Input**: a 21 x 13 pixel cluster, with 20 time samples per pixel, sent one
  pixel per clock.
- **Output**: 14 numbers, namely 4 track parameters and the 10 independent
  terms of their 4 x 4 covariance matrix.

The network is a mixture-density-network regression. It is six trained layers
with an average-pooling step in the middle. Every weight and activation is a
4-bit or 8-bit fixed-point number. The convolutions need only 4 x 4 and 12 x 4
bit multipliers, and the dense layers 8 x 8.

## The network, layer by layer

| # | layer | map in | map out | weights | activation out |
|---|-------|--------|---------|---------|----------------|
| 1 | separable conv: 3x3 depthwise, then 1x1 to 5 filters | 21 x 13 x 20 | 19 x 11 x 5 | Q1.3 | hard-tanh, Q1.3 |
| 2 | separable conv: 3x3 depthwise, then 1x1 to 5 filters | 19 x 11 x 5 | 17 x 9 x 5 | Q1.3 | hard-tanh, Q1.3 |
| 3 | 1x1 convolution, 5 filters | 17 x 9 x 5 | 17 x 9 x 5 | Q1.3 | hard-tanh, Q1.3 |
| – | 2x2 average pooling | 17 x 9 x 5 | 8 x 4 x 5 | – | none, Q1.7 |
| 4 | dense | 160 | 16 | Q1.7 | hard-tanh, Q1.7 |
| 5 | dense | 16 | 16 | Q1.7 | hard-tanh, Q1.7 |
| 6 | dense | 16 | 14 | Q1.7 | hard-tanh, Q1.7 |

The notation works as follows:

- **Q1.3** is a 4-bit two's-complement number with 3 fraction bits. It covers
  −1 to +0.875 in steps of 1/8.
- **Q1.7** is the 8-bit version. It covers −1 to +127/128.
- **Hard-tanh** is a clip to the format's range. Here it also re-quantises:
  fraction bits are dropped by rounding toward minus infinity, and the result
  is then saturated.

The input samples are charges that were log-compressed and scaled into
[−1, 1] before quantisation to Q1.3. That conversion sits outside this RTL.

The convolutions are "valid": no padding, so every 3x3 layer trims one pixel
from each edge. Pooling uses stride 2 and drops the odd last row and column.
With these choices the dense layers do exactly 160·16 + 16·16 + 16·14 = 3,040
multiply-accumulates. That matches the published operation count of the
trained network.

## Fixed point: where each bit goes

This is the part that decides bit-exactness against a software model, so here
it is in full.

**Depthwise 3x3 (layers 1, 2).**
- Each product of a Q1.3 pixel and a Q1.3 weight has 6 fraction bits.
- Nine such products sum to at most 576/64 in magnitude, which fits 12 bits.
- This sum is **not** activated. It is kept at full precision and registered.

**Pointwise 1x1 of a separable layer.**
- Each 12-bit depthwise sum is multiplied by a Q1.3 weight, giving 9 fraction
  bits.
- The Q1.3 bias is shifted left by 6 to line up.
- For 20 input channels the sum fits in 18 bits.
- Hard-tanh drops 6 bits and clips to [−8, 7] (Q1.3 codes).

**1x1 convolution (layer 3).**
- Q1.3 × Q1.3 products and a bias shifted by 3 fit in a 10-bit sum.
- Hard-tanh drops 3 bits and clips.

**Average pooling.**
- The sum of four Q1.3 codes lies between −32 and +28.
- Their mean is this sum divided by 32, which is exact in 5 fraction bits.
- Shifting the sum left by 2 gives the Q1.7 code with no rounding. The two
  lowest output bits are therefore always zero.

**Dense layers.**
- Q1.7 × Q1.7 products have 14 fraction bits. The bias is shifted by 7.
- The sums fit 23 bits (160 inputs) and 20 bits (16 inputs).
- Hard-tanh drops 7 bits and clips to [−128, 127].

Every accumulator width is computed in the RTL from its worst-case sum. The
widths therefore follow if a layer size is changed.

## How a cluster streams through

The pixel port is 80 bits wide: one pixel's 20 samples of 4 bits.

**Pixel order and framing.**
- Pixels arrive in raster order: x (21 pixels) fastest, then y (13 rows).
- `pix_valid` qualifies each pixel. Idle cycles may appear anywhere.
- There is no back-pressure, because every stage keeps up with one pixel per
  clock.
- A cluster is simply the next 273 accepted pixels. All frame counters start
  at reset and wrap at the end of each frame. Nothing resynchronises them: if
  a pixel is lost or added, every later cluster is misaligned until the next
  reset.

**Convolution stages.**
- A 3x3 layer keeps the previous two rows in line buffers (`window3x3`): 2 x
  21 x 80 bits for layer 1.
- It emits a window whenever the incoming pixel completes one.
- The layer's output is therefore a stream with gaps, one value per window
  position. The next layer counts only valid beats, so it sees a smaller
  raster with gaps and treats it the same way.

**The first dense layer never stores its 160-value input.**
- Each pooled vector (5 values) arrives with its position `p`.
- In that cycle, 80 multipliers add it into 16 running sums, using the kernel
  rows `p·5 … p·5+4`.
- Position 0 restarts the sums from the biases.
- After the last position, the sums are activated and handed to layers 5 and
  6. Each of those is one fully parallel, registered step.

**Why the result comes before the cluster ends.**
- Pooling discards the last row and column of the 17 x 9 map. Those depend
  only on the sensor's last pixel row and column.
- The final pooled vector is therefore complete once pixel (x=19, y=11) has
  arrived.
- From that pixel, 11 register stages follow: 3 + 3 for the separable layers,
  then 1 each for the 1x1 layer, pooling and the three dense layers.

For a gap-free cluster:

| quantity | cycles | at 200 MHz |
|----------|--------|------------|
| first pixel to `out_valid` | 261 | 1.305 µs |
| cluster to cluster (initiation interval) | 273 | 1.365 µs |

The published FPGA build of the same streaming network reports 1.46 µs latency
and a 1.38 µs interval at 5 ns. A Catapult-HLS ASIC build reports 27 µs
latency. Both figures are dominated by feeding the data one pixel at a time,
as here.

## Weights

The trained weights are not part of the design. All 3,476 weights and biases
sit in registers inside their layers. They are written one per clock through
`wt_we`, `wt_addr` (12 bits) and `wt_data` (8 bits).

The convolution layers keep `wt_data[3:0]` as a Q1.3 code. The dense layers
keep all 8 bits as Q1.7.

Kernel layouts are:

- depthwise: `[channel][ky][kx]`
- pointwise and 1x1: `[out][in]`
- dense: `[in][out]`

The dense-1 input index is `(row·8 + col)·5 + channel`: row-major, channel
last.

The address map:

| addresses | content | count |
|-----------|---------|-------|
| 0–179 | layer 1 depthwise | 20 x 9 |
| 180–279 | layer 1 pointwise | 5 x 20 |
| 280–284 | layer 1 bias | 5 |
| 285–329 | layer 2 depthwise | 5 x 9 |
| 330–354 | layer 2 pointwise | 5 x 5 |
| 355–359 | layer 2 bias | 5 |
| 360–384 | layer 3 kernel | 5 x 5 |
| 385–389 | layer 3 bias | 5 |
| 390–2949 | dense 1 kernel | 160 x 16 |
| 2950–2965 | dense 1 bias | 16 |
| 2966–3221 | dense 2 kernel | 16 x 16 |
| 3222–3237 | dense 2 bias | 16 |
| 3238–3461 | dense 3 kernel | 16 x 14 |
| 3462–3475 | dense 3 bias | 14 |

An assertion in the top flags writes outside this map.

Weights may be changed between clusters. A write takes effect immediately, so
a write during a cluster changes that cluster's result.

## The 14 outputs

The output vector holds 14 Q1.7 values:

- the four track parameters (x, y, alpha, beta);
- the ten independent entries of their symmetric covariance matrix.

Hard-tanh clips the outputs, like every other layer. Which output carries which
quantity, and how the covariance terms are encoded (for example, as the
entries of a Cholesky factor), is fixed by the training. The hardware does not
depend on it.

## What follows the published design, and what is this design's own

Taken from the published network:

- the layer sequence and sizes;
- 3x3 kernels and 5 filters in the convolutions;
- 16, 16 and 14 dense units;
- Q1.3 inputs, Q1.3 convolution weights and activations;
- Q1.7 pooling output, Q1.7 dense weights and activations;
- hard-tanh on every layer except pooling;
- one pixel (20 x 4 bits) per clock at a 200 MHz target.

Chosen here, where the description is silent:

- valid padding and pooling that drops the odd edge (these match the published
  dense operation count);
- one bias per output unit;
- rounding toward minus infinity;
- no activation between the depthwise and pointwise halves;
- raster order with x fastest;
- flatten order row, column, channel;
- the weight port and its address map;
- accumulating dense 1 on the fly;
- the register placement, and therefore the cycle counts above;
- asynchronous reset of the control state only.

Known differences and open points:

- **4-bit operation count.** The convolutions here perform 73,055 4-bit MACs
  per cluster: 37,620 + 20,900 (layer 1), 6,885 + 3,825 (layer 2) and 3,825
  (layer 3). The published count is 50,140. The counting rule behind that
  figure is not known, and no reading of the layer shapes tried here
  reproduces it.
- **Pooling reduction.** Pooling is said to shrink the dense input "nearly
  four-fold". Here it goes from 765 values to 160, closer to five-fold. The
  sizes follow the dense operation count, which is exact.
- **No parallel variant.** A fully parallel variant (all pixels presented at
  once) is mentioned as future work and is not built.
- **No analog front end.** The sensor, its charge sampling and the log
  compression of the charge are not part of this RTL.
- **Timing and power unchecked.** Timing closure at 5 ns and power have not
  been checked.

## Verification

Each module has a self-checking testbench in `tb/`. Each compares the hardware
with `mdn_ref_pkg`, a reference model of the network written with real-valued
arithmetic. The model quantises with `floor(v·2^f)` and clips. It shares only
the weight address map with the RTL, not its shifts or widths.

| testbench | what it covers |
|-----------|----------------|
| `tb_qsepconv2d` | layer 1 at full size: three frames, one with idle cycles; every output, its cycle (3 after the completing pixel) and `out_last` |
| `tb_qconv1x1` | 400 vectors; one-cycle latency and `last` passthrough |
| `tb_avgpool2x2` | 17 x 9 x 5 frames, including all-extreme values; values, positions, timing |
| `tb_qdense_stream` | back-to-back frames with and without gaps, two weight scales, clipping at both ends |
| `tb_qdense` | 300 vectors, consecutive and spaced |
| `tb_smartpixel_mdn` | the whole network at full size (details below) |
| `tb_cluster_workload` | 300 synthetic track clusters streamed back to back, with no idle cycle; each result, the 273-cycle interval, the total run time, and that the results vary |

`tb_smartpixel_mdn` runs 14 clusters under three weight sets and compares all
14 outputs of each cluster. It also checks:

- the 261-cycle latency and the 273-cycle interval;
- that each of these happened at least once: back-to-back clusters, idle
  cycles, a weight reload, clipping at both ends, and a cluster whose last row
  and column were altered without changing its result.

Run a testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_smartpixel_mdn \
    -y rtl -y tb +libext+.sv rtl/smartpixel_pkg.sv tb/mdn_ref_pkg.sv \
    tb/tb_smartpixel_mdn.sv
./obj_dir/Vtb_smartpixel_mdn
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if the test hangs. The full-size test simulates in
well under a second.

## Files

| file | content |
|------|---------|
| `rtl/smartpixel_pkg.sv` | sizes, number formats, weight address map, hard-tanh functions |
| `rtl/smartpixel_mdn.sv` | top: the complete pipeline |
| `rtl/qsepconv2d.sv` | depthwise-separable 3x3 layer (layers 1 and 2) |
| `rtl/window3x3.sv` | line buffers and 3x3 window for a raster stream |
| `rtl/qconv1x1.sv` | 1x1 convolution (layer 3) |
| `rtl/avgpool2x2.sv` | 2x2 average pooling |
| `rtl/qdense_stream.sv` | dense layer accumulated while its input streams (layer 4) |
| `rtl/qdense.sv` | parallel dense layer (layers 5, 6) |
| `tb/mdn_ref_pkg.sv` | reference model |
| `tb/tb_*.sv` | testbenches |

To change a size, edit the constants in `smartpixel_pkg`. The address map,
the line buffers, the frame counters and the accumulator widths all follow
from them.
