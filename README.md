# A CNN image-recognition trigger for the HL-LHC Level-1 trigger

At the High-Luminosity LHC, every bunch crossing that the Level-1 trigger keeps
has to be chosen in a few microseconds, from coarse detector data, in FPGAs.
This design picks out one rare, high-value signal: di-Higgs production with
both Higgs bosons decaying to b quarks (HH→bbbb). It treats each crossing as a
picture. The transverse energy (E_T) measured in the calorimeter trigger towers,
or carried by pile-up-filtered particle-flow candidates, is histogrammed on an
η–φ grid. The resulting 12×12 image goes to a small convolutional neural network
(CNN), and the network's sigmoid score is compared with a threshold.

The network is deliberately tiny: two convolution layers and three fully
connected layers, 1294 parameters in all. It was sized so that the whole
computation fits in one third (one Super Logic Region) of a Xilinx VU9P. With
time-multiplexing, each processing node sees one crossing in six, so the node
must accept a new image at least every 54 clock cycles. This RTL takes one every
18.

The SystemVerilog here implements that trigger node, from candidates in to
accept bit out, in the configuration the design study settled on: an 18×18
padded image, a first convolution with 3×3 kernels, stride 3 and four filters,
a second convolution with one 3×3 kernel over those four channels, dense
layers of 32, 16 and 8 neurons, one output neuron and a sigmoid. The trained
weights are not published, so the design loads them at run time.

## Data path

```
 candidates (tower iη, tower iφ, E_T), one per clock, evt_end closes a crossing
      │
 et_histogrammer   72×72 towers → 12×12 pixels (6×6 towers each), two banks (ping-pong),
      │            one η row per clock, readouts ≥ 18 clocks apart, drops a crossing that arrives too early
 pixel_scaler      clip each pixel at 512 GeV, scale to [0,1]
      │
 image_padder      12×12 → 18×18: 3 φ columns wrapped from the opposite edge on each side,
      │            3 zero rows above and below in η; one padded row per clock
 cnn_classifier
   conv2d_relu  (conv1)  18×18×1 → 6×6×4   3×3, stride 3, 4 filters, ReLU, one output row per clock
   conv2d_relu  (conv2)  6×6×4  → 4×4×1    3×3×4, stride 1, 1 filter, ReLU
   flatten_buffer        4×4×1  → 16
   dense_layer  (dense1) 16 → 32, ReLU
   dense_layer  (dense2) 32 → 16, ReLU
   dense_layer  (dense3) 16 → 8,  ReLU
   dense_layer  (output) 8 → 1, 16-bit weights, no ReLU → logit
   sigmoid_lut           logit → score in [0,1)
      │
 trigger_decision  accept = score > threshold, plus scored/accepted counters
```

`param_store` holds the 1294 weights and biases and feeds them to every layer
in parallel. `cnn_trigger_top` wires the whole chain, and `cnn_pkg` holds the
number formats, the sizes and the parameter layout.

## Building the image

A candidate carries the η and φ indices of its trigger tower. There are 72
towers per axis, each 0.087 × 0.087, covering |η| < 3, so φ covers the full
circle. The candidate's E_T is counted in 0.25 GeV steps with 16 bits.
`et_histogrammer` divides each tower index by 6 to find its pixel. It adds the
E_T to that pixel, saturating at 0xFFFF, and ignores indices of 72 or more.

Two banks of 12×12 sums alternate. While crossing *n* accumulates in one bank,
the image of crossing *n−1* is read out of the other. Readout gives one η row
per clock, twelve in a row, and clears each row as it goes. Readouts start at
least 18 clocks apart, because the network downstream takes one padded row per
clock and a padded image has 18 rows. If a crossing ends while the other bank
still holds an image that has not been fully read, the new crossing is thrown
away: its bank is cleared and `dropped` pulses for one clock. In a
time-multiplexed system crossings arrive every 54 clocks, so this only happens
if the input violates the node's rate.

With an idle pipeline, the first image row is valid in the third clock after
the clock that carries `evt_end`.

## Preparing the image for the network

The network was trained on pixels in [0,1]. `pixel_scaler` clips each pixel sum
at 512 GeV (2048 counts), then divides by 512 GeV. The result is in the
activation format, where 1.0 = 1024, so the pixel value is
`min(E_T, 2048) * 1024 / 2048`.

Unrolling the φ circle into a flat image puts a cut through any jet that sits
on the φ = 0 line. `image_padder` repairs this by copying the three outermost φ
columns of each edge onto the opposite side: padded column *c* holds φ pixel
`(c − 3) mod 12`. So every jet appears whole at least once. The η edges are real
detector edges, and those get three rows of zeros above and below. The padder
emits those zero rows while its three-row delay line fills. The image therefore
leaves as 18 consecutive padded rows, starting the clock after its first
unpadded row arrives.

## The network

### First convolution: one output row per clock

This is the heart of the hardware. The first convolution is computed a whole
output row at a time. All 6 output columns and all 4 filters are evaluated in
the same clock, which takes 6 × 4 × 9 = 216 multipliers. This is the im2col
style of parallelism, unrolled over one row.

`conv2d_relu` receives its input one row per clock. A line buffer keeps the
previous K−1 rows. When input row *y* arrives, with *y* = *oy*·S + K − 1, the
K×K window of every output column is complete, and output row *oy* is computed
and registered. For conv1 (K = S = 3) that happens on input rows 2, 5, 8, 11,
14 and 17. The six output rows therefore leave every third clock, and the last
one leaves the clock after the last padded row:

```
padded row in :  0  1  2  3  4  5  6 ... 15 16 17
conv1 row out :           0        1 ...           5   (each one clock after its last input row)
conv2 row out :                          0  ...  3     (on conv1 rows 2,3,4,5)
```

Convolutions are "valid": the kernel never leaves the padded image. That is
what the η/φ padding is for, and the parameter counts of the study's models
only come out right this way.

### Second convolution and flatten

The second convolution is the same module with a 6×6×4 input, one 3×3×4 kernel
and stride 1. It produces a 4×4×1 map, one row each time a conv1 row completes
its window. `flatten_buffer` collects the four rows. On the fourth it presents
the 16-element vector in (h, w, c) order, the order a channels-last framework
uses when it flattens.

### Fully connected layers, output neuron and sigmoid

`dense_layer` forms all products of a layer in one clock and registers the
result. A new vector may enter every clock. The three hidden layers (32, 16 and
8 neurons) use ReLU. The output neuron has 16-bit weights and no ReLU. Its
16-bit logit goes to `sigmoid_lut`, a 1024-entry table of 1/(1+e^−x) over
[−8, 8), sampled at bin centres and computed at elaboration. Inputs outside
that range are clamped. The score is a 16-bit unsigned fraction; 0xFFFF is
just under 1. In a sweep over the whole input range its error against the exact sigmoid stays within 128/65536.

## Number formats

| quantity | format | where it comes from |
|---|---|---|
| hidden-layer weights and biases | signed 8 bit, 2 integer + 6 fractional | quantisation-aware training of the study |
| output-neuron weights and bias | signed 16 bit, 6 integer + 10 fractional | 16 bits from the study, split chosen here |
| activations, pixels, logit | signed 16 bit, 6 integer + 10 fractional ([−32, 32)) | chosen here |
| score | unsigned 16 bit, all fractional | 16 bits from the study |
| candidate E_T and pixel sums | unsigned 16 bit, 0.25 GeV per count | chosen here |

Each layer accumulates at full precision in 48 bits. The result is requantised
by an arithmetic right shift (rounding toward −∞), then ReLU where the layer
has one, then saturation to the 16-bit range. This behaviour is in
`cnn_pkg::requant`.

## Throughput and latency

| event | clock (0 = clock carrying `evt_end`) |
|---|---|
| first image row out of the histogrammer | 3 |
| first padded row into the network | 5 |
| conv1 rows out | 8, 11, … 23 |
| flattened vector | 25 |
| dense1, dense2, dense3, output logit | 26, 27, 28, 29 |
| score | 30 |
| `accept` | 31 |

The score follows the first padded row by 25 clocks. A new image may enter
every 18 clocks, which is this configuration's initiation interval. At 360 MHz
that is 50 ns per image and 86 ns from the end of a crossing to the decision.
The design study's budget is 54 clocks (six crossings of 25 ns) per image and
its HLS implementation of this model has a 283 ns latency, so both are met
with room. The study does not state the clock frequency. 360 MHz is inferred
from its II limit, which it gives as "54 ns" in the text but plots in clock
cycles, and 54 clocks is exactly six crossings at 360 MHz.

## Loading the weights

`param_store` holds 1294 words of 16 bits and is written one word per clock
through `param_wr_en`, `param_wr_addr` and `param_wr_data`. An 8-bit parameter
sits in the low byte of its word. Reset clears every word. The order is:

| words | contents | index |
|---|---|---|
| 0–35 | conv1 weights | (f·3 + ky)·3 + kx |
| 36–39 | conv1 biases | f |
| 40–75 | conv2 weights | (ky·3 + kx)·4 + c |
| 76 | conv2 bias | |
| 77–588 | dense1 weights | o·16 + i |
| 589–620 | dense1 biases | o |
| 621–1132 | dense2 weights | o·32 + i |
| 1133–1148 | dense2 biases | o |
| 1149–1276 | dense3 weights | o·16 + i |
| 1277–1284 | dense3 biases | o |
| 1285–1292 | output weights (16 bit) | i |
| 1293 | output bias (16 bit) | |

The `cnn_pkg::off_*` functions compute these offsets for any geometry. Change
the weights only while no image is in flight; the layers read the store
directly.

`threshold` is a plain input. It is compared with the score using "greater
than", so the working point can be set to the score that gives the wanted rate
(the study uses a 10 kHz rate as its reference point).

## Other network configurations

The design study scanned 16 networks that differ in padded image size and in
the kernel, stride and filter count of the first convolution. The rest of each
network is the same. `cnn_trigger_top` takes these as parameters: `IMG_T`
(unpadded size), `PAD_T`, `K1_T`, `S1_T` and `F1_T`. The package derives every
other size and the parameter count from them. The formula reproduces the
study's parameter count for every model in its table:

| model | padded image | kernel | stride | filters | parameters |
|---|---|---|---|---|---|
| 1 | 18 | 3 | 3 | 1 | 1237 |
| 2 | 18 | 3 | 3 | 2 | 1256 |
| **3 (default)** | **18** | **3** | **3** | **4** | **1294** |
| 4 | 18 | 4 | 2 | 1 | 1884 |
| 5 | 18 | 6 | 2 | 1 | 1552 |
| 6 | 24 | 3 | 3 | 1 | 1877 |
| 7 | 24 | 4 | 4 | 2 | 1270 |
| 8 | 24 | 6 | 3 | 1 | 1552 |
| 9 | 30 | 5 | 5 | 1 | 1253 |
| 10 | 42 | 7 | 5 | 1 | 1917 |
| 11 | 42 | 7 | 7 | 1 | 1277 |
| 12 | 24 | 6 | 2 | 1 | 2800 |
| 13 | 24 | 8 | 2 | 1 | 2348 |
| 14 | 30 | 3 | 3 | 1 | 2773 |
| 16 | 78 | 8 | 7 | 1 | 3372 |

The towers-per-pixel factor is 72/`IMG_T`, so the unpadded size must divide 72.
Model 15 adds a max-pooling layer, which this design does not have. All the
configurations in the table have been built and simulated end to end with
random weights (`tb_cnn_models`). In all configurations one image takes
`IMG_T + 2·PAD_T` clocks, because the input is one row per clock. For the
default model this matches the study's II of 18 cycles. The study's HLS
implementations of the other models have different IIs.

## How this relates to the design study

Taken from the study: the whole data flow (η–φ E_T image, 512 GeV clip and
[0,1] scaling, three-pixel φ wrap and η zero padding, two convolutions with
ReLU, dense 32/16/8 with ReLU, output neuron and sigmoid, threshold cut); the
layer geometry of the chosen model; 8-bit weights with 2 integer bits and a
16-bit output neuron and sigmoid; one first-convolution output row per clock;
the 18-cycle II and the 54-cycle and 283 ns budgets.

Chosen here, because the study does not specify them:
- The candidate input format, and one candidate per clock.
- The ping-pong image banks, row-serial readout and drop policy.
- The E_T step.
- The activation format, and rounding by truncation with saturation.
- Streaming between layers, and full parallelism of the dense layers.
- The sigmoid table.
- Run-time loading of the weights and their layout.
- The scored and accepted counters.

Where the study is ambiguous:
- Its text speaks of moving three φ columns from one side to the other, while
  its padded sizes (12 → 18) need three on each side. This design wraps three
  columns onto each side.
- It gives the II budget as "54 ns", but 54 clock cycles is what its figures
  and the time-multiplexing period imply.

Not part of this RTL:
- The particle-flow and PUPPI correlator trigger that produces the candidates.
- The time-multiplexing optical links.
- The global trigger that consumes `accept`.
- The FPGA device itself.
- The trained weights.

The study's HLS flow (hls4ml, Vivado HLS) generates its own, different
firmware. This RTL is an independent hand implementation of the same network.
Its resource use has not been compared with the study's numbers.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values come
from `tb/cnn_ref_pkg.sv`, a plain-integer model of the same arithmetic, and
sigmoid scores are compared with `$exp`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv tb/tb_cnn_trigger_top.sv --top tb_cnn_trigger_top
./obj_dir/Vtb_cnn_trigger_top
```

Replace the testbench name to run any other testbench.

- `tb_cnn_trigger_top` is the end-to-end test at full size, with random weights
  and random crossings. It checks the exact logit, the score, the accept bit
  and the 31-clock decision latency. It forces each mechanism to occur at least
  once: ping-pong overlap, a dropped crossing, 512 GeV clipping, φ-wrapped
  energy, ReLU clipping, accepts and rejects. It runs crossings every 54 clocks
  and every 18 clocks.
- `tb_cnn_models` builds the whole trigger once for each configuration in the
  table above, loads random weights and runs four crossings through each. It
  checks the exact logit, the accept bit and the parameter count. Building it
  takes a few minutes, because it elaborates fifteen tops.
- `tb_cnn_classifier` sends 60 random images back to back every 18 clocks, with
  three weight sets. It checks the logit exactly, the score within 150/65536,
  and a 25-clock latency.
- The unit testbenches (`tb_conv2d_relu`, `tb_dense_layer`,
  `tb_flatten_buffer`, `tb_sigmoid_lut`, `tb_et_histogrammer`,
  `tb_pixel_scaler`, `tb_image_padder`, `tb_trigger_decision`,
  `tb_param_store`) check their module's values and cycle timing against the
  reference. This covers both convolution geometries, the hidden and output
  forms of the dense layer, and sums that saturate.

The design has been simulated with random weights only. Its physics
performance, such as signal efficiency at a 10 kHz rate, depends on the trained
weights and has not been reproduced here.
