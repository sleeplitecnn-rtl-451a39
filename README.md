# SleepLiteCNN inference engine in SystemVerilog

Sleep apnea comes in three forms: obstructive (OSA), central (CSA) and mixed
(MSA). A wearable that wants to react to an event while it happens, for
example by adjusting a CPAP machine, has to tell them apart second by second.
SleepLiteCNN is a small 1-D convolutional network that does this from one
ECG lead. Every second it looks at the last 11 seconds of a 128 Hz ECG and
assigns that second to Normal, OSA, CSA or MSA. The network was published
with 8-bit quantisation and was mapped to an FPGA with a high-level synthesis
flow. The publication gives the network's layers but no hardware
architecture.

This RTL is a hand-written, synthesizable engine for that network. It takes
raw ECG samples in and gives out one class and four probabilities per
second. It has about 50,000 8-bit weights held in on-chip memories, which
are loaded through a simple write bus. It also has a few thousand flip-flops
and 45 parallel multipliers in its widest layer (conv 2). An inference takes
241,465 clocks, so any clock above 0.25 MHz keeps up with real time.

## The network

| # | layer | shape in -> out (positions x channels) | notes |
|---|-------|-----------------------------------------|-------|
| 0 | batch normalisation | 1408 x 1 -> 1408 x 1 | on raw samples |
| 1 | conv1d, 5 filters, kernel 10, stride 2 | 1408 x 1 -> 700 x 5 | + ReLU |
|   | max pool, size 2, stride 2 | 700 x 5 -> 350 x 5 | |
| 2 | conv1d, 45 filters, kernel 10, stride 1 | 350 x 5 -> 341 x 45 | + ReLU |
|   | max pool, size 2, stride 2 | 341 x 45 -> 170 x 45 | last position dropped |
| 3 | conv1d, 25 filters, kernel 30, stride 1 | 170 x 45 -> 141 x 25 | + ReLU |
|   | max pool, size 4, stride 1 | 141 x 25 -> 138 x 25 | overlapping windows |
| 4 | batch normalisation | 138 x 25 | per channel |
|   | flatten, dropout | 3450 | no hardware (see below) |
| 5 | dense | 3450 -> 4 | |
| 6 | softmax | 4 -> 4 | Normal, OSA, CSA, MSA |

All convolutions and poolings are "valid": there is no padding, and a
trailing position that does not fill a window is dropped. The input is the
whole 11-second window, 11 x 128 = 1408 samples. A new window starts every
128 samples.

## How the engine evaluates it

The engine runs one layer at a time. Each layer reads the complete feature
map that the previous layer left in a RAM:

```
sample -> batchnorm -> window_buffer --read--> conv1d_layer(1)
   conv1d_layer -> requant_relu -> maxpool1d [-> batchnorm] -> feature_ram
   feature_ram --read--> next conv1d_layer ... -> dense_layer -> softmax4
```

`layer_sequencer` starts the stages in order: conv 1, 2 and 3, then dense,
then softmax. After each convolution it waits a few clocks so that the last
pooled values have been written before the next layer reads them.

**Feature map order.** Every feature map is stored position-major:
`address = position * channels + channel`. This one choice makes three
things simple:

* **Reading a convolution's taps.** The K x CIN inputs that one output
  position needs are the contiguous addresses `t*STRIDE*CIN ...
  t*STRIDE*CIN + K*CIN - 1`. The tap number `j = k*CIN + ci` is the offset
  from that base. It is also the row of the weight memory.
* **Pooling as a stream.** The convolution emits its outputs in the same
  order (position by position, channel 0 first). A pooling stage therefore
  needs only the last P-1 values of each channel, not a line buffer of the
  whole map.
* **Flatten for free.** The Keras Flatten of a (positions, channels) tensor
  uses this same order. The dense layer therefore reads the last feature
  map from address 0 to 3449, and Flatten needs no hardware.

**Convolution datapath (`conv1d_layer`).** Each weight-memory row holds the
weights of all COUT filters for one tap. The layer therefore runs COUT
multiply-accumulates in parallel, one tap per clock. After the last tap it
sends the COUT sums downstream, one per clock. One output position costs
`K*CIN + 1 + COUT` clocks:

| layer | positions | clocks per position | clocks |
|-------|-----------|---------------------|--------|
| conv 1 | 700 | 10 + 1 + 5 | 11,200 |
| conv 2 | 341 | 50 + 1 + 45 | 32,736 |
| conv 3 | 141 | 1350 + 1 + 25 | 194,016 |
| dense | 3450 inputs, 4 MACs per clock | | 3,451 |
| softmax | | | 37 |

The rest of the 241,465 clocks goes to starting and draining the stages.
Layer 3 takes 80 % of the time. The engine has no pipelining across layers
or windows, so it could be made much faster. It has no need to be, because
one window arrives per second.

**Pooling (`maxpool1d`).** For every channel the module keeps a shift
register of the last P-1 values. An element at position t closes a pooling
window when `t >= P-1` and `(t-(P-1))` is a multiple of the stride. When it
does, the module emits the maximum of the element and the stored values as
output position `(t-(P-1))/S`. The same code covers disjoint windows (2/2)
and overlapping ones (4/1).

## The sliding window

`window_buffer` is a circular memory of WIN + HOP = 1536 samples. The first
window is ready after 1408 samples, and a new one is ready after every
further 128. `win_ready` stays high until the sequencer takes the window
with `win_take`. Taking a window fixes its start address, and conv 1 then
reads window-relative addresses.

The extra 128 words let the next second of samples arrive without touching
the window being processed. A window stays intact for 128 sample periods
after it completes. Only conv 1 reads the window, during its first 11,200
clocks, so this is far more time than needed. If a window is still waiting
when the next one completes, the waiting one is dropped and `overrun`
pulses for one clock. At 128 Hz and any clock above 0.25 MHz this cannot
happen.

## Arithmetic

The network is 8-bit quantised. The publication does not give the number
formats, so the formats below are this design's own:

* Activations and weights are signed 8-bit. Biases are signed 16-bit, in
  accumulator LSBs. Accumulators are 32-bit; the largest sum, in conv 3, is
  under 2^25.
* **ReLU + requantisation** (`requant_relu`):
  `y = min(127, max(0, acc >>> SHIFT))`. The shift floors. SHIFT is 6, 8
  and 10 for conv 1, 2 and 3 (top parameters `C*_SHIFT`).
* **Batch normalisation** (`batchnorm`): at inference BN is an affine map
  per channel. Fold gamma, beta, mean and variance off-line into an 8-bit
  `scale` with SHIFT fraction bits and a 16-bit `bias` in output LSBs. Then
  `y = sat8(((x*scale) >>> SHIFT) + bias)`. The input BN takes 16-bit ECG
  samples with SHIFT 8. The BN after pool 3 takes 8-bit activations with
  SHIFT 6.
* **Dense**: the four 32-bit sums become Q8.8 logits, `sat16(sum >>> 4)`.
* **Softmax** (`softmax4`): subtract the largest logit, then compute
  exp(d) as 2^(d*log2 e). In hardware, `y = (d*369) >>> 8` in Q8.8. The
  integer part of y becomes a right shift. The fraction f becomes
  `2^f ~ 1 + f(0.6565 + 0.3435 f)`, evaluated in Q1.15. The probabilities
  `min(255, e_i*256 / sum e)` come from a restoring divider at one
  quotient bit per clock. Against a real-valued softmax they are within
  3/256. `cls` is the index of the largest logit, the first one on a tie.

If you retrain the network, choose the shifts so that typical activations
use the 8-bit range. They are elaboration-time parameters of
`sleeplitecnn_top`.

## Loading a trained model

Load the parameters while the engine is idle. Each write sets `wt_we` with
`wt_sel` (`slcnn_pkg::wsel_e`), `wt_row`, `wt_col` and `wt_data`:

| wt_sel | target | row | column | data |
|--------|--------|-----|--------|------|
| 0 | input BN | 0 = scale, 1 = bias | 0 | scale (Q.8) / bias |
| 1, 2, 3 | conv 1, 2, 3 | `k*CIN + ci`; `K*CIN` = biases | filter | weight in [7:0] / 16-bit bias |
| 4 | BN after pool 3 | 0 = scale, 1 = bias | channel | scale (Q.6) / bias |
| 5 | dense | input index `t*25 + c`; 3450 = biases | class | weight / bias |

A Keras Conv1D kernel has shape (K, CIN, COUT), and a Dense kernel has
shape (NIN, NOUT). Their row-major order matches this row/column map.
Weights are not reset; biases and BN values reset to zero.

## Where this departs from the publication

* **Third pooling stride and the parameter count.** The layer diagram gives
  stride 1 for the size-4 pooling, and the RTL follows it (`POOL3_S = 1`).
  That gives a 3450-input dense layer and 50,033 parameters. The text and
  the results table say "roughly 39K" parameters. That count is what stride
  4 gives (the Keras default, stride = pool size): 35 positions, 875 inputs
  to the dense layer, 39,733 parameters. Set `POOL3_S = 4` to build that
  variant. It has its own end-to-end test, and one inference takes 238,890
  clocks.
* **Window length.** The input is taken to be all 11 seconds (1408
  samples). The windowing scheme says the first second is the one being
  labelled and the other ten meet the 10-second apnea rule. Whether the
  network sees 11 or 10 seconds is not stated explicitly. `WIN` is a
  parameter.
* **Architecture.** The published FPGA build came from an HLS flow; its
  resource use is reported, but not its structure, clock or latency. The
  layer-serial datapath, the memory layout, the window buffer and the
  sequencer here are independent choices. No resource or energy figures of
  the publication should be expected to carry over.
* **Fixed-point formats and the softmax approximation** are not published;
  they are described above.
* **Not built:** dropout, which is the identity at inference; flatten,
  which is only the address order; and the analog ECG front end, whose
  samples enter at `sample`. The trained weights are not published, so none
  are included.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares
against a reference written independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

* `tb_conv1d_layer`: layer 2 at full size and a stride-2 layer. It checks
  every sum, its tags, the emission order and the clock count.
* `tb_maxpool1d`: pool sizes 2/2 and 4/1, with gaps in the input stream.
* `tb_window_buffer`: the ready timing, reads during writes, the ring
  wrap-around and an overrun.
* `tb_dense_layer`, `tb_softmax4`, `tb_batchnorm`, `tb_requant_relu`,
  `tb_feature_ram`, `tb_layer_sequencer`: exact results (the softmax to
  3/256), latency, saturation and ordering rules.
* `tb_sleeplitecnn_top`: the whole engine at full size with random weights
  and a synthetic ECG. It re-computes three inferences in plain loops and
  compares the logits exactly, the class exactly and the probabilities.
  The scenario makes a window wait while the engine is busy, writes samples
  during an inference, forces an overrun, and exercises ReLU clipping at 0
  and 127 and BN saturation. It also checks the inference time.
* `tb_sleeplitecnn_top_p4`: the same test for the variant with the
  third pooling at stride 4 (875 dense inputs).

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/slcnn_pkg.sv tb/tb_sleeplitecnn_top.sv --top-module tb_sleeplitecnn_top
./obj_dir/Vtb_sleeplitecnn_top
```

The full-size end-to-end run simulates about 700,000 clocks and takes
seconds. The tests use random weights, so they show that the RTL computes
the network as specified here. They do not show classification accuracy:
that needs the trained, quantised weights and the fitted shifts.

## Files

| file | contents |
|------|----------|
| `rtl/slcnn_pkg.sv` | sizes, class and bus-select enums, number formats |
| `rtl/sleeplitecnn_top.sv` | the engine |
| `rtl/layer_sequencer.sv` | layer-by-layer control |
| `rtl/window_buffer.sv` | 11-s sliding window over the sample stream |
| `rtl/batchnorm.sv` | folded batch normalisation |
| `rtl/conv1d_layer.sv` | convolution layer with its weight memory |
| `rtl/requant_relu.sv` | ReLU and requantisation |
| `rtl/maxpool1d.sv` | streaming max pooling |
| `rtl/feature_ram.sv` | feature-map RAM |
| `rtl/dense_layer.sv` | fully connected layer with its weight memory |
| `rtl/softmax4.sv` | softmax and arg-max |
