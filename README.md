# A pruned, quantized 1D convolution core with weights in the logic

Sentence classifiers built from convolutional networks spend almost all of
their weights in the convolution over the word-embedding sequence. Two
compression steps shrink that layer with little loss of accuracy: **quantization**
(each weight, and each activation, is replaced by one of 2^bits levels, with
about 5 bits being enough) and **pruning** (weights whose magnitude is below a
threshold are dropped). On a processor neither step saves much, because a
5-bit multiply costs what a 32-bit one costs and skipping a weight costs a
branch. On an FPGA both pay off directly when the weights are **compiled into
the logic as constants**: a multiplier by a 5-bit constant is a few adders, and a
pruned weight simply produces no hardware at all. The decision "is this weight
used?" is taken once, at synthesis, instead of at every inference.

This RTL implements that idea for one 1D convolution layer, at the size of the
layer whose FPGA cost is reported for this technique: 64 word positions of 35
input feature maps in, kernel width 2, 63 positions of 16 output feature maps
out, 5-bit weights, inputs and activations, pruning threshold 0.035.

## What the core computes

For each sentence (a *frame* of `IN_LEN` input columns `x[s][i]`) and each
output position `p = 0 .. IN_LEN-KERNEL`, each output map `o`:

```
acc[p][o] = bias[o] + sum over i < IN_FM, k < KERNEL, weight (i,o,k) kept:
                      x[p+k][i] * wq[i][o][k]
y[p][o]   = min( max(acc[p][o], 0) >> ACT_SHIFT , 2^ABITS - 1 )
```

This is the plain loop nest of a pruned 1D convolution (positions, output
maps, input maps, taps, with the tap skipped when the weight is pruned, and the
bias added after the sums), followed by a ReLU and the activation quantizer.
The three inner loops (output maps, input maps, taps) are laid out in space:
16 x 35 x 2 = 1120 constant multipliers before pruning. The outer loop, over
positions, runs in time at one position per clock.

## Weights: from trained values to constants

This is the part that differs most from an ordinary accelerator, and where most
of the design's parameters act. All of it is evaluated at elaboration, by
constant functions in `rtl/cnn_pkg.sv`; nothing in it exists at run time.

1. **Raw weights.** A trained model would supply `w[i][o][k]` (in the original
   flow a script turns the trained weights into a header read by the synthesis
   tool). No trained weights come with this RTL, so `cnn_pkg::weight_milli`
   generates a reproducible set from a hash of the index and `SEED`: each weight
   is the sum of four uniform values in [-0.026, 0.026], which gives a bell
   shape centred on 0 with a standard deviation of about 0.03 and a range of
   about +/-0.1, the shape of a typical first-layer weight histogram (at that
   spread a threshold of 0.02 removes about half the weights). Values are held
   in thousandths: `PRUNE_MILLI = 35` means 0.035. Biases
   (`cnn_pkg::bias_acc`) are generated the same way, already in accumulator
   units.
2. **Quantization.** Let `M = max |w|` over the layer. The range `[-M, M]` is cut
   into `2^WBITS` equal buckets and each weight becomes the midpoint of its
   bucket. Midpoints are `(2b+1-2^WBITS) * M / 2^WBITS` for bucket `b`, so the
   hardware carries only the odd integer `wq = 2b+1-2^WBITS` (`WBITS+1` bits
   signed, never zero); the common factor `M / 2^WBITS` is a scale that the
   activation step absorbs.
3. **Pruning.** A weight is kept if its *quantized* value still reaches the
   threshold: `|wq| * M / 2^WBITS >= threshold`. Pruning after quantization
   means that a coarse quantization keeps or drops whole buckets at once.
   With the generated weights, 5 bits and threshold 0.035, 338 of the 1120
   weights survive (a calculations ratio of 0.30); at 16 bits, 299 survive.
4. **Hardware.** In `pruned_neuron` each kept weight becomes
   `x * WQ` with `WQ` a localparam; each pruned one becomes the constant 0 and
   drops out in synthesis together with its adder input.

To put real trained weights into the core, replace the bodies of
`weight_milli` and `bias_acc` with a lookup of the exported values (for a layer
this size, a constant array in the package). Every other step stays the same.

## Datapath and timing

```
 in_valid,in_col ──► conv_window ──► pruned_neuron x16 ──► act_quant x16 ──► out_act[16]
 (one column        shift register   constant MACs +      ReLU, >> ACT_SHIFT,   out_valid
  per clock)        of KERNEL cols,  bias, registered     clip, registered      out_pos/out_last
                    position count
        edge t          reg 1             reg 2                 reg 3
```

* **conv_window** keeps the last `KERNEL` columns. It counts columns within the
  frame and, from the `KERNEL`-th column on, marks each new column as
  completing the window of position `p = column - (KERNEL-1)`. After `IN_LEN`
  columns the count wraps, so the next sentence can follow on the very next
  clock. Gaps in `in_valid` simply pause everything.
* **pruned_neuron** (one per output map) adds the bias and all kept products
  in one combinational sum and registers it. At default sizes the accumulator
  is 20 bits, wide enough for every input and weight combination.
* **act_quant** (one per output map) applies ReLU, divides by `2^ACT_SHIFT`
  (the bucket width) and saturates at `2^ABITS-1`, setting `out_clip`.

A column accepted on clock edge *t* that completes the window of position *p*
produces position *p*'s 16 activations right after edge *t+2*. With no gaps, a
64-column sentence gives its 63 outputs on 63 consecutive clocks. There is no
back-pressure: the consumer must take one output column per clock.

### Ports of `conv1d_layer`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all registers on the rising edge |
| `rst_n` | in | 1 | synchronous, active-low reset of counters and valid flags |
| `in_valid` | in | 1 | `in_col` holds the next word position |
| `in_col[IN_FM]` | in | `DBITS` signed each | input feature maps of one position |
| `out_valid` | out | 1 | an output column is present |
| `out_pos` | out | `clog2(IN_LEN)` | its position p |
| `out_last` | out | 1 | it is the frame's last position |
| `out_act[OUT_FM]` | out | `ABITS` each | activation bucket index |
| `out_clip[OUT_FM]` | out | 1 each | the activation saturated |

### Parameters

| parameter | default | meaning |
|---|---|---|
| `IN_LEN` | 64 | word positions per frame |
| `IN_FM` | 35 | input feature maps (embedding width) |
| `KERNEL` | 2 | convolution window |
| `OUT_FM` | 16 | output feature maps (filters) |
| `DBITS` | 5 | input data width, two's complement |
| `WBITS` | 5 | weight precision: 2^WBITS buckets |
| `ABITS` | 5 | activation precision |
| `PRUNE_MILLI` | 35 | pruning threshold in thousandths |
| `ACT_SHIFT` | 5 | log2 of the activation bucket width, in accumulator units |
| `SEED` | 0x1DC0DE | selects the generated weight set |

The sizes, precision and threshold are those of the measured layer. `ACT_SHIFT`,
`SEED`, the interface and the pipeline are this design's own choices.

## Where this RTL departs from the published design

* The published core was produced by high-level synthesis from C++ with the
  weights in a header; this is hand-written RTL of the same loop nest with the
  same unrolling. Its interface (a column stream with a valid strobe), its three
  register stages and its one-position-per-clock rate are choices made here; the
  source gives no latency, rate or clock frequency.
* The weights are generated, not trained (see above). Resource use and the
  fraction pruned therefore only approximate a real model. For comparison, the
  reported FPGA cost of the 64 x 35 -> 63 x 16 layer is 2457 flip-flops and
  14382 LUTs at 5 bits with threshold 0.035, against 8118 flip-flops and
  60750 LUTs at 32 bits without pruning.
* Pruning is applied to the quantized weight. The two steps could also be done
  in the other order (prune on the raw value, then quantize); the difference
  only shows at very low precisions.
* The activation maximum, which in the method comes from running the training
  data, is replaced by the power of two `2^(ACT_SHIFT+ABITS)`, so that the
  quantizer is a shift and a clamp.
* Inputs are taken as already-quantized signed integers. How the embedding is
  quantized before it reaches the core is outside it.
* The full classifier is not in hardware: the word-embedding lookup, the
  model's real convolutions (300-dimensional embeddings, 128 filters, two
  parallel branches with windows 2 and 3, concatenated), the dense layers and
  the sigmoid/softmax output stay in software, as they did in the published
  experiment, whose full-size layer did not fit the synthesis flow. A branch of
  that model is an instance of `conv1d_layer` with `IN_FM=300, OUT_FM=128,
  KERNEL=2` or `3`: 192,000 weight slots for the pair instead of 1120.
* Floating-point (32-bit) weights are not built; the integer core has been
  exercised from 1-bit to 16-bit weights. Dynamic fixed point, the other
  number format the method considers, is not built: the bucket (integer)
  quantization gave slightly better accuracy and is the one used here.

## Files

| file | content |
|---|---|
| `rtl/cnn_pkg.sv` | default sizes; weight/bias generation, quantization, pruning and width functions (elaboration only) |
| `rtl/conv_window.sv` | sliding window and position counter |
| `rtl/pruned_neuron.sv` | one output map: constant multiply-accumulate with pruning |
| `rtl/act_quant.sv` | ReLU and activation quantizer |
| `rtl/conv1d_layer.sv` | the core (top) |
| `tb/cnn_ref_pkg.sv` | reference arithmetic (real-valued quantization and pruning) |
| `tb/tb_conv_window.sv`, `tb/tb_pruned_neuron.sv`, `tb/tb_act_quant.sv` | unit tests |
| `tb/tb_conv1d_layer.sv` | end-to-end test at the default sizes |
| `tb/conv1d_run.sv`, `tb/tb_conv1d_configs.sv` | other precisions, no pruning, a kernel-3 layer |

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. The reference side recomputes quantization
and pruning with real arithmetic from the raw generated weights, and the
convolution in the plain loop order, so it shares only the raw weight values
with the RTL.

* `tb_conv1d_layer` runs the core at its default sizes over four sentences:
  random data at full rate, random data with gaps, data that drive the
  activations into saturation, and a constant negative sentence, all back to
  back. It checks every activation, clip flag, position and last flag, and
  the exact clock on which each output arrives. It also checks that a
  sentence without gaps streams 63 outputs on 63 consecutive clocks, and that
  pruning, ReLU cut-off, clipping, input gaps and back-to-back frames each
  occurred.
* `tb_conv1d_configs` runs the same layer with pruning off at 5 bits, and with
  16-bit weights with and without pruning. It also runs two mixed precisions
  of the kind a per-layer precision search selects: 2-bit weights with 7-bit
  activations, and 1-bit weights with 4-bit inputs and 2-bit activations.
  A small kernel-3 layer completes the set. It checks that a zero threshold
  keeps all 1120 products.
* The unit tests cover window contents and positions with random gaps and
  frame wrap-around. They also cover the neuron sum against the kept weights
  and the quantizer in its negative, in-range and saturating regions.

Each test runs in seconds. With Verilator 5, for example:

```
verilator --binary --timing --assert -j 0 --top-module tb_conv1d_layer \
  -y rtl -y tb +libext+.sv rtl/cnn_pkg.sv tb/cnn_ref_pkg.sv tb/tb_conv1d_layer.sv
./obj_dir/Vtb_conv1d_layer
```

The RTL is plain synthesizable SystemVerilog (packages, `always_ff`,
`always_comb`, generate blocks, typed parameters). The only assertion in the
RTL checks that all output maps advance together.
