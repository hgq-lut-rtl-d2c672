# A LUT-network cluster counter in SystemVerilog

This is synthesizable RTL for neural networks in which almost no arithmetic is
left. Each weight multiply of a dense layer is replaced by a small learned
truth table. The result is a network that an FPGA can evaluate as look-ups and
additions only. The layers follow the HGQ-LUT scheme ("HGQ-LUT: Fast LUT-Aware
Training and Efficient Architectures for DNN Inference", Sun et al.). That paper
gives the maths of the layers and the structure of a streaming cluster counter
for drift-chamber waveforms. Its trained tables are not published. This RTL
implements the layers and that streaming design, with a reproducible stand-in
model in place of the trained tables.

The top level, `cepc_pid_top`, counts primary ionisation clusters in a
3000-sample waveform. The waveform arrives 20 samples per clock. One count comes
out every 151 clocks, 154 clocks after the waveform's first window went in.

## 1. The building block: a one-input logical LUT

A conventional dense layer computes `a_o = phi(sum_i w_oi * x_i + b_o)`. A
LUT-Dense layer instead computes

    y_o = sum_i  T_oi(x_i)

Here `T_oi` is an arbitrary function of one input, stored as a truth table.
Such a table is called an L-LUT (logical LUT). It is not the same thing as the
FPGA's 6-input LUT primitive: an L-LUT has one *logical* input, but that input
has several bits. With `T_oi(x) = w_oi * phi(x) + b_o / N` the layer is exactly
a dense layer with the activation moved to its input. In general it is more
expressive, because each connection gets its own non-linearity.

`llut.sv` is one L-LUT. It works in two steps.

1. **WRAP input quantiser.** The table index is a bit slice of the input:
   `code = x[IN_LSB + M - 1 : IN_LSB]`.
   - Bits below `IN_LSB` are truncated.
   - Bits above the slice are dropped, so a large value wraps around in two's
     complement.
   - Wrapping costs no logic. Clamping would need comparators.
2. **Table look-up.** The table has `2**M` entries of `OUT_W` signed bits. The
   output quantiser saturates, but the saturation is applied when the table is
   filled. The hardware therefore contains no clamp either.

Each L-LUT has its own quantisers, learned per element during training: its own
input width `M`, its own slice position (number of fractional bits) and its own
output width. An L-LUT whose input or output width is 0 has been pruned.
`lut_dense` does not instantiate it, so it costs nothing.

`lut_dense.sv` builds the layer:
- one L-LUT for every (output, input) pair whose width is not zero;
- an exact sum per output, `OUT_W + clog2(N_IN)` bits wide, so it never
  overflows.

The layer is combinational. Whoever instantiates it adds the register. Biases
and a folded batch normalisation are already inside the tables, so the layer
needs no other arithmetic.

`lut_conv.sv` is the convolutional version. Its input is the last `K` feature
vectors, held in `im2col_shift_reg`. That window goes into a `lut_dense` with
`K * N_FEAT` inputs. Input `j` of the dense layer is tap `j / N_FEAT`, feature
`j % N_FEAT`, where tap 0 is the newest vector.

## 2. Where the table contents come from

In a real design, a generator fills every truth table by running each input
code through the trained model. Those contents are data, not architecture.
Here they come from functions in `rtl/hgq_lut_pkg.sv`:

| function | gives |
|---|---|
| `llut_width(layer, o, i)` | input width 0..`MAX_M` (4) of L-LUT (o, i); 0 for about one in five |
| `llut_out_width(layer, o, i, max)` | output width 0 or 2..max; 0 for one in sixteen |
| `llut_lsb(layer, o, i, base, m, in_w)` | slice start: base, base+1 or base+2 |
| `llut_value(layer, o, i, m, ow, code)` | `SAT_ow(w*x + floor(c*x*x/2) + b)`, where `x` is the signed m-bit value of `code` |
| `conv_weight(f, s)`, `conv_bias(f)` | projection weights in [-8, 7] and biases in [-512, 511] |
| `time_weight_value(t)` | 8-bit time weight; slot 0 is 0 |

The coefficients `w`, `c`, `b` and the widths come from a fixed 32-bit integer
hash of (layer, output, input). Every table can therefore be recomputed exactly
by a reference model. To load a trained network, replace these functions with
ones that return its tables. No module reads the tables any other way.

The functions are evaluated at elaboration time. Each L-LUT becomes a small
constant ROM, which synthesis maps to logic.

## 3. The cluster-counting network

The waveform has 3000 samples. Each sample is 12 bits, unsigned, with 3 integer
and 9 fractional bits. The network works on 150 windows of 20 samples:

| step | module | size | what it does |
|---|---|---|---|
| projection | `conv_proj` | 20 -> 8 | conventional convolution with kernel and stride 20; constant weights, so shift-add logic |
| LUT-Conv | `lut_conv` | 3 x 8 -> 16 | the 3-window receptive field, then 384 L-LUTs before pruning |
| LUT-Dense | `lut_dense` | 16 -> 16 | 256 L-LUTs before pruning |
| LUT-Dense | `lut_dense` | 16 -> 1 | 16 L-LUTs before pruning; one estimate per window |
| time weight | `time_weight` | 151 entries | `x * W[t]`: a learned weight for each time slot |
| accumulate | `output_accumulator` | 26 bits | sums the weighted estimates into the waveform's count |

The projection layer exists because 12-bit samples are too wide to index
tables directly. The two 16-wide layers are LUT-Conv layers with kernel 1,
applied to each window in turn.

### 3.1 The streaming schedule and the padding trick

`window_counter` runs from 0 to 150.
- **Values 0..149:** one window is accepted per beat, while `in_ready` is high.
- **Value 150:** the synchronisation cycle. `in_ready` is low. Instead of a
  window, a zero vector is shifted into the LUT-Conv register.

That single zero vector serves as the convolution's padding on both sides. When
the counter shows `t`, the shift register holds windows `t-2`, `t-1` and `t`, so
the LUT-Conv output is centred on window `t-1`:

| counter t | taps (oldest .. newest) | output is for window |
|---|---|---|
| 0 | last window of the previous waveform, pad, window 0 | none: a warm-up slot with weight 0 |
| 1 | pad, window 0, window 1 | 0 (left padding) |
| 2..149 | window t-2, window t-1, window t | t-1 |
| 150 | window 148, window 149, pad | 149 (right padding) |

So one waveform takes 150 + 1 = 151 cycles, and there is no other dead time.
Waveforms can follow each other back to back.

If `in_valid` drops in the middle of a waveform, the counter and the shift
register simply wait. The pipeline stages behind them carry a valid bit, so a
bubble flows through harmlessly.

### 3.2 Pipeline and timing

Every stage carries `valid`, `last` (this beat is the pad beat) and `t` (the
time slot) along with the data:

```
edge 0 : window k accepted -> conv (combinational) -> LUT-Conv shift register
edge 1 : LUT-Conv outputs              -> h1
edge 2 : LUT-Dense 16->16 outputs      -> h2
edge 3 : LUT-Dense 16->1  x W[t]       -> p
edge 4 : accumulator; on the pad beat: sum -> out_count, out_valid = 1
```

Without stalls, the pad beat of a waveform is taken 150 edges after its first
window. Its sum is registered 4 edges later. So the latency is 154 cycles, and
counts come out every 151 cycles. Both figures match the numbers reported for
the authors' implementation. The register placement itself is a choice made
here: the paper's generator places registers by its own heuristics and relies
on retiming.

### 3.3 Top-level interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | a window is offered |
| `in_ready` | out | 1 | the window is taken on this edge if `in_valid` is high; low in the pad cycle |
| `samples` | in | 20 x 12 | `samples[s]` is sample `s` of the window |
| `out_valid` | out | 1 | one-cycle pulse |
| `out_count` | out | 26, signed | weighted count, in units of (L-LUT output LSB) x (weight LSB) |

An assertion in the top checks that a beat is always exactly one kind: an
accepted window or the pad cycle.

## 4. Bit widths

The paper trains bit widths per element and does not list them. Every width
below is therefore a choice made for this design. They are all parameters.

| signal | width | note |
|---|---|---|
| sample | 12 unsigned | 3 integer + 9 fractional bits |
| projection feature | 22 signed | exact for 20 x 4095 x 8 plus bias |
| L-LUT input slice | 1..4 bits | starts at feature bit 13..15 for the LUT-Conv and at bit 2..4 for both LUT-Dense layers |
| L-LUT output | 2..6 signed | per L-LUT; sign-extended before the sum |
| LUT-Conv / Dense / Dense outputs | 11 / 10 / 10 signed | exact sums |
| time weight, product | 8, 18 signed | |
| accumulator | 26 signed | exact for 151 full-scale products |

## 5. How this departs from the published design

- **Tables and weights are stand-ins** (section 2). The design reproduces the
  structure and timing of the paper's cluster counter, not its accuracy.
- **The quantiser ranges are bounded.** Widths and slice positions vary per
  L-LUT, as in the paper, but only within the ranges listed in section 4.
- **Layer count is read from the figure.** The text speaks of "three LUT-Conv
  layers" after the projection. The architecture figure shows one LUT-Conv with
  kernel 3, then two LUT-Dense layers. The two readings agree if the last two
  are kernel-1 convolutions, and that is what is built.
- **The handshake, reset and register placement are choices made here.** The
  paper reports one DSP for its implementation. Here the only general multiply
  is the one in `time_weight`; the projection weights are constants.
- **Not built:**
  - the analog front end and its input clamping (the paper also leaves the
    clamping out of the hardware);
  - the conventional front end of the muon-tracking hybrid network;
  - the graph network used for particle-level jet tagging, which the paper only
    cites;
  - the training and compilation flow, which is software.

## 6. Other networks made from the same layers

`lut_dense` takes its sizes as parameters, so it can build other LUT networks:

- `tb_jsc_hlf` builds the 16 -> 20 -> 5 jet-substructure classifier from two
  layers and checks every logit and the argmax.
- `tb_tgc_head` builds the 50 -> 24 -> 24 -> 24 LUT-Dense head of the hybrid
  muon-tracking network and checks every output.

Both use stand-in tables and assumed input formats.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each one:
- compares the outputs with an integer reference model, `tb/tb_ref_pkg.sv`,
  which evaluates the model functions directly;
- ends with a `TB_RESULT checks=N failures=M` line;
- has a watchdog.

| testbench | covers |
|---|---|
| `tb_llut` | input widths 1..4 at several slice positions; wrapped inputs and saturated entries both occur |
| `tb_lut_dense` | 16 -> 16 layer, random and full-scale inputs; requires pruned L-LUTs and wrapped inputs |
| `tb_conv_proj` | random, all-zero and all-full-scale windows |
| `tb_im2col_shift_reg` | random shift, pad and hold patterns against a queue model |
| `tb_lut_conv` | streamed windows with pads and holds |
| `tb_window_counter` | counter sequence, pad cycle, II of 151, random input gaps |
| `tb_time_weight` | every slot, including out-of-range indices |
| `tb_output_accumulator` | waveform sums with random gaps |
| `tb_cepc_pid_top` | full size, all default parameters; see below |

`tb_cepc_pid_top` runs six waveforms at full size with every parameter at its
default. The waveforms are mostly quiet baseline with random pulses, plus
windows of full-range noise. The first three run back to back; the last three
have random input gaps. The test checks:
- every count;
- the 154-cycle latency;
- the 151-cycle interval between counts.

It also requires each of the following to happen at least once: pad cycles,
input held off by `in_ready`, input gaps, wrapped L-LUT inputs, saturated table
entries, and pruned L-LUTs in every layer.

To run one test with plain Verilator (package files first):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cepc_pid_top \
  rtl/hgq_lut_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_cepc_pid_top.sv
./obj_dir/Vtb_cepc_pid_top
```

Swap the testbench name to run any other test. The whole top-level test takes
well under a second.
