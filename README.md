# DWN inference with on-chip thermometer encoding

A differentiable weightless neural network (DWN) classifies without a single
multiplication. Each real-valued input feature is turned into a unary
*thermometer code* (bit *t* is 1 when the feature is at least threshold *t*),
a layer of small lookup tables reads a few of those bits each, and the class
is the one whose group of LUTs outputs the most ones. Training decides the
thresholds, which thermometer bit feeds which LUT input, and the contents of
every LUT; the hardware is just comparators, wires, LUTs, adders and a
maximum search, and is fully parallel: one classification per clock cycle.

Earlier DWN hardware assumed the inputs arrive already thermometer-coded.
Real sensors and ADCs deliver ordinary binary (positional) numbers, so the
encoder is part of the accelerator and, for small networks, its largest part.
This RTL includes it. It is sized by default for the large model for the jet
substructure classification (JSC) task: 16 features of 9 bits, 200
thresholds per feature, 2400 six-input LUTs and 5 classes.

## Datapath

```
 features_i (16 x 9 bit, signed)
      |  input register
      v
 +-----------------------+   16 x 200 = 3200 thermometer bits
 | thermometer_encoder   |--------------------------+
 |  x16 (one per feature)|                          |
 +-----------------------+                          v
                                   +------------------------------+
                                   | learnable_mapping            |  fixed wiring,
                                   |  2400 LUTs x 6 inputs        |  14400 selects
                                   +------------------------------+
                                                    |
                                   +------------------------------+
                                   | lut_layer: 2400 x n_lut (6)  |
                                   +------------------------------+
                                                    | 2400 votes
                                   +------------------------------+
                                   | classification               |
                                   |  popcount x5 (480 bits each) |
                                   |  argmax (index comparators)  |
                                   +------------------------------+
      output register                               |
      class_o, score_o, scores_o  <-----------------+
```

Everything between the two registers is combinational. `dwn_top` wires it
together; each box is a module of its own.

## Thermometer encoders

`thermometer_encoder` holds one comparator per threshold. Output bit *t* is
`value >= THRESH[t]`, both operands read as two's-complement numbers. The
number format is signed fixed point with one sign bit and `IN_WIDTH-1`
fraction bits, so a feature normalised to [-1, 1) is represented exactly as
its integer code divided by 2^(IN_WIDTH-1). The thresholds use the same
format.

The thresholds are *distributive*: they are placed at percentiles of the
training data, so they are unevenly spaced and no comparator can be shared
or derived from another. That is why the encoder is expensive: 200
comparators of 9 bits per feature, 3200 in all. With sorted thresholds the
output is a proper thermometer code. The module does not rely on sorting;
it evaluates every comparison on its own.

The input width is the main lever on the encoder's cost. The reference
configurations below use 6 to 9 bits after fine-tuning. This RTL reads the
width as the total width including the sign bit.

## Learnable mapping and LUT layer

`learnable_mapping` is the trained connection pattern: output `l*K + j`
(input *j* of LUT *l*) is thermometer bit `MAP[l*K + j]`. Thermometer bit
`f*NUM_THRESH + t` is threshold *t* of feature *f*. On an FPGA this costs
only routing. A thermometer bit may feed many LUTs or none; most of the 3200
bits go unused by a small model.

`lut_layer` is `NUM_LUTS` instances of `n_lut`. A `K`-input LUT outputs
`INIT[addr]`, where input *j* is address bit *j*. With `K = 6` each one maps
onto one physical 6-input FPGA LUT. There is a single LUT layer.

## Classification: popcount and argmax

The LUT outputs are votes. They are split into `NUM_CLASSES` equal groups;
LUTs `c*G .. c*G+G-1` (with `G = NUM_LUTS/NUM_CLASSES`, 480 by default) vote
for class *c*. `popcount` counts each group's ones with a balanced adder
tree (`ceil(log2 G)` levels). The reference implementation used a
compressor tree for this. An adder tree computes the same sum and leaves
the choice of compressors to synthesis.

`argmax` is a tree of `index_comparator` nodes. A node takes two
(value, index) pairs, compares the values with `>=` and forwards the winner's
value and index through two multiplexers. The tree pairs neighbours level by
level: for 5 classes it compares (0,1) and (2,3), then their two winners,
then that winner with class 4. The lower-numbered side is always input A,
and A wins when the values are equal. Together these two rules give the tie
rule: **on equal counts the lowest class number wins**. The output is the
winning class and its count. `dwn_top` also brings out all five counts
(`scores_o`).

## Interface and timing

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i` | in | 1 | clock |
| `rst_ni` | in | 1 | synchronous, active low; clears the two valid bits only |
| `in_valid_i` | in | 1 | `features_i` holds a sample this cycle |
| `features_i` | in | `NUM_FEATURES x IN_WIDTH` | feature *f* in `features_i[f]`, signed fixed point |
| `out_valid_o` | out | 1 | result valid |
| `class_o` | out | `clog2(NUM_CLASSES)` | predicted class |
| `score_o` | out | `clog2(G+1)` | popcount of that class |
| `scores_o` | out | `NUM_CLASSES x clog2(G+1)` | popcount of every class |

A sample given with `in_valid_i` high in cycle *k* appears with
`out_valid_o` high in cycle *k+2*. A new sample can be given every cycle, and
there is no back-pressure. Data registers are not reset; only the valid bits
are. The two register stages are this design's choice. For the large model
the reference implementation reports about 2.1 ns of latency at 947 MHz,
which is two cycles. How its registers are placed is not known: its
flip-flop count (961 for the large model) suggests more registers than the
203 flip-flops used here (144 input, 57 output, 2 valid bits).

## The model: parameters THRESH, MAP, INIT

`dwn_top` takes the trained model as three parameters:

* `THRESH[f][t]` — `IN_WIDTH`-bit threshold *t* of feature *f*;
* `MAP[o]` — the thermometer bit (index below `NUM_FEATURES*NUM_THRESH`)
  feeding LUT input *o = l*LUT_INPUTS + j*; an out-of-range entry stops
  elaboration with an error;
* `INIT[l]` — the `2^LUT_INPUTS`-bit truth table of LUT *l*.

A training flow should write these as constants. Without them the design
elaborates with a deterministic **stand-in model** from `dwn_pkg`. It
classifies nothing meaningful, but it exercises every path. The formulas:

* thresholds: with `R = 2^(IN_WIDTH-1)`, `m = NUM_THRESH+1` and
  `s = 2(t+1) - m`, let `lin = s*R/m` and `quad = s*|s|*R/m^2` (integer
  division truncating toward zero). Then `th = (a*quad + (4-a)*lin)/4` with
  `a = f mod 5`. These are sorted and unevenly spaced, like percentile
  thresholds, and differ from feature to feature.
* mapping: `MAP[l*K+j] = hash32(64*l + j + 0x1234) mod (NUM_FEATURES*NUM_THRESH)`;
* LUTs: `INIT[l] = {hash32(2l + 0x5000), hash32(2l + 0x5001)}`, truncated to
  `2^K` bits.

`hash32` is a multiply/xor-shift integer mixer, given in `dwn_pkg`.
Elaborating the default model takes a few minutes of tool time at full
size. Most of it is spent computing the 14,400-entry mapping.

## Model sizes

All sizes are parameters of `dwn_top`. The JSC models that were evaluated,
with the input widths reached after quantisation and fine-tuning:

| model | `NUM_LUTS` | LUTs per class | `IN_WIDTH` | other parameters |
|---|---|---|---|---|
| sm-10  | 10   | 2   | 6 | 16 features, 200 thresholds, 6-input LUTs, 5 classes |
| sm-50  | 50   | 10  | 8 | same |
| md-360 | 360  | 72  | 9 | same |
| lg-2400 (default) | 2400 | 480 | 9 | same |

Without fine-tuning the same models needed 9, 9, 11 and 12 bits. Any of
the smaller models can also run on the default instance. Give the unused
LUTs all-zero truth tables so they never vote, and shift narrower inputs
and thresholds left to 9 bits. The 11- and 12-bit variants need a larger
`IN_WIDTH`.

## What follows the reference design and what does not

These points follow the reference design: the four-stage structure
(encoders, learned mapping, one LUT layer, popcount plus argmax); one `>=`
comparator per threshold over signed fixed-point inputs; 200 thresholds per
feature and 16 features; 6-input LUTs; equal LUT groups per class; the
index-comparator argmax with lowest-index tie-breaking; and the sizes above.

These are choices of this RTL:

* The register placement (input and output registers, 2-cycle latency), the
  valid/reset handshake and the port formats.
* Reading the quoted bit widths as total widths, sign bit included.
* Contiguous LUT groups per class.
* The placement of the unpaired element in the argmax tree when the number
  of classes is not a power of two.
* An adder tree instead of a generated compressor tree for the popcount.
* The stand-in model. The trained thresholds, mappings and truth tables are
  not available, so no accuracy figure can be reproduced with this RTL as
  shipped.

Not included: training, and the variant that takes thermometer-coded inputs
directly. The latter is `dwn_top` without the encoders.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against
values computed in the testbench itself, prints
`TB_RESULT checks=N failures=M` and stops through a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_thermometer_encoder` | all 512 inputs against all 200 thresholds, thermometer property; a small instance with unsorted explicit thresholds, exhaustively |
| `tb_learnable_mapping` | one-hot and random inputs through the stand-in and an explicit mapping |
| `tb_n_lut` | every address of 6- and 4-input LUTs |
| `tb_lut_layer` | 20 LUTs, random inputs |
| `tb_popcount` | 480-bit counts (zeros, ones, single bits, varying density); 7-bit exhaustive |
| `tb_index_comparator` | exhaustive, including ties |
| `tb_argmax` | 5- and 4-input trees, random values with many ties, hand-made ties |
| `tb_classification` | sm-50 sizing: per-class counts, winner, tie rule |
| `tb_dwn_top` | sm-10/6-bit, sm-50/8-bit and md-360/9-bit end to end |
| `tb_dwn_top_full` | lg-2400/9-bit with all parameters at their defaults, 400 samples |

The two end-to-end testbenches use a reference model written from the
network's definition (`dwn_top_harness`). They check every class count, the
winner and the exact 2-cycle latency. They also count the events the design
must handle and fail if one never happens: back-to-back samples, idle
cycles, a feature below all of its thresholds, a feature at or above all of
them, tied class counts, and a reset that drops a sample in flight.

Running a testbench with Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal rtl/dwn_pkg.sv rtl/*.sv \
    tb/dwn_top_harness.sv tb/tb_dwn_top.sv --top-module tb_dwn_top -o sim
./obj_dir/sim
```

List `rtl/dwn_pkg.sv` first so the package is compiled ahead of its users.
Use the same command for the block testbenches, without the harness file.
The full-size testbench takes about four minutes to build, mostly
elaborating the default model, and under a second to run.

## Files

`rtl/dwn_pkg.sv` (sizes, stand-in model), `rtl/thermometer_encoder.sv`,
`rtl/learnable_mapping.sv`, `rtl/n_lut.sv`, `rtl/lut_layer.sv`,
`rtl/popcount.sv`, `rtl/index_comparator.sv`, `rtl/argmax.sv`,
`rtl/classification.sv`, `rtl/dwn_top.sv`; testbenches `tb/tb_*.sv` and the
end-to-end driver `tb/dwn_top_harness.sv`.
