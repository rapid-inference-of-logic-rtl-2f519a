# A logic-gate-network anomaly detector for the Level-1 calorimeter trigger

This is synthesizable SystemVerilog for a small, fixed-latency anomaly detector.
It reads one calorimeter image per clock cycle and returns one anomaly score per
image. The score is meant to flag collision events that look unlike ordinary
ones. The detector is a *logic gate network* (LGN). Each neuron of the network is
a single two-input Boolean gate, not a multiply-accumulate unit.

During training, every node is a soft mixture of all 16 two-input Boolean
functions. At inference, each node keeps only the function with the largest
learned weight. After training, the network is therefore nothing but wires and
gates. In an FPGA it maps entirely onto LUTs and flip-flops and uses no DSP
blocks. It also needs only a few cycles of latency. The published
implementation of this idea reaches 3 cycles at 6.25 ns per cycle (160 MHz) for
an 18 x 14 pixel calorimeter image. This RTL is built for that latency.

The RTL contains every piece of the inference path. What it cannot contain is a
*trained* network, because the gate choices and wiring of the published network
are not available. The gate and wiring configuration therefore comes from a
deterministic stand-in rule that lives in one package (see "Network
configuration"). The scores it produces are correct for that stand-in network,
but they carry no physics meaning until trained values replace it.

## Data path

```
            pix[252] x 10 bit                                             score
 in_valid ──┐                                                             out_valid
            v
  ┌────────────────────┐   756 b   ┌──────────┐   ┌──────────┐ 2048 b ┌──┐
  │ thermometer_encoder├──────────>│ layer 0  ├──>│ layer 1  ├───────>│R1│─┐
  └────────────────────┘           └──────────┘   └──────────┘        └──┘ │
        stage 1 (combinational up to R1)                                   │
  ┌────────────────────────────────────────────────────────────────────────┘
  │    ┌──────────┐  1024 b  ┌──────────┐  256 b ┌──┐       ┌───────────┐   ┌──┐
  └───>│ layer 2  ├─────────>│ layer 3  ├───────>│R2├──────>│ group_sum ├──>│R3├─> score (9 b)
       └──────────┘          └──────────┘        └──┘       └───────────┘   └──┘
        stage 2                                              stage 3
```

| Stage | Logic before its register | Register |
|-------|---------------------------|----------|
| 1 | thermometer encoder, layers `0 .. SPLIT-1` | `s1_bits` (width of layer `SPLIT-1`) |
| 2 | layers `SPLIT .. NUM_LAYERS-1` | `s2_bits` (width of last layer) |
| 3 | count of ones in `s2_bits` | `score` |

**Timing.** Suppose an image is on `pix` with `in_valid` high when rising edge
*k* occurs. Its score is on `score`, with `out_valid` high, right after edge
*k+2*. A consumer registers it at edge *k+3*. That is the 3-cycle latency. The
pipeline accepts a new image every cycle, and it never stalls, so it has no
ready or back-pressure signal. Gaps in `in_valid` travel down the pipeline as
bubbles. `rst_n` is synchronous and active low. It clears only the three valid
bits. Images in flight during a reset are dropped, and the data registers keep
whatever they held. An assertion in `lgn_top` states the handshake rule:
`out_valid` may be high only if `in_valid` was high `LATENCY` cycles earlier.

Only three register stages are needed because a layer is one level of 2-input
gates. Several consecutive layers fit in one or two levels of 6-input LUTs, so
two layers per stage is a modest logic depth. The position of `R1` is set by
`SPLIT`. The published design does not say where its registers sit. With a
trained network, move `SPLIT` to wherever the critical path is best balanced.

## Thermometer encoding

Gates need bits, so each pixel is first converted into `N_THR` bits. Bit *i* is
1 when the pixel value is at least threshold *t_i*. With thresholds
{10, 20, 30}:

| pixel value | code (t1 t2 t3) |
|-------------|-----------------|
| 0 – 9       | `000` |
| 10 – 19     | `100` |
| 20 – 29     | `110` |
| ≥ 30        | `111` |

The comparison is `>=`, so a value equal to a threshold sets that threshold's
bit. Inside a pixel's `N_THR`-bit field, *t1* sits in the most significant
position. That is why the codes above read as Verilog literals: value 15 gives
`3'b100`. Pixel *p* (row-major, *p* = row·14 + col) occupies bits
`[p*N_THR +: N_THR]` of the encoder output. The thresholds are learned in
training; {10, 20, 30} are placeholders. All pixels share one set of thresholds.
A per-pixel set would change only the comparator constants.

## The gate node and its encoding

`lgn_pkg::gate_e` numbers the 16 functions by their truth table. For inputs
(a, b), the output is bit `{~a, ~b}` of the 4-bit code:

| code | gate | code | gate |
|------|------|------|------|
| 0 | 0 | 8 | NOR |
| 1 | a AND b | 9 | XNOR |
| 2 | a AND NOT b | 10 | NOT b |
| 3 | a | 11 | a OR NOT b |
| 4 | NOT a AND b | 12 | NOT a |
| 5 | b | 13 | NOT a OR b |
| 6 | XOR | 14 | NAND |
| 7 | OR | 15 | 1 |

This is the usual ordering of differentiable logic gate network software. When
a trained model is imported, its per-node argmax index can be used directly as
the code. `logic_gate` implements the function named by the enum with a `case`.
The testbenches compute outputs independently from the truth-table rule.

## Network configuration

Which gate each node holds, and which two bits of the previous layer it reads,
come from two functions in `lgn_pkg`. Both are evaluated at elaboration time:

* `node_gate(layer, node)` hashes the pair of indices into a 4-bit gate code.
  The 16 gates therefore all occur, in roughly equal numbers.
* `node_src(layer, node, which, in_w)` returns the source bit for input `which`
  (0 = a, 1 = b). Node *n* takes elements 2*n* and 2*n*+1 of the layer-specific
  permutation *k* → (*k*·7919 + offset) mod `in_w`. Every bit of the previous
  layer is read whenever 2·`OUT_W` ≥ `IN_W`.

To deploy a trained network, replace the bodies of these two functions, for
example with `case` tables exported from the training code, and set
`LAYER_W` to the trained layer widths. No module changes. Synthesis then folds
constant gates, pass-through gates and nodes whose outputs are never read.
Expect the final LUT and flip-flop counts to depend strongly on the trained
network. With the stand-in, only 1,581 of the 2,048 `R1` bits and 168 of the 256
`R2` bits survive synthesis. The published network reports 856 flip-flops and
about 20,000 LUTs. Those figures cannot be compared with this stand-in.

## Anomaly score

`group_sum` counts the ones in the last layer. With 256 output nodes, the score
runs from 0 to 256 and is 9 bits wide. This is the single-group form of the
"group sum" output that logic gate networks use to turn bits into a number.
During training, such a count is usually divided by a temperature constant. In
hardware that constant is left to whatever compares the score with a trigger
threshold: comparing `score` with an integer threshold is equivalent.

## Parameters

| Parameter (lgn_top) | Default | Origin |
|---|---|---|
| `N_PIX_P` | 252 (18 × 14) | published image size |
| `PIX_W_P` | 10 | assumed (calorimeter region E_T word) |
| `N_THR_P`, `THRESH` | 3, {10, 20, 30} | the published worked example; real thresholds are learned |
| `NUM_LAYERS_P`, `LAYER_W` | 4, {2048, 2048, 1024, 256} | assumed; the published network's shape is not given |
| `SPLIT` | 2 | assumed register position |
| `lgn_pkg::LATENCY` | 3 | published latency of the LGN on FPGA |

## Where this departs from the published design, and how far to trust it

* **Follows the published design:** the input image size; thermometer
  binarization with the `>=` rule; two-input nodes, each one of 16 fixed gates;
  a feedforward layer structure; 3 cycles of latency; no multipliers.
* **Own choices:** pixel width; number and width of layers; register placement;
  the valid handshake and reset; the popcount score; the gate numbering; the
  stand-in gate and wiring configuration.
* **Not built:** the convolutional variant of the network (CLGN). In the CLGN, a
  binary tree of gates replaces each convolution kernel. It gives better physics
  performance, but its FPGA implementation was not part of the published
  hardware, and its kernel sizes and channel counts are not given.
* **Timing closure at 160 MHz has not been checked.** No FPGA place and route
  was run. Logic depth per stage is two gate layers or one 256-bit
  count, which is modest. Still, the real depth depends on the trained wiring.

The testbenches check every score bit-exactly against an independent reference
model and check the latency cycle by cycle, so the RTL matches the design
described here. Whether it reproduces the published physics performance cannot
be checked without the trained network.

## Simulating

All files are plain SystemVerilog 2017. Packages must come first on the command
line. Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. Example, the full-size end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lgn_pkg.sv tb/lgn_ref_pkg.sv tb/lgn_top_tb.sv --top-module lgn_top_tb
./obj_dir/Vlgn_top_tb
```

| Testbench | What it checks |
|---|---|
| `logic_gate_tb` | all 16 gates × 4 input pairs against the truth-table rule |
| `thermometer_encoder_tb` | the worked examples, values at and around each threshold, random images |
| `lgn_layer_tb` | a 64→48 layer, every node against its gate code and source bits; every input read |
| `group_sum_tb` | counts of zeros, ones, single bits and random densities against `$countones` |
| `lgn_top_tb` | default-size pipeline end to end: ~300 images (empty, saturated, sparse, random), back-to-back and with bubbles, a reset in mid-traffic; every score and every latency checked against a reference model of the whole network; every gate type must see all four input pairs |
| `lgn_event_stream_tb` | a continuous stream of synthetic quiet events and multi-jet-like events at one image per cycle; checks every score and that throughput is one score per cycle |

`tb/lgn_ref_pkg.sv` holds the reference gate and thermometer functions that the
testbenches share.

## Files

* `rtl/lgn_pkg.sv`: gate enum, default sizes, stand-in configuration functions
* `rtl/logic_gate.sv`: one node
* `rtl/thermometer_encoder.sv`: pixel binarization
* `rtl/lgn_layer.sv`: one layer of nodes
* `rtl/group_sum.sv`: score counter
* `rtl/lgn_top.sv`: the three-stage pipeline
* `tb/*.sv`: testbenches and the reference package
