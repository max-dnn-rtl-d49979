# Multi-level approximate multiplication for a DNN convolution engine

Most of the energy of a convolutional neural network goes into
multiply-accumulate operations, and most layers tolerate some error in their
products. This design exploits that with approximate multipliers whose
strength is chosen at a fine grain: a single convolutional layer can use one
multiplier for some filters and a cheaper one for others, or one multiplier per
input channel, per kernel row or per kernel column. On top of that, the
multiplications whose weights lie far from the layer's weight mean can be left
out altogether.

The RTL follows the MAx-DNN approach (V. Leon et al., "MAx-DNN: Multi-Level
Arithmetic Approximation for Energy-Efficient DNN Hardware Accelerators",
2022). That work evaluates its approximations in a software framework, on a
quantized ResNet-8 for CIFAR-10, with ROUP approximate multipliers. It defines
the multipliers and the four ways of distributing them, but it does not
describe the accelerator around them. This RTL gives the multiplier at gate
level and builds a compact, streaming convolution engine around it. The engine
is this design's own, and each place where it goes beyond the publication is
marked below.

## The pieces

```
                 cfg_we/cfg_layer/cfg_data
                          |
                   +--------------+  layer_cfg_t of in_layer
 in_layer -------->| approx_config|-------------+----------------+
                   +--------------+             |                |
                                      +---------------+   +-------------+
 in_filter, in_channel -------------->| approx_mapper |   | klms_filter |<-- in_wgt[9]
                                      +---------------+   +-------------+
                                        tap_axm[9] |          skip[9] |
                                                   v                  v
 in_act[9], in_wgt[9], first/last --------> +--------------------------------+
                                            | kernel_mac                     |
                                            |  9 x axm_lane (M1|M2|M3 each)  |--> out_valid
                                            |  exact adder tree, accumulator |    out_filter
                                            +--------------------------------+    out_sum
```

| module | role |
|---|---|
| `roup_mult` | ROUP approximate multiplier, parameters N, P (perforation), R (rounding column) |
| `axm_lane` | one multiplication lane: the three multipliers M1, M2, M3 with operand isolation |
| `approx_mapper` | picks M1/M2/M3 for each of the nine kernel taps (LLAM, FLAM, KLAM) |
| `klms_filter` | kernel-level multiplication skip: flags weights outside mu +- k*sigma |
| `kernel_mac` | nine lanes, exact adder tree, accumulation over input channels |
| `approx_config` | one configuration record per convolutional layer |
| `maxdnn_top` | the engine: wires the above together |
| `maxdnn_pkg` | widths, the `approach_e` enum and the `layer_cfg_t` record |

## The ROUP multiplier

ROUP multiplies two N-bit two's-complement numbers (N = 8 here) through the
radix-4 (modified Booth) recoding of B. B becomes N/2 digits
d_j = -2 b(2j+1) + b(2j) + b(2j-1), each in {-2..2}, with b(-1) = 0, and the
exact product is the sum of d_j * A * 4^j. ROUP approximates it in two
independent ways.

* **Perforation (P).** The P least-significant partial products (j < P) are
  not generated. This removes whole rows of the partial-product matrix, so
  the error is large but the saving is large too.
* **Asymmetric rounding (R).** Before partial product j is formed, A is
  rounded to a multiple of 2^r_j. The rounding is half-up: the low r_j bits are
  dropped and bit a(r_j - 1) is added back, giving
  A^r = (floor(A / 2^r) + a(r-1)) * 2^r. Each partial product is rounded by a
  different amount. In this RTL, r_j = min(max(R - 2j, 0), N - 1). Every
  partial product is therefore cut at the same column R of the product
  matrix, so the rows of higher significance lose fewer bits.

The approximate product is ROUP(A,B) = sum over j = P .. N/2-1 of
A^{r_j} * d_j * 4^j. P = 0 with R = 0 gives the exact Booth multiplier.

**Rounding without an adder.** Adding a(r-1) to the truncated operand would
need a carry chain in every partial product. Instead the Booth selector works
on the truncated operand T = A >> r_j, and the increment is folded into the
partial product's correction bits. Let `neg`, `one` and `two` be the usual
Booth select signals, and a = a(r_j - 1). Partial product j is
`sext(sel) + 2*c1 + c0`, where:

| digit | sel (bits of T or 2T, inverted if neg) | c0 | c1 |
|---|---|---|---|
| 0 | 0 | 0 | 0 |
| +1 | T | a | 0 |
| -1 | ~T | 1 XOR a | 0 |
| +2 | 2T (bit 0 = 0) | 0 | a |
| -2 | ~(2T), but bit 0 = NOT a | NOT a | 0 |

For digits of magnitude 1 the single correction bit becomes `neg XOR a`. This
is the extra XOR gate that characterises ROUP. For digits of magnitude 2 the
increment 2a either lands in the free bit 0 of the inverted operand or becomes
a correction bit of weight 2. Each case can be checked by expanding
-(2T + 2a) = ~(2T) + 1 - 2a. The partial products, shifted by 2j + r_j, are
then added by an ordinary (exact) adder.

With the default settings of the three multipliers, over all 65,536 operand
pairs:

| unit | P | R | mean abs. error | max abs. error | mean error / mean abs. product |
|---|---|---|---|---|---|
| M1 | 0 | 3 | 3.3 | 14 | 0.08 % |
| M2 | 1 | 4 | 65.1 | 268 | 1.6 % |
| M3 | 2 | 6 | 257.8 | 1072 | 6.3 % |

These P/R values are placeholders for a "low", a "medium" and a "high"
strength multiplier. The publication uses three such multipliers but does
not give their parameters. Change them with the `AXM_P`/`AXM_R` parameters of
`maxdnn_top`.

## Assigning multipliers to multiplications

Each lane holds all three multipliers. The one named by `sel` gets the
operands and the other two see zeros. Only one therefore switches, which
stands in for "this multiplication is done by multiplier M". The weight drives
the Booth-recoded operand B and the activation the rounded operand A.

The layer's record chooses one of five rules (`approach_e`):

| approach | multiplier of a multiplication |
|---|---|
| `APPR_LLAM` (layer level) | `layer_axm` for every multiplication of the layer |
| `APPR_FLAM` (filter level) | `group_axm[g]`, with g the filter's group: index < `bound1` gives 0, < `bound2` gives 1, otherwise 2 |
| `APPR_KLAM_CHAN` (kernel level, channel) | the same three groups, over the input-channel index |
| `APPR_KLAM_ROW` | `group_axm[row]` for kernel row 0..2 (taps w1-w3, w4-w6, w7-w9) |
| `APPR_KLAM_COL` | `group_axm[col]` for kernel column 0..2 |

`group_axm` is a packed array, so `group_axm[0]` is the least significant
field. The configurations reported for ResNet-8 are named like
`KLAM-chan._2_1_2`. In the test harness the three digits are read as the
multipliers of groups 0, 1 and 2, with digit d meaning M(d+1).

The FLAM and KLAM-channel groups are contiguous index ranges. That is the
simplest form of "groups of filters" and matches the illustration of the
method, where filters 1-3, 4-5 and 6-7 share a multiplier. Three groups match
the three multipliers.

## Skipping multiplications (KLMS)

When `klms_en` is set, `klms_filter` compares every weight with the layer's
interval [mu - sigma, mu + sigma], or [mu - 2 sigma, mu + 2 sigma] when
`klms_2sigma` is set. The ends of the interval are included. A weight outside
the interval leaves its lane idle, and the product counts as zero. mu and sigma
are the mean and standard deviation of all kernel weights of the layer. They
are computed off-line and loaded into the record as 8-bit integers in the
weights' quantized scale. KLMS combines freely with any of the five
multiplier-assignment rules.

## Datapath and timing

`maxdnn_top` consumes one 3x3 window of one input channel per clock:
`in_act[0..8]` and `in_wgt[0..8]`, where tap t is kernel row t/3, column t%3.
Each window carries these tags:

* `in_layer` selects the configuration record, read in the same cycle.
* `in_filter` and `in_channel` feed the FLAM and KLAM-channel grouping.
  `in_filter` also comes back with the result.
* `in_first` starts a new sum and `in_last` completes it. An output of an
  M-channel convolution is therefore M consecutive windows (idle cycles may
  come between them). Valid windows must form complete groups: a window has
  `in_first` set exactly when no group is open. An assertion in `kernel_mac`
  checks this rule.

The pipeline has two register stages:

```
edge k    : window with in_last sampled; sum of its nine products registered
edge k+1  : accumulator updated; out_valid = 1, out_sum, out_filter valid
edge k+2  : out_valid returns to 0 unless another output completes
```

There is no back-pressure, and a window can be sent on every clock. The result
is the raw 32-bit sum. Requantization, bias, ReLU, pooling and residual
additions are outside this engine. Reset is synchronous and active low. It
clears the pipeline valid bits and sets every layer to LLAM with M1, KLMS off.

A configuration record (`layer_cfg_t`, 45 bits) is written whole with
`cfg_we`/`cfg_layer`/`cfg_data`. It takes effect for windows presented from
the next clock on. Records for indices 7 and above are ignored.

## Sizes

The package constants are 8-bit operands, 3x3 kernels, three multipliers,
seven layer records (ResNet-8 has seven 3x3 convolutional layers), 8-bit
filter and channel indices (up to 256 of each) and a 32-bit accumulator.
The publication gives only the number of layers. The sizes below are those
of the usual CIFAR-10 ResNet of depth 8. ResNet-8 is taken here as 3->16, 16->16, 16->16, 16->32 (stride 2),
32->32, 32->64 (stride 2) and 64->64 channels on 32x32 down to 8x8 maps. It
needs at most 64 channels and 64 filters, and sums of at most 576 products of
magnitude at most 21,760, well inside 32 bits. Feature maps and weights
are streamed in, so layer size is limited only by the index widths.
Projection shortcuts with 1x1 kernels can be run as 3x3 kernels whose other
eight weights are zero.

A network that needs more than three distinct multipliers cannot be run in one
pass. Nor can the layer-sensitivity experiment (one approximate layer, the
others exact) with the default P/R values, because none of M1..M3 is exact.
Setting one unit to P = 0, R = 0 makes it exact.

## Where this departs from, or adds to, the publication

* The accelerator's memories, controller and dataflow are not described in
  the publication (they come from the framework it builds on). The streaming
  window interface, the one-kernel-per-clock datapath and the two-stage
  pipeline are this design's.
* The rule r_j = R - 2j for the per-partial-product rounding is an assumption.
  The publication says only that each partial product is rounded to a
  different width according to its significance.
* The bit-level folding of the rounding increment for digits of magnitude 2 is
  derived here. The publication mentions only the XOR in the correction term.
* Operand width 8, the P/R values of M1..M3, the three contiguous groups and
  their bounds, the configuration register file and the 8-bit mu/sigma are
  choices of this design.
* Operand isolation stands in for physically separate multiplier units or
  power gating. Each lane carries all three multipliers.
* The energy model of the method (number of multiplications times the average
  energy of the multiplier used) is an off-line estimate. The end-to-end
  testbench prints the per-multiplier multiplication counts it needs.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Packages must come first on the command line:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/maxdnn_pkg.sv tb/maxdnn_ref_pkg.sv tb/tb_maxdnn_top.sv \
    --top-module tb_maxdnn_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_roup_mult` | all 65,536 operand pairs for five (P, R) settings against the defining sum; the exact setting against A*B |
| `tb_axm_lane` | every operand pair with random multiplier choice and skips |
| `tb_approx_mapper` | 20,000 random records and indices against the assignment rules, plus a directed FLAM case |
| `tb_klms_filter` | random mu/sigma/weights, including weights exactly on and just outside the interval ends |
| `tb_approx_config` | reset values, random writes, and that nothing is written with the enable low |
| `tb_kernel_mac` | 3,000 random outputs of 1-12 channels with gaps; sums, tags and the two-clock latency |
| `tb_maxdnn_top` | all seven ResNet-8 layers with real channel counts, feature maps shrunk 8x per side |
| `tb_maxdnn_resnet8` | the same at full CIFAR-10 size (131,072 outputs, about 2.2 M clocks, under a minute) |

The two end-to-end testbenches share `tb/maxdnn_run.sv`. It creates random
activations and bell-shaped random weights, and computes each layer's weight
mean and deviation for KLMS. Each layer uses a different rule, taken from the
published configurations (FLAM `_2_1_1` and `_2_2_1`, KLAM-chan `_1_0_1` and
`_2_1_2`, KLAM-row `_2_1_1`, plus a column split). KLMS is on with 1 and 2
sigma in three layers. Idle cycles are inserted. Layers 1, 2, 3 and 5 are
then reconfigured and run again. The last three runs use the remaining
published configurations: KLAM-chan `_2_0_2` and `_1_1_2`, and KLAM-row
`_2_1_2`. Every output is compared with the reference in
`tb/maxdnn_ref_pkg.sv`, which is written from the arithmetic definitions and
not from the RTL. The harness fails if any mechanism never occurred: any of
the five rules, any multiplier, 1- or 2-sigma skips, idle cycles, the
reconfiguration or multi-channel accumulation. The data is random, so the
tests check arithmetic exactness against the model, not network accuracy.
