# A multiplication-free ShiftAddNet layer in SystemVerilog

ShiftAddNet is a deep-network layer type built only from the two operations that
hardware designers have long used instead of multipliers: bit shifts and additions.
Every convolution (or fully connected layer) of a conventional network is replaced
by two layers in series:

1. a **shift layer**, a convolution whose weights are restricted to signed powers of
   two, `w_s = s * 2^p` with a sign `s` in {-1, 0, +1} and an integer exponent `p`.
   Each "product" is a barrel shift plus an optional negation;
2. an **add layer**, which replaces the dot product by the negated L1 distance
   between an input window and a filter, `O = -sum |x - w|`. Each "product" is a
   subtraction and an absolute value.

The shift layer does the coarse work (power-of-two scaling, pruning through `s = 0`);
the add layer refines it with full-precision additive weights. No multiplication is
needed in the forward pass of either layer.

This RTL implements one such layer pair with its buffers and a small controller, the
local-gradient arithmetic of both layers for training, and self-checking testbenches
for every block. The arithmetic follows the ShiftAddNet equations; the datapath
organisation (one operation per clock, on-chip buffers, a two-phase controller) is
this implementation's own, because the original work describes the network and
reports FPGA energy figures but does not describe its accelerator.

## The arithmetic

With `C_I`/`C_O` input/output channels, an `R x S` kernel, stride `U`, and the input
map zero-padded by `PAD` on every side, the two layers compute

```
shift:  O_s[co][e][f] =  sum_{ci,r,s}  x[ci][e*U + r][f*U + s] * s[co][ci][r][s] * 2^p[co][ci][r][s]
add:    O_a[co][e][f] = -sum_{ci,r,s} | x[ci][e + r][f + s] - w[co][ci][r][s] |
```

with the usual output size `E = (H + 2*PAD - R)/U + 1`. The shift layer keeps the
stride of the convolution it replaces; the add layer always uses stride 1.

Padding matters more for the add layer than for a convolution: a padded position
enters as `x = 0` and therefore contributes `-|w|`, not zero. The RTL applies the
equation literally to the zero-padded map.

### Training arithmetic

For training, the local derivatives follow the AdderNet rule:

```
add layer:    dO/dw = x - w              dO/dx = HardTanh(x - w)   (clipped to [-1, +1])
shift layer:  dO/dx_s = g * w_s          dO/ds = g * x             dO/dp = g * x * w_s * ln2
```

Here `g` is the error arriving from the add layer. In the *fixed-shift* variant the
shift weights are frozen after initialisation. The error still passes through the
shift layer (`dO/dx_s`), but the `s` and `p` gradients are not computed.

## Number formats

| Quantity | Format (default) | Where set |
|---|---|---|
| activations, add weights | 8-bit two's complement (FIX8), `DATA_W` | `shiftadd_pkg` |
| binary point | 4 fractional bits, `FRAC_W` (1.0 = 16) | `shiftadd_pkg` |
| shift weight | `shift_w_t` = {2-bit sign code, 4-bit signed `p`} | `shiftadd_pkg` |
| sign code | `00` = 0 (pruned), `01` = +1, `11` = -1, `10` read as 0 | `sign_e` |
| accumulators, layer output | 32 bits, `ACC_W` | `shiftadd_pkg` |
| intermediate map (shift -> add) | saturated to `DATA_W` | `shift_conv` `OUT_W` |

Only the 8-bit word width comes from the original work (it reports FIX32, FIX16 and
FIX8 variants, with FIX8 the most compact). The top-level parameters `DW` (word) and
`AW` (accumulator) give the other two: `DW = 16, AW = 32` for FIX16 and `DW = 32,
AW = 48` for FIX32. `AW` must hold `DW + 2^(P_W-1) + log2(C_I*R*S)` bits for no layer
sum to wrap. Floating point is not built. The binary point, the exponent range and the sign code are choices made
here. The exponent range `-8..7` covers the shifts `>>2 .. <<2` used in the original
example kernel. Right shifts truncate towards minus infinity. Products are never
rounded.

## Blocks

```
                 host load port                                     out_raddr/out_rdata
                      |                                                      ^
        +-------------+--------------+                                       |
        v             v              v                                       |
   [input buf]  [shift-weight buf] [add-weight buf]                     [output buf]
        |             |              |                                       ^
        +---> shift_conv ---> [intermediate buf] ---> add_conv --------------+
               (shift_unit)                           (add_unit)
                                                          |  (x, w) operand stream
                                                          v
                                               add_backward_unit --> grad_* (train)
   bwd_* ports ---> shift_backward_unit ---> bwd_d_x / bwd_d_s / bwd_d_p
```

| Module | Role |
|---|---|
| `shiftadd_pkg` | widths, `sign_e`, `shift_w_t`, `load_sel_e` |
| `shift_unit` | `x * s * 2^p` by barrel shift and negation (combinational) |
| `add_unit` | `x - w` and `-|x - w|` (combinational) |
| `conv_walker` | loop sequencer shared by both engines: addresses, padding flag, first/last flags |
| `shift_conv` | shift-layer engine, one shift-and-accumulate per clock, saturating output |
| `add_conv` | add-layer engine, one subtract-abs-accumulate per clock, exports its operand pairs |
| `add_backward_unit` | `x - w` and `HardTanh(x - w)` |
| `shift_backward_unit` | `g*w_s`, `g*x`, `g*x*w_s*ln2`, with the frozen-shift gate (one register stage) |
| `buffer_ram` | simple dual-port RAM, synchronous read, read-before-write |
| `shiftadd_layer` | top: five buffers, both engines, controller, gradient paths |

### The engines and their timing

Both engines are the same pipeline around `conv_walker`. After a `start` pulse the
walker takes one step per clock through `co, e, f` (output pixel) and `ci, r, s`
(kernel window, innermost). For each step it produces three flat addresses,
row-major:

- input: `(ci*H + y)*W + x`
- weight: `((co*C_I + ci)*R + r)*S + s`
- output: `(co*E + e)*F + f`

Window positions outside the map are flagged. For those the input address is 0 and
the engine uses the value zero.

The buffers answer one cycle later. In that cycle the engine forms the term and adds
it to the accumulator, which restarts at the first step of each output pixel. At the
last step of a pixel the sum is written out, one cycle later again.

With `N = C_O*E*F*C_I*R*S` steps, the edge that samples `start` is followed by:

- reads during the next `N` cycles;
- the last write and the `done` pulse on edge `N + 1`;
- `done` first seen high by the edge `N + 2` after the start edge.

There is no stall: the engines own their buffers while they run.

The add engine also exports every `(x, w)` pair it uses, together with the weight's
index. These are exactly the operands of the add layer's local gradients.

### The layer controller

`shiftadd_layer` runs the shift engine over the whole input map into the
intermediate buffer, then the add engine over that buffer into the output buffer.
The controller's states are `IDLE -> SHIFT -> ADD -> IDLE`. Take
`N_S` and `N_A` as the step counts of the two layers. Then `done` is first seen high
`N_S + N_A + 7` clock edges after the edge that sampled `start`. At the default size
(16 -> 16 -> 16 channels, 32 x 32, 3 x 3, stride 1) that is 2 x 2,359,296 + 7 cycles.

Host rules, also checked by assertions:

- Load the buffers only while idle. `load_sel` picks the input map, the shift weights
  (the low 6 bits of `load_data` carry `shift_w_t`) or the add weights.
- Pulse `start` only while idle.
- After `done`, read the output map through `out_raddr`/`out_rdata`. Data comes one
  cycle after the address.

Training mode: while `train` is high during a run, every add-layer step emits
`grad_valid` with the weight index and the two local gradients, registered one
cycle after the step.

The shift-layer gradient unit sits on its own request port (`bwd_*`). `bwd_fixed_shift`
selects the frozen-shift variant.

`shift_sat_count` counts how many intermediate values were clipped to `DW` bits in
the last run. This is a cheap overflow monitor for choosing exponents.

## What is and is not modelled

Followed from the original work:

- the shift and add layer equations, including stride 1 for the add layer and the
  shift layer's stride parameter;
- the padding of the overview figure;
- 3 x 3 kernels;
- the `{-1, 0, +1} * 2^p` weight form;
- the HardTanh-clipped add-layer input gradient;
- the shift-layer gradients with their `ln 2` factor;
- skipping the `s`/`p` gradients when shift layers are frozen;
- the FIX8 word, with FIX16 and FIX32 as parameter settings.

The add weights in the original overview example are fractions between about -1.2
and +1. The default format has 4 fractional bits and a range of +-8, so it holds such
weights to 1/16.

Choices made here, where the original says nothing:

- the whole datapath organisation and its throughput of one term per clock;
- the buffer sizes and layout;
- saturation between the two layers;
- the binary point;
- the exponent width and the sign code;
- the accumulator width;
- every interface and all timing.

Default layer shape: a first-stage ResNet-20 layer on CIFAR-10, 16 channels at
32 x 32. The original names the network and the dataset but not these dimensions.

Not built:

- sequencing of whole networks: residual additions, pooling, normalisation, or
  moving layers between off-chip memory and the buffers. The classifier's fully
  connected shift/add layers need nothing new: they are the `R = S = 1`, `H = W = 1`,
  `PAD = 0` case of the same layer, and `tb_shiftadd_fc` runs one.
- skipping of pruned weights. The shift layers are trained with about 50% of their
  weights at zero, and the shift layers can be pruned further. Here a pruned weight
  (`s = 0`) costs a clock cycle like any other. How the original hardware turns
  sparsity into savings is not described.
- combining the local gradients with incoming errors over a whole layer (the
  chain-rule sums) and the weight update. Only the per-element gradient arithmetic
  exists.
- the FPGA board, its processor and DRAM.

Multiplication count: the forward path has no multiplier. The only multiplier in the
design is the `g * x` product of `shift_backward_unit`. The original gives that
gradient as a formula without saying how it is formed. The `ln 2` factor uses a
constant shift-and-add network over the bits of `0xB172 / 2^16`.

### Sizes against the evaluated networks

One instance holds one fixed layer shape:

- The 16-channel 32 x 32 layers of ResNet-20 on CIFAR-10/100 run exactly as built.
- Deeper ResNet-20 stages (32 channels at 16 x 16, 64 at 8 x 8) need a differently
  parameterised instance. `tb_shiftadd_resnet20_stages` runs both stride-2 shapes
  that way.
- VGG19-small layers (up to 512 channels) need a differently parameterised instance.
- The 76 x 76 FlatCam Face inputs exceed the default 32 x 32 buffers.

Buffer memory of the default instance:

- input: 16 K x 8 bit
- shift weights: 2304 x 6 bit
- intermediate map: 16 K x 8 bit
- add weights: 2304 x 8 bit
- output: 16 K x 32 bit

That is about 0.8 Mbit in total.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_shift_unit` | all 8-bit inputs x all sign codes x all exponents, against integer multiply / floor-divide |
| `tb_add_unit` | all 65,536 operand pairs |
| `tb_add_backward_unit` | all operand pairs, HardTanh in real arithmetic, clipping must occur |
| `tb_shift_backward_unit` | 4000 random vectors, learnable and frozen mode, one-cycle latency |
| `tb_buffer_ram` | write / read-back, read-during-write returns old data |
| `tb_shift_conv` | stride 2, padding, non-square map, three weight ranges; every result, its address, the saturation flag, the `N + 2` latency |
| `tb_add_conv` | every result, the operand stream, the `N + 2` latency |
| `tb_shiftadd_layer` | whole layer at reduced size (2 -> 3 -> 2 channels, 6 x 5, stride 2), FIX8, three runs; see below |
| `tb_shiftadd_layer_fix16` | the same checks in FIX16 (3 -> 4 -> 2 channels, 7 x 7, stride 1) |
| `tb_shiftadd_layer_fix32` | the same checks in FIX32 with 48-bit accumulators |
| `tb_shiftadd_fc` | a fully connected classifier pair (64 -> 32 -> 10, 1 x 1, no padding) |
| `tb_shiftadd_layer_full` | the same checks at the default sizes, one training run of about 4.7 M cycles and 7 M checks |
| `tb_shiftadd_resnet20_stages` | the same checks at the two stride-2 ResNet-20 shapes (16x32x32 -> 32x16x16 and 32x16x16 -> 64x8x8), two runs each, side by side |

The reduced end-to-end tests and the stage test are thin wrappers around the
parameterised checker `tb/shiftadd_layer_check.sv`. Its `REPORT` parameter lets the
stage test run two checkers side by side and print one summed result line. The
full-size test is the same checker written out with no parameter list on the DUT.

The end-to-end tests check:

- the full output map against an integer model;
- the latency;
- the saturation counter;
- the gradient stream, element by element in loop order;
- the shift-gradient unit.

They also count how often each mechanism occurred and fail if one never did. The
mechanisms are padding, pruned weights, left shifts, right shifts, saturation,
gradient output, HardTanh clipping, frozen-shift skipping and learnable-shift
gradients.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_shiftadd_layer \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/shiftadd_pkg.sv tb/tb_shiftadd_layer.sv
obj_dir/Vtb_shiftadd_layer
```

`-Wno-fatal` is needed because the reference models in the testbenches mix integer
widths, which Verilator reports as warnings.

The reduced test finishes in well under a second and the full-size test in a few
seconds once built. The reference models in the testbenches loop over run-time
bounds. With constant bounds Verilator unrolls them, and the full-size model then
takes many minutes to compile.

To change the layer shape, override the `shiftadd_layer` parameters (`C_I, H, W, C_S,
R, S, U, PAD, C_A, RA, SA, PAD_A`) and, for the word size, `DW` and `AW`. The binary
point and the exponent width are in `shiftadd_pkg`. Buffer depths and address widths follow from the parameters.
