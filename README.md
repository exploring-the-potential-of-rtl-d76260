# Multi-level scaling (MLS) low-bit convolution datapath

Training a convolutional network needs three convolutions per layer: the
forward one, Conv(W, A), and the two of the backward pass, Conv(E, A) for the
weight gradient and Conv(E, W) for the propagated error. They dominate the
cost of training. This design runs all three on tensors of 7-bit numbers
(a sign plus a 2-bit exponent and a 4-bit mantissa) instead of 32-bit floats,
without losing the range that training needs. The trick is to split every
number's scale over three levels:

    x  =  S_t  *  S_g  *  X

* `S_t` is one binary32 factor for the whole tensor (its largest |x|);
* `S_g` is one small factor per group of the tensor (for weights one group
  per (output channel, input channel) pair, for activations and errors one per
  (sample, channel) pair), stored as an 8-bit exponent and one mantissa bit,
  value `(1 + m/2) * 2^-e`;
* `X` is the per-element minifloat, sign + `<E_X, M_X>` = `<2, 4>`.

A K x K convolution window of one input channel is exactly one group of the
weight tensor and lies inside one group of the activation tensor. Inside a
group every element has the same `S_t * S_g`, so the products of the window
can be summed as plain integers. Only between groups does the scale differ,
and there the cheap factor `S_g(w) * S_g(a)` is applied with shifts and one
addition before a floating-point adder tree combines the channels. The
tensor-wise factor is never multiplied in here: it is a single scalar per
output tensor and is folded into the floating-point operation that follows
(batch normalization).

The RTL contains the two hardware parts of this scheme: the **dynamic
quantizer**, which turns a binary32 tensor into an MLS tensor, and the
**MLS convolution unit**, which multiplies and accumulates two MLS tensors
and returns binary32 results. `mls_train_core` places both side by side.
Batch normalization, ReLU, the weight update and the tensor buffers stay in
ordinary floating-point hardware and are not part of this RTL; the signals
that would connect to them are ports of `mls_train_core`.

## The element format and its integer view

An element has a sign `s`, an exponent code `e` (`E_X` bits) and a mantissa
`m` (`M_X` bits). Its magnitude lies in `[0, 1)`:

| code `e` | value                                   |
|----------|-----------------------------------------|
| 0        | `(m / 2^M_X) * 2^E_XMIN` (subnormal)    |
| k >= 1   | `(1 + m / 2^M_X) * 2^(E_XMIN + k - 1)`  |

with `E_XMIN = 1 - 2^E_X = -3` for `E_X = 2`. The binades are therefore
`[1/8,1/4)`, `[1/4,1/2)`, `[1/2,1)`, and the subnormal code keeps the step of
the lowest binade (gradual underflow), so zero and tiny values are
representable without a separate zero flag.

Multiplied by `2^(M_X - E_XMIN)`, every element becomes an integer:

    int(X) = {e != 0, m} << max(e - 1, 0)        (at most 7 bits for <2,4>)

The product of two elements is then a 14-bit unsigned integer in units of
`2^(2(E_XMIN - M_X)) = 2^-14`, the same unit for every product. `mls_mul`
forms it as the (M_X+1) x (M_X+1) fraction product shifted by the two
exponent codes and returns it in 15-bit two's complement.

## A lane: multiplier, integer accumulator, scale unit

`mls_conv_unit` has `LANES` (default 16) identical lanes. Each lane handles
one group, i.e. one input channel of one output element, at a time:

1. **MUL** (`mls_mul`): one weight tap times one activation tap per cycle,
   registered.
2. **ACC** (`intra_acc`): a 32-bit integer accumulator. The tap flagged
   `in_first` loads it, the others add, and after the tap flagged `in_last`
   the sum `P` of the group is handed on. Nine 14-bit products cannot
   overflow 32 bits; the sum would wrap if it could.
3. **Scale unit** (`group_scale_unit`): multiplies `P` by
   `S_p = S_g(w) * S_g(a)`. With one mantissa bit per group scale, the
   mantissa part of `S_p` is 1, 1.5 or 2.25, so the unit forms

       V = 4P        (m_w m_a = 00)
       V = 4P + 2P   (01 or 10)
       V = 8P + P    (11)

   and carries `2^-(e_w + e_a + 2)` as an exponent. It then normalises `V`
   into a binary32 number (leading-one search, round to nearest even).
   Results below the binary32 normal range, which extreme group exponents can
   produce, become a zero of the same sign. Output registered.

Everything in a lane is integer arithmetic except the final conversion; this
is where the energy saving of the scheme comes from.

## Adder tree and channel chaining

`fp_adder_tree` sums the 16 binary32 lane outputs in a pipelined binary tree
of `fp32_add` nodes, one register per level, so a new vector of partial
results is accepted every cycle and its sum appears `log2(LANES)` cycles
later. `fp32_add` rounds to nearest even, reads subnormals as zero, flushes
results below the normal range to zero and saturates to infinity above it;
NaN and infinity never enter the tree.

A layer with more than `LANES` input channels is computed in passes of
`LANES` channels. The tree sum of a pass is added to a binary32 output
accumulator when the pass was started with `in_chain`, and loaded into it
otherwise; `in_final` marks the pass that completes an output element. Fewer
channels than lanes are handled by feeding the spare lanes zero elements.

The result on `z_out` is `Z / S_t(z)`, i.e. the output element without the
tensor-wise factor `S_t(w) * S_t(a)`.

## The dynamic quantizer

`dynamic_quantizer` converts a binary32 tensor that is streamed through it
twice, one element per cycle, each with its group index `in_gid`.

* **Statistics pass** (`phase = 0`, in `dq_max`): the maximum |x| of every
  group (`S_r`) and of the whole tensor (`S_t`). Non-negative binary32
  numbers order like unsigned integers, so this is an integer compare on
  `x[30:0]`. `clear` empties the table in one cycle (per-group valid bits).
* **Quantization pass** (`phase = 1`): for the element's group,
  `dq_group_scale` finds `S_g = ceil(S_r / S_t)` in `<8,1>`. Because the
  significand ratio lies in (1/2, 2), the exponent and the one-bit ceiling
  follow from two integer compares; a ceiling that reaches 2 moves to the next
  exponent. Then `dq_element_quant` computes `X_f = |x| / (S_t * S_g)` with an
  integer divider on the significands (`M_X + RBITS + 4` fraction bits, the
  powers of two as shifts), places it on the `<E_X, M_X>` grid and rounds
  stochastically: with the grid step as unit and `RBITS` extra fraction bits,
  it adds the caller's random number `rnd` (uniform, `u = rnd / 2^RBITS` in
  `[0,1)`) and truncates, i.e. `floor(v + u)`. This rounds up with a
  probability equal to the dropped fraction, so the quantization is unbiased
  on average, the property that keeps the backward pass accurate.

The quantized element leaves one cycle after it entered, together with its
group index, its group's scale and the tensor scale, so a buffer can store the
complete MLS tensor. The random numbers come from outside, as from a
precomputed table or an LFSR; the quantizer itself is deterministic.

A rounding that carries out of a binade moves the element to the next binade
(the exact result); only above the largest binade does the value saturate at
`(2 - 2^-M_X) * 2^-1`. This saturation is reached by the tensor's largest
elements when `S_g` equals `S_r / S_t` exactly.

## Interfaces and timing

| Module               | Accepts                          | Latency                              |
|----------------------|----------------------------------|--------------------------------------|
| `mls_mul`            | combinational                    | 0                                    |
| `intra_acc`          | one product per cycle            | `P` one cycle after the last product |
| `group_scale_unit`   | one `P` per cycle                | 1 cycle                              |
| `fp_adder_tree`      | one vector per cycle             | `log2(LANES)` cycles                 |
| `mls_conv_unit`      | one tap vector per cycle         | `4 + log2(LANES)` = 8 cycles after the last tap of the final pass |
| `dq_max`             | one element per cycle            | included from the next cycle         |
| `dynamic_quantizer`  | one element per cycle            | 1 cycle                              |

There is no back-pressure: every unit accepts data on every cycle, and the
caller is expected to keep its own framing. A 3 x 3 group takes 9 cycles per
lane, so one output element with `C` input channels takes
`9 * ceil(C / 16)` cycles of the unit. The group scales and the `in_chain` /
`in_final` flags of `mls_conv_unit` are sampled with `in_last`. All registers
with control meaning have an asynchronous active-low reset
(`rst_n`); data registers are not reset.

`mls_train_core` brings out the quantizer's ports with the prefix `dq_` and
the convolution unit's with `cv_`; the per-lane operands are unpacked arrays
of `LANES` entries.

## Parameters

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `E_X`, `M_X` | 2, 4 | element exponent and mantissa bits (the main configuration; smaller formats such as `<2,1>` or `<1,1>` are parameter overrides; `E_X` must be at least 1, so pure fixed-point elements are not supported) |
| `E_G`, `M_G` | 8, 1 | group-scale exponent and mantissa bits (`M_G` must be 0 or 1) |
| `ACC_W` | 32 | integer accumulator width (16 suffices for `<2,1>`) |
| `LANES` | 16 | parallel lanes = groups per pass; power of two |
| `RBITS` | 8 | width of the stochastic-rounding random number |
| `GROUPS` | 64 | groups whose maxima the quantizer holds per tensor |

`GROUPS` is the main limit on real layers: with (output, input) channel
grouping a 512 x 512 weight tensor has 262,144 groups. Larger tensors have to
be quantized in pieces of 64 groups whose tensor maximum is combined outside,
or `GROUPS` raised (the table is a plain register array, one 31-bit entry per
group).

## Where this design departs from the description it follows

* The conversion of each lane's scaled integer into binary32, its rounding
  mode, flushing to zero and the tree's binary32 precision are choices of this
  design; the scheme only says that the adder tree is the one floating-point
  part.
* The number of lanes, the random-number width, the group-table size,
  pipelining, framing flags and channel chaining are this design's own.
* The element quantizer divides instead of multiplying by a reciprocal.
* The reference algorithm clips the rounded mantissa of an element to
  `2^M_X - 1`; here a carry moves to the next binade, which is the nearer
  representable value. The two differ only for values that round up across a
  binade boundary.
* The reference algorithm's underflow step is written with the exponent
  width where the element exponent is meant; this design uses IEEE-style
  gradual underflow, whose subnormal step equals that of the lowest binade.
* The group-scale product is applied but the tensor-wise scales are not;
  multiplying `z_out` by `S_t(w) * S_t(a)` is left to the consumer.
* Only the arithmetic is here: no buffers, address generation, or control of
  a whole layer.

## Verification

Each module has a self-checking testbench in `tb/` that compares against
an independent model in `tb_ref_pkg` (real-number arithmetic with its own
binary32 rounding) and prints `TB_RESULT checks=N failures=M`:

* `tb_mls_mul` checks all 16,384 operand pairs.
* `tb_intra_acc`, `tb_group_scale_unit`, `tb_fp_adder_tree` use random
  streams and check latency; the scale-unit test covers all three `S_p` cases
  and the flush to zero.
* `tb_dq_max`, `tb_dq_group_scale` and `tb_dq_element_quant` include directed
  corner cases (ratios of exactly 3/4, one unit above, empty groups) and a
  statistical check that stochastic rounding is unbiased.
* `tb_dynamic_quantizer` and `tb_mls_conv_unit` check whole streams, the
  one-cycle and `4 + log2(LANES)` latencies, and 1 to 3 chained passes.
* `tb_mls_train_core` runs at the default parameters: a 2 x 24 x 3 x 3 weight
  tensor and a 24 x 6 x 6 activation tensor are quantized by the quantizer,
  and 32 output elements are computed in two chained passes each. Results are
  compared bit-exactly with the model and, as a sanity check, with the
  floating-point convolution of the unquantized tensors. It counts and
  requires every mechanism: both quantizer passes, group scales with mantissa
  1, subnormal and saturated elements, chained passes and all three scale-unit
  cases.
* `tb_mls_train_core_lowbit` repeats that run (with its helper
  `lowbit_layer_run`) in the two smaller formats: `<2,1>` elements with a
  16-bit accumulator and `<1,1>` elements with an 8-bit accumulator, set by
  parameter overrides, again bit-exact against the model.
* `tb_mls_train_core_backward` runs the two backward convolutions at the
  default parameters on quantized error, activation and weight tensors: the
  weight gradient Conv(E, A), where each lane holds one sample and a group is
  the 16 products over a 4 x 4 error map, and the error propagation
  Conv(E, W) over a full 6 x 6 map, where taps outside the error map are fed
  as zero elements. Both are bit-exact against the model.

To simulate one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/mls_pkg.sv tb/tb_ref_pkg.sv tb/tb_mls_train_core.sv \
        --top-module tb_mls_train_core
    ./obj_dir/Vtb_mls_train_core

Other testbenches are built the same way with their own name; the other
modules are found through `-Irtl`. Each testbench has a watchdog that
reports a failure and ends the run if it stalls.
