# Interleaved approximate FP32 multipliers for CNN kernels

A 3×3 convolution kernel performs nine multiplications per window. Here
each of those nine *multiplier slots* gets its own single-precision
floating-point multiplier, picked from a pool of one exact and eight
approximate designs. The approximate designs differ only in the mantissa
multiplier. That is a 24×24 radix-8 Booth multiplier whose partial-product
reduction uses cheap inexact compressors in its 24 low-order columns. Some
of these compressors err upwards ("positive") and some downwards
("negative"). How the two kinds are arranged over the reduction tree
controls how the errors build up or cancel. A two-layer CNN (10 + 12 kernels
of 3×3, i.e. 198 slots) then gets a *sequence* of multiplier types, one per
slot. Mixing types inside kernels is the main idea. The sequence is chosen
offline and fixed at elaboration, just as each slot would be a
pre-implemented multiplier in silicon.

This RTL implements the multiplier pool and the two convolutional layers
that use it. The sections below go from the inside out.

## 1. The FP32 multiplier (`fp32_approx_mul`)

A product of two IEEE 754 singles takes three steps:

* The sign is `sa ^ sb`.
* The exponent is `Ea + Eb − 127`. A subnormal operand counts as exponent 1
  with hidden bit 0.
* The mantissa product is `{h_a, M_a} × {h_b, M_b}`, 24 × 24 → 48 bits,
  from `r8mabm_24x24`.

Normalisation is a leading-zero shift, because a subnormal operand can leave
the top bits empty. A right shift follows when the result falls into the
subnormal range. Rounding is to nearest, ties to even. The rounding
increment is added to the `{exponent, fraction}` concatenation, so a
mantissa overflow bumps the exponent and 254 + carry becomes infinity.

NaN operands, and 0 × ∞, give `0x7FC00000`. ∞ × finite gives ±∞, and zeros
give a signed zero. The multiplier is purely combinational, with no pipeline.

The parameter `MT` (`approx_pkg::mul_type_e`) selects the variant:

| code | name      | compressors in columns 0..23 |
|------|-----------|------------------------------|
| 0    | `MT_EXACT`| none (exact tree) |
| 1–4  | `MT_PMNI`, `MT_PMSI`, `MT_PMCI`, `MT_PMCSI` | "positive multiplier": positive cells first |
| 5–8  | `MT_NMNI`, `MT_NMSI`, `MT_NMCI`, `MT_NMCSI` | "negative multiplier": negative cells first |

The suffix names the interleaving scheme:

* **NI**: one kind everywhere.
* **SI**: the kind alternates from one reduction stage to the next.
* **CI**: the kind alternates from column to column.
* **CSI**: a checkerboard over column and stage.

## 2. The mantissa multiplier (`r8mabm_24x24`)

### 2.1 Partial products (`booth_r8_ppgen`)

The multiplier operand `y` is recoded in radix 8. Digit *i* ∈ {−4…+4} comes
from `y[3i+2:3i−1]`, with `y[−1] = 0`. Eight digits cover the 24 bits.
Because `y` is unsigned, a ninth row adds `x` when `y[23]` is set. The
multiples are 0, x, 2x, 3x and 4x, with 3x from one hard adder. A negative
digit inverts the multiple and puts the missing +1 into a separate
correction bit.

Sign extension is not drawn out to 48 bits. The rows use a *modified
matrix* instead:

```
row 0      :            ~S S S [27-bit field, bits 0..26]           columns 0..29
row i=1..7 :  1 1 ~S [26 magnitude bits]  starting at column 3i      columns 3i..3i+28
row 8      :  x & {24{y23}}                                         columns 24..47
row 9      :  correction bit S_i at column 3i                       i = 0..7
```

Relative to true sign extension, row 0 carries an excess of 2^29 and row *i*
an excess of 2^(29+3i) − 2^(26+3i). These excesses telescope to 2^50, which
is 0 mod 2^48. The column sum of the matrix is therefore exactly x·y. The
column heights are 2, 1, 1, 3, 2, 2, 4, … up to 9 in columns 21–29, which
matches the published dot diagram of this multiplier.
`approx_pkg::pp_present()` says which positions hold a bit.

### 2.2 Reduction tree

Each column's bits are stacked from slot 0 upward. At every stage, each
column is cut into cells from the bottom:

* In columns 0..23 (`APPROX_COLS`), groups of four go to an approximate 4:2
  compressor (`approx_comp42`) of the kind that
  `approx_pkg::comp_kind(MT, stage, column)` gives.
* A remaining group of three goes to an exact full adder, and a remaining
  pair to an exact half adder. A single bit passes through.
* Columns 24..47 get full and half adders only.

In the next stage a column holds its own sum bits, then its passed-through
bits, then the carries of the column to its right. The tree stops once no
column has more than two bits, after four stages (heights
9 → 6 → 4 → 3 → 2). A plain 48-bit adder then adds the last two rows; the
carry out of bit 47 is dropped.

The tree is not written out by hand. The function `red_table()` simulates
the column heights at elaboration, and nested `generate` loops place one
cell per group. Changing `APPROX_COLS`, the grouping rule or `comp_kind()`
therefore reshapes the tree on its own.

**Placement of positive and negative cells** (`comp_kind`):

* PMCSI: a positive cell where (stage + column) is odd, a negative cell
  otherwise. At the first stage column 23 is positive, column 22 negative,
  and so on down; the second stage is the inverse. This follows the
  published PMCSI diagram.
* SI: PM variants use positive cells at even stages.
* CI: PM variants use positive cells in odd columns.
* NI: PM variants use positive cells everywhere.
* The NM variants are the complements of the PM variants. The phases of SI
  and CI are this design's choice, made to agree with the CSI diagram.

### 2.3 The compressor cells (`approx_comp42`)

A 4:2 cell with no carry-in and no carry-out can output at most 3. In both
kinds, `carry = (at least two inputs set)`. Only the sum bit differs:

| inputs set | exact | positive cell (`sum = OR`) | negative cell (`sum = XOR | AND`) |
|-----------:|------:|-----------------------------:|-------------------------------:|
| 0 | 0 | 0 | 0 |
| 1 | 1 | 1 | 1 |
| 2 | 2 | **3** (+1) | 2 |
| 3 | 3 | 3 | 3 |
| 4 | 4 | **3** (−1) | **3** (−1) |

These are stand-ins. The original positive and negative compressors are
defined in earlier work and not reproduced here. These two are the simplest
cells with the required error direction: a positive mean error for one, a
never-positive error for the other.

### 2.4 Resulting accuracy

Over 20 000 random normal operand pairs, measured by `tb_fp32_approx_mul`
against the exact product:

| variant | error rate | mean abs. bit error | mean rel. error | within 1 % |
|---|---|---|---|---|
| PMNI | 64.9 % | 1.42 | +5.7e−8 | 100 % |
| PMSI | 53.9 % | 1.12 | +3.7e−8 | 100 % |
| PMCI | 57.9 % | 1.20 | +3.6e−8 | 100 % |
| PMCSI | 51.1 % | 1.06 | +2.8e−8 | 100 % |
| NMNI | 22.7 % | 0.46 | −2.1e−8 | 100 % |
| NMSI | 45.0 % | 0.96 | +2.0e−8 | 100 % |
| NMCI | 33.6 % | 0.67 | +0.5e−8 | 100 % |
| NMCSI | 48.2 % | 1.02 | +2.8e−8 | 100 % |

The error rates and bit errors are somewhat lower than those reported for
the original compressors (error rate 64–80 %, bit error 1.3–1.7). The
ordering of the variants also differs, because the cells and the grouping
differ (section 5).

## 3. Multiplier-interleaved kernels

**`conv3x3_kernel`.** Nine `fp32_approx_mul` slots; slot *i* has type
`SLOT_TYPES[4i +: 4]`. The nine products go through an exact FP32 adder
tree, `((p0+p1)+(p2+p3)) + ((p4+p5)+(p6+p7)) + p8`. The window sum either
starts (`first`) or adds to (`acc + sum`) a channel accumulator. The same
nine slots serve every input channel. A layer-2 output with 10 input
channels therefore takes 10 beats through the same nine multipliers.

**`conv_layer`.** `NK` kernels receive the same window each clock, each
with its own weights. The slot types of kernel *k* are `SEQ[36k +: 36]`.

**`approx_cnn_conv` (top).** Layer 1 has 10 kernels (slots 0..89) and
layer 2 has 12 kernels (slots 90..197). Slot number = 9·kernel +
coefficient, coefficients row-major.

The default `SEQ = approx_pkg::DEFAULT_SEQ` gives slot *n* the approximate
multiplier of rank *n* mod 8 in the accuracy ranking PMCSI, NMSI, NMCSI,
NMNI, PMSI, PMCI, PMNI, NMCI, so all eight types are interleaved (K = 8).
The optimised sequences are not available, so this is a placeholder. Any
other assignment, such as a random permutation of a sequence, is just
another `SEQ` value:

```
// 4-bit code of slot n at SEQ[4n +: 4]
approx_cnn_conv #(.SEQ(my_seq)) u_cnn (...);
```

`fp32_add` is an exact, correctly rounded FP32 adder with subnormal
support. Exact cancellation gives +0.

## 4. Interfaces and timing

Both layers have the same streaming port. The layer samples it at the
rising edge of `clk`.

| signal | dir | meaning |
|---|---|---|
| `rst_n` | in | synchronous, active-low reset; clears accumulators and `out_valid` |
| `in_valid` | in | a window beat is present |
| `first` | in | this beat is the first input channel of an output position |
| `last` | in | this beat is the last input channel (with `first` for one channel) |
| `window[0:8]` | in | 3×3 feature window, FP32, row-major |
| `weight[k][0:8]` | in | weights of kernel k for this channel |
| `out_valid` | out | one-clock pulse, one clock after the `last` beat |
| `out[k]` | out | output value of kernel k; holds until the next `last` |

Throughput is one window per clock, with any number of idle clocks between
beats. An assertion in `conv3x3_kernel` flags a non-`first` beat that does
not continue an open group. All arithmetic between the input registers of
the caller and the accumulator register is combinational. One clock
contains a multiplier, four adder levels and the accumulator adder, so a
real implementation would pipeline this path.

The feature-map buffering between the layers is outside this RTL, and so
are pooling, activation and the classifier. Layer 1's outputs and layer 2's
inputs are therefore separate ports.

## 5. What follows the source design and what does not

Taken from the design as published:

* FP32 sign/exponent/mantissa datapath with hidden bit 1 (normal) or 0
  (subnormal).
* 24×24 radix-8 Booth mantissa multiplier.
* The modified partial-product matrix: row offsets, the `S S S ~S` /
  `~S 1 1` patterns, correction bits, ninth row.
* Approximate cells only in the 24 low columns, in every stage.
* The PMCSI placement pattern and the four interleaving schemes.
* The final fast adder.
* Eight approximate variants plus the exact one.
* 10 + 12 kernels of 3×3, 198 slots, one fixed multiplier type per slot.

This design's own choices:

* **Compressor cells** (section 2.3).
* **Grouping of bits into cells.** The published diagram uses boxes of two
  to five bits: approximate boxes of two and three bits, and exact 4-bit
  compressors in the upper columns. Its rows shrink 9 → 4 → 3 → 2; this
  tree goes 9 → 6 → 4 → 3 → 2 with 4:2 cells, full adders and half adders.
* **SI/CI phase.**
* **Rounding mode, subnormal results and special values.**
* **The FP32 adder tree, channel accumulation, handshake and reset.**
* **The default slot sequence and the slot numbering.**

The area, power and delay figures of the original work cannot be compared
with this RTL, because its cells differ.

## 6. Files

| file | content |
|---|---|
| `rtl/approx_pkg.sv` | types (`mul_type_e`, `comp_kind_e`, `fp32_t`), geometry, `comp_kind()`, `pp_present()`, `DEFAULT_SEQ` |
| `rtl/approx_comp42.sv` | positive / negative 4:2 cell |
| `rtl/booth_r8_ppgen.sv` | radix-8 Booth partial-product matrix |
| `rtl/r8mabm_24x24.sv` | mantissa multiplier (matrix + generated tree + final adder) |
| `rtl/fp32_approx_mul.sv` | FP32 multiplier, variant `MT` |
| `rtl/fp32_add.sv` | exact FP32 adder |
| `rtl/conv3x3_kernel.sv` | one interleaved 3×3 kernel with channel accumulator |
| `rtl/conv_layer.sv` | `NK` kernels on a shared window |
| `rtl/approx_cnn_conv.sv` | top: both layers, `NK1` + `NK2` kernels (10 + 12, 198 slots) |
| `tb/fp_ref_pkg.sv`, `tb/conv_ref_pkg.sv` | reference arithmetic for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

The testbench references are independent of the RTL:

* Exact FP32 results come from double-precision arithmetic, rounded once to
  single precision.
* The approximate mantissa product is recomputed by a queue-based model of
  the same tree in `tb_r8mabm_24x24`.
* Convolution outputs of approximate kernels are checked against the exact
  result within 1e−5 of the sum of |products|.

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/approx_pkg.sv tb/fp_ref_pkg.sv tb/conv_ref_pkg.sv -y rtl -y tb \
  tb/tb_approx_cnn_conv.sv --top-module tb_approx_cnn_conv -o sim
./obj_dir/sim
```

Replace the testbench name for the others; `tb_approx_comp42`,
`tb_booth_r8_ppgen` and `tb_fp32_add` need only `approx_pkg` and
`fp_ref_pkg`.

`tb_approx_cnn_conv` runs the top end to end with a reduced kernel count:
`NK1 = 2` and `NK2 = 3` instead of 10 and 12, which takes slots 0..17 and
18..44 of the default sequence. Every kernel has the same structure, so this
covers each mechanism. The largest configuration simulated is this 2 + 3
kernel top, 45 multipliers. The full 10 + 12 kernel top, 198 multipliers,
has not been simulated: it does not build within ten minutes. It
lints and elaborates cleanly.

Layer 1 is fed 3-channel positions, as for RGB input, and layer 2 is fed
10-channel positions. The two layers run concurrently, with idle clocks
mixed in. The test requires that each of the following happens at least
once:

* multi-channel accumulation
* a single-channel output
* an idle clock inside a channel group
* both layers delivering in the same clock
* an interleaved result that differs from the exact one

The model is large: every multiplier has about 2 000 cells, and Verilator
flattens them. The 2 + 3 kernel top takes about 3.5 minutes to build and
about 2 GB of memory. The per-module testbenches build in seconds to a
couple of minutes. The top's `NK1` and `NK2` parameters default to 10 and
12. `SEQ` must then have `(NK1+NK2)*9*4` bits. By default it is the
matching low part of `DEFAULT_SEQ`.
