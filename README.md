# AUSN arithmetic in RTL: multiplying by superposed powers of two

AUSN (Approximately Uniform quantization by adaptively Superimposing Non-uniform
distributions, Liu et al.) stores a weight or an activation as a *sum of a few
powers of two* rather than as an integer or as a single power of two. A single
power of two covers a wide range with few bits but has coarse steps near the
top of its range; an integer has even steps but a narrow range. Adding a
second, finer power of two to the first one fills in the gaps between powers
while keeping the range. Because every value is a short sum of powers of two,
hardware needs no multiplier and no decoding table: a product with a
fixed-point number is two shifts and an add, and a product of two AUSN values
is a handful of small additions of exponents.

This SystemVerilog implements that arithmetic: the code format, a 64 x 64
shift-and-add multiply-accumulate array, a hardware version of the AUSN
quantization algorithm for activations, the exponent adder, and the AUSN
rounding scheme that lets the product of two AUSN values be written back as
an AUSN value without a separate re-quantization step. The quantization
research behind it reports accuracy with 4- and 5-bit codes and resource
savings on an FPGA; the RTL here is an independent register-transfer
description of the datapath, not the authors' implementation.

## 1. The number format

A code is `{sign, data}` with a 5-bit data part (`ausn_pkg::D_W`). The data
part is cut into a **basic part** (upper bits) and a **subdivision part**
(lower `sub_bits` bits). Each part holds a *power* `p`, not a value:

| field value `p` | meaning            |
|-----------------|--------------------|
| 0               | basis element 0    |
| 1 .. 2^B - 1    | basis element 2^-p |

The value of a code in a layer with scale power `power_j` is

    v = (-1)^sign * 2^power_j * 2^-p0 * (1 + 2^-p1)

where `p0` is the basic power and `p1` the subdivision power. `p0 = 0` makes
the whole value zero; `p1 = 0` means "no second term". The second term is
relative to the first: it subdivides the interval between `2^-p0` and
`2^-(p0-1)`.

The default split is 3 basic bits + 2 subdivision bits, the layout the AUSN
work uses as its 5-bit example:

    bit   5      4  3  2     1  0
        sign  |  basic p0 |  sub p1 |

The split is a **run-time input** (`sub_bits` = 0, 1 or 2). The quantization
algorithm chooses it per layer (for example 4+1 for one layer and 3+2 for the
next); the hardware only changes which bits it slices, so no decoder and no
extra logic per allocation is needed. With `sub_bits = 0` the code is plain
power-of-two quantization with a 5-bit exponent.

`power_j` (the "PreConvert" scale) is chosen per layer so that the largest
magnitude of the layer lies between `max(basis)` and `2 * max(basis)`. It
never appears inside the multipliers: scaling a power-of-two value is a shift
of its exponent, so `power_j` shows up only where a result is turned back into
a code (`layer_pow` of the activation quantizer, `pre_shift` of the power
lane).

Field extraction is `ausn_pkg::split_code`, the reverse is `join_code`.

## 2. Two ways to multiply

### Shift layer: fixed-point input times AUSN weight (`ausn_shift_mult`)

    x * 2^-p0 * (1 + 2^-p1) = (x << (31 - p0)) + (x << (31 - p0 - p1))   / 2^31

Two barrel shifters and one adder, then the sign of the weight. The result
carries 31 fraction bits (`FRAC = 2^D_W - 1`, the largest `p0 + p1` of any
allocation), so it is exact: no rounding happens in the shift layer. Products
are 40 bits (`PROD_W`).

`ausn_mac_array` puts 64 x 64 of these cells together:

* weight-stationary: cell (r, c) keeps one 6-bit code, written one row per
  cycle through `w_we`, `w_row`, `w_data[COLS]`;
* every cycle with `in_valid`, input `x[r]` (8-bit signed) is broadcast along
  row `r`; column `c` adds its 64 products in an adder tree and adds the sum
  to accumulator `acc[c]` (48 bits); `acc_clear` starts a new sum;
* latency 1 cycle, one vector per cycle.

### Power layer: AUSN activation times AUSN weight (`ausn_pow_mult`)

With `a = 2^-a0 (1 + 2^-a1)` and `w = 2^-w0 (1 + 2^-w1)`:

    a * w = 2^-(a0+w0) + 2^-(a0+w0+w1) + 2^-(a0+a1+w0) + 2^-(a0+a1+w0+w1)

so the product is four powers of two whose exponents are sums of the fields.
The module first forms `a0+a1` and `w0+w1`, then the four pairwise sums, so
each of the six additions is the same 6-bit + 6-bit exponent adder. Terms whose
subdivision field is 0 are marked invalid; a zero basic field in either
operand makes the product zero. The sign is the XOR of the signs.

### The exponent adder (`ausn_pow_adder`)

A 6 + 6 -> 7-bit addition done as three 3-bit steps, the structure used to fit
each step into one rank of 6-input FPGA LUTs:

    low:    a[2:0] + b[2:0]   -> carry c, sum[2:0]
    high:   a[5:3] + b[5:3]   -> 4-bit partial
    fix-up: partial + c       -> sum[6:3]

In RTL this is ordinary logic; the split only fixes the structure.

## 3. Quantizing activations in hardware (`ausn_act_quantizer`)

The AUSN quantization algorithm picks the terms greedily, each rounded down:

    tier 0:  w_q[0] = largest basic element       <= rem        (rem = |v| / 2^power_j)
    tier 1:  rem    = rem / w_q[0] - 1
             w_q[1] = largest subdivision element <= rem

On a fixed-point number this is two leading-one searches. With `M = |din|`,
`L` its leading-one position and `T = layer_pow + 31` the position of
`2^power_j`:

* `p0 = T - L`. If that exceeds the largest basic power, the result is 0.
  If it is below 1 (the value is at or above `2^power_j`), the code clips to
  the largest value, `p0 = 1, p1 = 1` (0.75 * 2^power_j). That is what the
  algorithm itself produces, because the basis has no `2^0` element.
* Removing the leading one leaves `rem * 2^L`; its leading one `L2` gives
  `p1 = L - L2` if that fits the subdivision field, else 0.

One register stage. In the top level one quantizer per column turns the
finished column sums of the array into AUSN activations.

## 4. The rounding scheme (`ausn_rounding_unit`)

This is the least obvious part. A product of two AUSN values has up to four
terms, but the next layer accepts only one or two. Instead of accumulating the
product at full precision and re-quantizing, AUSN rounds the sum of powers of
two directly. Write the terms as `2^n` (larger `n` = larger term) and let
`B_sub` be the number of terms allowed beyond the first (1 when the output
code has a subdivision part, 0 when it has none). The scheme has four steps:

1. **Runs round up.** A run of consecutive exponents `2^n + 2^(n+1) + ... +
   2^m` with at least `B_sub + 2` members becomes `2^(m+1)`. Every maximal
   run of present exponents that is long enough is replaced once.
2. **Equal terms merge.** `2^k + 2^k = 2^(k+1)`, repeated.
3. **Far terms drop.** While more than `B_sub + 1` terms remain, the smallest
   is dropped.
4. (The fourth case of the scheme, a term exactly `B_sub` below the next,
   allows either rounding direction; this design takes the downward one, so
   it is covered by step 3.)

The RTL does not shuffle lists. It uses two identities:

* replacing `2^n + ... + 2^m` by `2^(m+1)` is the same as **adding `2^n`**,
  because `2^(m+1) - (2^n + ... + 2^m) = 2^n`. Step 1 is therefore "add one
  bit at the start of every long run" to the plain sum of the terms;
* merging equal terms repeatedly is binary carry, so step 2 comes for free
  once the terms are summed as one integer.

So the unit builds a presence mask of the exponents, marks the start bit of
every run of at least `B_sub + 2` set bits, adds the marks to the exact sum,
and keeps the `B_sub + 1` highest set bits of the result (steps 3/4).
Outputs: `out_mask`, `out_cnt`, and the two largest kept exponents `out_hi`,
`out_lo`.

Worked example, `B_sub = 1`:

    terms        2^2 + 2^3 + 2^4 + 2^6 + 2^6 + 2^8        = 412
    step 1       run 2..4 -> add 2^2                     sum = 416
    step 2       416 = 2^8 + 2^7 + 2^5
    step 3       keep two highest                        2^8 + 2^7 = 384

`ausn_requant` turns the kept terms back into a code for the next layer:
`p0` is the exponent of the largest term plus the signed `pre_shift` (the
change of PreConvert scale between layers), `p1` is the gap to the second
term if it fits the subdivision field (otherwise the second term is dropped,
which is step 3 again). Results at or above `2^power_j` clip to the largest
code; results below the smallest basic power become 0. `ausn_pow_lane` is
multiply -> round -> requant with one output register.

## 5. Top level (`ausn_top`)

    x[64] --> ausn_mac_array (64x64 shift-and-add) --> acc[64]
                                                         |
                         ausn_act_quantizer x64  <--------+   layer_pow, act_sub_bits
                                |  act_code[64]
                         ausn_pow_lane x64  <-- pw_code[64]   pw_sub_bits, out_sub_bits, pre_shift
                                |
                           out_code[64]

A shift layer (8-bit fixed-point inputs) feeds a power layer (AUSN inputs).
The per-column power lane multiplies the column's activation by its own weight
code `pw_code[c]`.

| step | signals | when |
|------|---------|------|
| load weights | `w_we`, `w_row`, `w_data[64]`, `w_sub_bits` | one row per cycle |
| stream vectors | `in_valid`, `x[64]`, `acc_clear` (first), `acc_last` (last) | one vector per cycle |
| column sums | `acc[64]` | 1 cycle after a vector |
| AUSN activations | `act_valid`, `act_code[64]` | 2 cycles after the `acc_last` vector |
| power-layer result | `out_valid`, `out_code[64]` | 3 cycles after the `acc_last` vector |

All allocation and scale inputs (`*_sub_bits`, `layer_pow`, `pre_shift`) are
sampled with the data they apply to and may change from job to job. Reset
(`rst_n`, asynchronous, active low) clears weights, accumulators and valid
flags.

How the shift layer and the power layer are chained, the control signals,
widths, register placement and reset are choices of this RTL; the AUSN work
describes the arithmetic and names a 64 x 64 array, but not its dataflow.

## 6. Where this RTL departs from, or fills in, the source description

* **Bit counting.** The source counts "5-bit" AUSN as 3 basic + 2
  subdivision bits but also describes a 6-bit example as one sign bit plus
  five data bits. The RTL uses 5 data bits plus a sign bit (6-bit codes).
* **Meaning of B_sub.** In the rounding scheme `B_sub` is described both as
  the width of the subdivision field and as the number of superposed terms.
  The RTL uses it as the number of extra terms (its worked example: `B_sub =
  1`, two terms kept), and gets the width from `sub_bits`.
* **Rounding steps 3 and 4.** The worked example of the scheme applies step 4
  where its own condition does not hold; the result equals dropping the
  smallest term, which is what the RTL does. Step 4's free choice between
  rounding down and up is always resolved downward.
* **Step 1 scope.** "The maximum terms" is read as every maximal run of
  length >= `B_sub + 2`, each replaced once, with runs taken over distinct
  exponents before merging.
* **Where rounding replaces accumulation.** The rounding scheme assumes
  nonnegative terms. Dot products with mixed signs are therefore accumulated
  exactly in the shift array; rounding is used per product in the power lanes.
* **Adaptive allocation search.** Choosing `sub_bits` and `power_j` per layer
  (by integrating clipping and rounding errors over the weight distribution
  and iterating) is an offline software step; its results enter as inputs.
* **Not built:** weight memories, a controller that tiles large layers onto
  the array, the host and the FPGA platform. Table-level FPGA resource and
  power numbers were obtained by the authors with an HLS flow and are not
  reproduced by this RTL.

## 7. Sizes

| parameter | default | note |
|-----------|---------|------|
| `ROWS`, `COLS` (`ausn_top`, `ausn_mac_array`) | 64, 64 | array size |
| `ACC_W` | 48 | column accumulator |
| `D_W` (`ausn_pkg`) | 5 | data bits of a code (changing it changes `FRAC`, `PROD_W`) |
| `X_W` | 8 | fixed-point input |
| `W` (`ausn_pow_adder`) | 6 | exponent adder operand, result `W+1` |
| `N_TERMS`, `E_W`, `MAX_BSUB` (`ausn_rounding_unit`) | 6, 7, 1 | terms in, exponent width, extra terms kept (the lane uses 4 terms) |

Fits at the defaults: 8-bit inputs with 5-bit or 4-bit weights (the 4-bit
3+1 codes are values of the `sub_bits = 1` allocation); 2- and 3-bit
codes (basic part only) are values of `sub_bits = 0`. 8-bit weight codes need
`D_W = 8`. Whole networks (ResNet-18 has about 11.7 M weights) must be tiled
in 64 x 64 blocks by logic outside this design.

## 8. Simulation

Every testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. Reference models (`tb/ausn_ref_pkg.sv`) work
with real numbers and exponent lists, written from the definitions above and
not from the RTL. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/ausn_pkg.sv tb/ausn_ref_pkg.sv tb/tb_ausn_top.sv \
        --top-module tb_ausn_top -o sim && ./obj_dir/sim

| testbench | what it checks |
|-----------|----------------|
| `tb_ausn_pow_adder` | all 64 x 64 operand pairs |
| `tb_ausn_shift_mult` | corner inputs for every code and allocation, 20 000 random |
| `tb_ausn_mac_array` | 8 x 4 array, all allocations, accumulation and clear, 1-cycle latency |
| `tb_ausn_act_quantizer` | 20 000 activations over 46 magnitudes, clipping and underflow |
| `tb_ausn_pow_mult` | every code pair for every allocation pair |
| `tb_ausn_rounding_unit` | the 412 -> 384 example, one case per step, 30 000 random term sets |
| `tb_ausn_requant` | 50 000 random rounded values, saturation and underflow |
| `tb_ausn_pow_lane` | 30 000 random products through multiply, round and code |
| `tb_ausn_top` | 8 x 4 top, 400 jobs; counts accumulation, clipping, underflow, each rounding step, saturation and every allocation, and fails if one never occurs |
| `tb_ausn_top_full` | the same at the default 64 x 64 size, 40 jobs (build about 2-3 minutes) |

Notes: the design is two-state clean (everything read is reset), so it
simulates the same with random initial values. Yosys synthesis of the full
64 x 64 top is slow (4096 barrel-shifter pairs and 64 adder trees of 48 bits);
parsing and linting are fast.
