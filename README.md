# MX arithmetic in SystemVerilog: block-scaled dot products for FPGAs

Microscaling (MX) formats store a tensor as blocks of `k` narrow elements
(minifloats such as FP8 E4M3 or FP4 E2M1, or small integers such as INT8) that
share one 8-bit power-of-two scale (E8M0: a biased exponent, `0xFF` = NaN). Two
ideas make them cheap in hardware:

* Inside a block the scale can be factored out, so a dot product of two
  blocks is an exact integer sum of element products followed by one
  exponent addition. No rounding is needed until the block boundary.
* Between blocks the scales differ. Partial results then have to be aligned
  and rounded, as in a floating-point adder.

This RTL implements both steps, the standard's `Dot` and `DotGeneral`
operations, for any element format in the range below. It also contains the
converters that get data into and out of MX form. A small engine (`mx_top`)
chains them together: FP32 vectors go in, and their dot product comes out as
FP32, with the MX quantization done on the fly.

The design follows the FPGA MX library of Samson, Mellempudi, Luk and
Constantinides ("Exploring FPGA designs for MX and beyond"). That paper gives
the structure of the Dot circuit and of the normalising adder, the internal
bit widths, the scale rule and the special-value policy. Much is left to the
implementer: the output format of the normaliser, the rounding datapaths of
the converters, the pipelining and the engine around the cores. Those parts
are this design's own. Each file's header says which is which, and the last
section lists the departures.

## Number formats

| parameter | meaning | supported range |
|---|---|---|
| `ELEM_FP` | 1: minifloat `E`x`M`y, 0: integer `INT B` | |
| `E`, `M` | exponent and mantissa bits of an FP element | E 2..6, M 1..5 |
| `B` | bits of an INT element | 2..8 |
| `K` | block size, a power of two | 4..512 (MX standard: 32) |
| `SPEC` | FP special encodings: `SPEC_NONE`, `SPEC_IEEE` (E5M2-like: Inf and NaN), `SPEC_FN` (E4M3-like: NaN only at all ones) | |
| `OVF` | conversion overflow: `OVF_SAT` clamps, `OVF_OFL` gives Inf (or NaN) | |

The concrete MX formats are these settings:

| format | `ELEM_FP` | `E`,`M` / `B` | `SPEC` |
|---|---|---|---|
| MXFP8 E5M2 | 1 | 5,2 | SPEC_IEEE |
| MXFP8 E4M3 | 1 | 4,3 | SPEC_FN |
| MXFP6 E3M2 / E2M3 | 1 | 3,2 / 2,3 | SPEC_NONE |
| MXFP4 E2M1 | 1 | 2,1 | SPEC_NONE |
| MXINT8 | 0 | 8 | - |

In every case `K = 32`. The defaults everywhere are MXFP8 E4M3 with `K = 32`,
saturating conversion and FP32 floats.

An INT element is a two's-complement fraction with one integer bit:
value = int · 2^(2−B). INT8 therefore spans (−2, 2), as in the MX standard.

## The Dot circuit (`mx_dot`)

```
 s,t ──(exponent add)──────────────────────────────┐
                                                   ▼
 A,B ── mx_mul_array ── mx_adder_tree ── mx_dot_normalise ── dot, scale
   └──── mx_specials ─────────────────────────────────────── flags
```

**Fixed-point elements.** `mx_elem_decode` rewrites an FP element as a signed
integer. The magnitude is the significand `{e≠0, m}` shifted left by
`max(e,1)−1`. The least significant bit then always weighs 2^(1−bias−M), for
normal and subnormal codes alike. The integer needs 1+2^E+(M−1) bits, which
is why the width of the exact path grows with 2^E:

| width | FP | INT |
|---|---|---|
| element `b_i` | 1+E+M | B |
| product `b_int` | 2(1+2^E+(M−1)) | 2B |
| block sum `b_o` | b_int + log2 K | 2B + log2 K |

For E4M3 with K = 32 these are 8, 38 and 43 bits. For INT8 they are 8, 16
and 21 bits. The wide FP8 figures explain why narrow FP and INT formats are so
much cheaper.

**Exact accumulation.** `mx_mul_array` multiplies the integers exactly.
`mx_adder_tree` adds the K products pairwise in a binary tree, with each level
one bit wider than the one before. The sum is exact (a Kulisch accumulator in
tree form).

**Scales.** Multiplying two E8M0 scales means adding their exponents:
st = s + t − 127. If either scale is `0xFF` (NaN), the product is NaN.

**Normalise.** This is the step that needs the most care. The exact sum is an
integer with a format-dependent LSB weight. `mx_dot_normalise` turns it into
a format-independent pair:

    value = dot · 2^(2−b_o) · 2^(scale−127)

Here `dot` is a b_o-bit fraction with one integer bit. The normaliser counts
the redundant sign bits, shifts them out and folds the shift, plus the
constant LSB offset, into `scale`. A normalised `dot` has its two top bits
different. The edge cases are:

* A zero sum gives (0, 0).
* If the scale would go below 0, it stops at 0. The fraction is then left
  unnormalised, and it is truncated if it has to move right.
* A scale above 254 becomes `0xFF`.

**Specials.** `mx_specials` checks each element pair. A NaN operand, or Inf
times zero, makes the product NaN. Another Inf operand makes it ±Inf. The
block is NaN if any product is NaN or if Infs of both signs meet; otherwise
it is Inf if any product is Inf. The flags are a `mx_flags_t {nan, inf, neg}`.

## Crossing block boundaries: `mx_add_nrm` and `mx_dot_general`

`mx_add_nrm` adds two (scale, W-bit fraction) pairs like a floating-point
adder with no leading-zero step:

1. **Sort.** The operand with the larger scale becomes (scale1, op1).
2. **Align.** op0 is shifted right by scale1 − scale0 into W+3 bits. The three
   extra bits are guard, round and sticky. Everything shifted further out is
   ORed into the sticky bit.
3. **Add.** op1 is sign-extended and padded to the same width, and the two
   are added into W+4 bits.
4. **Round and overflow.** The sum is rounded to nearest even back to W bits.
   If it no longer fits, it is rounded one place further instead and the
   scale rises by one.

A NaN scale, or a scale that passes 254, gives `0xFF`. The result always
keeps the larger input's scale (or one more than it). After cancellation it
may therefore be unnormalised. It is still within half an output ULP of the
exact sum.

`mx_dot_general` runs one `mx_dot` per block and sums their results with a
binary tree of `mx_add_nrm` adders. It merges the flags level by level: NaN
wins, and Infs of opposite sign give NaN. With NBLK blocks the result passes
through log2 NBLK roundings, each at most half an ULP of its own output.

## Getting data in and out

**`mx_scale_calc`** follows the standard's rule for the shared scale: the
largest power of two in the block divided by the largest power of two of the
element format,

    scale = max(exponent fields) − emax_elem,   clamped to [0, 254]

Here emax is 8 for E4M3, 15 for E5M2, 2 for E2M1 and 0 for INT. The maximum
comes from a comparator tree of log2 K levels. A register after every second
level keeps the critical path at two comparators for any K. Inf and NaN
inputs are left out of the maximum; the converter deals with them.

**`mx_from_float`** (one `mx_float_to_elem` per lane) divides each FP32 or
BF16 value (`FM` = 23 or 7) by the scale and rounds it to nearest even.

* For FP elements it computes the element's exponent eb = exp − scale + bias.
  It shifts the significand right by (FM−M) + max(0, 1−eb) with
  round-to-nearest-even and forms the code as `(max(eb,1)−1)·2^M + rounded`.
  This way a rounding carry flows into the exponent, and subnormals need no
  special case.
* Codes beyond the largest finite one overflow. They saturate in `OVF_SAT`
  mode and for formats without specials. In `OVF_OFL` mode they become Inf
  (E5M2-like) or NaN (E4M3-like).
* A NaN input becomes the NaN code. An Inf input becomes Inf only where the
  format has one, and NaN otherwise.
* Where the element cannot encode NaN at all, the block scale is set to
  `0xFF` instead.
* INT elements are rounded and clamped to ±(2^(B−1)−1).

**`mx_to_float`** (one `mx_elem_to_float` per lane) goes the other way. It
normalises by the leading one, rounds to nearest even in the float's
subnormal range, and gives Inf beyond the float's range and NaN for NaN
elements or a NaN scale. The same lane, with `ELEM_FP = 0` and `B = b_o`,
rounds a DotGeneral result to FP32.

## The engine (`mx_top`)

```
xf,yf (FP32) ─┬─ mx_scale_calc (per block) ─┐
              └─ delay (LSC cycles) ────────┴─ mx_from_float ─ mx_dot_general ─ mx_elem_to_float ─ result
                                                               └─ mx_to_float ─ dqx, dqy
```

It accepts one pair of NBLK·K-element FP32 vectors per cycle. Its outputs
are:

* the FP32 result;
* the raw DotGeneral pair (`raw_out`, `raw_scale`);
* the flags;
* the quantized MX operands with their scales (`qx`, `qy`, `qsx`, `qsy`,
  valid on `q_valid`);
* the same operands turned back into FP32 by `mx_to_float` (`dqx`, `dqy`,
  valid on `dq_valid`, one cycle later): scale times element, the values the
  engine actually multiplied.

A NaN flag forces a quiet NaN result, and an Inf flag forces ±Inf.

## Timing

All blocks are fully pipelined and accept a new input every cycle. The
`valid` bits run alongside the data. Only the valid pipeline is reset; the
data registers are not.

| block | latency (cycles) | K = 32, NBLK = 4 |
|---|---|---|
| `mx_mul_array` | 1 | 1 |
| `mx_adder_tree` | ceil(log2 K / 2) | 3 |
| `mx_dot_normalise` | 1 | 1 |
| `mx_dot` | ceil(log2 K / 2) + 2 | 5 |
| `mx_add_nrm` | 1 | 1 |
| `mx_dot_general` | dot + log2 NBLK | 7 |
| `mx_scale_calc` | ceil(log2 K / 2) + 1 | 4 |
| `mx_from_float`, `mx_to_float` | 1 | 1 |
| `mx_top` | scale + 1 + dot_general + 1 | 13 |

Latency grows only logarithmically with K.

## Files

`rtl/mx_pkg.sv` holds the enums, the flag struct and the width functions
(`elem_bits`, `prod_bits`, `dot_bits`, `elem_emax`, ...). Every other file
holds one module. Besides the blocks above, the helpers are `mx_elem_decode`,
`mx_float_to_elem` and `mx_elem_to_float`.

Each block has a self-checking testbench `tb/tb_<module>.sv`. They share
`tb/mx_ref_pkg.sv`, a reference written with `real` arithmetic:

* element values come straight from the format definition;
* quantization is an exhaustive nearest-code search with ties to the even
  code.

What each testbench checks:

* `tb_mx_mul_array`: exact products (E4M3, INT8).
* `tb_mx_specials`: directed NaN / Inf / Inf×0 / ±Inf cases (E4M3, E5M2).
* `tb_mx_adder_tree`: exact sums, extreme operands, latency.
* `tb_mx_dot_normalise`: value preserved, normalised, clamp and overflow.
* `tb_mx_dot`: exact Dot result (E4M3, INT8), NaN, latency.
* `tb_mx_add_nrm`: half-ULP bound, scale choice, overflow path, far shifts.
* `tb_mx_dot_general`: within 2 ULP of exact, NaN, latency.
* `tb_mx_scale_calc`: scale rule, clamp, latency.
* `tb_mx_from_float`: bit-exact codes for E4M3 SAT, E5M2 OFL, E2M1, INT8,
  plus NaN and Inf handling.
* `tb_mx_to_float`: exact values, Inf, NaN, FP32 and BF16.
* `tb_mx_top`: end to end at the default size. It checks the quantized
  operands bit for bit, their dequantized values exactly and the FP32
  result to within 1 ULP. It also counts saturation, scale clamping, NaN
  and Inf inputs, adder overflow and back-to-back issue.

Each testbench prints `TB_RESULT checks=N failures=M`.

To simulate with Verilator (5.x), list the package files first:

```
verilator --binary --timing --assert rtl/mx_pkg.sv tb/mx_ref_pkg.sv \
  rtl/mx_elem_decode.sv rtl/mx_mul_array.sv rtl/mx_specials.sv rtl/mx_adder_tree.sv \
  rtl/mx_dot_normalise.sv rtl/mx_dot.sv rtl/mx_add_nrm.sv rtl/mx_dot_general.sv \
  rtl/mx_scale_calc.sv rtl/mx_float_to_elem.sv rtl/mx_from_float.sv \
  rtl/mx_elem_to_float.sv rtl/mx_to_float.sv rtl/mx_top.sv \
  tb/tb_mx_top.sv --top-module tb_mx_top -o sim && ./obj_dir/sim
```

The full-size top test takes about half a minute to build and run. To try
another format, override the parameters, for example
`mx_top #(.ELEM_FP(0), .B(5), .K(64))` for MXINT5 with k = 64. Note that the
testbenches' reference calls are written for their own formats.

## Departures and open points

* **Normaliser output format, clamping and overflow.** These are this
  design's own. The source names the block only.
* **Sign of Inf.** The specials flags carry it (`neg`). The source shows only
  NaN and Inf flags.
* **Adder tree and pipelining.** The adder tree is registered every two
  levels, and the other registers are placed as in the timing table. The
  source states only that the cores are pipelined, and that the comparator
  tree keeps two comparators per stage.
* **Cross-block adders.** `mx_add_nrm` does not renormalise after
  cancellation, and a scale overflow past 254 is reported as NaN rather than
  saturated.
* **DotGeneral.** The cross-block adders form a binary tree, and the default
  vector length of 4 blocks is a choice. Adding DotGeneral results across
  calls (for reductions longer than NBLK·K) is left to the user.
* **Converters.** The conversion datapaths and the symmetric INT clamp are
  this design's. The source also uses its BF16 to MX converter to put dot
  product outputs back into MX form. Here that is done by chaining the
  result through `mx_to_float` (FP32 or BF16) and then `mx_scale_calc` and
  `mx_from_float`; there is no dedicated block for it. So are the engine `mx_top` and its FP32 output stage.
* **Scale computation.** Inf and NaN inputs are excluded from the scale
  maximum, and all-tiny blocks clamp the scale to 0.
* **Out of scope.** The software side (a PyTorch/Brevitas quantizer) and the
  FPGA area models have no hardware counterpart here.
