# Minifloat and integer MACs with exact long accumulation

Below 8 bits, a floating-point number format ("minifloat", written `ExMy`
for `x` exponent bits and `y` mantissa bits) can quantize a neural network
with more accuracy than an integer of the same width. The catch is the
multiply-accumulate hardware. This repository holds a small operator library
of two multiply-accumulate (MAC) units, both parameterized by operand format:

* **`mf_mac`**: a minifloat MAC. It does not round at all. Every product of
  two minifloats is turned into a fixed-point number and added into a
  *long accumulator* that is wide enough for the exact sum of a whole dot
  product (Kulisch-style accumulation). At these tiny widths that accumulator
  costs only a few dozen bits.
* **`int_mac`**: a signed integer MAC with the same interface and timing,
  which serves as the reference point.

The two sit side by side in the top `mac_lib_top`. By default it holds an
E3M4 x E3M4 minifloat MAC and an INT8 x INT8 integer MAC, and both accept dot
products of up to 4608 terms. 4608 is the largest dot product in ResNet-18
(3x3x512).

## The number format

An `ExMy` word is `{S, E[e-1:0], M[m-1:0]}`, with `r = 1 + e + m` bits in
all. The bias is the IEEE one, `b = 2^(e-1) - 1`.

| exponent field | value                                   |
|----------------|-----------------------------------------|
| `E != 0`       | `(-1)^S * 2^(E-b) * (1 + M/2^m)`        |
| `E == 0`       | `(-1)^S * 2^(1-b) * (M/2^m)` (subnormal) |

There is **no inf and no NaN**. The all-ones exponent is an ordinary binade,
so the largest magnitude is `(2 - 2^-m) * 2^(2^e - b - 1)`. For E2M1 that is
6.0, and for E3M4 it is 31.0. The quantizer saturates values that fall
outside this range. Because only multiplications and additions follow, no
special value can arise inside the MAC. Every format with `e >= 1` and
`m >= 1` is supported, which covers all 3- to 8-bit formats of the design
space (`e` in `[1, r-1)`, `m = r - 1 - e`).

## How the minifloat MAC turns products into integers

Each operand is rewritten as an integer times a fixed power of two:

```
x = (-1)^S * sig * 2^offset * 2^(1 - b - m)
    sig    = {E != 0, M}          (implicit digit restored; 0 for subnormals)
    offset = E - (E != 0)         (= max(E,1) - 1, distance from the lowest binade)
```

Take E3M4 (`b = 3`) as an example. `0 101 1000` has `sig = 11000b = 24` and
`offset = 4`, so it is `24 * 16 * 2^-6 = 6`. The subnormal `0 000 0011` has
`sig = 3` and `offset = 0`, so it is `3 * 2^-6`.

The product of two operands is then

```
a*b = (-1)^(Sa^Sb) * (sig_a * sig_b << (offset_a + offset_b)) * LSB
LSB = 2^(1 - ba - ma) * 2^(1 - bb - mb)
```

The factor in the middle is an integer. It is at most
`(2^(ma+1)-1)(2^(mb+1)-1) << ((2^ea-2) + (2^eb-2))`, so it fits in
`2^ea + 2^eb + ma + mb - 2` bits. Summing `n` such terms with their signs needs
`ceil(log2 n)` more bits and one sign bit:

```
ACC_W = 2^ea + ma + 2^eb + mb + ceil(log2 n) - 1
```

The accumulator grows exponentially with the exponent width. Wide-exponent
formats are therefore the expensive ones, and the mantissa width matters
much less.

| a x b        | ACC_W (n = 4608) |
|--------------|------------------|
| E1M1 x E1M1  | 18               |
| E2M1 x E2M1  | 22               |
| E2M5 x E2M5  | 30               |
| E3M4 x E3M4  | 36 (default)     |
| E4M3 x E4M3  | 50               |
| INT8 x INT8  | 30 (`ra + rb + ceil(log2 n) + 1`) |

The accumulator holds the *exact* dot product as a two's-complement integer
in units of `LSB`. To get the real-valued result, multiply `acc` by `LSB`
and by the two per-tensor or per-channel scale factors of the quantizer.
This is usually folded into the following activation or threshold stage,
which is not part of this library.

## Datapath and pipeline

```
             stage 1 (combinational, then registered)            stage 2
 a ─► mf_operand_decode ─ sig_a, offset_a ─┐
                                           ├─► mf_product_align ─► [mag] ─┐
 b ─► mf_operand_decode ─ sig_b, offset_b ─┘                              ├─► mf_accumulator ─► acc
      sign_a ^ sign_b ───────────────────────────────────────────► [neg] ─┘
      in_valid / in_first / in_last ─────────────────────────────► [ctl] ─┘
```

* **`mf_operand_decode`** contains one `!= 0` test on the exponent field.
  That bit becomes the implicit digit, and it is also subtracted from the
  exponent to form the offset.
* **`mf_product_align`** multiplies the two significands. It adds the two
  offsets and shifts the product left by the sum.
* **`mf_accumulator`** adds the magnitude or subtracts it. Subtraction uses
  `acc + ~mag + 1`. The conditional inversion is a row of XORs in front of
  the adder, and the `+1` is the adder's carry-in. No separate negation stage
  is needed. A multiplexer on the feedback path feeds 0 instead of `acc` for
  the first term of a dot product. The adder is one unsegmented carry chain,
  which suits FPGA carry logic at these widths.

The pipeline depth is two. A term presented in cycle `t` is registered as an
aligned product at the end of `t`, and it is part of `acc` from cycle `t+2`
on. `out_valid` is high in that cycle. A new term can enter every cycle.

```
cycle      t        t+1       t+2
inputs     a,b,first
stage 1             mag,neg
acc                           acc += ±mag     out_valid=1 (out_done=1 if in_last)
```

### Interface (same for `mf_mac` and `int_mac`)

| port        | dir | meaning |
|-------------|-----|---------|
| `clk`       | in  | clock, rising edge |
| `rst_n`     | in  | synchronous active-low reset: clears the pipeline and `acc` |
| `in_valid`  | in  | a term `a`, `b` is presented this cycle. When low, `acc` holds (a bubble) |
| `in_first`  | in  | first term of a dot product: the accumulator restarts from 0 |
| `in_last`   | in  | last term: `out_done` flags the finished sum two cycles later |
| `a`, `b`    | in  | operands (`{S,E,M}` for `mf_mac`, signed two's complement for `int_mac`) |
| `out_valid` | out | `acc` took a term at the last edge |
| `out_done`  | out | `acc` holds a complete dot product |
| `acc`       | out | signed accumulator, `ACC_W` bits |

`in_first` and `in_last` are only looked at together with `in_valid`. A
one-term dot product sets both. `mf_mac` carries a simulation assertion that
fires when a dot product has more than `N` terms, because beyond `N` the
width guarantee no longer holds.

`mac_lib_top` prefixes the two units' ports with `fp_` and `int_`. The
parameters are `FP_EA`, `FP_MA`, `FP_EB`, `FP_MB`, `INT_RA`, `INT_RB` and `N`.

## Integer MAC

`int_mac` registers the signed product `a*b` in stage 1. Stage 2 adds it to
`acc`, or to 0 for a first term. Its accumulator has
`ra + rb + ceil(log2 n) + 1` bits, which leaves at least one bit to spare
over the exact worst case. It uses the same handshake as `mf_mac`, so the two can be swapped
behind the same control logic.

## Choosing formats

Each operand format is fixed when the design is elaborated. A layer whose
weights are E2M1 and whose activations are E2M3 needs
`mf_mac #(.EA(2), .MA(1), .EB(2), .MB(3))`. `N` only sets the growth bits.
The largest dot products of the three reference networks are 4608
(ResNet-18), 3072 (ViT-B-32) and 1280 (MobileNetV2). The default `N = 4608`
covers all three, and the smaller two would save one or two accumulator bits.

## Files

| file | content |
|------|---------|
| `rtl/mf_pkg.sv` | bias and width functions, default `N` |
| `rtl/mf_operand_decode.sv` | operand unpacking |
| `rtl/mf_product_align.sv` | significand multiplier and alignment shifter |
| `rtl/mf_accumulator.sv` | long accumulator with merged sign inversion |
| `rtl/mf_mac.sv` | minifloat MAC |
| `rtl/int_mac.sv` | integer MAC |
| `rtl/mac_lib_top.sv` | library top |
| `tb/tb_mf_ref_pkg.sv` | reference arithmetic (values from the format definition, in double precision) |
| `tb/tb_*.sv` | self-checking testbenches |

## Verification

Each testbench computes its expected results from the number-format
definition, in double precision. That is exact here, because every sum stays
below 2^53 LSBs. Each one prints `TB_RESULT checks=N failures=M` and has a
cycle watchdog.

| testbench | what it covers |
|-----------|----------------|
| `tb_mf_operand_decode` | every code word of E3M4, E1M1, E4M3 and E2M5 |
| `tb_mf_product_align` | every pair of positive words for E3M4 x E3M4 and E2M1 x E4M3 |
| `tb_mf_accumulator` | 20k random adds, subtractions, bubbles and restarts against a 64-bit model |
| `tb_mf_mac` | E3M4 x E3M4 (N = 4608) and E2M1 x E4M3 (N = 64): random dot products with bubbles, the two-cycle latency, `out_done`, largest-magnitude, subnormal and zero operands |
| `tb_int_mac` | INT8 x INT8 and INT3 x INT5, including N terms of the most negative operands |
| `tb_mac_lib_top` | the default top, both units at once. Dot products of 4608, 3072 and 1280 terms, plus full-length worst-case sums of both signs. It counts every mechanism (restart, negative product, subnormal, zero, largest shift, bubble, back-to-back, worst cases) and fails if one never happens |
| `tb_mf_table_formats` | twelve weight x activation format pairs, E1M1 x E1M1 up to E4M3 x E4M3, each with full-length worst cases and random 4608-, 3072- and 1280-term dot products |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  rtl/mf_pkg.sv rtl/mf_operand_decode.sv rtl/mf_product_align.sv \
  rtl/mf_accumulator.sv rtl/mf_mac.sv rtl/int_mac.sv rtl/mac_lib_top.sv \
  tb/tb_mf_ref_pkg.sv tb/tb_mac_lib_top.sv --top-module tb_mac_lib_top
./obj_dir/Vtb_mac_lib_top
```

Each testbench finishes in well under a second. The design is plain
synthesizable SystemVerilog with no vendor primitives.

## What follows the original design and what does not

These parts follow the published design:

* the number format: IEEE bias, subnormals, no inf or NaN, saturation left
  to the quantizer
* the minifloat datapath: exponent `!= 0` test, offset subtraction,
  significand multiply, shift, sign from `Sa xor Sb`, sign inversion merged
  into the accumulator adder, zero multiplexer on the accumulator feedback
* the unsegmented long adder
* the pipeline depth of two
* both accumulator-width formulas
* `n = 4608`
* the integer MAC with its zero multiplexer

These are choices of this implementation:

* where the two pipeline registers sit: after the aligned product, then the
  accumulator
* the `valid`/`first`/`last` handshake and the `out_valid`/`out_done` flags
* the synchronous reset
* the carry-in form of the merged sign inversion
* the E3M4 / INT8 default formats. These are the formats used for the
  sensitive first and last network layers, while other layers use other
  formats.
* putting both units in one top

Not included:

* the conversion of the accumulator back to a float or threshold value
* the post-training quantizer. It is a software flow that produces the
  operands: scaling, rounding to the minifloat grid, learned rounding and
  similar steps.

The published study measured the LUT cost of single MACs after FPGA
implementation. This RTL has not been through that flow, so its LUT counts
are not claimed to match.
