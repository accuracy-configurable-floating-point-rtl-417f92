# Segmented approximate floating-point multiplier for an SRAM compute-in-memory macro

A digital compute-in-memory (DCiM) macro places arithmetic right next to an SRAM
array, so that stored operands (typically neural-network weights) are multiplied
where they live instead of being shipped to a processor. Integer multipliers are
cheap enough for this; IEEE 754 floating-point multipliers are not, because
almost all of their area and power goes into the full significand multiplier
(24 x 24 bits for FP32).

This RTL implements a floating-point multiplier whose significand product is
*approximated* by a few small n x n products, with n chosen at build time, and
places it beside a 64 x 32 SRAM array. The sign and exponent are handled
exactly. Only the significand product is approximated. An exact IEEE 754
multiplier is included as the reference option. Both follow the published
design "Accuracy-Configurable Floating-Point Multiplier Design for SRAM-Based
Compute-in-Memory" (an extension of the OpenACM DCiM compiler). The text below
says, point by point, what comes from that source and what was decided here.

The configurations are named as in the source:

| name    | meaning                                                               |
|---------|-----------------------------------------------------------------------|
| ACn-n   | segmented approximate multiplier, segment width n for both operands   |
| ACLn    | low-precision mode: only the top n mantissa bits and a bitwise AND    |
| Exact   | IEEE 754 multiplier, round to nearest, ties to even                   |

The default build is a 64-row FP32 macro with AC5-5.

## 1. The approximate significand product (ACn-n)

Write the explicit mantissas (hidden bit excluded) of the two operands X and Y
as fractions in [0, 1). Each is cut into a high segment and a low segment of n
bits:

    Mx = A*2^-n + B*2^-2n  (+ lower bits, ignored)
    My = C*2^-n + D*2^-2n  (+ lower bits, ignored)

For FP32 and n = 5, A = X[22:18], B = X[17:13], C = Y[22:18] and D = Y[17:13].
The significand product is

    (1+Mx)(1+My) = 1 + Mx + My + AC*2^-2n + (AD + BC)*2^-3n + BD*2^-4n

Each term is treated as follows:

| term      | weight  | treatment                                                    |
|-----------|---------|--------------------------------------------------------------|
| 1         | 2^0     | implicit. It is never added and is folded in at normalisation. |
| Mx, My    | 2^-3n.. | added directly, each truncated to its top 3n bits            |
| A*C       | 2^-2n   | always computed exactly with an n x n multiplier              |
| A*D, B*C  | 2^-3n   | computed exactly, approximated by a shift, or dropped (sec. 2) |
| B*D       | 2^-4n   | never computed. This saves a whole n x n multiplier.          |

Everything is summed in a 3n-bit accumulator whose LSB weighs 2^-3n, with two
carry bits above it (`shift_add_acc`):

    total[3n+1:0] = (A*C << n) + P_AD + P_BC + E_comp + Mx[top 3n] + My[top 3n]

The bit positions for n = 5 are shown below. Bit 14 is 3n-1. The `.` positions
of the A*D row are where the compensation term A<<1 lands (bits 5..1).

    bit        14 13 12 11 10  9  8  7  6  5  4  3  2  1  0
    A*C<<n      x  x  x  x  x  x  x  x  x  x
    A*D                        x  x  x  x  .  .  .  .  .  x
    B*C                        x  x  x  x  x  x  x  x  x  x
    Mx[22:8]    x  x  x  x  x  x  x  x  x  x  x  x  x  x  x
    My[22:8]    x  x  x  x  x  x  x  x  x  x  x  x  x  x  x

Bits below the top 3n of each mantissa are not used. The result mantissa is
never rounded: it is zero-padded.

## 2. Conditional execution and compensation of A*D and B*C

The two middle terms carry little weight when their low segment is small. Each
one is formed in one of three ways. For A*D (B*C is symmetric, with B in place
of D and C in place of A):

| condition (checked in this order)                    | P_AD     |
|------------------------------------------------------|----------|
| C == 0 and A != 0 and D != 0 (forced)                | A*D      |
| upper n-2 bits of D not all zero (D >= 4)            | A*D      |
| A != 0 and D != 0 (D is 1, 2 or 3)                   | A << 1   |
| otherwise                                            | 0        |

When D < 4, the multiplier is bypassed. D is then replaced by the constant 2,
the middle of {1, 2, 3}, and the product becomes a shift. This recovers most
of the error of simply dropping the term. The forced case covers an operand
whose high segment is zero: A*C then contributes nothing, and dropping the one
remaining cross term would lose most of the product.

`mant_segment` produces the per-operand tests (segment non-zero, upper n-2
bits set). `afpm_flags` combines them into the execute flags dAD and dBC and
the compensation enables. `cond_pp` forms one term. When a term is bypassed,
its multiplier's operands are held at zero, so it does not toggle.

## 3. Normalisation with hidden-bit inversion

The product of the significands is P = 2^3n + total, scaled by 2^-3n, and lies
in [1, 4). The implicit 2^3n is never added. Instead, `mant_norm` looks at the
two carry bits:

* `sel = total[3n+1] | total[3n]` means P >= 2. The exponent is incremented
  and the mantissa is P/2. Adding 2^3n to total flips bit 3n and leaves the
  low bits alone, so the new mantissa is `{~total[3n], total[3n-1:0]}` (3n+1
  bits). This is left-aligned into the MAN_W-bit field: `<< (MAN_W-1-3n)`.
* `sel = 0` means P < 2. The mantissa is `total[3n-1:0] << (MAN_W-3n)`.

A sum of 3*2^3n or more, which would need a third carry, cannot occur for real
operands. Its maximum is just below 3*2^3n. The exponent is `Ex + Ey - Bias +
sel`, with Bias = 2^(EXP_W-1)-1 (127 for FP32).

Example, AC5-5: X = Y = 1.5 (mantissa 0x400000). Then A = C = 16, B = D = 0,
and both truncated mantissas are 16384. The cross terms are dropped (B = D = 0).
total = 256<<5 + 16384 + 16384 = 40960 = 0b01_010000000000000. So sel = 1,
and the mantissa is {~1, 0b010000000000000} << 7 = 0x100000, i.e. 1.125 x 2^1
= 2.25. The product is exact here.

## 4. Low-precision mode (ACLn)

With `LOW_PREC = 1` there are no multipliers at all. Only the top n bits of
each mantissa, a and c, are used, and the cross product a*c*2^-n is replaced by
the bitwise AND of a and c at the same weight as a and c:

    total[n+1:0] = a + c + (a & c)        (acl_sum)

Normalisation is the same as above with 3n replaced by n. The source says the
partial sum is "the top segments and their bitwise AND" on an n-bit width. The
weight given to the AND is this design's reading. It reproduces the published
error of ACL5 to within 5% (section 8).

## 5. The exact multiplier

`fp_mul_exact` is a textbook IEEE 754 multiplier:

1. sign XOR and operand classification;
2. exponent sum minus bias;
3. full (MAN_W+1) x (MAN_W+1) significand product;
4. a one-bit right normalisation when the product is 2 or more;
5. round to nearest, ties to even (guard and sticky bits), then range checks.

Any EXP_W/MAN_W works. It is tested with FP32, FP16 and an 8-bit 1+4+3 format.

## 6. Special values (shared by both multipliers)

The source gives the range rules only for the exact multiplier: an exponent
above 254 gives infinity and one below 1 gives zero. It gives no range rules
for the approximate one. Here, `fp_result_pack` applies the same rules to both:

* zero and subnormal inputs are treated as zero (flush to zero);
* infinity and NaN propagate, and inf x 0 gives a quiet NaN;
* overflow gives signed infinity;
* underflow gives signed zero, so results are never subnormal.

In the exact multiplier the range check uses the exponent after rounding.
`afpm` has a `SPECIALS` parameter. Set it to 0 for the bare datapath, whose
exponent simply wraps.

## 7. The DCiM macro (`fp_dcim_macro`)

```
           wr_en/wr_addr/wr_data
                  |
   mul_addr --> [ cim_sram ROWS x (1+EXP_W+MAN_W) ] --rdata--+
   mul_en  ---> (read enable)                                 |
   mul_x   --> [reg] ---------------------------------------> [ multiplier ] --> [reg] --> out_p
   mul_en  --> [reg] --------------------------------------------------------->  [reg] --> out_valid
```

The source fixes only the array sizes (16 x 8, 32 x 16, 64 x 32), the
multiplier options and 100 MHz operation with SRAM access as the critical path.
Everything else about the macro is this design's choice:

* one multiplier per array;
* a synchronous read port;
* a registered input operand;
* a registered product.

Timing:

| cycle | what happens                                                          |
|-------|-----------------------------------------------------------------------|
| 0     | `mul_en` is high with `mul_addr` and `mul_x`; the SRAM read starts     |
| 1     | the stored word and the registered `mul_x` go through the multiplier   |
| 2     | `out_valid` is high and `out_p` holds the product                     |

A new request may be issued every cycle, so throughput is one product per
clock. A write may be issued alongside a request. A read of the row being
written in that same cycle returns the old word. `rst_n` is synchronous and
active low. It clears only the valid pipeline; the SRAM contents are not reset.

| parameter | default  | meaning                                            |
|-----------|----------|----------------------------------------------------|
| ROWS      | 64       | words in the array                                 |
| EXP_W     | 8        | exponent bits                                      |
| MAN_W     | 23       | explicit mantissa bits                             |
| MULT      | MUL_AC   | MUL_EXACT, MUL_AC or MUL_ACL (`fpmul_pkg`)         |
| N         | 5        | segment width n                                    |

Valid ranges:

* ACn-n needs 3 <= N and 3N <= MAN_W-1. For FP32 that is N = 3..7; for FP16,
  N = 3.
* ACLn needs N+1 <= MAN_W.

Elaboration stops with an error outside these ranges. The source also names
16-bit formats such as BF16 (7-bit mantissa), which would need N = 2; that is
not supported.

The builds of the source's area/power table are:

| array   | multiplier                     | parameters                                   |
|---------|--------------------------------|----------------------------------------------|
| 64 x 32 | AC4-4, AC5-5, AC6-6, ACL5, Exact | ROWS=64, EXP_W=8, MAN_W=23, MULT/N as named |
| 32 x 16 | AC3-3, Exact                   | ROWS=32, EXP_W=5, MAN_W=10, N=3              |
| 16 x 8  | Exact                          | ROWS=16, EXP_W=4, MAN_W=3 (format chosen here) |

The source does not say which 8-bit float it uses. 1+4+3 is this design's
choice.

## 8. Accuracy, measured on this RTL

Mean relative error distance (MRED) over 100,000 random FP32 operand pairs
(`tb_afpm_error`), next to the values the source publishes:

| config | MRED here | published |
|--------|-----------|-----------|
| AC4-4  | 1.381e-3  | 1.38e-3   |
| AC5-5  | 3.362e-4  | 3.36e-4   |
| AC6-6  | 8.27e-5   | 8.29e-5   |
| ACL5   | 3.96e-2   | 4.16e-2   |

The worst relative error seen is 3.9e-3 for AC4-4, 9.4e-4 for AC5-5, 2.3e-4
for AC6-6 and 0.14 for ACL5.

`tb_afpm_image` runs image blending (0.6*I1 + 0.4*I2) and Sobel edge detection
in FP32. Every multiplication goes through the multiplier. The test uses
synthetic 48 x 48 images, not the photographs of the source. PSNR is measured
against the exact multiplier:

| task       | AC4-4 (dB)  | AC5-5 (dB)  | AC6-6 (dB)   | published AC4/5/6 (dB) |
|------------|-------------|-------------|--------------|------------------------|
| blending   | 60.2-61.7   | 74.1-75.2   | 85.8-86.4    | 59.4-62.6 / 72.5-75.5 / 84.5-86.4 |
| edges      | 69.7-83.6   | 82.4-96.0   | 95.0-109.9   | 81.0-83.0 / 96.3-98.7 / 108.5-109.8 |

The edge figures depend on the image. The smooth test image matches the
published ones; the noisy and blocky ones come out about 13 dB lower.

These agreements are the main evidence that the segment positions, flags,
compensation, truncation and normalisation were read as intended. None of this
RTL was checked for area, power or timing; the source's post-layout numbers
are not reproduced.

## 9. Files

| file (rtl/)          | content                                                 |
|----------------------|---------------------------------------------------------|
| `fpmul_pkg.sv`       | `mult_e` multiplier-type enum                           |
| `mant_segment.sv`    | segments A/B (C/D), 3n-bit truncation, segment tests     |
| `afpm_flags.sv`      | dAD, dBC and compensation enables                        |
| `cond_pp.sv`         | one conditionally executed cross product + compensation  |
| `shift_add_acc.sv`   | 3n-bit alignment and summation                           |
| `acl_sum.sv`         | low-precision sum a + c + (a & c)                        |
| `mant_norm.sv`       | carry test, hidden-bit inversion, mantissa alignment     |
| `fp_result_pack.sv`  | exceptions and result packing                            |
| `afpm.sv`            | approximate multiplier (ACn-n / ACLn)                    |
| `fp_mul_exact.sv`    | IEEE 754 multiplier                                      |
| `cim_sram.sv`        | array memory of the macro                                |
| `fp_dcim_macro.sv`   | top: array + selected multiplier                         |

Every multiplier is purely combinational. In `tb/`, each block has a
self-checking testbench `tb_<module>.sv`. `fp_ref_pkg.sv` holds the
independent reference models (integer-remainder rounding for the exact
product; a real-valued rebuild of the approximate product).

The macro-level testbenches are:

* `tb_fp_dcim_macro`: three builds side by side, with traffic, bubbles,
  writes during compute and a reset;
* `tb_fp_dcim_full`: the default build, one full fill and one full multiply
  pass;
* `tb_dcim_configs`: every array/multiplier build of the table above;
* `tb_afpm_error` and `tb_afpm_image`: the accuracy workloads.

Each testbench prints `TB_RESULT checks=N failures=M`.

## 10. Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/fpmul_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv tb/tb_fp_dcim_macro.sv \
    --top-module tb_fp_dcim_macro -Mdir obj && ./obj/Vtb_fp_dcim_macro
```

Replace the testbench name to run another. `tb_dcim_configs` also needs
`tb/dcim_cfg_run.sv`. Every run finishes in well under a second.

To change the macro, set the parameters of `fp_dcim_macro`. To change the
approximation, the flag rules live in `afpm_flags`, the compensation constant
in `cond_pp`, and the accumulated terms in `shift_add_acc`. `fp_ref_pkg` must
follow any such change.

## 11. Where this design departs from, or adds to, the source

* **Normalisation direction.** The text calls normalisation "a left shift and
  an exponent increment". The source's block diagram shifts the P >= 2 case
  one place less to the left than the P < 2 case, which is a halving. The
  diagram's expressions are implemented.
* **Special values in the approximate multiplier.** These are not described in
  the source. They are added here, behind `SPECIALS` (section 6).
* **Subnormals.** These are flushed to zero in both multipliers. The source
  only says they are checked for.
* **AND weight in ACLn.** Its weight is inferred (section 4).
* **Bypass.** A bypassed cross-product multiplier is modelled by zeroing its
  operands; the gate style is not given.
* **The DCiM macro.** The array interface, the one-multiplier organisation,
  the 2-cycle latency and the reset are all this design's choices. The source's
  SRAM comes from a memory compiler; here it is an array that synthesis maps
  to a memory.
* **The 8-bit format** (1+4+3) of the 16 x 8 build.
* **Operand labels.** In the source's block diagram both operand fields are
  labelled X. The second is taken to be Y.
