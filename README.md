# Commutative truncated radix-4 Booth multiplier (faithfully rounded)

A multiplier that returns only the upper half of an n x n product does not
need to compute the lower half exactly. Rounding it *faithfully* is enough:
the result is either of the two representable numbers nearest the exact
product, and it is the exact value when that value can be represented. The
usual way to save area is to leave out the k least significant columns of the
partial-product array and add a constant in their place. With a radix-4 Booth
array this is attractive, since the array has half as many rows. But it
breaks commutativity. Booth recodes only one operand, so the columns that are
thrown away hold different bits for `a*b` and `b*a`, and the two results can
differ.

This RTL implements the construction from "On the Systematic Creation of
Faithfully Rounded Commutative Truncated Booth Multipliers" (Drane, Coward,
Temel, Leslie-Hurd). It truncates the array so that the result is commutative
by construction. It cuts off the largest number of columns that still allows
faithful rounding, and it adds a constant chosen from a closed-form range.
The design is one combinational block, `ctb_mult`, parameterized by the
operand width.

## The idea: truncate the double-Booth sum

Write both operands in radix-4 Booth digits, `d_i = -2 a[2i+1] + a[2i] + a[2i-1]`
and `e_j` likewise for `b` (with `a[-1] = b[-1] = 0`). Then

    a*b = sum over i,j of 4^(i+j) * d_i * e_j

This sum is symmetric in `a` and `b`. Split it into the terms with
`i + j >= k/2` (kept, value `M`) and the rest (discarded, value `Delta`). Any
hardware that computes exactly `M` is commutative. `M` is always a multiple
of 2^k.

`M` can be built from an ordinary Booth array of `a` times `b`. Group the
kept terms by `i`. Row `i` then multiplies `d_i` by the part of `b` above bit
`k-2i-1`, *rounded* by that bit:
`d_i * (b[n-1:k-2i] + b[k-2i-1])`, in units of 2^k. An ordinary Booth row cut
at column k gives `d_i * b[n-1:k-2i]`, so it lacks exactly that one
rounding bit. It also loses its negation "+1" (the sign bit `s_i`), which
sits in column 2i < k. The two together are made up for by **one extra bit
per truncated row, in column k**:

| digit d_i | compensation bit s_i' (c0 = b[k-2i-1]) |
|-----------|----------------------------------------|
| +1, +2    | c0                                     |
| -1, -2    | ~c0                                    |
| 0         | 0                                      |

so `s_i' = (d_i != 0) & (c0 ^ neg_i)`. With these k/2 bits the truncated
single-Booth array adds up to `M` exactly, and so it is commutative.

**Departure from the published text.** The paper gives this bit in two
forms. Its table of row constructions gives the values above. Its closed
form, `a[2i+1] & ~(a[2i] & a[2i-1]) & (b[k-2i-1] ^ a[2i+1])`, is zero for
every positive digit. The two agree only for negative digits. A bit-level
model built with the closed form is not commutative (at n = 6, about 480 of
the 4096 operand pairs differ). This RTL therefore follows the table
(`comp_bit.sv`), and the testbenches confirm that the result is commutative.

## Choosing k and the constant

The error `Delta` depends only on the k low bits of each operand. Its exact
range is (with `s = (-1)^(k/2)`):

    -(2^k (10k + 5s - 1) - 5 + s) / 25  <=  Delta  <=  (2^k (10k - 5s - 1) + 5 + s) / 25

The bounds are reached by operands whose k low bits are the repeating
patterns `...1001` and `...0110` (hex `9` and `6` digits):

| k/2  | maximum at (a, b) | minimum at (a, b) |
|------|-------------------|-------------------|
| even | (...9999, ...6666) | (...6666, ...6666) |
| odd  | (...6666, ...6666) | (...6666, ...9999) |

After the addition, the n-k low columns of the sum are dropped, which
discards a further value between 0 and 2^n - 2^k. Faithful rounding then
holds for every operand pair if and only if:

    k* = largest even k with k <= 5 * 2^(n-k-2)
    C* (in units of 2^k, added in column k) within
        [ (2k - 5 - s)/5 , (5 * 2^(n-k) - 2k - s)/5 ]   (rounded inwards)

| n  | k* | C* range |
|----|----|----------|
| 8  | 4  | 1 .. 14  |
| 16 | 12 | 4 .. 11  |
| 24 | 20 | 7 .. 7   |
| 32 | 26 | 10 .. 53 |
| 64 | 58 | 23 .. 41 |

`ctb_pkg` evaluates these formulas at elaboration (`kstar`, `cstar_min`,
`cstar_max`), and a testbench checks them against the table above. By
default the design uses `K = k*` and the smallest admissible `C`. The
published construction allows any `C` in the range. The lowest value is
this design's choice.

## The array, column by column (n = 16)

Columns run from 0 to 31. Columns 0-11 are removed (k* = 12). The array
holds columns 12-31, so it is W = 2n - k = 20 bits wide. It has these
addends, each with bit 0 at column 12:

* 8 Booth rows `pp_i` (i = 0..7), each ±b or ±2b at column 2i. A negative
  digit's row is one's complemented. Each row is sign-extended to column 31
  and cut below column 12.
* The sign bits `s_6` and `s_7` of the two rows that start at or above column
  12. They sit in columns 12 and 14 and share one addend.
* The constant `C*` (default 4) in column 12.
* The six compensation bits `s_0'` to `s_5'`, all in column 12.

The 16 addends are summed modulo 2^20. The result is sum bits 19..4, which
are product columns 31..16. The four columns 12-15 are computed and then
dropped.

## RTL structure

| file | role |
|------|------|
| `rtl/ctb_pkg.sv` | `booth_digit_t` {neg, one, two}; the `kstar` / `cstar_min` / `cstar_max` formulas |
| `rtl/booth_enc.sv` | one radix-4 digit: `one = y^z`, `two = x~y~z + ~xyz`, `neg = x & ~(y&z)` |
| `rtl/booth_row.sv` | one row, cut to columns K..2N-1, with its sign bit if that bit is kept |
| `rtl/comp_bit.sv` | the compensation bit `s_i'` |
| `rtl/trunc_array.sv` | encoders, rows, sign bits, compensation bits and constant; outputs the addends |
| `rtl/array_sum.sv` | sums the addends |
| `rtl/ctb_mult.sv` | top: array, sum, selects the upper N result columns |

`ctb_mult` parameters:

* `N` (default 16): even, at least 4.
* `SIGNED` (default 1): 1 for two's complement operands, 0 for unsigned.
* `K` (default `kstar(N)`).
* `C` (default `cstar_min(K)`).

If `N`, `K` or `C` is out of range, elaboration stops with `$error`. Ports:
`a`, `b` in (N bits), `p` out (N bits). The block has no clock and no reset,
and its latency is zero cycles.

Choices of this design where the published construction is silent:

* **Sign extension.** Each row is sign-extended in full. The published dot
  diagram shows a compact sign-extension encoding (two bits at the left of
  each row), but not its exact form. Only the numeric result is reproduced,
  not that bit pattern.
* **Reduction and final adder.** Compressor tree and carry-propagate adder are
  left to established techniques. `array_sum` writes them as a plain chain of
  additions, and synthesis picks the structure. Area or delay figures
  depend on that tool.
* **Unsigned operands (`SIGNED = 0`).** The published analysis is written for
  signed operands, but its verification statement treats the operands as
  unsigned. Unsigned operands are handled by zero extension and one more
  Booth digit, placed at column n. The truncated region, and so `Delta`,
  k* and C*, are unchanged.
* **Odd widths.** They are not supported. The paper says the extension is
  simple but does not give it.

Not in the RTL: the baseline (full product, then the upper half) and the
truncated AND-array multiplier that the paper compares against. Also absent
are the variant without compensation bits and the paper's ACL2 proofs.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

* `tb_booth_enc`, `tb_comp_bit`: exhaustive, against the digit arithmetic and
  the table above.
* `tb_booth_row`: every digit value with random multiplicands, for all rows
  of an n = 16 array, against `d*b` (one's complement for negative digits)
  cut at column k.
* `tb_array_sum`: random arrays against a column-by-column count.
* `tb_trunc_array`: the addend sum against `M/2^k + C`, computed from
  the double-Booth sum.
* `tb_ctb_mult`: the default configuration (n = 16), driven by
  `tb/ctb_check.sv`. It runs about 200,000 vectors. Two instances see (a, b)
  and (b, a). Each result is checked three ways:
  * bit-exact against the double-Booth reference (`tb/ctb_ref_pkg.sv`);
  * for commutativity;
  * against the faithful-rounding rule: the result equals the upper half of
    the exact product when the lower half is zero, and otherwise equals the
    upper half or the upper half + 1.

  The testbench also checks that `Delta` stays within the bounds above and
  that the worst-case patterns reach both bounds. It counts that every
  mechanism occurred: negative and ±2 digits, each compensation bit set,
  rounding up, rounding down, exact results.
* `tb_ctb_sizes`: the same checks at n = 4, 6, 8 (all 2^(2n) pairs), and at
  24, 32, 36, 42 and 64 with random and worst-case vectors. It also runs
  unsigned n = 16 and 32, and n = 8 and 16 with the largest admissible `C*`.
  It checks the k*/C* formulas against the table.

Simulation is exhaustive only up to n = 8. Wider instances have random and
worst-case coverage, not a proof. Running, for example:

    verilator --binary --timing --assert -Wno-fatal rtl/ctb_pkg.sv tb/ctb_ref_pkg.sv \
        -y rtl -y tb tb/tb_ctb_mult.sv --top-module tb_ctb_mult
    ./obj_dir/Vtb_ctb_mult

Both testbenches finish in under 30 seconds. To try another width, override
`N` on `ctb_mult` and on `ctb_check` together. To try another constant,
override `C` on both.
