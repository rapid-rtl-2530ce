# RAPID: pipelined approximate multiplier and divider in the log domain

Exact multipliers and dividers are expensive on an FPGA when built from LUTs. A
divider is also slow. The cheapest route to an approximate result is
Mitchell's method. Write an operand as `A = 2^k (1 + x)`, where `k` is the
position of its leading one and `x` is the bits below that one, read as a
fraction. Then `log2 A ≈ k + x`. A product becomes an addition of two
logarithms, a quotient a subtraction, and both finish with a shift.
Mitchell's method alone has a mean error of about 4 %.

RAPID lowers that error with very little hardware. It looks only at the four
most significant bits of each fraction. The 16 × 16 grid of prefix pairs is
divided into a few regions (3, 5 or 10 for the multiplier, 3, 5 or 9 for
the divider), and each region gets one correction constant. That constant is not
added in a separate step: the fraction adder takes three inputs
(`x1 + x2 + c`, or `x1 − x2 − c` for division), so the correction costs no
extra adder stage. The datapath is then cut into 1 to 4 pipeline stages, at
positions chosen to balance the stage delays. Each unit accepts one operation
per clock.

This repository holds synthesizable SystemVerilog for:
- the multiplier (`N × N → 2N` bits, default 16 × 16);
- the divider (`2N / N`, default 16 / 8);
- their sub-blocks;
- self-checking testbenches built around a bit-exact integer reference model.

## The arithmetic

For non-zero operands with `a = 2^k1 (1 + x1)` and `b = 2^k2 (1 + x2)`:

| | fraction step | anti-log |
|---|---|---|
| multiply | `s = x1 + x2 + c` | `s < 1`: `P = 2^(k1+k2) (1 + s)`; `s ≥ 1`: `P = 2^(k1+k2+1) s` |
| divide | `d = x1 − x2 − c` | `d ≥ 0`: `Q = 2^(k1−k2) (1 + d)`; `d < 0`: `Q = 2^(k1−k2−1) (2 + d)` |

`c` is the region coefficient. Mitchell's product is always too small, so the
multiplier adds `c`. Mitchell's quotient is always too large, so the divider
subtracts it.

Worked example without a coefficient: 58 = 2^5 · 1.11010b and
18 = 2^4 · 1.0010b.
- Product: the fractions add to 0.1111b, giving 2^9 · 1.1111b = 992. The exact
  product is 1044.
- Quotient: the difference is 0.1011b, giving 2^1 · 1.1011b = 3.375, or 3 as an
  integer. The exact quotient is 3.22.

The testbenches check both examples.

### Logarithm (`rapid_lod4`, `rapid_lod`, `rapid_alog`)

The leading one is found per 4-bit segment:
- an OR gives "this segment is non-zero";
- a 4-input priority function gives the position inside the segment;
- the most significant non-zero segment wins, and the result is
  `{segment index, position in segment}`. For `0101_0101` that is `1, 10` → 6.

`rapid_alog` shifts the operand left until the leading one sits at the top.
The bits below it are the fraction `x`, `N−1` bits with MSB weight 1/2.

### Coefficient selection (`rapid_coef_mul`, `rapid_coef_div`)

A partition map (`rapid_pkg`) takes the pair of 4-bit prefixes
`(x1[MSB-:4], x2[MSB-:4])` to a region number, and the region number picks a
13-bit coefficient (12 bits for the 3-region multiplier). The `NCOEF`
parameter chooses the scheme: 3, 5 (default) or 10 for the multiplier, and 3,
5 or 9 (default) for the divider. Each map row is a 64-bit constant: row `x1`, nibble `x2`
holds the region minus one.
- The multiplier map is symmetric.
- The divider maps are indexed by (dividend prefix, divisor prefix).

Alignment. The coefficient values are the published ones, listed without their
leading zero bits: three for the multiplier, four for the divider. So:
- a multiplier coefficient has LSB weight 2^-15, the same word as the 16-bit
  multiplier's fraction adder. The 12-bit values of the 3-region scheme sit
  one bit higher, at LSB weight 2^-14;
- a divider coefficient has LSB weight 2^-16. The 16/8 divider keeps 15
  fraction bits, so the last coefficient bit is dropped.

For other widths `coef_align()` shifts the constant. The 8-bit multiplier, for
example, uses its top bits. The prefixes and regions do not depend on the
width, because Mitchell's error pattern repeats in every power-of-two interval.

**How far to trust the maps.** The region boundaries were transcribed cell by
cell from the published plots: from the colours for the 5-, 9- and 10-region
maps, and from the drawn outlines for the two 3-region maps. A handful of
cells on boundaries between similar shades may be wrong, most likely in the
10-region map. Every cell where a plot prints a region number agrees with the
map, and the testbenches check those cells.

### Fraction adder (`rapid_tadd4`) and the two's complement

The three fraction inputs are added in 4-bit slices. A slice adds three 4-bit
digits and an incoming carry of 0–2, which gives a 4-bit digit and an outgoing
carry of 0–2, so a 2-bit carry links the slices. The three-input sum can reach
just over 2, which is why two bits sit above the fraction's binary point.

The divider turns both subtractions into additions:
- it inverts the divisor fraction and the coefficient;
- it feeds a carry of 2 into the first slice (one +1 for each inverted
  operand).

The sum word is then `2^(W+1) + d`. Its top bit is 1 exactly when `d ≥ 0`,
and its low `W` bits hold `2 + d` when `d` is negative. The divisor fraction
(`N−1` bits) is left-aligned to the dividend fraction (`2N−1` bits) before
all this.

### Anti-log (`rapid_antilog_mul`, `rapid_antilog_div`)

The mantissa (`1 + s`, `2s`, `1 + d` or `2 + d`) is shifted by the
integer-part sum or difference, and the fraction bits that fall off are
truncated.

Edge cases:
- a zero operand of the multiplier gives 0;
- a zero dividend gives 0;
- a zero divisor gives all ones;
- a result that does not fit the output saturates to all ones.

Saturation can happen in two places:
- the multiplier, when the correction pushes a product of two large operands
  past `2^(2N)`;
- the divider, whenever `dividend ≥ 2^N · divisor`. A `2N / N` division is
  only defined below that point.

The quotient has `N` integer bits and `QFRAC` fraction bits. The default
`QFRAC = 0` is the usual integer quotient; a larger value keeps more of
Mitchell's fractional result.

## Pipelining

Each unit is written once, as a chain of *slots*:

| slot | after |
|---|---|
| 0 | logarithms and coefficient selection |
| 1 | two's complement (divider; an empty slot in the multiplier) |
| 2 + i | fraction-adder slice i (bits `4i+3 : 4i`) |
| then | integer add/subtract, anti-log shifter, output register |

Each slot is a `rapid_pipe_reg`, which is a register or a plain wire.
`pipe_cut()` in `rapid_pkg` decides which. For the 16-bit word (4 slices) the
cuts are:

| STAGES | multiplier registers after | divider registers after |
|---|---|---|
| 1 | (none) | (none) |
| 2 | bit 11 of the fraction sum | bit 11 of the fraction difference |
| 3 | bit 3; full sum | two's complement; full difference |
| 4 | coefficient selection; bit 7; full sum | coefficient selection; bit 3; full difference |

For other widths the positions scale with the number of slices. These are the
cut positions the published 16 × 16 and 16/8 designs use; the cuts balance the
measured delays of the log, coefficient, adder and shifter steps.

Timing. `in_valid`, the operands and `out_valid` are sampled or updated on
the rising clock edge. A unit with `STAGES = S` holds `S − 1` internal
registers plus an output register, so a result appears exactly `S` cycles
after its operation. There is no back-pressure: one operation can enter every
cycle. `rst_n` clears only the valid bits, asynchronously, which drops any
operations in flight. The data registers are not reset.

## Interfaces

```
rapid_mul #(N = 16, NCOEF = 5 (or 3, 10), STAGES = 4)
  clk, rst_n, in_valid, a[N-1:0], b[N-1:0]          -> out_valid, p[2N-1:0]
rapid_div #(N = 8, NCOEF = 9 (or 3, 5), STAGES = 4, QFRAC = 0)
  clk, rst_n, in_valid, a[2N-1:0] (dividend), b[N-1:0] (divisor)
                                                     -> out_valid, q[N+QFRAC-1:0]
rapid_top  one multiplier and one divider with the above defaults;
           ports prefixed mul_ and div_
```

`N` must be a multiple of 4. Both units were simulated at:
- multiplier: N = 8, 16 and 32, and at 16 bits with all three schemes;
- divider: 8/4, 16/8 and 32/16 (`rapid_div #(.N(16))`), and at 16/8 with all
  three schemes.

## Accuracy

The testbenches measure the mean absolute relative error on random operands.
The comparison is between this RTL and plain Mitchell arithmetic:

| unit | this RTL | plain Mitchell | published figure for the same scheme |
|---|---|---|---|
| 16 × 16 multiplier, 3 coefficients | 1.4 % | 3.9 % | — |
| 16 × 16 multiplier, 5 coefficients | 1.6 % | 3.9 % | below 1 % |
| 16 × 16 multiplier, 10 coefficients | 2.1 % | 3.9 % | 0.6 % |
| 16/8 divider, 3 coefficients | 2.3 % | 4.0 % | — |
| 16/8 divider, 5 coefficients | 1.9 % | 4.0 % | — |
| 16/8 divider, 9 coefficients | 2.0 % | 4.0 % | about 0.6 % |

The divider figures use 8 quotient fraction bits and operands whose quotient
fits. The published per-scheme results (not transcribed row by row here) all
lie between about 0.6 % and 1 %.

The corrections cut Mitchell's error roughly in half, but the published
accuracy is not reached. More regions should mean less error, yet here the
10-region multiplier does worse than the 3-region one. The 5-region
multiplier is biased upward by about 1 %. The likely causes:
- the transcribed partition maps;
- the alignment of the published constants, which are given without a binary
  point. For example, placing the 3-region divider constants one bit higher
  than the stated four leading zeros would bring that divider to about 1.2 %.

A variant that adds the full constant when `s < 1` and half of it when
`s ≥ 1` comes close to the published multiplier error. The description of the
design, however, adds the coefficient once, in the three-input adder, and that
is what this RTL does. Changing the coefficient words or the maps in
`rapid_pkg` is all it takes to try other constants.

## Verification

Every block has a testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>` and stops. Each has a watchdog.

`rapid_ref_pkg` is a plain integer model of both units. It uses a loop for
the leading one and one full-width sum, and it shares nothing with the
slices, shifters or pipeline of the RTL. Only the coefficient table and the
maps are common to both.

| testbench | what it covers |
|---|---|
| `tb_rapid_lod4`, `tb_rapid_lod`, `tb_rapid_alog`, `tb_rapid_tadd4` | exhaustive or near-exhaustive checks of the leaf blocks |
| `tb_rapid_coef_mul`, `tb_rapid_coef_div` | every prefix pair against the coefficient values typed into the testbench; the printed region numbers; multiplier symmetry |
| `tb_rapid_antilog_mul`, `tb_rapid_antilog_div` | both worked examples; random sums of both signs; saturation |
| `tb_rapid_mul`, `tb_rapid_div` | eight and nine instances (1–4 stages, several widths and schemes, with and without quotient fraction bits) on random streams with bubbles; checks every result bit-exactly and checks its latency |
| `tb_rapid_top` | end to end at the default sizes (details below) |

`tb_rapid_top` runs with no parameter overrides. It:
- runs 40 000 cycles of random traffic, about 33 000 operations per unit;
- pulses the reset twice with operations in flight;
- counts each mechanism and fails if any never occurred: back-to-back issue,
  bubbles, zero operands, a fraction sum ≥ 1, product saturation, negative
  fraction difference, zero dividend, zero divisor, quotient overflow, and a
  reset flush.

Running a testbench with Verilator 5 from the repository root:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
  rtl/rapid_pkg.sv tb/rapid_ref_pkg.sv tb/tb_rapid_top.sv \
  --top-module tb_rapid_top --Mdir build -o sim && build/sim
```

Leaf testbenches that do not use the reference model need only
`rtl/rapid_pkg.sv` and their own file.

## Departures and open points

- Coefficient selection: the map is a ROM, a row lookup followed by a small
  multiplexer. The published design uses a hand-packed `casex` in LUTs. The
  function is the same.
- The fraction adder is plain `+` in 4-bit slices. The published version
  configures LUT6 and carry primitives by hand; this RTL leaves that mapping
  to synthesis.
- These are this design's own choices, which the published description does
  not fix:
  - the valid bit, output register and reset;
  - the zero, divide-by-zero and saturation behaviour;
  - `QFRAC`;
  - the cut positions for widths other than 16.
- The accuracy gap above is open.
