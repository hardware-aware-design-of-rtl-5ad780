# Multiplierless second-order IIR filter with minimum adders

A second-order IIR section normally needs five constant multiplications per
sample. If the coefficients are small fixed-point numbers, each multiplication
can be replaced by a few additions and wired shifts. A multiplier block then
computes all products of one input together and shares intermediate sums
between them. How many adders that costs depends on the coefficient values.
So the coefficients are chosen together with the adder count: among all
fixed-point coefficient sets that meet the frequency specification and keep
the filter stable, pick one whose shift-and-add realisation needs the fewest
adders. That search is done offline, by integer linear programming. Its
results are a handful of integers and two small adder graphs.

This RTL is the hardware half of that flow. It is a generic second-order
section in transposed direct form whose multiplier blocks are described by
adder graphs given as parameters. The output is faithfully rounded: the error
stays below one unit in the last place of the output. The defaults give the
filter `lp1_4`, a low-pass filter built from **7 adders**:

```
          25 + 40 z^-1 + 25 z^-2     2^-7
H(z) = ---------------------------- ------
        1 - 40/64 z^-1 + 20/64 z^-2
```

It has a 16-bit input in [-0.5, 0.5) and a 16-bit output. Its specification
is a passband [0, 0.3π] with gain 1 ± 0.06 and a stopband [0.7π, π] with gain
at most 0.06. Measured on the RTL, the passband gain is 0.9425 to 1.0562 and
the stopband gain is at most 0.0551.

## Datapath

```
          MCM B (2 adders)                   numerator column (2 adders)
 x ──► 5x = x + (x<<2)
       25x = 5x + (5x<<2)
          b0 = 25x   ─────────────────────────────► (+) ──► align ──► (+) ──► trunc to l_ext ──┬──► round to l_out ──► y
          b1 = 5x<<3 ──────────► (+) ──► z⁻¹ ───────┘                  ▲                        │
          b2 = 25x   ──► z⁻¹ ────┘                                     │                        │ y_ext
                                                                       │                        │
          MCM A (1 adder)                    denominator column        │                        │
 y_ext ──► 5y = y + (y<<2)                   (1 adder + top adder)     │                        │
          -a1 = 5y<<3 = 40y  ──────────► (−) ──► z⁻¹ ──► align ────────┘                        │
          -a2 = -(5y<<2)     ──► z⁻¹ ─────┘                                                     │
   ▲                                                                                            │
   └────────────────────────────────────────────────────────────────────────────────────────────┘
```

The datapath is split into five modules:

| module | role |
|---|---|
| `mcm_shiftadd` | Multiplier block. It multiplies one input by three constants following an adder graph. There are two instances: MCM B for the `b_k` on `x`, and MCM A for the `-a_k` on the fed-back `y_ext`. |
| `tdf_chain` | One column of the transposed form: `s = p0 + z⁻¹(p1 + z⁻¹ p2)`. It contains the structural adders and the two delay registers. The numerator and the denominator each use one chain. |
| `iir_quantizer` | The top-row adder that joins the two chains, then the truncation to `l_ext` and the rounding to `l_out`. |
| `fix_iir_shiftadd` | The filter. It works out all widths from the formats and the graphs. |
| `iir_pkg` | Adder-graph types, helper functions, and the graphs of three filters: `lp1_4` (7-bit coefficients), `lp1_4` (5-bit coefficients) and `hp0`. |

The numerator and the denominator have separate columns. The numerator
column sums `b0·x[n] + b1·x[n-1] + b2·x[n-2]` exactly. The denominator column
sums `-a1·y[n-1] - a2·y[n-2]` exactly, where `y` is the fed-back value
`y_ext`. The two sums meet in one adder. In `lp1_4` this gives 4 structural
adders. With 3 adders in the multiplier blocks (5x, 25x, 5y) the total is 7.
The output rounding adds one more adder, which the count of 7 does not
include.

## Number formats: the hard part

Every signal is a two's-complement integer with a known weight for its least
significant bit (LSB). Formats are written as LSB positions, so `l = -15`
means a weight of 2⁻¹⁵ per LSB.

| quantity | default (`lp1_4`) | where it comes from |
|---|---|---|
| input `x` | 16 bits, MSB −1, LSB `l_in = −16` | `W_IN`, `MSB_IN` |
| numerator coefficients | integers 25, 40, 25 at `l_b = −7` | `LSB_B`, graph B |
| denominator coefficients | `-a1 = 40`, `-a2 = −20` at `l_a = −6` | `LSB_A`, graph A |
| output `y` | 16 bits, MSB 0, LSB `l_out = −15` | `W_OUT`, `MSB_OUT` |
| fed-back `y_ext` | MSB 0, LSB `l_ext = l_out − G = −18`, 19 bits | `G = 3` guard bits |
| numerator sum | LSB `l_in + l_b = −23`, 24 bits | derived |
| denominator sum | LSB `l_ext + l_a = −24`, 27 bits | derived |

Everything up to the truncation is exact:

- Each multiplier block is `W_IN + ceil(log2 c_max)` bits wide, where `c_max`
  is the largest constant anywhere in its graph, including shifted operands.
- Each chain is 2 bits wider than its products.
- `iir_quantizer` shifts both sums onto their common LSB,
  `min(l_in + l_b, l_ext + l_a)`, before adding them.

Truncation then happens twice:

1. **To `l_ext`.** The sum is rounded toward −∞ to `l_ext`, and this value
   is fed back. Feeding back the output itself would let the rounding errors
   pile up. Its error of less than 2^l_ext per sample reaches the output
   through `1/A(z)`. The worst-case peak gain (WCPG) of `1/A(z)` bounds that
   effect. For `lp1_4` the WCPG is 2.05, so `G = 3` guard bits keep the
   contribution below half an output LSB: 2.05 · 2⁻³ < ½.
2. **To `l_out`.** The output is rounded to nearest from `y_ext`. The total
   error is then below ½ + 2.05/8 < 1 LSB, so the output is faithful.

   Truncating here as well (`ROUND_OUT = 0`) would bound the error only by
   1 + 2.05/8 LSB. The paper's figure marks both steps as truncations, while
   its text promises an error below one output LSB. This RTL rounds to
   nearest so that the promise holds.

`MSB_OUT` must cover the largest output. That is the WCPG of `H(z)` times the
largest input. For `lp1_4` this is 1.33 × 0.5 = 0.665, so `MSB_OUT = 0`.
Neither WCPG is computed in hardware. Both are computed offline, by summing
the absolute values of the impulse response, and enter the RTL as `G` and
`MSB_OUT`. If a result ever wraps, the `overflow` output rises and a
simulation assertion fires. With correct `MSB_OUT` and in-range inputs,
neither happens.

## Describing an adder graph

Node 0 is the block input. Node `i` is one adder:

```
node[i] = ±(node[src_a] << sh_a) ± (node[src_b] << sh_b)
```

Each of the three taps selects one node and a left shift. It also has a sign
flag, `neg`:

- A tap with `src = -1` is a zero coefficient.
- The sign is not applied inside the block. The structural adder that
  consumes the product adds or subtracts it instead. In `lp1_4`, the `20y`
  product is subtracted by the lower adder of the denominator column.

The `lp1_4` numerator block, as written in `iir_pkg`:

```
node 1 = (x << 0) + (x << 2)          //  5x
node 2 = (n1 << 0) + (n1 << 2)        // 25x
taps:  b0 = n2, b1 = n1 << 3, b2 = n2 // 25, 40, 25
```

A block holds at most `AG_MAX_NODES = 8` adders. The package functions
`ag_tap_coef`, `ag_max_const` and `chain_adders` evaluate a graph at
elaboration time. The widths use them, and a module refuses to elaborate if
a width is too narrow.

## Sparse coefficients

Zero coefficients cost nothing:

- A zero tap removes its structural adder.
- A register that could only hold zero is removed too.
- If a value passes a register without meeting an adder, its sign is carried
  along at elaboration time and applied by the next adder.

The package also holds the magnetic-bearing compensator `hp0`:

- `b = (1, −1, 0)`, `a1 = −31/32`, `a2 = 0`
- 0 adders in MCM B
- 1 adder in MCM A: `31y = (y << 5) − y`
- 2 structural adders

That makes **3 adders** in total. It uses `MSB_OUT = 1`, because the WCPG of
`H(z)` is 2, and `G = 6`, because the WCPG of `1/A(z)` is 32.

## The 5-bit `lp1_4` solution

The same specification can be met with 5-bit coefficients at a cost of one
more adder (8 instead of 7):

```
          6 + 9 z^-1 + 6 z^-2         2^-5
H(z) = ---------------------------- ------
        1 - 11/16 z^-1 + 6/16 z^-2
```

Both multiplier blocks need two adders each:

- numerator: `3x = x + (x<<1)`, `9x = 3x + (3x<<1)`; taps `3x<<1`, `9x`, `3x<<1`
- denominator: `3y = y + (y<<1)`, `11y = (3y<<2) − y`; taps `+11y`, `−(3y<<1)`

Its WCPGs are 1.36 for `H(z)` and 2.30 for `1/A(z)`, so `MSB_OUT = 0` and
`G = 3`, the same as the default. Simulated, its passband gain is 0.956 to
1.044 and its stopband gain at most 0.045. The package holds it as the
`LP14W5_*` constants.

## Interface and timing

```
fix_iir_shiftadd #(...) u (
  .clk, .rst,          // synchronous, active-high reset clears the four state registers
  .en,                 // 1: x is a sample; the state advances at the rising edge
  .x,                  // W_IN bits
  .y,                  // W_OUT bits: output for the x now applied (combinational)
  .overflow);          // 1 if a result wrapped
```

The filter takes one sample per enabled clock and has zero latency. The only
registers are the z⁻¹ delays. The critical path runs from `x` or a delay
register through MCM B, two adders, the rounding, MCM A, and one chain adder
into the register. The design has no pipeline. The enable, the reset and the
`overflow` flag are this design's own interface choices.

## Where this departs from the paper or fills gaps

- **Output rounding.** The output is rounded to nearest, not truncated; see
  above.
- **Sign of `G`.** The text writes `l_ext = l_out + G`. Guard bits add
  precision, so `l_ext = l_out − G` is used.
- **Shift labels.** The figure labels the alignment shifts `<< l_b` and
  `<< l_a`. Here both sums are aligned to their common LSB, which yields the
  printed transfer function exactly.
- **Choice of `lp1_4` solution.** The paper's table lists `lp1_4` with 5-bit
  coefficients and 8 adders. The datapath it draws is the 7-bit, 7-adder
  solution, and that drawn solution is the default here. The 5-bit solution
  is available as a parameter set.
- **Values worked out for this design.** `MSB_OUT`, `G` for `hp0` and for
  the 5-bit `lp1_4`, and the adder graphs of those two filters were worked
  out for this design, as shown above. The 5-bit coefficients are those of
  the paper's plotted magnitude response for that solution.
- **Other benchmarks.** The paper's other benchmarks (`lp1_k`, `lp2_k`,
  `lp3_k`, `lp4`) are given only as adder counts, without coefficients, so
  they are not included.
- **What is not here.** The coefficient search, the WCPG computation and
  the code generator are software and are not part of this RTL.

## Testbenches

Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_mcm_shiftadd` | The multiplier blocks of all three filters (`lp1_4` at 7 and 5 bits, `hp0`) against the products written out, for random and extreme inputs. |
| `tb_tdf_chain` | Three tap patterns: all positive, leading zero with a negative tap, and a sign carried through a register. Uses random data, enable gaps and reset. |
| `tb_iir_quantizer` | The alignment, truncation, both rounding modes and the overflow flag against real-number floor arithmetic. |
| `tb_fix_iir_shiftadd` | The default filter end to end. Compares with a bit-exact direct-form reference built from the transfer function, not from the graphs, and with a double-precision model for faithfulness. Also checks zero latency, holds with `en = 0`, reset, truncations, round-ups, the adder count of 7, and the passband/stopband specification. |
| `tb_iir_workloads` | `hp0` with 3 adders, checked against three points of the reference compensator's magnitude response (0.9068 / 1.0108 / 1.0158 against 0.9039 / 1.0101 / 1.0151). Also `lp1_4` with 8- and 12-bit input and output, and the 5-bit `lp1_4` solution with its adder count of 8 and its passband/stopband specification. |

To run one with Verilator (the package comes first):

```
verilator --binary --timing --assert rtl/iir_pkg.sv rtl/mcm_shiftadd.sv \
  rtl/tdf_chain.sv rtl/iir_quantizer.sv rtl/fix_iir_shiftadd.sv \
  tb/tb_fix_iir_shiftadd.sv --top-module tb_fix_iir_shiftadd
./obj_dir/Vtb_fix_iir_shiftadd
```

## Using a different filter

To build another filter:

1. Choose integer coefficients and their LSB positions `l_b` and `l_a`.
2. Write an adder graph for each side in the package. Remember that tap 0 of
   the denominator must be zero.
3. Compute the WCPG of `H(z)` and of `1/A(z)` offline, for example by summing
   `|h[n]|` over a long impulse response.
4. Set `MSB_OUT ≥ ceil(log2(WCPG_H · max|x|))`.
5. Set `G = ceil(log2(WCPG_1/A)) + 1`.
6. Instantiate `fix_iir_shiftadd` with these parameters. The widths follow
   automatically.
