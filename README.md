# Single-channel algebraic-integer 8×8 2-D DCT

This is SystemVerilog RTL for a row-parallel 8×8 two-dimensional discrete
cosine transform. It takes one 8-word vector per clock and delivers one 8×8
block every eight clocks. Its arithmetic is exact until the very last stage.

Cosine constants are irrational, so a fixed-point DCT has to round them, and
every rounding adds error. Here numbers are held as *algebraic integers*:
four integers (a, b, c, d) standing for

    x = a + b·z1 + c·z2 + d·z1·z2,
    z1 = √(2+√2) + √(2−√2) ≈ 2.6131,  z2 = √(2+√2) − √(2−√2) ≈ 1.0824.

Additions and subtractions on such numbers are exact integer operations. Only
one step, the *final reconstruction step* (FRS), converts them back to
fixed point. That step sits at the very end, after both the column and the
row transform, so no intermediate result is ever rounded.

The transform is written as

    X = B · A · x · Aᵀ · Bᵀ

Here A is an 8×8 matrix with entries 0 and ±1, computed with 20 adders.
B holds the irrational constants. The design's main idea is that B is never
applied as a multiplier. It splits as B = B0 + B1·z1 + B2·z2 + B3·z1z2. Each
Bp has at most one ±1 per row, so multiplying by it only selects a row or a
column and perhaps changes its sign. Both transforms therefore run over a
single integer channel, Y = A·x·Aᵀ, and the four basis directions are only
separated at the output, by multiplexers and wiring.

## Data path

```
 x column k ──► ai_dct1d (A) ──► transpose_buffer ──► ai_dct1d (A) ──► bbt_block ──► X row i
   L bits         L+3 bits        (2 × 8×8 regs)        L+6 bits       B(·)Bᵀ + FRS   fixed point
                                                                        + exact AI components
```

| module | role |
|---|---|
| `aidct_pkg` | tables of the sparse matrices B0..B3 (`b_sel`, `b_sgn`) and the basis multiplication rules (`prod_coef`) |
| `ai_dct1d` | y = A·x, 20 adders, registered output, word growth +3 bits |
| `transpose_buffer` | ping-pong pair of 8×8 register banks; columns in, rows out |
| `bbt_buffer` | shift-register section P and parallel-load section Q, plus the output-row sequencer |
| `bbt_crosswire` | 32 eight-input multiplexers and fixed wiring that form the 16 terms Bp·Y·Bqᵀ of one output row |
| `frs` | final reconstruction step for one output column (8 instances) |
| `bbt_block` | buffer + multiplexers + 8 × FRS + output register |
| `aidct2d_top` | the whole chain |

### The 1-D core

A is the 8×8 matrix below. Its rows are the outputs Y0..Y7.

```
 1  1  1  1  1  1  1  1
 1 -1 -1  1  1 -1 -1  1
 1  1 -1 -1 -1 -1  1  1
 1  0  0 -1 -1  0  0  1
 1  1  1  1 -1 -1 -1 -1
 0 -1 -1  0  0  1  1  0
-1 -1  1  1 -1 -1  1  1
 1  0  0  0  0  0  0 -1
```

It takes three adder columns, 8 + 7 + 5 = 20 adders:

    a0..a3 = x0+x7, x1+x6, x2+x5, x3+x4      a4..a7 = x3−x4, x2−x5, x1−x6, x0−x7
    b0 = a0+a3   b1 = a1+a2   b2 = a0−a3   b3 = a1−a2
    c0 = a4+a5   c1 = a6+a7   c2 = −a5−a6
    Y0 = b0+b1   Y1 = b0−b1   Y2 = b2+b3   Y3 = b2
    Y4 = c0+c1   Y5 = c2      Y6 = c0−c1   Y7 = a7

No row of A has more than eight non-zero entries, so each pass adds at most
3 bits. With L-bit inputs, Y is L+6 bits wide and cannot overflow.

## The B(·)Bᵀ block, which is the hard part

Output row i of X is

    X[i] = Σ_p Σ_q  (Bp·Y·Bqᵀ)[i] · βp·βq,     β = {1, z1, z2, z1z2}.

**Half-column independence.** Every Bp is block diagonal, with 4×4 blocks.
Output rows 0–3 therefore use only rows 0–3 of Y, and output rows 4–7 use
only rows 4–7. The block never needs more than four rows of Y at a time.

**Buffer (P and Q).** Each of the eight columns has a three-register shift
chain Df1, Df2, Df3 that advances on every valid row. It also has four
registers Ds0..Ds3, which are loaded in parallel at the end of the cycle
that brings row 3 or row 7 of a block:

    Ds0 ← incoming row,  Ds1 ← Df1,  Ds2 ← Df2,  Ds3 ← Df3

After the load, Ds0..Ds3 hold rows 4h+3, 4h+2, 4h+1 and 4h of half h. They
keep those values for the next four cycles. That is 24 registers at the full
rate and 32 loaded once every four clocks. Row r of Y is in slot 3 − (r mod 4).

**Multiplexers.** Left multiplication by Bp picks, for output row i, the row
`b_sel(p,i)` of Y with sign `b_sgn(p,i)`, or zero. That choice changes from
one output row to the next. There is one multiplexer per (p, column), 32 in
all. Each chooses among the four Q slots and their negations, which makes
eight inputs. The table below gives the selection for each row i.

| i | B0 | B1 | B2 | B3 |
|---|---|---|---|---|
| 0 | +Y0 | 0 | 0 | 0 |
| 1 | +Y1 | 0 | 0 | 0 |
| 2 | +Y2 | 0 | 0 | +Y3 |
| 3 | +Y2 | 0 | 0 | −Y3 |
| 4 | +Y7 | −Y6 | −Y4 | −Y5 |
| 5 | +Y7 | +Y6 | +Y4 | −Y5 |
| 6 | +Y7 | −Y4 | +Y6 | +Y5 |
| 7 | +Y7 | +Y4 | −Y6 | +Y5 |

**Wiring.** Right multiplication by Bqᵀ does not depend on time. Element c of
the selected row is element `b_sel(q,c)`, times `b_sgn(q,c)`. The wiring makes
the selection. The constant sign `b_sgn(q,c)` is folded into the FRS
coefficients of column c, so the wiring itself has no arithmetic.

**Timing** (a cycle "presents" a value when it is stable before that cycle's
closing edge):

| cycle | what happens |
|---|---|
| n | row 3 of Y is presented, and Q loads at the end of the cycle |
| n+1 .. n+4 | the multiplexers select output rows 0..3 |
| n+2 .. n+5 | rows 0..3 of X are presented at the output |
| n+4 | row 7 of Y is presented (with gap-free input), and Q reloads |
| n+6 .. n+9 | rows 4..7 of X are presented |

## Final reconstruction step (FRS)

There is one FRS per output column. It works in two steps.

1. **Exact reduction.** The products βp·βq are folded back into the basis
   with integer rules:
   z1² = 4 + z1z2, z2² = 4 − z1z2, z1²z2 = 2z1 + 2z2,
   z1z2² = 2z1 − 2z2, (z1z2)² = 8.
   This turns the 16 selected terms into four integer AI components
   (a, b, c, d) of X[i][c], using only adders and shifts. These components
   are exact and appear on the `out_ai` port.
2. **Expansion factor.** A scale α is chosen so that α·(z1, z2, z1z2) is
   close to the integers (m1, m2, m3). Then X ≈ a + (m1·b + m2·c + m3·d)/α.
   The sum is formed exactly. The only inexact operation in the whole design
   is a multiplication by the constant round(2^36/α), followed by rounding to
   `OUT_FRAC` = 8 fractional bits, which gives `out_x`.

Two integer sets are supported by parameter:

| set | α | worst error of m/α against z |
|---|---|---|
| (437, 181, 473), the default | 167.2309 | 2.8·10⁻⁵ |
| (12, 5, 13) | 4.5958 | 2.0·10⁻³ |

## Interface and timing of `aidct2d_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `in_valid` | in | 1 | `in_col` holds a column |
| `in_col[8]` | in | IN_W | column k of the input block, x[n][k], two's complement (level-shift pixels) |
| `out_valid` | out | 1 | an output row is presented |
| `out_idx` | out | 3 | row index i of X |
| `out_x[8]` | out | IN_W+20 | X[i][c] · 2^OUT_FRAC, rounded |
| `out_ai[8][4]` | out | IN_W+12 | exact components of X[i][c] on 1, z1, z2, z1z2 |
| `ev_tbuf_swap`, `ev_q_load` | out | 1 | the transpose banks swap / Q loads on this cycle's closing edge |

* Columns 0..7 of a block are presented in order. `in_valid` may be low
  between any two columns. Block alignment comes from counters that reset to
  zero, so the first valid column after reset is column 0.
* Output rows come out in order 0..7, one per clock. The four rows of a
  half-block are always on consecutive cycles.
* Latency: if column 7 of a block is presented in cycle n, row 0 of X is
  presented in cycle n+9.
* Throughput: with gap-free input, the output is also gap free. That is one
  block per 8 clocks, or 8 coefficients per clock.
* Parameters: `IN_W` (L, default 8), `M1 M2 M3 ALPHA` (default
  437/181/473/167.2309), `INV_BITS` (36), `OUT_FRAC` (8), `OUT_W` (IN_W+20).
  For any L, |X| < 913·2^(L−1), so `OUT_W` covers the result with
  `OUT_FRAC` ≤ 9.

## What follows the source paper and what is this design's own

Taken from the paper:
* the matrices A and B0..B3;
* the 20-adder core with its three adder columns;
* the A → transpose buffer → A → B(·)Bᵀ chain;
* the P/Q buffer: its register counts and the register contents after a
  parallel load;
* 32 eight-input multiplexers followed by wiring;
* the expansion-factor reconstruction with the two integer sets;
* the input word lengths 4 and 8;
* a rate of one 8×8 block per eight clocks.

This design's own choices:
* **Transpose buffer.** The paper only names it. Here it is two 8×8 register
  banks used ping-pong.
* **FRS insides.** The paper uses an FRS from earlier work without describing
  it. Here the two-step reduction above is used, with a 36-bit 1/α constant
  and 8 output fractional bits.
* **Pipelining.** Registers sit after each 1-D core, on the transpose
  output and after the FRS. The paper does not give the pipelining. Timing
  has not been evaluated here. The FRS (constant multiplications and the
  1/α product) is the deepest combinational path. The paper reports about
  300 MHz on FPGA and 951 MHz in 45 nm, and reaching those rates may need
  more registers there.
* **Control.** Valid signalling, idle cycles, counter-based block alignment
  and the exact-component output are this design's additions.

Departures and points to know:
* The paper first shows a direct buffer: eight taps at the full rate and
  eight at one-eighth rate, 56 + 64 registers. It then reduces this to the
  four-tap form built here. The direct form is not built.
* The paper's text says the 32 slow registers run at F_clk/8. Its figures,
  and its statement that a parallel load happens every fourth clock, say
  F_clk/4. The design loads every fourth row, as the figures show.
* In this design the four-clock rate is an enable on registers clocked at
  F_clk. There is no second clock.
* Multiplying out the printed A and B does not give a row-scaled DCT-II
  matrix. Only rows 0 and 1 of B·A are multiples of DCT rows (rows 0 and 4
  of the DCT). The RTL
  implements the matrices exactly as printed, and the testbenches check
  against the same matrices. If you need a true DCT, check A and B against
  the original Arai factorisation first.
* The paper mentions an 88-bit bus between the wiring and the FRS. This
  design does not reproduce that figure.

## Verification

Every module has a self-checking testbench in `tb/`. The reference model
`aidct_ref_pkg` is built from the full matrices. It computes A·x·Aᵀ by plain
matrix products, forms B·Y·Bᵀ in exact algebraic-integer arithmetic, and
also forms it in double precision. It does not use the RTL's tables.

| testbench | what it checks |
|---|---|
| `tb_ai_dct1d` | y = A·x for random and worst-case inputs, at widths 8 and 11; 1-clock latency |
| `tb_transpose_buffer` | transposition, row order, latency, back-to-back blocks and blocks with idle cycles |
| `tb_bbt_buffer` | Df and Ds contents at every cycle, as in the paper's timing diagram; the output-row sequence |
| `tb_bbt_crosswire` | every (p, q, i, c) term against full Bp·Y·Bqᵀ products |
| `tb_frs` | AI components and fixed-point output for all 8 columns and both integer sets |
| `tb_bbt_block` | the block end to end, with timing |
| `tb_aidct2d_top` | the full design at default parameters: 48 blocks, random and full-scale, with and without idle cycles; exact components, fixed-point values, latency, gap-free throughput; counts bank swaps, Q loads per half, bubbles and back-to-back blocks |
| `tb_success_rate` | accuracy workload: four builds ((437,181,473) and (12,5,13), L = 8 and 4), 150 random blocks each |

Success rates measured by `tb_success_rate` on uniform random input: the
share of coefficients within e % of the exact value.

| build | 10 % | 5 % | 1 % | 0.1 % | 0.05 % | 0.01 % | 0.005 % |
|---|---|---|---|---|---|---|---|
| (437,181,473) L=8 | 99.99 | 99.99 | 99.89 | 98.86 | 97.99 | 90.92 | 82.69 |
| (437,181,473) L=4 | 99.98 | 99.97 | 99.90 | 98.93 | 97.84 | 89.61 | 79.54 |
| (12,5,13) L=8 | 99.11 | 98.28 | 91.50 | 51.31 | 39.19 | 21.70 | 13.65 |
| (12,5,13) L=4 | 99.25 | 98.32 | 92.20 | 50.78 | 37.90 | 21.26 | 13.83 |

For the fine set these figures agree with the FPGA prototype results the
paper reports to within about 2 points. For the coarse set they agree down
to 0.1 %, and at tighter tolerances they are lower than the paper's (paper:
31 % at 0.01 %). The FRS insides, the test data and the output word length
behind the paper's figures are not known, so only loose properties are
asserted.

### Running a testbench with Verilator

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/aidct_pkg.sv tb/aidct_ref_pkg.sv tb/tb_aidct2d_top.sv \
    --top-module tb_aidct2d_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. All of them finish in
well under a second.
