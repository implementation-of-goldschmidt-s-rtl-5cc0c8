# Goldschmidt division with a single, reused multiplier pair

Goldschmidt's method divides by multiplying. To get Q = N/D it looks for
factors K1, K2, K3, ... that drive the running product r_i = D·K1·K2···K_i
to 1; the same factors applied to the numerator drive q_i = N·K1·K2···K_i
to Q. The first factor K1 ≈ 1/D comes from a small reciprocal table. Every
later factor is simply K_{i+1} = 2 − r_i, the two's complement of r_i, and
each step squares the error: if r_i = 1 − e, then r_{i+1} = 1 − e².

The textbook hardware unrolls the iterations: a table, MULT 1 and MULT 2 for
q1 and r1, and then a 2's complement block and a new pair of multipliers for
each further step, seven multipliers and three 2's complement blocks in all
to reach q4. The design here keeps MULT 1 and MULT 2, but does every later
step on **one** pair of multipliers, MULT X and MULT Y. A small **logic
block** feeds r back into the single 2's complement block, and its counter
decides when the loop ends. This saves three multipliers and two 2's
complement blocks. The price is throughput: one division at a time, and one
extra register cycle per trip around the loop.

## Datapath

```
   n_sig        d_sig
     |            |----------------.
     |       +-----------+         |
     |       | recip_rom |  K1     |
     |       +-----------+         |
     |        |        |           |
  +--------------+  +--------------+
  | MULT 1       |  | MULT 2       |
  | q1 = K1*N    |  | r1 = K1*D    |
  +--------------+  +--------------+
     | q1              | r1
     |                 v
     |        +--------------------+  <-- r_i fed back from MULT Y
     |        | logic block        |
     |        | (select + counter) |
     |        +--------------------+
     |   sel_fb |         | r
     v          v         v
   [q1 / q_i select]  +--------------+
          |           | 2's compl.   |  K = 2 - r
          |           +--------------+
          |                  |
   ======== K register (q_{i-1}, r_{i-1}, K_i, last) ========
          |                  |
  +------------------+  +------------------+
  | MULT X           |  | MULT Y           |
  | q_i = K_i*q_{i-1}|  | r_i = K_i*r_{i-1}|
  +------------------+  +------------------+
      |  (q_i back to the select)   |  (r_i back to the logic block)
      v
   q register -> q, out_valid (on the last round)
```

All four multipliers are instances of one pipelined unit (`gs_mult`) with a
latency of four cycles, the figure the method's usual pipelined
implementation assumes.

## The logic block and its counter

This is the part that makes the reuse work. The block sits in front of the
2's complement block and chooses what goes in:

| r1 present | fed-back r present | output |
|:---:|:---:|---|
| 1 | 0 | r1 |
| 0 | 1 | fed-back r |
| 1 | 1 | fed-back r |
| 0 | 0 | 0 |

The fed-back value always wins. The table alone would let a new r1 break
into a running loop, so the block also has an `active` flag: the r1 pass
sets it, and while it is set, r1 is ignored. A counter counts the fed-back
passes. After `FB_PASSES` of them it resets, `active` drops, and the block
takes r1 again. The block marks the pass that makes the operation's last
factor (`o_last`). The divider carries that mark through MULT X with the
data, so it knows which product is the result. On that last round, MULT Y
is not started, because r is no longer needed.

With the default `FB_PASSES = 2`, one division makes these passes:

| pass | logic block takes | factor | MULT X forms | MULT Y forms |
|---|---|---|---|---|
| 1 | r1 (from MULT 2) | K2 = 2 − r1 | q2 | r2 |
| 2 | r2 (fed back), count 0→1 | K3 = 2 − r2 | q3 | r3 |
| 3 | r3 (fed back), last, count resets | K4 = 2 − r3 | q4 = result | (idle) |

The divider uses the same choice for the q operand of MULT X: q1 on the
first pass, MULT X's own previous output after that.

The counter counts passes, not clock cycles. Counting a fixed number of
cycles would be equivalent here, but it would need to change whenever the
multiplier latency changes. `FB_PASSES` sets the accuracy: each extra pass
squares the error once more (see *Accuracy*).

## Timing

Cycles are counted from the clock edge that accepts the operands
(`in_valid && in_ready`):

| edge | event |
|---|---|
| 0 | N, D and K1 (table output) registered |
| 4 | q1, r1 leave MULT 1 / MULT 2 |
| 5 | logic block + 2's complement; K2, q1, r1 registered |
| 9 | q2, r2 leave MULT X / MULT Y |
| 10 | K3 registered |
| 14 | q3, r3 out |
| 15 | K4 registered (last) |
| 19 | q4 out of MULT X |
| 20 | q registered, `out_valid` pulses |

In general, latency = `MUL_LAT + (FB_PASSES+1)·(MUL_LAT+1) + 1`, which is 20
cycles at the defaults. The "+1" inside the parentheses is the K register,
the one cycle the feedback loop costs on each trip. `in_ready` stays low from
acceptance until the result appears, so a new operand offered earlier waits.
An unrolled, fully pipelined divider could take a new division every cycle.
This one cannot, because MULT X and MULT Y are busy for the whole loop.

## Number format

Inputs are normalised significands with the hidden bit included,
`SIG_FRAC + 1 = 53` bits (value 1.f, in [1, 2)), as for IEEE double
precision. Inside, every quantity is a `W = 64`-bit unsigned fixed-point word
with `FRAC = 62` fraction bits. K1 (P+2 = 10 bits) and the significands are
padded with zeros on the right to that width, so that one multiplier width
serves every step. Two integer bits are enough: K1 < 1, r_i and K_i stay near
1, and q_i stays near N/D < 2. Products are truncated to 62 fraction bits.

The result `q` is q4 in the same 2.62 format, truncated and not rounded.
Sign, exponent, rounding to a target precision and special values belong to
the surrounding floating-point unit, and none of them is included.

## Reciprocal table

`recip_rom` is an "optimal" reciprocal table with P bits in and P+2 bits
out. The index is the P fraction bits of D that follow the hidden 1. The
entry is the reciprocal of the midpoint of the interval those bits select,
rounded to P+2 fraction bits:

    k(i) = round( 2^(2P+3) / (2^(P+1) + 2i + 1) ),   K1 = k(i) · 2^-(P+2)

The table is computed by a constant function when the design is elaborated,
so there is no data file. For every D, |1 − K1·D| < 2^-P.

## Accuracy

With P = 8, the error after K1 is e < 2^-8. After the factors K2, K3 and K4
it is below e^8 < 2^-64, so truncation sets the final error. In simulation,
over 2,005 divisions (corner cases and random significands), q4 was within 3
units of 2^-62 of the exact quotient. Fewer passes give less. Each result
can only fall short of the exact quotient, by about Q·e^(2^(i−1)). Over 500
random divisions, the largest shortfalls were 2^-17 for `FB_PASSES = 0`
(result q2), 2^-35 for `FB_PASSES = 1` (q3), and 2 units of 2^-62 for
`FB_PASSES = 3` (q5).

## Parameters

| parameter | default | meaning |
|---|---|---|
| `SIG_FRAC` | 52 | fraction bits of the input significands |
| `W` | 64 | datapath and multiplier width n |
| `FRAC` | 62 | fraction bits of the internal format |
| `P` | 8 | reciprocal table index bits (P+2 output bits) |
| `MUL_LAT` | 4 | multiplier latency in cycles |
| `FB_PASSES` | 2 | fed-back passes; the result is q_{FB_PASSES+2} |

The 4-cycle latency and the two fed-back passes (result q4) come from the
method as described. The other values are this design's choice: the
description keeps the multiplier width and the table size symbolic, to be
set from the accuracy needed.

## Interface (`gs_divider`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `in_valid` | in | 1 | operands present |
| `in_ready` | out | 1 | divider idle; operands are taken when both are high |
| `n_sig`, `d_sig` | in | 53 | numerator and denominator significands 1.f |
| `out_valid` | out | 1 | one-cycle pulse when `q` is new |
| `q` | out | 64 | quotient, 2 integer + 62 fraction bits; held until the next result |

## Files

| file | contents |
|---|---|
| `rtl/gs_pkg.sv` | default sizes, `fix_t`, the table formula |
| `rtl/recip_rom.sv` | reciprocal table for K1 |
| `rtl/gs_mult.sv` | pipelined fixed-point multiplier (MULT 1, 2, X, Y) |
| `rtl/gs_twos_comp.sv` | K = 2 − r |
| `rtl/gs_logic_block.sv` | r1 / fed-back r selection and pass counter |
| `rtl/gs_divider.sv` | top level: the whole divider |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/gs_divider_passes_tb.sv` | the divider with `FB_PASSES` = 0, 1, 3: accuracy bounds and latency |

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. `gs_divider_tb` runs the divider at its default parameters. It
checks every quotient against an exact wide-integer division and every
latency against the formula above. It also counts how often each mechanism
occurred: r1 taken, a fed-back r taken, the counter switching back, MULT Y
idle on the last round, and an operand held back by `in_ready`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/gs_pkg.sv rtl/recip_rom.sv \
    rtl/gs_mult.sv rtl/gs_twos_comp.sv rtl/gs_logic_block.sv rtl/gs_divider.sv \
    tb/gs_divider_tb.sv --top-module gs_divider_tb -o sim
./obj_dir/sim
```

For a block testbench, list `rtl/gs_pkg.sv`, the block's file and its
`tb/<block>_tb.sv`. The package must come first.

## Departures and open points

- **q feedback.** The original drawing of the shared datapath shows MULT X
  taking q1 and forming K_i·q_{i−1}, but it shows no path or selector for
  q. Here MULT X's output is fed back, and the logic block's choice also
  selects q.
- **Register placement.** Where the pipeline registers go is this design's
  choice: the operand/K1 register, one K register per loop trip, and an
  output register. The description ties the feedback cost to one clock per
  trip, which this placement gives. Its cycle chart is drawn for one
  pipelined multiplier that issues q and r products one cycle apart, and it
  finishes the last multiplication at clock 18. The 20-cycle schedule above
  does not try to match that chart cycle for cycle.
- **Counter.** It counts passes, not cycles (see above).
- **Zero padding.** The description says narrower operands should be
  detected and padded with leading zeros. Here the widths are fixed, so the
  padding is fixed when the design is elaborated. It is placed on the
  low-order side, so that the binary points line up.
- **Not included.** Sign and exponent handling, final rounding, and the
  error-term variant of the method ("Variant B"). The description only names
  that variant.
