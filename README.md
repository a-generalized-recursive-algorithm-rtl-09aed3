# Recursive Nikhilam multiplier

This is a binary multiplier that does no long multiplication. It rests on one
identity. For any power of two `B`,

    X * Y = (X + (Y - B)) * B  +  (X - B) * (Y - B)

The first term is an addition followed by a shift. The second term is again a
product, but of two *differences* from `B`. With a good choice of `B`, those
differences are much smaller than `X` and `Y`. Applying the identity again to
the product of the differences shrinks the numbers further. Once one of the
two numbers is 0 or 1, the last product is trivial. The whole multiplication
then comes down to a few additions, shifts and subtractions.

This is the Nikhilam rule of Vedic arithmetic ("all from nine, the last from
ten"), carried over from radix 10 to radix 2. Here it is applied
recursively, with the base chosen anew at every step. The number of steps
depends on the bit pattern of the smaller operand, not on its size. A `b`-bit
smaller operand never needs more than `ceil(b/2)` steps. Operands like 0, 1,
or values close to a power of two need one step or none.

The RTL is a straight hardware rendering of that recursion. A chain of
`ceil(WIDTH/2)` identical stages does one recursion each. A result
accumulator adds up what the stages produce. The default `WIDTH` is 8.

## One recursion, step by step

Each stage receives two magnitudes and the sign of their product (all
numbers inside the chain are held as magnitude plus sign; see below). It then:

1. Takes the smaller magnitude `X` and the larger `Y`.
2. Does nothing if `X` is 0 or 1. The recursion has ended, and the stage
   passes its inputs on unchanged.
3. Chooses the base `B` as the power of two *nearest* to `X`. Take the power
   of `X`'s most significant 1. Double it if the bit just below that MSB is
   also 1. For `X` = `1011` the base is `1000`; for `X` = `1100` it is `10000`.
4. Forms the differences `X' = X - B` and `Y' = Y - B`. Either may be
   negative.
5. Outputs the partial result `P = X + Y'`. It weighs `B`, so the stage also
   outputs `log2 B`, the number of places `P` is to be shifted.
6. Passes `|X'|`, `|Y'|` and the updated sign to the next stage.

Rounding to the *nearest* power of two is what bounds the recursion. If `X`
lies in the lower half of its octave, `X - B` loses the top two bits of `X`.
If it lies in the upper half, `B - X` is at most a quarter of `B`. Either way
the next smaller operand has at least two bits fewer, or is an exact power of
two, which the next step reduces to 0. Hence `ceil(b/2)` recursions at most.
This was checked exhaustively for every operand pair up to 9 bits, and by
random test at 16 bits.

### Worked example: 23 x 21

| stage | X, Y | B | X', Y' | partial `X + Y'` | weight |
|---|---|---|---|---|---|
| 1 | 21 = `10101`, 23 = `10111` | 16 (second MSB 0) | 5, 7 | 21 + 7 = 28 = `11100` | x16 |
| 2 | 5 = `101`, 7 = `111` | 4 (second MSB 0) | 1, 3 | 5 + 3 = 8 = `1000` | x4 |
| end | 1, 3 | | | final product 1 x 3 = 3 | x1 |

28·16 + 8·4 + 3 = 448 + 32 + 3 = 483 = `111100011`.

### Negative differences and the running sign

Whenever the base is rounded up, `X' = X - B` is negative. `Y'` may be
either sign. The product of the differences is then negative, and it has to
be *subtracted* from the sum of the partial results.

The stage does not carry two's-complement numbers down the chain. It keeps
magnitudes and one sign bit for "the product still to be done". On the way
from one stage to the next, that sign is EX-ORed with the signs of `X'` and
`Y'`. This uses the same two-input EX-OR cell (`sign_unit`) that signed mode
uses on the operands' sign bits. Every partial result and the final product
carry the sign that was in force when they were produced.

The partial result `X + Y'` itself is never negative. A negative `Y'` only
occurs when `Y` is close to `X`, and then `X + Y' >= 2X - B > 0`.

Example, 11 x 13:

| stage | X, Y | B | X', Y' | sign after | partial | term |
|---|---|---|---|---|---|---|
| 1 | 11 = `1011`, 13 | 8 | 3, 5 | + | 11 + 5 = 16 | +16·8 = +128 |
| 2 | 3 = `11`, 5 | 4 (second MSB 1) | −1, +1 | − | 3 + 1 = 4 | +4·4 = +16 |
| end | 1, 1 | | | | 1 x 1 = 1 | −1 |

128 + 16 − 1 = 143.

## The base calculator

The base is found without arithmetic, in two steps:

- `priority_encoder` gives the index of the most significant 1. For
  `00110110` the index is `101`.
- `decoder` turns the index back into a one-hot word: `00100000`.

A single enable drives both. In the chain it is "this stage still has work
to do", so stages past the end of the recursion keep their base logic idle.
`base_calculator` stops at the MSB power. The doubling by the second MSB (step
3 above) is done in `recursion_stage`: it is one AND-reduction of the operand
with the base shifted right by one. The doubled base can be `2**WIDTH`, so
bases and differences are one bit wider inside the stage.

## Merging the partial results

`result_accumulator` adds every stage's partial result, shifted left by its
base exponent and added or subtracted according to its sign, and then the
final product. Because the partial results overlap, the low `log2 B` bits of
each land in the product directly. Its upper bits act as carries into the
sum of the earlier, more significant partial results.

The sum is done in `2·WIDTH + 4` bits. The result is always a non-negative
number below `2**(2·WIDTH)`, and an assertion checks this. The registered
output keeps the low `2·WIDTH` bits.

## Top level: `vedic_multiplier`

```
 x1,x2 ─► [strip signs] ─► stage 1 ─► stage 2 ─► … ─► stage S ─► final_product
                │             │ P,shift,sign │            │               │
                │             ▼              ▼            ▼               ▼
                │          ┌──────────────── result_accumulator ─────────────┐
                └─ EX-OR ─►│             (sum, register)                     │─► product
                           └─────────────────────────────────────────────────┘
```

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous reset, active low |
| `in_valid` | in | 1 | `x1`, `x2`, `signed_mode` hold an operation this cycle |
| `signed_mode` | in | 1 | 0: unsigned operands; 1: sign-magnitude operands, MSB = sign (1 = negative) |
| `x1`, `x2` | in | `WIDTH` | operands |
| `out_valid` | out | 1 | `product` and `recursions` are new |
| `product` | out | `2·WIDTH` | product; in signed mode, bit `2·WIDTH-1` is the sign and the bits below are the magnitude |
| `recursions` | out | `clog2(S+1)` | how many stages did a recursion for this operation |

Parameter: `WIDTH` (default 8). The stage count `S = ceil(WIDTH/2)` follows from it.

**Timing.** The whole chain is combinational. The only register is at the
output. An operation presented with `in_valid` at one clock edge has its
result at the next edge, with `out_valid` high. A new operation can be
presented every cycle. When `in_valid` is low, `product` holds its last
value and `out_valid` drops.

**Signed mode.** The two sign bits are EX-ORed. The `WIDTH-1`-bit
magnitudes are multiplied. A zero product keeps the EX-OR of the signs, so
`-0` can appear.

**Cost at WIDTH = 8.** After coarse synthesis the top is about 245
word-level cells and 22 flip-flops. The chain of four stages is the critical
path. Each stage has a comparator, the priority encoder and decoder, two
subtractors, an adder and absolute-value logic.

## Recursion counts

How many recursions an operation takes is a property of the smaller
operand's bit pattern. Write `f(b)` for the number of `b`-bit values that
need the worst-case count. The published recurrence is:

- `f(1) = f(2) = 0`, `f(3) = 1`, `f(4) = 5`;
- `f(b) = 2 f(b-2)` for odd `b > 3`;
- `f(b) = 2 f(b-2) + f(b-1)` for even `b > 4`.

`tb_recursion_stats` squares every `n` from 0 to 127 on the hardware and
reads `recursions`. It gets worst cases of 0, 1, 2, 2, 3, 3, 4 for
`b = 1..7`, and `f(3..7) = 1, 5, 2, 12, 4`, which agrees with the recurrence.
For `b = 1, 2` the published value 0 is read as "no value needs more than one
decomposition". That is what the hardware shows. `f` comes out at 1 and 5
only with the nearest-power base rule. With the plain MSB base, every value
of the form `11…1` would be the unique worst case, at `b - 1` recursions.

## Where this departs from the published description, and what it adds

- **Base rule.** The algorithm rounds the base by the second MSB. The base-
  calculator circuit alone yields the MSB power: its own example maps
  `00110110` to `00100000`, although the second MSB of that operand is 1.
  This RTL keeps the circuit as drawn and adds the rounding in the stage.
  Only the rounded rule meets the `ceil(b/2)` bound and the recursion
  statistics.
- **Sign coding.** The signed extension is described with "1 = positive, 0 =
  negative" and an EX-OR of the sign bits. With that coding the EX-OR gives
  the wrong sign, so the usual coding (1 = negative) is used.
- **Negative differences** are held as magnitude plus sign. The description
  shows a negative product of differences being subtracted, but not how
  hardware holds one.
- **Own choices:** the number of stages (`ceil(WIDTH/2)`), the single-cycle
  combinational chain with one output register, the `in_valid`/`out_valid`
  handshake, synchronous reset, the sign-magnitude port format, and the
  `recursions` output.
- **Not built:** use in a multiprocessor system, which the description
  mentions only as a target.

## Files

| file | block |
|---|---|
| `rtl/vedic_pkg.sv` | stage count and exponent widths as functions of `WIDTH` |
| `rtl/priority_encoder.sv` | index of the highest 1, with enable |
| `rtl/decoder.sv` | index to one-hot, with enable |
| `rtl/base_calculator.sv` | encoder + decoder: MSB power of the operand |
| `rtl/sign_unit.sv` | EX-OR of two sign bits |
| `rtl/recursion_stage.sv` | one recursion: select smaller, base, differences, partial result, sign |
| `rtl/final_product.sv` | product when one factor is 0 or 1 |
| `rtl/result_accumulator.sv` | shifted, signed sum of the partial results; output register |
| `rtl/vedic_multiplier.sv` | top: the chain and the accumulator |

Every block has a self-checking testbench `tb/tb_<block>.sv`. In addition:

- `tb/tb_vedic_multiplier.sv` multiplies every pair of 8-bit operands in
  both modes at the default size, one per cycle with idle cycles mixed in.
  It checks each product, the recursion count and the one-cycle latency. It
  also counts the design's mechanisms: rounded and unrounded bases, negative
  differences, operand swap, 0 and 1 operands, the four-recursion worst case,
  negative signed results and idle cycles. Any mechanism that never occurs
  counts as a failure.
- `tb/tb_vedic_multiplier_wide.sv` does the same with random operands at
  `WIDTH = 16`.
- `tb/tb_recursion_stats.sv` covers the recursion counts above.

Each testbench prints `TB_RESULT checks=N failures=M` at the end.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/vedic_pkg.sv tb/tb_vedic_multiplier.sv --top-module tb_vedic_multiplier
./obj_dir/Vtb_vedic_multiplier
```

Replace the testbench name to run another. The package must come first on
the command line; the tool finds the other modules in `rtl/` by name.

To build a different width, set `WIDTH` on `vedic_multiplier`. The stage
count follows from it automatically. `tb_vedic_multiplier_wide.sv` shows a
16-bit instance.
