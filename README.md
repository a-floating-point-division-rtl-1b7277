# Taylor-series floating-point divider on iterative logarithmic multipliers

This is synthesizable SystemVerilog for an IEEE-754 double-precision divider
that never divides. It computes the reciprocal of the divisor's significand
with a short Taylor series and then multiplies. Every multiplication in the
series is done by an *iterative logarithmic multiplier* (ILM), which is
especially cheap when it squares a number. The powers are therefore scheduled
so that half of them are squares.

The architecture follows the paper "A floating point division unit based on
Taylor-Series expansion algorithm and Iterative Logarithmic Multiplier"
(Karani, Rana, Reshamwala, Saldanha). The paper gives the algorithm, the
segment table, the multiplier and squarer datapaths, and the powering
schedule. Word widths, the handshake, sequencing, the IEEE-754 packing and
some glue are choices made here. Each choice is listed under "Where this RTL
departs from or adds to the paper".

## The idea in four lines

For a significand `x` in [1, 2) and any first guess `y0 ~ 1/x`, let
`m = 1 - x*y0`. Then, exactly,

    1/x = y0 / (1 - m) = y0 * (1 + m + m^2 + m^3 + ...)

If `|m|` is around 2^-9, then five powers (`m^1 .. m^5`) leave an error of
about `m^6 ~ 2^-53`. That is the precision of a binary64 significand. The
whole design aims at three things:

1. making `m` that small cheaply: a piecewise-linear first guess;
2. computing `m^2 .. m^5` cheaply: an ILM-based multiplier and squarer
   working in parallel;
3. summing the terms and multiplying by the dividend.

## Data flow

```
 b ──► pla_unit ──y0────────────────────────────┐
        │  (segment select, y0 = C0 - C1*x,      │
        │   m = 1 - x*y0)                         ▼
        └──m──► powering_unit ──term (2 powers)──► accumulator ──1/x──► ilm_multiplier ──► round/pack ──► q
                 ├ cached_multiplier  (odd powers)      (y0 + y0*S)       (sig(a) * 1/x)
                 ├ squaring_unit      (even powers)
                 ├ pow_cache          (leading-one chain of m)
                 └ adder              (odd + even)
 a ─────────────────────────────────────────────────────────────────────────┘ (significand, exponent)
```

`fp_divider` is the top and sequences these units one after another. It
handles one division at a time.

## Piecewise-linear first guess (`pla_unit`)

On a segment [a, b] the best straight line to 1/x, in the sense of least
integrated error, is the tangent at the midpoint:

    y0(x) = 4/(a+b) - 4x/(a+b)^2,      m(x) = 1 - x*y0 = ((a+b-2x)/(a+b))^2 >= 0

`m` is zero at the midpoint and largest at the two segment ends. The paper
sizes the segments so that, after five Taylor terms, the error bound at each
segment's worst point is 2^-53. This gives eight segments:

| segment | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| start | 1 | 1.09811 | 1.20835 | 1.3269 | 1.45709 | 1.59866 | 1.75616 | 1.92922 |
| end   | 1.09811 | 1.20835 | 1.3269 | 1.45709 | 1.59866 | 1.75616 | 1.92922 | 2.12392 |

The last segment is sized as if it continued past 2. Only [1.92922, 2) is
ever used.

The hardware has three parts:

- seven comparators pick the segment;
- a multiplexer selects the two constants of that segment;
- one multiplier and subtractor form `y0 = C0 - C1*x`, and a second pair
  forms `m = 1 - x*y0`.

The constants are not typed in. `fpdiv_pkg` derives them at elaboration from
the boundary list. The boundaries are stored as integers in units of 10^-5,
and the constants use 64 fraction bits:

    C0 = floor(4 / (a+b) * 2^64)        C1 = ceil(4 / (a+b)^2 * 2^64)

Rounding C0 down and C1 up keeps `y0` at or below the tangent, and so below
1/x. As a result, `m` is never negative, and every later stage only
truncates, never wraps. The largest `m` seen in the tests is 0.0023
(about 2^-8.8).

## Iterative logarithmic multiplication (`lod`, `ilm_multiplier`)

Write each operand as its leading one plus a residue, `N = 2^k + R`. Then

    N1*N2 = 2^(k1+k2) + 2^k2*R1 + 2^k1*R2   +   R1*R2
            \_______ P_approx (shifts and adds) _/    \_ error, again a product

The error term is itself a product of two smaller numbers. The unit
therefore applies the same step to `(R1, R2)`, one step per clock, and adds
each `P_approx` into a running sum. Each step removes one set bit from each
operand. When either residue is zero the sum is exact, which takes
`min(popcount(N1), popcount(N2))` clocks.

Each step uses one copy of the classic ILM datapath:

- a leading-one detector per operand (`lod`): a priority encoder, a shifter
  that makes `2^k`, and NOT plus AND to clear the leading bit;
- two shifters for the residues;
- an adder for `k1 + k2`, and a decoder that turns it into `2^(k1+k2)`;
- adders for the sum.

`MAX_ITERS > 0` stops the loop early and gives the approximate product. This
is the accuracy/speed knob of the ILM. The divider always uses exact mode.

## Squaring (`squaring_unit`)

With a single operand the identity becomes

    N^2 = 4^k + 2^(k+1)*R + R^2

This needs one leading-one detector instead of two, no decoder (`4^k` is
just `1 << 2k`), and only one shifter path. One stage is reused every clock
until `R` is zero, so the square is exact after `popcount(N)` clocks.

The squarer also outputs, stage by stage, the `(k, R)` pair it found. That
sequence, the *leading-one chain* of the operand, is what makes the cache
below work.

## The powering unit (`powering_unit`, `cached_multiplier`, `pow_cache`)

The schedule follows the rule "square whenever possible". An even power is
the square of a lower power. An odd power is `m` times the previous even
power. Each step runs one multiplication and one squaring in parallel, and
its adder sums the two results. So each step delivers two Taylor terms:

| step | multiplier (odd) | squarer (even) | adder output |
|---|---|---|---|
| 1 | – (`m` itself) | `m^2 = (m)^2`, chain of `m` written to the cache | `m + m^2` |
| 2 | `m^3 = m * m^2` | `m^4 = (m^2)^2` | `m^3 + m^4` |
| 3 | `m^5 = m * m^4` | (`m^6` not needed) | `m^5` |
| j | `m^(2j-1) = m * m^(2j-2)` | `m^(2j) = (m^j)^2` | sum |

The default, `N_TERMS = 5`, uses three steps. Any `N_TERMS` works. The tests
also run 12, the schedule drawn in the paper.

**The cache.** Every odd power multiplies by the same `m`. The multiplier's
`m` side would recompute the same chain of leading ones and residues every
time. Instead, the squarer's chain for `m` (from step 1) is stored in
`pow_cache`, one entry per ILM step. `cached_multiplier` reads entry *i* in
its step *i*. It therefore has a single leading-one detector, on its other
operand. It stops when the chain ends or the other residue is zero.

**Reusing chains of even powers.** A second kind of reuse starts at `m^8`.
Take `m^8 = (m^4)^2`. Its base `m^4` already went through the multiplier's
detector one step earlier, as the factor of `m^5 = m * m^4`.

- The multiplier therefore outputs the chain it finds for its operand.
- When that operand will later be squared, its chain is kept in a chain
  slot.
- The squarer then reads the slot instead of running its own detector.

The multiplier stops at the shorter of the two chains, so a kept chain may
be incomplete. In that case the squarer's detector finishes the remaining
stages.

`m^4 = (m^2)^2` cannot reuse a chain in this way, because `m^2` enters the
multiplier in the same step. There are `N_TERMS/4 - 1` slots: none at the
default of five terms, and two (for `m^4` and `m^6`) at twelve. The numbers
are the same either way; only the source of `k` and `R` changes. The output
`reused` counts how many squarer stages were fed from slots.

All powers are unsigned fractions with 64 fraction bits. Each product keeps
the upper 64 bits of its 128-bit result. A register file in the control logic
holds the powers already formed.

## Accumulator and final multiplication

The `accumulator` is loaded with `y0`, and clears its sum `S`. It then adds
each step's output into `S`. At the end it forms

    1/x ~ y0 + y0*S        (= y0 * (1 + m + ... + m^5))

with its own ILM multiplier. The result has one integer bit and 64 fraction
bits. A last `ilm_multiplier` (65 bits wide) multiplies the dividend's
significand by it. The result is a 116-fraction-bit quotient of significands
in (0.5, 2).

## IEEE-754 wrapper (`fp_divider`)

**Exponent and normalisation.** The exponent is `ea - eb + 1023`. If the
quotient of significands is below 1, it is shifted left once and the exponent
is decremented. The 52-bit fraction is rounded to nearest, ties to even,
using a guard bit and a sticky OR of the rest. A rounding carry to 2.0 bumps
the exponent.

**Special values:**

- NaN in, 0/0 or inf/inf: quiet NaN `7FF8_0000_0000_0000`;
- x/0 and inf/x: signed infinity;
- 0/x and x/inf: signed zero.

**Subnormals.** Subnormal inputs count as zero, and results below the normal
range flush to signed zero. Overflow gives infinity. There are no exception
flags.

## Accuracy

The series is cut after `m^5`. Its truncation error, about `m^6`, reaches
2^-52.6 at the worst segment ends. The paper's bound claims 2^-53. Against
the exact reciprocal, the measured worst cases are:

| Taylor terms | worst correct bits of 1/x |
|---|---|
| 3 | 35.1 |
| 5 (default) | 52.6 |
| 7 | 61.3 (limited by the 64-bit fractions) |

So the quotient is not always correctly rounded. In the end-to-end test, 304
of 339 random and directed quotients match IEEE-754 round-to-nearest exactly
and 35 are one unit in the last place off. None is further off. With
`N_TERMS = 12`, 199 of 200 random quotients were correctly rounded. The cost is six powering steps instead of three.

## Timing

Every ILM-based unit takes one clock per set bit of its smaller operand, so
latency depends on the data. For a normal division the sequence is:

- 1 clock to latch the operands;
- 1 clock for `pla_unit`, 1 clock to start the powering unit;
- three powering steps: `popcount(m)` clocks for step 1, then the slower of
  the multiplier and the squarer for each later step;
- the accumulator's `y0*S` multiplication;
- the final multiplication (at most 53 clocks);
- 1 clock to round and 1 clock to signal `done`.

The longest division seen in the tests took 158 clocks from `start` to
`done`. Special operands finish in 2 clocks. The design is not pipelined: a
new division can start only when `busy` is low.

**Interface.** `clk` and `rst_n` (asynchronous, active low). Pulse `start`
with `a` and `b` while `busy` is low. `done` pulses for one clock with `q`
valid. `q` holds until the next division.

**Parameters of `fp_divider`:**

- `N_TERMS` (default 5): the highest power of `m`;
- `F` (default 64): fraction bits of the fixed-point datapath.

The segment table is fixed: it was derived for five terms.

## Where this RTL departs from or adds to the paper

- **Word widths, fixed-point formats, reset and handshake.** The paper gives
  none; they are chosen here.
- **Sequencing.** Each ILM or squaring *step* of the paper is one clock here,
  on one reused copy of the datapath. A "cycle" of the powering unit (one odd
  and one even power) therefore lasts several clocks.
- **The `4^k` term of the squarer.** The text writes it as `(100)_2 << k` and
  the figure feeds `(10)_2` to a shifter. Neither equals `4^k`. The RTL uses
  `1 << 2k`, which is what the squaring identity needs.
- **Contents of the cache.** The paper says the priority-encoder and LOD
  values of `m` are cached. Here the whole chain (one pair per ILM step) is
  stored, because the multiplier needs the `m`-side values in every step.
- **Reuse of cached data for even bases.** The paper's rule ("if the base's
  index is even, use cached values") would, taken literally, also apply to
  `m^4`. Its schedule drawing shows `m^4` computed with a priority encoder
  instead. The RTL follows the drawing, so reuse starts at `m^8`. The
  organisation into chain slots is this design's own.
- **Where `m` and the `y0` scaling are formed.** The paper's system diagram
  shows neither where `m = 1 - x*y0` is formed nor where the sum is
  multiplied by `y0`. Here `pla_unit` forms `m` (with plain multipliers by
  its coefficients), and the accumulator scales by `y0` with an ILM.
- **Final multiplier type.** It is an ILM; the paper does not say.
- **IEEE-754 details.** Rounding, special values and flush-to-zero are added
  here.
- **No pipelining.** The paper mentions pipelining only as a possible
  improvement.

## Files

`rtl/` holds one module or package per file:

| file | content |
|---|---|
| `fpdiv_pkg.sv` | widths, binary64 struct, Table I boundaries, constant functions for the segment constants |
| `lod.sv` | leading-one detector |
| `ilm_multiplier.sv` | iterative logarithmic multiplier |
| `squaring_unit.sv` | ILM squarer with chain output |
| `pow_cache.sv` | leading-one chain cache |
| `cached_multiplier.sv` | ILM multiplier with the `m` side from the cache |
| `powering_unit.sv` | power schedule, control, chain slots, adder |
| `pla_unit.sv` | piecewise-linear first guess and `m` |
| `accumulator.sv` | Taylor sum and `y0` scaling |
| `fp_divider.sv` | top: IEEE-754 binary64 divider |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`), plus
two more:

- `tb_recip_precision.sv` measures the reciprocal precision for 3, 5 and 7
  terms;
- `tb_fp_divider_terms.sv` runs the whole divider with twelve terms, which
  exercises the chain-slot reuse. Each testbench prints `TB_RESULT checks=N failures=M` and
stops.

Reference values come from plain 128-bit integer arithmetic or from the
simulator's own IEEE-754 `real` division, never from the unit under test.
`tb_fp_divider` runs the top at its default parameters. It checks:

- about 340 divisions;
- exactly three powering steps per division;
- that each mechanism occurs at least once: all eight segments,
  normalisation, rounding up, overflow, underflow, NaN, infinity and zero.

To simulate, for example the top:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_fp_divider \
        rtl/fpdiv_pkg.sv rtl/*.sv tb/tb_fp_divider.sv
    ./obj_dir/Vtb_fp_divider

Replace the top module and testbench file to run any other testbench. Each
runs in well under a second.
