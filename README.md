# HOAA processing engine: a hybrid overestimating approximate adder and the PE built on it

A DNN processing engine (PE) keeps needing "add one": the +1 of a two's
complement subtraction (a - b = a + ~b + 1), the increment of a
round-to-nearest-even requantisation, and the many subtractions inside a
CORDIC that evaluates sigmoid or tanh. Done exactly, each +1 is either a second
pass through the adder (a cycle) or a second adder (area).

The idea here is to fold the +1 into the adder that is already there. The
least significant cell of a ripple-carry adder is given a second,
run-time-selectable form: the **Plus One Adder (P1A)**, a 3-gate cell that
produces an approximation of `a + b + cin + 1` in two output bits. With the
select signal `comp_en` low the adder is an ordinary exact ripple-carry adder.
With it high the same pass adds the excess one. The adder is therefore a
**Hybrid Overestimating Approximate Adder (HOAA)**. It is exact in one mode.
In the other mode it is at most one LSB below the exact `a + b + cin + 1`.

This repository gives SystemVerilog for the P1A and HOAA and for a PE that
uses the HOAA in three places. The PE is an input/weight multiply-accumulate
with a bias-preloaded accumulator, followed by ties-to-even rounding and a
configurable sigmoid/tanh activation function built on hyperbolic CORDIC.

## 1. The Plus One Adder cell (`rtl/p1a.sv`)

    sum  = a | ~(b ^ cin)
    cout = b | cin

| a b cin | exact a+b+cin+1 | P1A {cout,sum} | error |
|---------|-----------------|----------------|-------|
| 0 0 0   | 1               | 01 = 1         |       |
| 0 0 1   | 2               | 10 = 2         |       |
| 0 1 0   | 2               | 10 = 2         |       |
| 0 1 1   | 3               | 11 = 3         |       |
| 1 0 0   | 2               | 01 = 1         | -1    |
| 1 0 1   | 3               | 11 = 3         |       |
| 1 1 0   | 3               | 11 = 3         |       |
| 1 1 1   | 4               | 11 = 3         | -1    |

Row 111 cannot be exact, because a 2-bit output cannot hold 4. Row 100 is the
price of the cheap sum equation. Those two rows are the only source of error
in the whole design. In them the P1A is one unit low, so the HOAA "+1" mode
returns either the exact `a + b + cin + 1` or `a + b + cin`, never anything
else. The full adder it sits beside (`rtl/full_adder.sv`) is the textbook cell:
`sum = a^b^cin`, `cout = ab + cin(a^b)`.

## 2. The hybrid adder (`rtl/hoaa.sv`)

`hoaa #(WIDTH, M)` is a WIDTH-bit ripple-carry chain. Each of the M least
significant positions holds a full adder *and* a P1A fed with the same `a`,
`b` and carry-in. `comp_en` selects which cell's sum and carry go on. The
other positions are plain full adders.

- `comp_en = 0`: `{cout, sum} = a + b + cin`, exact.
- `comp_en = 1`, M = 1 (the default): `a + b + cin + 1`, or one less when the
  LSB cell sees (1,0,0) or (1,1,1).
- M > 1 puts a P1A at each of the M low positions, so each adds its own
  excess one (`2^M - 1` in total). This is kept only as a parameter for
  exploring where the approximate cells go; nothing in the PE uses it.

What that error looks like in use, measured by `tb/tb_error_metrics.sv` on
uniformly random operands:

| use | how the +1 is formed | wrong when | mean error |
|-----|----------------------|------------|------------|
| 8-bit subtraction `a - b` | `a + ~b`, `comp_en = 1` | LSB of a is 1 and LSB of b is 1 (row 100) | 0.25 LSB |
| ties-to-even increment | `kept + 0`, `comp_en = round_up` | increment wanted and kept part odd | 0.25 LSB |

In both cases the error is one LSB, a quarter of the time. Divided by 1024,
that mean error gives 0.0244%. This matches the NMED the source analysis
reports for its 8-bit subtraction and rounding cases (0.02444% and 0.02406%).

The cell is called "overestimating" because it adds one more than the plain
sum. Its errors make it fall short of the intended `+1` result; it never
overshoots.

`comp_en` is an input. The source derives it with a gate on the two operands'
MSBs, but it does not give that gate's function, so here every user of the
adder drives `comp_en` with the operation that needs the increment. The
source's text calls the cell the P1A alternates with a half adder, while its
adder drawing shows a full adder. The full adder is used here, which keeps a
carry input at the LSB.

## 3. Where the PE uses the HOAA (`rtl/hoaa_pe.sv`)

    in_data -> [reg] --\
                        (x) -> HOAA add/sub -> [acc reg] -> round-to-even -> activation -> pe_out
    w_data  -> [reg] --/            ^              |        (HOAA increment)  (CORDIC with
                                    +--------------+                            HOAA add/sub)

1. **MAC subtraction** (`rtl/hoaa_mac.sv`). `acc - p` is computed as
   `acc + ~p` with `comp_en = sub`. Addition and subtraction both take one
   cycle through the same 24-bit adder.
2. **Rounding** (`rtl/round_even.sv`). The accumulator drops 2 fraction bits.
   The kept part goes through an HOAA with `b = 0` and `comp_en = round_up`,
   where `round_up = guard & (sticky | kept[0])`. Because the P1A with
   `b = 0` just forces the LSB to 1, an odd kept part that should round up
   stays where it is. A tie then rounds to the odd neighbour below, and a
   value above half rounds down. This is the documented approximation, and
   the testbenches expect exactly this. The result saturates to 16 bits.
3. **CORDIC** (`rtl/cordic_hyp.sv`). Every micro-rotation subtracts on one of
   x, y or z. Each of the three updates is one HOAA, with `comp_en` set when
   that update is a subtraction.

The two adders of the activation function that form `e^z = cosh + sinh` and
`1 + e^z` are also HOAA instances, but they run in exact mode. The 1.0 is fed
in as an operand. If a P1A at the 1.0 bit were fed `b = 0`, it would lose the
increment whenever the integer part of `e^z` is odd, and the sigmoid would be
unusable.

## 4. Number formats and data path

None of these widths come from the source. They were chosen so that the data
path is consistent end to end:

| signal | width | format |
|--------|-------|--------|
| `in_data`, `w_data` | 8 | signed Q1.7 |
| product | 16 | Q2.14 |
| `acc`, `bias` | 24 | Q10.14 |
| `acc_rounded`, AF input and output, `pe_out` | 16 | signed Q4.12 |

The rounding shift is `2*(DATA_W-1) - AF_FRAC` = 2. Change `DATA_W` and
`AF_FRAC` together.

## 5. The activation function (`rtl/act_func.sv`, `rtl/cordic_hyp.sv`, `rtl/af_divider.sv`)

- The CORDIC starts from `x0 = 1/K_h = 1.2075`, `y0 = 0`, `z0 = z`. The PE
  ties these constants. It performs 13 micro-rotations with shifts
  1, 2, 3, 4, 4, 5, ..., 12; the repeated 4 is needed for hyperbolic
  convergence. This leaves `x = cosh z` and `y = sinh z`. The angles
  `atanh(2^-i)` and `1/K_h` are stored once in Q2.30 in `rtl/hoaa_pkg.sv` and
  rounded to the working precision.
- `af_sel = 1` (tanh) passes `sinh` and `cosh` to the divider. `af_sel = 0`
  (sigmoid) passes `e^z` and `1 + e^z`.
- The divider is a restoring divider that produces one quotient bit per cycle
  (13 cycles), with sign-magnitude handling of a negative numerator. Its
  result truncates toward zero.
- **Range.** Plain hyperbolic CORDIC converges only for |z| up to the sum of
  its angles, 1.118. The input is clamped to +-1.117 (`cordic_zmax()`), so
  the outputs saturate:
  - tanh saturates at +-0.807.
  - sigmoid saturates at 0.246 and 0.754.

  There is no range extension. This is the largest functional limitation of
  the PE.
- **Accuracy.** Against real arithmetic the output is within 8 LSB of 2^-12
  on every tested input, and the mean error is 1.6 LSB.

## 6. Interface and timing of the PE

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `in_valid`, `in_data`, `w_data`, `sub` | in | one MAC term: `acc += in*w` (or `-=` when `sub`) |
| `bias_load`, `bias` | in | `acc <= bias` |
| `in_fwd`, `w_fwd` | out | operand registers, for chaining PEs in an array |
| `acc` | out | accumulator |
| `acc_rounded`, `rnd_up`, `rnd_sat` | out | rounding result and its flags (combinational from `acc`) |
| `af_start`, `af_sel` | in | run the AF on `acc_rounded`; 1 = tanh, 0 = sigmoid |
| `af_busy`, `pe_out_valid`, `pe_out` | out | AF status; one-cycle valid pulse with the result |

- A MAC term sampled at edge t reaches `acc` at edge t+2.
- `bias_load` takes effect at the next edge and wins over a MAC term landing
  at the same edge.
- `af_start` is accepted only while `af_busy` is low; a start while busy is
  ignored. `acc_rounded` and `af_sel` are captured at that edge, and
  `pe_out_valid` pulses 27 edges later:
  - 13 CORDIC edges,
  - 1 edge for the handover to the divider,
  - 13 divider edges.
- The accumulator wraps on overflow. Only the rounding stage saturates.

## 7. How this relates to the source, and what is left out

These parts follow the source:
- the P1A equations and truth table,
- the FA/P1A chain with a run-time select,
- the PE chain: operand registers, multiplier, HOAA add/sub, bias-preloaded
  accumulator, bit rounding, sigmoid/tanh activation,
- the activation structure: CORDIC, e^z adder, 1 + e^z adder, two 2:1
  multiplexers on AF_sel, divider,
- ties-to-even rounding,
- the use of the P1A's +1 for subtraction, rounding and CORDIC.

These are this design's own choices:
- all widths and formats,
- every handshake and latency,
- reset,
- `comp_en` as a port rather than a gate on the operand MSBs,
- the polarity of `af_sel`,
- the CORDIC schedule and the input clamp,
- the divider algorithm,
- the constant 1.0 operand of the `1 + e^z` adder,
- saturation in the rounding stage.

Not included:
- **The systolic array around the PE.** The array, its control engine and its
  input, weight and output buffers are named in the source but not specified,
  so they are not built. The PE's forwarding ports are where an array would
  connect.
- **Power gating** of the idle P1A and adders. It has no logic function, so
  both FA and P1A are always present and a multiplexer selects between them.
- **ReLU.** It is mentioned only as a common PE activation; this PE's
  activation offers sigmoid and tanh.
- **The accurate +1 cell.** The source also states an exact +1 cell, which it
  rejects. It is not built, and its published equations do not agree with its
  own truth table for a = b = cin = 1.

## 8. Simulating

Every testbench is self-checking. Each one ends with
`TB_RESULT checks=N failures=M` and has a watchdog. With plain Verilator 5,
from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing -Wno-fatal -y rtl -y tb \
        rtl/hoaa_pkg.sv tb/hoaa_ref_pkg.sv tb/tb_hoaa_pe.sv --top-module tb_hoaa_pe
    ./obj_dir/Vtb_hoaa_pe

To run another testbench, substitute its name; all of them finish in
seconds.

| testbench | what it checks |
|-----------|----------------|
| `tb_full_adder`, `tb_p1a` | all 8 rows; P1A wrong exactly on rows 100 and 111 |
| `tb_hoaa` | all 8-bit operand pairs in both modes against a bit-serial truth-table model (`tb/hoaa_ref_pkg.sv`); an M = 2 instance on random operands |
| `tb_hoaa_mac` | cycle-by-cycle accumulator against a reference, including approximate subtractions, bias preloads and forwarding |
| `tb_round_even` | ties (odd and even), above and below half, negatives, saturation, random values |
| `tb_cordic_hyp` | cosh and sinh within 12 LSB over the convergence range, swapped x0/y0, 13-cycle latency |
| `tb_af_divider` | exact truncated quotient, 13-cycle latency |
| `tb_act_func` | sigmoid and tanh within 12 LSB, clamping, 27-cycle latency, start ignored while busy |
| `tb_hoaa_pe` | end to end at default parameters, 300 bias + MAC + rounding + activation rounds; counts and requires every mechanism (add, subtract, subtract one low, bias load, rounding increment, increment absorbed by the P1A, saturation, sigmoid, tanh, clamp, start while busy) |
| `tb_error_metrics` | Monte Carlo error metrics for subtraction, rounding and activation (Section 2 table) |

The reference models in the testbenches are written independently of the
RTL:
- the HOAA model uses the truth table and integer addition;
- the activation checks use the simulator's real-valued `$sinh`, `$cosh`,
  `$tanh` and `$exp`.
