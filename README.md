# A run-time reconfigurable multi-precision floating point multiplier

Many applications that multiply floating point numbers do not need all 53
significant bits of IEEE double precision. In those cases a full 53 x 53
significand multiplier is wasted area, delay and switching power. This design
is a double-precision multiplier whose precision is chosen per operation. Each
operand carries a small mode field, and the mode picks one of five
fixed-precision multiplier units, with 8, 16, 23, 36 or 52-bit mantissas. An
automatic mode looks at the operands and picks the narrowest unit that holds
them. Only the selected unit sees the operands; the others stay still.

The mantissa multipliers combine two classic methods. The Karatsuba algorithm
replaces one wide multiplication by three half-width ones. The
Urdhva-Tiryagbhyam ("vertically and crosswise") column method multiplies the
pieces of 8 bits or less at the bottom of the recursion.

The RTL is synthesizable SystemVerilog (IEEE 1800-2017) in `rtl/`. Each
module has a self-checking testbench in `tb/`.

## Operands, modes and outputs

Each of the two inputs `a` and `b` is 67 bits wide:

| bits   | 66..64      | 63   | 62..52          | 51..0            |
|--------|-------------|------|-----------------|------------------|
| field  | mode select | sign | exponent (bias 1023) | mantissa (fraction) |

Below the mode field is an ordinary IEEE-754 double. The mode codes are:

| code | mode | mantissa bits used | significand multiplier |
|------|------|--------------------|------------------------|
| 000  | 1, automatic | chosen from the operands | (one of the below) |
| 001  | 2    | 8                  | 9 x 9                  |
| 010  | 3    | 16                 | 17 x 17                |
| 011  | 4    | 23 (single-precision mantissa) | 24 x 24    |
| 100  | 5    | 36                 | 37 x 37                |
| 101  | 6    | 52 (full double)   | 53 x 53                |

Both operands must carry the same code. If the codes differ, `mode_error` is
raised and nothing is computed. The same happens for the unused codes 110 and
111.

The result `product` is a 64-bit double. In modes 2 to 5 only the top 8, 16,
23 or 36 bits of its mantissa field can be nonzero. Four flags classify the
result: `zero`, `infinity`, `nan` and `denormal`. `active_mode` reports the
mode code that was actually used, which is how auto mode's choice can be seen.

## Data flow

```
 a,b (67) ──► input_registers ──► mode fields ──► mode_select ──► mode, unit_en, mode_error
                  (ready)     └─► 64-bit words ─► trunc_round (rounds to the mode's width)
                                                        │
                                                        ▼
                                           fp_multiplier_bank
                          ┌───────────┬───────────┬───────────┬───────────┐
                          fp_mult 8   fp_mult 16  fp_mult 23  fp_mult 36  fp_mult 52
                          (only the unit selected by unit_en receives operands)
                                                        │
                                                        ▼
                                  output register ──► product, flags, done, mode_error
```

Each `fp_multiplier` unit is the textbook floating point multiplier:

```
 sign_a, sign_b ──► sign_calc (XOR) ─────────────────────────────┐
 exp_a, exp_b ────► exponent_adder (exp_a + exp_b - 1023) ──┐     │
 1.man_a, 1.man_b ► karatsuba_mult (significand product) ───┴► normalizer ──► exception_flags
```

## Timing

There is one clock, `clk`, and one asynchronous active-high reset, `rst`,
which clears every register.

* Drive `a`, `b` and `ready = 1` before a rising edge. At that edge (edge *k*)
  the input registers capture the operands.
* The whole datapath between the input and output registers is
  combinational: mode decoding, rounding and one floating point unit.
* At edge *k+1* the output registers take the result. `done` is high for the
  clock cycle that follows.
* `ready` may be high on every cycle, so one operation can start per clock.
  Each result appears exactly one cycle after its operands were loaded.
* A mode error at edge *k* makes `mode_error` high after edge *k+1*. In that
  case `done` stays low, and `product`, the flags and `active_mode` keep the
  values of the last good operation. `mode_error` keeps its value until the
  next operation is loaded.

Nothing is pipelined inside the datapath. The critical path runs through the
53 x 53 multiplier of mode 6, so a clock that suits mode 6 suits every mode.
A narrower mode saves power and finishes sooner within the cycle, but it does
not shorten the latency in cycles.

## Automatic mode

This is the least obvious part of the design. In mode 1, `mode_select`
estimates how many mantissa bits each operand really uses:

1. Scan the 52-bit mantissa from its most significant bit.
2. Find the first 1 that is followed by at least six 0s. Bits past the end
   of the field count as 0s, so the last 1 of a mantissa always qualifies.
3. Call *p* the number of mantissa bits before that 1.
4. The operand needs the 8-bit mode if *p* < 8, the 16-bit mode if *p* < 16,
   the 23-bit mode if *p* < 23, the 36-bit mode if *p* < 36, and the 52-bit
   mode otherwise. An all-zero mantissa needs the 8-bit mode.

The wider of the two operands' needs is used.

Example: mantissa `0x3c40100010000` begins with the bits
`0011 1100 0100 0000 0001`. The 1s at positions 2 to 5 are followed by 1s or
by too few 0s. The 1 at position 9 is followed by nine 0s, so *p* = 9 and the
operand needs the 16-bit mode.

A run of six zeros is taken to mean that what follows is noise. The mantissa
is therefore not guaranteed to be exact in the chosen width. Any 1s after the
run are rounded away by the next stage, just as in a fixed mode.

## Rounding before the multiplication

In modes 2 to 5, `trunc_round` shortens both mantissas to the mode's width
before they reach the multiplier. This keeps the narrow multipliers small.

* Rounding is to nearest, with ties away from zero: the first dropped bit is
  added to the bits that are kept.
* If the kept bits are all ones and round up, they wrap to zero and the
  exponent goes up by one. That is the exact rounded value, and it becomes
  infinity at the top of the range.
* Infinities and NaNs are only truncated. A NaN whose kept bits would all be
  zero keeps its lowest kept bit set, so it stays a NaN.
* Mode 6 passes the operands through unchanged.

The product itself is truncated, not rounded. This is why mode 6 is exact to
within one unit in the last place, but is not IEEE round-to-nearest.

## The significand multiplier

`karatsuba_mult #(N)` multiplies two N-bit unsigned numbers. It is
recursive. For N > 8 it splits each operand into a high part (N - M bits)
and a low part (M = ceil(N/2) bits):

```
X = 2^M X_l + X_r,  Y = 2^M Y_l + Y_r
X*Y = 2^(2M) X_l Y_l + 2^M [ (X_l+X_r)(Y_l+Y_r) - X_l Y_l - X_r Y_r ] + X_r Y_r
```

This needs three sub-multipliers instead of four: `X_l*Y_l` (N-M bits),
`X_r*Y_r` (M bits) and `(X_l+X_r)*(Y_l+Y_r)` (M+1 bits, because the sums
carry one more bit). Each is again a `karatsuba_mult`. The recursion stops at
8 bits or fewer, where `urdhva_mult` takes over.

For the 53-bit significand of mode 6, the widths go 53 → 26/27/28 → 13/14/15
→ 7/8/9 → ..., down to leaves of 4 to 8 bits.

Two details of the adder layout:

* **Subtracter.** The middle term is computed as
  `P_sum + ~P_hh + ~P_ll + 2`. A `carry_save_adder` merges the three words.
  A `carry_select_adder` adds the sum and carry words. One of the two +1s
  enters as that adder's carry in. The other fills the empty least
  significant bit of the shifted carry word.
* **Shift and add.** `X_l*Y_l` and `X_r*Y_r` occupy disjoint bit ranges, so
  placing them is a concatenation. One `carry_select_adder` then adds the
  middle term shifted left by M.

`urdhva_mult #(N)` is the column ("vertically and crosswise") multiplier.
Column *k* gathers every partial product `a[i] & b[j]` with i + j = k:

* Column 0 is a single AND gate and gives `p[0]`.
* Each column from 1 to 2N-2 has one adder. It sums the column's partial
  products and the carry part (all bits above the least significant bit) of
  the previous column's adder.
* Each adder's least significant bit is that column's product bit. The carry
  part of the last adder is `p[2N-1]`.

So a 4 x 4 multiplier has 6 chained adders and an 8 x 8 one has 14. Each
column adder is written as a plain multi-operand sum and left to synthesis.

## Exponent, normalisation and special values

* **Exponent.** `exponent_adder` adds the two exponents with an explicit
  ripple-carry chain. It then subtracts the bias 1023 with a ripple-borrow
  chain. The result is two bits wider than the exponent and signed, so
  overflow and underflow survive to the normalizer.
* **Normalisation.** `normalizer` finds the leading 1 of the 2N-bit
  significand product and moves it to the hidden-bit position. It adds one to
  the exponent per place moved right and subtracts one per place moved left.
  For normal operands this is at most one place right. With a denormal
  operand it can be several places left. The next MW bits become the
  mantissa.
* **Overflow.** An exponent of 2047 or more gives infinity.
* **Underflow.** An exponent of 0 or less shifts the significand right into a
  denormal, or into zero if nothing is left.
* **Denormal inputs.** A denormal operand has hidden bit 0 and counts with
  exponent 1, as in IEEE-754.
* **Special operands.** A NaN operand, or infinity times zero, gives a NaN
  whose mantissa has only its top bit set. Infinity times anything else gives
  infinity. The sign is always the XOR of the operand signs.
* **Flags.** `exception_flags` classifies the final fields:

| flag     | exponent field | mantissa field |
|----------|----------------|----------------|
| zero     | 0              | 0              |
| denormal | 0              | ≠ 0            |
| infinity | all ones       | 0              |
| nan      | all ones       | ≠ 0            |

## Keeping the idle units off

All five units exist in hardware. `unit_en` is one-hot and comes from
`mode_select`. In `fp_multiplier_bank`, each unit's operand inputs are ANDed
with its enable bit, so the four idle units see constant zeros and do not
toggle. This operand isolation is the RTL-level way to keep them off.
Clock or power gating of whole units would be added in the physical flow. An
assertion in the top checks that at most one unit is enabled, and none on a
mode error.

## How this RTL relates to the source description

It follows the published design in these parts:

* the 67-bit operand layout and the mode codes;
* the equal-mode check and its error output;
* the auto-mode rule (a leading 1 followed by six or more zeros, with width
  thresholds);
* rounding before the multiplication, except in mode 6;
* separate multiplier units per mode, with only one active;
* the floating point datapath: XOR sign, ripple-carry exponent addition with
  ripple-borrow bias subtraction, normaliser, and the four exception outputs;
* Karatsuba recursion down to 8-bit Urdhva-Tiryagbhyam multipliers, with
  carry save and carry select adders.

Choices and departures of this implementation:

* **Exponent format.** Every mode uses the double-precision exponent (11
  bits, bias 1023). The source also says the custom formats use a bias of
  127, and it states the exception conditions for an 8-bit exponent (255).
  Both contradict its own double-precision operand words, so the 11-bit
  reading was taken. `fp_multiplier`, `exponent_adder` and `exception_flags`
  take `EW` and `BIAS` parameters, so an 8-bit / 127 variant is a parameter
  change. It has been simulated for `exponent_adder` only. A denormal result
  accordingly means 0.s x 2^-1022, not the single-precision 0.s x 2^-126.
* **Auto mode.** The thresholds of 23 and 36 bits for modes 4 and 5 are
  inferred; the source gives the first two and then says "and so on". Bits
  past the end counting as zeros, and the wider operand deciding, are also
  choices made here.
* **Rounding.** The rounding method (to nearest, ties away from zero) and the
  handling of special values in `trunc_round` are choices made here.
* **No rounding of the product.** Mode 6 does no rounding at all, which is
  why it is less accurate than an IEEE round-to-nearest multiplier.
* **Special operands and underflow.** IEEE-style handling of special operands,
  denormal inputs and gradual underflow was added. The source defines only
  the output flags.
* **Clocking.** The clock, the load-on-`ready` input registers, the output
  register, `done` and `active_mode` are this implementation's interface. The
  source shows `Reset` and `Ready` inputs but no timing.
* **Significand widths.** A mode with an MW-bit mantissa uses an
  (MW+1)-bit significand multiplier. Mode 5 therefore has a 37 x 37
  multiplier, not a 32 x 32 one.
* **Odd-width splits.** How the Karatsuba recursion splits odd widths and
  handles the one-bit-wider sum operands is this implementation's own.

## Files

| file | contents |
|------|----------|
| `rtl/fpmul_pkg.sv` | operand/word structs, mode enum, widths per unit |
| `rtl/reconfig_fp_multiplier.sv` | top level: registers, mode select, rounding, unit bank |
| `rtl/input_registers.sv` | operand registers, load on `ready` |
| `rtl/mode_select.sv` | mode check, decoding, automatic mode, unit enables |
| `rtl/trunc_round.sv` | rounding of both operands to the mode's width |
| `rtl/fp_multiplier_bank.sv` | five units with operand isolation and result select |
| `rtl/fp_multiplier.sv` | one floating point multiplier, mantissa width `MW` |
| `rtl/sign_calc.sv` | sign XOR |
| `rtl/exponent_adder.sv` | ripple-carry add, ripple-borrow bias subtract |
| `rtl/karatsuba_mult.sv` | recursive Karatsuba multiplier |
| `rtl/urdhva_mult.sv` | Urdhva-Tiryagbhyam column multiplier |
| `rtl/carry_select_adder.sv`, `rtl/carry_save_adder.sv` | adders used by the Karatsuba stage |
| `rtl/normalizer.sv` | leading-one alignment, overflow/underflow, truncation |
| `rtl/exception_flags.sv` | zero / infinity / NaN / denormal |
| `tb/fpmul_ref_pkg.sv` | reference arithmetic for the testbenches |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog that counts a failure if the test hangs. With Verilator 5:

```
verilator --binary --timing -y rtl -y tb \
    rtl/fpmul_pkg.sv tb/fpmul_ref_pkg.sv tb/tb_reconfig_fp_multiplier.sv \
    --top-module tb_reconfig_fp_multiplier
./obj_dir/Vtb_reconfig_fp_multiplier
```

Replace the testbench name to run another one. The reference package
`tb/fpmul_ref_pkg.sv` computes expected values from the number values, with
wide integer products, and shares no code with the RTL.

What the testbenches check:

* **End to end.** `tb_reconfig_fp_multiplier` runs 20,000 operations on the
  top level at its default size, in random modes and with random gaps
  between them, back to back included. It checks the product, the flags,
  `active_mode`, `done` and `mode_error` in the exact cycle they are due.
  Coverage counters require that every fixed mode, every auto-mode outcome,
  the mode error, a rounding carry into the exponent, overflow, a denormal
  result, zero, NaN and back-to-back issue each happened at least once.
* **Multipliers.** `tb_urdhva_mult` is exhaustive at 4 x 4 and 8 x 8.
  `tb_karatsuba_mult` checks 53, 32, 24, 16 and 8 bits.
* **Floating point units.** `tb_fp_multiplier` checks the 52-bit and 23-bit
  units against the reference. It also compares exact small products with
  the simulator's own `real` arithmetic.
* **Other blocks.** The remaining testbenches check each block against the
  reference model or against exhaustive or directed cases.

## Changing it

* **Unit widths.** The mantissa widths of the five units live in
  `fpmul_pkg::unit_man_w`. `trunc_round`, `fp_multiplier_bank` and the
  testbench reference all follow them. If you change them, also change the
  auto-mode thresholds in `mode_select` and in `ref_auto_w`.
* **Leaf size.** `karatsuba_mult` takes `LEAF` (default 8), the width at
  which the recursion hands over to `urdhva_mult`. It must be at least 4.
* **Adder blocks.** `carry_select_adder` takes `BLK`, the block width of its
  carry select stages.
* **Pipelining.** The datapath is a single combinational stage. To pipeline
  it, add registers inside `fp_multiplier`, for example after
  `karatsuba_mult`, and delay `done` to match.
