# Direct integer division in a residue number system

This unit divides one integer by another in a residue number system (RNS). It never converts
either number to binary. A value X is held as its residues modulo eighteen pairwise-coprime
moduli, 9 bits each. Addition, subtraction and multiplication then work digit by digit with no
carries. Division is the hard case, because the quotient depends on the magnitude of the whole
number.

The main idea is to **decompose the divisor** into a product of small factors that RNS *can*
divide by exactly. Dividing an RNS value by one of its own moduli, or by a power of a modulus's
base, is cheap (scaling): one digit is used up and every other digit is multiplied by a constant
inverse. To divide X by Y:

1. While the divisor is not 1:
   - scale it by any power of a small base that divides it;
   - if no such power divides it, add 1 to it.
2. Floor-divide the dividend by exactly the same factors.

The product of the factors, Ŷ, is at least Y. So the number left in the dividend register is a
partial quotient Z = ⌊X/Ŷ⌋ ≤ ⌊X/Y⌋. It is added to an accumulator ACCUM. The dividend register is
then reloaded with X − ACCUM·Y, the divisor with Y again, and the process repeats.

When a pass ends with the dividend already zero, ACCUM is at most one short of ⌊X/Y⌋. A single
magnitude comparison of the last value X − ACCUM·Y against Y settles this: if it is not smaller,
add 1. The remainder is X − ACCUM·Y, formed once more in RNS.

All of this runs on three 18-digit RNS register processors with one digit processing unit (DPU)
per digit, plus a comparator and a controller.

## Number format

A word is 18 digits of 9 bits; digit *i* is `word[i]`, bits `[9i +: 9]`.

| digit | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 … 17 |
|---|---|---|---|---|---|---|---|---|---|
| base b | 11 | 5 | 13 | 3 | 2 | 17 | 7 | 19 | 457 461 463 467 479 487 491 499 503 509 |
| powers P | 2 | 3 | 2 | 5 | 8 | 2 | 3 | 2 | 1 |
| modulus M = b^P | 121 | 125 | 169 | 243 | 256 | 289 | 343 | 361 | (the primes) |

The product of the moduli is R ≈ 2^151.4. Every integer in [0, R) has a unique
representation.

**Power-based digits (0–7) can lose powers one at a time.** A digit with modulus b^P that has
been scaled by b^k still holds a correct residue, now modulo b^(P−k). Each such DPU keeps a
*power count* p, the number of powers still valid; p = 0 marks the digit invalid ("skipped").

The small bases 2, 3, 5, 7, 11, 13, 17 and 19 are the factors the divisor decomposition can
remove. Digits 8–17 are prime moduli near 2^9. They widen the range but are never scaled
away.

## The two-cycle digit step

Every reduction in a register is the same two-cycle step. The controller places a digit index
on `mod_sel` and a power count k on `pwr_k`. The selected digit *s* drives a value *a* onto the
crossbar.

- **Cycle 1 (SUB):** every valid digit forms r = |d − a| modulo its current modulus.
- **Cycle 2 (MUL):**
  - The selected digit is replaced by r / b_s^k, a direct division by a constant. r is an exact
    multiple of b_s^k. Its power count drops by k.
  - Every other digit becomes |r · (b_s^k)⁻¹|, using a per-digit inverse table addressed by
    {mod_sel, pwr_k}.

The step computes (X − a) / b_s^k. The crossbar value *a* decides which operation it is:

| use | *a* on the crossbar | k | result |
|---|---|---|---|
| dividend scaling | the offset \|d_s\| mod b_s^k, the part of X not divisible by b_s^k | the divisor's zero-power count | ⌊X / b_s^k⌋ |
| divisor scaling (PASS) | (nothing subtracted) | the largest q with b_s^q dividing the divisor | Y / b_s^k |
| mixed-radix step | the digit itself | all remaining powers | (X − x_s) / b_s^p; x_s is the next mixed-radix digit |

## The inverse and constant tables

The tables are computed at elaboration by constant functions (extended Euclid). No data files
are used.

- **Inverse table of digit i** (NUMER and DENOM DPUs): entry (s, k) = |(b_s^k)⁻¹| mod M_i.
  - It is taken modulo the full modulus. It stays correct when digit i has itself lost powers,
    because b_i^p divides M_i.
- **Power-constant table of digit i** (RECOMP DPUs): entry (s, k) = |b_s^k| mod M_i.

Each table has 18 × 9 entries of 9 bits.

## Getting invalid digits back: base extension

Scaling uses up powers. Eventually a digit the algorithm needs becomes invalid. The important
case is the base-2 digit, because the +1 step relies on 2 to make progress. The value must then
be *base-extended*: its invalid digits are recomputed from the valid ones.

The register being extended performs a mixed-radix conversion over its valid digits in
ascending index order. Each two-cycle step yields one mixed-radix digit x_j on the crossbar.
The conversion stops early once the remaining value is zero.

At the same time every recombination DPU of RECOMP (digits 0–7) accumulates
D ← |D + x_j · W| and then W ← |W · b_j^p_j|, where W is a running power that starts at 1. This
is the mixed-radix sum evaluated in each full modulus, and it ends as the value modulo M_i. One
modular multiplier per DPU is shared between the two products.

Digits 8–17 are never invalid. Their RECOMP units latch the digit directly when the extension
starts. The recombined word is then loaded back into the register with every digit at full
power.

## The three register processors

| register | module | DPUs | role |
|---|---|---|---|
| NUMER | `numer_reg` | `numer_dpu` ×8, `dpu_nonpwr` ×10 | dividend; scaled by the divisor's factors; compared at the end |
| DENOM | `denom_reg` | `denom_dpu` ×8, `dpu_nonpwr` ×10 | divisor; decomposed; reports zero powers, =0, =1 |
| RECOMP | `recomp_reg` | `recomb_dpu` ×8, `arith_dpu` ×10 | base extension for either register; copies of X and Y; ACCUM; DIFF = X − ACCUM·Y |

**DENOM's power digits report `zpow`:** the largest number of powers of their base, within the
remaining count, that divide the digit.

**The tri-state buses are multiplexers here.** In the original organisation, the crossbar and
the power-count ("pwr_valid") bus are tri-state buses that the selected DPU drives. Here they
are multiplexers indexed by `mod_sel`. The controller drives `pwr_k` itself, from the power
counts and zero powers it reads.

`mrc_compare` watches both crossbars while NUMER and DENOM run a mixed-radix conversion together
in the same digit order. Digits arrive least significant first, so any later digit pair that
differs overrides the verdict of the earlier ones.

## Controller (`div_ctrl`)

After loading, a zero divisor ends the operation at once with `div_by_zero`. Otherwise the
controller makes one decision per visit to `S_DECIDE`, in this priority:

1. **NUMER = 0**: compare, then finish.
   - Reload NUMER with X − ACCUM·Y (the value before the last reduction) and DENOM with Y.
   - Run a joint mixed-radix conversion with the comparator sampling.
   - Add 1 to ACCUM if the verdict is "≥".
   - Form the remainder X − ACCUM·Y, then pulse `done`.
2. **DENOM = 1**: the pass is over.
   - Base-extend NUMER (it holds Z) and add it to ACCUM.
   - Form DIFF = X − ACCUM·Y, load it into NUMER, and reload DENOM with Y.
3. **Some power digit of DENOM has zero powers**: scale both registers by b^zpow (two cycles).
   - The lowest-index such digit is taken.
   - This reproduces the step order of the worked example (scale by 3 before 2^6 for 123456).
4. **No zeros, base-2 digit still valid**: DENOM += 1 (one cycle). The +1 is applied to every
   digit, modulo its current modulus.
5. **No zeros, base-2 digit used up**: base-extend NUMER, then DENOM, and decide again.

**Timing:**
- Each decision takes one cycle in `S_DECIDE`, on top of the costs below.
- Scaling costs 2 cycles.
- An increment costs 1 cycle.
- A base extension costs 3 cycles per mixed-radix digit (a check, then the two-cycle step),
  plus 3.
- The worked example 987654321 / 11634943 (quotient 84, remainder 10319109) takes **136
  cycles** from `start` to `done`.
- Random full-range operands took between a few hundred and about 12,000 cycles, 2,800 on average.

## Top-level interface (`rns_int_divide`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (rising edge), asynchronous active-low reset |
| `start` | in | 1 | one-cycle pulse; `dividend`/`divisor` are copied on the next cycle |
| `dividend`, `divisor` | in | 18×9 | X and Y in RNS, both below the range R |
| `busy` | out | 1 | high from the cycle after `start` until `done` |
| `done` | out | 1 | one-cycle pulse; `quotient` and `remainder` valid until the next `start` |
| `div_by_zero` | out | 1 | set with `done` when Y = 0 |
| `quotient`, `remainder` | out | 18×9 | ⌊X/Y⌋ and X − Y⌊X/Y⌋ in RNS |

The package `rns_pkg` holds the widths, the moduli, the op-code enums and the table
functions.

## Where this design departs from the original description, or fills a gap

- The crossbar and pwr_valid buses are multiplexers, not tri-state buses. The controller
  supplies the power count on `pwr_k`.
- **Zero powers and offsets are combinational.** They are computed from each DPU's registers
  rather than latched in a separate state register, which saves a cycle per decision. DENOM
  reports the number of zero powers, not just an "any zero" bit, so all of them are removed in
  one step.
- **The new dividend of each pass is X − ACCUM·Y.** The original computes it from its iteration
  formula and names this form as an alternative. The X and Y copies live in RECOMP so this takes
  one cycle.
- **The final comparison is NUMER against Y,** as the prose describes. The closing formula of the
  algorithm reads as a comparison with X; the prose reading agrees with the worked example.
- Non-power RECOMP digits latch the extended register's digit instead of recombining it.
- The scaling-order rule (lowest index first), the mixed-radix order (ascending, skipping
  invalid digits, stopping at zero) and the start/busy/done handshake are choices of this
  design.
- **Full-range operands are tested.** Dividends and divisors up to R − 1 are tested, including
  divisors from the top half of the range.
- No FPGA-specific mapping (block RAM for tables, hard multipliers) is attempted. The `%` and
  `/` by constants are left to synthesis.
- Proposed enhancements are not built: parallel comparison, a second recombination unit, stored
  divisor factors, multi-factor scaling, and divisor decrement.

## Verification

Every block has a self-checking testbench in `tb/`, and each prints
`TB_RESULT checks=N failures=M`. Golden values come from wide binary arithmetic in the
testbench, with the reference helpers in `tb/tb_ref_pkg.sv`.

| testbench | what is checked |
|---|---|
| `tb_numer_dpu`, `tb_denom_dpu`, `tb_dpu_nonpwr` | single DPUs against binary residues; offsets, scaling, mixed-radix steps, increment, zero powers |
| `tb_recomb_dpu`, `tb_arith_dpu` | recombination over random mixed-radix digit sets; ACCUM and X − ACCUM·Y |
| `tb_numer_reg` | random scaling and mixed-radix steps against ⌊X/b^k⌋; the 6000 / 125 / 3 / 2^4 example |
| `tb_denom_reg` | increment, zero powers, =0/=1; the decomposition 123456 → 41152 → 643 → 644 → 161 → 23 |
| `tb_recomp_reg` | full base extension from random reduced moduli, including 123456; ACCUM and DIFF |
| `tb_mrc_compare` | random, equal, nearly equal and high-digit-different pairs |
| `tb_div_ctrl` | the controller against an integer-level model of the three registers; every scaling, increment and base-extension decision and the final quotient/remainder |
| `tb_rns_int_divide` | the whole unit at full size: worked example, edge cases including R − 1 / R − 1, 200 random divisions over the whole range |

**The end-to-end test also counts each mechanism.** It counts scaling, increments, base
extensions of NUMER and of DENOM, passes, the +1 correction and divide by zero. It fails if any
of them never occurred.

To run one testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/rns_pkg.sv tb/tb_ref_pkg.sv \
    tb/tb_rns_int_divide.sv --top-module tb_rns_int_divide
./obj_dir/Vtb_rns_int_divide
```

The full-size end-to-end run takes well under a second of simulation time.
