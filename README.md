# CIVP: one set of multiplier blocks for integer, single, double and quadruple precision

FPGA fabrics ship with hard multipliers sized for integer DSP work: 18x18 bit,
25x18 bit and 9x9 bit. Floating point significands do not fit those widths well.
A binary32 significand has 24 bits (23 stored and a hidden one), so one product
already spills out of an 18x18 block. Widths of 53 bits (binary64) and 113 bits
(binary128) leave many partly used blocks once they are cut into 18-bit pieces.

The CIVP (combined integer and variable precision) architecture changes the
mix of hard blocks:

* a **24x24** block replaces the 18x18 block;
* a **24x9** block replaces the 25x18 block;
* the **9x9** block stays.

With these three shapes:

* a binary32 significand product takes exactly one 24x24 block;
* a binary64 product takes a 57x57 array built from nine blocks;
* a binary128 product takes four such arrays.

The 24x24 blocks also serve plain integer multiplication.

This RTL has all of it:

* the three block types;
* the 57x57 and 114x114 arrays;
* complete IEEE 754 multipliers for the three formats, built on those arrays;
* one combined unit, `civp_mul`, that selects integer, binary32, binary64 or binary128 multiplication per operation.

## The 57x57 array (binary64)

A binary64 significand is 53 bits. Both operands get four zero bits on top,
which makes them 57 bits. They are then cut into three slices, most significant first:

| slice  | bits of the 57-bit operand | width |
|--------|----------------------------|-------|
| A1, B1 | 56..48                     | 9     |
| A2, B2 | 47..24                     | 24    |
| A3, B3 | 23..0                      | 24    |

Each slice of A is multiplied by each slice of B. Every slice product has a
hard block of exactly its shape:

| product | block | weight (left shift) |
|---------|-------|---------------------|
| A3*B3   | 24x24 | 0                   |
| A2*B3   | 24x24 | 24                  |
| A3*B2   | 24x24 | 24                  |
| A2*B2   | 24x24 | 48                  |
| A1*B3   | 24x9  | 48                  |
| A3*B1   | 24x9  | 48                  |
| A1*B2   | 24x9  | 72                  |
| A2*B1   | 24x9  | 72                  |
| A1*B1   | 9x9   | 96                  |

That is four 24x24, four 24x9 and one 9x9 block. The 114-bit product is the sum
of the nine shifted slice products (`mul57x57`). Putting the four padding zeros
above the significand keeps the value unchanged. The 106-bit significand
product is then bits 105..0, and bits 113..106 are always zero; `dp_fpmul`
asserts this.

The architecture does not describe how the nine partial products are added.
This RTL writes the sum as one multi-operand addition and leaves the adder
structure to synthesis. On an FPGA, that sum is fabric logic next to the hard
blocks. A carry-save tree or a pipelined adder would be natural refinements,
and neither changes the result.

## The 114x114 array (binary128)

A binary128 significand is 113 bits. One zero bit on top makes it 114 bits,
which is two 57-bit halves: A = {A1, A2} and B = {B1, B2}, with A1 and B1 the
upper halves. The four half products A2*B2, A1*B2, A2*B1 and A1*B1 each come
from a `mul57x57`. They are added at weights 0, 57, 57 and 114 (`mul114x114`).
In hard blocks, that is 16 24x24, 16 24x9 and 4 9x9 multipliers.

For comparison, cutting 113 bits into 18-bit pieces needs seven pieces
(6 x 18 + 5). That makes 7 x 7 = 49 18x18 blocks, and 13 of the 49 form products
involving the 5-bit remainder. The original description counts 17 such blocks
(35%); counting 7 + 7 − 1 gives 13.

## Around the significand product: `fp_mul_round`

The architecture only concerns the significand product. Everything else in a
floating point multiply is this design's own choice. It lives in one
format-generic helper, `fp_mul_round` (parameters `EXP_W` and `FRAC_W`). The
helper does four things:

1. It unpacks both operands and sends the significands to the multiplier array.
   Each significand is the stored fraction with a hidden one in front, or a
   hidden zero when the exponent field is 0.
2. It takes back the 2·(FRAC_W+1)-bit product. The product of two values in
   [1,2) lies in [1,4). If the top bit is set, the helper takes the upper
   FRAC_W+1 bits and adds one to the exponent. Otherwise it takes them one bit
   lower.
3. It rounds to nearest, ties to even. The guard bit is the first dropped bit,
   and the sticky bit is the OR of all lower bits. The helper rounds up when
   `guard & (sticky | lsb)`. A carry out of the rounding (1.11…1 rounded up)
   gives 10.0…0: the fraction becomes zero and the exponent goes up by one more.
4. It computes the exponent as `exp_a + exp_b − bias + normalize + carry`, in a
   signed word two bits wider than the field.

Special values are handled as follows:

| case | result | flag |
|------|--------|------|
| either operand NaN, or ∞ × 0 | quiet NaN `0 / all ones / 100…0` | `invalid` for ∞ × 0 or a signalling NaN operand |
| ∞ × finite non-zero | ±∞ | – |
| exponent field 0 (zero or subnormal) | ±0 | – |
| rounded exponent ≥ all ones | ±∞ | `overflow` |
| rounded exponent ≤ 0 | ±0 | `underflow` |

Subnormal numbers are not supported: they are flushed to zero on input and
output. Only round-to-nearest-even is provided. Both limits are easy to lift
inside `fp_mul_round` without touching the multiplier arrays.

The three format units are thin wrappers. Each pairs this helper with its
significand multiplier:

* `sp_fpmul`: binary32, with one `mul24x24`;
* `dp_fpmul`: binary64, with `mul57x57` and four zero pad bits;
* `qp_fpmul`: binary128, with `mul114x114` and one zero pad bit.

## The combined unit: `civp_mul`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | take `mode`, `a`, `b` at this clock edge |
| `mode` | in | 2 | `MODE_INT24`, `MODE_SP`, `MODE_DP`, `MODE_QP` (`civp_pkg::civp_mode_e`) |
| `a`, `b` | in | 128 | operands, right-aligned: 24, 32, 64 or 128 bits used |
| `out_valid` | out | 1 | a result is on `result` |
| `out_mode` | out | 2 | mode of that result |
| `result` | out | 128 | product, right-aligned (48-bit integer product in INT24), upper bits zero |
| `flags` | out | 3 | `{invalid, overflow, underflow}` (`civp_pkg::fp_flags_t`), zero in INT24 |

Operand bits above the active format are ignored.

Timing:

* The datapaths are combinational.
* One register stage sits at the output.
* A result appears on the clock after its operands, with `out_valid` high.
* The unit accepts one new operation every cycle, in any mode, and mixed modes can follow each other directly.
* When `in_valid` is low, `result` keeps its last value.
* A concurrent assertion checks that `out_valid` follows `in_valid` by one cycle.

The unit has one datapath per mode:

* a 24x24 block for integers;
* `sp_fpmul`;
* `dp_fpmul`;
* `qp_fpmul`.

The result is selected by mode. In total that is 22 24x24, 20 24x9 and 5 9x9
blocks. The operands of unselected datapaths are forced to zero, so idle
datapaths do not switch. The architecture does not say whether precisions share
blocks. A variant that runs binary32 and binary64 on slices of the binary128
array would save blocks, at the cost of operand steering. Such a variant is not
built here.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints a line
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.

* **Block testbenches** (`tb_mul24x24`, `tb_mul24x9`, `tb_mul9x9`) apply corner
  values, every pair of single set bits, and 20,000 random pairs. The reference
  is a 64-bit product.
* **Array testbenches** (`tb_mul57x57`, `tb_mul114x114`) use a reference
  computed as one wide product. The stimulus:
  * drives each slice product to its largest value with all-ones slices;
  * sweeps single set bits across all weights;
  * uses random operands and real binary64 or binary128 significands.
* **Format testbenches** (`tb_sp_fpmul`, `tb_dp_fpmul`, `tb_qp_fpmul`) compare
  every result and flag with `tb_fp_ref_pkg::ref_mul`. That reference model is
  written in a different style from the RTL. It computes the exact product
  wide, finds the leading one with a loop, and rounds by comparing the
  remainder with one half. Further checks in these testbenches:
  * hand-computed products: 1.5 × 1.5, 2 × 3, a tie that rounds up to even, overflow, underflow and ∞ × 0;
  * binary64 results compared with the simulator's own `real` multiplication;
  * binary32 results checked to lie within half an ulp of the exact product, computed in `real`;
  * binary128 products of binary64-sized significands, which are exact, checked bit for bit.

  Each format testbench counts round-ups, exact ties, overflows, underflows and
  invalid operations, and fails if any of them never occurred.
* **End to end** (`tb_civp_mul`): 20,000 operations in random modes, with runs
  of the same mode, mode switches, idle cycles and junk in the unused operand
  bits. The testbench checks:
  * every result and flag, and its one-cycle latency;
  * `out_valid` during idle cycles;
  * that the result holds while idle.

  It fails if any mode, a mode switch, an idle cycle, an overflow, an underflow
  or an invalid operation never occurred. It runs the top at its only
  configuration.

Each testbench was also run against a copy of its module with one deliberate
error, such as a slice product at the wrong weight, a dropped product bit, or a
wrong flag source. Every testbench reported failures on its faulty copy.

## Simulating

The package files must come first. For example, for the top:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/civp_pkg.sv tb/tb_fp_ref_pkg.sv rtl/*.sv tb/tb_civp_mul.sv \
  --top-module tb_civp_mul
./obj_dir/Vtb_civp_mul
```

Swap the testbench file and `--top-module` to run another one. Each run takes
well under a second. The testbenches use only two-state behaviour, `$urandom`,
and `$bitstoreal`/`$realtobits`.

## Where this RTL departs from or goes beyond the architecture

* **Taken from the architecture:**
  * the three block shapes;
  * the 9/24/24 slicing, with the 9-bit slice on top;
  * the assignment of each slice product to a block type;
  * the 57/57 halving for binary128;
  * the zero padding, 4 bits for binary64 and 1 bit for binary128;
  * the binary64 and binary128 field layouts.
* **Own choices:**
  * which side the padding zeros go on (the top);
  * how the partial products are summed;
  * everything in `fp_mul_round`: exponent, normalisation, rounding, special values and flags;
  * the binary32 exponent width, taken from IEEE 754;
  * unsigned 24x24 integers;
  * one datapath per mode, with operand isolation;
  * the valid interface, the output register and the reset.
* **Hard blocks as behaviour.** The three block types are written as plain
  `a*b`. This models the hard blocks as they would appear in a fabric. It does
  not design their insides.
* **Not every block bit does useful work.** With four pad bits, the binary64
  array carries some zero bits: A1 and B1 hold only 5 significand bits, so the
  9x9 block and the four 24x9 blocks are partly fed with zeros. In binary128,
  one pad bit sits in each upper half. The architecture's claim that the blocks
  are fully used holds only approximately.
* **Not built:** the 18x18-based alternative, which only serves for comparison,
  and the reconfigurable, self-repairing 24x24 multiplier, which is mentioned as
  future work.
