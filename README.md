# A fused multiply-add datapath: Booth, one Wallace tree, one Sklansky adder

This RTL implements the longest combinational path of the floating-point
unit of Basilisk, a Linux-capable RV64GC system-on-chip taped out in IHP's
open 130 nm technology:

    y = a * b + c + d        a, b: 54 bits (unsigned)   c, d, y: 163 bits

In the FPU, `a` and `b` are the 53-bit significands of a double-precision
fused multiply-add, and `c` is the aligned addend in a 163-bit window
(3 * 53 + 4 bits). Synthesis tools often build this from separate parts: a
multiplier with its own carry-propagate adder, then a carry-save adder for
`c` and `d`, then a second wide carry-propagate adder. This datapath builds
it as one block instead:

1. **Radix-4 Booth encoding** halves the number of partial products, from
   54 to 28 rows of 108 bits.
2. **A single carry-save (Wallace) tree** reduces those 28 rows *together
   with* `c` and `d` to two rows. There is no intermediate product.
3. **A single 163-bit Sklansky parallel-prefix adder** produces the result.

In a unit-gate delay model (2 per XOR, 1 per AND/OR) the three stages cost
about 7, 32 and 20 gate delays. The RTL reproduces the two structural
numbers behind the last two: 8 full-adder levels in the tree and 8 prefix
levels in the adder.

The rest of the SoC is not given here. That covers the CVA6 core, the
caches and their SRAM macros, the memory controller, the peripherals, and
the FPU stages around this datapath (alignment shifter, normaliser,
rounding).

## Files

| file | module | role |
|---|---|---|
| `rtl/lau_pkg.sv` | package `lau_pkg` | default widths; constant functions for row counts and tree/prefix depths |
| `rtl/booth_encoder.sv` | `booth_encoder` | radix-4 recoding of `b`; partial-product rows and negation bits |
| `rtl/carry_save_adder.sv` | `carry_save_adder` | one row of full adders (3:2 counter) |
| `rtl/compressor_tree.sv` | `compressor_tree` | Wallace reduction of N rows to two |
| `rtl/sklansky_adder.sv` | `sklansky_adder` | Sklansky prefix carry-propagate adder |
| `rtl/fma_datapath.sv` | `fma_datapath` | top: wires the three stages and the correction row |
| `tb/tb_*.sv` | | self-checking testbenches, one per module, plus `tb_fma_datapath_small` |

Everything is combinational: no clock, no reset, zero latency. A design
that needs a given frequency must add pipeline registers around or inside
`fma_datapath`. The reference here puts none there.

## Booth rows without sign extension

This is the part that takes most care. Radix-4 Booth reads `b` in
overlapping triplets `{b[2i+1], b[2i], b[2i-1]}` (with `b[-1] = 0`) and
turns each triplet into a digit `d_i` in {-2, -1, 0, +1, +2}:

    d_i = -2*b[2i+1] + b[2i] + b[2i-1]
    a * b = sum_i d_i * a * 4^i

Row `i` is `0`, `a` or `2a` (55 bits), inverted if the digit is negative.
The `+1` that completes the two's complement leaves the encoder as
`neg_o[i]`, to be added at bit `2i`. A triplet `111` gives "-0": the row is
all ones and `neg_o` is 1, so together they sum to zero.

Because `b` is unsigned, digit 27 reads `{0, 0, b[53]}` and is only 0 or +1.
That is why 54-bit operands need 28 rows, not 27. This row is just
`a << 54` or zero, and it ends exactly at bit 107.

The 27 signed rows would normally be sign-extended across the whole 163-bit
tree, which adds many columns of copies of the sign bit. Instead, each row
is a 56-bit field `{~s, low 55 bits}` placed at bit `2i`. Inverting the sign
bit `s` turns a signed value `v` into the unsigned value `v + 2^55`. Every
row is then a plain unsigned number inside the 108-bit frame, so the tree
can zero-extend it. The cost is a known bias:

    sum_i pp_o[i] + sum_i neg_o[i] * 2^(2i) = a*b + BIAS
    BIAS = sum_{i=0}^{26} 2^(55 + 2i)

`fma_datapath` adds `-BIAS mod 2^163` as one constant row. The negation bits
sit at even positions 0..52 and the constant has no bit below 55, so both
share the same row (`negrow` in the code). The tree therefore takes
28 + 1 + 2 = 31 rows. Synthesis folds the constant bits into the full
adders they meet.

## The compressor tree

`compressor_tree` is a generic Wallace tree. At each level it groups the
rows three at a time into `carry_save_adder` rows. Each group yields a sum
row and a carry row shifted left by one. One or two leftover rows go on to
the next level unchanged.

A level maps `n` rows to `2*floor(n/3) + n mod 3`. For 31 rows that gives
31 → 21 → 14 → 10 → 7 → 5 → 4 → 3 → 2, which is 8 levels.
`lau_pkg::csa_levels` and `csa_rows_after` compute these counts. Each level
is a `generate` block with its own array size. A full adder costs 4 unit
delays (two XORs), so the tree costs 32.

For comparison, a flow that skips Booth encoding feeds 54 + 2 = 56 rows to
the tree and needs 9 levels (36 unit delays). Carries beyond bit 162 are
dropped. The result is modulo 2^163, as the final adder's is.

## The Sklansky adder

Each bit forms `g = a & b` and `p = a ^ b`. At prefix level `k`, every bit
whose index has bit `k` set merges its group with the last bit of the
2^k-aligned block just below it, at index `((i >> k) << k) - 1`. After
`ceil(log2 163) = 8` levels, each bit holds the generate/propagate of its
whole prefix. The carry into bit `i` is that prefix combined with `cin_i`,
and `sum = p ^ carry`.

The depth is minimal, but the fan-out at level `k` grows to 2^k. That
trade-off suits a path limited by logic depth. The unit-delay cost is
2 + 2*8 + 2 = 20. The top ties `cin_i` to 0 and leaves `cout_o` unused.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `fma_datapath`, `booth_encoder` | `MUL_W` | 54 | multiplier operand width; must be even |
| `fma_datapath` | `SUM_W` | 163 | width of `c`, `d` and `y`; must be at least `2*MUL_W` |
| `booth_encoder` | `NUM_PP` | `MUL_W/2 + 1` = 28 | partial-product rows (derived) |
| `booth_encoder` | `PP_W` | `2*MUL_W` = 108 | row width (derived) |
| `compressor_tree` | `NUM_ROWS`, `WIDTH` | 31, 163 | input rows and width |
| `compressor_tree` | `LEVELS` | derived, 8 | carry-save levels |
| `sklansky_adder` | `WIDTH` | 163 | adder width |
| `sklansky_adder` | `LEVELS` | derived, 8 | prefix levels |

Leave the derived parameters at their defaults. The testbenches also run
`MUL_W = 8, SUM_W = 20`, which is small enough to test exhaustively.

## Where this departs from, or adds to, the published description

- **54 vs 53 bits.** The published text speaks of a 53 × 53-bit multiplier.
  Its block diagram and its partial-product counts (54 without Booth, 28
  with) describe 54 × 54. The RTL uses 54. A 53-bit significand
  zero-extended to 54 bits gives the same product.
- **Widths of `c` and `d`.** Only the 163-bit width of the final addition
  is given. Here both addends are full 163-bit inputs. In a real FPU, `d`
  may be narrower, for example a single injected carry.
- **Sign handling, negation bits, the shared correction row, the 3:2 cell
  type and the greedy row grouping** are this implementation's own choices.
  The published description gives only the stage structure, the row counts
  and widths, and the unit delays.
- **Unit delays** are not simulated. They appear only as checked level
  counts.
- **Arithmetic-library speed grades.** The library this datapath comes from
  offers three speed grades per operator, which are not described. Only
  the fast variant drawn for this path is given here.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
Expected values come from the simulator's own wide `*` and `+`, never from
the RTL's structure.

- `tb_booth_encoder`: checks every row and negation bit against the digit
  formula, at 54 bits (3,036 operand pairs including corner patterns) and
  exhaustively at 8 bits. Also checks that the row sum minus the bias equals
  `a*b`.
- `tb_compressor_tree`: 31 × 163 random and directed rows (all ones, one-hot
  per row) and a 5 × 8 instance. Checks that the tree has 8 levels.
- `tb_sklansky_adder`: 163-bit random vectors and full-length carry chains
  (`b = ~a`, all ones + 1). Exhaustive at 8 bits with carry-in. Checks the
  8 prefix levels.
- `tb_fma_datapath`: the top at its default parameters, about 20,000
  vectors. It counts and requires each Booth digit value, the +1 top digit,
  "-0" digits, results that wrap modulo 2^163, and addends that use the top
  bit.
- `tb_fma_datapath_small`: the top at 8 × 8 / 20 bits over all `a`, `b`
  pairs, with random and all-ones addends.

To run one with Verilator:

    verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
        rtl/lau_pkg.sv tb/tb_fma_datapath.sv --top-module tb_fma_datapath
    ./obj_dir/Vtb_fma_datapath

Each testbench runs in well under a second.
