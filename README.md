# One multiplier for all RV32M multiply instructions (merged Baugh-Wooley)

The RISC-V M extension has four 32-bit multiply instructions. `mul` returns the
lower 32 bits of the product; `mulh`, `mulhu` and `mulhsu` return the upper 32
bits with both operands signed, both unsigned, or `rs1` signed and `rs2`
unsigned. The lower word is the same in every case, but the upper word is not.
A straightforward design therefore uses three multipliers. This design uses
one.

Like most fast multipliers, it works in two phases:

1. form one partial product per multiplier bit;
2. add all the partial products.

Phase 2 is where the area goes, and here it is shared by all three signed
modes. Only phase 1 changes with the mode. It does so by inverting a few bits
and inserting two constant ones, following Baugh and Wooley's method for signed
operands and an analogous extension for mixed operands.

The merged scheme is the one described by F. A. Grootjen and N. K. Schauer in
"Baugh-Wooley Multiplication for the RISCV Processor". The RTL here is an
independent implementation of it.

## Operands and modes

The product is `p = a * b` with `N`-bit operands and a `2N`-bit result.

* `a` is the **multiplier**. Partial product `i` exists only when bit `a_i` is 1.
* `b` is the **multiplicand**. It is the value written down, shifted left by `i`.

There are two mode signals:

| mode      | `s` | `m` | a        | b        | instruction |
|-----------|-----|-----|----------|----------|-------------|
| unsigned  | 0   | 0   | unsigned | unsigned | `mulhu`, `mul` |
| signed    | 1   | 0   | signed   | signed   | `mulh`      |
| mixed     | 0   | 1   | unsigned | signed   | `mulhsu`    |

In `mulhsu`, `rs1` is the signed operand and `rs2` the unsigned one. The mixed
scheme takes the multiplicand signed, so the unit connects `rs1` to `b` and
`rs2` to `a`, for every instruction. The decoder also produces a third signal
`u` (unsigned). The multiplier never reads it, because unsigned is simply the
case where `s = m = 0`.

## The merged partial products

Write `x_ij = a_i & b_j`. Row `i` holds `x_i0 .. x_i(N-1)` at bit positions
`i .. i+N-1`, as in binary long multiplication. The modes change only the bits
listed below. Bit positions are absolute, and `|` is OR.

First row (`i = 0`):

| position | bit |
|---|---|
| N     | `s \| (m & ~x_0(N-1))` |
| N-1   | `s ^ x_0(N-1)` |
| 0..N-2 | `x_0j` unchanged |

Rows `0 < i < N-1`:

| position | bit |
|---|---|
| N-1+i | `(s \| m) ^ x_i(N-1)` |
| i..N-2+i | `x_ij` unchanged |

Last row (`i = N-1`):

| position | bit |
|---|---|
| 2N-1  | `s \| m` |
| 2N-2  | `m ^ x_(N-1)(N-1)` |
| N-1+j, j = 0..N-2 | `s ^ x_(N-1)j` |

For `N = 4` in signed mode, the four rows are:

```
            1  ~a0b3  a0b2  a0b1  a0b0
              ~a1b3   a1b2  a1b1  a1b0
        ~a2b3  a2b2   a2b1  a2b0
 1  a3b3 ~a3b2 ~a3b1  ~a3b0
```

In mixed mode, the same four rows are:

```
            ~a0b3  a0b3  a0b2  a0b1  a0b0
            ~a1b3  a1b2  a1b1  a1b0
       ~a2b3 a2b2  a2b1  a2b0
 1 ~a3b3 a3b2 a3b1  a3b0
```

### Why this gives the right product

**Signed mode.** A two's complement operand has weight `-2^(N-1)` on its top bit.
Expanding `a * b` gives four kinds of term:

* `a_(N-1) b_(N-1)` at weight `2^(2N-2)`, which is positive;
* all `a_i b_j` with `i, j < N-1`, which are positive;
* two negative sums, `X = sum a_i b_(N-1) 2^(N-1+i)` and `Y = sum a_(N-1) b_j 2^(N-1+j)`.

The negative sums are added as two's complements. Each complement inverts the
sum's bits and adds 1. In both, the ones below position `N-1` absorb the `+1`.
The two complements together leave:

* the inverted `x` and `y` bits;
* a one at position `N`;
* a one at position `2N-1`.

Modulo `2^(2N)`, those two ones are the constants in the first and last rows.

**Mixed mode.** Only `b` is signed, so only `X` is negative, and it has one more
bit. Its complement gives:

* the inverted column `~a_i b_(N-1)`;
* a one at `2N-1`;
* a `+1` at position `N-1`.

A `+1` alone at `N-1` would need a fifth row. It is folded into the first row
instead: `~x + 1` equals `x` with a carry of `~x`. So position `N-1` holds
`x_0(N-1)` itself, and position `N` holds `~x_0(N-1)`.

**Unsigned mode.** All the extra terms vanish, which leaves ordinary long
multiplication.

## Summation

There are `N` rows, each `2N` bits wide, and they are added modulo `2^(2N)`. The
method only requires that the adder be shared; it does not prescribe a
structure. This RTL uses the simplest choice, a balanced binary tree of
carry-propagate adders: `ceil(log2 N)` levels, so 5 levels for `N = 32`.

The tree module is generic, with parameters `ROWS` and `W`. A faster
reduction, such as Wallace, Dadda or another carry-save scheme, can replace
it without touching the partial-product generator.

## Blocks

| module | role |
|---|---|
| `bw_mul_pkg` | `XLEN`, the funct3 encodings, and the `bw_mode_t {s,u,m}` struct |
| `mul_decoder` | maps funct3 to `{s,u,m}` and to the upper/lower word select |
| `bw_pp_gen` | the merged partial products above |
| `pp_adder_tree` | the binary adder tree |
| `bw_multiplier` | `bw_pp_gen` followed by `pp_adder_tree`: the N x N -> 2N multiplier for all three modes |
| `rv32m_mul_unit` | top: decoder, multiplier, word select and output register |

### The top, `rv32m_mul_unit`

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; synchronous active-low reset |
| `in_valid` | in | an instruction is presented this cycle |
| `funct3` | in | 000 `mul`, 001 `mulh`, 010 `mulhsu`, 011 `mulhu` |
| `rs1`, `rs2` | in | source operands (XLEN bits) |
| `out_valid` | out | `rd` holds a result |
| `rd` | out | result |
| `illegal` | out | funct3 was a divide/remainder code (1xx); `rd` is then 0 |

The whole multiply is one combinational path. Its result is registered once:

* `rd` and `out_valid` appear on the clock edge after `in_valid`;
* the unit accepts one instruction per cycle and never stalls.

The decoder keeps one mode bit set for every valid multiply. An immediate
assertion in the top checks this.

## Departures from the method, and choices made here

* **Timing.** The method leaves latency and pipelining open. The single output
  register, the valid/illegal signalling and the reset are this design's
  choices. A deeper pipeline would cut the adder tree between levels.
* **`mul` is decoded as unsigned.** Any mode gives the same lower word.
* **Divide/remainder** is outside the scope of the method. Those encodings are
  only flagged as `illegal`.
* **Last-row bit positions.** In the published description of the last row, one
  bit-position label is off. Bit `j` of the last row is placed at `N-1+j`, the
  same shift rule as every other row. The worked 4-bit schemes agree with this
  placement.
* **Sign bit.** The definition of signed numbers in the source text names
  `a_0` as the sign bit; its derivation uses `a_(N-1)`. The RTL uses ordinary
  two's complement, with `a_(N-1)` as the sign bit.
* **Row width.** Each partial product is carried as a full `2N`-bit word at its
  final weight. About half of those bits are constant zero, and synthesis
  removes them.
* **Area and power not measured.** The method claims about a factor of three
  saving over three separate multipliers. This RTL does not measure that.
  Synthesised with yosys for `N = 32`, the unit is 1025 AND gates, 63 XOR
  gates, one multi-operand adder cell (the tree) and 34 flip-flops.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* `bw_multiplier_tb` runs every operand pair at `N = 2, 3, 4, 5` in all three
  modes, and `bw_pp_gen_tb` does the same at `N = 4`. This includes the example
  `1001 x 0101 = 45`. At `N = 32` they
  run corner operands (0, 1, -1, min, max, min+1) and 2000-3000 random pairs
  per mode. The expected values come from exact integer multiplication of the
  operands, sign-extended according to the mode. `bw_pp_gen_tb` also checks
  the shape of each row.
* `pp_adder_tree_tb` checks 32x64, 5x8 and 1x16 trees against a sequential sum.
* `mul_decoder_tb` checks all eight funct3 values.
* `rv32m_mul_unit_tb` runs the top at its default size (`XLEN = 32`):
  * 20000 cycles of random instructions, with operands a third of the time
    taken from the corner values;
  * random gaps between instructions, and some divide encodings.
  * Every `rd` is checked against the ISA definition and must arrive exactly one
    cycle after its instruction.
  * It counts each mode, back-to-back issue, gaps and the illegal path, and
    fails if any of them never occurred.

All testbenches pass. Each was also run against a copy of its module with one
deliberate bug, and each reported failures.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/bw_mul_pkg.sv tb/rv32m_mul_unit_tb.sv --top-module rv32m_mul_unit_tb
./obj_dir/Vrv32m_mul_unit_tb
```

Replace the testbench name to run another one. `bw_mul_pkg.sv` must come first
on the command line.

To change the operand width, set `N` on `bw_multiplier` or `XLEN_P` on
`rv32m_mul_unit`. The multiplier works for any `N >= 2`; widths 2 to 5 are
tested exhaustively.
