# Quaternion to rotation matrix with squarers only

A unit quaternion q = [q0 q1 q2 q3] describes a rotation. Its 3x3 rotation matrix (the
direction cosine matrix) is

```
      | q0²+q1²-q2²-q3²    2(q1q2 - q0q3)     2(q0q2 + q1q3)  |
  R = | 2(q1q2 + q0q3)     q0²-q1²+q2²-q3²    2(q2q3 - q0q1)  |
      | 2(q1q3 - q0q2)     2(q0q1 + q2q3)     q0²-q1²-q2²+q3² |
```

Evaluated directly, that takes six general multiplications and four squarings. This
design needs no multiplier at all. It uses Logan's identity

```
  2ab = (a+b)² - a² - b²
```

to turn every product into squares. A squarer is much cheaper than a multiplier: it has one
operand, so its partial-product array folds to about half the size. The matrix then costs
**10 squarers and 26 two-operand adders**, arranged as a four-block pipeline.

The block structure comes from Cariow and Cariowa, "A Hardware-Efficient Approach to
Computing the Rotation Matrix from a Quaternion". The arithmetic network inside the blocks
differs from that paper's final formulas for six of the nine entries, because those formulas do not give
the matrix above. The section *Relation to the published network* explains the difference.

## The arithmetic

Ten squares are formed first. Six are squares of the pairwise sums:

```
  phi0 = (q1+q2)²   phi1 = (q0+q3)²   phi2 = (q2+q3)²
  phi3 = (q0+q1)²   phi4 = (q1+q3)²   phi5 = (q0+q2)²
```

The other four are the single squares q0², q1², q2², q3².

Each phi pair shares the same four squared coefficients. For example, phi0 and phi1 together
contain all of q0², q1², q2², q3². So the sum and the difference of a pair are

```
  phi0 + phi1 = λ + 2(q1q2 + q0q3)         λ = q0²+q1²+q2²+q3²
  phi0 - phi1 = (q1²+q2²) - (q0²+q3²) + 2(q1q2 - q0q3)
```

The square term left in a **sum** is always λ. The square term left in a **difference** is
minus one of the diagonal entries of R. That gives the whole matrix:

| entry | formed as            | entry | formed as            |
|-------|----------------------|-------|----------------------|
| c01   | (phi0 - phi1) + c22  | c10   | (phi0 + phi1) - λ    |
| c12   | (phi2 - phi3) + c00  | c21   | (phi2 + phi3) - λ    |
| c20   | (phi4 - phi5) + c11  | c02   | (phi4 + phi5) - λ    |

The diagonal entries and λ come from four sums and differences of the single squares:

```
  th0 = q1²+q2²   th1 = q0²+q3²   d0 = q0²-q3²   d1 = q1²-q2²
  λ   = th1 + th0                 c22 = th1 - th0
  c00 = d0 + d1                   c11 = d0 - d1
```

The adder count is 6 (pair sums) + 6 (phi pairs) + 4 (th/d) + 4 (λ, diagonal) + 6
(off-diagonal) = 26.

## Block structure and pipeline

`rotmat_unit` chains four combinational blocks. A register bank follows each one.

| block | module          | in → out | work                                                   |
|-------|-----------------|----------|--------------------------------------------------------|
| 1     | `rotmat_block1` | 4 → 10   | 6 pair sums, 10 squarers (`squarer`): phi0..5, q0²..q3² |
| 2     | `rotmat_block2` | 10 → 10  | phi0±phi1, phi2±phi3, phi4±phi5; th0, th1, d0, d1       |
| 3     | `rotmat_block3` | 10 → 10  | pass the six phi words through; λ, c00, c11, c22        |
| 4     | `rotmat_block4` | 10 → 9   | the six off-diagonal entries; pass the diagonal through |

The bus between the blocks has a fixed layout. Each module's header comment lists what
every word carries. Block 4 puts out its entries in the order
c01 c02 c10 c12 c20 c21 c00 c11 c22. The enum `rotmat_pkg::entry_e` names those positions.
The top module rearranges them into `c[row][col]`.

**Timing.** The unit accepts one quaternion per clock. It returns the matrix exactly 4
clocks later: `out_valid` is `in_valid` delayed by four cycles. There is no back-pressure
and no stall. The reset is synchronous and active low, and it clears only the valid
pipeline. The data registers are not reset.

Each block is a single adder level, except block 1, which has an adder and then a squarer.
The critical path is therefore block 1's (QW+1)-bit adder followed by the squarer.

## Number format and widths

The only parameter is `QW`, the coefficient width. Its default is 16. The coefficients are
two's-complement integers. For a unit quaternion, read them as Q1.(QW-1).

No bit is ever dropped, so every output is the exact integer value of the formula.

| signal                     | width        | why                                             |
|----------------------------|--------------|-------------------------------------------------|
| q_k                        | QW signed    | input                                           |
| pair sum                   | QW+1 signed  | sum of two coefficients                         |
| square (block 1 output)    | 2QW+1 unsigned | \|pair sum\| ≤ 2^QW, so its square ≤ 2^(2QW)  |
| blocks 2–4, output `c`     | 2QW+3 signed | phi_a + phi_b can reach 2^(2QW+1)               |

With Q1.15 inputs, the outputs have 30 fraction bits: 1.0 reads as 2^30. The outputs keep one
sign-and-range bit more than the final entries need (|c| ≤ 2^(2QW)). A user who wants a
QW-bit result should round and saturate after the unit.

The unit does not normalise q. For a non-unit quaternion, the result is |q|² times a
rotation matrix, exactly what the formula gives. Normalisation, if it is needed, belongs
before the unit.

## The squarer

`squarer` squares the magnitude a = |x| of its signed IW-bit operand. Row i of the
partial-product array is

```
  a_i · ( 2^(2i) + Σ_{j>i} a_j · 2^(i+j+1) )
```

This row follows from three facts. The product x_i·x_i equals x_i. The two symmetric
products x_i·x_j and x_j·x_i merge into one term one place further up. Half the bit
products therefore disappear. The RTL sums the rows with plain word adders, and a
synthesis tool may rebuild them as a compressor tree. The most negative operand,
-2^(IW-1), works too: its magnitude wraps to the unsigned value 2^(IW-1).

## Relation to the published network

This RTL keeps the following from the paper:

- the four-block cascade and the output order c01 c02 c10 c12 c20 c21 c00 c11 c22;
- block 1 exactly: six pair sums, ten squarers, and the phi definitions;
- the pass-through words of blocks 3 and 4;
- the sign pattern of block 2's six phi adders;
- the formulas for c01, c10, c22 and λ.

The paper's final formulas, its equation (5), give the wrong value for six of the nine
entries of the matrix it starts from. The table below shows what those formulas compute,
written out in terms of q. Random integer quaternions confirm it.

| entry | paper's formula                       | evaluates to           | correct               |
|-------|---------------------------------------|------------------------|-----------------------|
| c00   | (q0²-q2²) + (q0²-q3²)                 | 2q0²-q2²-q3²           | q0²+q1²-q2²-q3²       |
| c11   | (q0²-q3²) - (q0²-q2²)                 | q2²-q3²                | q0²-q1²+q2²-q3²       |
| c02   | (phi2+phi3) - λ                       | 2(q0q1+q2q3) (= c21)   | 2(q0q2+q1q3)          |
| c20   | (phi4+phi5) - λ                       | 2(q0q2+q1q3)           | 2(q1q3-q0q2)          |
| c12   | (phi1-phi5) + ((q0²+q2²)-(q0²+q3²))   | 2q0(q3-q2)             | 2(q2q3-q0q1)          |
| c21   | (phi2-phi3) + ((q0²-q2²)-(q0²-q3²))   | not a matrix entry     | 2(q0q1+q2q3)          |

This design computes the correct column throughout. The fix has three consequences for the
structure:

- **Block 2** pairs phi4 with phi5 for its third difference. The paper uses phi1 - phi5.
  Block 2 also forms four square combinations instead of five, so it has 10 adders and 10
  outputs. The paper's block has 11.
- **Block 3** needs four adders and 10 outputs. The paper's has six adders and 12 outputs.
  The diagonal entries double as the corrections for the difference terms, so no separate
  correction words are needed.
- **Block 4** still has six adders. It uses different operands, and c01, c12 and c20 are
  additions. The total is 26 adders. The paper counts 29.

Two further points are this design's own choices, because the paper does not cover them:
the number format and widths, and the pipeline registers. The paper's figures show a purely
combinational structure.

## Files

| file                    | content                                                |
|-------------------------|--------------------------------------------------------|
| `rtl/rotmat_pkg.sv`     | width functions, bus sizes, output-order enum          |
| `rtl/squarer.sv`        | dedicated squarer                                      |
| `rtl/rotmat_block1.sv` … `rotmat_block4.sv` | the four blocks (combinational)    |
| `rtl/rotmat_unit.sv`    | top: the blocks and the 4-stage pipeline               |
| `tb/tb_*.sv`            | one self-checking testbench per module                 |

## Verification

Every testbench computes its expected values from the quaternion with 64-bit integer
products. None of them reuses the design's own intermediate formulas. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it hangs.

- `tb_squarer` tests all 2^17 operands of the 17-bit squarer.
- `tb_rotmat_block1` … `tb_rotmat_block4` each test 3000 random quaternions; blocks 1 and 2 also test extreme
  values. The expected values of blocks 3 and 4 are the entries of R itself.
- `tb_rotmat_unit` runs the top at its default parameters. It sends 20000 quaternions
  with random idle cycles and checks every entry exactly, and checks that each result
  arrives exactly 4 cycles after its input. The inputs include the extreme corners
  (±full scale) and four unit quaternions of known rotations: identity, 90° about z,
  90° about x, and 180° about y. Those four results are also compared with the ideal
  0/±1 matrix. The test counts its back-to-back inputs, idle cycles, cycles in reset,
  corner inputs and known rotations, and fails if any count is zero.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/rotmat_pkg.sv rtl/squarer.sv \
    rtl/rotmat_block1.sv rtl/rotmat_block2.sv rtl/rotmat_block3.sv rtl/rotmat_block4.sv \
    rtl/rotmat_unit.sv tb/tb_rotmat_unit.sv --top-module tb_rotmat_unit -o sim
./obj_dir/sim
```

Each testbench runs in well under a second.

The testbenches fix the width at 16 bits. To try another width, change `QW_DEFAULT` in
`rotmat_pkg.sv`, or `IW` in `tb_squarer`. The 64-bit reference arithmetic holds for QW up
to about 30.

## Limitations

- Only a simulation-level check has been made. No timing or area figures are given: the
  design has not been taken through synthesis to a technology library.
- Because of the block 1 adder in front of the squarer, a single cycle per block may be too
  slow at high clock rates for large QW. Adding retiming registers inside the squarer
  would lengthen the latency accordingly.
