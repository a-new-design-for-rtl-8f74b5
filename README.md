# Array multiplier without a final adder row

An N × N unsigned array multiplier built from AND gates and full adders only.
A conventional carry-save array multiplier reduces the partial products row by
row and then needs one more row of adders, a carry-propagate (ripple) adder, to
merge the sums and carries the last row leaves behind. This design drops that
row. Each carry that the last row produces is sent back up the array into the
one input that is unused in a conventional array: the input of the leftmost
cell of a row, which is otherwise tied to 0. The array then sums the partial
products completely by itself. For the 4 × 4 case this saves 4 of 20 full
adders. The result is the exact product, not an approximation.

The RTL follows the 4 × 4 circuit of N. Ravi, A. Satish, T. Jayachandra Prasad
and T. Subba Rao, "A New Design for Array Multiplier with Trade off in Power
and Area". That work characterises the circuit at transistor level (a
16-transistor full-adder cell, SPICE power and delay at 0.18 µm, 90 nm and
65 nm). None of that is modelled here. This RTL gives the logic and the
connectivity.

## Partial products

`pp_gen` forms `pp[i][j] = x[i] & y[j]` with N² AND gates. Bit `pp[i][j]` has
weight 2^(i+j), so it belongs to product column `c = i + j`. Row `i` of the
array handles the N bits `x[i]·y[N-1] … x[i]·y[0]`, which sit in columns
`i+N-1 … i`.

## The carry-save array and its feedback carries

`csa_array` has N rows of N full adders. Cell `(i, j)` sits in row `i`,
column `c = i + j`, and adds three bits of weight 2^c:

| input | row 0 | rows 1 … N-1, j < N-1 | rows 1 … N-1, j = N-1 (leftmost) |
|-------|-------|-----------------------|----------------------------------|
| `a`   | `pp[0][j]` | `pp[i][j]` | `pp[i][N-1]` |
| `b`   | 0 | sum of cell `(i-1, j+1)`, same column | **carry of last-row cell `(N-1, i-1)`** |
| `cin` | 0 | carry of cell `(i-1, j)`, column `c-1` | carry of cell `(i-1, N-1)` |

Sums drop straight down to the same column; carries move diagonally, down a
row and one column to the left. Those two rules are ordinary carry-save
addition. The third column of the table is the new part. In a conventional
array the leftmost cell of each row has nothing above it, so its `b` input is
0. Here it receives a carry from the last row. The carry of last-row cell
`(N-1, k)` has weight 2^(N-1+k+1) = 2^(N+k), and the leftmost cell of row
`k+1` is in column `N+k`, so the carry lands at its proper weight.

For the default N = 4, with product columns P0 … P7 (`.` = partial-product
cell, column headings are product bits):

```
          P6    P5    P4    P3    P2    P1    P0
row 0                    [0,3] [0,2] [0,1] [0,0]      b = cin = 0
row 1                [1,3] [1,2] [1,1] [1,0]          [1,3].b <- carry [3,0]
row 2          [2,3] [2,2] [2,1] [2,0]                [2,3].b <- carry [3,1]
row 3    [3,3] [3,2] [3,1] [3,0]                      [3,3].b <- carry [3,2]
          |     |     |     |
         P6    P5    P4    P3          P7 = carry of [3,3]
```

- `p[0] … p[2]` are the sums of the rightmost cells of rows 0 … 2.
- `p[3] … p[6]` are the sums of the last row.
- The carries of the last row in columns 3, 4 and 5 go back up as shown.
- The carry of column 6 is the product MSB `p[7]`.

### Why the result is exact

A full adder keeps `a + b + cin = sum + 2·cout`. Each partial product enters
the array once, at its own weight. Every sum and carry is used exactly once,
either at its weight inside the array or as one product bit. The weighted
total therefore never changes, so `p` equals `x · y`. The same argument holds
for any matrix of input bits, not only for AND-gate products. The array
testbench relies on this.

### Why the feedback does not form a loop

The wiring looks circular: a carry leaves the last row and goes back into row
1. But cell `(i, c)` uses only:
- cells in column `c-1`, through the diagonal carry or a fed-back carry;
- the cell above it in its own column.

Ordered by column and then by row, every cell depends only on cells before it,
so the logic is acyclic. The signal flow is a ripple from right to left.
Starting at column N-1, a carry runs down to the last row, jumps up into the
next column's top cell and runs down again. This path replaces the ripple of
the removed adder.

### First row

Each row-0 cell adds its partial product to two zeros, as in the original
drawing. Its carry is always 0 and its sum is its partial product. These cells
are kept so that the structure matches the circuit cell for cell. Any
synthesis tool removes them. After synthesis `p[0]` is a plain wire from
`x[0] & y[0]`.

## Timing and interface

Everything is combinational. There is no clock, reset, register or handshake.

`prop_array_mult #(N)` has three ports:
- `x`, the N-bit unsigned multiplicand (input);
- `y`, the N-bit unsigned multiplier (input);
- `p`, the 2N-bit product (output).

The product is valid one propagation delay after the operands settle. To use
the multiplier in a clocked design, register its inputs and outputs outside
it.

## Sizes other than 4 × 4

The original circuit is drawn only for N = 4. The RTL generalises the routing:
the carry of last-row cell `(N-1, k)` feeds `b` of cell `(k+1, N-1)` for
`k = 0 … N-2`, and the carry of `(N-1, N-1)` is `p[2N-1]`. At N = 4 this
reproduces the published drawing exactly. Exhaustive simulation confirms it
for N = 2, 3, 4, 5, 6 and 8, and random simulation for N = 16. N must be at
least 2; elaboration stops with an error otherwise.

## How far this follows the original and where it departs

Taken from the original:
- unsigned operands;
- AND-gate partial products;
- the cell grid and the sum and carry directions;
- zeros into the first row;
- the removal of the final adder row;
- which carry goes to which column;
- the last carry as the product MSB;
- N = 4 as the default.

This design's own choices:
- The full adder is written as its Boolean equations. The original uses a
  specific 16-transistor CMOS cell whose circuit is not reproduced.
- The port names, the packed `pp[i][j]` layout and the parameter `N`.
- The general-N routing rule.

Inconsistencies in the original that this design had to settle:
- One drawing labels every first-row input `Y0`. The dot diagram and the
  conventional drawing give `X0Y3 … X0Y0`, and those are used.
- The product formula indexes bits from 1. The text indexes from 0, and so
  does this design.
- The original reports 56 transistors saved. Removing four 16-transistor adders
  would save 64. This affects only the circuit-level claims, not the logic.

The power, delay and energy improvements reported for the circuit are
properties of the transistor implementation. This RTL does not claim them.
Written as Boolean logic, the array is simply a smaller netlist, 16 full
adders instead of 20.

## Files

| file | contents |
|------|----------|
| `rtl/full_adder.sv` | one-bit full adder |
| `rtl/pp_gen.sv` | N × N AND-gate partial-product generator |
| `rtl/csa_array.sv` | the carry-save array with fed-back carries |
| `rtl/prop_array_mult.sv` | top: `pp_gen` followed by `csa_array` |
| `tb/tb_full_adder.sv` | all 8 input combinations |
| `tb/tb_pp_gen.sv` | 4 × 4 exhaustive, 8 × 8 random |
| `tb/tb_csa_array.sv` | all 65536 bit matrices at N = 4, all at N = 3, random at N = 8, against the weighted sum |
| `tb/tb_prop_array_mult.sv` | default 4 × 4 top, all 256 operand pairs; also counts how often each fed-back carry and the MSB carry fire, and fails if any never does |
| `tb/tb_mult_sizes.sv` | top at N = 2, 3, 5, 6, 8 (exhaustive) and 16 (random) |

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. A
watchdog ends the run with a failure if the stimulus hangs.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl tb/tb_prop_array_mult.sv \
          --top-module tb_prop_array_mult
./obj_dir/Vtb_prop_array_mult
```

Swap in any other testbench name the same way. `-Irtl` lets Verilator find
each module in `rtl/<module>.sv`. For lint only:

```
verilator --lint-only -Wall -Irtl rtl/prop_array_mult.sv
```

To change the size, override `N` on `prop_array_mult`. The product width
follows as 2N.
