# Incomplete-tile multipliers for LUT-based FPGAs

A small unsigned multiplier built only from FPGA logic (no DSP blocks) is
usually assembled from little sub-multipliers ("tiles"). Their output bits are
then summed by a compressor tree. A tile costs LUTs twice: once for itself,
and again for every output bit it sends into the compressor tree. Rectangular
tiles waste both. A 3x2 tile, for example, has a largest value of 21, so it
needs five output bits and three 6-input LUTs, and one of those LUTs is half
empty.

The idea built here is to drop partial products from a tile so that the rest
packs better. Take the 3x2 tile and remove its top corner product (weight 2^3).
Its largest value is then 13, which fits in four bits, and the four output
functions fit exactly into two 6-input LUTs, each split into two 5-input
functions. It covers 5 board positions for 2 LUTs instead of 6 positions for 3.
On its own such a tile does not compute a multiplication. As one piece of a
larger multiplier, next to other tiles that cover the missing positions, it
lowers the LUT count.

This RTL gives a parameterised unsigned `WX x WY` multiplier built this way.
It has an optional faithfully rounded truncated output and an optional
one-cycle pipeline stage. The default is the unsigned 7x7 combinational
multiplier.

## The board

Picture the product `X*Y` as a board of `WX*WY` partial products `x[i]&y[j]`.
Position `(i,j)` has weight `2^(i+j)`. A tile covers a set of positions and
outputs the sum of their weighted partial products as a small binary number.
Every tile output bit lands in a column of one *bit heap*: column `c` holds all
bits of weight `2^c`. The product is the sum of the heap.

    weights of a 3x2 tile            the same tile, corner removed
         x2   x1   x0                     x2   x1   x0
    y0   4    2    1                 y0   4    2    1
    y1   8    4    2                 y1   -    4    2
    max 21 -> 5 output bits          max 13 -> 4 output bits

## The s-shaped tile (`s_tile`)

Many 5-position tiles pack into two LUTs. All of them break down into the same
structure: an **s-shaped element** of four positions plus one **spare 1x1
product**. Take a 3-bit slice `u[2:0]` of one operand and a 2-bit slice
`v[1:0]` of the other. The s-shape covers

    low weight  (tile weight 2^0): u1&v0 , u0&v1
    high weight (tile weight 2^1): u2&v0 , u1&v1

    board picture (u grows to the left, v downwards):
         u2  u1  u0
    v0   #   #   .
    v1   .   #   #

Its sum is 0..6, so it needs three output bits `r[2:0]`. After logic
minimisation the three bits are:

    r0 = ~v1 v0 u1 | v0 ~u0 u1 | v1 ~v0 u0 | v1 u0 ~u1          (= u1v0 ^ u0v1)
    r1 = v1 ~u0 ~u2 u1 | v1 u0 u2 u1 | ~v1 v0 u2 | v0 u2 ~u1 | v1 ~v0 u1
    r2 = v1 v0 u2 u1 | v1 v0 u0 u1

`r1` and `r2` each need five inputs, so together they fill one 6-input LUT.
`r0` needs only four (`u0, u1, v0, v1`). The other half of its LUT can
therefore compute one more, unrelated partial product `r3 = ex_u & ex_v` at no
cost, provided that product shares one of those four inputs. `s_tile` writes
these equations out as sums of products. `r3` comes in on its own ports
`ex_u, ex_v`, and its weight has nothing to do with the weights of `r[2:0]`.

The same module serves a *vertical* s-shape. Swap the operands: `u` then comes
from `Y` and `v` from `X`. This is valid because `x&y = y&x`.

Placed with its spare product at `(u0, v0)`, the tile is exactly the
"3x2 without a corner" tile of the introduction.

## Generic pattern tile (`pp_tile`)

`pp_tile` realises any pattern of positions inside a 4x4 window. The pattern
is given as a 16-bit `MASK`, where bit `4*j+i` selects `x[i]&y[j]`. The output
width is computed from the pattern's largest sum. The module is a truth table,
computed at elaboration time and indexed by the eight window inputs; synthesis
reduces each output to the inputs it really depends on. This describes a tile
the same way a search over tile shapes would. In the multiplier it realises
the small *helper tiles* that cover what the s-shapes leave over: two positions
somewhere inside a 4x4 window, or a single position. Its testbench also drives
it with the corner-less 3x2, the full 3x2, the 3x3, the bare s-shape and a
diagonal pattern.

## Placing the tiles

The placement is a fixed greedy rule, evaluated at elaboration time by
`irr_pkg::make_tiling`. Coordinates `(u,v)` are `(x,y)` for horizontal tiles
and `(y,x)` for vertical ones. The rule has three steps:

1. Take pairs of rows `v = b, b+1` (`b = 0, 2, 4, ...`). Scan the offset `a`
   upwards and place an s-shape wherever all four of its cells are free and
   kept.
2. For each remaining cell, in row-major order, look for the first s-shape
   whose spare slot is still free and that shares an input with the cell. That
   means the cell is in column `a` or `a+1` with `v` in `[b-2, b+3]`, or in row
   `b` or `b+1` with `u` in `[a-2, a+3]`. If one is found, the cell becomes
   that s-shape's spare product.
3. Every cell still uncovered joins the first single-position tile that lies
   within the same 4x4 window, turning it into a two-position helper tile.
   If there is none, the cell becomes a single-position tile itself.

The layout is vertical when `WY` is odd and `WX` even, otherwise horizontal.

The 7x7 default gives 9 s-tiles, 7 of which carry a spare product, and 3
helper tiles. In the maps below, upper-case letters mark the cells of one tile.
A lower-case letter is the spare product of the s-tile with the same letter.
`x0` is on the right.

    7x7                              10x10 truncated to 10 bits (. = omitted)
    y0   C C B B A A a               y0   a A A . . . . . . .
    y1   c C C B B A A               y1   O O A A . . . . . .
    y2   F F E E D D d               y2   c C C B B . . . . .
    y3   f F F E E D D               y3   P P C C B B . . . .
    y4   I I H H G G g               y4   f F F E E D D . . .
    y5   i I I H H G G               y5   Q Q F F E E D D . .
    y6   L L K K h J J               y6   j J J I I H H G G .
                                     y7   R R J J I I H H G G
                                     y8   n N N M M L L K K g
                                     y9   S S N N M M L L K K

This is a regular placement, not an optimised one. The published results
choose tiles and compressor together with an integer linear program, and they
use a set of about forty tile shapes. Those results are therefore not LUT
counts that this RTL will reproduce. The function is the same: the product is
exact.

## Bit heap and compressor tree (`bitheap_compressor`, `csa_stage`)

Each tile drives two rows of `WX+WY` bits, with its bits at their weights:

- one row for the s-shape sum (or the helper tile's sum);
- one row for the spare product, because the spare product can fall on the
  same weight as `r[1]` or `r[2]`.

One more row holds the rounding constant of a truncated multiplier. The
parameter `PRESENT` marks which bits of which rows can be non-zero. From it the
compressor works out, at elaboration time, the height of every column.

The compressor then runs in three steps:

1. It gathers the present bits of each column into that column's lowest slots.
2. It applies Wallace layers of full adders until no column holds more than
   two bits. Each layer is a `csa_stage`, and the column heights of each layer
   are known constants.
3. It adds the two remaining rows with one binary adder.

An FPGA-tuned compressor tree would use generalised parallel counters, 4:2 row
compressors and ternary adders on the carry chain, picked by the same ILP as
the tiles. Plain full adders give the same sum. Only the LUT count differs.

## Truncated, faithfully rounded output (`W_OUT < WX+WY`)

The output is then the top `W_OUT` product bits, with one unit in the last
place `ulp = 2^k`, where `k = WX+WY-W_OUT`. The low-weight corner of the board
is not tiled at all: every position with `i+j < t` is left out. To compensate,
the constant `C` is added to the heap. `C` is the largest possible sum of the
omitted positions, rounded up to a multiple of `2^t`.

`t` is the largest value for which `C < 2^k`. With `D` the true value of the
omitted part (`0 <= D <= C`), the output is `floor((P - D + C) / 2^k)`. It
differs from the exact product `P` by less than one ulp in either direction,
which is what faithful rounding requires. The kept region is a staircase, and
the s-shape, whose cells lie on two adjacent anti-diagonals, follows such a
staircase well. For 10x10 with `W_OUT = 10`, positions with `i+j < 7` are
dropped and `C = 896`.

`W_OUT` must be at least `max(WX, WY)`, so that `P + C` cannot overflow. This
is checked at elaboration. The choice of cut is this design's own. The
published truncated results use a finer error analysis that drops whole tiles
rather than whole columns.

## Pipelining

With `PIPE = 1`, all heap rows (the tile outputs) are registered on the rising
edge of `clk`. The compressor and adder follow that register. `p` then shows
the product of the operands present at the previous rising edge, which is one
cycle of latency. The register has no reset. With `PIPE = 0` (the default) the
design is combinational and `clk` is unused. The register position is a choice
made here.

## Interface of `irr_mult`

| parameter | default | meaning |
|-----------|---------|---------|
| `WX`, `WY` | 7, 7 | operand widths, 1..24 |
| `W_OUT` | `WX+WY` | product bits kept; less than `WX+WY` gives a faithfully rounded truncated product |
| `PIPE` | 0 | 1 adds one register stage |

| port | dir | width | |
|------|-----|-------|-|
| `clk` | in | 1 | clock of the pipeline register |
| `x` | in | `WX` | unsigned operand |
| `y` | in | `WY` | unsigned operand |
| `p` | out | `W_OUT` | product, or its top `W_OUT` bits |

The operands are unsigned only. Signed tile variants exist in principle (a
tile search can be repeated for each signedness of the operands) but are not
built.

## How far it can be trusted

Every module has a self-checking testbench in `tb/`, and each testbench ends
by printing a line `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|-----------|----------------|
| `tb_s_tile` | all 128 input combinations against the arithmetic sum; the spare AND; range 0..6 |
| `tb_pp_tile` | six patterns, all 256 inputs each, and their output widths |
| `tb_bitheap_compressor` | an irregular sparse heap, a complete 20x14 heap, and a single row, with random data |
| `tb_irr_mult` | 7x7 and 8x8 exhaustively; 6x5 (vertical layout); 1x1, 1x2 and 2x2; random 13x13; 10x10 and 16x16 truncated, checked for faithful rounding; 7x7 pipelined, with a latency check; also checks that each mechanism actually occurs |
| `tb_irr_mult_full` | the default configuration, all 16384 operand pairs |
| `tb_irr_mult_sizes` | every full `WX x WY` with `1 <= WX, WY <= 16`, and every truncated `W x W` with `W_OUT = W`, `1 <= W <= 16` |

The functional results (exact products, faithful rounding) are checked
thoroughly. The properties that motivate the design are not checked here: LUT
counts, LUT packing and timing. They depend on FPGA synthesis, and on tile
placement and compressor design that this RTL does not optimise.

For scale: yosys `synth_xilinx -family xc7` maps the default 7x7 combinational
multiplier to 81 LUTs and 3 `CARRY4` cells. The same mapping gives 86 LUTs,
3 `CARRY4` cells and 40 flip-flops for the pipelined 7x7. These counts are
LUT outputs: this mapping does not pair two 5-input functions into one
dual-output 6-input LUT, which the tile design relies on. The published
result for an ILP-optimised 7x7 with a tuned compressor is 36 LUTs, so do not
expect this RTL to reach the paper's LUT counts as it stands. Most of the
difference probably comes from the plain full-adder tree.

To simulate, for example, the end-to-end test with Verilator:

    verilator --binary --timing -Irtl rtl/irr_pkg.sv rtl/csa_stage.sv rtl/s_tile.sv \
        rtl/pp_tile.sv rtl/bitheap_compressor.sv rtl/irr_mult.sv tb/tb_irr_mult.sv \
        --top-module tb_irr_mult
    ./obj_dir/Vtb_irr_mult

`tb_irr_mult_sizes` elaborates 272 multipliers and takes a few minutes to
compile.

## Files

- `rtl/irr_pkg.sv`: tile types, pattern widths, truncation cut and constant,
  tile placement (all evaluated at elaboration time)
- `rtl/s_tile.sv`: s-shaped incomplete tile with spare product
- `rtl/pp_tile.sv`: generic 4x4-window pattern tile (truth table), used for
  helper tiles
- `rtl/csa_stage.sv`: one full-adder layer of the compressor tree
- `rtl/bitheap_compressor.sv`: compressor tree and final adder
- `rtl/irr_mult.sv`: the multiplier (top)
- `tb/`: the testbenches listed above
