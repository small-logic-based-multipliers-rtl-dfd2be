// s_tile -- s-shaped incomplete sub-multiplier with a spare 1x1 product.
//
// The tile covers four partial products of an unsigned multiplier board that
// form an "s": two on one weight and two on the next higher weight,
//     low  : u[1]&v[0] , u[0]&v[1]        (weight 2^0 of the tile)
//     high : u[2]&v[0] , u[1]&v[1]        (weight 2^1 of the tile)
// where u is a 3-bit slice and v a 2-bit slice of the two operands (X and Y
// for a horizontal tile, Y and X for a vertical one). Their sum, 0..6, is
// returned as r[2:0]. The tile is "incomplete": it is a 3x2 multiplier with
// two corner products missing, and is only useful as one piece of a larger
// multiplier.
//
// r[0] depends on four inputs only, so the second half of that LUT carries an
// unrelated partial product r[3] = ex_u & ex_v for free, where ex_u/ex_v share
// one input with r[0]. Mapped to 6-input LUTs the tile is two LUTs, each split
// into two 5-input functions: 5 board positions and 4 output bits.
//
// The sum-of-products equations of r[0..2] are written out exactly as the
// paper gives them after Quine-McCluskey simplification (there in the names
// x2,x3,x4,y2,y3 of Fig. 4b; here u[0..2], v[0..1]). The spare-product ports
// are this design's way of presenting the free 1x1 element.
//
// Purely combinational; no clock.
module s_tile (
  input  logic [2:0] u,     // 3-bit operand slice, u[0] the lowest index
  input  logic [1:0] v,     // 2-bit operand slice, v[0] the lowest index
  input  logic       ex_u,  // operand bits of the spare 1x1 product
  input  logic       ex_v,
  output logic [3:0] r      // r[2:0]: s-shape sum, r[3]: spare product
);

  logic x2, x3, x4, y2, y3;

  always_comb begin
    {x4, x3, x2} = u;
    {y3, y2}     = v;
    r[0] = (!y3 &  y2 &  x3) | ( y2 & !x2 &  x3) | ( y3 & !y2 &  x2) | ( y3 &  x2 & !x3);
    r[1] = ( y3 & !x2 & !x4 & x3) | ( y3 & x2 & x4 & x3) | (!y3 &  y2 &  x4) |
           ( y2 &  x4 & !x3) | ( y3 & !y2 &  x3);
    r[2] = ( y3 &  y2 &  x4 & x3) | ( y3 &  y2 &  x2 & x3);
    r[3] = ex_u & ex_v;
  end

endmodule
