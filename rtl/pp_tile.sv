// pp_tile -- generic sub-multiplier tile for any partial-product pattern in a
// 4x4 window of the multiplier board.
//
// MASK selects which of the 16 products x[i]&y[j] of the window the tile
// covers (bit 4*j+i). The tile outputs the weighted sum of the selected
// products, sum of x[i]&y[j]*2^(i+j), as an unsigned word of OW bits, where OW
// is just wide enough for the largest possible sum. A rectangular 3x2 tile
// (max 21) needs 5 bits; the same tile without its top corner (max 13) needs
// 4 -- the observation that motivates incomplete tiles.
//
// As in the paper's tile search, the tile is described by its truth table:
// the table of all 256 input combinations is computed while elaborating and
// indexed by {y, x}. Each output bit is a function of at most eight inputs;
// logic synthesis reduces it to the inputs it really depends on. Window
// inputs outside the pattern are don't-cares.
//
// Purely combinational; no clock. Operands are unsigned.
module pp_tile #(
  parameter  logic [15:0]  MASK = 16'h0037,        // default: 3x2 tile minus one corner
  localparam int unsigned  OW   = irr_pkg::pattern_width(MASK)
) (
  input  logic [3:0]    x,   // window columns x[0..3]
  input  logic [3:0]    y,   // window rows    y[0..3]
  output logic [OW-1:0] r    // weighted sum of the selected products
);

  typedef logic [255:0][OW-1:0] table_t;

  function automatic table_t tabulate(logic [15:0] mask);
    table_t t;
    for (int n = 0; n < 256; n++) begin
      int unsigned s = 0;
      for (int k = 0; k < 16; k++)
        if (mask[k] && n[k % 4] && n[4 + k / 4]) s += 1 << ((k % 4) + (k / 4));
      t[n] = OW'(s);
    end
    return t;
  endfunction

  localparam table_t TRUTH = tabulate(MASK);

  assign r = TRUTH[{y, x}];

endmodule
