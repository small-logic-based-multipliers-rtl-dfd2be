// irr_mult -- unsigned WX x WY multiplier built from incomplete sub-multiplier
// tiles, for LUT-based FPGA fabric.
//
// The board of WX*WY partial products is covered by tiles (see irr_pkg for the
// placement rule):
//   * s_tile : an s-shaped group of four products (two on each of two
//     adjacent weights, 3-bit sum) plus, where one is available, a spare 1x1
//     product that shares a LUT with the tile's low bit;
//   * pp_tile for cells left over: two-position helper tiles where two such
//     cells share a 4x4 window, single positions otherwise.
// Each tile writes its output bits, at their weights, into rows of a bit
// heap (the s-shape sum and the spare product each get a row, since the
// spare product may share a weight with the sum), and bitheap_compressor
// sums all rows into the product.
//
// Truncation: with W_OUT < WX+WY only the top W_OUT product bits are output,
// faithfully rounded (within one unit of the last place of the exact product,
// either direction). The lowest-weight positions are then not tiled at all and
// a constant row compensates for their largest possible sum; irr_pkg explains
// how the cut is chosen. W_OUT must be at least max(WX, WY).
//
// Pipelining: with PIPE = 1 the bit heap (the tile outputs) is registered on
// the rising clk edge, so p follows x, y by one clock cycle. With PIPE = 0 the
// multiplier is purely combinational and clk is unused. There is no reset: the
// one register stage holds no state that outlives the next operands.
//
// Follows the paper: the tile class, its equations, the tile-plus-compressor
// structure, unsigned operands, the 7x7 size of its packing experiment, the
// truncated W_OUT option and the one-stage pipeline option. This design's own
// choices: the regular greedy tile placement (the paper places tiles with an
// ILP), a plain full-adder compressor tree, the method used to pick the
// truncation cut, and the position of the pipeline register.
module irr_mult
  import irr_pkg::*;
#(
  parameter int unsigned WX    = 7,
  parameter int unsigned WY    = 7,
  parameter int unsigned W_OUT = WX + WY,
  parameter bit          PIPE  = 1'b0
) (
  input  logic             clk,
  input  logic [WX-1:0]    x,
  input  logic [WY-1:0]    y,
  output logic [W_OUT-1:0] p
);

  localparam int unsigned     COLS    = WX + WY;
  localparam int unsigned     T_OMIT  = omit_below(WX, WY, W_OUT);
  localparam longint unsigned CONST   = round_const(WX, WY, W_OUT);
  localparam tiling_t         TL      = make_tiling(WX, WY, T_OMIT);
  localparam int unsigned     NT      = num_tiles(TL);
  localparam int unsigned     NR      = 2 * NT + 1; // two rows per tile + constant row

  if (WX < 1 || WY < 1 || WX > MAX_W || WY > MAX_W) begin : g_bad_width
    $error("irr_mult: operand widths must be 1..%0d", MAX_W);
  end
  if (W_OUT > COLS || W_OUT < WX || W_OUT < WY) begin : g_bad_w_out
    $error("irr_mult: W_OUT must lie between max(WX,WY) and WX+WY");
  end

  typedef logic [NR-1:0][COLS-1:0] heap_rows_t;

  // Which heap bits each row can set: the structure of the bit heap.
  function automatic heap_rows_t heap_present();
    heap_rows_t m = '0;
    for (int t = 0; t < NT; t++) begin
      int w0, we;
      w0 = int'(TL[t].a) + int'(TL[t].b);
      we = int'(TL[t].eu) + int'(TL[t].ev);
      if (TL[t].kind == TILE_S) begin
        for (int k = 1; k <= 3; k++) m[2*t][w0 + k] = 1'b1;
        if (TL[t].has_ex) m[2*t+1][we] = 1'b1;
      end else begin
        for (int k = 0; k < int'(pattern_width(TL[t].mask)); k++) m[2*t][w0 + k] = 1'b1;
      end
    end
    m[2*NT] = COLS'(CONST);
    return m;
  endfunction

  localparam heap_rows_t PRESENT = heap_present();

  heap_rows_t rows, rows_q;

  // -------------------------------------------------------------- the tiles
  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam tile_t       TD   = TL[t];
    localparam int unsigned A    = int'(TD.a);
    localparam int unsigned B    = int'(TD.b);
    localparam int unsigned EU   = int'(TD.eu);
    localparam int unsigned EV   = int'(TD.ev);

    if (TD.kind == TILE_S) begin : g_s
      localparam int unsigned W0 = A + B + 1;   // weight of r[0]
      logic [2:0] u;
      logic [1:0] v;
      logic       ex_u, ex_v;
      logic [3:0] r;
      logic [COLS-1:0] row, row_ex;

      if (TD.vert) begin : g_vert
        assign u = y[A +: 3];
        assign v = x[B +: 2];
      end else begin : g_horz
        assign u = x[A +: 3];
        assign v = y[B +: 2];
      end

      if (!TD.has_ex) begin : g_no_ex
        assign ex_u = 1'b0;
        assign ex_v = 1'b0;
      end else if (TD.vert) begin : g_ex_vert
        assign ex_u = y[EU];
        assign ex_v = x[EV];
      end else begin : g_ex_horz
        assign ex_u = x[EU];
        assign ex_v = y[EV];
      end

      s_tile u_tile (
        .u    (u),
        .v    (v),
        .ex_u (ex_u),
        .ex_v (ex_v),
        .r    (r)
      );

      // The spare product may fall on a weight of r[2:0]: own row.
      always_comb begin
        row          = '0;
        row[W0 +: 3] = r[2:0];
        row_ex       = '0;
        if (TD.has_ex) row_ex[EU + EV] = r[3];
      end

      assign rows[2*t]   = row;
      assign rows[2*t+1] = row_ex;
    end else begin : g_pat
      localparam int unsigned OW = pattern_width(TD.mask);
      logic [3:0]      uw, vw;      // 4x4 window of the board at (A, B)
      logic [OW-1:0]   r;
      logic [COLS-1:0] row;

      // Window bits beyond the board edge read as 0 (and are unused by MASK).
      for (genvar k = 0; k < 4; k++) begin : g_win
        if (TD.vert) begin : g_vert
          assign uw[k] = (A + k < WY) ? y[(A + k) % WY] : 1'b0;
          assign vw[k] = (B + k < WX) ? x[(B + k) % WX] : 1'b0;
        end else begin : g_horz
          assign uw[k] = (A + k < WX) ? x[(A + k) % WX] : 1'b0;
          assign vw[k] = (B + k < WY) ? y[(B + k) % WY] : 1'b0;
        end
      end

      pp_tile #(.MASK(TD.mask)) u_tile (
        .x (uw),
        .y (vw),
        .r (r)
      );

      always_comb begin
        row             = '0;
        row[A + B +: OW] = r;
      end

      assign rows[2*t]   = row;
      assign rows[2*t+1] = '0;
    end
  end

  // Constant row of the truncated multiplier (all zero for a full one).
  assign rows[2*NT] = COLS'(CONST);

  // ------------------------------------------------------ optional pipeline
  if (PIPE) begin : g_pipe
    always_ff @(posedge clk) rows_q <= rows;
  end else begin : g_comb
    assign rows_q = rows;
  end

  // ---------------------------------------------------- compression + adder
  logic [COLS-1:0] sum;

  bitheap_compressor #(
    .NR      (NR),
    .COLS    (COLS),
    .PRESENT (PRESENT)
  ) u_compressor (
    .rows (rows_q),
    .sum  (sum)
  );

  assign p = sum[COLS-1 -: W_OUT];

endmodule
