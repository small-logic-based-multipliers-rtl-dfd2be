// irr_pkg -- shared types and elaboration-time helpers of the incomplete-tile
// multiplier.
//
// A WX x WY unsigned multiplication is drawn as a board of WX*WY partial
// products x[i]&y[j], each of weight 2^(i+j). The multiplier is built by
// covering the board with small sub-multipliers ("tiles") whose output bits
// all land on one bit heap, which a compressor tree then sums.
//
// The functions here are evaluated while the design elaborates; they never
// become hardware:
//   * pattern_max / pattern_width  -- range and output width of a tile that
//     covers an arbitrary pattern inside a 4x4 window (bit k = 4*j + i).
//   * omit_below / round_const     -- which low-weight positions a faithfully
//     rounded truncated multiplier may leave out, and the constant that
//     compensates for them.
//   * make_tiling                  -- the placement of s-shaped incomplete
//     tiles, their spare 1x1 products, and of small tiles (two-position
//     helper tiles or single positions) for what is left.
//
// The tiling is a fixed, regular greedy placement chosen for this RTL. It uses
// the tile class the paper found most efficient (s-shaped element plus one
// free 1x1 partial product), but it is not the output of the paper's ILP
// optimisation, which is not reproduced here.
package irr_pkg;

  // Largest operand width the tiler accepts and largest number of tiles.
  localparam int unsigned MAX_W     = 24;
  localparam int unsigned MAX_TILES = 256;

  typedef enum logic [1:0] {
    TILE_NONE = 2'd0,   // unused slot of the tiling table
    TILE_S    = 2'd1,   // s-shaped element (+ optional spare 1x1 product)
    TILE_PAT  = 2'd2    // small pattern tile: a 1x1 tile or a 2-position helper
  } tile_kind_e;

  // One placed tile. Coordinates are in (u,v) space: u is the operand from
  // which the s-shape takes 3 bits, v the one it takes 2 bits from. With
  // vert = 0, u = X and v = Y; with vert = 1 the roles are swapped.
  //   TILE_S  : cells (u a+1, v b) (u a+2, v b) (u a, v b+1) (u a+1, v b+1);
  //             spare product (u eu, v ev) when has_ex.
  //   TILE_PAT: cells (u a+du, v b+dv) for every set bit 4*dv+du of mask.
  typedef struct packed {
    tile_kind_e kind;
    logic [15:0] mask;
    logic       vert;
    logic [5:0] a;
    logic [5:0] b;
    logic       has_ex;
    logic [5:0] eu;
    logic [5:0] ev;
  } tile_t;

  typedef tile_t [MAX_TILES-1:0] tiling_t;

  // ---------------------------------------------------------------- patterns

  // Largest value a 4x4-window pattern tile can output: the sum of the
  // weights 2^(i+j) of its selected positions.
  function automatic int unsigned pattern_max(logic [15:0] mask);
    int unsigned m = 0;
    for (int k = 0; k < 16; k++)
      if (mask[k]) m += 1 << ((k % 4) + (k / 4));
    return m;
  endfunction

  // Output word size of a pattern tile: bits needed for 0..pattern_max.
  function automatic int unsigned pattern_width(logic [15:0] mask);
    int unsigned m = pattern_max(mask);
    int unsigned w = 1;
    while ((1 << w) <= m) w++;
    return w;
  endfunction

  // -------------------------------------------------------------- truncation

  // Sum of the weights of all board positions with i + j < t.
  function automatic longint unsigned omitted_max(int unsigned wx, int unsigned wy,
                                                  int unsigned t);
    longint unsigned e = 0;
    for (int unsigned i = 0; i < wx; i++)
      for (int unsigned j = 0; j < wy; j++)
        if (i + j < t) e += longint'(1) << (i + j);
    return e;
  endfunction

  // omitted_max(t) rounded up to a multiple of 2^t (bits below t never reach
  // the heap, so the constant may only have bits at weight t and above).
  function automatic longint unsigned const_for(int unsigned wx, int unsigned wy,
                                                int unsigned t);
    longint unsigned e = omitted_max(wx, wy, t);
    longint unsigned u = longint'(1) << t;
    return ((e + u - 1) / u) * u;
  endfunction

  // Truncated multiplier keeping the top w_out of wx+wy product bits
  // (ulp = 2^k, k = wx+wy-w_out). Positions with i+j < t are left out and a
  // constant C >= (their largest sum) is added, with C < 2^k. Then the result
  // floor((kept + C) / 2^k) differs from the exact product by less than one
  // ulp in either direction: faithful rounding. Returns the largest such t.
  function automatic int unsigned omit_below(int unsigned wx, int unsigned wy,
                                             int unsigned w_out);
    int unsigned k = wx + wy - w_out;
    int unsigned best = 0;
    for (int unsigned t = 0; t <= k; t++)
      if (const_for(wx, wy, t) < (longint'(1) << k)) best = t;
    return best;
  endfunction

  function automatic longint unsigned round_const(int unsigned wx, int unsigned wy,
                                                  int unsigned w_out);
    return const_for(wx, wy, omit_below(wx, wy, w_out));
  endfunction

  // ------------------------------------------------------------------ tiling

  // The s-shapes are laid in the longer-stripe direction: horizontally (3 bits
  // of X, 2 of Y) unless Y is odd and X even, where the transposed layout
  // leaves fewer stray cells.
  function automatic logic tiling_vertical(int unsigned wx, int unsigned wy);
    return (wy % 2 == 1) && (wx % 2 == 0) && (wx >= 2) && (wy >= 3);
  endfunction

  // Free and kept board cell, in (u,v) space.
  function automatic logic cell_ok(logic [MAX_W*MAX_W-1:0] used, int u, int v,
                                   int wu, int wv, int t);
    if (u < 0 || v < 0 || u >= wu || v >= wv) return 1'b0;
    if (u + v < t) return 1'b0;
    return !used[u*MAX_W + v];
  endfunction

  // Greedy tiling of the kept part of the board (positions i+j >= t).
  //  1. Walk pairs of v-rows (b = 0, 2, 4, ...). In each pair place an
  //     s-shape at every u offset a where all four of its cells are free.
  //  2. Every cell still uncovered goes to the first s-shape whose spare 1x1
  //     slot is free and which shares an input with the cell's AND: the cell
  //     lies in u-column a or a+1 within v in [b-2, b+3], or in v-row b or b+1
  //     within u in [a-2, a+3] (the shaded region of Fig. 4 of the paper).
  //     The s-shape's low output bit depends on exactly u_a, u_a+1, v_b,
  //     v_b+1, so the spare product adds one LUT input and shares the LUT.
  //  3. What is left is paired up into two-position helper tiles: a cell
  //     joins the first single-position tile it shares a 4x4 window with;
  //     otherwise it becomes a single-position tile itself.
  function automatic tiling_t make_tiling(int unsigned wx, int unsigned wy,
                                          int unsigned t);
    tiling_t                  tl;
    logic [MAX_W*MAX_W-1:0]   used;
    int                       n;
    logic                     vert;
    int                       wu, wv;
    bit                       done;
    for (int k = 0; k < MAX_TILES; k++) tl[k] = '0;
    used = '0;
    n    = 0;
    vert = tiling_vertical(wx, wy);
    wu   = vert ? int'(wy) : int'(wx);
    wv   = vert ? int'(wx) : int'(wy);
    // 1. s-shapes
    for (int b = 0; b + 1 < wv; b += 2)
      for (int a = 0; a + 2 < wu; a++)
        if (cell_ok(used, a+1, b, wu, wv, t) && cell_ok(used, a+2, b, wu, wv, t) &&
            cell_ok(used, a, b+1, wu, wv, t) && cell_ok(used, a+1, b+1, wu, wv, t) &&
            n < MAX_TILES) begin
          used[(a+1)*MAX_W + b]   = 1'b1;
          used[(a+2)*MAX_W + b]   = 1'b1;
          used[a*MAX_W + b+1]     = 1'b1;
          used[(a+1)*MAX_W + b+1] = 1'b1;
          tl[n].kind = TILE_S;
          tl[n].vert = vert;
          tl[n].a    = 6'(a);
          tl[n].b    = 6'(b);
          n++;
        end
    // 2. spare 1x1 slots, 3. stand-alone 1x1 tiles
    for (int v = 0; v < wv; v++)
      for (int u = 0; u < wu; u++)
        if (cell_ok(used, u, v, wu, wv, t)) begin
          used[u*MAX_W + v] = 1'b1;
          done = 1'b0;
          for (int k = 0; k < n; k++) begin
            int a = int'(tl[k].a);
            int b = int'(tl[k].b);
            if (!done && tl[k].kind == TILE_S && !tl[k].has_ex &&
                (((u == a || u == a+1) && v >= b-2 && v <= b+3) ||
                 ((v == b || v == b+1) && u >= a-2 && u <= a+3))) begin
              tl[k].has_ex = 1'b1;
              tl[k].eu     = 6'(u);
              tl[k].ev     = 6'(v);
              done         = 1'b1;
            end
          end
          for (int k = 0; k < n; k++) begin
            int a = int'(tl[k].a);
            int b = int'(tl[k].b);
            int na = (u < a) ? u : a;
            int nb = (v < b) ? v : b;
            if (!done && tl[k].kind == TILE_PAT && $countones(tl[k].mask) == 1 &&
                u - na <= 3 && a - na <= 3 && v - nb <= 3 && b - nb <= 3) begin
              tl[k].mask = '0;
              tl[k].mask[4*(b-nb) + (a-na)] = 1'b1;
              tl[k].mask[4*(v-nb) + (u-na)] = 1'b1;
              tl[k].a    = 6'(na);
              tl[k].b    = 6'(nb);
              done       = 1'b1;
            end
          end
          if (!done && n < MAX_TILES) begin
            tl[n].kind = TILE_PAT;
            tl[n].vert = vert;
            tl[n].mask = 16'h0001;
            tl[n].a    = 6'(u);
            tl[n].b    = 6'(v);
            n++;
          end
        end
    return tl;
  endfunction

  function automatic int unsigned num_tiles(tiling_t tl);
    int unsigned n = 0;
    for (int k = 0; k < MAX_TILES; k++)
      if (tl[k].kind != TILE_NONE) n++;
    return n;
  endfunction

  function automatic int unsigned num_kind(tiling_t tl, tile_kind_e kind);
    int unsigned n = 0;
    for (int k = 0; k < MAX_TILES; k++)
      if (tl[k].kind == kind) n++;
    return n;
  endfunction

  // Number of pattern tiles covering exactly `cells` positions.
  function automatic int unsigned num_pattern(tiling_t tl, int unsigned cells);
    int unsigned n = 0;
    for (int k = 0; k < MAX_TILES; k++)
      if (tl[k].kind == TILE_PAT && $countones(tl[k].mask) == cells) n++;
    return n;
  endfunction

  function automatic int unsigned num_spare(tiling_t tl);
    int unsigned n = 0;
    for (int k = 0; k < MAX_TILES; k++)
      if (tl[k].kind == TILE_S && tl[k].has_ex) n++;
    return n;
  endfunction

endpackage
