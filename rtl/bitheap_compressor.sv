// bitheap_compressor -- compressor tree and final adder for the bit heap of a
// tiled multiplier.
//
// Input is a set of NR row vectors of COLS bits; PRESENT[r][c] tells which
// bits of row r can be non-zero (all others must be zero and are ignored).
// The output is the sum of all rows modulo 2^COLS. Each tile of a multiplier
// contributes one row, holding its output bits at their weights, so the
// PRESENT bits of all rows together form the multiplier's bit heap.
//
// How it works: the present bits are first gathered per column (the "dot
// diagram"). Then layers of full adders (csa_stage, a Wallace-style 3:2
// reduction) are applied until no column holds more than two bits, and a
// final carry-propagate adder adds the two remaining rows. Column heights of
// every layer are computed while elaborating, so only real bits get counters.
//
// The paper designs its compressor trees with an ILP that picks FPGA-specific
// generalised parallel counters, 4:2 row compressors and ternary adders; this
// module only realises the same function, with plain full adders and one
// binary adder. Purely combinational.
module bitheap_compressor #(
  parameter int unsigned                 NR      = 3,
  parameter int unsigned                 COLS    = 8,
  parameter logic [NR-1:0][COLS-1:0]     PRESENT = '1
) (
  input  logic [NR-1:0][COLS-1:0] rows,
  output logic [COLS-1:0]         sum
);

  typedef logic [COLS-1:0][15:0] heights_t;

  function automatic heights_t initial_heights();
    heights_t h = '0;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < NR; r++)
        if (PRESENT[r][c]) h[c] = h[c] + 16'd1;
    return h;
  endfunction

  function automatic heights_t next_heights(heights_t h);
    heights_t n = '0;
    for (int c = 0; c < COLS; c++) begin
      n[c] = h[c] / 3 + h[c] % 3;
      if (c > 0) n[c] = n[c] + h[c-1] / 3;
    end
    return n;
  endfunction

  function automatic logic done(heights_t h);
    for (int c = 0; c < COLS; c++)
      if (h[c] > 2) return 1'b0;
    return 1'b1;
  endfunction

  function automatic heights_t stage_heights(int s);
    heights_t h = initial_heights();
    for (int k = 0; k < s; k++) h = next_heights(h);
    return h;
  endfunction

  function automatic int unsigned num_stages();
    heights_t h = initial_heights();
    int unsigned s = 0;
    while (!done(h) && s < 64) begin
      h = next_heights(h);
      s++;
    end
    return s;
  endfunction

  function automatic int unsigned max_height();
    heights_t h = initial_heights();
    int unsigned m = 2;
    for (int s = 0; s <= 64; s++) begin
      for (int c = 0; c < COLS; c++)
        if (int'(h[c]) > m) m = int'(h[c]);
      if (done(h)) break;
      h = next_heights(h);
    end
    return m;
  endfunction

  localparam int unsigned NST  = num_stages();
  localparam int unsigned MAXH = max_height();

  typedef logic [COLS-1:0][MAXH-1:0] heap_t;

  // heap0: the heap as gathered; g_layer[s].heap_out: after layer s.
  heap_t heap0, heap_last;

  // Gather the present bits of every column into its lowest slots.
  always_comb begin
    heap0 = '0;
    for (int c = 0; c < COLS; c++) begin
      int unsigned k;
      k = 0;
      for (int r = 0; r < NR; r++)
        if (PRESENT[r][c]) begin
          heap0[c][k] = rows[r][c];
          k++;
        end
    end
  end

  for (genvar s = 0; s < NST; s++) begin : g_layer
    heap_t heap_in, heap_out;

    if (s == 0) begin : g_first
      assign heap_in = heap0;
    end else begin : g_next
      assign heap_in = g_layer[s-1].heap_out;
    end

    csa_stage #(
      .COLS (COLS),
      .MAXH (MAXH),
      .H    (stage_heights(s))
    ) u_layer (
      .din  (heap_in),
      .dout (heap_out)
    );
  end

  if (NST == 0) begin : g_no_layer
    assign heap_last = heap0;
  end else begin : g_last
    assign heap_last = g_layer[NST-1].heap_out;
  end

  // Final carry-propagate adder of the two remaining rows.
  logic [COLS-1:0] op_a, op_b;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      op_a[c] = heap_last[c][0];
      op_b[c] = heap_last[c][1];
    end
    sum = op_a + op_b;
  end

endmodule
