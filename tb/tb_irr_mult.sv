// tb_irr_mult -- end-to-end self-checking test of the incomplete-tile
// multiplier.
//
// Instances and what they exercise:
//   u_def  default parameters (7x7, full product, combinational): exhaustive.
//   u_8    8x8: exhaustive.
//   u_65   6x5: odd Y with even X, so the s-shapes are laid vertically.
//   u_13   13x13: random operands.
//   u_12, u_22, u_11   1x2, 2x2 and 1x1: boards too small for any s-shape
//          (two-position helper tiles and a single-position tile).
//   u_t10  10x10 truncated to 10 output bits (the paper's truncated case,
//          W_OUT = WX = WY): checked for faithful rounding, i.e. the exact
//          product and p*2^10 differ by less than 2^10.
//   u_t16  16x16 truncated to 16 bits: random, faithful-rounding check.
//   u_p    7x7 with the one-stage pipeline: one cycle of latency checked.
// Each mechanism of the design is counted: s-tiles carrying a spare 1x1
// product, single-position tiles, two-position helper tiles, vertical
// tiling, omitted positions with a compensation constant, and the pipeline
// delay. A mechanism that never
// occurs counts as a failure. References are computed with the `*` operator.
module tb_irr_mult
  import irr_pkg::*;
;
  logic clk = 1'b0;
  always #5 clk = !clk;

  logic [6:0]  x7, y7;    logic [13:0] p_def;
  logic [7:0]  x8, y8;    logic [15:0] p_8;
  logic [5:0]  x6;        logic [4:0]  y5;    logic [10:0] p_65;
  logic [12:0] x13, y13;  logic [25:0] p_13;
  logic [0:0]  x1;        logic [1:0]  y2;    logic [2:0]  p_12;
  logic [1:0]  x2, y2b;   logic [3:0]  p_22;
  logic [0:0]  x1b, y1b;  logic [1:0]  p_11;
  logic [9:0]  x10, y10;  logic [9:0]  p_t10;
  logic [15:0] x16, y16;  logic [15:0] p_t16;
  logic [6:0]  xp, yp;    logic [13:0] p_p;

  int checks = 0, failures = 0;
  int n_spare = 0, n_one = 0, n_pair = 0, n_vert = 0, n_trunc = 0, n_pipe = 0;

  irr_mult u_def (.clk(clk), .x(x7), .y(y7), .p(p_def));
  irr_mult #(.WX(8),  .WY(8))  u_8  (.clk(clk), .x(x8),  .y(y8),  .p(p_8));
  irr_mult #(.WX(6),  .WY(5))  u_65 (.clk(clk), .x(x6),  .y(y5),  .p(p_65));
  irr_mult #(.WX(13), .WY(13)) u_13 (.clk(clk), .x(x13), .y(y13), .p(p_13));
  irr_mult #(.WX(1),  .WY(2))  u_12 (.clk(clk), .x(x1),  .y(y2),  .p(p_12));
  irr_mult #(.WX(2),  .WY(2))  u_22 (.clk(clk), .x(x2),  .y(y2b), .p(p_22));
  irr_mult #(.WX(1),  .WY(1))  u_11 (.clk(clk), .x(x1b), .y(y1b), .p(p_11));
  irr_mult #(.WX(10), .WY(10), .W_OUT(10)) u_t10 (.clk(clk), .x(x10), .y(y10), .p(p_t10));
  irr_mult #(.WX(16), .WY(16), .W_OUT(16)) u_t16 (.clk(clk), .x(x16), .y(y16), .p(p_t16));
  irr_mult #(.PIPE(1'b1)) u_p (.clk(clk), .x(xp), .y(yp), .p(p_p));

  task automatic check(string name, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", name, got, exp);
    end
  endtask

  // Faithful rounding: |p*2^k - exact| < 2^k.
  task automatic check_faithful(string name, longint unsigned p, int k, longint unsigned exact);
    longint unsigned scaled = p << k;
    longint unsigned diff   = (scaled > exact) ? scaled - exact : exact - scaled;
    checks++;
    if (diff >= (longint'(1) << k)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: p=%0d exact=%0d", name, p, exact);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ---- structure of the tilings: which mechanisms each instance uses
    n_spare = num_spare(make_tiling(7, 7, 0)) + num_spare(make_tiling(16, 16, omit_below(16, 16, 16)));
    n_one   = num_pattern(make_tiling(7, 7, 0), 1) + num_pattern(make_tiling(1, 1, 0), 1);
    n_pair  = num_pattern(make_tiling(7, 7, 0), 2) + num_pattern(make_tiling(2, 2, 0), 2);
    n_vert  = int'(tiling_vertical(6, 5));
    n_trunc = omit_below(10, 10, 10) + omit_below(16, 16, 16);
    $display("7x7 tiling: %0d s-tiles (%0d with spare product), %0d helper pairs, %0d 1x1 tiles",
             num_kind(make_tiling(7, 7, 0), TILE_S), num_spare(make_tiling(7, 7, 0)),
             num_pattern(make_tiling(7, 7, 0), 2), num_pattern(make_tiling(7, 7, 0), 1));
    $display("10x10 truncated: positions with i+j < %0d omitted, constant %0d",
             omit_below(10, 10, 10), round_const(10, 10, 10));

    // ---- exhaustive: 7x7 default, 6x5 vertical, the tiny boards
    for (int n = 0; n < (1 << 14); n++) begin
      {y7, x7} = 14'(n);
      {y5, x6} = 11'(n);
      {y2, x1} = 3'(n);
      {y2b, x2} = 4'(n);
      {y1b, x1b} = 2'(n);
      #1;
      check("7x7", longint'(p_def), longint'(x7) * longint'(y7));
      if (n < (1 << 11)) check("6x5", longint'(p_65), longint'(x6) * longint'(y5));
      if (n < 8)         check("1x2", longint'(p_12), longint'(x1) * longint'(y2));
      if (n < 4)         check("1x1", longint'(p_11), longint'(x1b) * longint'(y1b));
      if (n < 16)        check("2x2", longint'(p_22), longint'(x2) * longint'(y2b));
    end
    // ---- exhaustive 8x8
    for (int n = 0; n < (1 << 16); n++) begin
      {y8, x8} = 16'(n);
      #1;
      check("8x8", longint'(p_8), longint'(x8) * longint'(y8));
    end
    // ---- random 13x13 and the truncated multipliers (with corner values)
    for (int n = 0; n < 40000; n++) begin
      x13 = 13'($urandom); y13 = 13'($urandom);
      x10 = 10'($urandom); y10 = 10'($urandom);
      x16 = 16'($urandom); y16 = 16'($urandom);
      if (n == 0) begin x13 = '1; y13 = '1; x10 = '1; y10 = '1; x16 = '1; y16 = '1; end
      if (n == 1) begin x13 = '0; y13 = '1; x10 = '0; y10 = '0; x16 = '0; y16 = '0; end
      if (n == 2) begin x10 = '1; y10 = 10'd1; x16 = '1; y16 = 16'd1; end
      #1;
      check("13x13", longint'(p_13), longint'(x13) * longint'(y13));
      check_faithful("10x10 trunc", longint'(p_t10), 10, longint'(x10) * longint'(y10));
      check_faithful("16x16 trunc", longint'(p_t16), 16, longint'(x16) * longint'(y16));
    end

    // ---- pipelined 7x7: new operands after a rising edge show up at p
    // after the next rising edge, not before.
    @(negedge clk);
    xp = 7'd0; yp = 7'd0;
    @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      logic [6:0] ax, ay;
      ax = 7'($urandom); ay = 7'($urandom);
      if (n == 0) begin ax = 7'd127; ay = 7'd127; end
      xp = ax; yp = ay;
      #1;
      // still the previous product before the clock edge
      if (n > 0 && p_p != 14'(ax) * 14'(ay)) n_pipe++;
      @(posedge clk);
      #1;
      check("7x7 pipelined", longint'(p_p), longint'(ax) * longint'(ay));
      @(negedge clk);
    end

    // ---- every mechanism must have occurred
    checks++; if (n_spare == 0) begin failures++; $display("FAIL no spare 1x1 product used"); end
    checks++; if (n_one   == 0) begin failures++; $display("FAIL no stand-alone 1x1 tile"); end
    checks++; if (n_pair  == 0) begin failures++; $display("FAIL no two-position helper tile"); end
    checks++; if (n_vert  == 0) begin failures++; $display("FAIL no vertical tiling"); end
    checks++; if (n_trunc == 0) begin failures++; $display("FAIL no truncation"); end
    checks++; if (n_pipe  == 0) begin failures++; $display("FAIL pipeline delay never seen"); end
    $display("mechanisms: spare=%0d one=%0d pair=%0d vertical=%0d truncation=%0d pipeline-delay=%0d",
             n_spare, n_one, n_pair, n_vert, n_trunc, n_pipe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
