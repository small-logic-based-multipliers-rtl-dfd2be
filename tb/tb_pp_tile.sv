// tb_pp_tile -- exhaustive self-checking test of the generic pattern tile.
//
// Six patterns are instantiated: the 3x2 tile with its top corner removed
// (max 13, 4 output bits), the full 3x2 tile (max 21, 5 bits), the 3x3 tile
// (max 49, 6 bits), the bare s-shape (window weights 2,2,4,4: max 12, 4 bits), a diagonal pattern and a
// single position. For each, the output width is checked against the value
// worked out by hand and all 256 input combinations are compared with the
// weighted sum of the selected products computed here.
module tb_pp_tile;
  logic [3:0] x, y;
  logic [3:0] r_l;   // 3x2 minus corner
  logic [4:0] r_r;   // 3x2
  logic [5:0] r_q;   // 3x3
  logic [3:0] r_s;   // s-shape (weights 2..8 in the window)
  logic [6:0] r_d;   // diagonal x0y0 x1y1 x2y2 x3y3
  logic       r_1;   // 1x1
  int checks = 0, failures = 0;

  pp_tile #(.MASK(16'h0037)) u_l (.x(x), .y(y), .r(r_l));
  pp_tile #(.MASK(16'h0077)) u_r (.x(x), .y(y), .r(r_r));
  pp_tile #(.MASK(16'h0777)) u_q (.x(x), .y(y), .r(r_q));
  pp_tile #(.MASK(16'h0036)) u_s (.x(x), .y(y), .r(r_s));
  pp_tile #(.MASK(16'h8421)) u_d (.x(x), .y(y), .r(r_d));
  pp_tile #(.MASK(16'h0001)) u_1 (.x(x), .y(y), .r(r_1));

  function automatic int ref_sum(logic [15:0] mask, logic [3:0] xv, logic [3:0] yv);
    int s = 0;
    for (int j = 0; j < 4; j++)
      for (int i = 0; i < 4; i++)
        if (mask[4*j+i] && xv[i] && yv[j]) s += 2 ** (i + j);
    return s;
  endfunction

  task automatic check(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s x=%b y=%b: got %0d expected %0d", name, x, y, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check("width 3x2-corner", $bits(u_l.r), 4);
    check("width 3x2", $bits(u_r.r), 5);
    check("width 3x3", $bits(u_q.r), 6);
    check("width s", $bits(u_s.r), 4);
    check("width diag", $bits(u_d.r), 7);
    check("width 1x1", $bits(u_1.r), 1);
    for (int n = 0; n < 256; n++) begin
      {y, x} = 8'(n);
      #1;
      check("3x2-corner", int'(r_l), ref_sum(16'h0037, x, y));
      check("3x2", int'(r_r), ref_sum(16'h0077, x, y));
      check("3x3", int'(r_q), ref_sum(16'h0777, x, y));
      check("s", int'(r_s), ref_sum(16'h0036, x, y));
      check("diag", int'(r_d), ref_sum(16'h8421, x, y));
      check("1x1", int'(r_1), ref_sum(16'h0001, x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
