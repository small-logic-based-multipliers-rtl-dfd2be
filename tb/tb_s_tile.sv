// tb_s_tile -- exhaustive self-checking test of the s-shaped incomplete tile.
//
// All 128 combinations of the five s-shape inputs and the two spare-product
// inputs are applied. The 3-bit output must equal the arithmetic sum of the
// four covered partial products, u1v0 + u0v1 + 2*(u2v0 + u1v1), and r[3] must
// be the spare AND. Also checks that the sum never exceeds 6, the range that
// lets the tile get by with three output bits.
module tb_s_tile;
  logic [2:0] u;
  logic [1:0] v;
  logic       ex_u, ex_v;
  logic [3:0] r;
  int checks = 0, failures = 0;

  s_tile dut (.u(u), .v(v), .ex_u(ex_u), .ex_v(ex_v), .r(r));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_sum, max_seen;
    max_seen = 0;
    for (int n = 0; n < 128; n++) begin
      {ex_v, ex_u, v, u} = 7'(n);
      #1;
      exp_sum = (u[1] & v[0]) + (u[0] & v[1]) + 2 * ((u[2] & v[0]) + (u[1] & v[1]));
      if (exp_sum > max_seen) max_seen = exp_sum;
      checks++;
      if (int'(r[2:0]) != exp_sum) begin
        failures++;
        $display("FAIL u=%b v=%b: r=%0d expected %0d", u, v, r[2:0], exp_sum);
      end
      checks++;
      if (r[3] != (ex_u & ex_v)) begin
        failures++;
        $display("FAIL spare ex_u=%b ex_v=%b: r3=%b", ex_u, ex_v, r[3]);
      end
    end
    checks++;
    if (max_seen != 6) begin
      failures++;
      $display("FAIL largest s-shape sum %0d, expected 6", max_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
