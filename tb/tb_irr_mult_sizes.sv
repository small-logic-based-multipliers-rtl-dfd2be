// tb_irr_mult_sizes -- the multiplier at every size of the evaluation tables.
//
// Full products: every WX x WY with 1 <= WX, WY <= 16 (256 instances; the
// square sizes 3..8 are the small-multiplier comparison set). Truncated
// products: every W x W with 1 <= W <= 16 and W_OUT = W. Each instance gets
// all operand pairs when there are at most 4096 of them, otherwise 400 random
// pairs plus the all-ones corner. Full products must be exact; truncated ones
// faithfully rounded: |p * 2^W - X*Y| < 2^W.
module tb_irr_mult_sizes;
  localparam int MAXN = 16;

  logic clk = 1'b0;
  int checks = 0, failures = 0, finished = 0;

  task automatic check_full(int wx, int wy, longint unsigned a, longint unsigned b,
                            longint unsigned got);
    checks++;
    if (got != a * b) begin
      failures++;
      if (failures < 20) $display("FAIL %0dx%0d: %0d*%0d gave %0d", wx, wy, a, b, got);
    end
  endtask

  task automatic check_trunc(int w, longint unsigned a, longint unsigned b,
                             longint unsigned got);
    longint unsigned scaled = got << w;
    longint unsigned exact  = a * b;
    longint unsigned diff   = (scaled > exact) ? scaled - exact : exact - scaled;
    checks++;
    if (diff >= (longint'(1) << w)) begin
      failures++;
      if (failures < 20) $display("FAIL trunc %0d: %0d*%0d gave %0d", w, a, b, got);
    end
  endtask

  for (genvar gx = 1; gx <= MAXN; gx++) begin : g_x
    for (genvar gy = 1; gy <= MAXN; gy++) begin : g_y
      logic [gx-1:0]    x;
      logic [gy-1:0]    y;
      logic [gx+gy-1:0] p;

      irr_mult #(.WX(gx), .WY(gy)) dut (.clk(clk), .x(x), .y(y), .p(p));

      initial begin
        #1;
        if (gx + gy <= 12) begin
          for (int n = 0; n < (1 << (gx + gy)); n++) begin
            {y, x} = (gx + gy)'(n);
            #1;
            check_full(gx, gy, longint'(x), longint'(y), longint'(p));
          end
        end else begin
          for (int n = 0; n < 400; n++) begin
            x = gx'($urandom);
            y = gy'($urandom);
            if (n == 0) begin x = '1; y = '1; end
            #1;
            check_full(gx, gy, longint'(x), longint'(y), longint'(p));
          end
        end
        finished++;
      end
    end
  end

  for (genvar gw = 1; gw <= MAXN; gw++) begin : g_t
    logic [gw-1:0] x, y, p;

    irr_mult #(.WX(gw), .WY(gw), .W_OUT(gw)) dut (.clk(clk), .x(x), .y(y), .p(p));

    initial begin
      #1;
      for (int n = 0; n < 2000; n++) begin
        x = gw'($urandom);
        y = gw'($urandom);
        if (n == 0) begin x = '1; y = '1; end
        if (n == 1) begin x = '1; y = gw'(1); end
        #1;
        check_trunc(gw, longint'(x), longint'(y), longint'(p));
      end
      finished++;
    end
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (finished == MAXN * MAXN + MAXN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
