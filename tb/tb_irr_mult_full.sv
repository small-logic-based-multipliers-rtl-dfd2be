// tb_irr_mult_full -- the multiplier at its default parameters (unsigned 7x7,
// full 14-bit product, combinational), checked over all 16384 operand pairs
// against the `*` operator. The product must also settle without any clock
// edge, i.e. the default configuration has no latency.
module tb_irr_mult_full;
  logic        clk = 1'b0;
  logic [6:0]  x, y;
  logic [13:0] p;
  int checks = 0, failures = 0;

  irr_mult dut (.clk(clk), .x(x), .y(y), .p(p));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < (1 << 14); n++) begin
      {y, x} = 14'(n);
      #1;
      checks++;
      if (p != 14'(x) * 14'(y)) begin
        failures++;
        if (failures < 20) $display("FAIL %0d * %0d = %0d, got %0d", x, y, 14'(x) * 14'(y), p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
