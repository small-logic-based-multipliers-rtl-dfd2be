// tb_bitheap_compressor -- self-checking test of the compressor tree.
//
// Three heaps are summed: a sparse irregular one (5 rows x 10 columns), a
// complete 20 x 14 heap (every bit present, the deepest tree) and a heap with
// a single row (no compression layer at all). Random rows, masked to their
// present bits as the interface requires, are applied and the result is
// compared with the sum of the rows modulo 2^COLS computed here.
module tb_bitheap_compressor;
  localparam logic [4:0][9:0] P_A = {10'b1110001111, 10'b0111111000,
                                     10'b0011111110, 10'b1000011111,
                                     10'b0101010101};
  localparam logic [19:0][13:0] P_B = '1;
  localparam logic [0:0][7:0]   P_C = 8'b10110111;

  logic [4:0][9:0]   rows_a;
  logic [9:0]        sum_a;
  logic [19:0][13:0] rows_b;
  logic [13:0]       sum_b;
  logic [0:0][7:0]   rows_c;
  logic [7:0]        sum_c;
  int checks = 0, failures = 0;

  bitheap_compressor #(.NR(5),  .COLS(10), .PRESENT(P_A)) u_a (.rows(rows_a), .sum(sum_a));
  bitheap_compressor #(.NR(20), .COLS(14), .PRESENT(P_B)) u_b (.rows(rows_b), .sum(sum_b));
  bitheap_compressor #(.NR(1),  .COLS(8),  .PRESENT(P_C)) u_c (.rows(rows_c), .sum(sum_c));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned ea, eb, ec;
    for (int n = 0; n < 3000; n++) begin
      ea = 0; eb = 0;
      for (int r = 0; r < 5; r++) begin
        rows_a[r] = 10'($urandom) & P_A[r];
        ea += rows_a[r];
      end
      for (int r = 0; r < 20; r++) begin
        rows_b[r] = (n < 10) ? 14'h3fff : 14'($urandom);
        eb += rows_b[r];
      end
      rows_c[0] = 8'($urandom) & P_C[0];
      ec = rows_c[0];
      #1;
      checks += 3;
      if (sum_a != 10'(ea)) begin failures++; $display("FAIL a: %0d vs %0d", sum_a, 10'(ea)); end
      if (sum_b != 14'(eb)) begin failures++; $display("FAIL b: %0d vs %0d", sum_b, 14'(eb)); end
      if (sum_c != 8'(ec))  begin failures++; $display("FAIL c: %0d vs %0d", sum_c, 8'(ec)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
