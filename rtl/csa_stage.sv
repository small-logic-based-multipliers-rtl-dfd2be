// csa_stage -- one layer of a bit-heap compressor tree.
//
// The heap is held column by column: din[c][k] is the k-th bit of weight 2^c.
// Only the first H[c] slots of column c are occupied (the heights are known
// while elaborating); the rest must be zero. In every column the layer puts
// each complete group of three bits into a full adder (3:2 counter): the sum
// stays in column c, the carry moves to column c+1. One or two left-over bits
// pass through unchanged. Column c of dout holds, in this order, the sums, the
// passed bits and the carries coming from column c-1; unused slots are zero.
// A carry out of the top column is dropped, so the heap is kept modulo
// 2^COLS.
//
// Purely combinational. Used by bitheap_compressor; H must match the heights
// of din.
module csa_stage #(
  parameter int unsigned           COLS = 4,
  parameter int unsigned           MAXH = 4,
  parameter logic [COLS-1:0][15:0] H    = {16'd2, 16'd3, 16'd3, 16'd4}
) (
  input  logic [COLS-1:0][MAXH-1:0] din,
  output logic [COLS-1:0][MAXH-1:0] dout
);

  always_comb begin
    dout = '0;
    for (int c = 0; c < COLS; c++) begin
      int unsigned nfa, nrem, nprev, o;
      nfa   = int'(H[c]) / 3;
      nrem  = int'(H[c]) % 3;
      nprev = (c > 0) ? int'(H[c-1]) / 3 : 0;
      o     = 0;
      for (int unsigned f = 0; f < nfa; f++) begin
        dout[c][o] = din[c][3*f] ^ din[c][3*f+1] ^ din[c][3*f+2];
        o++;
      end
      for (int unsigned p = 0; p < nrem; p++) begin
        dout[c][o] = din[c][3*nfa+p];
        o++;
      end
      if (c > 0)
        for (int unsigned f = 0; f < nprev; f++) begin
          dout[c][o] = (din[c-1][3*f]   & din[c-1][3*f+1]) |
                       (din[c-1][3*f]   & din[c-1][3*f+2]) |
                       (din[c-1][3*f+1] & din[c-1][3*f+2]);
          o++;
        end
    end
  end

endmodule
