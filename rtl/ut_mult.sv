// ut_mult: N x N unsigned Urdhva-Tiryagbhyam ("vertically and crosswise")
// multiplier.
//
// Column k of the product (k = 0 .. 2N-2) collects every crosswise partial
// product a[i]&b[k-i]: one AND for k = 0, rising to N ANDs in the middle
// column and falling back to one for k = 2N-2.  Column 0 is product bit p[0]
// directly.  Every other column has its own adder ("ADDER k"), so there are
// 2N-2 adders: 6 for N = 4, 14 for N = 8.  Adder k sums the column's partial
// products together with everything above bit 0 of adder k-1's sum (its
// carry word); bit 0 of its sum is p[k].  The adders are thus connected in
// ripple manner, and the carry word of the last adder is p[2N-1].
//
// Each adder is exactly as wide as its largest possible sum
// (fp_pkg::ut_col_width).  For N = 4 this reproduces the buses of the
// published 4 x 4 hardware: a 1-bit carry from adder 1, 2-bit carries from
// adders 2 to 5, and a 2-bit sum from adder 6 that gives p[6] and p[7].  A
// column adder with more than two operands accumulates them in carry-save
// form before one carry-select adder (multi_operand_adder); with two
// operands (adder 1 and the last adder) it is a carry-select adder alone.
//
// The column structure, adder count and bus widths follow the method's 4x4
// illustration; the generalisation to N is this design's.  Inside the
// multiplier the leaves are 8 x 8.  Combinational, no latency.
module ut_mult
  import fp_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);
  localparam int unsigned NCOL = 2 * N - 1;

  if (N == 1) begin : g_bit
    assign p = {1'b0, a[0] & b[0]};
  end else begin : g_cols
    assign p[0] = a[0] & b[0];

    for (genvar k = 1; k < NCOL; k++) begin : g_adder
      localparam int unsigned LO  = (k > N - 1) ? k - (N - 1) : 0;
      localparam int unsigned CNT = ut_col_count(N, k);
      localparam int unsigned W   = ut_col_width(N, k);
      localparam int unsigned M   = CNT + ((k >= 2) ? 1 : 0);

      logic [M-1:0][W-1:0] ops;
      logic [W-1:0]        colsum;

      for (genvar j = 0; j < CNT; j++) begin : g_pp
        assign ops[j] = W'(a[LO+j] & b[k-LO-j]);
      end
      if (k >= 2) begin : g_cin
        // carry word of the previous adder: its sum without bit 0
        localparam int unsigned WP = ut_col_width(N, k - 1);
        assign ops[CNT] = W'(g_adder[k-1].colsum[WP-1:1]);
      end

      multi_operand_adder #(.W(W), .M(M)) u_add (.ops(ops), .sum(colsum));

      assign p[k] = colsum[0];
    end

    assign p[2*N-1] = g_adder[NCOL-1].colsum[1];
  end
endmodule
