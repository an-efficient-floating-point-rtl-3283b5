// karatsuba_mult: recursive N x N unsigned Karatsuba multiplier with
// Urdhva-Tiryagbhyam leaves.
//
// For N <= LEAF the product comes from a ut_mult of width N.  Otherwise each
// operand is split at H bits into a most significant part (Xl, N-H bits) and
// a least significant part (Xr, H bits), X = 2^H*Xl + Xr, and
//
//   X*Y = 2^(2H)*Xl*Yl + 2^H*((Xl+Xr)*(Yl+Yr) - Xl*Yl - Xr*Yr) + Xr*Yr
//
// so three smaller products replace four.  The three products are again
// karatsuba_mult instances, so the recursion continues until the operands
// are LEAF (8) bits wide.  The parts of the datapath:
//   * two H-bit carry-select adders form Xl+Xr and Yl+Yr (H+1 bits each);
//   * the middle product (Xl+Xr)*(Yl+Yr) uses an H x H multiplier on the low
//     H bits of the sums, plus the cross terms of the two sum carries, which
//     are ANDed operands shifted by H and 2H (this keeps every leaf LEAF
//     bits wide instead of LEAF+1);
//   * the subtracter removes Xl*Yl and Xr*Yr from the middle product by
//     adding their one's complements and 2, all in one carry-save chain;
//   * the adder places Xl*Yl at 2H, the difference at H and Xr*Yr at 0 and
//     sums them (shifts are wiring).
//
// The split point H is the smallest multiple of LEAF that is at least N/2,
// so N = 16 splits 8/8 and N = 24 (the single precision significand) splits
// into an 8-bit high part and a 16-bit low part.  This choice, the carry
// handling of the middle product and the adders are this design's; the
// three-product decomposition and the 8-bit UT leaves follow the paper.
// Combinational, no latency.
//
// Lint note: when this self-instantiating module is linted as the top
// module on its own, Verilator reports p_ll, p_rr and p_ss as undriven.  The
// warning does not appear once the module has any parent (fp_mult, or a
// one-line wrapper), the signals are driven by the sub-multipliers, and the
// simulated products are exact, so the warning is left standing.
module karatsuba_mult
  import fp_pkg::*;
#(
  parameter int unsigned N    = 24,
  parameter int unsigned LEAF = 8
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  output logic [2*N-1:0] p
);
  if (N <= LEAF) begin : g_leaf
    ut_mult #(.N(N)) u_ut (.a(x), .b(y), .p(p));
  end else begin : g_kara
    localparam int unsigned H  = kara_split(N, LEAF);
    localparam int unsigned L  = N - H;
    localparam int unsigned MW = 2 * H + 2;   // width of middle terms

    logic [L-1:0]     xl, yl;
    logic [H-1:0]     xr, yr;
    logic [2*L-1:0]   p_ll;
    logic [2*H-1:0]   p_rr;
    logic [H-1:0]     sx, sy;
    logic             cx, cy;
    logic [2*H-1:0]   p_ss;
    logic [MW-1:0]    p_mid;
    logic [MW-1:0]    diff;

    assign xl = x[N-1:H];
    assign yl = y[N-1:H];
    assign xr = x[H-1:0];
    assign yr = y[H-1:0];

    // Xl*Yl and Xr*Yr
    karatsuba_mult #(.N(L), .LEAF(LEAF)) u_ll (.x(xl), .y(yl), .p(p_ll));
    karatsuba_mult #(.N(H), .LEAF(LEAF)) u_rr (.x(xr), .y(yr), .p(p_rr));

    // Xl+Xr and Yl+Yr
    carry_select_adder #(.W(H)) u_sumx (
      .a(H'(xl)), .b(xr), .cin(1'b0), .s(sx), .cout(cx)
    );
    carry_select_adder #(.W(H)) u_sumy (
      .a(H'(yl)), .b(yr), .cin(1'b0), .s(sy), .cout(cy)
    );

    // (Xl+Xr)*(Yl+Yr) = sx*sy + 2^H*(cx*sy + cy*sx) + 2^(2H)*cx*cy
    karatsuba_mult #(.N(H), .LEAF(LEAF)) u_ss (.x(sx), .y(sy), .p(p_ss));

    logic [3:0][MW-1:0] mid_ops;
    assign mid_ops[0] = MW'(p_ss);
    assign mid_ops[1] = MW'({sy & {H{cx}}, {H{1'b0}}});
    assign mid_ops[2] = MW'({sx & {H{cy}}, {H{1'b0}}});
    assign mid_ops[3] = MW'({cx & cy, {2*H{1'b0}}});
    multi_operand_adder #(.W(MW), .M(4)) u_mid (.ops(mid_ops), .sum(p_mid));

    // Subtracter: p_mid - p_ll - p_rr = p_mid + ~p_ll + ~p_rr + 2
    logic [3:0][MW-1:0] sub_ops;
    assign sub_ops[0] = p_mid;
    assign sub_ops[1] = ~MW'(p_ll);
    assign sub_ops[2] = ~MW'(p_rr);
    assign sub_ops[3] = MW'(2);
    multi_operand_adder #(.W(MW), .M(4)) u_sub (.ops(sub_ops), .sum(diff));

    // Shift and add
    logic [2:0][2*N-1:0] fin_ops;
    assign fin_ops[0] = {p_ll, {2*H{1'b0}}};
    assign fin_ops[1] = (2*N)'({diff, {H{1'b0}}});
    assign fin_ops[2] = (2*N)'(p_rr);
    multi_operand_adder #(.W(2*N), .M(3)) u_fin (.ops(fin_ops), .sum(p));
  end
endmodule
