// multi_operand_adder: sum of M operands of W bits, modulo 2^W.
//
// Two operands go straight to a carry-select adder.  With three or more,
// the operands are accumulated in carry-save form: each further operand
// passes through one carry_save_adder row together with the running sum and
// the running (shifted) carry, and a single carry_select_adder resolves the
// final pair.  The caller sizes W so that the true sum fits.  This is the
// column adder of the Urdhva-Tiryagbhyam multiplier and the subtracter and
// adder of the Karatsuba stage.  Combinational.
module multi_operand_adder #(
  parameter int unsigned W = 8,
  parameter int unsigned M = 3
) (
  input  logic [M-1:0][W-1:0] ops,
  output logic [W-1:0]        sum
);
  if (M == 1) begin : g_one
    assign sum = ops[0];
  end else if (M == 2) begin : g_two
    logic unused_cout;
    carry_select_adder #(.W(W)) u_cpa (
      .a(ops[0]), .b(ops[1]), .cin(1'b0), .s(sum), .cout(unused_cout)
    );
  end else begin : g_csa
    // acc_s[i], acc_c[i]: carry-save pair after operands 0..i+1 are absorbed
    logic [W-1:0] acc_s [M-1];
    logic [W-1:0] acc_c [M-1];
    logic         unused_cout;

    assign acc_s[0] = ops[0];
    assign acc_c[0] = ops[1];
    for (genvar i = 2; i < M; i++) begin : g_row
      logic [W-1:0] cy;
      carry_save_adder #(.W(W)) u_csa (
        .a(acc_s[i-2]), .b(acc_c[i-2]), .c(ops[i]), .s(acc_s[i-1]), .cy(cy)
      );
      assign acc_c[i-1] = {cy[W-2:0], 1'b0};
    end
    carry_select_adder #(.W(W)) u_cpa (
      .a(acc_s[M-2]), .b(acc_c[M-2]), .cin(1'b0), .s(sum), .cout(unused_cout)
    );
  end
endmodule
