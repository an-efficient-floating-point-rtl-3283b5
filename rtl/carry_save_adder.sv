// carry_save_adder: one carry-save (3:2) row of W independent full adders.
//
// Three operands are reduced to a sum vector s and a carry vector cy with
// a + b + c == s + 2*cy.  No carry propagates along the row, so its delay is
// one full adder whatever W is; the multi-operand adders of the multiplier
// chain such rows and finish with one carry-propagate adder.  Combinational.
module carry_save_adder #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] s,
  output logic [W-1:0] cy
);
  assign s  = a ^ b ^ c;
  assign cy = (a & b) | (a & c) | (b & c);
endmodule
