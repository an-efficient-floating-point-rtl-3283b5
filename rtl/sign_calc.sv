// sign_calc: sign of a floating point product.
//
// The product is negative exactly when the operand signs differ, so the sign
// is the XOR of the two sign bits, as the multiplier's sign calculator is
// described.  Purely combinational, no latency.
module sign_calc (
  input  logic sign_a,
  input  logic sign_b,
  output logic sign_p
);
  assign sign_p = sign_a ^ sign_b;
endmodule
