// exp_adder: ripple-carry adder for the two biased exponents.
//
// The significand multiplier is by far the slowest path, so the exponent
// path uses the simplest adder: a chain of EXP_W full adders with the carry
// rippling from bit 0 upward.  The carry out is kept as the top bit of the
// EXP_W+1 bit sum, because the sum of two biased exponents can exceed the
// field.  Combinational.
module exp_adder #(
  parameter int unsigned EXP_W = 8
) (
  input  logic [EXP_W-1:0] exp_a,
  input  logic [EXP_W-1:0] exp_b,
  output logic [EXP_W:0]   sum
);
  logic [EXP_W:0] c;

  assign c[0] = 1'b0;
  for (genvar i = 0; i < EXP_W; i++) begin : g_fa
    assign sum[i]  = exp_a[i] ^ exp_b[i] ^ c[i];
    assign c[i+1]  = (exp_a[i] & exp_b[i]) | (c[i] & (exp_a[i] ^ exp_b[i]));
  end
  assign sum[EXP_W] = c[EXP_W];
endmodule
