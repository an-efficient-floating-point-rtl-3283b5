// fp_mult: IEEE-754 floating point multiplier built around a
// Karatsuba / Urdhva-Tiryagbhyam significand multiplier.
//
// The three fields of the operands take separate paths that meet in the
// result stage:
//   * sign:     sign_calc, the XOR of the two sign bits;
//   * exponent: exp_adder (ripple carry) adds the biased exponents and
//               bias_subtractor (ripple borrow) removes one bias;
//   * fraction: the hidden 1 is prepended to both fractions and the two
//               (MANT_W+1)-bit significands are multiplied by karatsuba_mult,
//               which recurses down to 8 x 8 ut_mult leaves.
// The normalizer aligns the product (one-place shift, exponent +1),
// truncates it to MANT_W bits and encodes overflow and denormal results;
// fp_exceptions handles NaN, Infinity and zero operands and raises the
// Zero, Infinity, NaN and Denormal outputs.
//
// The default is single precision (8-bit exponent, 23-bit fraction, bias
// 127); EXP_W = 11, MANT_W = 52, BIAS = 1023 gives double precision.  The
// structure follows the paper; operand special cases, the denormal and
// overflow encodings and truncation are this design's choices (see the
// sub-modules).  The multiplier is purely combinational: the result is valid
// one propagation delay after the operands, with no clock and no latency in
// cycles.  The norm_shift and overflow outputs expose what the normalizer
// did, for observation and test.
module fp_mult
  import fp_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MANT_W = 23,
  parameter int unsigned BIAS   = 127
) (
  input  logic [EXP_W+MANT_W:0] a,
  input  logic [EXP_W+MANT_W:0] b,
  output logic [EXP_W+MANT_W:0] result,
  output logic                  zero,
  output logic                  infinity,
  output logic                  nan,
  output logic                  denormal,
  output logic                  norm_shift,
  output logic                  overflow
);
  localparam int unsigned FW = EXP_W + MANT_W + 1;

  logic                    sign_p;
  logic [EXP_W:0]          exp_sum;
  logic signed [EXP_W+1:0] exp_unb;
  logic [2*MANT_W+1:0]     sig_prod;
  logic [EXP_W-1:0]        exp_n;
  logic [MANT_W-1:0]       frac_n;
  fp_flags_t               flags;

  sign_calc u_sign (.sign_a(a[FW-1]), .sign_b(b[FW-1]), .sign_p(sign_p));

  exp_adder #(.EXP_W(EXP_W)) u_eadd (
    .exp_a(a[FW-2 -: EXP_W]), .exp_b(b[FW-2 -: EXP_W]), .sum(exp_sum)
  );

  bias_subtractor #(.EXP_W(EXP_W), .BIAS(BIAS)) u_bias (
    .sum(exp_sum), .diff(exp_unb)
  );

  karatsuba_mult #(.N(MANT_W + 1), .LEAF(8)) u_mant (
    .x({1'b1, a[MANT_W-1:0]}), .y({1'b1, b[MANT_W-1:0]}), .p(sig_prod)
  );

  normalizer #(.EXP_W(EXP_W), .MANT_W(MANT_W)) u_norm (
    .prod(sig_prod), .exp_in(exp_unb), .exp_out(exp_n), .frac_out(frac_n),
    .ovf(overflow), .shift1(norm_shift)
  );

  fp_exceptions #(.EXP_W(EXP_W), .MANT_W(MANT_W)) u_exc (
    .a(a), .b(b), .sign_p(sign_p), .exp_n(exp_n), .frac_n(frac_n),
    .result(result), .flags(flags)
  );

  assign zero     = flags.zero;
  assign infinity = flags.infinity;
  assign nan      = flags.nan;
  assign denormal = flags.denormal;
endmodule
