// fp_exceptions: result stage of the multiplier.
//
// It packs the product sign, the exponent field and the fraction from the
// normalizer into the IEEE-754 result word, replacing it where an operand is
// special, and raises four exception outputs.
//
// Special operands (this design's choice; the text only defines the output
// codes):
//   * a NaN operand, or Infinity times zero, gives the quiet NaN with sign 0,
//     exponent all ones and only the top fraction bit set;
//   * an Infinity times a finite non-zero operand gives signed Infinity;
//   * an operand with exponent field 0 is taken as zero (denormal operands
//     are flushed to zero), giving a signed zero.
//
// The flags then follow the paper's codes on the result word:
//   Zero     : exponent field 0,        fraction 0
//   Infinity : exponent field all ones, fraction 0
//   NaN      : exponent field all ones, fraction not 0
//   Denormal : exponent field 0,        fraction not 0
// (for single precision "all ones" is 255).  Combinational.
module fp_exceptions
  import fp_pkg::*;
#(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MANT_W = 23
) (
  input  logic [EXP_W+MANT_W:0] a,
  input  logic [EXP_W+MANT_W:0] b,
  input  logic                  sign_p,
  input  logic [EXP_W-1:0]      exp_n,    // from the normalizer
  input  logic [MANT_W-1:0]     frac_n,   // from the normalizer
  output logic [EXP_W+MANT_W:0] result,
  output fp_flags_t             flags
);
  localparam int unsigned FW = EXP_W + MANT_W + 1;

  logic [EXP_W-1:0]  ea, eb, er;
  logic [MANT_W-1:0] fa, fb, fr;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  assign ea = a[FW-2 -: EXP_W];
  assign eb = b[FW-2 -: EXP_W];
  assign fa = a[MANT_W-1:0];
  assign fb = b[MANT_W-1:0];

  assign a_zero = (ea == '0);
  assign b_zero = (eb == '0);
  assign a_inf  = (ea == '1) && (fa == '0);
  assign b_inf  = (eb == '1) && (fb == '0);
  assign a_nan  = (ea == '1) && (fa != '0);
  assign b_nan  = (eb == '1) && (fb != '0);

  always_comb begin
    if (a_nan || b_nan || (a_inf && b_zero) || (a_zero && b_inf))
      result = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MANT_W-1){1'b0}}};
    else if (a_inf || b_inf)
      result = {sign_p, {EXP_W{1'b1}}, {MANT_W{1'b0}}};
    else if (a_zero || b_zero)
      result = {sign_p, {EXP_W{1'b0}}, {MANT_W{1'b0}}};
    else
      result = {sign_p, exp_n, frac_n};
  end

  assign er = result[FW-2 -: EXP_W];
  assign fr = result[MANT_W-1:0];

  assign flags.zero     = (er == '0) && (fr == '0);
  assign flags.infinity = (er == '1) && (fr == '0);
  assign flags.nan      = (er == '1) && (fr != '0);
  assign flags.denormal = (er == '0) && (fr != '0);
endmodule
