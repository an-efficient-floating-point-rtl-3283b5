// normalizer: turns the raw significand product into a fraction field and a
// biased exponent field.
//
// Both significands carry the hidden 1, so the 2(MANT_W+1)-bit product lies
// in [1, 4) with its binary point MANT_W*2 bits from the right: its leading
// 1 is either at the top bit (product >= 2) or one below.  In the first case
// the point moves one place and the exponent is incremented; in the second
// nothing moves.  The MANT_W bits right of the hidden 1 are kept and the
// rest are dropped (truncation: the design does not round).
//
// The signed exponent from the bias subtracter, after that increment, then
// decides the encoding:
//   * e >= 2^EXP_W - 1 : overflow, exponent field all ones, fraction 0
//     (Infinity), ovf = 1;
//   * e <= 0           : the product is below the normal range and is
//     written as a denormal, 0.f x 2^(1-bias): the significand, hidden bit
//     included, is shifted right by 1-e and the exponent field is 0; if the
//     shift removes every bit the result is zero;
//   * otherwise        : exponent field e, the normalized fraction.
// Normalization by one place follows the paper; the overflow and denormal
// encodings, and truncation, are this design's choices.  Combinational.
module normalizer #(
  parameter int unsigned EXP_W  = 8,
  parameter int unsigned MANT_W = 23
) (
  input  logic [2*MANT_W+1:0]     prod,     // significand product, 2 integer bits
  input  logic signed [EXP_W+1:0] exp_in,   // e1 + e2 - bias
  output logic [EXP_W-1:0]        exp_out,
  output logic [MANT_W-1:0]       frac_out,
  output logic                    ovf,      // exponent overflow
  output logic                    shift1    // product was >= 2 and was shifted
);
  localparam int unsigned SW = MANT_W + 1;                  // significand width
  localparam logic signed [EXP_W+2:0] EMAX = (EXP_W+3)'((1 << EXP_W) - 1);

  logic [SW-1:0]            sig;
  logic signed [EXP_W+2:0]  e;
  logic signed [EXP_W+2:0]  rsh;   // 1 - e, right shift for denormals

  always_comb begin
    shift1 = prod[2*MANT_W+1];
    sig    = shift1 ? prod[2*MANT_W+1 -: SW] : prod[2*MANT_W -: SW];
    e      = (EXP_W+3)'(exp_in) + (EXP_W+3)'(shift1);
    rsh    = (EXP_W+3)'(1) - e;
    ovf    = 1'b0;
    if (e >= EMAX) begin
      ovf      = 1'b1;
      exp_out  = '1;
      frac_out = '0;
    end else if (e <= 0) begin
      exp_out  = '0;
      frac_out = (rsh >= $signed((EXP_W+3)'(SW))) ? '0 : MANT_W'(sig >> rsh);
    end else begin
      exp_out  = e[EXP_W-1:0];
      frac_out = sig[MANT_W-1:0];
    end
  end
endmodule
