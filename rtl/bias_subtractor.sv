// bias_subtractor: ripple-borrow subtracter that removes the exponent bias.
//
// The sum of two biased exponents carries the bias twice; subtracting BIAS
// once gives the biased exponent of the product.  The subtracter is a chain
// of full subtracters whose borrow ripples from bit 0 upward.  The unsigned
// EXP_W+1 bit sum is zero-extended to EXP_W+2 bits and the difference is
// returned as an EXP_W+2 bit two's complement number, so that an exponent
// that underflows below zero stays visible to the normalizer.  BIAS is 127
// for single precision and 1023 for double.  Combinational.
module bias_subtractor #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned BIAS  = 127
) (
  input  logic [EXP_W:0]          sum,
  output logic signed [EXP_W+1:0] diff
);
  localparam logic [EXP_W+1:0] B = (EXP_W+2)'(BIAS);

  logic [EXP_W+1:0] x;
  logic [EXP_W+2:0] bw;   // borrow chain

  assign x     = {1'b0, sum};
  assign bw[0] = 1'b0;
  for (genvar i = 0; i < EXP_W + 2; i++) begin : g_fs
    assign diff[i]  = x[i] ^ B[i] ^ bw[i];
    assign bw[i+1]  = (~x[i] & B[i]) | (~(x[i] ^ B[i]) & bw[i]);
  end
endmodule
