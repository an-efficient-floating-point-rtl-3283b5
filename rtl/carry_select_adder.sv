// carry_select_adder: W-bit two-operand carry-select adder.
//
// The operands are cut into blocks of BLK bits (the last block takes what is
// left).  The first block is a plain ripple adder fed by cin.  Every other
// block is computed twice in parallel, once for an incoming carry of 0 and
// once for 1, and the real carry from the block below only selects between
// the two results, so the carry crosses a block through one multiplexer
// instead of BLK full adders.  It is the carry-propagate adder used wherever
// the multiplier needs one.  The block size is this design's choice.
// Combinational.
module carry_select_adder #(
  parameter int unsigned W   = 16,
  parameter int unsigned BLK = 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  localparam int unsigned NB = (W + BLK - 1) / BLK;

  logic [NB:0] bc;   // carry into each block
  assign bc[0] = cin;

  for (genvar k = 0; k < NB; k++) begin : g_blk
    localparam int unsigned LO = k * BLK;
    localparam int unsigned BW = (W - LO < BLK) ? (W - LO) : BLK;

    logic [BW-1:0] s0, s1;
    logic          c0, c1;

    // Ripple sum of this block for carry-in 0 and carry-in 1.
    always_comb begin
      logic r0, r1;
      r0 = 1'b0;
      r1 = 1'b1;
      for (int i = 0; i < int'(BW); i++) begin
        s0[i] = a[LO+i] ^ b[LO+i] ^ r0;
        s1[i] = a[LO+i] ^ b[LO+i] ^ r1;
        r0    = (a[LO+i] & b[LO+i]) | (r0 & (a[LO+i] ^ b[LO+i]));
        r1    = (a[LO+i] & b[LO+i]) | (r1 & (a[LO+i] ^ b[LO+i]));
      end
      c0 = r0;
      c1 = r1;
    end

    assign s[LO +: BW] = bc[k] ? s1 : s0;
    assign bc[k+1]     = bc[k] ? c1 : c0;
  end

  assign cout = bc[NB];
endmodule
