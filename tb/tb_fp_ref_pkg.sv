// tb_fp_ref_pkg: reference models used by the floating point testbenches.
//
// The single precision reference works on real (double) numbers: a single
// precision operand converts to a double exactly, and the product of two
// 24-bit significands (48 bits) is exact in a double's 53, so the exact
// product is available and only has to be truncated to single precision.
// The double precision reference uses wide integer arithmetic instead.
// Both implement the multiplier's rules: truncation, overflow to Infinity,
// underflow to a denormal or zero, denormal operands flushed to zero, and
// the quiet NaN 0 / all-ones / 100..0 for invalid products.
package tb_fp_ref_pkg;

  // 2^k as a real, for any integer k in the double range
  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    for (int i = 0; i < k; i++) r = r * 2.0;
    for (int i = 0; i > k; i--) r = r * 0.5;
    return r;
  endfunction

  // single precision word -> exact double (normal and infinite/NaN not used)
  function automatic real sp_to_real(input logic [31:0] w);
    logic [63:0] d;
    d = {w[31], 11'(int'(w[30:23]) - 127 + 1023), w[22:0], 29'b0};
    return $bitstoreal(d);
  endfunction

  // non-negative exact real -> single precision magnitude, truncated
  function automatic logic [30:0] sp_encode_trunc(input real v);
    logic [63:0] d;
    int          e;
    if (v == 0.0) return '0;
    d = $realtobits(v);
    e = int'(d[62:52]) - 1023 + 127;
    if (e >= 255) return {8'hFF, 23'b0};
    if (e >= 1)   return {8'(e), d[51:29]};
    return {8'h00, 23'($rtoi(v * pow2(149)))};
  endfunction

  function automatic logic [31:0] sp_mult_ref(input logic [31:0] a, input logic [31:0] b);
    logic       s;
    logic       az, bz, ai, bi, an, bn;
    s  = a[31] ^ b[31];
    az = (a[30:23] == 8'h00);
    bz = (b[30:23] == 8'h00);
    ai = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    bi = (b[30:23] == 8'hFF) && (b[22:0] == '0);
    an = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    bn = (b[30:23] == 8'hFF) && (b[22:0] != '0);
    if (an || bn || (ai && bz) || (az && bi)) return 32'h7FC00000;
    if (ai || bi) return {s, 8'hFF, 23'b0};
    if (az || bz) return {s, 31'b0};
    return {s, sp_encode_trunc(sp_to_real({1'b0, a[30:0]}) * sp_to_real({1'b0, b[30:0]}))};
  endfunction

  function automatic logic [63:0] dp_mult_ref(input logic [63:0] a, input logic [63:0] b);
    logic          s;
    logic          az, bz, ai, bi, an, bn;
    logic [105:0]  prod;
    logic [52:0]   sig;
    longint        e;
    s  = a[63] ^ b[63];
    az = (a[62:52] == '0);
    bz = (b[62:52] == '0);
    ai = (a[62:52] == '1) && (a[51:0] == '0);
    bi = (b[62:52] == '1) && (b[51:0] == '0);
    an = (a[62:52] == '1) && (a[51:0] != '0);
    bn = (b[62:52] == '1) && (b[51:0] != '0);
    if (an || bn || (ai && bz) || (az && bi)) return 64'h7FF8000000000000;
    if (ai || bi) return {s, 11'h7FF, 52'b0};
    if (az || bz) return {s, 63'b0};
    prod = 106'({1'b1, a[51:0]}) * 106'({1'b1, b[51:0]});
    e    = longint'(a[62:52]) + longint'(b[62:52]) - 1023;
    // value = prod * 2^(e - 1023 - 104); bring the leading 1 to bit 52
    if (prod[105]) begin
      sig = prod[105:53];
      e   = e + 1;
    end else begin
      sig = prod[104:52];
    end
    if (e >= 2047) return {s, 11'h7FF, 52'b0};
    if (e >= 1)    return {s, 11'(e), sig[51:0]};
    if (1 - e >= 53) return {s, 63'b0};
    return {s, 11'h000, 52'(sig >> (1 - e))};
  endfunction

endpackage
