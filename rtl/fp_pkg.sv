// fp_pkg: types and constants shared by the floating point multiplier.
//
// fp_flags_t is the bundle of the four exception outputs (Zero, Infinity,
// NaN, Denormal) that the result stage raises; they are defined purely from
// the exponent field and fraction of the packed result word.  The format
// constants give the two IEEE-754 binary formats the multiplier supports:
// single (1/8/23, bias 127) and double (1/11/52, bias 1023).
package fp_pkg;

  typedef struct packed {
    logic zero;
    logic infinity;
    logic nan;
    logic denormal;
  } fp_flags_t;

  localparam int unsigned SP_EXP_W  = 8;
  localparam int unsigned SP_MANT_W = 23;
  localparam int unsigned SP_BIAS   = 127;
  localparam int unsigned DP_EXP_W  = 11;
  localparam int unsigned DP_MANT_W = 52;
  localparam int unsigned DP_BIAS   = 1023;

  // Split point used by the Karatsuba recursion: the low part is the
  // smallest multiple of LEAF that is at least half of n, so that the leaf
  // multipliers stay LEAF bits wide (see karatsuba_mult).
  function automatic int unsigned kara_split(int unsigned n, int unsigned leaf);
    return leaf * ((n + 2 * leaf - 1) / (2 * leaf));
  endfunction

  // Urdhva-Tiryagbhyam column k of an n x n product has ut_col_count(n, k)
  // partial products.  Column adder k receives them plus the carry word of
  // adder k-1, so its largest possible sum is
  //   max(k) = count(k) + floor(max(k-1) / 2),  max(0) = 1,
  // and ut_col_width gives the bits needed to hold it.  For n = 4 this gives
  // a 1-bit carry out of adder 1 and 2-bit carries after it.
  function automatic int unsigned ut_col_count(int unsigned n, int unsigned k);
    int unsigned lo, hi;
    lo = (k > n - 1) ? k - (n - 1) : 0;
    hi = (k < n - 1) ? k : n - 1;
    return hi - lo + 1;
  endfunction

  function automatic int unsigned ut_col_width(int unsigned n, int unsigned k);
    int unsigned mx;
    mx = 1;
    for (int unsigned j = 1; j <= k; j++)
      mx = ut_col_count(n, j) + ((j >= 2) ? mx / 2 : 0);
    return $clog2(mx + 1);
  endfunction

endpackage
