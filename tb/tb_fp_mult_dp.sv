// tb_fp_mult_dp: end-to-end test of the multiplier configured for double
// precision (11-bit exponent, 52-bit fraction, bias 1023), whose 53 x 53
// significand product goes through two more Karatsuba levels than single
// precision.  Results are compared with a wide-integer reference
// (tb_fp_ref_pkg) and the flags with the expected word's code; the same
// mechanisms as in the single precision test are counted and must occur.
module tb_fp_mult_dp;
  import tb_fp_ref_pkg::*;

  localparam int NVEC = 20000;

  int checks = 0, failures = 0;
  int n_shift = 0, n_noshift = 0, n_ovf = 0, n_den = 0, n_ufz = 0, n_special = 0;
  logic clk = 1'b0;

  logic [63:0] a, b, result;
  logic        zero, infinity, nan, denormal, norm_shift, overflow;

  always #5 clk = ~clk;

  fp_mult #(.EXP_W(11), .MANT_W(52), .BIAS(1023)) dut (
    .a(a), .b(b), .result(result), .zero(zero), .infinity(infinity), .nan(nan),
    .denormal(denormal), .norm_shift(norm_shift), .overflow(overflow)
  );

  initial begin : watchdog
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] gen();
    logic        s;
    logic [51:0] f;
    s = 1'($urandom);
    f = {20'($urandom), $urandom};
    case ($urandom_range(0, 19))
      0:       return {s, 63'b0};
      1:       return {s, 11'h000, f | 52'h1};
      2:       return {s, 11'h7FF, 52'b0};
      3:       return {s, 11'h7FF, f | 52'h1};
      4, 5, 6, 7, 8, 9:
               return {s, 11'($urandom_range(1000, 1046)), f};
      default: return {s, 11'($urandom_range(1, 2046)), f};
    endcase
  endfunction

  initial begin
    for (int n = 0; n < NVEC; n++) begin
      logic [63:0] want;
      @(posedge clk);
      a = gen();
      b = gen();
      if (n == 0) begin a = 64'h3FF0000000000000; b = 64'h4008000000000000; end  // 1 * 3
      if (n == 1) begin a = 64'h3FFFFFFFFFFFFFFF; b = 64'h3FFFFFFFFFFFFFFF; end
      #1;
      want = dp_mult_ref(a, b);
      checks++;
      if (result != want) begin
        failures++;
        if (failures < 10) $display("FAIL %h * %h -> %h, want %h", a, b, result, want);
      end
      checks++;
      if (zero     != (want[62:0] == '0) ||
          infinity != (want[62:52] == '1 && want[51:0] == '0) ||
          nan      != (want[62:52] == '1 && want[51:0] != '0) ||
          denormal != (want[62:52] == '0 && want[51:0] != '0)) begin
        failures++;
        if (failures < 10) $display("FAIL flags %h * %h", a, b);
      end
      if (a[62:52] == '0 || b[62:52] == '0 || a[62:52] == '1 || b[62:52] == '1) n_special++;
      else begin
        if (norm_shift) n_shift++; else n_noshift++;
        if (overflow)                    n_ovf++;
        else if (want[62:0] == '0)       n_ufz++;
        else if (want[62:52] == '0)      n_den++;
      end
    end
    $display("shift=%0d noshift=%0d overflow=%0d denormal=%0d ufzero=%0d special=%0d",
             n_shift, n_noshift, n_ovf, n_den, n_ufz, n_special);
    checks++;
    if (n_shift == 0 || n_noshift == 0 || n_ovf == 0 || n_den == 0 || n_ufz == 0 || n_special == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
