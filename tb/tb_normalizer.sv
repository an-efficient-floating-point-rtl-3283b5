// tb_normalizer: checks the single precision normalizer with products in
// the range a product of two significands can take ([2^46, 2^48)) and
// exponents from deep underflow to overflow.  The expected fields come from
// the exact real value prod * 2^(exp_in - 127 - 46) truncated to single
// precision (tb_fp_ref_pkg).  It also checks the shift and overflow outputs
// and counts that every case occurred: shift and no shift, normal,
// overflow, denormal and underflow to zero.
module tb_normalizer;
  import tb_fp_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_shift = 0, n_noshift = 0, n_ovf = 0, n_den = 0, n_zero = 0, n_norm = 0;
  logic clk = 1'b0;

  logic [47:0]       prod;
  logic signed [9:0] exp_in;
  logic [7:0]        exp_out;
  logic [22:0]       frac_out;
  logic              ovf, shift1;

  always #5 clk = ~clk;

  normalizer dut (
    .prod(prod), .exp_in(exp_in), .exp_out(exp_out), .frac_out(frac_out),
    .ovf(ovf), .shift1(shift1)
  );

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      logic [23:0] sa, sb;
      logic [30:0] exp_w;
      real         v;
      int          ex;
      sa     = {1'b1, 23'($urandom)};
      sb     = {1'b1, 23'($urandom)};
      if (n == 0) begin sa = '1; sb = '1; end
      if (n == 1) begin sa = 24'h800000; sb = 24'h800000; end
      prod   = 48'(sa) * 48'(sb);
      exp_in = 10'(int'($urandom_range(0, 560)) - 160);
      if (n < 64) exp_in = 10'(n - 32);           // around the denormal boundary
      #1;
      ex    = int'(exp_in);
      v     = real'(prod) * pow2(ex - 127 - 46);
      exp_w = sp_encode_trunc(v);
      checks++;
      if ({exp_out, frac_out} != exp_w) begin
        failures++;
        if (failures < 10)
          $display("FAIL prod=%h e=%0d -> %h %h, want %h", prod, exp_in, exp_out, frac_out, exp_w);
      end
      checks++;
      if (shift1 != prod[47] || ovf != (exp_w[30:23] == 8'hFF)) begin
        failures++;
        if (failures < 10) $display("FAIL flags prod=%h e=%0d shift=%b ovf=%b", prod, exp_in, shift1, ovf);
      end
      if (shift1) n_shift++; else n_noshift++;
      if (exp_w[30:23] == 8'hFF)                 n_ovf++;
      else if (exp_w == '0)                      n_zero++;
      else if (exp_w[30:23] == 8'h00)            n_den++;
      else                                       n_norm++;
    end
    $display("shift=%0d noshift=%0d normal=%0d overflow=%0d denormal=%0d zero=%0d",
             n_shift, n_noshift, n_norm, n_ovf, n_den, n_zero);
    checks++;
    if (n_shift == 0 || n_noshift == 0 || n_norm == 0 || n_ovf == 0 || n_den == 0 || n_zero == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
