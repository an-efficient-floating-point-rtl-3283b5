// tb_fp_mult: end-to-end test of the single precision multiplier at its
// default parameters.
//
// Operands are drawn from classes (normal with any exponent, normal with an
// exponent near the bias, zero, denormal, Infinity, NaN) and a few fixed
// pairs.  Each result is compared with the exact real product truncated to
// single precision (tb_fp_ref_pkg), and each of the four flags with the code
// of the expected word.  The multiplier is combinational, so every result is
// checked in the same time step as its operands are applied.  The test counts
// how often each mechanism fired (one-place normalization shift, no shift,
// exponent overflow to Infinity, denormal result, underflow to zero, NaN
// operand, Infinity times zero, Infinity operand, zero operand, denormal
// operand flushed to zero) and fails if one never did.
module tb_fp_mult;
  import tb_fp_ref_pkg::*;

  localparam int NVEC = 40000;

  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [31:0] a, b, result;
  logic        zero, infinity, nan, denormal, norm_shift, overflow;

  typedef enum int {
    M_SHIFT, M_NOSHIFT, M_OVF, M_DEN, M_UFZ, M_NANOP, M_INFZERO, M_INFOP, M_ZEROOP, M_DENOP, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"normalize shift", "no shift", "overflow", "denormal result",
                               "underflow to zero", "NaN operand", "inf*0", "inf operand",
                               "zero operand", "denormal operand"};

  always #5 clk = ~clk;

  fp_mult dut (
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

  function automatic logic [31:0] gen();
    logic s;
    s = 1'($urandom);
    case ($urandom_range(0, 19))
      0:       return {s, 31'b0};                                   // zero
      1:       return {s, 8'h00, 23'($urandom_range(1, 32'h7FFFFF))}; // denormal
      2:       return {s, 8'hFF, 23'b0};                            // infinity
      3:       return {s, 8'hFF, 23'($urandom_range(1, 32'h7FFFFF))}; // NaN
      4, 5, 6, 7, 8, 9:
               return {s, 8'($urandom_range(100, 154)), 23'($urandom)};
      default: return {s, 8'($urandom_range(1, 254)), 23'($urandom)};
    endcase
  endfunction

  function automatic bit is_nan(input logic [31:0] w);
    return w[30:23] == 8'hFF && w[22:0] != '0;
  endfunction
  function automatic bit is_inf(input logic [31:0] w);
    return w[30:23] == 8'hFF && w[22:0] == '0;
  endfunction

  initial begin
    for (int n = 0; n < NVEC; n++) begin
      logic [31:0] want;
      @(posedge clk);
      a = gen();
      b = gen();
      case (n)
        0: begin a = 32'h3F800000; b = 32'h3F800000; end   // 1 * 1 = 1
        1: begin a = 32'h40400000; b = 32'hC0000000; end   // 3 * -2 = -6
        2: begin a = 32'h3FFFFFFF; b = 32'h3FFFFFFF; end   // largest significands
        3: begin a = 32'h7F7FFFFF; b = 32'h40000000; end   // overflow
        4: begin a = 32'h00800000; b = 32'h3F000000; end   // min normal / 2 -> denormal
        5: begin a = 32'h00800000; b = 32'h00800000; end   // underflow to zero
        default: ;
      endcase
      #1;
      want = sp_mult_ref(a, b);
      checks++;
      if (result != want) begin
        failures++;
        if (failures < 10) $display("FAIL %h * %h -> %h, want %h", a, b, result, want);
      end
      checks++;
      if (zero     != (want[30:0] == '0) ||
          infinity != is_inf(want) ||
          nan      != is_nan(want) ||
          denormal != (want[30:23] == '0 && want[22:0] != '0)) begin
        failures++;
        if (failures < 10) $display("FAIL flags %h * %h -> z%b i%b n%b d%b", a, b, zero, infinity, nan, denormal);
      end
      // which mechanism produced this result
      if (is_nan(a) || is_nan(b))                                      mech[M_NANOP]++;
      else if ((is_inf(a) && b[30:23] == 0) || (is_inf(b) && a[30:23] == 0)) mech[M_INFZERO]++;
      else if (is_inf(a) || is_inf(b))                                 mech[M_INFOP]++;
      else if (a[30:23] == 0 || b[30:23] == 0) begin
        if (a[30:0] != 0 && b[30:0] != 0 && (a[30:23] == 0 || b[30:23] == 0)) mech[M_DENOP]++;
        else mech[M_ZEROOP]++;
      end else begin
        if (norm_shift) mech[M_SHIFT]++; else mech[M_NOSHIFT]++;
        if (overflow)                                     mech[M_OVF]++;
        else if (want[30:0] == '0)                        mech[M_UFZ]++;
        else if (want[30:23] == '0)                       mech[M_DEN]++;
      end
    end
    for (int m = 0; m < M_NUM; m++) begin
      $display("%-18s %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL mechanism never exercised: %s", mech_name[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
