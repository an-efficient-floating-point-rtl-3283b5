// tb_bias_subtractor: exhaustive check of the ripple-borrow bias subtracter
// for single precision (bias 127, all 512 sums) and double precision
// (bias 1023, all 4096 sums) against signed integer subtraction.
module tb_bias_subtractor;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [8:0]         s_sp;
  logic signed [9:0]  d_sp;
  logic [11:0]        s_dp;
  logic signed [12:0] d_dp;

  always #5 clk = ~clk;

  bias_subtractor #(.EXP_W(8),  .BIAS(127))  dut_sp (.sum(s_sp), .diff(d_sp));
  bias_subtractor #(.EXP_W(11), .BIAS(1023)) dut_dp (.sum(s_dp), .diff(d_dp));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_dp = '0;
    for (int i = 0; i < 512; i++) begin
      s_sp = 9'(i);
      #1;
      checks++;
      if (int'(d_sp) != i - 127) begin
        failures++;
        if (failures < 10) $display("FAIL sp %0d -> %0d", i, d_sp);
      end
    end
    for (int i = 0; i < 4096; i++) begin
      s_dp = 12'(i);
      #1;
      checks++;
      if (int'(d_dp) != i - 1023) begin
        failures++;
        if (failures < 10) $display("FAIL dp %0d -> %0d", i, d_dp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
