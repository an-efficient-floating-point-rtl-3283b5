// tb_fp_exceptions: directed checks of the result stage in single precision.
// Each case gives the two operands and the normalizer's fields and states
// the expected result word and flags {zero, infinity, nan, denormal}
// literally.
module tb_fp_exceptions;
  import fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [31:0] a, b, result;
  logic        sign_p;
  logic [7:0]  exp_n;
  logic [22:0] frac_n;
  fp_flags_t   flags;

  always #5 clk = ~clk;

  fp_exceptions dut (
    .a(a), .b(b), .sign_p(sign_p), .exp_n(exp_n), .frac_n(frac_n),
    .result(result), .flags(flags)
  );

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [31:0] ta, input logic [31:0] tb, input logic [7:0] te,
                     input logic [22:0] tf, input logic [31:0] want, input logic [3:0] wflags,
                     input string what);
    a      = ta;
    b      = tb;
    sign_p = ta[31] ^ tb[31];
    exp_n  = te;
    frac_n = tf;
    #1;
    checks++;
    if (result != want || flags != wflags) begin
      failures++;
      $display("FAIL %s: result=%h flags=%b, want %h %b", what, result, flags, want, wflags);
    end
  endtask

  localparam logic [31:0] ONE  = 32'h3F800000;
  localparam logic [31:0] MONE = 32'hBF800000;
  localparam logic [31:0] INF  = 32'h7F800000;
  localparam logic [31:0] NAN  = 32'h7FC00001;
  localparam logic [31:0] QNAN = 32'h7FC00000;
  localparam logic [31:0] DEN  = 32'h00000123;   // denormal operand

  initial begin
    //   a      b      exp_n  frac_n       expected     z i n d
    run(ONE,   MONE,  8'd130, 23'h012345, 32'hC1012345, 4'b0000, "normal");
    run(ONE,   ONE,   8'd0,   23'h000100, 32'h00000100, 4'b0001, "denormal result");
    run(ONE,   MONE,  8'd0,   23'h000000, 32'h80000000, 4'b1000, "underflow to zero");
    run(ONE,   ONE,   8'hFF,  23'h000000, 32'h7F800000, 4'b0100, "overflow");
    run(NAN,   ONE,   8'd127, 23'h000000, QNAN,         4'b0010, "NaN operand a");
    run(ONE,   NAN,   8'd127, 23'h000000, QNAN,         4'b0010, "NaN operand b");
    run(INF,   32'h0, 8'd0,   23'h000000, QNAN,         4'b0010, "inf * 0");
    run(32'h80000000, INF, 8'd0, 23'h0,   QNAN,         4'b0010, "-0 * inf");
    run(INF,   MONE,  8'd200, 23'h000001, 32'hFF800000, 4'b0100, "inf * -1");
    run(MONE,  INF,   8'd200, 23'h000001, 32'hFF800000, 4'b0100, "-1 * inf");
    run(32'h0, MONE,  8'd5,   23'h000007, 32'h80000000, 4'b1000, "0 * -1");
    run(MONE,  DEN,   8'd5,   23'h000007, 32'h80000000, 4'b1000, "denormal operand flushed");
    run(INF,   INF,   8'hFF,  23'h000000, INF,          4'b0100, "inf * inf");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
