// tb_exp_adder: exhaustive check of the 8-bit ripple-carry exponent adder
// (all 65536 operand pairs) against integer addition.
module tb_exp_adder;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [7:0] ea, eb;
  logic [8:0] s;

  always #5 clk = ~clk;

  exp_adder #(.EXP_W(8)) dut (.exp_a(ea), .exp_b(eb), .sum(s));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        ea = 8'(i);
        eb = 8'(j);
        #1;
        checks++;
        if (int'(s) != i + j) begin
          failures++;
          if (failures < 10) $display("FAIL %0d + %0d -> %0d", i, j, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
