// tb_sign_calc: exhaustive check of the product sign (all four sign pairs).
module tb_sign_calc;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic sa, sb, sp;

  always #5 clk = ~clk;

  sign_calc dut (.sign_a(sa), .sign_b(sb), .sign_p(sp));

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      sa = i[1];
      sb = i[0];
      #1;
      checks++;
      // negative exactly when the signs differ
      if (sp !== (i == 1 || i == 2)) begin
        failures++;
        $display("FAIL sign %b %b -> %b", sa, sb, sp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
