// tb_ut_mult: exhaustive check of the Urdhva-Tiryagbhyam multiplier at the
// 4 x 4 size of the method's illustration (256 pairs) and at the 8 x 8 leaf
// size used inside the Karatsuba multiplier (65536 pairs), against integer
// multiplication.  It also checks that the 4 x 4 column adders have the bus
// widths of the published hardware: a 1-bit carry out of adder 1, 2-bit
// carries out of adders 2 to 5, and a 2-bit sum out of adder 6.
module tb_ut_mult;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [7:0]  a8, b8;
  logic [15:0] p8;
  logic [3:0]  a4, b4;
  logic [7:0]  p4;

  always #5 clk = ~clk;

  ut_mult #(.N(8)) dut8 (.a(a8), .b(b8), .p(p8));
  ut_mult #(.N(4)) dut4 (.a(a4), .b(b4), .p(p4));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // adder k is W bits wide, so its carry word is W-1 bits
    int unsigned want_w [1:6] = '{2, 3, 3, 3, 3, 2};
    for (int k = 1; k <= 6; k++) begin
      checks++;
      if (fp_pkg::ut_col_width(4, k) != want_w[k]) begin
        failures++;
        $display("FAIL width of adder %0d: %0d", k, fp_pkg::ut_col_width(4, k));
      end
    end
    a8 = '0;
    b8 = '0;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i);
        b4 = 4'(j);
        #1;
        checks++;
        if (int'(p4) != i * j) begin
          failures++;
          if (failures < 10) $display("FAIL4 %0d*%0d -> %0d", i, j, p4);
        end
      end
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        a8 = 8'(i);
        b8 = 8'(j);
        #1;
        checks++;
        if (int'(p8) != i * j) begin
          failures++;
          if (failures < 10) $display("FAIL8 %0d*%0d -> %0d", i, j, p8);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
