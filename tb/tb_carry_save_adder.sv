// tb_carry_save_adder: random check of the 3:2 row, s + 2*cy == a + b + c,
// and that s and cy are individually the bitwise sum and majority.
module tb_carry_save_adder;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [15:0] a, b, c, s, cy;

  always #5 clk = ~clk;

  carry_save_adder #(.W(16)) dut (.a(a), .b(b), .c(c), .s(s), .cy(cy));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      a = 16'($urandom);
      b = 16'($urandom);
      c = 16'($urandom);
      if (n == 0) begin a = '1; b = '1; c = '1; end
      #1;
      checks++;
      if ((32'(s) + 2 * 32'(cy)) != (32'(a) + 32'(b) + 32'(c))) begin
        failures++;
        if (failures < 10) $display("FAIL %h %h %h -> %h %h", a, b, c, s, cy);
      end
      // per bit: cy must be the majority, never a shifted-in value
      checks++;
      for (int i = 0; i < 16; i++)
        if (cy[i] != ((a[i] + b[i] + c[i]) >= 2)) begin
          failures++;
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
