// tb_carry_select_adder: random and corner checks of the carry-select adder
// against integer addition, at 16 bits (four full blocks) and 13 bits (a
// short last block), with both values of the carry in.
module tb_carry_select_adder;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic [15:0] a16, b16, s16;
  logic [12:0] a13, b13, s13;
  logic        cin, co16, co13;

  always #5 clk = ~clk;

  carry_select_adder #(.W(16), .BLK(4)) dut16 (
    .a(a16), .b(b16), .cin(cin), .s(s16), .cout(co16)
  );
  carry_select_adder #(.W(13), .BLK(4)) dut13 (
    .a(a13), .b(b13), .cin(cin), .s(s13), .cout(co13)
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
      a16 = 16'($urandom);
      b16 = 16'($urandom);
      cin = 1'($urandom);
      if (n < 4) begin          // full carry propagation
        a16 = 16'hFFFF;
        b16 = 16'(n >> 1);
        cin = 1'(n);
      end
      a13 = a16[12:0];
      b13 = b16[12:0];
      #1;
      checks++;
      if ({co16, s16} != 17'(a16) + 17'(b16) + 17'(cin)) begin
        failures++;
        if (failures < 10) $display("FAIL16 %h+%h+%b -> %b %h", a16, b16, cin, co16, s16);
      end
      checks++;
      if ({co13, s13} != 14'(a13) + 14'(b13) + 14'(cin)) begin
        failures++;
        if (failures < 10) $display("FAIL13 %h+%h+%b -> %b %h", a13, b13, cin, co13, s13);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
