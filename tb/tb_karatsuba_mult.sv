// tb_karatsuba_mult: checks the recursive Karatsuba multiplier against
// wide integer multiplication at the widths the multiplier is used at:
// 24 bits (single precision significand, the default), 8 bits (a single
// Urdhva-Tiryagbhyam leaf, no splitting), 16 and 32 bits (one
// and two levels of 8/8-style splitting) and 53 bits (double precision
// significand, whose recursion also reaches leaves narrower than 8 bits).
// Operands are random, plus all-ones and a few patterns that make the sum
// carries of Xl+Xr and Yl+Yr set at every level.
module tb_karatsuba_mult;
  int checks = 0, failures = 0;
  logic clk = 1'b0;

  logic [23:0]  x24, y24;
  logic [47:0]  p24;
  logic [7:0]   x8, y8;
  logic [15:0]  p8;
  logic [15:0]  x16, y16;
  logic [31:0]  p16;
  logic [31:0]  x32, y32;
  logic [63:0]  p32;
  logic [52:0]  x53, y53;
  logic [105:0] p53;

  always #5 clk = ~clk;

  karatsuba_mult dut24 (.x(x24), .y(y24), .p(p24));
  karatsuba_mult #(.N(8))  dut8  (.x(x8),  .y(y8),  .p(p8));
  karatsuba_mult #(.N(16)) dut16 (.x(x16), .y(y16), .p(p16));
  karatsuba_mult #(.N(32)) dut32 (.x(x32), .y(y32), .p(p32));
  karatsuba_mult #(.N(53)) dut53 (.x(x53), .y(y53), .p(p53));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) begin
      logic [63:0] r0, r1;
      r0 = {$urandom, $urandom};
      r1 = {$urandom, $urandom};
      case (n)
        0: begin r0 = '1; r1 = '1; end
        1: begin r0 = '0; r1 = '1; end
        2: begin r0 = 64'hFF00FF00FF00FF00; r1 = 64'h00FF00FF00FF00FF; end
        3: begin r0 = 64'h8080808080808080; r1 = 64'hFFFF0000FFFF0000; end
        default: ;
      endcase
      x24 = r0[23:0];  y24 = r1[23:0];
      x8  = r0[7:0];   y8  = r1[7:0];
      x16 = r0[15:0];  y16 = r1[15:0];
      x32 = r0[31:0];  y32 = r1[31:0];
      x53 = r0[52:0];  y53 = r1[52:0];
      #1;
      check(p24 == 48'(x24) * 48'(y24),   $sformatf("24: %h*%h -> %h", x24, y24, p24));
      check(p8 == 16'(x8) * 16'(y8),       $sformatf("8: %h*%h -> %h", x8, y8, p8));
      check(p16 == 32'(x16) * 32'(y16),   $sformatf("16: %h*%h -> %h", x16, y16, p16));
      check(p32 == 64'(x32) * 64'(y32),   $sformatf("32: %h*%h -> %h", x32, y32, p32));
      check(p53 == 106'(x53) * 106'(y53), $sformatf("53: %h*%h -> %h", x53, y53, p53));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
