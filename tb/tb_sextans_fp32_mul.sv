// tb_sextans_fp32_mul: checks the FP32 multiplier against double-precision
// reference arithmetic on directed special cases and random normal operands.
module tb_sextans_fp32_mul;
  import sextans_tb_pkg::*;
  logic [31:0] a, b, p;
  int checks = 0, failures = 0;
  sextans_fp32_mul dut (.a(a), .b(b), .p(p));

  task automatic chk(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp);
    a = x; b = y; #1;
    checks++;
    if (p !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", x, y, p, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    chk(32'h3FC0_0000, 32'h4040_0000, 32'h4090_0000);   // 1.5*3 = 4.5
    chk(32'h3F80_0000, 32'hBF80_0000, 32'hBF80_0000);   // 1*-1
    chk(32'h0000_0000, 32'h4040_0000, 32'h0000_0000);   // 0*3
    chk(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);   // inf*0
    chk(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);   // overflow
    chk(32'h0080_0000, 32'h0080_0000, 32'h0000_0000);   // underflow flushes
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, y;
      x = rand_fp(64, 190); y = rand_fp(64, 190);
      chk(x, y, fmul(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
