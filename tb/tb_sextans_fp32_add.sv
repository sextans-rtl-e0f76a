// tb_sextans_fp32_add: checks the FP32 adder against double-precision
// reference arithmetic: directed cases (cancellation, signs, infinities) and
// random operands with close and distant exponents.
module tb_sextans_fp32_add;
  import sextans_tb_pkg::*;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;
  sextans_fp32_add dut (.a(a), .b(b), .s(s));

  task automatic chk(input logic [31:0] x, input logic [31:0] y, input logic [31:0] exp);
    a = x; b = y; #1;
    checks++;
    if (s !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", x, y, s, exp);
    end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    chk(32'h3F80_0000, 32'h4000_0000, 32'h4040_0000);   // 1+2 = 3
    chk(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);   // 1-1 = +0
    chk(32'h4040_0000, 32'h0000_0000, 32'h4040_0000);   // 3+0
    chk(32'h0000_0000, 32'hC040_0000, 32'hC040_0000);   // 0-3
    chk(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000);   // inf-inf
    chk(32'h4B80_0000, 32'h3F80_0000, 32'h4B80_0000);   // 2^24+1 ties to even
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] x, y;
      x = rand_fp(100, 150);
      y = (i % 3 == 0) ? (x ^ 32'h8000_0000) + ($urandom % 64) : rand_fp(100, 150);
      if (i % 5 == 0) y[30:23] = x[30:23];
      chk(x, y, fadd(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
