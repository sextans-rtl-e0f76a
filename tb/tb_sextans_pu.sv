// tb_sextans_pu: clears the scratchpad, feeds random FP32 products into a few
// rows with the minimum legal spacing D = ADD_LAT + 2 between updates of the
// same row (and one update per cycle overall), then drains with alpha and
// compares with c = fadd(c, fmul(a, b)) done in the same order here, bit
// exact. Checks the two-cycle drain latency.
module tb_sextans_pu;
  import sextans_pkg::*;
  import sextans_tb_pkg::*;
  localparam int C_DEPTH = 32, ADD_LAT = 2, D = ADD_LAT + 2, ROWS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, clr_en = 0, drain_en = 0, drain_valid, busy;
  logic [A_ROW_W-1:0] in_row = 0;
  fp32_t in_a = 0, in_b = 0, alpha, drain_data;
  logic [4:0] clr_addr = 0, drain_addr = 0;
  logic [31:0] ref_c [C_DEPTH];
  int last [C_DEPTH];

  sextans_pu #(.C_DEPTH(C_DEPTH), .ADD_LAT(ADD_LAT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    alpha = rand_fp(120, 130);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < C_DEPTH; r++) begin
      @(negedge clk); clr_en = 1; clr_addr = 5'(r); ref_c[r] = 0; last[r] = -100;
    end
    @(negedge clk); clr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      int r;
      @(negedge clk);
      // pick a row whose last update is at least D cycles ago, else a bubble
      r = int'($urandom % ROWS);
      if (t - last[r] >= D) begin
        in_valid = 1; in_row = A_ROW_W'(r);
        in_a = rand_fp(110, 140); in_b = rand_fp(110, 140);
        ref_c[r] = fadd(ref_c[r], fmul(in_a, in_b));
        last[r] = t;
      end else in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (8) @(negedge clk);
    for (int r = 0; r < C_DEPTH; r++) begin
      logic [31:0] exp_v;
      exp_v = fmul(alpha, ref_c[r]);
      drain_en = 1; drain_addr = 5'(r);
      @(negedge clk); drain_en = 0;
      checks++;
      if (drain_valid) begin failures++; $display("FAIL drain data one cycle early"); end
      @(negedge clk);
      checks++;
      if (!drain_valid || drain_data !== exp_v) begin
        failures++; if (failures < 10) $display("FAIL row %0d: %h expected %h (valid %b)", r, drain_data, exp_v, drain_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
