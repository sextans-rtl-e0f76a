// tb_sextans_bmem: fills a B window 8 rows per cycle, reads rows at random
// and checks the N0 values of each row and the one-cycle read latency.
module tb_sextans_bmem;
  import sextans_pkg::*;
  localparam int K0 = 256, N0 = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(K0/8)-1:0] wr_addr = 0;
  logic [7:0][N0-1:0][31:0] wr_data;
  logic [$clog2(K0)-1:0] rd_addr = 0;
  logic [N0-1:0][31:0] rd_data;
  logic [31:0] ref_b [K0][N0];

  sextans_bmem #(.K0(K0), .N0(N0)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < K0; r++) for (int q = 0; q < N0; q++) ref_b[r][q] = $urandom;
    for (int g = 0; g < K0/8; g++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = g[$clog2(K0/8)-1:0];
      for (int r = 0; r < 8; r++) for (int q = 0; q < N0; q++) wr_data[r][q] = ref_b[g*8 + r][q];
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 1000; t++) begin
      int r;
      r = int'($urandom % K0);
      @(negedge clk); rd_en = 1; rd_addr = r[$clog2(K0)-1:0];
      @(posedge clk); #1;
      for (int q = 0; q < N0; q++) begin
        checks++;
        if (rd_data[q] !== ref_b[r][q]) begin
          failures++; if (failures < 10) $display("FAIL row %0d col %0d: %h expected %h", r, q, rd_data[q], ref_b[r][q]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
