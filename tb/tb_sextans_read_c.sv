// tb_sextans_read_c: Read C against eight behavioural HBM channels with different latencies and random stalls. C is M = 70 rows, padded to 128 (8 words of 16 rows per block), by N = 9 (two blocks); checks that each output word joins word c_in_base + i*8 + g of every channel, channel c in bits 512c+511..512c, in order.
module tb_sextans_read_c;
  import sextans_pkg::*;
  localparam int CH = 8;
  localparam int K = 1, M = 70, N = 9, NBLK = 2;
  localparam int WORDS = (M + 63) / 64 * 4, BASE = 33;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;
  logic busy, out_valid, out_ready;
  logic [CH-1:0] req_valid, req_ready, resp_valid, wr_ready;
  logic [CH-1:0][31:0] req_addr;
  logic [CH-1:0][511:0] resp_data, rb_data;
  logic [CH*512-1:0] out_data;
  logic [CH-1:0] pl_en = '0; logic [31:0] pl_addr = 0; logic [511:0] pl_data = '0;

  sextans_read_c #(.N0(8), .P(64), .CH(8)) dut (.*);
  for (genvar c = 0; c < CH; c++) begin : g_mem
    sextans_hbm_channel #(.LAT(3 + 2*c), .STALL_PCT(25)) u_mem (
      .clk(clk), .req_valid(req_valid[c]), .req_ready(req_ready[c]), .req_addr(req_addr[c]),
      .resp_valid(resp_valid[c]), .resp_data(resp_data[c]), .wr_valid(1'b0), .wr_ready(wr_ready[c]),
      .wr_addr(32'd0), .wr_data('0), .pl_en(pl_en[c]), .pl_addr(pl_addr), .pl_data(pl_data),
      .rb_addr(32'd0), .rb_data(rb_data[c]));
  end

  logic [511:0] img [CH][BASE + WORDS*NBLK];
  int got = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom % 100) < 70;
    if (out_valid && out_ready) begin
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (out_data[c*512 +: 512] !== img[c][BASE + got]) begin
          failures++; if (failures < 10) $display("FAIL word %0d channel %0d", got, c);
        end
      end
      got++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < CH; c++)
      for (int a = 0; a < BASE + WORDS*NBLK; a++) begin
        img[c][a] = {16{$urandom}};
        @(negedge clk); pl_en = '0; pl_en[c] = 1; pl_addr = a; pl_data = img[c][a];
      end
    @(negedge clk); pl_en = '0;
    rst_n = 1;
    cfg = '0; cfg.k = K; cfg.m = M; cfg.n = N; cfg.c_in_base = BASE;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (got < WORDS*NBLK) @(posedge clk);
    repeat (30) @(posedge clk);
    checks++;
    if (got != WORDS*NBLK || busy) begin failures++; $display("FAIL %0d words of %0d, busy=%b", got, WORDS*NBLK, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
