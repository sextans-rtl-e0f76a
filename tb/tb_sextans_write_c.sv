// tb_sextans_write_c: Write C against eight behavioural HBM channels whose
// write-ready drops at random. Feeds M = 70 (padded to 128 rows, 8 beats per
// block) by N = 16 (two blocks) of random beats with random gaps and checks
// every channel word at c_out_base + i*8 + g afterwards, and the done pulse.
module tb_sextans_write_c;
  import sextans_pkg::*;
  localparam int CH = 8, M = 70, N = 16, NBLK = 2, WORDS = 8, BASE = 21;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;
  logic busy, done, in_valid, in_ready;
  logic [CH*512-1:0] in_data;
  logic [CH-1:0] wr_valid, wr_ready, rq_ready, resp_valid;
  logic [CH-1:0][31:0] wr_addr;
  logic [CH-1:0][511:0] wr_data, rb_data, resp_data;
  logic [31:0] rb_addr = 0;
  int n_done = 0;

  sextans_write_c #(.N0(8), .P(64), .CH(CH)) dut (.*);
  for (genvar c = 0; c < CH; c++) begin : g_mem
    sextans_hbm_channel #(.LAT(3), .STALL_PCT(30)) u_mem (
      .clk(clk), .req_valid(1'b0), .req_ready(rq_ready[c]), .req_addr(32'd0),
      .resp_valid(resp_valid[c]), .resp_data(resp_data[c]),
      .wr_valid(wr_valid[c]), .wr_ready(wr_ready[c]), .wr_addr(wr_addr[c]), .wr_data(wr_data[c]),
      .pl_en(1'b0), .pl_addr(32'd0), .pl_data('0), .rb_addr(rb_addr), .rb_data(rb_data[c]));
  end

  logic [CH*512-1:0] beats [$], sent [$];
  logic gate;
  assign in_valid = beats.size() > 0 && gate;
  assign in_data  = beats.size() > 0 ? beats[0] : '0;
  always @(posedge clk) begin
    gate <= ($urandom % 100) < 70;
    if (done) n_done++;
    if (in_valid && in_ready) sent.push_back(beats.pop_front());
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int b = 0; b < WORDS*NBLK; b++) beats.push_back({128{$urandom}});
    repeat (2) @(posedge clk); rst_n = 1;
    cfg = '0; cfg.m = M; cfg.n = N; cfg.c_out_base = BASE;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (n_done == 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (sent.size() != WORDS*NBLK || busy || n_done != 1) begin
      failures++; $display("FAIL %0d beats taken, busy=%b, done pulses %0d", sent.size(), busy, n_done);
    end
    for (int b = 0; b < sent.size(); b++) begin
      rb_addr = BASE + b; #1;
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (rb_data[c] !== sent[b][c*512 +: 512]) begin
          failures++; if (failures < 10) $display("FAIL beat %0d channel %0d", b, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
