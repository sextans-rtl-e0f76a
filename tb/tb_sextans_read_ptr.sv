// tb_sextans_read_ptr: Read Ptr against a behavioural HBM channel. Stores a
// pointer list of K/K0 + 1 = 20 entries (two words) and checks that all
// entries come out in order once per column block, with a stalling memory
// and a stalling consumer.
module tb_sextans_read_ptr;
  import sextans_pkg::*;
  localparam int K0 = 16, K = 300, N = 24, NP = (K + K0 - 1) / K0 + 1, NBLK = 3;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;
  logic busy, req_valid, req_ready, resp_valid, out_valid, out_ready;
  logic [31:0] req_addr, out_data;
  logic [511:0] resp_data, rb_data;
  logic pl_en = 0; logic [31:0] pl_addr = 0; logic [511:0] pl_data = '0;
  logic wr_ready;

  sextans_read_ptr #(.K0(K0), .N0(8)) dut (.*);
  sextans_hbm_channel #(.LAT(4), .STALL_PCT(30)) u_mem (
    .clk(clk), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_data(resp_data), .wr_valid(1'b0), .wr_ready(wr_ready),
    .wr_addr(32'd0), .wr_data('0), .pl_en(pl_en), .pl_addr(pl_addr), .pl_data(pl_data),
    .rb_addr(32'd0), .rb_data(rb_data));

  int q [NP];
  int got = 0;
  always @(posedge clk) begin
    out_ready <= ($urandom % 100) < 60;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== 32'(q[got % NP])) begin
        failures++; if (failures < 10) $display("FAIL entry %0d = %0d expected %0d", got, out_data, q[got % NP]);
      end
      got++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    q[0] = 0;
    for (int j = 1; j < NP; j++) q[j] = q[j-1] + int'($urandom % 50);
    for (int w = 0; w < 2; w++) begin
      @(negedge clk); pl_en = 1; pl_addr = 40 + w; pl_data = '1;
      for (int e = 0; e < 16; e++) if (w*16 + e < NP) pl_data[e*32 +: 32] = q[w*16 + e];
    end
    @(negedge clk); pl_en = 0;
    rst_n = 1;
    cfg = '0; cfg.k = K; cfg.n = N; cfg.ptr_base = 40;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (got < NP * NBLK) @(posedge clk);
    repeat (30) @(posedge clk);
    checks++;
    if (got != NP * NBLK || busy) begin failures++; $display("FAIL %0d entries, busy=%b", got, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
