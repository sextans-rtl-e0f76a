// tb_sextans_read_a: Read A against a behavioural HBM channel. Checks that the
// words a_base .. a_base+a_len-1 come out in order, once per column block,
// first at full rate (no stalls: one word per cycle after the memory
// latency) and then with a randomly stalling consumer.
module tb_sextans_read_a;
  import sextans_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cfg_t cfg;
  logic busy, req_valid, req_ready, resp_valid, out_valid, out_ready;
  logic [31:0] req_addr;
  logic [511:0] resp_data, out_data, rb_data;
  logic pl_en = 0; logic [31:0] pl_addr = 0; logic [511:0] pl_data = '0;
  logic wr_ready;
  int rdy_pct = 100;

  sextans_read_a #(.N0(8)) dut (.*);
  sextans_hbm_channel #(.LAT(7), .STALL_PCT(0)) u_mem (
    .clk(clk), .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_data(resp_data), .wr_valid(1'b0), .wr_ready(wr_ready),
    .wr_addr(32'd0), .wr_data('0), .pl_en(pl_en), .pl_addr(pl_addr), .pl_data(pl_data),
    .rb_addr(32'd0), .rb_data(rb_data));

  logic [511:0] img [200];
  int got = 0;
  longint first_t = -1, last_t = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    out_ready <= ($urandom % 100) < rdy_pct;
    if (out_valid && out_ready) begin
      logic [511:0] e;
      e = img[cfg.a_base + 32'(got % int'(cfg.a_len))];
      checks++;
      if (out_data !== e) begin failures++; if (failures < 10) $display("FAIL word %0d", got); end
      if (first_t < 0) first_t = cyc;
      last_t = cyc;
      got++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int a_len, input int n, input int base);
    int total;
    cfg = '0; cfg.a_len = a_len; cfg.n = n; cfg.a_base = base;
    total = a_len * ((n + 7) / 8);
    got = 0; first_t = -1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (got < total) @(posedge clk);
    repeat (20) @(posedge clk);
    checks++;
    if (got != total || busy) begin failures++; $display("FAIL %0d words of %0d, busy=%b", got, total, busy); end
  endtask

  initial begin
    for (int a = 0; a < 200; a++) begin
      img[a] = {16{$urandom}};
      @(negedge clk); pl_en = 1; pl_addr = a; pl_data = img[a];
    end
    @(negedge clk); pl_en = 0;
    rst_n = 1;
    rdy_pct = 100;
    run(37, 20, 100);
    checks++;
    if (last_t - first_t + 1 != 37 * 3) begin
      failures++; $display("FAIL full-rate stream took %0d cycles for %0d words", last_t - first_t + 1, 37 * 3);
    end
    rdy_pct = 50;
    run(23, 8, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
