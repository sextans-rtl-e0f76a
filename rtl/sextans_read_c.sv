// sextans_read_c: Read C module.
//
// Streams C_in from HBM for Comp C. C is stored per column block i as
// Mp = ceil(M/P)*P rows of N0 = 8 FP32 values (rows past M are padding, P = 64),
// so a block has Mp/16 groups of F_C = 16 rows. The paper gives C_in eight
// HBM channels; one output word joins one 512-bit word (2 rows) from each:
// channel c holds rows 16g+2c and 16g+2c+1 at c_in_base + i*(Mp/16) + g.
// The rows leave in the order Collect C produces them, so Comp C simply pairs
// the two streams. Output word: row r of the group in bits 256r+255..256r.
// Layout and channel split of rows are this design's choices.
module sextans_read_c
  import sextans_pkg::*;
#(
  parameter int unsigned N0 = 8,
  parameter int unsigned P  = 64,
  parameter int unsigned CH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  cfg_t                      cfg,
  output logic                      busy,
  output logic [CH-1:0]             req_valid,
  input  logic [CH-1:0]             req_ready,
  output logic [CH-1:0][ADDR_W-1:0] req_addr,
  input  logic [CH-1:0]             resp_valid,
  input  logic [CH-1:0][HBM_W-1:0]  resp_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [CH*HBM_W-1:0]       out_data
);
  logic [31:0] n_blk, n_word, i_cnt, w_cnt;
  logic [31:0] blk_base;
  logic        run, step;
  logic [CH-1:0] ch_done, ch_ready, ch_valid, ch_pop;

  assign step = run && ((ch_done | ch_ready) == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {n_blk, n_word, i_cnt, w_cnt, blk_base} <= '0;
      run <= 1'b0; ch_done <= '0;
    end else if (!run) begin
      if (start) begin
        n_blk    <= ceil_shift(cfg.n, $clog2(N0));
        n_word   <= ceil_shift(cfg.m, $clog2(P)) << ($clog2(P) - $clog2(2*CH));
        {i_cnt, w_cnt} <= '0;
        blk_base <= cfg.c_in_base;
        ch_done  <= '0;
        run      <= (cfg.n != 0) && (cfg.m != 0);
      end
    end else if (step) begin
      ch_done <= '0;
      if (w_cnt + 32'd1 == n_word) begin
        w_cnt    <= '0;
        blk_base <= blk_base + n_word;
        i_cnt    <= i_cnt + 32'd1;
        if (i_cnt + 32'd1 == n_blk) run <= 1'b0;
      end else w_cnt <= w_cnt + 32'd1;
    end else begin
      ch_done <= ch_done | ch_ready;
    end
  end
  assign busy = run;

  for (genvar c = 0; c < int'(CH); c++) begin : g_ch
    sextans_rd_port #(.WIDTH(HBM_W)) u_port (
      .clk(clk), .rst_n(rst_n),
      .addr_valid(run && !ch_done[c]), .addr_ready(ch_ready[c]), .addr(blk_base + w_cnt),
      .req_valid(req_valid[c]), .req_ready(req_ready[c]), .req_addr(req_addr[c]),
      .resp_valid(resp_valid[c]), .resp_data(resp_data[c]),
      .out_valid(ch_valid[c]), .out_ready(ch_pop[c]), .out_data(out_data[c*HBM_W +: HBM_W]));
    assign ch_pop[c] = out_valid && out_ready;
  end
  assign out_valid = &ch_valid;
endmodule
