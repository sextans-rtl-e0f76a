// sextans_read_b: Read B module.
//
// Streams B into the head of the B broadcast chain, one window B_ji at a
// time (Algorithm 1 line 4), so that B is only ever read sequentially from
// HBM. B is stored per column block i as ceil(K/8)*8 rows of N0 = 8 FP32
// values (rows past K are padding). The paper gives B four HBM channels and
// a fill rate of 2*F_B = 8 rows per cycle; accordingly each output word joins
// one 512-bit word (2 rows) from each of the 4 channels: channel c holds rows
// 8g+2c and 8g+2c+1 at word address b_base + i*ceil(K/8) + g. Windows follow
// one another in that order, so the module reads words 0..ceil(K/8)-1 per
// block and the PEGs cut them into windows of K0/8 words.
// Output word: row r of the 8-row group in bits 256r+255..256r.
module sextans_read_b
  import sextans_pkg::*;
#(
  parameter int unsigned N0 = 8,
  parameter int unsigned CH = 4
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
  logic        run;
  logic [CH-1:0] ch_done, ch_ready, ch_valid, ch_pop;

  // all channels must take the current address before the generator moves on
  logic step;
  assign step = run && ((ch_done | ch_ready) == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {n_blk, n_word, i_cnt, w_cnt, blk_base} <= '0;
      run <= 1'b0; ch_done <= '0;
    end else if (!run) begin
      if (start) begin
        n_blk    <= ceil_shift(cfg.n, $clog2(N0));
        n_word   <= ceil_shift(cfg.k, 3);
        {i_cnt, w_cnt} <= '0;
        blk_base <= cfg.b_base;
        ch_done  <= '0;
        run      <= (cfg.n != 0) && (cfg.k != 0);
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
