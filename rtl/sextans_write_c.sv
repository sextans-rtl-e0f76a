// sextans_write_c: Write C module.
//
// Streams C_out back to HBM over CH = 8 channels, in the layout Read C uses
// for C_in: a beat of 16 rows is split into 8 channel words of 2 rows each,
// written at c_out_base + i*(Mp/16) + g on every channel (Mp = ceil(M/P)*P).
// Each channel has its own wr_valid/wr_ready; a channel that has accepted its
// word drops wr_valid until the others have too, then the next beat is taken.
// done pulses for one cycle when the last beat of the last column block has
// been accepted: that is the end of the whole SpMM. The paper names the module
// and its channel count; the write protocol is this design's.
module sextans_write_c
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
  output logic                      done,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [CH*HBM_W-1:0]       in_data,
  output logic [CH-1:0]             wr_valid,
  input  logic [CH-1:0]             wr_ready,
  output logic [CH-1:0][ADDR_W-1:0] wr_addr,
  output logic [CH-1:0][HBM_W-1:0]  wr_data
);
  logic [31:0]   n_blk, n_word, i_cnt, w_cnt, blk_base;
  logic          run;
  logic [CH-1:0] ch_done;

  assign in_ready = run && in_valid && ((ch_done | wr_ready) == '1);
  for (genvar c = 0; c < int'(CH); c++) begin : g_ch
    assign wr_valid[c] = run && in_valid && !ch_done[c];
    assign wr_addr[c]  = blk_base + w_cnt;
    assign wr_data[c]  = in_data[c*HBM_W +: HBM_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {n_blk, n_word, i_cnt, w_cnt, blk_base} <= '0;
      run <= 1'b0; ch_done <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          n_blk    <= ceil_shift(cfg.n, $clog2(N0));
          n_word   <= ceil_shift(cfg.m, $clog2(P)) << ($clog2(P) - $clog2(2*CH));
          {i_cnt, w_cnt} <= '0;
          blk_base <= cfg.c_out_base;
          ch_done  <= '0;
          run      <= (cfg.n != 0) && (cfg.m != 0);
          done     <= (cfg.n == 0) || (cfg.m == 0);
        end
      end else if (in_ready) begin
        ch_done <= '0;
        if (w_cnt + 32'd1 == n_word) begin
          w_cnt    <= '0;
          blk_base <= blk_base + n_word;
          i_cnt    <= i_cnt + 32'd1;
          if (i_cnt + 32'd1 == n_blk) begin run <= 1'b0; done <= 1'b1; end
        end else w_cnt <= w_cnt + 32'd1;
      end else begin
        ch_done <= ch_done | (wr_valid & wr_ready);
      end
    end
  end
  assign busy = run;
endmodule
