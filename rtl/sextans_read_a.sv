// sextans_read_a: Read A module, one per PEG.
//
// Streams the scheduled non-zero list of its PEG from its own HBM channel
// into the PEG's A FIFO. The list of every window j of every PE of the PEG is
// stored back to back; one 512-bit word holds the 8 slots (one per PE) of one
// scheduled cycle, and Q[j]..Q[j+1]-1 are the words of window j. Because the
// whole list is used again for every column block i, the module simply reads
// words a_base .. a_base + a_len - 1, ceil(N/N0) times over (a_len = Q[K/K0]).
// The paper names the module and says A is streamed; the address order and
// the a_len scalar are this design's.
module sextans_read_a
  import sextans_pkg::*;
#(
  parameter int unsigned N0 = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfg_t              cfg,
  output logic              busy,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  input  logic              resp_valid,
  input  logic [HBM_W-1:0]  resp_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [HBM_W-1:0]  out_data
);
  logic [31:0] i_cnt, r_cnt, n_blk;
  logic        run, ag_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; i_cnt <= '0; r_cnt <= '0; n_blk <= '0;
    end else if (!run) begin
      if (start) begin
        n_blk <= ceil_shift(cfg.n, $clog2(N0));
        i_cnt <= '0; r_cnt <= '0;
        run   <= (cfg.a_len != 0) && (cfg.n != 0);
      end
    end else if (ag_ready) begin
      if (r_cnt + 32'd1 == cfg.a_len) begin
        r_cnt <= '0;
        i_cnt <= i_cnt + 32'd1;
        if (i_cnt + 32'd1 == n_blk) run <= 1'b0;
      end else r_cnt <= r_cnt + 32'd1;
    end
  end
  assign busy = run;

  sextans_rd_port #(.WIDTH(HBM_W)) u_port (
    .clk(clk), .rst_n(rst_n),
    .addr_valid(run), .addr_ready(ag_ready), .addr(cfg.a_base + r_cnt),
    .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_data(resp_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));
endmodule
