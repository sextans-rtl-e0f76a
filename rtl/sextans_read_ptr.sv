// sextans_read_ptr: Read Ptr module.
//
// Delivers the pointer list Q to the head of the pointer chain (PEG 0). Q has
// K/K0 + 1 entries of 32 bits; Q[0] = 0 and Q[j+1] - Q[j] is the number of A
// words (scheduled cycles) of window j, the loop count of a PE. Sixteen
// pointers share one 512-bit HBM word, entry e in bits 32e+31..32e. For every
// column block i the module reads the ceil((K/K0+1)/16) words again and
// emits the entries one per cycle. The paper gives the list and its meaning;
// packing and re-reading per block are this design's.
module sextans_read_ptr
  import sextans_pkg::*;
#(
  parameter int unsigned K0 = 4096,
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
  output logic [31:0]       out_data
);
  logic [31:0] n_blk, n_ptr, n_word;
  logic [31:0] ai, aw;            // address generator: block, word
  logic [31:0] ei, ej;            // emitter: block, entry
  logic        arun, erun, ag_ready;
  logic        w_valid, w_ready;
  logic [HBM_W-1:0] w_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {n_blk, n_ptr, n_word, ai, aw, ei, ej} <= '0;
      arun <= 1'b0; erun <= 1'b0;
    end else begin
      if (!arun && !erun && start) begin
        n_blk  <= ceil_shift(cfg.n, $clog2(N0));
        n_ptr  <= ceil_shift(cfg.k, $clog2(K0)) + 32'd1;
        n_word <= ceil_shift(ceil_shift(cfg.k, $clog2(K0)) + 32'd1, 4);
        {ai, aw, ei, ej} <= '0;
        arun <= (cfg.n != 0);
        erun <= (cfg.n != 0);
      end
      if (arun && ag_ready) begin
        if (aw + 32'd1 == n_word) begin
          aw <= '0; ai <= ai + 32'd1;
          if (ai + 32'd1 == n_blk) arun <= 1'b0;
        end else aw <= aw + 32'd1;
      end
      if (erun && out_valid && out_ready) begin
        if (ej + 32'd1 == n_ptr) begin
          ej <= '0; ei <= ei + 32'd1;
          if (ei + 32'd1 == n_blk) erun <= 1'b0;
        end else ej <= ej + 32'd1;
      end
    end
  end
  assign busy = arun | erun;

  sextans_rd_port #(.WIDTH(HBM_W), .DEPTH(4)) u_port (
    .clk(clk), .rst_n(rst_n),
    .addr_valid(arun), .addr_ready(ag_ready), .addr(cfg.ptr_base + aw),
    .req_valid(req_valid), .req_ready(req_ready), .req_addr(req_addr),
    .resp_valid(resp_valid), .resp_data(resp_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data));

  // unpack: pop the word after its last used entry
  assign out_valid = erun && w_valid;
  assign out_data  = w_data[ej[3:0]*32 +: 32];
  assign w_ready   = out_valid && out_ready && (ej[3:0] == 4'd15 || ej + 32'd1 == n_ptr);
endmodule
