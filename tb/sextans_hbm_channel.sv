// sextans_hbm_channel: behavioural model of one HBM pseudo channel.
//
// Not synthesizable; testbench use only. A sparse word memory (associative
// array of 512-bit words, unwritten words read as zero) behind the accelerator's
// channel protocol: read requests are taken when req_valid and req_ready are
// high and answered in order LAT cycles later on resp_valid/resp_data; writes
// are taken when wr_valid and wr_ready are high. req_ready and wr_ready drop
// at random STALL_PCT percent of the cycles to exercise back-pressure.
// pl_en/pl_addr/pl_data preload a word; rb_addr/rb_data read one back.
module sextans_hbm_channel #(
  parameter int unsigned W         = 512,
  parameter int unsigned LAT       = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [31:0]   req_addr,
  output logic          resp_valid,
  output logic [W-1:0]  resp_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [31:0]   wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          pl_en,
  input  logic [31:0]   pl_addr,
  input  logic [W-1:0]  pl_data,
  input  logic [31:0]   rb_addr,
  output logic [W-1:0]  rb_data
);
  logic [W-1:0] mem [int unsigned];
  logic [W-1:0] q_data [$];
  longint       q_due  [$];
  longint       cyc = 0;
  int unsigned  writes = 0;

  always_comb rb_data = mem.exists(rb_addr) ? mem[rb_addr] : '0;

  initial begin
    req_ready = 1'b0; wr_ready = 1'b0; resp_valid = 1'b0; resp_data = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (pl_en) mem[pl_addr] = pl_data;
    if (req_valid && req_ready) begin
      q_data.push_back(mem.exists(req_addr) ? mem[req_addr] : '0);
      q_due.push_back(cyc + longint'(LAT));
    end
    if (wr_valid && wr_ready) begin
      mem[wr_addr] = wr_data;
      writes++;
    end
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      resp_valid <= 1'b1;
      resp_data  <= q_data.pop_front();
      void'(q_due.pop_front());
    end else begin
      resp_valid <= 1'b0;
    end
    req_ready <= ($urandom % 100) >= STALL_PCT;
    wr_ready  <= ($urandom % 100) >= STALL_PCT;
  end
endmodule
