// sextans_rd_port: one streaming read port onto one HBM channel.
//
// Helper of the Read A/B/C/Ptr modules. It takes word addresses from an
// address generator (addr_valid/addr_ready), issues them as read requests
// (req_valid/req_ready/req_addr) and collects the responses (resp_valid,
// resp_data, in request order, no back-pressure) in a FIFO of DEPTH words that
// feeds out_valid/out_ready/out_data. A request is only issued while the FIFO
// has a free place for it counting the requests still in flight, so the
// memory never has to wait for the reader. With the memory answering at full
// rate, one word per cycle streams through. The channel protocol is this
// design's choice; the paper only says each matrix is streamed sequentially.
module sextans_rd_port
  import sextans_pkg::*;
#(
  parameter int unsigned WIDTH = HBM_W,
  parameter int unsigned DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              addr_valid,
  output logic              addr_ready,
  input  logic [ADDR_W-1:0] addr,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  input  logic              resp_valid,
  input  logic [WIDTH-1:0]  resp_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WIDTH-1:0]  out_data
);
  localparam int unsigned CB = $clog2(DEPTH+1);
  logic [CB-1:0] outstanding, fcount;
  logic          credit, fin_ready;

  assign credit     = (32'(outstanding) + 32'(fcount) < 32'(DEPTH));
  assign req_valid  = addr_valid && credit;
  assign req_addr   = addr;
  assign addr_ready = req_ready && credit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else outstanding <= outstanding + CB'(req_valid && req_ready) - CB'(resp_valid);
  end

  sextans_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(resp_valid), .in_ready(fin_ready), .in_data(resp_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
    .count(fcount));

  a_resp_has_room: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> (fin_ready && outstanding != '0));
endmodule
