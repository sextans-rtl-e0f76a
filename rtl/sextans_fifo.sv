// sextans_fifo: synchronous valid/ready FIFO.
//
// Every double arrow between two streaming modules of the accelerator is one
// of these; the paper states a depth of 8, which bounds how far the PEGs of a
// broadcast chain may run ahead of one another (loose synchronisation).
// Storage is a register array with read and write pointers. in_ready is low
// when full; out_valid is high when not empty; a push and a pop may happen in
// the same cycle. Data appear at the output the cycle after the push.
// `count` gives the occupancy for producers that reserve space ahead.
module sextans_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  // A producer must not push into a full FIFO and a consumer must not pop an
  // empty one; with the valid/ready gating above this can only fail if the
  // gating is removed.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && !in_ready && push));
endmodule
