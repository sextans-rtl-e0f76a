// sextans_pu: one processing unit (PU) of a PE, with its C scratchpad column.
//
// A PE holds N0 = 8 PUs, one per column q of the current N0-wide block of C.
// Per non-zero a_kl the PU computes c_kq += a_kl * b_lq, exactly the steps of
// the paper's PU figure: (3) multiply a_val by b_q, (4) read c_kq from the
// scratchpad at a_row, (5) add, (6) write the sum back. Step (7), used when the
// block is finished, reads the scratchpad out and multiplies it by alpha.
//
// Pipeline (this design's choice of stage counts):
//   cycle t      in_valid, in_row, in_a, in_b      (PE stage after B Mem)
//   t+1          product registered, scratchpad read issued at in_row
//   t+2          c_kq available, adder starts
//   t+1+ADD_LAT  sum leaves the ADD_LAT adder registers
//   t+2+ADD_LAT  sum written to the scratchpad (visible to reads a cycle later)
// A later non-zero of the same row must therefore enter at least
// D = ADD_LAT + 2 cycles after the earlier one; the host-side scheduler
// guarantees it (no forwarding, as in the paper). With ADD_LAT = 2, D = 4,
// the distance of the paper's scheduling example.
//
// clr_en writes zero at clr_addr (C initialisation, Algorithm 1 line 2).
// drain_en reads drain_addr; two cycles later drain_valid/drain_data carry
// alpha * C[drain_addr]. The owner must not overlap compute with clear/drain.
module sextans_pu
  import sextans_pkg::*;
#(
  parameter int unsigned C_DEPTH = 12288,
  parameter int unsigned ADD_LAT = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [A_ROW_W-1:0]         in_row,
  input  fp32_t                      in_a,
  input  fp32_t                      in_b,
  input  logic                       clr_en,
  input  logic [$clog2(C_DEPTH)-1:0] clr_addr,
  input  logic                       drain_en,
  input  logic [$clog2(C_DEPTH)-1:0] drain_addr,
  input  fp32_t                      alpha,
  output logic                       drain_valid,
  output fp32_t                      drain_data,
  output logic                       busy
);
  localparam int unsigned CW = $clog2(C_DEPTH);

  fp32_t          cmem [C_DEPTH];
  fp32_t          prod_c, prod_q, c_rd, sum_c, scaled_c;
  logic           v1, v2, dr1;
  logic [CW-1:0]  row1, row2;
  fp32_t          prod2;
  logic           vq   [ADD_LAT];
  logic [CW-1:0]  rowq [ADD_LAT];
  fp32_t          sumq [ADD_LAT];
  logic           rd_en;
  logic [CW-1:0]  rd_addr;

  sextans_fp32_mul u_mul   (.a(in_a),  .b(in_b),  .p(prod_c));
  sextans_fp32_add u_add   (.a(c_rd),  .b(prod2), .s(sum_c));
  sextans_fp32_mul u_alpha (.a(alpha), .b(c_rd),  .p(scaled_c));

  assign rd_en   = v1 | drain_en;
  assign rd_addr = v1 ? row1 : drain_addr;

  // stage t+1: product, scratchpad read
  always_ff @(posedge clk) begin
    prod_q <= prod_c;
    row1   <= CW'(in_row);
    if (rd_en) c_rd <= cmem[rd_addr];
    prod2  <= prod_q;
    row2   <= row1;
  end

  // adder pipeline and write-back (the write port is shared with clear)
  always_ff @(posedge clk) begin
    sumq[0] <= sum_c;
    rowq[0] <= row2;
    for (int i = 1; i < int'(ADD_LAT); i++) begin
      sumq[i] <= sumq[i-1];
      rowq[i] <= rowq[i-1];
    end
    if (vq[ADD_LAT-1])  cmem[rowq[ADD_LAT-1]] <= sumq[ADD_LAT-1];
    else if (clr_en)    cmem[clr_addr]        <= '0;
    drain_data <= scaled_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; dr1 <= 1'b0; drain_valid <= 1'b0;
      for (int i = 0; i < int'(ADD_LAT); i++) vq[i] <= 1'b0;
    end else begin
      v1  <= in_valid;
      v2  <= v1;
      vq[0] <= v2;
      for (int i = 1; i < int'(ADD_LAT); i++) vq[i] <= vq[i-1];
      dr1 <= drain_en & ~v1;
      drain_valid <= dr1;
    end
  end

  always_comb begin
    busy = v1 | v2;
    for (int i = 0; i < int'(ADD_LAT); i++) busy = busy | vq[i];
  end

  // The read for a new non-zero must not see a row whose update is in flight.
  logic hazard;
  always_comb begin
    hazard = v2 && (row2 == row1);
    for (int i = 0; i < int'(ADD_LAT); i++) hazard = hazard | (vq[i] && rowq[i] == row1);
    hazard = hazard && v1;
  end
  a_no_raw: assert property (@(posedge clk) disable iff (!rst_n) !hazard)
    else $error("PU RAW hazard: row %0d re-read before its write-back", row1);
endmodule
