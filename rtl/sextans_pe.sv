// sextans_pe: one processing engine (PE) of the Sextans accelerator.
//
// A PE owns one bin p of the row space (rows with row mod P == p) and computes
// C_Apj,Bji = A_pj x B_ji one non-zero per cycle (II = 1), as in the paper:
//   (1) decode a-64b into a_col (14 b), a_row (18 b) and a_val (32 b);
//   (2) read the N0 = 8 values b_0..b_7 of row a_col from B Mem;
//   (3..6) PU q multiplies a_val by b_q and accumulates into its scratchpad
//   column at a_row.
// A slot whose a_col is all ones is a bubble left by the scheduler and does
// nothing. Non-zeros of one row must be D = ADD_LAT + 2 cycles apart (the
// scheduler's job); an assertion in each PU reports a violation.
// Interface: a_valid/a_data (one slot per cycle, no back-pressure), the B
// window write port, and clear/drain controls passed to all PUs; drain_data
// carries alpha*C for the N0 columns of row drain_addr two cycles after
// drain_en. A non-zero entering in cycle t is written to the scratchpad at
// the end of cycle t + ADD_LAT + 3.
module sextans_pe
  import sextans_pkg::*;
#(
  parameter int unsigned K0      = 4096,
  parameter int unsigned N0      = 8,
  parameter int unsigned C_DEPTH = 12288,
  parameter int unsigned ADD_LAT = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 a_valid,
  input  a64_t                                 a_data,
  input  logic                                 b_wr_en,
  input  logic [$clog2(K0/8)-1:0]               b_wr_addr,
  input  logic [7:0][N0-1:0][FP_W-1:0]          b_wr_data,
  input  logic                                 clr_en,
  input  logic [$clog2(C_DEPTH)-1:0]            clr_addr,
  input  logic                                 drain_en,
  input  logic [$clog2(C_DEPTH)-1:0]            drain_addr,
  input  fp32_t                                alpha,
  output logic                                 drain_valid,
  output logic [N0-1:0][FP_W-1:0]               drain_data,
  output logic                                 busy
);
  logic                     live, v0;
  logic [A_ROW_W-1:0]       row0;
  fp32_t                    val0;
  logic [N0-1:0][FP_W-1:0]  b_row;
  logic [N0-1:0]            pu_busy, pu_dv;

  // step 1: decode; bubbles are dropped here
  assign live = a_valid && (a_data.col != BUBBLE_COL);

  sextans_bmem #(.K0(K0), .N0(N0), .WR_ROWS(8)) u_bmem (
    .clk(clk), .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data),
    .rd_en(live), .rd_addr(a_data.col[$clog2(K0)-1:0]), .rd_data(b_row));

  // step 2: the B row arrives one cycle later; a_row and a_val wait with it
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= live;
  end
  always_ff @(posedge clk) begin
    row0 <= a_data.row;
    val0 <= a_data.val;
  end

  for (genvar q = 0; q < int'(N0); q++) begin : g_pu
    sextans_pu #(.C_DEPTH(C_DEPTH), .ADD_LAT(ADD_LAT)) u_pu (
      .clk(clk), .rst_n(rst_n),
      .in_valid(v0), .in_row(row0), .in_a(val0), .in_b(b_row[q]),
      .clr_en(clr_en), .clr_addr(clr_addr),
      .drain_en(drain_en), .drain_addr(drain_addr), .alpha(alpha),
      .drain_valid(pu_dv[q]), .drain_data(drain_data[q]), .busy(pu_busy[q]));
  end

  assign drain_valid = pu_dv[0];
  assign busy        = v0 | (|pu_busy);

  a_col_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    live |-> (32'(a_data.col) < K0));
  a_row_in_pad: assert property (@(posedge clk) disable iff (!rst_n)
    live |-> (32'(a_data.row) < C_DEPTH));
endmodule
