// sextans_top: the Sextans streaming SpMM accelerator, C = alpha*A*B + beta*C.
//
// Structure (the paper's overall architecture):
//   Read Ptr  --FIFO--> PEG 0 --FIFO--> PEG 1 ... PEG 7   pointer chain (Q)
//   Read B    --FIFO--> PEG 0 --FIFO--> PEG 1 ... PEG 7   B window chain
//   Read A g  -------->  PEG g                            one A channel per PEG
//   PEG 0..7  --> Collect C --> Comp C <--FIFO-- Read C
//                                 Comp C --FIFO--> Write C
// 8 PEGs of 8 PEs (P = 64) each with N0 = 8 PUs compute C_AB block by block
// (N0 columns at a time, K0 rows of B per window), the PEs scale by alpha as
// they drain, Collect C restores row order, Comp C adds beta*C_in and Write C
// stores C_out. Every module runs its own copy of the loop nest of the
// paper's Algorithm 1 from the same scalars, and the FIFOs (depth 8) keep
// them loosely in step; there is no central sequencer, which is how the
// paper's dataflow design works.
//
// Host interface: cfg (M, K, N, alpha, beta, length of the scheduled A lists,
// base word addresses) is sampled on start; done pulses when the last C_out
// word is accepted. Memory: 1 pointer channel, PEGS A channels, 4 B channels,
// 8 C_in read channels and 8 C_out write channels, as assigned in the paper,
// each 512 bits wide. A read channel takes req_addr when req_valid and
// req_ready are high and later returns resp_data with resp_valid, in order;
// a write channel takes wr_addr/wr_data when wr_valid and wr_ready are high.
// Data layouts are described in the reader modules.
module sextans_top
  import sextans_pkg::*;
#(
  parameter int unsigned PEGS    = 8,
  parameter int unsigned PES     = 8,
  parameter int unsigned N0      = 8,
  parameter int unsigned K0      = 4096,
  parameter int unsigned C_DEPTH = 12288,
  parameter int unsigned ADD_LAT = 2,
  parameter int unsigned B_CH    = 4,
  parameter int unsigned C_CH    = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  cfg_t                          cfg,
  output logic                          busy,
  output logic                          done,
  // pointer list Q
  output logic                          ptr_req_valid,
  input  logic                          ptr_req_ready,
  output logic [ADDR_W-1:0]             ptr_req_addr,
  input  logic                          ptr_resp_valid,
  input  logic [HBM_W-1:0]              ptr_resp_data,
  // A, one channel per PEG
  output logic [PEGS-1:0]               a_req_valid,
  input  logic [PEGS-1:0]               a_req_ready,
  output logic [PEGS-1:0][ADDR_W-1:0]   a_req_addr,
  input  logic [PEGS-1:0]               a_resp_valid,
  input  logic [PEGS-1:0][HBM_W-1:0]    a_resp_data,
  // B
  output logic [B_CH-1:0]               b_req_valid,
  input  logic [B_CH-1:0]               b_req_ready,
  output logic [B_CH-1:0][ADDR_W-1:0]   b_req_addr,
  input  logic [B_CH-1:0]               b_resp_valid,
  input  logic [B_CH-1:0][HBM_W-1:0]    b_resp_data,
  // C_in
  output logic [C_CH-1:0]               cin_req_valid,
  input  logic [C_CH-1:0]               cin_req_ready,
  output logic [C_CH-1:0][ADDR_W-1:0]   cin_req_addr,
  input  logic [C_CH-1:0]               cin_resp_valid,
  input  logic [C_CH-1:0][HBM_W-1:0]    cin_resp_data,
  // C_out
  output logic [C_CH-1:0]               cout_wr_valid,
  input  logic [C_CH-1:0]               cout_wr_ready,
  output logic [C_CH-1:0][ADDR_W-1:0]   cout_wr_addr,
  output logic [C_CH-1:0][HBM_W-1:0]    cout_wr_data
);
  localparam int unsigned P    = PEGS * PES;
  localparam int unsigned BW   = 8 * N0 * FP_W;      // one B chain word: 8 rows
  localparam int unsigned CPW  = PES * N0 * FP_W;    // one PEG drain word
  localparam int unsigned ROWS = C_CH * HBM_W / (N0 * FP_W);  // F_C rows per beat

  cfg_t cfg_q;
  logic start_q, run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0; start_q <= 1'b0; run <= 1'b0;
    end else begin
      start_q <= start && !run;
      if (start && !run) begin cfg_q <= cfg; run <= 1'b1; end
      else if (done)     run <= 1'b0;
    end
  end

  // ---- Read Ptr and pointer chain ------------------------------------------
  logic              rp_valid, rp_ready;
  logic [31:0]       rp_data;
  logic [PEGS-1:0]   pc_valid, pc_ready;      // FIFO outputs into PEG g
  logic [PEGS-1:0][31:0] pc_data;
  logic [PEGS-1:0]   po_valid, po_ready;      // PEG g outputs into FIFO g+1
  logic [PEGS-1:0][31:0] po_data;
  logic [PEGS:0]     busy_v;
  logic              busy_w;
  logic [PEGS-1:0]   bo_ready_sel, po_ready_sel;  // ready of the FIFO in front of PEG g

  sextans_read_ptr #(.K0(K0), .N0(N0)) u_read_ptr (
    .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(busy_v[PEGS]),
    .req_valid(ptr_req_valid), .req_ready(ptr_req_ready), .req_addr(ptr_req_addr),
    .resp_valid(ptr_resp_valid), .resp_data(ptr_resp_data),
    .out_valid(rp_valid), .out_ready(rp_ready), .out_data(rp_data));

  // ---- Read B and B chain ----------------------------------------------------
  logic              rb_valid, rb_ready;
  logic [BW-1:0]     rb_data;
  logic [PEGS-1:0]   bc_valid, bc_ready;
  logic [PEGS-1:0][BW-1:0] bc_data;
  logic [PEGS-1:0]   bo_valid, bo_ready;
  logic [PEGS-1:0][BW-1:0] bo_data;
  logic              unused_busy_b;

  sextans_read_b #(.N0(N0), .CH(B_CH)) u_read_b (
    .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(unused_busy_b),
    .req_valid(b_req_valid), .req_ready(b_req_ready), .req_addr(b_req_addr),
    .resp_valid(b_resp_valid), .resp_data(b_resp_data),
    .out_valid(rb_valid), .out_ready(rb_ready), .out_data(rb_data));

  // ---- PEGs -------------------------------------------------------------------
  logic [PEGS-1:0]                 ra_valid, ra_ready;
  logic [PEGS-1:0][HBM_W-1:0]      ra_data;
  logic [PEGS-1:0]                 cc_valid, cc_ready;
  logic [PEGS-1:0][CPW-1:0]        cc_data;
  logic [PEGS-1:0]                 unused_busy_a;

  for (genvar g = 0; g < int'(PEGS); g++) begin : g_peg
    // chain FIFOs feeding PEG g
    sextans_fifo #(.WIDTH(BW), .DEPTH(FIFO_D)) u_bfifo (
      .clk(clk), .rst_n(rst_n),
      .in_valid(g == 0 ? rb_valid : bo_valid[(g == 0) ? 0 : g-1]),
      .in_ready(bo_ready_sel[g]),
      .in_data (g == 0 ? rb_data  : bo_data[(g == 0) ? 0 : g-1]),
      .out_valid(bc_valid[g]), .out_ready(bc_ready[g]), .out_data(bc_data[g]),
      .count());
    sextans_fifo #(.WIDTH(32), .DEPTH(FIFO_D)) u_pfifo (
      .clk(clk), .rst_n(rst_n),
      .in_valid(g == 0 ? rp_valid : po_valid[(g == 0) ? 0 : g-1]),
      .in_ready(po_ready_sel[g]),
      .in_data (g == 0 ? rp_data  : po_data[(g == 0) ? 0 : g-1]),
      .out_valid(pc_valid[g]), .out_ready(pc_ready[g]), .out_data(pc_data[g]),
      .count());

    sextans_read_a #(.N0(N0)) u_read_a (
      .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(unused_busy_a[g]),
      .req_valid(a_req_valid[g]), .req_ready(a_req_ready[g]), .req_addr(a_req_addr[g]),
      .resp_valid(a_resp_valid[g]), .resp_data(a_resp_data[g]),
      .out_valid(ra_valid[g]), .out_ready(ra_ready[g]), .out_data(ra_data[g]));

    sextans_peg #(.PES(PES), .P(P), .K0(K0), .N0(N0), .C_DEPTH(C_DEPTH),
                  .ADD_LAT(ADD_LAT), .LAST(g == int'(PEGS) - 1)) u_peg (
      .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(busy_v[g]),
      .b_in_valid(bc_valid[g]), .b_in_ready(bc_ready[g]), .b_in_data(bc_data[g]),
      .b_out_valid(bo_valid[g]), .b_out_ready(bo_ready[g]), .b_out_data(bo_data[g]),
      .ptr_in_valid(pc_valid[g]), .ptr_in_ready(pc_ready[g]), .ptr_in_data(pc_data[g]),
      .ptr_out_valid(po_valid[g]), .ptr_out_ready(po_ready[g]), .ptr_out_data(po_data[g]),
      .a_in_valid(ra_valid[g]), .a_in_ready(ra_ready[g]), .a_in_data(ra_data[g]),
      .c_out_valid(cc_valid[g]), .c_out_ready(cc_ready[g]), .c_out_data(cc_data[g]));
  end

  // ready of the FIFO in front of PEG g goes back to its producer
  assign rb_ready = bo_ready_sel[0];
  assign rp_ready = po_ready_sel[0];
  for (genvar g = 0; g < int'(PEGS); g++) begin : g_rdy
    if (g < int'(PEGS) - 1) begin : g_mid
      assign bo_ready[g] = bo_ready_sel[g+1];
      assign po_ready[g] = po_ready_sel[g+1];
    end else begin : g_last
      assign bo_ready[g] = 1'b1;
      assign po_ready[g] = 1'b1;
    end
  end

  // ---- Collect C, Read C, Comp C, Write C --------------------------------------
  logic                      col_valid, col_ready;
  logic [ROWS*N0*FP_W-1:0]   col_data;
  logic                      rc_valid, rc_ready, rcf_valid, rcf_ready;
  logic [C_CH*HBM_W-1:0]     rc_data, rcf_data;
  logic                      cp_valid, cp_ready, wf_valid, wf_ready;
  logic [C_CH*HBM_W-1:0]     cp_data, wf_data;
  logic                      unused_busy_c;

  sextans_collect_c #(.PEGS(PEGS), .PES(PES), .N0(N0), .ROWS(ROWS)) u_collect_c (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cc_valid), .in_ready(cc_ready), .in_data(cc_data),
    .out_valid(col_valid), .out_ready(col_ready), .out_data(col_data));

  sextans_read_c #(.N0(N0), .P(P), .CH(C_CH)) u_read_c (
    .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(unused_busy_c),
    .req_valid(cin_req_valid), .req_ready(cin_req_ready), .req_addr(cin_req_addr),
    .resp_valid(cin_resp_valid), .resp_data(cin_resp_data),
    .out_valid(rc_valid), .out_ready(rc_ready), .out_data(rc_data));

  sextans_fifo #(.WIDTH(C_CH*HBM_W), .DEPTH(FIFO_D)) u_cin_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rc_valid), .in_ready(rc_ready), .in_data(rc_data),
    .out_valid(rcf_valid), .out_ready(rcf_ready), .out_data(rcf_data), .count());

  sextans_comp_c #(.LANES(ROWS*N0)) u_comp_c (
    .clk(clk), .rst_n(rst_n), .beta(cfg_q.beta),
    .ab_valid(col_valid), .ab_ready(col_ready), .ab_data(col_data),
    .cin_valid(rcf_valid), .cin_ready(rcf_ready), .cin_data(rcf_data),
    .out_valid(cp_valid), .out_ready(cp_ready), .out_data(cp_data));

  sextans_fifo #(.WIDTH(C_CH*HBM_W), .DEPTH(FIFO_D)) u_cout_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cp_valid), .in_ready(cp_ready), .in_data(cp_data),
    .out_valid(wf_valid), .out_ready(wf_ready), .out_data(wf_data), .count());

  sextans_write_c #(.N0(N0), .P(P), .CH(C_CH)) u_write_c (
    .clk(clk), .rst_n(rst_n), .start(start_q), .cfg(cfg_q), .busy(busy_w), .done(done),
    .in_valid(wf_valid), .in_ready(wf_ready), .in_data(wf_data),
    .wr_valid(cout_wr_valid), .wr_ready(cout_wr_ready), .wr_addr(cout_wr_addr),
    .wr_data(cout_wr_data));

  assign busy = run | (|busy_v) | busy_w;

  initial assert (ROWS * N0 * FP_W == C_CH * HBM_W && 8 * N0 * FP_W == B_CH * HBM_W && PES * A_W == HBM_W)
    else $error("sextans_top: channel widths do not match N0/PES");
endmodule
