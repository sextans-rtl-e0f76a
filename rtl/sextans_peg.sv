// sextans_peg: a processing-engine group (PEG) of the Sextans accelerator.
//
// A PEG holds PES = 8 PEs that run in lock step under one controller, and it is
// a relay node of two broadcast chains: every B word and every pointer it
// takes from its upstream FIFO is passed on to the next PEG (the last PEG of
// the chain, LAST = 1, passes nothing on). The controller walks Algorithm 1 of
// the paper for its PEs:
//   for each column block i (N/N0 times):
//     CLEAR  write zero to scratchpad rows 0 .. ceil(M/P)-1      (line 2)
//     PTR0   take Q[0]
//     for each window j (K/K0 times):
//       PTR    take Q[j+1]
//       LOADB  take the window B_ji, 8 rows per word, into every PE's B Mem (line 4)
//       COMP   take Q[j+1]-Q[j] A words, one per cycle, lane e to PE e (lines 6-10)
//     FLUSH  wait until the PE pipelines are empty
//     DRAIN  stream alpha*C out, one scratchpad row (all PEs, all N0 columns)
//            per word, through a local FIFO to Collect C                (step 7)
// Between windows the first A word of window j+1 is held back until D =
// ADD_LAT + 2 cycles after the last one of window j, because the scheduler
// only guarantees the RAW distance inside a window (this design's rule).
// The paper gives the order of the steps; the FSM, the lock step within a
// PEG and the window guard are this design's choices. Each A word holds the
// PES slots of one scheduled cycle, lane e in bits 64e+63..64e.
module sextans_peg
  import sextans_pkg::*;
#(
  parameter int unsigned PES     = 8,
  parameter int unsigned P       = 64,
  parameter int unsigned K0      = 4096,
  parameter int unsigned N0      = 8,
  parameter int unsigned C_DEPTH = 12288,
  parameter int unsigned ADD_LAT = 2,
  parameter bit          LAST    = 1'b0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  cfg_t                              cfg,
  output logic                              busy,
  // B broadcast chain
  input  logic                              b_in_valid,
  output logic                              b_in_ready,
  input  logic [8*N0*FP_W-1:0]              b_in_data,
  output logic                              b_out_valid,
  input  logic                              b_out_ready,
  output logic [8*N0*FP_W-1:0]              b_out_data,
  // pointer broadcast chain
  input  logic                              ptr_in_valid,
  output logic                              ptr_in_ready,
  input  logic [31:0]                       ptr_in_data,
  output logic                              ptr_out_valid,
  input  logic                              ptr_out_ready,
  output logic [31:0]                       ptr_out_data,
  // scheduled non-zeros from this PEG's Read A
  input  logic                              a_in_valid,
  output logic                              a_in_ready,
  input  logic [PES*A_W-1:0]                a_in_data,
  // alpha * C_AB to Collect C
  output logic                              c_out_valid,
  input  logic                              c_out_ready,
  output logic [PES*N0*FP_W-1:0]            c_out_data
);
  localparam int unsigned CW = $clog2(C_DEPTH);
  localparam int unsigned D  = ADD_LAT + 2;
  localparam int unsigned KB = $clog2(K0);
  localparam int unsigned PB = $clog2(P);
  localparam int unsigned NB = $clog2(N0);

  typedef enum logic [3:0] {S_IDLE, S_CLEAR, S_PTR0, S_PTR, S_LOADB, S_COMP, S_FLUSH, S_DRAIN} state_t;
  state_t state;

  logic [31:0] n_blk, n_win, n_slice, k_pad;     // derived sizes
  logic [31:0] i_cnt, j_cnt, cnt, w_len, q_prev, q_next;
  logic [31:0] gap;
  logic        win_started;
  logic [1:0]  inflight;
  logic [3:0]  fifo_cnt;
  logic        fifo_in_ready;

  logic                          a_fire, b_fire, p_fire, drain_go;
  logic [PES-1:0]                pe_busy, pe_dv;
  logic [PES-1:0][N0*FP_W-1:0]   pe_dd;
  logic [31:0]                   rows_left;

  // ---- chain relays ---------------------------------------------------
  assign b_in_ready    = (state == S_LOADB) && (LAST || b_out_ready);
  assign b_out_valid   = !LAST && (state == S_LOADB) && b_in_valid;
  assign b_out_data    = b_in_data;
  assign b_fire        = b_in_valid && b_in_ready;

  assign ptr_in_ready  = (state == S_PTR0 || state == S_PTR) && (LAST || ptr_out_ready);
  assign ptr_out_valid = !LAST && (state == S_PTR0 || state == S_PTR) && ptr_in_valid;
  assign ptr_out_data  = ptr_in_data;
  assign p_fire        = ptr_in_valid && ptr_in_ready;

  assign a_in_ready    = (state == S_COMP) && (cnt != 32'd0) && (win_started || gap >= 32'(D));
  assign a_fire        = a_in_valid && a_in_ready;

  assign drain_go      = (state == S_DRAIN) && (cnt < n_slice) &&
                         (32'(fifo_cnt) + 32'(inflight) < 32'(FIFO_D));
  assign rows_left     = k_pad - (j_cnt << KB);
  assign busy          = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {n_blk, n_win, n_slice, k_pad, i_cnt, j_cnt, cnt, w_len, q_prev, q_next} <= '0;
      gap <= 32'hFFFF; win_started <= 1'b0; inflight <= '0;
    end else begin
      if (a_fire)                 gap <= 32'd1;
      else if (gap != 32'hFFFF)   gap <= gap + 32'd1;
      inflight <= inflight + 2'(drain_go) - 2'(pe_dv[0]);
      unique case (state)
        S_IDLE: if (start) begin
          n_blk   <= ceil_shift(cfg.n, NB);
          n_win   <= ceil_shift(cfg.k, KB);
          n_slice <= ceil_shift(cfg.m, PB);
          k_pad   <= ceil_shift(cfg.k, 3) << 3;
          i_cnt   <= '0;
          cnt     <= '0;
          state   <= S_CLEAR;
        end
        S_CLEAR: begin
          if (cnt + 32'd1 >= n_slice) begin cnt <= '0; state <= S_PTR0; end
          else cnt <= cnt + 32'd1;
        end
        S_PTR0: if (p_fire) begin
          q_prev <= ptr_in_data; j_cnt <= '0; state <= S_PTR;
        end
        S_PTR: if (p_fire) begin
          q_next <= ptr_in_data;
          w_len  <= ((rows_left > 32'(K0)) ? 32'(K0) : rows_left) >> 3;
          cnt    <= '0;
          state  <= S_LOADB;
        end
        S_LOADB: if (b_fire) begin
          if (cnt + 32'd1 == w_len) begin
            cnt <= q_next - q_prev; win_started <= 1'b0; state <= S_COMP;
          end else cnt <= cnt + 32'd1;
        end
        S_COMP: begin
          if (a_fire) begin cnt <= cnt - 32'd1; win_started <= 1'b1; end
          if (cnt == 32'd0 || (a_fire && cnt == 32'd1)) begin
            q_prev <= q_next;
            j_cnt  <= j_cnt + 32'd1;
            state  <= (j_cnt + 32'd1 == n_win) ? S_FLUSH : S_PTR;
          end
        end
        S_FLUSH: if (pe_busy == '0 && !a_fire) begin cnt <= '0; state <= S_DRAIN; end
        S_DRAIN: begin
          if (drain_go) cnt <= cnt + 32'd1;
          if (cnt == n_slice && inflight == 2'd0) begin
            cnt <= '0;
            i_cnt <= i_cnt + 32'd1;
            state <= (i_cnt + 32'd1 == n_blk) ? S_IDLE : S_CLEAR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  for (genvar e = 0; e < int'(PES); e++) begin : g_pe
    sextans_pe #(.K0(K0), .N0(N0), .C_DEPTH(C_DEPTH), .ADD_LAT(ADD_LAT)) u_pe (
      .clk(clk), .rst_n(rst_n),
      .a_valid(a_fire), .a_data(a_in_data[e*A_W +: A_W]),
      .b_wr_en(b_fire), .b_wr_addr(cnt[$clog2(K0/8)-1:0]), .b_wr_data(b_in_data),
      .clr_en(state == S_CLEAR), .clr_addr(cnt[CW-1:0]),
      .drain_en(drain_go), .drain_addr(cnt[CW-1:0]), .alpha(cfg.alpha),
      .drain_valid(pe_dv[e]), .drain_data(pe_dd[e]), .busy(pe_busy[e]));
  end

  sextans_fifo #(.WIDTH(PES*N0*FP_W), .DEPTH(FIFO_D)) u_cfifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(pe_dv[0]), .in_ready(fifo_in_ready), .in_data(pe_dd),
    .out_valid(c_out_valid), .out_ready(c_out_ready), .out_data(c_out_data),
    .count(fifo_cnt));

  a_slices_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_CLEAR) |-> (n_slice <= 32'(C_DEPTH)));
  a_drain_space: assert property (@(posedge clk) disable iff (!rst_n)
    pe_dv[0] |-> fifo_in_ready);
endmodule
