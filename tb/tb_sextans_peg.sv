// tb_sextans_peg: one PEG (8 PEs, P = 8, K0 = 32, two windows, the second
// partial, two column blocks) fed from stream queues with random gaps.
// Checks: the B and pointer words it relays come out unchanged and in order;
// the drained words equal alpha * A x B for every row of every PE (small
// integer values, so exact); the A words of a window are taken on
// consecutive cycles whenever they are present (II = 1); the window guard
// and the relay back-pressure both occur.
module tb_sextans_peg;
  import sextans_pkg::*;
  import sextans_tb_pkg::*;
  localparam int PES = 8, P = 8, K0 = 32, N0 = 8, C_DEPTH = 16, ADD_LAT = 2, D = ADD_LAT + 2;
  localparam int M = 120, K = K0 + 8, N = 16;
  localparam int NBLK = 2, NWIN = 2, KP = 40, NSL = (M + P - 1) / P;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic busy;
  logic b_in_valid, b_in_ready, b_out_valid, b_out_ready;
  logic [2047:0] b_in_data, b_out_data;
  logic ptr_in_valid, ptr_in_ready, ptr_out_valid, ptr_out_ready;
  logic [31:0] ptr_in_data, ptr_out_data;
  logic a_in_valid, a_in_ready;
  logic [511:0] a_in_data;
  logic c_out_valid, c_out_ready;
  logic [2047:0] c_out_data;

  sextans_peg #(.PES(PES), .P(P), .K0(K0), .N0(N0), .C_DEPTH(C_DEPTH), .ADD_LAT(ADD_LAT), .LAST(1'b0)) dut (.*);

  logic [2047:0] bq [$], bq_exp [$];
  logic [31:0]   pq [$], pq_exp [$];
  logic [511:0]  aq [$];
  int a_dense [M*K], b_val [K*N];
  int qptr [NWIN+1];
  a64_t sched [P][NWIN][$];
  int bv_pct = 70;

  assign b_in_valid  = bq.size() > 0 && rv_b;
  assign b_in_data   = bq.size() > 0 ? bq[0] : '0;
  assign ptr_in_valid = pq.size() > 0 && rv_p;
  assign ptr_in_data  = pq.size() > 0 ? pq[0] : '0;
  assign a_in_valid  = aq.size() > 0;
  assign a_in_data   = aq.size() > 0 ? aq[0] : '0;
  logic rv_b, rv_p;

  int n_guard = 0, n_relay_stall = 0, n_ii_break = 0, blk_seen = 0, slice = 0;
  always @(posedge clk) begin
    rv_b <= ($urandom % 100) < bv_pct;
    rv_p <= ($urandom % 100) < 80;
    b_out_ready   <= ($urandom % 100) < 60;
    ptr_out_ready <= ($urandom % 100) < 60;
    c_out_ready   <= ($urandom % 100) < 70;
    if (rst_n) begin
      if (b_in_valid && b_in_ready) void'(bq.pop_front());
      if (ptr_in_valid && ptr_in_ready) void'(pq.pop_front());
      if (a_in_valid && a_in_ready) void'(aq.pop_front());
      if (b_out_valid && b_out_ready) begin
        checks++;
        if (b_out_data !== bq_exp[0]) begin failures++; $display("FAIL relayed B word differs"); end
        void'(bq_exp.pop_front());
      end
      if (ptr_out_valid && ptr_out_ready) begin
        checks++;
        if (ptr_out_data !== pq_exp[0]) begin failures++; $display("FAIL relayed pointer %0d expected %0d", ptr_out_data, pq_exp[0]); end
        void'(pq_exp.pop_front());
      end
      if (dut.state == 4'd4 && b_in_valid && !b_out_ready) n_relay_stall++;
      if (dut.state == 4'd5 && a_in_valid && !a_in_ready && dut.cnt != 0) begin
        if (dut.win_started) n_ii_break++; else n_guard++;
      end
      if (c_out_valid && c_out_ready) begin
        for (int e = 0; e < PES; e++)
          for (int q = 0; q < N0; q++) begin
            int row, col;
            real acc;
            row = slice * P + e; col = blk_seen * N0 + q;
            acc = 0.0;
            if (row < M) for (int l = 0; l < K; l++) acc += real'(a_dense[row*K + l] * b_val[l*N + col]);
            checks++;
            if (c_out_data[(e*N0 + q)*32 +: 32] !== r2f(2.0 * acc)) begin
              failures++;
              if (failures < 10) $display("FAIL C[%0d][%0d] = %h expected %h", row, col, c_out_data[(e*N0 + q)*32 +: 32], r2f(2.0 * acc));
            end
          end
        slice++;
        if (slice == NSL) begin slice = 0; blk_seen++; end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < M*K; i++) a_dense[i] = ($urandom % 100 < 15) ? int'($urandom % 5) + 1 : 0;
    for (int i = 0; i < K*N; i++) b_val[i] = int'($urandom % 7) - 3;
    // schedule every PE's window (rows r with r mod P == p)
    qptr[0] = 0;
    for (int j = 0; j < NWIN; j++) begin
      int len_max;
      len_max = 0;
      for (int p = 0; p < P; p++) begin
        bit used [$];
        int last [int];
        a64_t e;
        used.delete(); last.delete();
        for (int l = 0; l < K0 && j*K0 + l < K; l++)
          for (int r = p; r < M; r += P)
            if (a_dense[r*K + j*K0 + l] != 0) begin
              int s;
              s = last.exists(r / P) ? last[r / P] + D : 0;
              while (s < used.size() && used[s]) s++;
              while (used.size() <= s) begin
                used.push_back(0); e.col = BUBBLE_COL; e.row = '0; e.val = '0; sched[p][j].push_back(e);
              end
              used[s] = 1;
              e.col = A_COL_W'(l); e.row = A_ROW_W'(r / P); e.val = int_fp(a_dense[r*K + j*K0 + l]);
              sched[p][j][s] = e; last[r / P] = s;
            end
        if (sched[p][j].size() > len_max) len_max = sched[p][j].size();
      end
      for (int p = 0; p < P; p++)
        while (sched[p][j].size() < len_max) begin
          a64_t e; e.col = BUBBLE_COL; e.row = '0; e.val = '0; sched[p][j].push_back(e);
        end
      qptr[j+1] = qptr[j] + len_max;
    end
    for (int i = 0; i < NBLK; i++) begin
      for (int j = 0; j <= NWIN; j++) begin pq.push_back(qptr[j]); pq_exp.push_back(qptr[j]); end
      for (int g = 0; g < KP/8; g++) begin
        logic [2047:0] w;
        for (int r = 0; r < 8; r++) for (int q = 0; q < N0; q++)
          w[(r*N0 + q)*32 +: 32] = (g*8 + r < K) ? int_fp(b_val[(g*8 + r)*N + i*N0 + q]) : 32'd0;
        bq.push_back(w); bq_exp.push_back(w);
      end
      for (int j = 0; j < NWIN; j++)
        for (int s = 0; s < qptr[j+1] - qptr[j]; s++) begin
          logic [511:0] w;
          for (int e = 0; e < PES; e++) w[e*64 +: 64] = sched[e][j][s];
          aq.push_back(w);
        end
    end
    cfg = '0; cfg.m = M; cfg.k = K; cfg.n = N; cfg.alpha = 32'h4000_0000; cfg.a_len = qptr[NWIN];
    bv_pct = 100;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (blk_seen < NBLK) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (busy || bq_exp.size() != 0 || pq_exp.size() != 0 || aq.size() != 0) begin
      failures++; $display("FAIL streams left over: busy=%b B=%0d ptr=%0d A=%0d", busy, bq_exp.size(), pq_exp.size(), aq.size());
    end
    checks++; if (n_ii_break != 0) begin failures++; $display("FAIL A words not taken back to back (%0d)", n_ii_break); end
    checks++; if (n_guard == 0) begin failures++; $display("FAIL window guard never held"); end
    checks++; if (n_relay_stall == 0) begin failures++; $display("FAIL relay never back-pressured"); end
    $display("guard=%0d relay_stall=%0d", n_guard, n_relay_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
