// tb_sextans_top_full: end-to-end test, at the default (paper) sizes, of the Sextans accelerator.
//
// Builds a random sparse A, dense B and C_in, runs the host-side preprocessing
// (row binning mod P, window split by K0, index compression, out-of-order
// non-zero scheduling with RAW distance D, padding of every window to the
// longest PE list, pointer list Q), loads everything into behavioural HBM
// channels that stall at random, starts the accelerator and compares every
// element of C_out with alpha*A*B + beta*C_in computed here. Values are small
// integers, so every FP32 sum is exact and the comparison is bit exact.
// It also counts the mechanisms the design relies on (scheduler bubbles, the
// window guard, chain back-pressure, memory stalls, partial windows, several
// column blocks) and fails if one never happened, and checks the run time
// against the paper's cycle model.
module tb_sextans_top_full;
  import sextans_pkg::*;
  import sextans_tb_pkg::*;

  // ---- sizes ------------------------------------------------------------------
  localparam int PEGS = 8, PES = 8, N0 = 8, K0 = 4096, C_DEPTH = 12288, ADD_LAT = 2;
  localparam int M = 300, K = K0 + 8, N = 16, NNZ_TRY = 4000;
  localparam int P = PEGS * PES, D = ADD_LAT + 2;
  localparam int NBLK = (N + N0 - 1) / N0, NWIN = (K + K0 - 1) / K0;
  localparam int KP = (K + 7) / 8 * 8, MP = (M + P - 1) / P * P;
  localparam int WATCHDOG = 400000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;

  cfg_t cfg;
  logic busy, done;
  logic                  ptr_req_valid, ptr_req_ready, ptr_resp_valid;
  logic [31:0]           ptr_req_addr;
  logic [511:0]          ptr_resp_data;
  logic [PEGS-1:0]       a_req_valid, a_req_ready, a_resp_valid;
  logic [PEGS-1:0][31:0] a_req_addr;
  logic [PEGS-1:0][511:0] a_resp_data;
  logic [3:0]            b_req_valid, b_req_ready, b_resp_valid;
  logic [3:0][31:0]      b_req_addr;
  logic [3:0][511:0]     b_resp_data;
  logic [7:0]            cin_req_valid, cin_req_ready, cin_resp_valid;
  logic [7:0][31:0]      cin_req_addr;
  logic [7:0][511:0]     cin_resp_data;
  logic [7:0]            cout_wr_valid, cout_wr_ready;
  logic [7:0][31:0]      cout_wr_addr;
  logic [7:0][511:0]     cout_wr_data;

  sextans_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .cfg(cfg), .busy(busy), .done(done),
    .ptr_req_valid(ptr_req_valid), .ptr_req_ready(ptr_req_ready), .ptr_req_addr(ptr_req_addr),
    .ptr_resp_valid(ptr_resp_valid), .ptr_resp_data(ptr_resp_data),
    .a_req_valid(a_req_valid), .a_req_ready(a_req_ready), .a_req_addr(a_req_addr),
    .a_resp_valid(a_resp_valid), .a_resp_data(a_resp_data),
    .b_req_valid(b_req_valid), .b_req_ready(b_req_ready), .b_req_addr(b_req_addr),
    .b_resp_valid(b_resp_valid), .b_resp_data(b_resp_data),
    .cin_req_valid(cin_req_valid), .cin_req_ready(cin_req_ready), .cin_req_addr(cin_req_addr),
    .cin_resp_valid(cin_resp_valid), .cin_resp_data(cin_resp_data),
    .cout_wr_valid(cout_wr_valid), .cout_wr_ready(cout_wr_ready), .cout_wr_addr(cout_wr_addr),
    .cout_wr_data(cout_wr_data));

  // ---- memory channels ------------------------------------------------------------
  // preload/readback ports: index 0 ptr, 1..PEGS A, then 4 B, 8 C_in, 8 C_out
  localparam int NCH = 1 + PEGS + 4 + 8 + 8;
  localparam int CH_A = 1, CH_B = 1 + PEGS, CH_CI = CH_B + 4, CH_CO = CH_CI + 8;
  logic [NCH-1:0]        pl_en = '0;
  logic [31:0]           pl_addr = 0;
  logic [511:0]          pl_data = '0;
  logic [31:0]           rb_addr = 0;
  logic [NCH-1:0][511:0] rb_data;
  logic [NCH-1:0]        u_rq_ready, u_wr_ready, u_resp_valid;
  logic [NCH-1:0][511:0] u_resp_data;
  logic [NCH-1:0]        u_rq_valid, u_wr_valid;
  logic [NCH-1:0][31:0]  u_rq_addr, u_wr_addr;
  logic [NCH-1:0][511:0] u_wr_data;

  always_comb begin
    u_rq_valid = '0; u_rq_addr = '0; u_wr_valid = '0; u_wr_addr = '0; u_wr_data = '0;
    u_rq_valid[0] = ptr_req_valid; u_rq_addr[0] = ptr_req_addr;
    for (int g = 0; g < PEGS; g++) begin u_rq_valid[CH_A+g] = a_req_valid[g]; u_rq_addr[CH_A+g] = a_req_addr[g]; end
    for (int c = 0; c < 4; c++)    begin u_rq_valid[CH_B+c] = b_req_valid[c]; u_rq_addr[CH_B+c] = b_req_addr[c]; end
    for (int c = 0; c < 8; c++)    begin u_rq_valid[CH_CI+c] = cin_req_valid[c]; u_rq_addr[CH_CI+c] = cin_req_addr[c]; end
    for (int c = 0; c < 8; c++)    begin
      u_wr_valid[CH_CO+c] = cout_wr_valid[c]; u_wr_addr[CH_CO+c] = cout_wr_addr[c]; u_wr_data[CH_CO+c] = cout_wr_data[c];
    end
    ptr_req_ready = u_rq_ready[0]; ptr_resp_valid = u_resp_valid[0]; ptr_resp_data = u_resp_data[0];
    for (int g = 0; g < PEGS; g++) begin
      a_req_ready[g] = u_rq_ready[CH_A+g]; a_resp_valid[g] = u_resp_valid[CH_A+g]; a_resp_data[g] = u_resp_data[CH_A+g];
    end
    for (int c = 0; c < 4; c++) begin
      b_req_ready[c] = u_rq_ready[CH_B+c]; b_resp_valid[c] = u_resp_valid[CH_B+c]; b_resp_data[c] = u_resp_data[CH_B+c];
    end
    for (int c = 0; c < 8; c++) begin
      cin_req_ready[c] = u_rq_ready[CH_CI+c]; cin_resp_valid[c] = u_resp_valid[CH_CI+c]; cin_resp_data[c] = u_resp_data[CH_CI+c];
      cout_wr_ready[c] = u_wr_ready[CH_CO+c];
    end
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    sextans_hbm_channel #(.LAT(5 + c % 4), .STALL_PCT(15)) u_ch (
      .clk(clk), .req_valid(u_rq_valid[c]), .req_ready(u_rq_ready[c]), .req_addr(u_rq_addr[c]),
      .resp_valid(u_resp_valid[c]), .resp_data(u_resp_data[c]),
      .wr_valid(u_wr_valid[c]), .wr_ready(u_wr_ready[c]), .wr_addr(u_wr_addr[c]), .wr_data(u_wr_data[c]),
      .pl_en(pl_en[c]), .pl_addr(pl_addr), .pl_data(pl_data), .rb_addr(rb_addr), .rb_data(rb_data[c]));
  end

  task automatic preload(input int ch, input int unsigned addr, input logic [511:0] data);
    pl_en = '0; pl_en[ch] = 1'b1; pl_addr = addr; pl_data = data;
    @(posedge clk); #1;
    pl_en = '0;
  endtask

  // ---- problem and host-side preprocessing -----------------------------------------
  int          a_dense [M*K];           // integer value of A(r,c), 0 = structural zero
  int          b_val   [K*N];
  int          cin_val [MP*N];
  int          nnz = 0;
  int          qptr    [NWIN+1];
  a64_t        sched   [P][NWIN][$];    // scheduled slots per PE and window
  int          bubbles_in_lists = 0;

  localparam logic [31:0] ALPHA = 32'h4000_0000;  // 2.0
  localparam logic [31:0] BETA  = 32'h3F00_0000;  // 0.5

  function automatic int rnd_int();
    int v;
    v = int'($urandom % 9) - 4;
    return (v == 0) ? 1 : v;
  endfunction

  task automatic build_problem();
    for (int i = 0; i < M*K; i++) a_dense[i] = 0;
    for (int t = 0; t < NNZ_TRY; t++) begin
      int r, c;
      r = int'($urandom % M);
      // a few dense rows so that same-row conflicts appear inside windows
      if (t % 4 == 0) r = int'($urandom % 3) * P;
      c = int'($urandom % K);
      if (a_dense[r*K+c] == 0) begin a_dense[r*K+c] = rnd_int(); nnz++; end
    end
    for (int i = 0; i < K*N; i++)  b_val[i]   = int'($urandom % 7) - 3;
    for (int i = 0; i < MP*N; i++) cin_val[i] = int'($urandom % 7) - 3;
  endtask

  // Out-of-order scheduling of one PE's window: visit the non-zeros in
  // column-major order and put each in the earliest free slot at least D
  // slots after the previous non-zero of its row.
  task automatic schedule_all();
    int len_max;
    for (int j = 0; j < NWIN; j++) begin
      len_max = 0;
      for (int p = 0; p < P; p++) begin
        bit   used [$];
        int   last [int];
        a64_t e;
        sched[p][j].delete();
        for (int l = 0; l < K0 && j*K0 + l < K; l++)
          for (int r = p; r < M; r += P)
            if (a_dense[r*K + j*K0 + l] != 0) begin
              int s;
              s = last.exists(r / P) ? last[r / P] + D : 0;
              while (s < used.size() && used[s]) s++;
              while (used.size() <= s) begin
                used.push_back(1'b0);
                e.col = BUBBLE_COL; e.row = '0; e.val = '0;
                sched[p][j].push_back(e);
              end
              used[s] = 1'b1;
              e.col = A_COL_W'(l); e.row = A_ROW_W'(r / P); e.val = int_fp(a_dense[r*K + j*K0 + l]);
              sched[p][j][s] = e;
              last[r / P] = s;
            end
        if (sched[p][j].size() > len_max) len_max = sched[p][j].size();
      end
      // pad every PE of the window to the same length with bubbles
      for (int p = 0; p < P; p++)
        while (sched[p][j].size() < len_max) begin
          a64_t e;
          e.col = BUBBLE_COL; e.row = '0; e.val = '0;
          sched[p][j].push_back(e);
        end
      qptr[j+1] = (j == 0 ? 0 : qptr[j]) + len_max;
    end
    qptr[0] = 0;
    for (int j = 0; j < NWIN; j++)
      for (int p = 0; p < P; p++)
        foreach (sched[p][j][s]) if (sched[p][j][s].col == BUBBLE_COL) bubbles_in_lists++;
  endtask

  task automatic load_memories();
    logic [511:0] w;
    // Q, 16 entries per word
    for (int wd = 0; wd <= NWIN / 16; wd++) begin
      w = '0;
      for (int e = 0; e < 16; e++) if (wd*16 + e <= NWIN) w[e*32 +: 32] = qptr[wd*16 + e];
      preload(0, wd, w);
    end
    // A: one word per scheduled cycle per PEG, lane e = PE g*8+e
    for (int g = 0; g < PEGS; g++)
      for (int j = 0; j < NWIN; j++)
        for (int s = 0; s < qptr[j+1] - qptr[j]; s++) begin
          w = '0;
          for (int e = 0; e < PES; e++) w[e*64 +: 64] = sched[g*PES + e][j][s];
          preload(CH_A + g, qptr[j] + s, w);
        end
    // B: block i, 8-row group gidx, channel c holds rows 8g+2c, 8g+2c+1
    for (int i = 0; i < NBLK; i++)
      for (int gidx = 0; gidx < KP/8; gidx++)
        for (int c = 0; c < 4; c++) begin
          w = '0;
          for (int rr = 0; rr < 2; rr++)
            for (int q = 0; q < N0; q++) begin
              int row, col;
              row = gidx*8 + 2*c + rr; col = i*N0 + q;
              if (row < K && col < N) w[(rr*N0 + q)*32 +: 32] = int_fp(b_val[row*N + col]);
            end
          preload(CH_B + c, i*(KP/8) + gidx, w);
        end
    // C_in: block i, 16-row group gidx, channel c holds rows 16g+2c, 16g+2c+1
    for (int i = 0; i < NBLK; i++)
      for (int gidx = 0; gidx < MP/16; gidx++)
        for (int c = 0; c < 8; c++) begin
          w = '0;
          for (int rr = 0; rr < 2; rr++)
            for (int q = 0; q < N0; q++) begin
              int row, col;
              row = gidx*16 + 2*c + rr; col = i*N0 + q;
              if (col < N) w[(rr*N0 + q)*32 +: 32] = int_fp(cin_val[row*N + col]);
            end
          preload(CH_CI + c, i*(MP/16) + gidx, w);
        end
  endtask

  // ---- mechanism counters (probes into the design) -----------------------------------
  int n_bubble = 0, n_guard = 0, n_chain_stall = 0, n_mem_stall = 0, n_wr_stall = 0;
  int n_blocks = 0, n_windows = 0, n_partial = 0, n_issue = 0;
  logic [3:0] st_prev = '0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_peg[0].u_peg.a_fire) begin
      n_issue++;
      for (int e = 0; e < PES; e++)
        if (dut.g_peg[0].u_peg.a_in_data[e*64 + 50 +: 14] == BUBBLE_COL) n_bubble++;
    end
    if (dut.g_peg[0].u_peg.state == 4'd5 && dut.g_peg[0].u_peg.a_in_valid && !dut.g_peg[0].u_peg.a_in_ready
        && dut.g_peg[0].u_peg.cnt != 0) n_guard++;
    if (dut.rb_valid && !dut.rb_ready) n_chain_stall++;
    if (|(a_req_valid & ~a_req_ready) || |(b_req_valid & ~b_req_ready)) n_mem_stall++;
    if (|(cout_wr_valid & ~cout_wr_ready)) n_wr_stall++;
    st_prev <= dut.g_peg[0].u_peg.state;
    if (dut.g_peg[0].u_peg.state == 4'd1 && st_prev != 4'd1) n_blocks++;
    if (dut.g_peg[0].u_peg.state == 4'd4 && st_prev == 4'd3) begin
      n_windows++;
      if (dut.g_peg[0].u_peg.w_len < K0/8) n_partial++;
    end
  end

  task automatic mech(input string name, input int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1, model;
    build_problem();
    schedule_all();
    cfg = '0;
    cfg.m = M; cfg.k = K; cfg.n = N; cfg.alpha = ALPHA; cfg.beta = BETA;
    cfg.a_len = qptr[NWIN];
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_memories();
    @(posedge clk); #1;
    start = 1; t0 = cycles;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    t1 = cycles;
    // C_out readback and comparison
    for (int i = 0; i < NBLK; i++)
      for (int gidx = 0; gidx < MP/16; gidx++)
        for (int c = 0; c < 8; c++) begin
          rb_addr = i*(MP/16) + gidx; #1;
          for (int rr = 0; rr < 2; rr++)
            for (int q = 0; q < N0; q++) begin
              int row, col;
              real acc;
              logic [31:0] exp_v, got;
              row = gidx*16 + 2*c + rr; col = i*N0 + q;
              if (row < M && col < N) begin
                acc = 0.0;
                for (int l = 0; l < K; l++) acc += real'(a_dense[row*K + l]) * real'(b_val[l*N + col]);
                exp_v = r2f(2.0 * acc + 0.5 * real'(cin_val[row*N + col]));
                got   = rb_data[CH_CO + c][(rr*N0 + q)*32 +: 32];
                checks++;
                if (got !== exp_v && !(got[30:0] == 0 && exp_v[30:0] == 0)) begin
                  failures++;
                  if (failures < 10) $display("FAIL C_out[%0d][%0d] = %h, expected %h", row, col, got, exp_v);
                end
              end
            end
        end
    // cycle model of the paper (Eq. 9 with K/K0 windows): per column block
    // K/(2 F_B) + NNZ/P + M/F_C, here with the padded list length in place of NNZ/P
    model = longint'(NBLK) * (KP/8 + qptr[NWIN] + MP/16);
    $display("nnz=%0d list=%0d bubbles(lists)=%0d cycles=%0d paper-model=%0d", nnz, qptr[NWIN], bubbles_in_lists, t1 - t0, model);
    checks++;
    if (t1 - t0 > 2*model + 150*NBLK) begin
      failures++; $display("FAIL run took %0d cycles, model %0d", t1 - t0, model);
    end
    mech("scheduler bubble slot", n_bubble);
    mech("window RAW guard wait", n_guard);
    mech("B chain back-pressure", n_chain_stall);
    mech("HBM read stall", n_mem_stall);
    mech("HBM write stall", n_wr_stall);
    mech("partial last window", n_partial);
    mech("column blocks > 1", n_blocks > 1 ? n_blocks : 0);
    mech("windows > 1", n_windows > NBLK ? n_windows : 0);
    checks++;
    if (n_issue != NBLK * qptr[NWIN]) begin
      failures++; $display("FAIL PEG0 issued %0d A words, expected %0d", n_issue, NBLK * qptr[NWIN]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
