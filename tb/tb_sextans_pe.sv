// tb_sextans_pe: runs the paper's scheduling example through one PE (a 4x4
// window, D = 4, eleven slots with one bubble, issued on eleven consecutive
// cycles), then a random window scheduled the same way. Random FP32 values;
// the reference accumulates c_kq = fadd(c_kq, fmul(a, b_q)) in slot order, so
// the comparison with the alpha-scaled drain is bit exact. Also checks that
// the pipeline is empty ADD_LAT + 4 cycles after the last slot.
module tb_sextans_pe;
  import sextans_pkg::*;
  import sextans_tb_pkg::*;
  localparam int K0 = 64, N0 = 8, C_DEPTH = 16, ADD_LAT = 2, D = ADD_LAT + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_valid = 0, b_wr_en = 0, clr_en = 0, drain_en = 0, drain_valid, busy;
  a64_t a_data;
  logic [2:0] b_wr_addr = 0;
  logic [7:0][N0-1:0][31:0] b_wr_data;
  logic [3:0] clr_addr = 0, drain_addr = 0;
  fp32_t alpha;
  logic [N0-1:0][31:0] drain_data;

  sextans_pe #(.K0(K0), .N0(N0), .C_DEPTH(C_DEPTH), .ADD_LAT(ADD_LAT)) dut (.*);

  logic [31:0] bm [K0][N0];
  logic [31:0] cref [C_DEPTH][N0];
  a64_t slots [$];

  function automatic a64_t nz(input int r, input int c, input logic [31:0] v);
    a64_t e; e.col = A_COL_W'(c); e.row = A_ROW_W'(r); e.val = v; return e;
  endfunction
  function automatic a64_t bubble();
    a64_t e; e.col = BUBBLE_COL; e.row = '0; e.val = '0; return e;
  endfunction

  task automatic load_b_and_clear();
    for (int r = 0; r < K0; r++) for (int q = 0; q < N0; q++) bm[r][q] = rand_fp(110, 140);
    for (int g = 0; g < K0/8; g++) begin
      @(negedge clk); b_wr_en = 1; b_wr_addr = 3'(g);
      for (int r = 0; r < 8; r++) for (int q = 0; q < N0; q++) b_wr_data[r][q] = bm[g*8 + r][q];
    end
    @(negedge clk); b_wr_en = 0;
    for (int r = 0; r < C_DEPTH; r++) begin
      @(negedge clk); clr_en = 1; clr_addr = 4'(r);
      for (int q = 0; q < N0; q++) cref[r][q] = 0;
    end
    @(negedge clk); clr_en = 0;
  endtask

  task automatic run_slots();
    for (int s = 0; s < slots.size(); s++) begin
      @(negedge clk); a_valid = 1; a_data = slots[s];
      if (slots[s].col != BUBBLE_COL)
        for (int q = 0; q < N0; q++)
          cref[slots[s].row][q] = fadd(cref[slots[s].row][q], fmul(slots[s].val, bm[slots[s].col][q]));
    end
    @(negedge clk); a_valid = 0;
    repeat (ADD_LAT + 3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL PE still busy %0d cycles after the last slot", ADD_LAT + 4); end
  endtask

  task automatic drain_check();
    for (int r = 0; r < C_DEPTH; r++) begin
      drain_en = 1; drain_addr = 4'(r);
      @(negedge clk); drain_en = 0;
      @(negedge clk);
      for (int q = 0; q < N0; q++) begin
        checks++;
        if (!drain_valid || drain_data[q] !== fmul(alpha, cref[r][q])) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] = %h expected %h", r, q, drain_data[q], fmul(alpha, cref[r][q]));
        end
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    alpha = rand_fp(125, 129);
    repeat (2) @(posedge clk); rst_n = 1;
    // the scheduling example: (row,col) per cycle 0..10, cycle 7 a bubble
    load_b_and_clear();
    slots = '{nz(0,0,rand_fp(120,130)), nz(2,0,rand_fp(120,130)), nz(3,0,rand_fp(120,130)),
              nz(1,1,rand_fp(120,130)), nz(0,2,rand_fp(120,130)), nz(2,1,rand_fp(120,130)),
              nz(3,2,rand_fp(120,130)), bubble(),               nz(0,3,rand_fp(120,130)),
              nz(2,2,rand_fp(120,130)), nz(3,3,rand_fp(120,130))};
    run_slots();
    drain_check();
    // a random window, scheduled out of order with distance D
    load_b_and_clear();
    begin
      bit used [$];
      int last [int];
      slots.delete();
      for (int c = 0; c < K0; c++)
        for (int r = 0; r < C_DEPTH; r++)
          if ($urandom % 100 < 20) begin
            int s;
            s = last.exists(r) ? last[r] + D : 0;
            while (s < used.size() && used[s]) s++;
            while (used.size() <= s) begin used.push_back(0); slots.push_back(bubble()); end
            used[s] = 1; slots[s] = nz(r, c, rand_fp(120, 130)); last[r] = s;
          end
    end
    run_slots();
    drain_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
