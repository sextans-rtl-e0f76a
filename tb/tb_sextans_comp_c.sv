// tb_sextans_comp_c: random FP32 beats of C_alphaAB and C_in with random gaps
// on both inputs and a stalling consumer; checks every lane of every output
// beat against fadd(ab, fmul(beta, cin)) computed in double precision and
// rounded, and that with everything present a beat leaves every cycle.
module tb_sextans_comp_c;
  import sextans_pkg::*;
  import sextans_tb_pkg::*;
  localparam int LANES = 128, BEATS = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  fp32_t beta;
  logic ab_valid, ab_ready, cin_valid, cin_ready, out_valid, out_ready;
  logic [LANES*32-1:0] ab_data, cin_data, out_data;
  int vpct = 60, rpct = 70;

  sextans_comp_c #(.LANES(LANES)) dut (.*);

  logic [LANES*32-1:0] qa [$], qc [$], qe [$];
  logic ga, gc;
  assign ab_valid  = qa.size() > 0 && ga;
  assign ab_data   = qa.size() > 0 ? qa[0] : '0;
  assign cin_valid = qc.size() > 0 && gc;
  assign cin_data  = qc.size() > 0 ? qc[0] : '0;

  int n_out = 0, streak = 0, best = 0;
  always @(posedge clk) if (rst_n) begin
    ga <= ($urandom % 100) < vpct;
    gc <= ($urandom % 100) < vpct;
    out_ready <= ($urandom % 100) < rpct;
    if (ab_valid && ab_ready) void'(qa.pop_front());
    if (cin_valid && cin_ready) void'(qc.pop_front());
    if (out_valid && out_ready) begin
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (out_data[l*32 +: 32] !== qe[0][l*32 +: 32]) begin
          failures++; if (failures < 10) $display("FAIL beat %0d lane %0d: %h expected %h", n_out, l, out_data[l*32 +: 32], qe[0][l*32 +: 32]);
        end
      end
      void'(qe.pop_front());
      n_out++; streak++; if (streak > best) best = streak;
    end else streak = 0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    beta = rand_fp(120, 130);
    for (int b = 0; b < BEATS; b++) begin
      logic [LANES*32-1:0] wa, wc, we;
      for (int l = 0; l < LANES; l++) begin
        wa[l*32 +: 32] = rand_fp(110, 140);
        wc[l*32 +: 32] = rand_fp(110, 140);
        we[l*32 +: 32] = fadd(wa[l*32 +: 32], fmul(beta, wc[l*32 +: 32]));
      end
      qa.push_back(wa); qc.push_back(wc); qe.push_back(we);
    end
    ga = 0; gc = 0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (n_out < BEATS / 2) @(posedge clk);
    vpct = 100; rpct = 100;
    while (n_out < BEATS) @(posedge clk);
    checks++;
    if (best < 20) begin failures++; $display("FAIL longest back-to-back run %0d beats", best); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
