// tb_sextans_collect_c: eight PEG streams of random words (each word one
// compressed row k of eight PEs, eight values each) arrive with random gaps;
// the consumer stalls at random. Checks that beat s of slice k carries the
// words of PEGs 2s and 2s+1, i.e. C rows 64k+16s .. 64k+16s+15 in order, and
// that with all inputs present and no stalls beats leave every cycle.
module tb_sextans_collect_c;
  localparam int PEGS = 8, W = 2048, SLICES = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [PEGS-1:0] in_valid, in_ready;
  logic [PEGS-1:0][W-1:0] in_data;
  logic out_valid, out_ready;
  logic [4095:0] out_data;
  int vpct = 60, rpct = 70;

  sextans_collect_c #(.PEGS(PEGS), .PES(8), .N0(8), .ROWS(16)) dut (.*);

  logic [W-1:0] q [PEGS][$];
  logic [PEGS-1:0] gate;
  for (genvar g = 0; g < PEGS; g++) begin : g_src
    assign in_valid[g] = q[g].size() > 0 && gate[g];
    assign in_data[g]  = q[g].size() > 0 ? q[g][0] : '0;
  end

  logic [W-1:0] ref_slices [$];   // flattened PEG words in slice order
  int beat = 0, n_out = 0, streak = 0, best_streak = 0;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < PEGS; g++) gate[g] <= ($urandom % 100) < vpct;
    out_ready <= ($urandom % 100) < rpct;
    for (int g = 0; g < PEGS; g++) if (in_valid[g] && in_ready[g]) void'(q[g].pop_front());
    if (out_valid && out_ready) begin
      int k, s;
      k = n_out / 4; s = n_out % 4;
      checks++;
      if (out_data !== {ref_slices[k*PEGS + 2*s + 1], ref_slices[k*PEGS + 2*s]}) begin
        failures++; if (failures < 10) $display("FAIL slice %0d beat %0d", k, s);
      end
      n_out++;
      streak++;
      if (streak > best_streak) best_streak = streak;
    end else streak = 0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < SLICES; k++)
      for (int g = 0; g < PEGS; g++) begin
        logic [W-1:0] w;
        w = {64{$urandom}};
        q[g].push_back(w); ref_slices.push_back(w);
      end
    gate = '0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (n_out < SLICES * 2) @(posedge clk);
    vpct = 100; rpct = 100;
    while (n_out < SLICES * 4) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (best_streak < 16) begin failures++; $display("FAIL longest back-to-back run %0d beats", best_streak); end
    checks++;
    if (n_out != SLICES * 4 || out_valid) begin failures++; $display("FAIL %0d beats", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
