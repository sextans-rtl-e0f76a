// tb_sextans_fifo: random pushes and pops against a queue model; checks data
// order, the full and empty flags and the occupancy count.
module tb_sextans_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [15:0] in_data = 0, out_data;
  logic [3:0] count;
  logic [15:0] model [$];
  int n_full = 0;

  sextans_fifo #(.WIDTH(16), .DEPTH(8)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((t / 500) % 2 ? 80 : 40);
      out_ready = ($urandom % 100) < ((t / 500) % 2 ? 40 : 80);
      in_data   = 16'($urandom);
      #1;
      checks++;
      if (in_ready !== (model.size() < 8) || out_valid !== (model.size() > 0) || int'(count) != model.size()) begin
        failures++; $display("FAIL flags at t=%0d: ready=%b valid=%b count=%0d model=%0d", t, in_ready, out_valid, count, model.size());
      end
      if (!in_ready) n_full++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model[0]) begin failures++; $display("FAIL data %h expected %h", out_data, model[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL the FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
