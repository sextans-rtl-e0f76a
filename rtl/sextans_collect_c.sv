// sextans_collect_c: Collect C module.
//
// Gathers the disjoint pieces of alpha*C_AB from the PEGS = 8 PEGs and puts
// them back in row order for Comp C. Each PEG word is one compressed
// scratchpad row k of all its PES PEs: PE e of PEG g holds C row
// k*P + g*PES + e (P = PEGS*PES, since a PE owns the rows with row mod P equal
// to its index). When all PEG FIFOs hold a word, the module takes one from
// each and emits the P rows as P/ROWS beats of ROWS = F_C = 16 rows (N0 values
// each), beat s carrying rows k*P + 16s .. k*P + 16s + 15. A new slice is taken
// in the cycle its last beat leaves, so beats flow every cycle. The paper
// names the module and its job; the beat format is this design's.
module sextans_collect_c
  import sextans_pkg::*;
#(
  parameter int unsigned PEGS = 8,
  parameter int unsigned PES  = 8,
  parameter int unsigned N0   = 8,
  parameter int unsigned ROWS = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic [PEGS-1:0]                     in_valid,
  output logic [PEGS-1:0]                     in_ready,
  input  logic [PEGS-1:0][PES*N0*FP_W-1:0]    in_data,
  output logic                                out_valid,
  input  logic                                out_ready,
  output logic [ROWS*N0*FP_W-1:0]             out_data
);
  localparam int unsigned BEATS = PEGS * PES / ROWS;
  localparam int unsigned GPB   = ROWS / PES;      // PEG words per beat
  localparam int unsigned SB    = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic [PEGS-1:0][PES*N0*FP_W-1:0] buf_q;
  logic                             full;
  logic [SB-1:0]                    beat;
  logic                             take, last_out;

  assign last_out  = out_valid && out_ready && (beat == SB'(BEATS - 1));
  assign take      = (&in_valid) && (!full || last_out);
  assign in_ready  = {PEGS{take}};
  assign out_valid = full;
  assign out_data  = buf_q[beat*GPB +: GPB];

  always_ff @(posedge clk) begin
    if (take) buf_q <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 1'b0; beat <= '0;
    end else begin
      if (out_valid && out_ready)
        beat <= (beat == SB'(BEATS - 1)) ? '0 : beat + 1'b1;
      if (take)          full <= 1'b1;
      else if (last_out) full <= 1'b0;
    end
  end

  initial assert (PEGS * PES % ROWS == 0 && ROWS % PES == 0)
    else $error("Collect C: rows per beat must be a multiple of PES and divide PEGS*PES");
endmodule
