// sextans_comp_c: Comp C module.
//
// Element-wise last phase of SpMM: C_out = C_alphaAB + beta * C_in
// (alpha was already applied when the PEs drained their scratchpads). It
// pairs one beat of Collect C with one beat of Read C, both F_C = 16 rows of
// N0 = 8 FP32 values, and works on all LANES = F_C*N0 = 128 values at once, as
// the paper's parallel factor F_C x N0 says. One FP32 multiply and one FP32
// add per lane, followed by one output register with valid/ready; a beat is
// taken whenever both inputs are present and the output register is free or
// being emptied, so it sustains one beat per cycle.
module sextans_comp_c
  import sextans_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  fp32_t                   beta,
  input  logic                    ab_valid,
  output logic                    ab_ready,
  input  logic [LANES*FP_W-1:0]   ab_data,
  input  logic                    cin_valid,
  output logic                    cin_ready,
  input  logic [LANES*FP_W-1:0]   cin_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [LANES*FP_W-1:0]   out_data
);
  logic [LANES*FP_W-1:0] res;
  logic                  take;

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    fp32_t bc;
    sextans_fp32_mul u_mul (.a(beta), .b(cin_data[l*FP_W +: FP_W]), .p(bc));
    sextans_fp32_add u_add (.a(ab_data[l*FP_W +: FP_W]), .b(bc), .s(res[l*FP_W +: FP_W]));
  end

  assign take      = ab_valid && cin_valid && (!out_valid || out_ready);
  assign ab_ready  = take;
  assign cin_ready = take;

  always_ff @(posedge clk) begin
    if (take) out_data <= res;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      out_valid <= 1'b0;
    else if (take)                   out_valid <= 1'b1;
    else if (out_valid && out_ready) out_valid <= 1'b0;
  end
endmodule
