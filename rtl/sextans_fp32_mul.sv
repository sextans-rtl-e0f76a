// sextans_fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Used three times in the accelerator: a_val*b in every PU (step 3 of the PE
// pipeline), alpha*C when the scratchpad is drained (step 7), and beta*C_in
// in Comp C. The paper gives only the function (an FP32 multiply); the
// insides here are this design's: 24x24-bit mantissa product, normalisation
// by at most one bit, round to nearest even. Subnormal inputs are read as
// zero and subnormal results flush to signed zero; overflow gives infinity,
// any NaN or inf*0 gives the quiet NaN 0x7FC00000.
// Interface: a, b in, p out, no clock (callers add pipeline registers).
module sextans_fp32_mul
  import sextans_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic signed [10:0] exp;
  logic [24:0] mant_r;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    p = '0;
    sa = a[31]; sb = b[31]; sp = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    a_zero = (ea == 8'd0); b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);
    prod   = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp    = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp    = exp + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp    = exp + 11'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      p = 32'h7FC0_0000;
    else if (a_inf || b_inf)
      p = {sp, 8'hFF, 23'd0};
    else if (a_zero || b_zero)
      p = {sp, 31'd0};
    else if (exp >= 11'sd255)
      p = {sp, 8'hFF, 23'd0};
    else if (exp <= 11'sd0)
      p = {sp, 31'd0};
    else
      p = {sp, exp[7:0], mant_r[22:0]};
  end
endmodule
