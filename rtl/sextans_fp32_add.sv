// sextans_fp32_add: combinational IEEE-754 single-precision adder.
//
// Performs the accumulation c += a*b in every PU (step 5) and the final
// C_alphaAB + beta*C_in in Comp C. The paper gives the function only and notes
// that an FPGA floating-point add takes 7 to 10 cycles; here the adder is one
// combinational block and the caller decides how many register stages follow
// it (the PU's ADD_LAT), which sets the read-after-write distance D.
// Insides (this design's choice): swap so |a| >= |b|, align b with three
// extra bits (guard, round, sticky), add or subtract, normalise, round to
// nearest even. Subnormal inputs count as zero, subnormal results flush to
// zero, overflow gives infinity, NaN and inf-inf give 0x7FC00000. An exact
// cancellation gives +0.
module sextans_fp32_add
  import sextans_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  fp32_t x, y;                 // |x| >= |y|
  logic  x_zero, y_zero, x_inf, y_inf, x_nan, y_nan, sub;
  logic [7:0]  d;
  logic [26:0] mx, my, my_sh;  // 1.mantissa followed by G, R, S
  logic [27:0] sum;
  logic signed [10:0] exp;
  logic [4:0]  lz;
  logic        found, rnd;
  logic [24:0] mant_r;

  always_comb begin
    lz = 5'd0; found = 1'b0; rnd = 1'b0; mant_r = '0; s = '0;
    if ({1'b0, a[30:0]} >= {1'b0, b[30:0]}) begin x = a; y = b; end
    else                                     begin x = b; y = a; end
    x_zero = (x[30:23] == 8'd0);
    y_zero = (y[30:23] == 8'd0);
    x_inf  = (x[30:23] == 8'hFF) && (x[22:0] == 23'd0);
    y_inf  = (y[30:23] == 8'hFF) && (y[22:0] == 23'd0);
    x_nan  = (x[30:23] == 8'hFF) && (x[22:0] != 23'd0);
    y_nan  = (y[30:23] == 8'hFF) && (y[22:0] != 23'd0);
    sub    = x[31] ^ y[31];
    d      = x[30:23] - y[30:23];
    mx     = {1'b1, x[22:0], 3'b000};
    my     = {1'b1, y[22:0], 3'b000};
    // align y, keeping every shifted-out bit in the sticky position
    my_sh  = 27'd0;
    if (d >= 8'd27) my_sh = 27'd1;
    else begin
      my_sh = my >> d;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && my[i]) my_sh[0] = 1'b1;
    end
    exp = 11'(signed'({3'b000, x[30:23]}));
    if (sub) sum = {1'b0, mx} - {1'b0, my_sh};
    else     sum = {1'b0, mx} + {1'b0, my_sh};
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      exp = exp + 11'sd1;
    end else begin
      // leading-zero count of sum[26:0], normalise so that sum[26] = 1
      lz = 5'd0; found = 1'b0;
      for (int i = 26; i >= 0; i--)
        if (!found) begin
          if (sum[i]) found = 1'b1;
          else        lz = lz + 5'd1;
        end
      sum = sum << lz;
      exp = exp - 11'(lz);
    end
    rnd    = sum[2] & (sum[1] | sum[0] | sum[3]);
    mant_r = {1'b0, sum[26:3]} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp    = exp + 11'sd1;
    end
    if (x_nan || y_nan || (x_inf && y_inf && sub))
      s = 32'h7FC0_0000;
    else if (x_inf)
      s = x;
    else if (x_zero && y_zero)
      s = {x[31] & y[31], 31'd0};
    else if (y_zero)
      s = x;
    else if (sum[26:0] == 27'd0 && !mant_r[23])
      s = 32'd0;
    else if (exp >= 11'sd255)
      s = {x[31], 8'hFF, 23'd0};
    else if (exp <= 11'sd0)
      s = {x[31], 31'd0};
    else
      s = {x[31], exp[7:0], mant_r[22:0]};
  end
endmodule
