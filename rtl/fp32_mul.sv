// fp32_mul: IEEE-754 binary32 multiplier, combinational.
//
// 24x24-bit significand product, normalised by at most one place and rounded
// to nearest, ties to even. Subnormal inputs and results are flushed to zero,
// overflow gives infinity, any NaN or inf*0 gives the canonical quiet NaN.
// The paper only says the FP32 PEs do "other computations"; the number
// format details here are this design's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic [47:0] prod;
  logic [23:0] mant;       // kept significand incl. hidden bit
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_r;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sy     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hff) && (fa == '0);
    b_inf  = (eb == 8'hff) && (fb == '0);
    a_nan  = (ea == 8'hff) && (fa != '0);
    b_nan  = (eb == 8'hff) && (fb != '0);
    prod   = {1'b1, fa} * {1'b1, fb};
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_r  = 11'(ea) + 11'(eb) - 11'sd126;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
      exp_r  = 11'(ea) + 11'(eb) - 11'sd127;
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 11'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      y = 32'h7fc0_0000;
    else if (a_inf || b_inf)
      y = {sy, 8'hff, 23'd0};
    else if (a_zero || b_zero || exp_r <= 0)
      y = {sy, 31'd0};
    else if (exp_r >= 255)
      y = {sy, 8'hff, 23'd0};
    else
      y = {sy, exp_r[7:0], mant_r[22:0]};
  end
endmodule
