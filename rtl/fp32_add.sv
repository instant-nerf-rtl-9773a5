// fp32_add: IEEE-754 binary32 adder, combinational (y = a + b).
//
// The smaller operand is aligned to the larger one with guard, round and
// sticky bits, the significands are added or subtracted, the result is
// renormalised (leading-zero count) and rounded to nearest, ties to even.
// Subnormals are flushed to zero; exact cancellation gives +0; NaN inputs or
// inf-inf give the canonical quiet NaN. Format details are this design's
// choice; the paper specifies only FP32 arithmetic.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [22:0] fa, fb;
  logic [26:0] ml, ms, ms_sh;    // 1.f + 3 extra bits (guard, round, sticky)
  logic [7:0]  d;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [10:0] exp_r;
  logic        rnd;
  logic [24:0] mant_r;
  logic        a_nan, b_nan, a_inf, b_inf;

  // Right shift that ORs every bit shifted out into bit 0.
  function automatic logic [26:0] shr_sticky(logic [26:0] v, logic [7:0] n);
    logic [26:0] r;
    logic        st;
    if (n >= 8'd27) begin
      r = '0; st = |v;
    end else begin
      r  = v >> n;
      st = |(v & ((27'd1 << n) - 27'd1));
    end
    return {r[26:1], r[0] | st};
  endfunction

  function automatic logic [4:0] lzc28(logic [27:0] v);
    logic [4:0] n;
    n = 5'd28;
    for (int i = 0; i < 28; i++) if (v[i]) n = 5'(27 - i);
    return n;
  endfunction

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    a_nan = (ea == 8'hff) && (fa != '0);
    b_nan = (eb == 8'hff) && (fb != '0);
    a_inf = (ea == 8'hff) && (fa == '0);
    b_inf = (eb == 8'hff) && (fb == '0);
    // Larger magnitude first.
    if ({ea, fa} >= {eb, fb}) begin
      sl = sa; el = ea; ml = (ea == 0) ? 27'd0 : {1'b1, fa, 3'b000};
      ss = sb; es = eb; ms = (eb == 0) ? 27'd0 : {1'b1, fb, 3'b000};
    end else begin
      sl = sb; el = eb; ml = (eb == 0) ? 27'd0 : {1'b1, fb, 3'b000};
      ss = sa; es = ea; ms = (ea == 0) ? 27'd0 : {1'b1, fa, 3'b000};
    end
    d     = el - es;
    ms_sh = shr_sticky(ms, d);
    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_sh};
    else          sum = {1'b0, ml} - {1'b0, ms_sh};
    exp_r = 11'(el);
    lz    = 5'd0;
    if (sum[27]) begin
      sum   = {1'b0, sum[27:2], sum[1] | sum[0]};
      exp_r = exp_r + 11'sd1;
    end else begin
      lz    = lzc28(sum) - 5'd1;       // sum[26] should be the hidden bit
      if (sum != '0) begin
        sum   = sum << lz;
        exp_r = exp_r - 11'(lz);
      end
    end
    rnd    = sum[2] & (sum[1] | sum[0] | sum[3]);
    mant_r = {1'b0, sum[26:3]} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_r + 11'sd1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb)))
      y = 32'h7fc0_0000;
    else if (a_inf)
      y = a;
    else if (b_inf)
      y = b;
    else if (ml == '0)
      y = {sa & sb, 31'd0};          // both operands zero
    else if (sum == '0)
      y = 32'd0;                     // exact cancellation
    else if (exp_r <= 0)
      y = {sl, 31'd0};
    else if (exp_r >= 255)
      y = {sl, 8'hff, 23'd0};
    else
      y = {sl, exp_r[7:0], mant_r[22:0]};
  end
endmodule
