// fp32_cvt: conversions between binary32 and two's-complement int32.
//
// f2i returns floor(a) (rounds toward minus infinity), saturating to the
// int32 range; it is used to find the grid cube that contains a sample point
// (integer corner) at a given resolution level. i2f converts an int32 to the
// nearest binary32 (ties to even), used to get the fractional position inside
// the cube for the trilinear weights. Combinational. This conversion pair is
// this design's choice of how the FP32 and INT32 PE groups exchange values.
module fp32_cvt (
  input  logic [31:0] a,
  output logic [31:0] f2i,
  output logic [31:0] i2f
);
  // float -> int, floor
  logic        s;
  logic [7:0]  e;
  logic [22:0] f;
  logic [55:0] wide;       // 1.f shifted so that bits [55:24] are the integer part
  logic [31:0] ip;
  logic        frac_nz;
  logic signed [8:0] sh;

  always_comb begin
    {s, e, f} = a;
    sh      = 9'(e) - 9'sd127;              // unbiased exponent
    wide    = '0;
    ip      = '0;
    frac_nz = 1'b0;
    if (e == 8'd0) begin                   // zero or flushed subnormal
      ip = '0; frac_nz = 1'b0;
    end else if (sh < 0) begin             // |a| < 1
      ip = '0; frac_nz = 1'b1;
    end else if (sh > 30) begin            // out of range: saturate
      ip = 32'h7fff_ffff; frac_nz = 1'b0;
    end else begin
      wide    = {32'd0, 1'b1, f} << sh;    // integer part lands in [55:23]
      ip      = wide[54:23];
      frac_nz = |wide[22:0];
    end
    if (!s)
      f2i = ip;
    else if (sh > 30 && e != 8'd0)
      f2i = 32'h8000_0000;
    else
      f2i = -ip - 32'(frac_nz);
  end

  // int -> float
  logic        si;
  logic [31:0] mag, norm;
  logic [4:0]  msb;
  logic [24:0] m_r;
  logic [7:0]  e_r;
  logic        rnd;

  always_comb begin
    si  = a[31];
    mag = si ? -a : a;
    msb = 5'd0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = 5'(i);
    norm = mag << (5'd31 - msb);           // leading one at bit 31
    rnd  = norm[7] & ((|norm[6:0]) | norm[8]);
    m_r  = {1'b0, norm[31:8]} + 25'(rnd);
    e_r  = 8'd127 + 8'(msb);
    if (m_r[24]) begin
      m_r = m_r >> 1;
      e_r = e_r + 8'd1;
    end
    if (a == '0) i2f = '0;
    else         i2f = {si, e_r, m_r[22:0]};
  end
endmodule
