// fp32_mul: combinational IEEE-754 binary32 multiplier.
//
// Forms the product of a cluster center and a cluster sum. The two 24-bit
// significands (hidden bit included) are multiplied to a 48-bit product,
// which is normalised by at most one place and rounded to nearest, ties to
// even, using the bits below the kept 24 as guard and sticky.
//
// Choices of this design, not taken from the paper: subnormal inputs are read
// as zero and subnormal results are flushed to a zero of the product's sign;
// zero times infinity and any NaN operand give the quiet NaN 0x7FC00000.
// There is no pipeline register: y settles in the same cycle as a and b.
module fp32_mul
  import dpnet_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_fields_t fa, fb;
  logic         s, a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic [47:0]  p;
  logic [23:0]  mant;
  logic [24:0]  mant_r;
  logic         g, st, up;
  logic signed [10:0] e;

  always_comb begin
    fa = a;
    fb = b;
    s      = fa.sign ^ fb.sign;
    a_nan  = (fa.exp == FP32_EMAX) && (fa.frac != '0);
    b_nan  = (fb.exp == FP32_EMAX) && (fb.frac != '0);
    a_inf  = (fa.exp == FP32_EMAX) && (fa.frac == '0);
    b_inf  = (fb.exp == FP32_EMAX) && (fb.frac == '0);
    a_zero = (fa.exp == '0);
    b_zero = (fb.exp == '0);

    p = {24'b0, 1'b1, fa.frac} * {24'b0, 1'b1, fb.frac};
    e = signed'({3'b000, fa.exp}) + signed'({3'b000, fb.exp}) - 11'sd127;
    if (p[47]) begin
      mant = p[47:24];
      g    = p[23];
      st   = p[22:0] != '0;
      e    = e + 11'sd1;
    end else begin
      mant = p[46:23];
      g    = p[22];
      st   = p[21:0] != '0;
    end
    up     = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      y = {s, FP32_EMAX, 23'b0};
    end else if (a_zero || b_zero) begin
      y = {s, 31'b0};
    end else if (e >= 11'sd255) begin
      y = {s, FP32_EMAX, 23'b0};
    end else if (e <= 11'sd0) begin
      y = {s, 31'b0};
    end else begin
      y = {s, e[7:0], mant_r[22:0]};
    end
  end

endmodule
