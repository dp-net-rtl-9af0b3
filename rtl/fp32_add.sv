// fp32_add: combinational IEEE-754 binary32 adder.
//
// Used for the per-cluster sums of vector elements and for the accumulation of
// the K center products. The larger-magnitude operand is kept as is, the
// smaller one is aligned to it with a guard, a round and a sticky bit, the
// significands are added or subtracted, the result is renormalised and then
// rounded to nearest, ties to even.
//
// Choices of this design, not taken from the paper: subnormal inputs are read
// as zero and results that would be subnormal are flushed to a zero of the
// result's sign; an exact cancellation gives +0; any NaN result is the quiet
// NaN 0x7FC00000; infinity minus infinity is NaN. There is no pipeline
// register: y settles in the same cycle as a and b.
module fp32_add
  import dpnet_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_fields_t fa, fb, fx, fy;
  logic         a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  logic         swap, sub;
  logic [7:0]   d;
  logic [26:0]  mx, my, my_sh;
  logic [27:0]  sum;
  logic [26:0]  norm;
  logic signed [9:0] e;
  logic [4:0]   lz;
  logic [23:0]  mant;
  logic [24:0]  mant_r;
  logic         g, rs, up;

  always_comb begin
    fa = a;
    fb = b;
    a_nan  = (fa.exp == FP32_EMAX) && (fa.frac != '0);
    b_nan  = (fb.exp == FP32_EMAX) && (fb.frac != '0);
    a_inf  = (fa.exp == FP32_EMAX) && (fa.frac == '0);
    b_inf  = (fb.exp == FP32_EMAX) && (fb.frac == '0);
    a_zero = (fa.exp == '0);
    b_zero = (fb.exp == '0);

    // Order the operands by magnitude: x is the larger.
    swap = {fb.exp, fb.frac} > {fa.exp, fa.frac};
    fx   = swap ? fb : fa;
    fy   = swap ? fa : fb;
    sub  = fx.sign ^ fy.sign;
    d    = fx.exp - fy.exp;

    // Significands with hidden bit and three low bits (guard, round, sticky).
    mx = {1'b1, fx.frac, 3'b000};
    my = {1'b1, fy.frac, 3'b000};
    if (d >= 8'd27) begin
      my_sh = 27'd1;                              // all of it is sticky
    end else begin
      my_sh = my >> d;
      my_sh[0] = my_sh[0] | ((my & ((27'd1 << d) - 27'd1)) != '0);
    end

    e    = signed'({2'b00, fx.exp});
    sum  = '0;
    norm = '0;
    lz   = '0;
    if (!sub) begin
      sum = {1'b0, mx} + {1'b0, my_sh};
      if (sum[27]) begin
        norm = {sum[27:2], sum[1] | sum[0]};
        e    = e + 10'sd1;
      end else begin
        norm = sum[26:0];
      end
    end else begin
      norm = mx - my_sh;
      // Count leading zeros of the 27-bit difference.
      lz = 5'd27;
      for (int i = 0; i < 27; i++) begin
        if (norm[i]) lz = 5'(26 - i);
      end
      if (norm != '0) begin
        norm = norm << lz;
        e    = e - signed'({5'b0, lz});
      end
    end

    // Round to nearest, ties to even.
    mant   = norm[26:3];
    g      = norm[2];
    rs     = norm[1] | norm[0];
    up     = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + {24'b0, up};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 10'sd1;
    end

    // Pack, with the special cases.
    if (a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (a_zero && b_zero) begin
      y = {fa.sign & fb.sign, 31'b0};
    end else if (a_zero) begin
      y = b;
    end else if (b_zero) begin
      y = a;
    end else if (sub && (norm == '0)) begin
      y = FP32_ZERO;
    end else if (e >= 10'sd255) begin
      y = {fx.sign, FP32_EMAX, 23'b0};
    end else if (e <= 10'sd0) begin
      y = {fx.sign, 31'b0};
    end else begin
      y = {fx.sign, e[7:0], mant_r[22:0]};
    end
  end

endmodule
