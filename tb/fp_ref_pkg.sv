// fp_ref_pkg: reference binary32 arithmetic for the testbenches.
//
// The reference does not share code with the design. Each binary32 operand is
// widened exactly to a double, the operation is done in double precision
// (exact for products of two binary32 numbers, and correctly rounded for
// sums, whose later rounding to binary32 is then also correct because a
// double carries more than twice the binary32 precision), and the double is
// rounded to binary32 here, round to nearest, ties to even, using integer
// operations on its bit pattern. It follows the same conventions as the
// design: subnormals read and written as a zero of the same sign, every NaN
// as 0x7FC00000.
package fp_ref_pkg;

  function automatic real f32_to_real(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) begin
      d = {f[31], 63'b0};
    end else if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, f[22:0], 29'b0};
    end else begin
      d = {f[31], 11'(32'(f[30:23]) - 127 + 1023), f[22:0], 29'b0};
    end
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] d;
    logic        s, g, st, up;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) begin
      return (d[51:0] != '0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'b0};
    end
    if (d[62:52] == 11'd0) return {s, 31'b0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {2'b01, d[51:29]};
    g  = d[28];
    st = d[27:0] != '0;
    up = g & (st | m[0]);
    m  = m + 25'(up);
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'b0};
    if (e <= 0)   return {s, 31'b0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(logic [31:0] a, logic [31:0] b);
    return real_to_f32(f32_to_real(a) + f32_to_real(b));
  endfunction

  function automatic logic [31:0] ref_mul(logic [31:0] a, logic [31:0] b);
    return real_to_f32(f32_to_real(a) * f32_to_real(b));
  endfunction

  // A random normal binary32 number with exponent field in [elo, ehi].
  function automatic logic [31:0] rand_f32(int elo, int ehi);
    logic [7:0] e;
    e = 8'(elo + int'($urandom_range(ehi - elo)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  // Equality that treats +0 and -0 as the same value.
  function automatic bit same(logic [31:0] a, logic [31:0] b);
    return (a == b) || ((a[30:0] == '0) && (b[30:0] == '0));
  endfunction

endpackage
