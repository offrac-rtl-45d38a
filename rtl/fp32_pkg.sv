// fp32_pkg: single-precision (IEEE 754 binary32) arithmetic used by the
// floating-point accelerators: ordering, subtraction, division, multiplication
// and conversion from fixed point.
//
// How it works: each function is combinational. Operands are unpacked into
// sign, biased exponent and a 24-bit significand with the hidden one.
// fp_add aligns the smaller operand with three extra low bits, adds or
// subtracts the significands, and renormalises with a leading-zero count.
// fp_div divides the significands with a 48-by-24-bit integer division and
// adjusts the exponent by one when the quotient is below one. fp_mul
// multiplies the significands and renormalises by at most one place.
// fp_from_q23 converts a signed fixed-point number with 23 fraction bits to
// binary32 by finding its leading one.
//
// Choices of this design: results are truncated (rounded toward zero), not
// rounded to nearest; subnormal inputs and results are flushed to zero;
// infinities and NaNs are not produced from finite inputs except on
// exponent overflow (to infinity) and are not otherwise handled. A division
// by zero returns zero, which is what min-max normalisation wants for a
// block whose elements are all equal. fp_lt orders finite values and treats
// -0 as below +0.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO    = 32'h0000_0000;
  localparam fp32_t FP_ONE     = 32'h3F80_0000;
  localparam fp32_t FP_POS_INF = 32'h7F80_0000;
  localparam fp32_t FP_NEG_INF = 32'hFF80_0000;
  localparam fp32_t FP_LN2     = 32'h3F31_7218;   // ln 2

  // Total order key: larger key means larger value.
  function automatic logic [31:0] fp_key(input fp32_t a);
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

  function automatic logic fp_lt(input fp32_t a, input fp32_t b);
    return fp_key(a) < fp_key(b);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, sr;
    logic [7:0]  ea, eb, d;
    logic [23:0] ma, mb;
    logic [26:0] xa, xb;
    logic [27:0] sum;
    logic [26:0] dif;
    logic [9:0]  er;
    logic [22:0] mr;
    int unsigned lz;
    fp32_t       t;
    // flush subnormals
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    // order by magnitude: |a| >= |b|
    if (a[30:0] < b[30:0]) begin t = a; a = b; b = t; end
    sa = a[31];  ea = a[30:23];  ma = {1'b1, a[22:0]};
    sb = b[31];  eb = b[30:23];  mb = {1'b1, b[22:0]};
    d  = ea - eb;
    xa = {ma, 3'b000};
    xb = (d > 8'd26) ? 27'd0 : ({mb, 3'b000} >> d);
    sr = sa;
    if (sa == sb) begin
      sum = {1'b0, xa} + {1'b0, xb};
      if (sum[27]) begin
        er = {2'b00, ea} + 10'd1;
        mr = sum[26:4];
      end else begin
        er = {2'b00, ea};
        mr = sum[25:3];
      end
    end else begin
      dif = xa - xb;
      if (dif == 27'd0) return FP_ZERO;
      lz = 0;
      for (int i = 0; i <= 26; i++)
        if (dif[i]) lz = 26 - i;
      dif = dif << lz;
      er  = {2'b00, ea} - 10'(lz);
      mr  = dif[25:3];
    end
    if ($signed(er) <= 0)   return FP_ZERO;
    if (er >= 10'd255)      return {sr, FP_POS_INF[30:0]};
    return {sr, er[7:0], mr};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t fp_div(input fp32_t n, input fp32_t d);
    logic        sr;
    logic [47:0] q;
    logic [9:0]  er;
    logic [22:0] mr;
    if (n[30:23] == 8'd0 || d[30:23] == 8'd0) return FP_ZERO;
    sr = n[31] ^ d[31];
    q  = {1'b1, n[22:0], 24'd0} / {24'd0, 1'b1, d[22:0]};
    er = 10'(n[30:23]) - 10'(d[30:23]) + 10'd127;
    if (q[24]) begin
      mr = q[23:1];
    end else begin
      mr = q[22:0];
      er = er - 10'd1;
    end
    if ($signed(er) <= 0)          return FP_ZERO;
    if ($signed(er) >= 10'sd255)   return {sr, FP_POS_INF[30:0]};
    return {sr, er[7:0], mr};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        sr;
    logic [47:0] m;
    logic [9:0]  er;
    logic [22:0] mr;
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return FP_ZERO;
    sr = a[31] ^ b[31];
    m  = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    er = 10'(a[30:23]) + 10'(b[30:23]) - 10'd127;
    if (m[47]) begin
      mr = m[46:24];
      er = er + 10'd1;
    end else begin
      mr = m[45:23];
    end
    if ($signed(er) <= 0)          return FP_ZERO;
    if ($signed(er) >= 10'sd255)   return {sr, FP_POS_INF[30:0]};
    return {sr, er[7:0], mr};
  endfunction

  function automatic fp32_t fp_from_q23(input logic signed [31:0] v);
    logic [31:0] a;
    int unsigned k;
    logic [31:0] sh;
    if (v == 0) return FP_ZERO;
    a = v[31] ? 32'(-v) : 32'(v);
    k = 0;
    for (int i = 0; i < 32; i++)
      if (a[i]) k = i;
    sh = a << (31 - k);
    return {v[31], 8'(k + 127 - 23), sh[30:8]};
  endfunction

endpackage
