// fp32_pkg: IEEE-754 single-precision arithmetic used by every stage of the
// ERI kernel.
//
// The kernel computes in single precision throughout, as the Rys quadrature
// is numerically stable enough for it. These functions are combinational;
// each call elaborates into one floating-point operator, the way hardened
// DSP floating-point blocks would be used on the FPGA.
//
// Conventions (this design's own choices):
//   * rounding is round-to-nearest-even for add, multiply and divide;
//   * subnormal inputs are read as zero and subnormal results flush to zero;
//   * an exponent field of 255 is treated as infinity (NaN is not produced
//     on purpose and not propagated as such);
//   * fp_to_int rounds half away from zero, i.e. the Fortran ANINT used by
//     the ERI compression, and saturates at +/-sat.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_INF  = 32'h7F80_0000;

  function automatic logic fp_is_zero(input fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  // Pack sign, biased exponent and a 24-bit significand with guard and
  // sticky information, rounding to nearest even.
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [23:0] m,
                                    input logic g, input logic st);
    logic [24:0] mr;
    int          er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255) return {s, 8'hFF, 23'd0};
    if (er <= 0)   return {s, 31'd0};
    return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    else       return fp_pack(s, e,     p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    int          d, e, lz;
    logic [27:0] mx, my, sum;
    logic        sticky;
    if (fp_is_zero(a)) return fp_is_zero(b) ? FP_ZERO : b;
    if (fp_is_zero(b)) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    // x gets the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    if (d > 26) begin
      my = 28'd1;                       // only the sticky bit survives
    end else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && my[i]) sticky = 1'b1;
      my = (my >> d) | {27'd0, sticky};
    end
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = (sum >> 1) | {27'd0, sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[26:0] >> i != 0) break;
        lz = lz + 1;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp_pack(x[31], e, sum[26:3], sum[2], |sum[1:0]);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic        s;
    logic [49:0] num, q, r;
    int          e;
    s = a[31] ^ b[31];
    if (fp_is_zero(b) || a[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    if (fp_is_zero(a) || b[30:23] == 8'hFF) return {s, 31'd0};
    num = {1'b1, a[22:0], 26'd0};
    q   = num / {26'd0, 1'b1, b[22:0]};
    r   = num % {26'd0, 1'b1, b[22:0]};
    e   = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[26]) return fp_pack(s, e,     q[26:3], q[2], (|q[1:0]) || (r != 0));
    else       return fp_pack(s, e - 1, q[25:2], q[1], q[0] || (r != 0));
  endfunction

  // |a| > |b|
  function automatic logic fp_abs_gt(input fp32_t a, input fp32_t b);
    return a[30:0] > b[30:0];
  endfunction

  function automatic fp32_t fp_abs(input fp32_t a);
    return {1'b0, a[30:0]};
  endfunction

  // Small non-negative integer to fp32 (used for elaboration-time constants).
  function automatic fp32_t fp_from_uint(input int unsigned n);
    int          p;
    logic [31:0] v;
    if (n == 0) return FP_ZERO;
    v = n;
    p = 31;
    while (!v[31]) begin
      v = v << 1;
      p = p - 1;
    end
    // v[31] is the leading one; keep 23 fraction bits (exact for n < 2**24)
    return {1'b0, 8'(p + 127), v[30:8]};
  endfunction

  // Round half away from zero to a signed integer, saturating at +/-sat.
  function automatic int fp_to_int(input fp32_t a, input int sat);
    int          e;
    logic [63:0] t;
    int          mag;
    if (a[30:23] == 8'd0) return 0;
    e = int'(a[30:23]) - 127;
    if (e < -1) return 0;
    if (e >= 30) return a[31] ? -sat : sat;
    // t = floor(2*|a|)
    if (e >= 22) t = {40'd0, 1'b1, a[22:0]} << (e - 22);
    else         t = {40'd0, 1'b1, a[22:0]} >> (22 - e);
    mag = int'((t + 64'd1) >> 1);
    if (mag > sat) mag = sat;
    return a[31] ? -mag : mag;
  endfunction

endpackage
