// fp32_pkg: IEEE-754 single-precision arithmetic used by the vector FPU.
//
// Pure functions, one result per call, meant to be used combinationally
// inside a lane:
//   fp32_add(a, b)     a + b
//   fp32_mul(a, b)     a * b
//   fp32_div_u(a, n)   a / n for an unsigned 32-bit integer n >= 1 (the
//                      final step of AVERAGE; n is used exactly, not first
//                      rounded to a float)
// All results are rounded to nearest, ties to even. Simplifications chosen
// for this design: subnormal inputs are read as zero and results below the
// normal range are flushed to a signed zero; any NaN input gives the quiet
// NaN 0x7FC00000; overflow gives infinity; inf - inf and 0 * inf give NaN.
// The published design only names a single-precision FPU beside the
// fixed-point ALU; these details are this design's.
package fp32_pkg;

  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  function automatic logic fp_is_nan(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] != 0);
  endfunction

  function automatic logic fp_is_inf(logic [31:0] x);
    return (x[30:23] == 8'hFF) && (x[22:0] == 0);
  endfunction

  // zero or subnormal (read as zero)
  function automatic logic fp_is_zero(logic [31:0] x);
    return x[30:23] == 8'h00;
  endfunction

  // Round and pack. sig holds the hidden bit at [26], the fraction at
  // [25:3], the guard bit at [2] and round/sticky information in [1:0];
  // e is the biased exponent belonging to sig[26].
  function automatic logic [31:0] fp_round_pack(logic s, logic signed [11:0] e,
                                                logic [26:0] sig);
    logic        inc;
    logic [24:0] m;
    logic signed [11:0] ee;
    inc = sig[2] && ((sig[1:0] != 0) || sig[3]);
    m   = {1'b0, sig[26:3]} + 25'(inc);
    ee  = e;
    if (m[24]) begin
      m  = m >> 1;
      ee = ee + 12'sd1;
    end
    if (ee >= 12'sd255) return {s, 8'hFF, 23'd0};
    if (ee <= 12'sd0)   return {s, 31'd0};
    return {s, ee[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] fp32_add(logic [31:0] a, logic [31:0] b);
    logic [31:0] x, y;
    logic [26:0] mx, my, sh, sig;
    logic [27:0] sum;
    logic [7:0]  d;
    logic signed [11:0] e;
    int unsigned lz;
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) && fp_is_inf(b) && (a[31] != b[31])) return FP_QNAN;
    if (fp_is_inf(a)) return a;
    if (fp_is_inf(b)) return b;
    if (fp_is_zero(a) && fp_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp_is_zero(a)) return b;
    if (fp_is_zero(b)) return a;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = x[30:23] - y[30:23];
    if (d >= 8'd27) sh = 27'd1;                       // only sticky left
    else begin
      sh = my >> d;
      if ((my & ((27'd1 << d) - 27'd1)) != 0) sh[0] = 1'b1;
    end
    e = 12'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        sig = sum[27:1];
        sig[0] = sig[0] | sum[0];
        e = e + 12'sd1;
      end else sig = sum[26:0];
    end else begin
      sig = mx - sh;
      if (sig == 0) return 32'd0;
      lz = 0;
      for (int i = 0; i <= 26; i++) if (sig[i]) lz = 26 - i;
      sig = sig << lz;
      e = e - 12'(lz);
    end
    return fp_round_pack(x[31], e, sig);
  endfunction

  function automatic logic [31:0] fp32_mul(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [26:0] sig;
    logic signed [11:0] e;
    s = a[31] ^ b[31];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) || fp_is_inf(b)) begin
      if (fp_is_zero(a) || fp_is_zero(b)) return FP_QNAN;
      return {s, 8'hFF, 23'd0};
    end
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 12'(a[30:23]) + 12'(b[30:23]) - 12'sd127;
    if (p[47]) begin
      sig = {p[47:22], (p[21:0] != 0)};
      e   = e + 12'sd1;
    end else begin
      sig = {p[46:21], (p[20:0] != 0)};
    end
    return fp_round_pack(s, e, sig);
  endfunction

  function automatic logic [31:0] fp32_div_u(logic [31:0] a, logic [31:0] n);
    logic [58:0] num, q, r;
    logic [26:0] sig;
    logic [58:0] t;
    logic signed [11:0] e;
    int unsigned p;
    if (fp_is_nan(a)) return FP_QNAN;
    if (fp_is_inf(a) || fp_is_zero(a)) return {a[31], a[30:23] == 8'hFF ? 8'hFF : 8'h00, 23'd0};
    num = {1'b1, a[22:0], 35'd0};   // q >= 2^26 for any n < 2^32
    q   = num / {27'd0, n};
    r   = num % {27'd0, n};
    p   = 0;
    for (int i = 0; i < 59; i++) if (q[i]) p = i;
    // bring the leading one of q to bit 26; bits shifted out become sticky
    t   = q >> (p - 26);
    sig = t[26:0];
    if (((q & ((59'd1 << (p - 26)) - 59'd1)) != 0) || (r != 0)) sig[0] = 1'b1;
    e   = 12'(a[30:23]) + 12'(p) - 12'sd58;
    return fp_round_pack(a[31], e, sig);
  endfunction

endpackage
