// masq_fp_pkg - single-precision arithmetic functions for the MASQ datapaths.
//
// fp32_add / fp32_mul round to nearest-even, flush denormals to zero and
// saturate to infinity. The vector unit's transcendental functions are built
// from them, using textbook methods chosen for this design (the paper names
// the operations but not how they are computed):
//   fp32_exp   e^x = 2^(x*log2 e); the integer part goes to the exponent, 2^f
//              of the fraction f is a cubic 1 + 0.69583f + 0.22606f^2 +
//              0.07944f^3 in Q16 fixed point (relative error < 7e-4).
//   fp32_recip bit-pattern seed 0x7EF311C3 - x, three Newton steps y(2 - xy).
//   fp32_rsqrt bit-pattern seed 0x5F3759DF - x/2, three Newton steps
//              y(1.5 - 0.5xy^2).
// Everything here is combinational.
package masq_fp_pkg;

  localparam logic [31:0] F_ZERO = 32'h0000_0000;
  localparam logic [31:0] F_ONE  = 32'h3F80_0000;
  localparam logic [31:0] F_TWO  = 32'h4000_0000;
  localparam logic [31:0] F_HALF = 32'h3F00_0000;
  localparam logic [31:0] F_1P5  = 32'h3FC0_0000;
  localparam logic [31:0] F_NINF = 32'hFF80_0000;
  localparam logic [31:0] F_PINF = 32'h7F80_0000;
  localparam logic [31:0] F_LOG2E = 32'h3FB8_AA3B;   // 1.4426950

  function automatic logic [31:0] fp32_add(logic [31:0] a, logic [31:0] b);
    logic        sa, sb, sl, ss;
    logic [7:0]  ea, eb, el, es, d;
    logic [23:0] ma, mb, ml, msm;
    logic [27:0] xl, xs, shifted;
    logic        sticky;
    logic [28:0] sum, n;
    int          lz, e;
    logic [24:0] r;
    sa = a[31]; ea = a[30:23]; ma = (ea == 0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 0) ? 24'd0 : {1'b1, b[22:0]};
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'hFF && eb == 8'hFF && (sa != sb || a[22:0] != 0 || b[22:0] != 0)) return 32'h7FC0_0000;
      if (ea == 8'hFF) return (a[22:0] != 0) ? 32'h7FC0_0000 : a;
      return (b[22:0] != 0) ? 32'h7FC0_0000 : b;
    end
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; msm = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; msm = ma;
    end
    d  = el - es;
    xl = {1'b0, ml, 3'b000};
    xs = {1'b0, msm, 3'b000};
    if (d >= 8'd27) begin
      shifted = '0;
      sticky  = (msm != 0);
    end else begin
      shifted = xs >> d;
      sticky  = ((xs & ((28'd1 << d) - 28'd1)) != 0);
    end
    shifted[0] = shifted[0] | sticky;
    if (sl == ss) sum = {1'b0, xl} + {1'b0, shifted};
    else          sum = {1'b0, xl} - {1'b0, shifted};
    if (sum == 0 || el == 0) return 32'd0;
    lz = 0;
    for (int i = 0; i < 29; i++) if (sum[i]) lz = i;
    e = int'(el) + (lz - 26);
    if (lz > 26) begin
      n = sum >> (lz - 26);
      n[0] = n[0] | sum[0];
    end else n = sum << (26 - lz);
    r = {1'b0, n[26:3]} + {24'd0, n[2] & ((|n[1:0]) | n[3])};
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {sl, 31'd0};
    if (e >= 255) return {sl, 8'hFF, 23'd0};
    return {sl, 8'(e), r[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [24:0] r;
    int          e;
    logic        g, st;
    s = a[31] ^ b[31];
    if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0)) return 32'h7FC0_0000;
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) begin
      if (a[30:23] == 0 || b[30:23] == 0) return 32'h7FC0_0000;
      return {s, 8'hFF, 23'd0};
    end
    if (a[30:23] == 0 || b[30:23] == 0) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      e  = e + 1;
      r  = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
    end else begin
      r  = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
    end
    r = r + {24'd0, g & (st | r[0])};
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e), r[22:0]};
  endfunction

  function automatic logic [31:0] fp32_neg(logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // a > b for non-NaN operands
  function automatic logic fp32_gt(logic [31:0] a, logic [31:0] b);
    logic [31:0] ka, kb;
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    return ka > kb;
  endfunction

  function automatic logic [31:0] fp32_from_uint(logic [31:0] n);
    int lead;
    logic [31:0] m;
    if (n == 0) return 32'd0;
    lead = 0;
    for (int i = 0; i < 32; i++) if (n[i]) lead = i;
    m = n << (31 - lead);                 // leading one at bit 31 (truncates below 24 bits)
    return {1'b0, 8'(lead + 127), m[30:8]};
  endfunction

  function automatic logic [31:0] fp32_exp(logic [31:0] x);
    logic [31:0] t;
    int          te;
    logic [63:0] mag;
    logic signed [63:0] fx;                 // t in Q16
    int          n;
    logic [63:0] f, p;
    t  = fp32_mul(x, F_LOG2E);
    te = int'(t[30:23]) - 127;
    if (t[30:23] == 8'hFF && t[22:0] != 0) return 32'h7FC0_0000;
    if (te >= 7) return t[31] ? F_ZERO : F_PINF;      // |t| >= 128
    if (t[30:23] == 0) return F_ONE;
    mag = {40'd0, 1'b1, t[22:0]};                     // 1.m * 2^23
    if (te >= 7) mag = mag << 0;
    mag = (te + 16 - 23 >= 0) ? (mag << (te + 16 - 23)) : (mag >> (23 - 16 - te));
    fx  = t[31] ? -$signed(mag) : $signed(mag);
    n   = int'(fx >>> 16);                            // floor
    f   = 64'(fx[15:0]);                              // fraction, Q16
    p   = (f * 64'd5206) >> 16;
    p   = (f * (64'd14815 + p)) >> 16;
    p   = (f * (64'd45602 + p)) >> 16;
    p   = 64'd65536 + p;                              // 2^f in Q16, [1, 2)
    if (p >= 64'd131072) p = 64'd131071;
    if (n + 127 <= 0)   return F_ZERO;
    if (n + 127 >= 255) return F_PINF;
    return {1'b0, 8'(n + 127), p[15:0], 7'd0};
  endfunction

  function automatic logic [31:0] fp32_recip(logic [31:0] x);
    logic [31:0] ax, y;
    ax = {1'b0, x[30:0]};
    if (x[30:23] == 0)    return {x[31], 8'hFF, 23'd0};
    if (x[30:23] == 8'hFF) return (x[22:0] != 0) ? 32'h7FC0_0000 : {x[31], 31'd0};
    if (x[30:23] >= 8'd253) return {x[31], 31'd0};   // result would be denormal
    y = 32'h7EF3_11C3 - ax;
    for (int i = 0; i < 3; i++)
      y = fp32_mul(y, fp32_add(F_TWO, fp32_neg(fp32_mul(ax, y))));
    return {x[31], y[30:0]};
  endfunction

  function automatic logic [31:0] fp32_rsqrt(logic [31:0] x);
    logic [31:0] y, hx;
    if (x[31] && x[30:23] != 0) return 32'h7FC0_0000;
    if (x[30:23] == 0)     return F_PINF;
    if (x[30:23] == 8'hFF) return (x[22:0] != 0) ? 32'h7FC0_0000 : F_ZERO;
    y  = 32'h5F37_59DF - {1'b0, x[31:1]};
    hx = fp32_mul(x, F_HALF);
    for (int i = 0; i < 3; i++)
      y = fp32_mul(y, fp32_add(F_1P5, fp32_neg(fp32_mul(hx, fp32_mul(y, y)))));
    return y;
  endfunction

  function automatic logic [31:0] bf16_to_fp32(logic [15:0] h);
    return {h, 16'd0};
  endfunction

endpackage
