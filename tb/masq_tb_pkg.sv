// masq_tb_pkg - reference arithmetic for the MASQ testbenches.
//
// Converts between IEEE-style bit patterns with an 8-bit exponent (FP32, BF16)
// and SystemVerilog reals, rounding to nearest-even, so that testbenches can
// compute expected results independently of the RTL. Denormals are flushed to
// zero and overflow saturates to infinity, matching the RTL's policy.
package masq_tb_pkg;

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // bits with 8-bit exponent and FB fraction bits -> real
  function automatic real fp_to_real(logic [31:0] bits, int fb);
    logic s; int e; real m;
    s = bits[fb+8];
    e = int'((bits >> fb) & 32'hFF);
    if (e == 0) return 0.0;
    m = 1.0 + real'(bits & ((32'd1 << fb) - 1)) / pow2(fb);
    return (s ? -m : m) * pow2(e - 127);
  endfunction

  function automatic real f32_to_real(logic [31:0] b); return fp_to_real(b, 23); endfunction
  function automatic real bf16_to_real(logic [15:0] b); return fp_to_real({16'd0, b}, 7); endfunction

  // real -> bits with FB fraction bits, nearest-even
  function automatic logic [31:0] real_to_fp(real x, int fb);
    logic s; int e; real m, fl, fr; longint mi;
    if (x == 0.0) return 0;
    s = (x < 0.0);
    if (s) x = -x;
    e = 0;
    while (x >= 2.0) begin x = x / 2.0; e++; end
    while (x < 1.0)  begin x = x * 2.0; e--; end
    m  = x * pow2(fb);
    mi = longint'($floor(m));
    fr = m - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi >= (longint'(1) << (fb + 1))) begin mi = mi >> 1; e++; end
    if (e + 127 <= 0)   return 32'(s) << (fb + 8);
    if (e + 127 >= 255) return (32'(s) << (fb + 8)) | (32'hFF << fb);
    return (32'(s) << (fb + 8)) | (32'(e + 127) << fb) | 32'(mi & ((longint'(1) << fb) - 1));
  endfunction

  function automatic logic [31:0] real_to_f32(real x); return real_to_fp(x, 23); endfunction
  function automatic logic [15:0] real_to_bf16(real x); return 16'(real_to_fp(x, 7)); endfunction

endpackage
