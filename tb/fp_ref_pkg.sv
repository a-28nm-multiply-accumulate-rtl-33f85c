// fp_ref_pkg: reference floating-point arithmetic for the testbenches.
//
// Works on real numbers instead of bit manipulation, so that it is an
// independent model of the RTL operators: a value is decoded to a real, the
// exact result is formed in double precision, and to_fp() rounds it to a
// {sign, e, m} format with round-to-nearest-even, exponent field 0 meaning
// zero, flush-to-zero below the smallest normal and saturation above the
// largest exponent. Formats are passed as (e, m, bias) arguments; encodings
// are returned right-aligned in a 32-bit vector.
package fp_ref_pkg;

  function automatic real pow2(int n);
    real r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real to_real(logic [31:0] x, int e, int m, int bias);
    int  ef;
    real f;
    ef = int'((x >> m) & ((32'd1 << e) - 1));
    if (ef == 0) return 0.0;
    f = 1.0 + real'(x & ((32'd1 << m) - 1)) / pow2(m);
    f = f * pow2(ef - bias);
    return x[e+m] ? -f : f;
  endfunction

  function automatic logic [31:0] to_fp(real v, int e, int m, int bias);
    logic     s;
    real      a, scaled, frac;
    int       ex, ef;
    longint   r;
    if (v == 0.0) return '0;
    s = v < 0.0;
    a = s ? -v : v;
    ex = 0;
    while (a >= 2.0) begin a = a / 2.0; ex++; end
    while (a < 1.0)  begin a = a * 2.0; ex--; end
    scaled = a * pow2(m);                 // in [2^m, 2^(m+1))
    r      = longint'($floor(scaled));
    frac   = scaled - real'(r);
    if (frac > 0.5 || (frac == 0.5 && r[0])) r++;
    if (r == (longint'(1) << (m + 1))) begin r = longint'(1) << m; ex++; end
    ef = ex + bias;
    if (ef <= 0) return '0;
    if (ef > (1 << e) - 1)
      return (32'(s) << (e + m)) | (((32'd1 << e) - 1) << m) | ((32'd1 << m) - 1);
    return (32'(s) << (e + m)) | (32'(ef) << m) | 32'(r - (longint'(1) << m));
  endfunction

  // Format shorthands used by the compressor.
  function automatic real fp12_r(logic [31:0] x); return to_real(x, 5, 6, 31);  endfunction
  function automatic real fp16_r(logic [31:0] x); return to_real(x, 5, 10, 15); endfunction
  function automatic real fp17_r(logic [31:0] x); return to_real(x, 6, 10, 31); endfunction
  function automatic logic [15:0] r_fp16(real v); return 16'(to_fp(v, 5, 10, 15)); endfunction
  function automatic logic [16:0] r_fp17(real v); return 17'(to_fp(v, 6, 10, 31)); endfunction

  // Reference operators with the hardware's rounding points.
  function automatic logic [15:0] ref_mult(int unsigned pix, logic [11:0] w);
    return r_fp16(real'(pix) * fp12_r(32'(w)));
  endfunction
  function automatic logic [15:0] ref_add16(logic [15:0] a, logic [15:0] b);
    return r_fp16(fp16_r(32'(a)) + fp16_r(32'(b)));
  endfunction
  function automatic logic [16:0] ref_add17(logic [16:0] a, logic [16:0] b);
    return r_fp17(fp17_r(32'(a)) + fp17_r(32'(b)));
  endfunction

  // Random FP12 weight with magnitude in [2^-lo_exp, 2): random sign and mantissa.
  function automatic logic [11:0] rand_w(int lo_exp);
    int ef;
    ef = 31 - int'($urandom_range(lo_exp, 0));
    return {1'($urandom), 5'(ef), 6'($urandom)};
  endfunction

endpackage
