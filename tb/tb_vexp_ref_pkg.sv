// tb_vexp_ref_pkg: reference functions for the testbenches.
//
// bf16_to_real / real_to_bf16 convert between BF16 bit patterns and reals
// (round to nearest even, no subnormals). exp_ref computes the expected EXP
// result bit-exactly with plain integer arithmetic, written from the
// algorithm rather than from the RTL's structure:
//   x' * 128 = round(significand * round(log2e * 2^14) * 2^(e - 127 - 14)),
//   negated by one's complement for x < 0, plus 127 * 128 (mod 2^15);
//   fraction f replaced by alpha*f*(f+gamma1) (f < 64/128) or by
//   127 - beta*(63 - f[5:0])*(f+gamma2) (f >= 64/128), in units of 2^-7,
//   truncated; specials: |x| >= 64, inf, NaN -> +inf (x > 0) or +0 (x < 0),
//   zero/subnormal -> 1.0.
// rel_err returns |approx - exp(x)| / exp(x).
package tb_vexp_ref_pkg;

  function automatic real bf16_to_real(logic [15:0] b);
    int e;
    real m, v;
    e = int'(b[14:7]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(b[6:0]) / 128.0;
    v = m * (2.0 ** (e - 127));
    return b[15] ? -v : v;
  endfunction

  function automatic logic [15:0] real_to_bf16(real v);
    logic s;
    int   e;
    real  a, m, r;
    longint mi;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a < 1.1754943508222875e-38) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = (a - 1.0) * 128.0;
    mi = longint'($floor(m));
    r  = m - real'(mi);
    if (r > 0.5 || (r == 0.5 && mi[0])) mi++;
    if (mi == 128) begin mi = 0; e++; end
    if (e + 127 >= 255) return {s, 8'hFF, 7'd0};
    if (e + 127 <= 0)   return {s, 15'd0};
    return {s, 8'(e + 127), 7'(mi)};
  endfunction

  function automatic logic [15:0] exp_ref(logic [15:0] x);
    longint sig, l2e, t, v;
    int     e, sh, f, p;
    longint q;
    e = int'(x[14:7]);
    if (e >= 133) return x[15] ? 16'h0000 : 16'h7F80;
    if (e == 0)   return 16'h3F80;
    l2e = 23637;                     // round(1.4426950408889634 * 16384)
    sig = 128 + longint'(x[6:0]);
    t   = sig * l2e * 64;            // weight 2^(6 - 7 - 14)
    sh  = 133 - e;
    q   = t >> sh;                   // x' in units of 2^-14-7 ... keep 14 extra
    v   = ((q >> 14) + ((q >> 13) & 1)) & 32'h7FFF;
    if (x[15]) v = (~v) & 32'h7FFF;
    v   = (v + 127 * 128) & 32'h7FFF;
    f   = int'(v & 127);
    if (f < 64) p = (7 * f * (f + 422)) >> 12;
    else        p = 127 - (((14 * (63 - (f & 63))) * (f + 278)) >> 12);
    p = p & 127;
    return {1'b0, 8'(v >> 7), 7'(p)};
  endfunction

  function automatic real rel_err(logic [15:0] x, logic [15:0] y);
    real r, a;
    r = $exp(bf16_to_real(x));
    a = bf16_to_real(y);
    return (a > r ? a - r : r - a) / r;
  endfunction

endpackage
