// Reference model of posit<16,2> arithmetic for the testbenches.
//
// Written directly from the posit definition, independently of the RTL:
//   ref_decode   - negate a negative posit, count the regime run, read the
//                  exponent (missing bits are zero) and the fraction, aligned
//                  to 11 bits; returns scale = 4k + e.
//   ref_encode   - build the unbounded bit string regime|exponent|fraction,
//                  round it to 15 bits to nearest, ties to even (or truncate
//                  when rnd = 0), saturate to minpos/maxpos, and 2's
//                  complement it for a negative sign.
//   ref_ec       - error-correction entry, evaluated with real arithmetic.
//   ref_recip    - approximate reciprocal the unit should form for b:
//                  scale -s-1 and fraction (1 - f) - EC, or the exact
//                  reciprocal when f = 0.
//   ref_mul_unit - product as the unit computes it (13 kept product bits).
//   ref_mul_exact- correctly rounded product, for statistics.
//   ref_excep    - exception code from the operand classes and mode.
//   ref_to_real  - value of a posit as a real.
package posit_ref_pkg;

  typedef struct {
    bit zero;
    bit nar;
    bit sgn;
    int scale;
    int frac;     // 11-bit fraction field, left aligned
  } dec_t;

  function automatic dec_t ref_decode(logic [15:0] p);
    dec_t d;
    logic [15:0] x;
    int i, run, k, nb, e, fb;
    longint rem;
    bit r0;
    d.zero = (p == 16'h0000);
    d.nar  = (p == 16'h8000);
    d.sgn  = p[15];
    x = p[15] ? -p : p;
    r0 = x[14];
    run = 0;
    i = 14;
    while (i >= 0 && x[i] == r0) begin
      run++;
      i--;
    end
    k = r0 ? run - 1 : -run;
    // i is the terminator index (or -1); the bits below it remain
    nb  = (i > 0) ? i : 0;
    rem = (nb > 0) ? (longint'(x) & ((longint'(1) << nb) - 1)) : 0;
    if (nb >= 2) e = int'(rem >> (nb - 2));
    else         e = int'(rem << (2 - nb));
    fb = nb - 2;
    if (fb > 0) d.frac = int'((rem & ((longint'(1) << fb) - 1)) << (11 - fb));
    else        d.frac = 0;
    d.scale = 4 * k + e;
    return d;
  endfunction

  // value = 2^scale * (1 + fracv / 2^fbits), rounded into a posit
  function automatic logic [15:0] ref_encode(bit sgn, int scale, longint fracv, int fbits, bit sticky_in, bit rnd = 1);
    int k, e, rlen, len, drop;
    longint rbits, str, body;
    bit guard, sticky;
    logic [15:0] res;
    if (scale >= 56)       body = 64'h7FFF;
    else if (scale < -56)  body = 64'h0001;
    else begin
      k = (scale >= 0) ? scale / 4 : -((-scale + 3) / 4);
      e = scale - 4 * k;
      if (k >= 0) begin
        rlen  = k + 2;
        rbits = ((longint'(1) << (k + 1)) - 1) << 1;
      end else begin
        rlen  = -k + 1;
        rbits = 1;
      end
      str = (rbits << (2 + fbits)) | (longint'(e) << fbits) | fracv;
      len = rlen + 2 + fbits;
      if (len <= 15) body = str << (15 - len);
      else begin
        drop   = len - 15;
        body   = str >> drop;
        guard  = ((str >> (drop - 1)) & 1) != 0;
        sticky = ((str & ((longint'(1) << (drop - 1)) - 1)) != 0) || sticky_in;
        if (rnd && guard && (sticky || (body & 1) != 0)) body++;
      end
    end
    res = 16'(body);
    return sgn ? -res : res;
  endfunction

  function automatic int ref_ec(int idx, int aw);
    real f, v;
    f = real'(idx) / real'(1 << aw);
    v = f * (1.0 - f) / (1.0 + f) * 2048.0;
    return int'($floor(v + 0.5));
  endfunction

  // reciprocal of a nonzero, non-NaR b: scale and 11-bit fraction
  function automatic void ref_recip(logic [15:0] b, int aw, output int scale, output int frac, output bit clamped);
    dec_t d;
    int t;
    d = ref_decode(b);
    clamped = 0;
    if (d.frac == 0) begin
      scale = -d.scale;
      frac  = 0;
    end else begin
      scale = -d.scale - 1;
      t = 2048 - d.frac - ref_ec(d.frac >> (11 - aw), aw);
      if (t < 0) begin
        t = 0;
        clamped = 1;
      end
      frac = t;
    end
  endfunction

  function automatic logic [15:0] ref_mul_unit(bit sgn, int sa, int fa, int sb, int fb, bit rnd = 1);
    longint p, p13;
    p   = longint'(2048 + longint'(fa)) * longint'(2048 + longint'(fb));
    p13 = p >> 11;
    if (p13 >= 4096) return ref_encode(sgn, sa + sb + 1, p13 & 64'hFFF, 12, 0, rnd);
    else             return ref_encode(sgn, sa + sb, p13 & 64'h7FF, 11, 0, rnd);
  endfunction

  function automatic logic [15:0] ref_mul_exact(bit sgn, int sa, int fa, int sb, int fb);
    longint p;
    p = longint'(2048 + longint'(fa)) * longint'(2048 + longint'(fb));
    if (p >= (longint'(1) << 23)) return ref_encode(sgn, sa + sb + 1, p & 64'h7FFFFF, 23, 0);
    else                          return ref_encode(sgn, sa + sb, p & 64'h3FFFFF, 22, 0);
  endfunction

  // 0 normal, 1 zero, 3 NaR
  function automatic int ref_excep(bit div, logic [15:0] a, logic [15:0] b);
    bit az, an, bz, bn;
    az = (a == 16'h0000);
    an = (a == 16'h8000);
    bz = (b == 16'h0000);
    bn = (b == 16'h8000);
    if (!(az || an || bz || bn)) return 0;
    if (an) return 3;
    if (!div) return bn ? 3 : 1;
    if (bn) return az ? 3 : 1;     // a / NaR: zero, as in the excep table
    if (bz) return 3;
    return 1;
  endfunction

  function automatic real ref_to_real(logic [15:0] p);
    dec_t d;
    real v;
    d = ref_decode(p);
    if (d.zero || d.nar) return 0.0;
    v = (1.0 + real'(d.frac) / 2048.0) * (2.0 ** d.scale);
    return d.sgn ? -v : v;
  endfunction
endpackage
