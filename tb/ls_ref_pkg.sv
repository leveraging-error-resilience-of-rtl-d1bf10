// ls_ref_pkg: bit-true reference model of the LS core arithmetic, written independently of the
// RTL for the testbenches. Values are plain longints; every quantisation is spelled out as a
// rounded division by a power of two (products), a floor division (dropped LSBs), a clamp to a
// word length, or a wrap to the 28-bit accumulator. Also holds small helpers shared by the testbenches.
package ls_ref_pkg;

  // The numeric formats the RTL documents (word lengths and binary points).
  localparam int G_FR = 14, M_FR = 16, V_FR = 12;
  localparam int ZE_W = 23, ZF_W = 24, ZE_FR = 18, ZF_FR = 19;   // e_mac, f_mac
  localparam int SE_W = 21, SF_W = 20;                           // e_sac, f_sac
  localparam int ACC_W = 28, MAC_FR = 15, SAC_FR = 16;
  localparam int GAIN_W = 18;
  localparam int DIV_LAT = 43;

  // Truncation sets: {h, t, e_sac, f_sac, e_mac, f_mac}
  typedef struct { int h, t, es, fs, em, fm; } trunc_t;
  localparam trunc_t TR_ACCURATE = '{0, 0, 0, 0, 0, 0};
  localparam trunc_t TR_APPROX   = '{0, 0, 8, 8, 8, 12};

  function automatic longint fl(longint x, int n);   // floor(x / 2^n), n may be negative
    if (n >= 0) return x >>> n;
    return x * (64'sd1 <<< (-n));
  endfunction

  function automatic longint rq(longint x, int n);   // round(x / 2^n), halves up; n may be negative
    if (n > 0) return fl(x + (64'sd1 <<< (n - 1)), n);
    return fl(x, n);
  endfunction

  function automatic longint clamp(longint x, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    if (x > hi) return hi;
    if (x < -hi - 1) return -hi - 1;
    return x;
  endfunction

  function automatic longint wrap(longint x, int w);  // two's-complement wrap to w bits
    longint m = 64'sd1 <<< w;
    longint r = x & (m - 1);
    if (r >= (m >>> 1)) r -= m;
    return r;
  endfunction

  typedef struct { longint em, fm, es, fs; } z_t;

  function automatic z_t pe(longint a, longint b, longint c, longint d);
    z_t z;
    longint re, im;
    re = clamp(clamp(rq(a * c, G_FR + M_FR - ZE_FR), ACC_W) - clamp(rq(b * d, G_FR + M_FR - ZE_FR), ACC_W), ZE_W);
    im = clamp(clamp(rq(a * d, G_FR + M_FR - ZF_FR), ACC_W) + clamp(rq(b * c, G_FR + M_FR - ZF_FR), ACC_W), ZF_W);
    z.em = re;
    z.fm = im;
    z.es = fl(re, ZE_W - SE_W);
    z.fs = fl(im, ZF_W - SF_W);
    return z;
  endfunction

  // One element's contribution to mac_real / mac_imag.
  function automatic void mac_term(z_t z, longint h, longint t, trunc_t tr,
                                   output longint tre, output longint tim);
    longint e = fl(z.em, tr.em), f = fl(z.fm, tr.fm);
    longint hh = fl(h, tr.h), tt = fl(t, tr.t);
    int fe = ZE_FR - tr.em, ff = ZF_FR - tr.fm, fh = V_FR - tr.h, ft = V_FR - tr.t;
    tre = wrap(clamp(rq(e * hh, fe + fh - MAC_FR), ACC_W) - clamp(rq(f * tt, ff + ft - MAC_FR), ACC_W), ACC_W);
    tim = wrap(clamp(rq(e * tt, fe + ft - MAC_FR), ACC_W) + clamp(rq(f * hh, ff + fh - MAC_FR), ACC_W), ACC_W);
  endfunction

  function automatic longint sac_term(z_t z, trunc_t tr);
    longint e = fl(z.es, tr.es), f = fl(z.fs, tr.fs);
    int fe = (ZE_FR - 2) - tr.es, ff = (ZF_FR - 4) - tr.fs;
    return wrap(clamp(rq(e * e, 2 * fe - SAC_FR), ACC_W) + clamp(rq(f * f, 2 * ff - SAC_FR), ACC_W), ACC_W);
  endfunction

  // Quotient num * 2^(G_FR + SAC_FR - MAC_FR) / den, truncated toward zero, clamped to a gain.
  function automatic longint div(longint num, longint den);
    longint mag, q, lim;
    lim = (64'sd1 <<< (GAIN_W - 1)) - 1;
    mag = (num < 0) ? -num : num;
    if (den <= 0) q = lim;
    else begin
      q = (mag * (64'sd1 <<< (G_FR + SAC_FR - MAC_FR)) + den / 2) / den;   // rounded to nearest
      if (q > lim) q = lim;
    end
    return (num < 0) ? -q : q;
  endfunction

  // A column of n elements: the gain the core must return.
  function automatic void column(int n, longint a[], longint b[], longint c[], longint d[],
                                 longint h[], longint t[], trunc_t tr,
                                 output longint gre, output longint gim);
    longint mr = 0, mi = 0, s = 0, tre, tim;
    z_t z;
    for (int k = 0; k < n; k++) begin
      z = pe(a[k], b[k], c[k], d[k]);
      mac_term(z, h[k], t[k], tr, tre, tim);
      mr = wrap(mr + tre, ACC_W);
      mi = wrap(mi + tim, ACC_W);
      s  = wrap(s + sac_term(z, tr), ACC_W);
    end
    gre = div(mr, s);
    gim = div(mi, s);
  endfunction

  // Random signed value of w bits, limited to +-2^(w-1-headroom).
  function automatic longint rnd(int w, int headroom);
    longint span = 64'sd1 <<< (w - 1 - headroom);
    longint u = longint'({$urandom, $urandom}) & 64'h7fff_ffff_ffff_ffff;
    return (u % (2 * span)) - span;
  endfunction

endpackage
