// ref_pkg: reference models used by the testbenches.
//
// Integer models of the accelerator's approximate arithmetic, written
// independently of the RTL from the formulas it implements (Q.10 fixed point):
//   ref_eu    2^v with v = f*log2(e) ~ f + f/2 - f/16 (floor shifts), 2^frac by
//             8 chords whose k/b are computed here from $pow, then shifted.
//   ref_du    log2(F) ~ (p - 10) + mantissa fraction, difference of two.
//   ref_fcu   s(x) = -2.3125 * (x + 0.046875 x^3) with floor shifts.
// plus real-valued softmax / GELU / exp for tolerance checks.
package ref_pkg;

  function automatic longint fl_shr(longint a, int n);  // floor(a / 2^n)
    return a >>> n;
  endfunction

  function automatic longint lut_k(int i);
    real a, c;
    a = $pow(2.0, i / 8.0);
    c = $pow(2.0, (i + 1) / 8.0);
    return longint'($rtoi(8.0 * (c - a) * 16384.0 + 0.5));
  endfunction

  function automatic longint lut_b(int i);
    real a, c, k;
    a = $pow(2.0, i / 8.0);
    c = $pow(2.0, (i + 1) / 8.0);
    k = 8.0 * (c - a);
    return longint'($rtoi((a - k * i / 8.0) * 16384.0 + 0.5));
  endfunction

  // EU model: result unsigned Q.10, saturating at 32 bits
  function automatic longint ref_eu(longint f, bit ctrl);
    longint v, vi, vf, mant;
    v  = ctrl ? (f + fl_shr(f, 1) - fl_shr(f, 4)) : f;
    vi = fl_shr(v, 10);
    vf = v - vi * 1024;
    mant = fl_shr(lut_k(int'(vf / 128)) * vf, 10) + lut_b(int'(vf / 128));
    if (vi >= 0) begin
      if (vi > 19) return 64'hFFFF_FFFF;
      return ((mant << vi) >> 4) & 64'hFFFF_FFFF;
    end
    if (-vi > 13) return 0;
    return mant >> (4 - vi);
  endfunction

  function automatic longint ref_log2(longint x);
    int p;
    longint m;
    p = 0;
    for (int i = 0; i < 40; i++) if (x >= (longint'(1) << i)) p = i;
    m = ((x * 1024) >> p) % 1024;
    return (p - 10) * 1024 + m;
  endfunction

  function automatic longint ref_du(longint f1, longint f2, bit add_one);
    longint den;
    den = f2 + (add_one ? 1024 : 0);
    if (f1 == 0) return -(longint'(1) << 23);
    if (den == 0) return (longint'(1) << 23) - 1;
    return ref_log2(f1) - ref_log2(den);
  endfunction

  function automatic longint sat(longint v, int bits);
    longint mx, mn;
    mx = (longint'(1) << (bits - 1)) - 1;
    mn = -(longint'(1) << (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  function automatic longint ref_fcu(longint x);
    longint x2, x3, h, s;
    x2 = fl_shr(x * x, 10);
    x3 = fl_shr(x2 * x, 10);
    h  = x + fl_shr(x3, 5) + fl_shr(x3, 6);
    s  = -(2 * h + fl_shr(h, 2) + fl_shr(h, 4));
    return sat(s, 24);
  endfunction

  function automatic longint ref_gelu(longint x);
    longint p, d, q, ax;
    ax = (x < 0) ? -x : x;
    p  = ref_eu(ref_fcu(x), 1'b0);
    d  = ref_du(ax, p, 1'b1);
    q  = ref_eu(d, 1'b0);
    return sat((x < 0) ? -q : q, 16);
  endfunction

  // hardware softmax over n scores (optionally masked), Q.10 in and out
  function automatic void ref_softmax(input longint x [49], input longint msk [49],
                                      input bit men, output longint y [49]);
    longint xm [49];
    longint mx, sum;
    longint e [49];
    mx = -(longint'(1) << 40);
    for (int i = 0; i < 49; i++) begin
      xm[i] = men ? sat(x[i] + msk[i], 16) : x[i];
      if (xm[i] > mx) mx = xm[i];
    end
    sum = 0;
    for (int i = 0; i < 49; i++) begin
      e[i] = ref_eu(xm[i] - mx, 1'b1);
      sum += e[i];
    end
    if (sum > 64'hFFFF_FFFF) sum = 64'hFFFF_FFFF;
    for (int i = 0; i < 49; i++)
      y[i] = sat(ref_eu(ref_du(e[i], sum, 1'b0), 1'b0), 16);
  endfunction

  function automatic real gelu_real(real x);
    return 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
  endfunction

  // round-half-up of a Q.20 accumulator to Q.10 with 16-bit saturation
  function automatic longint ref_round(longint acc);
    return sat(fl_shr(acc + 512, 10), 16);
  endfunction

endpackage
