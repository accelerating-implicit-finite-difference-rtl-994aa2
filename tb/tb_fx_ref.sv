// tb_fx_ref: reference arithmetic for the testbenches.
//
// Models of the solver's fixed-point operations written with 64-bit
// integer arithmetic (the divider by the '/' operator, not by shifting and
// subtracting), a bit-exact model of the whole solver built from them, and
// a double-precision Thomas solver for judging accuracy.  Values are
// carried as longint holding a W-bit two's complement number.
package tb_fx_ref;

  function automatic longint fx_max(int w);
    return (longint'(1) << (w - 1)) - 1;
  endfunction

  function automatic longint sext(longint v, int w);
    longint m;
    m = (longint'(1) << w) - 1;
    v = v & m;
    if (v[w-1]) v = v - (longint'(1) << w);
    return v;
  endfunction

  function automatic longint clamp(longint v, longint lo, longint hi);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // truncating, symmetric-saturating divide
  function automatic longint ref_div(longint n, longint d, int w, int f);
    longint mx, an, ad, q;
    mx = fx_max(w);
    an = (n < 0) ? -n : n;  if (an > mx) an = mx;
    ad = (d < 0) ? -d : d;  if (ad > mx) ad = mx;
    if (ad == 0) q = mx;
    else         q = (an << f) / ad;
    if (q > mx) q = mx;
    return ((n < 0) != (d < 0)) ? -q : q;
  endfunction

  // product shifted down by f (floor), saturating
  function automatic longint ref_mul(longint a, longint b, int w, int f);
    longint p;
    p = a * b;
    p = p >>> f;
    return clamp(p, -fx_max(w) - 1, fx_max(w));
  endfunction

  function automatic longint ref_sub(longint a, longint b, int w);
    return clamp(a - b, -fx_max(w) - 1, fx_max(w));
  endfunction

  // Bit-exact solver model: a,b,c,y in, x out, n rows.
  function automatic void ref_thomas(input longint a[], input longint b[], input longint c[],
                                     input longint y[], input int w, input int f,
                                     output longint x[]);
    longint d[], z[], cd[], zd[], l, one;
    int n;
    n = a.size();
    d = new[n]; z = new[n]; cd = new[n]; zd = new[n]; x = new[n];
    one = longint'(1) << f;
    for (int i = 0; i < n; i++) begin
      if (i == 0) l = ref_div(0, one, w, f);
      else        l = ref_div(a[i], d[i-1], w, f);
      d[i] = ref_sub(b[i], ref_mul(l, (i == 0) ? 0 : c[i-1], w, f), w);
      z[i] = ref_sub(y[i], ref_mul(l, (i == 0) ? 0 : z[i-1], w, f), w);
      cd[i] = ref_div(c[i], d[i], w, f);
      zd[i] = ref_div(z[i], d[i], w, f);
    end
    for (int i = n - 1; i >= 0; i--) begin
      x[i] = ref_sub(zd[i], ref_mul(cd[i], (i == n - 1) ? 0 : x[i+1], w, f), w);
    end
  endfunction

  // Double precision Thomas algorithm.
  function automatic void real_thomas(input real a[], input real b[], input real c[],
                                      input real y[], output real x[]);
    real d[], z[], l;
    int n;
    n = a.size();
    d = new[n]; z = new[n]; x = new[n];
    d[0] = b[0]; z[0] = y[0];
    for (int i = 1; i < n; i++) begin
      l = a[i] / d[i-1];
      d[i] = b[i] - l * c[i-1];
      z[i] = y[i] - l * z[i-1];
    end
    x[n-1] = z[n-1] / d[n-1];
    for (int i = n - 2; i >= 0; i--) x[i] = (z[i] - c[i] * x[i+1]) / d[i];
  endfunction

  function automatic longint to_fx(real v, int f);
    real s;
    s = v * (2.0 ** f);
    return (s >= 0.0) ? longint'($floor(s + 0.5)) : -longint'($floor(-s + 0.5));
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real from_fx(longint v, int f);
    return real'(v) / (2.0 ** f);
  endfunction

  // Nearest single-precision bit pattern of a real (ties to even);
  // normal range only, which is all the testbenches use.
  function automatic logic [31:0] real_to_flt(real v);
    real    a, m, fr;
    longint k;
    int     e;
    bit     s;
    if (v == 0.0) return 32'h0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    m  = a * (2.0 ** (23 - e));
    k  = longint'($floor(m));
    fr = m - real'(k);
    if (fr > 0.5 || (fr == 0.5 && k[0])) k++;
    if (k == (longint'(1) << 24)) begin k = k >> 1; e++; end
    return {s, 8'(e + 127), k[22:0]};
  endfunction

  function automatic real flt_to_real(logic [31:0] f);
    real v;
    int  e;
    if (f[30:23] == 0) return 0.0;
    e = int'(f[30:23]) - 127;
    v = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** e);
    return f[31] ? -v : v;
  endfunction

  // Float to Q(w-f).f: round half away from zero, saturate.
  function automatic longint flt_to_fx(logic [31:0] f, int w, int fb);
    longint r, mx;
    real    v;
    mx = fx_max(w);
    if (f[30:23] == 8'hFF) return f[31] ? -mx : mx;
    v = flt_to_real(f);
    v = (v < 0.0) ? -v : v;
    if (v * (2.0 ** fb) >= real'(mx)) r = mx;
    else r = longint'($floor(v * (2.0 ** fb) + 0.5));
    return f[31] ? -r : r;
  endfunction

  function automatic logic [31:0] fx_to_flt(longint v, int fb);
    return real_to_flt(real'(v) / (2.0 ** fb));
  endfunction

  // Black-Scholes implicit step coefficients for grid row n of N
  // (interest r, volatility sigma, time step dt), in the usual form with
  // the factor 1/2 on the diffusion and drift terms:
  //   a_n = -(n^2 s^2 - n r) dt / 2,  b_n = 1 + (n^2 s^2 + r) dt,
  //   c_n = -(n^2 s^2 + n r) dt / 2,  and at n = N a linear boundary
  //   a_N = N r dt / 2 (as printed, halved),  b_N = 1 - (N r - r) dt / 2.
  function automatic void bs_row(input int n, input int nn, input real r, input real sigma,
                                 input real dt, output real a, output real b, output real c);
    real n2s2;
    n2s2 = real'(n) * real'(n) * sigma * sigma;
    if (n == nn) begin
      a = 0.5 * real'(nn) * r * dt;
      b = 1.0 - 0.5 * (real'(nn) * r - r) * dt;
      c = 0.0;
    end else begin
      a = -0.5 * (n2s2 - real'(n) * r) * dt;
      b = 1.0 + (n2s2 + r) * dt;
      c = -0.5 * (n2s2 + real'(n) * r) * dt;
    end
  endfunction

endpackage
