// fp_ref_pkg: reference arithmetic for the testbenches, written independently
// of the RTL. Floating-point values of any format with EXP_W <= 11 and
// MAN_W <= 23 are carried as bit patterns in a longint; each operation is done
// exactly (or nearly so) in double precision and then rounded to the target
// format, to nearest with ties to even, with the RTL's conventions: exponent
// field 0 reads as zero, results below the smallest normal become +0, overflow
// becomes infinity, every zero is +0.
// Also here: the Log2Exp / ExpMul reference and a bit-exact model of one query
// lane of the FlashAttention-2 kernel, evaluated in the RTL's order of
// operations (adder tree for the dot product, extended vectors o* and v*).
package fp_ref_pkg;

  typedef longint unsigned fbits_t;
  typedef fbits_t          fvec_t[];

  function automatic real to_real(fbits_t b, int ew, int mw);
    longint e, m, bias;
    logic [63:0] d;
    bias = (64'd1 << (ew - 1)) - 1;
    e    = longint'((b >> mw) & ((64'd1 << ew) - 1));
    m    = longint'(b & ((64'd1 << mw) - 1));
    if (e == 0) return 0.0;
    d = {b[ew+mw], 11'(e - bias + 1023), 52'(m) << (52 - mw)};
    return $bitstoreal(d);
  endfunction

  function automatic fbits_t from_real(real r, int ew, int mw);
    logic [63:0] d;
    longint e, bias, sh;
    longint unsigned md, kept, rem, half;
    if (r == 0.0) return 0;
    d    = $realtobits(r);
    bias = (64'd1 << (ew - 1)) - 1;
    e    = longint'(d[62:52]) - 1023 + bias;
    md   = 64'(d[51:0]);
    sh   = 52 - mw;
    kept = md >> sh;
    rem  = md & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept++;
    if (kept == (64'd1 << mw)) begin
      kept = 0;
      e++;
    end
    if (e <= 0) return 0;
    if (e >= (64'd1 << ew) - 1)
      return (fbits_t'(d[63]) << (ew + mw)) | (((64'd1 << ew) - 1) << mw);
    return (fbits_t'(d[63]) << (ew + mw)) | (fbits_t'(e) << mw) | kept;
  endfunction

  function automatic fbits_t neg(fbits_t a, int ew, int mw);
    return a ^ (64'd1 << (ew + mw));
  endfunction

  function automatic fbits_t mul(fbits_t a, fbits_t b, int ew, int mw);
    return from_real(to_real(a, ew, mw) * to_real(b, ew, mw), ew, mw);
  endfunction

  function automatic fbits_t add(fbits_t a, fbits_t b, int ew, int mw);
    return from_real(to_real(a, ew, mw) + to_real(b, ew, mw), ew, mw);
  endfunction

  function automatic fbits_t div(fbits_t a, fbits_t b, int ew, int mw);
    if (to_real(b, ew, mw) == 0.0)
      return (fbits_t'(a[ew+mw] ^ b[ew+mw]) << (ew + mw)) | (((64'd1 << ew) - 1) << mw);
    return from_real(to_real(a, ew, mw) / to_real(b, ew, mw), ew, mw);
  endfunction

  // max by value; the first operand wins a tie
  function automatic fbits_t fmax(fbits_t a, fbits_t b, int ew, int mw);
    return (to_real(b, ew, mw) > to_real(a, ew, mw)) ? b : a;
  endfunction

  // Log2Exp: L = round(-Xf * 1.4375) with Xf = Fixed(Clip(x, -15, 0)) in Q6.10
  function automatic int log2exp(fbits_t x, int ew, int mw);
    real  xr, a;
    int   mag, xf, y;
    longint e;
    e  = longint'((x >> mw) & ((64'd1 << ew) - 1));
    xr = to_real(x, ew, mw);
    if (xr >= 0.0)                   mag = 0;
    else if (e == (64'd1 << ew) - 1) mag = 15 * 1024;
    else begin
      a = -xr * 1024.0;
      if (a >= 15.0 * 1024.0) mag = 15 * 1024;
      else                    mag = int'($floor(a));
    end
    xf = -mag;
    y  = xf + (xf >>> 1) - (xf >>> 4);
    return (-y + 512) >>> 10;
  endfunction

  // ExpMul on one element: v * 2^-L, flushed to zero on underflow
  function automatic fbits_t expmul(int l, fbits_t v, int ew, int mw);
    return from_real(to_real(v, ew, mw) * (2.0 ** (-l)), ew, mw);
  endfunction

  function automatic fbits_t one(int ew, int mw);
    return fbits_t'((64'd1 << (ew - 1)) - 1) << mw;
  endfunction

  // dot product with the RTL's adder-tree order (d a power of two)
  function automatic fbits_t dot(fvec_t q, fvec_t k, int d, int ew, int mw);
    fvec_t t;
    int n;
    t = new[d];
    for (int j = 0; j < d; j++) t[j] = mul(q[j], k[j], ew, mw);
    n = d;
    while (n > 1) begin
      for (int j = 0; j < n / 2; j++) t[j] = add(t[2*j], t[2*j+1], ew, mw);
      n = n / 2;
    end
    return t[0];
  endfunction

  // One query through Alg. "FlashAttention-2 with ExpMul": keys/values are the
  // rows of kk/vv (n rows of d floats, flattened). Returns o*_N = [l, o].
  function automatic fvec_t lane_ostar(fvec_t q, fvec_t kk, fvec_t vv, int n, int d,
                                       int ew, int mw);
    fvec_t ostar, k, v, nxt;
    fbits_t s, m, mprev, mnew, xnew, xold;
    int lnew, lold;
    ostar = new[d+1];
    k = new[d];
    v = new[d+1];
    nxt = new[d+1];
    m = 0;
    for (int j = 0; j <= d; j++) ostar[j] = 0;
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < d; j++) k[j] = kk[i*d + j];
      v[0] = one(ew, mw);
      for (int j = 0; j < d; j++) v[j+1] = vv[i*d + j];
      s     = dot(q, k, d, ew, mw);
      mprev = (i == 0) ? s : m;
      mnew  = fmax(mprev, s, ew, mw);
      xnew  = add(s, neg(mnew, ew, mw), ew, mw);
      xold  = add(mprev, neg(mnew, ew, mw), ew, mw);
      lnew  = log2exp(xnew, ew, mw);
      lold  = log2exp(xold, ew, mw);
      for (int j = 0; j <= d; j++)
        nxt[j] = add(expmul(lold, (i == 0) ? 0 : ostar[j], ew, mw),
                     expmul(lnew, v[j], ew, mw), ew, mw);
      ostar = nxt;
      nxt   = new[d+1];
      m     = mnew;
    end
    return ostar;
  endfunction

  // attention of one query: o_N / l_N
  function automatic fvec_t lane_attn(fvec_t q, fvec_t kk, fvec_t vv, int n, int d,
                                      int ew, int mw);
    fvec_t ostar, a;
    ostar = lane_ostar(q, kk, vv, n, d, ew, mw);
    a = new[d];
    for (int j = 0; j < d; j++) a[j] = div(ostar[j+1], ostar[0], ew, mw);
    return a;
  endfunction

  // random float, sign random, unbiased exponent in [elo, ehi]
  function automatic fbits_t rand_float(int elo, int ehi, int ew, int mw);
    longint e, bias;
    fbits_t m, s;
    bias = (64'd1 << (ew - 1)) - 1;
    e = bias + elo + longint'($urandom_range(ehi - elo));
    m = ({$urandom, $urandom}) & ((64'd1 << mw) - 1);
    s = fbits_t'($urandom_range(1));
    return (s << (ew + mw)) | (fbits_t'(e) << mw) | m;
  endfunction

endpackage
