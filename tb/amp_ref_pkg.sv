// amp_ref_pkg: bit-accurate software model of the AMP-M block restoration, used by
// the testbenches as the independent reference. It evaluates the same fixed-point
// AMP recursion as the hardware (Q1.15 data, Q1.15 DCT entries with a sqrt(2/M)
// shift, soft threshold tau = lambda * RMSE, Onsager term nnz/M * r) with plain
// integer arithmetic on whole vectors. With use_fct = 0 the dictionary products come
// directly from the matrix formula C[m][k] = round(32767 cos(pi (2m+1) k / 2M))
// (32767/sqrt(2) for k = 0); with use_fct = 1 from a step-by-step model of the fast
// DCT and inverse DCT (reorder, reduce, half-length FFT, expand, rotate) with the
// same rounding as the FFT-RAM.
package amp_ref_pkg;

  typedef int          ivec_t[];
  typedef longint      lvec_t[];

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int clog2i(input int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic ivec_t cos_table(input int M);
    ivec_t t = new[4*M];
    for (int j = 0; j < 4*M; j++)
      t[j] = $rtoi($floor(32767.0 * $cos(3.14159265358979323846 * j / (2.0 * M)) + 0.5));
    return t;
  endfunction

  function automatic int coef(input ivec_t tab, input int M, input int m, input int k);
    if (k == 0) return 23170;
    return tab[((2*m + 1) * k) % (4*M)];
  endfunction

  function automatic longint isqrt(input longint v);
    longint r = longint'($sqrt(real'(v)));
    while ((r + 1) * (r + 1) <= v) r++;
    while (r * r > v) r--;
    return r;
  endfunction

  // Soft threshold: returns the new value, sets nz when it is non-zero.
  function automatic int eta(input longint v, input int tau, output bit nz);
    longint mag = (v < 0) ? -v : v;
    longint d   = mag - tau;
    nz = (d > 0);
    if (!nz) return 0;
    return sat16((v < 0) ? -d : d);
  endfunction

  function automatic ivec_t head(input ivec_t v, input int n);
    ivec_t h = new[n];
    for (int i = 0; i < n; i++) h[i] = v[i];
    return h;
  endfunction

  function automatic int bitrev(input int a, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (a & (1 << i)) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  // In-place radix-2 DIF FFT of L = M/2 points with a halving per stage, as the
  // FFT-RAM butterfly computes it (result in bit-reversed order).
  function automatic void fft_dif(input ivec_t tab, input int M, ref lvec_t re, ref lvec_t im);
    int L = M / 2;
    int la = clog2i(L);
    for (int st = 0; st < la; st++) begin
      int half = L >> (st + 1);
      for (int bf = 0; bf < L / 2; bf++) begin
        int pos = bf & (half - 1);
        int grp = bf & ~(half - 1);
        int ia = (grp << 1) | pos;
        int ib = ia | half;
        int j = (pos * 8) << st;
        longint c = tab[j], sn = tab[(j - M + 4*M) % (4*M)];
        longint ar = re[ia], ai = im[ia], br = re[ib], bi = im[ib];
        longint dr = ar - br, di = ai - bi;
        re[ia] = (ar + br) >>> 1;
        im[ia] = (ai + bi) >>> 1;
        re[ib] = (dr * c + di * sn) >>> 16;
        im[ib] = (di * c - dr * sn) >>> 16;
      end
    end
  endfunction

  // Fixed-point fast DCT of the FFT-RAM unit (reorder, reduce, M/2-point DIF FFT with
  // a halving per stage, expand, rotate), step for step with the same rounding.
  function automatic ivec_t fct_fixed(input ivec_t tab, input int M, input ivec_t r);
    int     L = M / 2;
    int     la = clog2i(L);
    int     g = 8;
    int     sc = (clog2i(M) - 1) / 2;
    lvec_t  re = new[L];
    lvec_t  im = new[L];
    ivec_t  out = new[M];
    for (int n = 0; n < M; n++) begin
      int vp = (n % 2) ? (M - 1 - n / 2) : n / 2;
      if (vp % 2) im[vp / 2] = longint'(r[n]) <<< g;
      else        re[vp / 2] = longint'(r[n]) <<< g;
    end
    fft_dif(tab, M, re, im);
    for (int k = 0; k < M; k++) begin
      bit     cj = (k > L);
      int     k1 = cj ? M - k : k;
      int     ka = bitrev(k1 % L, la), kb = bitrev((L - k1) % L, la);
      longint pr = re[ka] + re[kb], pi = im[ka] - im[kb];
      longint qr = re[ka] - re[kb], qi = im[ka] + im[kb];
      longint c4 = tab[4 * k1], s4 = tab[(4 * k1 - M + 4*M) % (4*M)];
      longint wqr = qr * c4 + qi * s4, wqi = qi * c4 - qr * s4;
      longint vr = (pr <<< 15) + wqi, vi = (pi <<< 15) - wqr;
      longint ck = tab[k], sk = tab[(k - M + 4*M) % (4*M)];
      longint xk, scaled;
      if (cj) vi = -vi;
      xk = (vr * ck + vi * sk) >>> 15;
      scaled = xk >>> (1 + g + sc + 15 - la);
      if (k == 0) scaled = (scaled * 23170) >>> 15;
      out[k] = sat16(scaled);
    end
    return out;
  endfunction


  // Fixed-point fast inverse DCT of the FFT-RAM unit: out[m] = (A a)[m]. Inverse
  // rotate and expand fold a into conj(C), the same FFT gives the inverse FFT, and the
  // result is read back through the reorder and reduce addressing.
  function automatic ivec_t ifct_fixed(input ivec_t tab, input int M, input ivec_t a);
    int     L = M / 2;
    int     la = clog2i(L);
    int     g = 8;
    int     sc = (clog2i(M) - 1) / 2;
    lvec_t  re = new[L];
    lvec_t  im = new[L];
    lvec_t  xs = new[M + 1];
    ivec_t  out = new[M];
    for (int i = 0; i < M; i++) xs[i] = longint'(a[i]) <<< g;
    xs[0] = (xs[0] * 46341) >>> 15;
    xs[M] = 0;
    for (int k = 0; k < L; k++) begin
      longint c1 = tab[k],     s1 = tab[(k - M + 4*M) % (4*M)];
      longint c2 = tab[k + L], s2 = tab[(k + L - M + 4*M) % (4*M)];
      longint c3 = tab[4 * k], s3 = tab[(4 * k - M + 4*M) % (4*M)];
      longint xa = xs[k], xb = xs[M - k], xc = xs[k + L], xd = xs[L - k];
      longint v1r = (xa * c1 + xb * s1) >>> 15, v1i = (xa * s1 - xb * c1) >>> 15;
      longint v2r = (xc * c2 + xd * s2) >>> 15, v2i = (xc * s2 - xd * c2) >>> 15;
      longint er = v1r + v2r, ei = v1i + v2i, dr = v1r - v2r, di = v1i - v2i;
      longint orr = (dr * c3 - di * s3) >>> 15, oi = (dr * s3 + di * c3) >>> 15;
      re[k] = (er - oi) >>> 1;
      im[k] = -((ei + orr) >>> 1);
    end
    fft_dif(tab, M, re, im);
    for (int m = 0; m < M; m++) begin
      int     op = (m % 2) ? (M - 1 - m / 2) : m / 2;
      longint ov = (op % 2) ? -im[bitrev(op / 2, la)] : re[bitrev(op / 2, la)];
      out[m] = sat16(ov >>> (g - sc));
    end
    return out;
  endfunction

  typedef struct {
    int iters;
    int rmse;
    bit early;
    int zeroed;      // thresholded elements set to zero
    int kept;        // thresholded elements kept (shrunk)
    int max_nnz;     // largest support, i.e. largest Onsager factor
    int rmse_trace[$];
  } stats_t;

  // Restore one block z (length M). Returns the restored audio A a in s.
  function automatic void run_block(input int M, input int IMAX, input int lambda,
                                    input int et, input bit use_fct, input ivec_t z,
                                    output ivec_t s, output stats_t st);
    ivec_t  tab = cos_table(M);
    int     log2m = clog2i(M);
    int     sh = 15 + (log2m - 1) / 2;
    ivec_t  x = new[2*M];
    ivec_t  r = new[M];
    ivec_t  rn = new[M];
    longint sumsq = 0;
    int     t = 0;
    st.iters = 0; st.rmse = 0; st.early = 0; st.zeroed = 0; st.kept = 0; st.max_nnz = 0;
    st.rmse_trace.delete();
    foreach (x[i]) x[i] = 0;
    for (int m = 0; m < M; m++) begin
      r[m] = z[m];
      sumsq += longint'(z[m]) * z[m];
    end
    forever begin
      longint root = isqrt(sumsq >>> log2m);
      int     tau  = sat16((root * lambda) >>> 4);
      int     nnz  = 0;
      ivec_t  f;
      st.rmse_trace.push_back(int'(root));
      if (root <= et || t == IMAX) begin
        st.iters = t;
        st.rmse  = int'(root);
        st.early = (root <= et);
        break;
      end
      // estimate update: x = eta(x + D^T r; tau)
      if (use_fct) f = fct_fixed(tab, M, r);
      for (int k = 0; k < 2*M; k++) begin
        longint v;
        bit     nz;
        if (k < M && use_fct) begin
          v = x[k] + f[k];
        end else if (k < M) begin
          longint acc = 0;
          for (int m = 0; m < M; m++) acc += longint'(coef(tab, M, m, k)) * r[m];
          v = x[k] + (acc >>> sh);
        end else begin
          v = x[k] + r[k - M];
        end
        x[k] = eta(v, tau, nz);
        if (nz) begin nnz++; st.kept++; end else st.zeroed++;
      end
      if (nnz > st.max_nnz) st.max_nnz = nnz;
      // residual update: r = z - D x + nnz/M r
      sumsq = 0;
      if (use_fct) f = ifct_fixed(tab, M, head(x, M));
      for (int m = 0; m < M; m++) begin
        longint acc = 0;
        longint dx;
        if (use_fct) dx = f[m];
        else begin
          for (int k = 0; k < M; k++) acc += longint'(coef(tab, M, m, k)) * x[k];
          dx = acc >>> sh;
        end
        rn[m] = sat16(longint'(z[m]) - dx - x[M + m]
                      + ((longint'(nnz) * r[m]) >>> log2m));
        sumsq += longint'(rn[m]) * rn[m];
      end
      r = rn;
      rn = new[M];
      t++;
    end
    s = new[M];
    if (use_fct) begin
      s = ifct_fixed(tab, M, head(x, M));
      return;
    end
    for (int m = 0; m < M; m++) begin
      longint acc = 0;
      for (int k = 0; k < M; k++) acc += longint'(coef(tab, M, m, k)) * x[k];
      s[m] = sat16(acc >>> sh);
    end
  endfunction

  // Test block: a few DCT components of audio plus sparse clicks.
  function automatic void make_block(input int M, input int seed, input int nclicks,
                                     output ivec_t clean, output ivec_t z);
    int s = seed;
    real amp[4];
    int  kk[4];
    clean = new[M];
    z = new[M];
    for (int i = 0; i < 4; i++) begin
      kk[i]  = (((s >>> 4) & 32'h7fff) % (M / 8)) + i * (M / 8) + 1;
      amp[i] = (6000.0 + 3000.0 * i) / $sqrt(M / 2.0);
      s = s * 1103515245 + 12345;
    end
    for (int m = 0; m < M; m++) begin
      real v = 0.0;
      for (int i = 0; i < 4; i++)
        v += amp[i] * $cos(3.14159265358979323846 * (2*m + 1) * kk[i] / (2.0 * M));
      clean[m] = $rtoi(v);
      z[m] = clean[m];
    end
    for (int c = 0; c < nclicks; c++) begin
      int pos = ((seed + 1) * 37 + c * 101) % M;
      z[pos] = sat16(longint'(z[pos]) + ((c % 2) ? -12000 : 12000));
    end
  endfunction

endpackage
