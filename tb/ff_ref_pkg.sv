// ff_ref_pkg: reference arithmetic for the tokenizer testbenches.
//
// Plain integer/real re-implementations, written from the algorithm
// description rather than from the RTL: HAQ bit schedule, quantised DCT
// basis, rounding requantiser, zigzag order by walking the scan path, the
// pruned two-stage block DCT, the 2^-x softmax and single-head cross-attention
// with residual. Data are passed as flat dynamic arrays (row-major).
// The formulas follow the paper's equations; the fixed-point choices mirror
// this design's.
package ff_ref_pkg;

  function automatic int bsched(int k, int t);
    if (k > t) return 4;
    return $rtoi(8.0 - 4.0 * real'(k) / real'(t) + 0.5);
  endfunction

  function automatic int coef(int n, int k, int i, int t);
    real mx = 0, c, q;
    for (int ii = 0; ii < n; ii++) begin
      c = $cos(3.141592653589793 * (2*ii+1) * k / (2.0*n)); if (c < 0) c = -c; if (c > mx) mx = c;
    end
    q = $cos(3.141592653589793 * (2*i+1) * k / (2.0*n)) / mx * ((1 << (bsched(k, t)-1)) - 1);
    return $rtoi(q >= 0 ? q + 0.5 : q - 0.5);
  endfunction

  function automatic int rq(longint v, int sh, int b);
    longint r = (sh == 0) ? v : ((v + (longint'(1) << (sh-1))) >>> sh);
    longint hi = (longint'(1) << (b-1)) - 1, lo = -(longint'(1) << (b-1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    return int'(r);
  endfunction

  // zigzag position table of an n x n grid, built by walking the path
  function automatic void zz_table(int n, output int tab[]);
    int r = 0, c = 0, up = 1;
    tab = new[n*n];
    for (int idx = 0; idx < n*n; idx++) begin
      tab[r*n + c] = idx;
      if (up) begin
        if (c == n-1) begin r++; up = 0; end
        else if (r == 0) begin c++; up = 0; end
        else begin r--; c++; end
      end else begin
        if (r == n-1) begin c++; up = 1; end
        else if (c == 0) begin r++; up = 1; end
        else begin r++; c--; end
      end
    end
  endfunction

  function automatic int clog2(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // Pruned HAQ DCT of an n x n block x (unsigned pixels), r x s tile out.
  function automatic void dct_tile(int n, int t, int r, int s, input int x[], output int y[]);
    int ib[]; int cr[]; longint acc; int bk, bv, m, xv, ln;
    ln = clog2(n);
    ib = new[r*n]; y = new[r*s]; cr = new[r*n];
    for (int k = 0; k < r; k++) for (int i = 0; i < n; i++) cr[k*n+i] = coef(n, k, i, t);
    for (int k = 0; k < r; k++) begin
      bk = bsched(k, t);
      for (int j = 0; j < n; j++) begin
        acc = 0;
        for (int i = 0; i < n; i++) begin xv = (x[i*n+j] - 128) >>> (8 - bk); acc += cr[k*n+i] * xv; end
        ib[k*n+j] = rq(acc, bk - 1 + ln, bk);
      end
    end
    for (int k = 0; k < r; k++) for (int v = 0; v < s; v++) begin
      bk = bsched(k, t); bv = bsched(v, t); m = (bk < bv) ? bk : bv; acc = 0;
      for (int j = 0; j < n; j++) acc += (ib[k*n+j] >>> (bk - m)) * cr[v*n+j];
      y[k*s+v] = rq(acc, (m-1) + (bv-1) + ln - 7, 8);
    end
  endfunction

  // softmax over scores, fixed-point base-2 as specified for the unit
  function automatic void softmax(input longint sc[], input int scale_mul, output int p[]);
    longint mx, z, sum, recip, e[];
    int nk = sc.size();
    e = new[nk]; p = new[nk];
    mx = sc[0];
    foreach (sc[j]) if (sc[j] > mx) mx = sc[j];
    sum = 0;
    foreach (sc[j]) begin
      z = ((mx - sc[j]) * scale_mul) >>> 8;
      if ((z >>> 8) >= 16) e[j] = 0;
      else e[j] = longint'($rtoi(32768.0 * $pow(2.0, -real'((z >>> 4) % 16) / 16.0) + 0.5)) >>> ((z >>> 8) % 16);
      sum += e[j];
    end
    recip = (sum == 0) ? 64'hFFFF_FFFF : (longint'(1) << 24) / sum;
    foreach (sc[j]) begin
      p[j] = int'((e[j] * recip) >>> 16);
      if (p[j] > 255) p[j] = 255;
    end
  endfunction

  // single-head cross-attention with residual; tq nq x d, tkv nk x d,
  // weights w* d x d indexed [o*d + i]
  function automatic void xattn(int nq, int nk, int d, input int tq[], input int tkv[],
                                input int wq[], input int wk[], input int wv[],
                                int psh, int osh, int scale_mul, output int tout[]);
    int q[], k[], v[], p[]; longint sc[], acc;
    q = new[nq*d]; k = new[nk*d]; v = new[nk*d]; sc = new[nk]; tout = new[nq*d];
    for (int n = 0; n < nq; n++) for (int o = 0; o < d; o++) begin
      acc = 0; for (int i = 0; i < d; i++) acc += wq[o*d+i] * tq[n*d+i];
      q[n*d+o] = rq(acc, psh, 8);
    end
    for (int m = 0; m < nk; m++) for (int o = 0; o < d; o++) begin
      acc = 0; for (int i = 0; i < d; i++) acc += wk[o*d+i] * tkv[m*d+i];
      k[m*d+o] = rq(acc, psh, 8);
      acc = 0; for (int i = 0; i < d; i++) acc += wv[o*d+i] * tkv[m*d+i];
      v[m*d+o] = rq(acc, psh, 8);
    end
    for (int n = 0; n < nq; n++) begin
      for (int m = 0; m < nk; m++) begin
        acc = 0; for (int i = 0; i < d; i++) acc += q[n*d+i] * k[m*d+i];
        sc[m] = acc;
      end
      softmax(sc, scale_mul, p);
      for (int o = 0; o < d; o++) begin
        acc = 0; for (int m = 0; m < nk; m++) acc += p[m] * v[m*d+o];
        tout[n*d+o] = rq(acc + (longint'(tq[n*d+o]) << osh), osh, 8);
      end
    end
  endfunction

  // CRC-16/CCITT, reflected polynomial 0x8408, one byte
  function automatic int crc16_byte(int c, int b);
    for (int i = 0; i < 8; i++) c = (((c ^ (b >> i)) & 1) != 0) ? ((c >> 1) ^ 'h8408) : (c >> 1);
    return c & 'hFFFF;
  endfunction

  // branch with block DCT: fr = 3 planes of imgs x imgs (plane-major),
  // w[((oc*ks+ky)*ks+kx)*ct+ic], 24 outputs, out[(tok)*24 + oc]
  function automatic void ref_branch_block(int imgs, int n, int t, int ky, int kc, int ks,
                                           input int fr[], input int w[], input int bias[], int sh,
                                           output int out[]);
    int tab[], x[], y[], fm[]; int g, ct, oh, kk, off, rr, ss; longint acc;
    g = imgs / n; ct = ky + 2 * kc; oh = g / ks;
    zz_table(n, tab); x = new[n*n]; fm = new[g*g*ct]; out = new[oh*oh*24];
    for (int by = 0; by < g; by++) for (int bx = 0; bx < g; bx++) for (int c = 0; c < 3; c++) begin
      kk = (c == 0) ? ky : kc; off = (c == 0) ? 0 : (c == 1) ? ky : ky + kc;
      rr = 0; ss = 0;
      for (int r = 0; r < n; r++) for (int q = 0; q < n; q++) if (tab[r*n+q] < kk) begin
        if (r + 1 > rr) rr = r + 1;
        if (q + 1 > ss) ss = q + 1;
      end
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) x[i*n+j] = fr[(c*imgs + by*n+i)*imgs + bx*n+j];
      dct_tile(n, t, rr, ss, x, y);
      for (int r = 0; r < rr; r++) for (int q = 0; q < ss; q++)
        if (tab[r*n+q] < kk) fm[(by*g+bx)*ct + off + tab[r*n+q]] = y[r*ss+q];
    end
    for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < oh; ox++) for (int oc = 0; oc < 24; oc++) begin
      acc = bias[oc];
      for (int a = 0; a < ks; a++) for (int b = 0; b < ks; b++) for (int ic = 0; ic < ct; ic++)
        acc += w[((oc*ks+a)*ks+b)*ct+ic] * fm[((oy*ks+a)*g + ox*ks+b)*ct + ic];
      out[(oy*oh+ox)*24+oc] = rq(acc, sh, 8);
    end
  endfunction

  // global branch: whole-plane DCT (t = 56), depthwise pooling conv with
  // kernel pk = imgs/8, w[(c*pk + a)*pk + b], zigzag 14/5/5 on the 8x8 grid
  function automatic void ref_branch_global(int imgs, input int fr[], input int w[], input int bias[],
                                            int sh, output int out[]);
    int tab[], x[], y[]; int pk, kk, off, rr, ss, z; longint acc[];
    pk = imgs / 8; zz_table(8, tab); x = new[imgs*imgs]; out = new[24]; acc = new[14];
    for (int c = 0; c < 3; c++) begin
      kk = (c == 0) ? 14 : 5; off = (c == 0) ? 0 : (c == 1) ? 14 : 19;
      rr = (c == 0) ? 5 * pk : 3 * pk; ss = (c == 0) ? 4 * pk : 2 * pk;
      for (int i = 0; i < imgs*imgs; i++) x[i] = fr[c*imgs*imgs + i];
      dct_tile(imgs, 56, rr, ss, x, y);
      for (int i = 0; i < 14; i++) acc[i] = 0;
      for (int k = 0; k < rr; k++) for (int v = 0; v < ss; v++) begin
        z = tab[(k / pk) * 8 + v / pk];
        if (z < kk) acc[z] += w[(c*pk + k % pk)*pk + v % pk] * y[k*ss+v];
      end
      for (int i = 0; i < kk; i++) out[off + i] = rq(acc[i] + bias[c], sh, 8);
    end
  endfunction

  // complete tokenizer: branches, then T1 x T2 and T12 x T3 cross-attention
  function automatic void ref_tokenizer(int imgs, input int fr[],
      input int w1[], input int b1[], input int w2[], input int b2[], input int w3[], input int b3[],
      input int a1q[], input int a1k[], input int a1v[], input int a2q[], input int a2k[], input int a2v[],
      int sh1, int sh2, int sh3, int psh, int osh, int scale_mul, output int tout[]);
    int t1[], t2[], t3[], t12[]; int nt;
    nt = (imgs / 32) * (imgs / 32);
    ref_branch_block(imgs, 8, 4, 14, 5, 4, fr, w1, b1, sh1, t1);
    ref_branch_block(imgs, 32, 12, 96, 24, 1, fr, w2, b2, sh2, t2);
    ref_branch_global(imgs, fr, w3, b3, sh3, t3);
    xattn(nt, nt, 24, t1, t2, a1q, a1k, a1v, psh, osh, scale_mul, t12);
    xattn(nt, 1, 24, t12, t3, a2q, a2k, a2v, psh, osh, scale_mul, tout);
  endfunction

endpackage
