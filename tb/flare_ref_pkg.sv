// flare_ref_pkg: integer reference model of one FLARE attention layer, used
// by the PE and PE-array testbenches. It is written from the algorithm, not
// from the RTL: plain loops, real division, no bit planes except where the
// BitSift fetch count itself is modelled.
package flare_ref_pkg;

  typedef longint vec_t[];
  typedef longint mat_t[][];

  // Bits needed to hold v in two's complement.
  function automatic int bits_needed(longint v);
    int k; k = 1;
    while (!(v >= -(longint'(1) << (k-1)) && v < (longint'(1) << (k-1)))) k++;
    return k;
  endfunction

  function automatic longint sat(longint v, int w);
    longint hi, lo;
    hi = (longint'(1) << (w-1)) - 1; lo = -(longint'(1) << (w-1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // eMSB-Q, AUTO mode: shift so the widest element needs exactly w bits.
  function automatic vec_t emsbq_auto(vec_t v, int w, output int sh);
    vec_t o; int need;
    need = 1;
    foreach (v[i]) if (bits_needed(v[i]) > need) need = bits_needed(v[i]);
    sh = (need > w) ? need - w : 0;
    o = new[v.size()];
    foreach (v[i]) o[i] = v[i] >>> sh;
    return o;
  endfunction

  function automatic vec_t emsbq_fixed(vec_t v, int w, int sh);
    vec_t o;
    o = new[v.size()];
    foreach (v[i]) o[i] = sat(v[i] >>> sh, w);
    return o;
  endfunction

  // y[f] = sum_r x[r] * m[r][f]
  function automatic vec_t gemv(vec_t x, mat_t m, int f_n);
    vec_t y;
    y = new[f_n];
    foreach (y[f]) y[f] = 0;
    foreach (x[r]) for (int f = 0; f < f_n; f++) y[f] += x[r] * m[r][f];
    return y;
  endfunction

  // One softmax lane with table entry (l, b, c).
  function automatic longint iexp(longint xs, int l, int b, int c, int qmax);
    longint xc, q, r, poly;
    xc = (xs < -longint'(qmax*l)) ? -longint'(qmax*l) : xs;
    q = (-xc) / l; if (q > qmax) q = qmax;
    r = xc + q*l;
    poly = r * (r + b) + c;
    if (poly < 0) poly = 0;
    if (poly > 24'hFFFFFF) poly = 24'hFFFFFF;
    return poly >>> q;
  endfunction

  function automatic vec_t softmax(vec_t x, int l, int b, int c, int w);
    vec_t e; longint mx; int sh;
    mx = x[0];
    foreach (x[i]) if (x[i] > mx) mx = x[i];
    e = new[x.size()];
    foreach (x[i]) e[i] = iexp(x[i] - mx, l, b, c, 2*w);
    return emsbq_auto(e, w, sh);
  endfunction

  // Number of BitSift fetches for one bit plane (32-bit slices, first eight
  // ones per slice, in-order greedy choice of slices up to eight ones).
  function automatic int bitsift_fetches(bit plane[]);
    int n, ns; bit pend[];
    pend = plane; n = 0; ns = (plane.size() + 31) / 32;
    forever begin
      int sum; bit stop, any;
      any = 0;
      foreach (pend[i]) if (pend[i]) any = 1;
      if (!any) break;
      sum = 0; stop = 0;
      for (int s = 0; s < ns; s++) begin
        int c; int idx[$];
        c = 0; idx = {};
        for (int i = s*32; i < s*32+32 && i < pend.size(); i++)
          if (pend[i] && c < 8) begin idx.push_back(i); c++; end
        if (!stop && sum + c <= 8) begin
          sum += c;
          foreach (idx[j]) pend[idx[j]] = 0;
        end else stop = 1;
      end
      n++;
    end
    return n;
  endfunction

  // Cycles of one BitSift GEMV: sum over planes of (1 + fetches) plus 2.
  function automatic int gemv_cycles(vec_t x, int abp);
    int cyc; bit plane[];
    cyc = 2;
    plane = new[x.size()];
    for (int p = abp-1; p >= 0; p--) begin
      foreach (x[i]) plane[i] = x[i][p];
      cyc += 1 + bitsift_fetches(plane);
    end
    return cyc;
  endfunction

endpackage
