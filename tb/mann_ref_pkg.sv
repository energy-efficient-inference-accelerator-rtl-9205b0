// mann_ref_pkg -- reference arithmetic for the testbenches.
//
// Plain integer models of the accelerator's fixed-point rules, written
// without any of the RTL's code: Q8.8 saturation, dot products, the exp
// approximation (2^n times a quadratic for 2^f), the truncating softmax
// division, the memory read, the controller and the thresholded output
// search.  Vectors are dynamic arrays of int holding Q8.8 values.
package mann_ref_pkg;

  typedef int vec_t[];

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // full-precision dot product (2*8 fractional bits)
  function automatic longint dot(vec_t a, vec_t b);
    longint s = 0;
    foreach (a[i]) s += longint'(a[i]) * longint'(b[i]);
    return s;
  endfunction

  // >>> 8 with floor, then saturate
  function automatic int rescale(longint v);
    return sat16(v >>> 8);
  endfunction

  // e^x, x in Q8.8, result Q16.16
  function automatic longint exp_ref(int x);
    longint t, n, f, inner, mant;
    if (x > 11*256)  x = 11*256;
    if (x < -16*256) x = -16*256;
    t = longint'(x) * 23637;          // 22 fractional bits
    n = t >>> 22;
    f = (t - (n <<< 22)) >>> 6;       // Q0.16
    inner = 43024 + ((22512 * f) >>> 16);
    mant  = 65536 + ((inner * f) >>> 16);
    if (n >= 0) return (mant << n) & 64'hFFFF_FFFF;
    else if (n < -40) return 0;
    else return mant >> (-n);
  endfunction

  function automatic int div_ref(longint num, longint den);
    longint q = (num <<< 8) / den;
    if (q > 256) q = 256;
    return int'(q);
  endfunction

  // r = sum_i softmax(M_a,i . k) M_c,i for the first n slots
  function automatic vec_t mem_read(vec_t amem[], vec_t cmem[], int n, vec_t key);
    longint e[];
    longint sum = 0;
    longint racc[];
    vec_t r;
    int E = key.size();
    r = new[E];
    racc = new[E];
    foreach (racc[j]) racc[j] = 0;
    if (n == 0) begin
      foreach (r[j]) r[j] = 0;
      return r;
    end
    e = new[n];
    for (int i = 0; i < n; i++) begin
      e[i] = exp_ref(rescale(dot(amem[i], key)));
      sum += e[i];
    end
    for (int i = 0; i < n; i++) begin
      int a = div_ref(e[i], sum);
      for (int j = 0; j < E; j++) racc[j] += longint'(a) * longint'(cmem[i][j]);
    end
    foreach (r[j]) r[j] = rescale(racc[j]);
    return r;
  endfunction

  // h = r + W_r k
  function automatic vec_t controller(vec_t wr[], vec_t key, vec_t r);
    vec_t h = new[key.size()];
    foreach (h[j]) h[j] = sat16(longint'(r[j]) + longint'(rescale(dot(wr[j], key))));
    return h;
  endfunction

  // bag-of-words embedding with per-step saturation
  function automatic vec_t embed(vec_t w[], int idx[], int E);
    vec_t acc = new[E];
    foreach (acc[j]) acc[j] = 0;
    foreach (idx[k])
      if (idx[k] < w.size())
        foreach (acc[j]) acc[j] = sat16(longint'(acc[j]) + longint'(w[idx[k]][j]));
    return acc;
  endfunction

  // output search; returns label, sets n_cmp and early
  function automatic int search(vec_t wo[], int theta[], int order[], vec_t h,
                                bit ith, output int n_cmp, output bit early);
    longint best = 0;
    int label = 0;
    bit found = 0;
    n_cmp = 0;
    early = 0;
    for (int p = 0; p < wo.size(); p++) begin
      int a = ith ? order[p] : p;
      longint z = dot(wo[a], h);
      n_cmp++;
      if (!found || z > best) begin
        best = z; label = a; found = 1;
      end
      if (ith && z > (longint'(theta[a]) <<< 8)) begin
        early = 1;
        return a;
      end
    end
    return label;
  endfunction

endpackage
