// cat_ref_pkg: scalar reference model of the EDPU arithmetic for the
// testbenches. Matrices are flat int arrays, row-major. Every function is
// written from the arithmetic definitions (one element at a time, plain
// integer math), not from the lane-parallel RTL.
package cat_ref_pkg;

  typedef int mat_t[];

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  // round half up, then saturate
  function automatic int rq(longint acc, int sh);
    longint r;
    if (sh == 0) r = acc;
    else r = (acc + (longint'(1) << (sh - 1))) >>> sh;
    return sat8(r);
  endfunction

  function automatic mat_t matmul(mat_t a, mat_t b, int m, int k, int n, int sh);
    mat_t c = new[m * n];
    for (int i = 0; i < m; i++)
      for (int j = 0; j < n; j++) begin
        longint acc = 0;
        for (int x = 0; x < k; x++) acc += longint'(a[i*k + x]) * longint'(b[x*n + j]);
        c[i*n + j] = rq(acc, sh);
      end
    return c;
  endfunction

  // i-GELU on Q4 int8, see cat_pkg::gelu_q4 for the constants
  function automatic int gelu(int x);
    int ax, u, d, erfv;
    longint p;
    ax = (x < 0) ? -x : x;
    u = (ax * 181) / 256;
    d = (u > 28) ? 0 : u - 28;
    erfv = 65536 - 74 * d * d;
    if (x < 0) erfv = -erfv;
    else if (x == 0) erfv = 0;
    p = longint'(x) * longint'(65536 + erfv);
    return sat8((p + 65536) >>> 17);
  endfunction

  // softmax of one row of Q4 scores, probabilities in 0..127
  function automatic void softmax_row(ref mat_t s, input int off, input int len);
    int mx;
    longint e[];
    longint sum, recip;
    e = new[len];
    mx = -128;
    for (int j = 0; j < len; j++) if (s[off + j] > mx) mx = s[off + j];
    sum = 0;
    for (int j = 0; j < len; j++) begin
      int t, q, f;
      t = ((mx - s[off + j]) * 23) / 16;
      q = t / 16;
      f = t % 16;
      e[j] = (q >= 17) ? 0 : ((65536 - f * 2048) / (1 << q));
      sum += e[j];
    end
    recip = (sum == 0) ? 0 : (longint'(1) << 31) / sum;
    for (int j = 0; j < len; j++)
      s[off + j] = int'((e[j] * recip * 127 + (longint'(1) << 30)) >> 31);
  endfunction

  function automatic longint isqrt(longint v);
    longint r;
    r = longint'($floor($sqrt(real'(v))));
    while (r * r > v) r--;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // y = LN(a + r) per row, Q4 output, no affine
  function automatic mat_t ln_add(mat_t a, mat_t r, int rows, int cols);
    mat_t y = new[rows * cols];
    for (int i = 0; i < rows; i++) begin
      longint s, q, v, sd, inv;
      s = 0; q = 0;
      for (int j = 0; j < cols; j++) begin
        longint z = a[i*cols + j] + r[i*cols + j];
        s += z; q += z * z;
      end
      v   = longint'(cols) * q - s * s;
      sd  = isqrt(v);
      inv = (sd == 0) ? 0 : (longint'(1) << 32) / sd;
      for (int j = 0; j < cols; j++) begin
        longint z, num;
        z   = a[i*cols + j] + r[i*cols + j];
        num = (z * cols - s) * 16;
        y[i*cols + j] = (sd == 0) ? 0 : sat8((num * inv + (longint'(1) << 31)) >>> 32);
      end
    end
    return y;
  endfunction

  // full encoder layer for one sequence: x [L x E] -> res [L x E]
  function automatic mat_t layer(mat_t x, mat_t wq, mat_t wk, mat_t wv, mat_t wo, mat_t w1,
                                 mat_t w2, int l, int e, int heads, int dff,
                                 int qkv_sh, int s_sh, int o_sh, int proj_sh, int f1_sh, int f2_sh);
    mat_t q, k, v, o, p, tmp, h, f;
    int dh;
    dh = e / heads;
    q = matmul(x, wq, l, e, e, qkv_sh);
    k = matmul(x, wk, l, e, e, qkv_sh);
    v = matmul(x, wv, l, e, e, qkv_sh);
    o = new[l * e];
    for (int hd = 0; hd < heads; hd++) begin
      mat_t s;
      s = new[l * l];
      for (int i = 0; i < l; i++)
        for (int j = 0; j < l; j++) begin
          longint acc = 0;
          for (int x2 = 0; x2 < dh; x2++)
            acc += longint'(q[i*e + hd*dh + x2]) * longint'(k[j*e + hd*dh + x2]);
          s[i*l + j] = rq(acc, s_sh);
        end
      for (int i = 0; i < l; i++) softmax_row(s, i * l, l);
      for (int i = 0; i < l; i++)
        for (int c = 0; c < dh; c++) begin
          longint acc = 0;
          for (int j = 0; j < l; j++) acc += longint'(s[i*l + j]) * longint'(v[j*e + hd*dh + c]);
          o[i*e + hd*dh + c] = rq(acc, o_sh);
        end
    end
    p   = matmul(o, wo, l, e, e, proj_sh);
    tmp = ln_add(p, x, l, e);
    h   = matmul(tmp, w1, l, e, dff, f1_sh);
    foreach (h[i]) h[i] = gelu(h[i]);
    f   = matmul(h, w2, l, dff, e, f2_sh);
    return ln_add(f, tmp, l, e);
  endfunction

endpackage
