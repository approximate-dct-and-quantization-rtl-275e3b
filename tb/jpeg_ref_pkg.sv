// jpeg_ref_pkg: reference models used by the testbenches.
//
// Written independently of the RTL: the constant multiplications use the
// '*' operator on the integer approximations (181/256, 473/512, 196/512,
// 251/256, 50/256, 213/256, 142/256) instead of shift-add networks, the
// quantiser exponent is found by a search loop, and a floating-point DCT
// gives the exact transform for tolerance checks. Arithmetic is on 'int'
// with >>> as floor division by a power of two.
package jpeg_ref_pkg;

  typedef int blk_t [8][8];

  function automatic int fl(input int v, input int sh);  // floor(v / 2^sh)
    return v >>> sh;
  endfunction

  function automatic int c4(input int x);
    return fl(181 * x, 8);
  endfunction

  // 1D fast DCT with integer-approximated constants; y = ~2*T*x.
  function automatic void fdct1d(input int x[8], output int y[8]);
    int s0, s1, s2, s3, d4, d5, d6, d7, b0, b1, b2, b3, e5, e6, p4, p5, p6, p7;
    s0 = x[0] + x[7]; s1 = x[1] + x[6]; s2 = x[2] + x[5]; s3 = x[3] + x[4];
    d7 = x[0] - x[7]; d6 = x[1] - x[6]; d5 = x[2] - x[5]; d4 = x[3] - x[4];
    b0 = s0 + s3; b1 = s1 + s2; b2 = s1 - s2; b3 = s0 - s3;
    y[0] = c4(b0 + b1);
    y[4] = c4(b0 - b1);
    y[2] = fl(473 * b3 + 196 * b2, 9);
    y[6] = fl(196 * b3 - 473 * b2, 9);
    e5 = c4(d6 - d5); e6 = c4(d6 + d5);
    p4 = d4 + e5; p5 = e5 - d4; p6 = d7 - e6; p7 = d7 + e6;
    y[1] = fl(251 * p7 + 50 * p4, 8);
    y[7] = fl(50 * p7 - 251 * p4, 8);
    y[3] = fl(213 * p6 + 142 * p5, 8);
    y[5] = fl(142 * p6 - 213 * p5, 8);
  endfunction

  // 2D transform as the RTL defines it: columns, then rows, then >>> 2.
  function automatic void dct2d(input blk_t m, output blk_t d);
    int v[8], r[8];
    blk_t t;
    for (int j = 0; j < 8; j++) begin
      for (int n = 0; n < 8; n++) v[n] = m[n][j];
      fdct1d(v, r);
      for (int k = 0; k < 8; k++) t[k][j] = r[k];
    end
    for (int k = 0; k < 8; k++) begin
      for (int n = 0; n < 8; n++) v[n] = t[k][n];
      fdct1d(v, r);
      for (int u = 0; u < 8; u++) d[k][u] = fl(r[u], 2);
    end
  endfunction

  // Exact orthonormal DCT entry t(i, j).
  function automatic real tcoef(input int i, input int j);
    real pi = 3.14159265358979;
    if (i == 0) return 1.0 / $sqrt(8.0);
    return 0.5 * $cos((2.0 * j + 1.0) * i * pi / 16.0);
  endfunction

  function automatic real exact_dct2d(input blk_t m, input int u, input int v);
    real acc = 0.0;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        acc += tcoef(u, i) * m[i][j] * tcoef(v, j);
    return acc;
  endfunction

  function automatic int log2floor(input int q);
    int s = 0;
    while ((2 ** (s + 1)) <= q && s < 7) s++;
    return s;
  endfunction

  function automatic int quant(input int d, input int q);
    return fl(d, log2floor(q));
  endfunction

  function automatic int trunc_round(input int m, input int b);
    if (b == 0) return m;
    return fl(m + (1 << (b - 1)), b);
  endfunction

  function automatic bit similar(input blk_t cur, input blk_t prev, input int level);
    int eps = 5 * level;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        int ceil_v = (prev[i][j] + eps > 127) ? 127 : prev[i][j] + eps;
        int flo_v  = (prev[i][j] - eps < -128) ? -128 : prev[i][j] - eps;
        if (cur[i][j] > ceil_v || cur[i][j] < flo_v) return 1'b0;
      end
    return 1'b1;
  endfunction

  // Whole core: truncate, DCT, rescale by 2^b, quantise.
  function automatic void compress(input blk_t m, input int b, input blk_t q, output blk_t c);
    blk_t mt, d;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) mt[i][j] = trunc_round(m[i][j], b);
    dct2d(mt, d);
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++) c[u][v] = quant(d[u][v] * (1 << b), q[u][v]);
  endfunction

endpackage
