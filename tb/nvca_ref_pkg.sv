// nvca_ref_pkg -- reference arithmetic for the testbenches.
//
// Integer models written straight from the transform matrices of the fast
// algorithms (Winograd F(2x2,3x3): B^T 4x4, A^T 2x4; fast transposed
// convolution T3(6x6,4x4), stride 2: B^T 8x5, G 8x4, A^T 6x8) and from the
// direct definitions of 3x3 correlation and stride-2 4x4 transposed
// convolution, independent of the RTL structure.
package nvca_ref_pkg;

  function automatic int bt(input bit dec, input int i, input int j);
    int c [4][4] = '{'{1,0,-1,0}, '{0,1,1,0}, '{0,-1,1,0}, '{0,1,0,-1}};
    int d [8][5] = '{'{1,0,-1,0,0}, '{0,1,1,0,0}, '{0,-1,1,0,0}, '{0,-1,0,1,0},
                     '{0,1,0,-1,0}, '{0,0,1,1,0}, '{0,0,-1,1,0}, '{0,0,-1,0,1}};
    return dec ? d[i][j] : c[i][j];
  endfunction

  function automatic int at(input bit dec, input int i, input int j);
    int c [2][4] = '{'{1,1,1,0}, '{0,1,-1,-1}};
    int d [6][8] = '{'{1,1,1,0,0,0,0,0}, '{0,0,0,0,1,1,1,0}, '{0,1,-1,0,0,0,0,0},
                     '{0,0,0,0,0,1,-1,0}, '{0,1,1,1,0,0,0,0}, '{0,0,0,0,0,1,1,1}};
    return dec ? d[i][j] : c[i][j];
  endfunction

  // 4 x G (entries of G are multiples of 1/2; 2G is integer) -> E4 = 4*G W G^T
  function automatic int g2(input bit dec, input int i, input int j);
    int c [4][3] = '{'{2,0,0}, '{1,1,1}, '{1,-1,1}, '{0,0,2}};
    int d [8][4] = '{'{0,0,0,2}, '{0,1,0,1}, '{0,-1,0,1}, '{0,2,0,0},
                     '{0,0,2,0}, '{1,0,1,0}, '{-1,0,1,0}, '{2,0,0,0}};
    return dec ? d[i][j] : c[i][j];
  endfunction

  typedef longint mat_t [8][8];

  // Y = B^T X B ; X is p x p (p = 5 DeConv, 4 Conv), Y is mu x mu (8 / 4)
  function automatic mat_t tr_in(input bit dec, input mat_t x);
    mat_t t, y;
    int p = dec ? 5 : 4, mu = dec ? 8 : 4;
    foreach (t[i, j]) t[i][j] = 0;
    foreach (y[i, j]) y[i][j] = 0;
    for (int i = 0; i < mu; i++) for (int j = 0; j < p; j++)
      for (int k = 0; k < p; k++) t[i][j] += bt(dec, i, k) * x[k][j];
    for (int i = 0; i < mu; i++) for (int j = 0; j < mu; j++)
      for (int k = 0; k < p; k++) y[i][j] += t[i][k] * bt(dec, j, k);
    return y;
  endfunction

  // V = A^T U A ; U is mu x mu, V is m x m (6 / 2)
  function automatic mat_t tr_out(input bit dec, input mat_t u);
    mat_t t, v;
    int mu = dec ? 8 : 4, m = dec ? 6 : 2;
    foreach (t[i, j]) t[i][j] = 0;
    foreach (v[i, j]) v[i][j] = 0;
    for (int i = 0; i < m; i++) for (int j = 0; j < mu; j++)
      for (int k = 0; k < mu; k++) t[i][j] += at(dec, i, k) * u[k][j];
    for (int i = 0; i < m; i++) for (int j = 0; j < m; j++)
      for (int k = 0; k < mu; k++) v[i][j] += t[i][k] * at(dec, j, k);
    return v;
  endfunction

  // E4 = (2G) W (2G)^T = 4 G W G^T ; W is k x k (3 / 4)
  function automatic mat_t tr_w4(input bit dec, input mat_t w);
    mat_t t, e;
    int k = dec ? 4 : 3, mu = dec ? 8 : 4;
    foreach (t[i, j]) t[i][j] = 0;
    foreach (e[i, j]) e[i][j] = 0;
    for (int i = 0; i < mu; i++) for (int j = 0; j < k; j++)
      for (int q = 0; q < k; q++) t[i][j] += g2(dec, i, q) * w[q][j];
    for (int i = 0; i < mu; i++) for (int j = 0; j < mu; j++)
      for (int q = 0; q < k; q++) e[i][j] += t[i][q] * g2(dec, j, q);
    return e;
  endfunction

  // Direct 3x3 correlation of a 4x4 patch -> 2x2
  function automatic mat_t conv_direct(input mat_t x, input mat_t w);
    mat_t v;
    foreach (v[i, j]) v[i][j] = 0;
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
        v[a][b] += x[a+i][b+j] * w[i][j];
    return v;
  endfunction

  // Direct stride-2 transposed convolution, 4x4 kernel, of a 5x5 patch -> the
  // 6x6 interior block V[a][b] = sum x[i][j] w[a-2i+3][b-2j+3].
  function automatic mat_t deconv_direct(input mat_t x, input mat_t w);
    mat_t v;
    foreach (v[i, j]) v[i][j] = 0;
    for (int a = 0; a < 6; a++) for (int b = 0; b < 6; b++)
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
        int ka = a - 2*i + 3, kb = b - 2*j + 3;
        if (ka >= 0 && ka < 4 && kb >= 0 && kb < 4) v[a][b] += x[i][j] * w[ka][kb];
      end
    return v;
  endfunction

  function automatic int rq(input longint v, input int shift, input bit relu);
    longint s = v >>> shift;
    if (relu && s < 0) s = 0;
    if (s > 2047) s = 2047;
    if (s < -2048) s = -2048;
    return int'(s);
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

endpackage
