// tb_ref_pkg: reference models for the OLSC McEliece testbenches, written
// independently of the RTL. Sizes are the design defaults: q = 8 (GF(8) with
// x^3 + x + 1), t = 4, b = 8, so k = 64 and n = 128.
//
// The field product is computed from a discrete-log table built by powers of
// the generator x, unlike the shift-and-add multiplier in the RTL. The OLSC
// layout is: data i = r*q + c; check column k + g*q + v, with v = r for g = 0,
// v = c for g = 1, and v = alpha[g-2]*r + c for g >= 2.
package tb_ref_pkg;
  localparam int Q  = 8;
  localparam int QW = 3;
  localparam int T  = 4;
  localparam int B  = 8;
  localparam int K  = Q * Q;
  localparam int N  = K + 2 * T * Q;
  localparam int NA = 2 * T - 2;
  localparam int NW = 7;

  // Loop bounds as variables, so that the simulator keeps the reference loops
  // as loops instead of unrolling them.
  int KV = K, NV = N, TV = T, NAV = NA;

  typedef logic [K-1:0][N-1:0]  gmat_t;
  typedef logic [K-1:0][K-1:0]  smat_t;
  typedef logic [N-1:0][NW-1:0] perm_t;
  typedef logic [N-1:0][B-1:0]  cw_t;
  typedef logic [K-1:0][B-1:0]  msg_t;
  typedef logic [NA-1:0][QW-1:0] alpha_t;

  // GF(8) product through log / antilog of the generator x.
  function automatic int gf8_mul(int a, int b);
    int exp_t[7];
    int log_t[8];
    int x;
    x = 1;
    for (int i = 0; i < 7; i++) begin
      exp_t[i] = x;
      log_t[x] = i;
      x = x << 1;
      if (x & 8) x = x ^ 'hB;
    end
    if (a == 0 || b == 0) return 0;
    return exp_t[(log_t[a] + log_t[b]) % 7];
  endfunction

  function automatic int check_of(int i, int g, alpha_t alpha);
    int r, c;
    r = i / Q;
    c = i % Q;
    if (g == 0) return r;
    if (g == 1) return c;
    return gf8_mul(int'(alpha[g-2]), r) ^ c;
  endfunction

  function automatic gmat_t ref_g(alpha_t alpha);
    gmat_t g;
    g = '0;
    for (int i = 0; i < KV; i++) begin
      g[i][i] = 1'b1;
      for (int grp = 0; grp < 2 * TV; grp++)
        g[i][K + grp * Q + check_of(i, grp, alpha)] = 1'b1;
    end
    return g;
  endfunction

  // A random set of 2t-2 distinct nonzero multipliers.
  function automatic alpha_t rand_alpha();
    alpha_t a;
    int     pool[7];
    int     j, tmp;
    for (int i = 0; i < 7; i++) pool[i] = i + 1;
    for (int i = 6; i > 0; i--) begin
      j = $urandom_range(i, 0);
      tmp = pool[i]; pool[i] = pool[j]; pool[j] = tmp;
    end
    for (int i = 0; i < NAV; i++) a[i] = QW'(pool[i]);
    return a;
  endfunction

  function automatic perm_t rand_perm();
    perm_t p;
    int    j;
    logic [NW-1:0] tmp;
    for (int i = 0; i < NV; i++) p[i] = NW'(i);
    for (int i = N - 1; i > 0; i--) begin
      j = $urandom_range(i, 0);
      tmp = p[i]; p[i] = p[j]; p[j] = tmp;
    end
    return p;
  endfunction

  function automatic bit is_perm(perm_t p);
    bit seen[N];
    for (int i = 0; i < NV; i++) seen[i] = 0;
    for (int i = 0; i < NV; i++) begin
      if (seen[p[i]]) return 0;
      seen[p[i]] = 1;
    end
    return 1;
  endfunction

  // Rank of a k x k GF(2) matrix by elimination.
  function automatic int rank_k(smat_t a);
    int rk;
    logic [K-1:0] tmp;
    rk = 0;
    for (int col = 0; col < KV; col++) begin
      int p;
      p = -1;
      for (int r = rk; r < KV; r++) if (p < 0 && a[r][col]) p = r;
      if (p >= 0) begin
        tmp = a[p]; a[p] = a[rk]; a[rk] = tmp;
        for (int r = 0; r < KV; r++) if (r != rk && a[r][col]) a[r] ^= a[rk];
        rk++;
      end
    end
    return rk;
  endfunction

  function automatic smat_t rand_nonsing();
    smat_t s;
    do begin
      for (int r = 0; r < KV; r++) s[r] = {$urandom, $urandom};
    end while (rank_k(s) != K);
    return s;
  endfunction

  function automatic smat_t mul_kk(smat_t a, smat_t b);
    smat_t p;
    p = '0;
    for (int i = 0; i < KV; i++)
      for (int j = 0; j < KV; j++)
        for (int l = 0; l < KV; l++)
          p[i][j] ^= a[i][l] & b[l][j];
    return p;
  endfunction

  // G' = S G P, column by column: column i of S G goes to column perm[i].
  function automatic gmat_t ref_sgp(smat_t s, gmat_t g, perm_t p);
    gmat_t sg, out;
    sg = '0;
    for (int r = 0; r < KV; r++)
      for (int col = 0; col < NV; col++)
        for (int j = 0; j < KV; j++)
          sg[r][col] ^= s[r][j] & g[j][col];
    out = '0;
    for (int r = 0; r < KV; r++)
      for (int col = 0; col < NV; col++)
        out[r][p[col]] = sg[r][col];
    return out;
  endfunction

  // x M for symbols x and binary M (k x n).
  function automatic cw_t vmul_kn(msg_t x, gmat_t m);
    cw_t y;
    y = '0;
    for (int j = 0; j < NV; j++)
      for (int i = 0; i < KV; i++)
        if (m[i][j]) y[j] ^= x[i];
    return y;
  endfunction

  function automatic msg_t vmul_kk(msg_t x, smat_t m);
    msg_t y;
    y = '0;
    for (int j = 0; j < KV; j++)
      for (int i = 0; i < KV; i++)
        if (m[i][j]) y[j] ^= x[i];
    return y;
  endfunction

  function automatic msg_t rand_msg();
    msg_t m;
    for (int i = 0; i < KV; i++) m[i] = B'($urandom);
    return m;
  endfunction

  // Error vector with exactly w nonzero symbols at random distinct places.
  function automatic cw_t rand_err(int w);
    cw_t e;
    int  pos;
    e = '0;
    for (int i = 0; i < w; i++) begin
      do pos = $urandom_range(N - 1, 0); while (e[pos] != '0);
      e[pos] = B'($urandom_range(255, 1));
    end
    return e;
  endfunction

  function automatic int sym_weight(cw_t e);
    int w;
    w = 0;
    for (int i = 0; i < NV; i++) if (e[i] != '0) w++;
    return w;
  endfunction
endpackage
