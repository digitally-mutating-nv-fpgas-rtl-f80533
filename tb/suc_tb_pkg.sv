// suc_tb_pkg: reference model and helpers for the SUC testbenches, written
// independently of the RTL.  The NI-SUC bit permutation is taken here as the
// printed table (not the formula used in the RTL).  S-boxes are value
// tables: nibble x holds S(x).  Also holds the S-box quality measures used
// to build and check the cipher data base model: bijectivity, the
// differential uniformity Diff(S) (optimal = 4) and the linearity Lin(S)
// (largest absolute Walsh coefficient, optimal = 8).
package suc_tb_pkg;

  typedef logic [63:0] vt_t;
  typedef vt_t         sl_t [16];
  typedef logic [15:0] nikl_t [64];
  typedef logic [15:0] ikl_t  [60];

  localparam int P_TAB [64] = '{
     0,  4,  8, 12, 16, 20, 24, 28,
    32, 36, 40, 44, 48, 52, 56, 60,
     1,  5,  9, 13, 17, 21, 25, 29,
    33, 37, 41, 45, 49, 53, 57, 61,
     2,  6, 10, 14, 18, 22, 26, 30,
    34, 38, 42, 46, 50, 54, 58, 62,
     3,  7, 11, 15, 19, 23, 27, 31,
    35, 39, 43, 47, 51, 55, 59, 63};

  localparam vt_t PRESENT_VT = 64'h2174_8FE3_DA09_B65C; // S(0)=C ... S(15)=2

  function automatic logic [3:0] sv(vt_t t, int x); return t[4*x +: 4]; endfunction

  function automatic logic [63:0] perm(logic [63:0] x);
    logic [63:0] y;
    for (int i = 0; i < 64; i++) y[P_TAB[i]] = x[i];
    return y;
  endfunction
  function automatic logic [63:0] perm_inv(logic [63:0] y);
    logic [63:0] x;
    for (int i = 0; i < 64; i++) x[i] = y[P_TAB[i]];
    return x;
  endfunction

  function automatic vt_t inv_vt(vt_t t);
    vt_t r;
    r = '0;
    for (int x = 0; x < 16; x++)
      for (int y = 0; y < 16; y++) if (sv(t, y) == 4'(x)) r[4*x +: 4] = 4'(y);
    return r;
  endfunction

  function automatic logic [63:0] slayer(sl_t s, logic [63:0] x);
    logic [63:0] y;
    for (int i = 0; i < 16; i++) y[4*i +: 4] = sv(s[i], int'(x[4*i +: 4]));
    return y;
  endfunction

  function automatic bit is_bij(vt_t t);
    bit [15:0] seen;
    seen = '0;
    for (int x = 0; x < 16; x++) seen[sv(t, x)] = 1'b1;
    return seen == 16'hFFFF;
  endfunction
  function automatic bit is_invol(vt_t t);
    for (int x = 0; x < 16; x++) if (sv(t, int'(sv(t, x))) != 4'(x)) return 1'b0;
    return 1'b1;
  endfunction
  function automatic int diff_u(vt_t t);
    int m, c [16];
    m = 0;
    for (int a = 1; a < 16; a++) begin
      for (int b = 0; b < 16; b++) c[b] = 0;
      for (int x = 0; x < 16; x++) c[sv(t, x) ^ sv(t, x ^ a)]++;
      for (int b = 0; b < 16; b++) if (c[b] > m) m = c[b];
    end
    return m;
  endfunction
  function automatic int lin(vt_t t);
    int m, w;
    m = 0;
    for (int a = 0; a < 16; a++)
      for (int b = 1; b < 16; b++) begin
        w = 0;
        for (int x = 0; x < 16; x++)
          w += (($countones(4'(a) & 4'(x)) + $countones(4'(b) & sv(t, x))) % 2 != 0) ? -1 : 1;
        if (w < 0) w = -w;
        if (w > m) m = w;
      end
    return m;
  endfunction
  function automatic bit is_optimal(vt_t t);
    return is_bij(t) && diff_u(t) == 4 && lin(t) == 8;
  endfunction

  // LUT_b truth table of a value table (column b)
  function automatic logic [15:0] column(vt_t t, int b);
    logic [15:0] c;
    for (int x = 0; x < 16; x++) c[x] = t[4*x + b];
    return c;
  endfunction
  function automatic vt_t from_columns(logic [15:0] c0, logic [15:0] c1,
                                       logic [15:0] c2, logic [15:0] c3);
    vt_t t;
    for (int x = 0; x < 16; x++) t[4*x +: 4] = {c3[x], c2[x], c1[x], c0[x]};
    return t;
  endfunction

  function automatic vt_t rand_perm();
    int a [16];
    int j, tmp;
    vt_t t;
    for (int i = 0; i < 16; i++) a[i] = i;
    for (int i = 15; i > 0; i--) begin
      j = int'($urandom_range(i, 0)); tmp = a[i]; a[i] = a[j]; a[j] = tmp;
    end
    for (int i = 0; i < 16; i++) t[4*i +: 4] = 4'(a[i]);
    return t;
  endfunction
  function automatic vt_t rand_invol();
    int a [16];
    int free [$];
    int p, q, k;
    vt_t t;
    for (int i = 0; i < 16; i++) free.push_back(i);
    while (free.size() > 0) begin
      p = free[0]; free.delete(0);
      k = int'($urandom_range(free.size(), 0));   // k == size: fixed point
      if (k == free.size()) a[p] = p;
      else begin q = free[k]; free.delete(k); a[p] = q; a[q] = p; end
    end
    for (int i = 0; i < 16; i++) t[4*i +: 4] = 4'(a[i]);
    return t;
  endfunction

  // random invertible 4x4 binary matrix, as 4 row masks
  function automatic logic [15:0] rand_gl4();
    logic [3:0] r [4];
    logic [3:0] m [4];
    int piv, rank;
    logic [3:0] tmp;
    do begin
      for (int i = 0; i < 4; i++) r[i] = 4'($urandom);
      for (int i = 0; i < 4; i++) m[i] = r[i];
      rank = 0;
      for (int col = 0; col < 4; col++) begin
        piv = -1;
        for (int i = rank; i < 4; i++) if (m[i][col] && piv < 0) piv = i;
        if (piv >= 0) begin
          tmp = m[piv]; m[piv] = m[rank]; m[rank] = tmp;
          for (int i = 0; i < 4; i++) if (i != rank && m[i][col]) m[i] ^= m[rank];
          rank++;
        end
      end
    end while (rank != 4);
    return {r[3], r[2], r[1], r[0]};
  endfunction
  function automatic logic [3:0] mat_mul(logic [15:0] mat, logic [3:0] x);
    logic [3:0] y;
    for (int i = 0; i < 4; i++) y[i] = ^(mat[4*i +: 4] & x);
    return y;
  endfunction
  // Affine-equivalent variant A2(S(A1 x ^ c1)) ^ c2 of an optimal S-box
  // (affine equivalence keeps Lin and Diff, so the result is optimal too).
  function automatic vt_t rand_optimal();
    logic [15:0] a1, a2;
    logic [3:0]  c1, c2;
    vt_t t;
    a1 = rand_gl4(); a2 = rand_gl4(); c1 = 4'($urandom); c2 = 4'($urandom);
    for (int x = 0; x < 16; x++)
      begin
        logic [3:0] u, v;
        u = mat_mul(a1, 4'(x)) ^ c1;
        v = sv(PRESENT_VT, int'(u));
        t[4*x +: 4] = mat_mul(a2, v) ^ c2;
      end
    return t;
  endfunction
  function automatic vt_t rand_optimal_invol();
    vt_t t;
    do t = rand_invol(); while (!(diff_u(t) == 4 && lin(t) == 8));
    return t;
  endfunction

  // ---- key schedules ----
  function automatic logic [63:0] ni_key(nikl_t kl, int i);
    logic [63:0] k;
    for (int j = 0; j < 64; j++) k[j] = kl[j][j < 32 ? (i % 16) : (i / 2)];
    return k;
  endfunction
  function automatic logic [63:0] i_key(ikl_t kl, int r);
    logic [63:0] k;
    logic [3:0]  x;
    x = '0;
    for (int s = 1; s < 16; s++) begin
      for (int b = 0; b < 4; b++) k[4*s + b] = kl[4*(s-1) + b][s < 8 ? (r % 16) : (r / 2)];
      x ^= k[4*s +: 4];
    end
    k[3:0] = x;
    return k;
  endfunction

  // ---- ciphers ----
  function automatic logic [63:0] ni_enc(sl_t s, nikl_t kl, logic [63:0] x);
    logic [63:0] st;
    st = x;
    for (int i = 0; i < 31; i++) st = perm(slayer(s, st ^ ni_key(kl, i)));
    return st ^ ni_key(kl, 31);
  endfunction
  function automatic logic [63:0] ni_dec(sl_t s, nikl_t kl, logic [63:0] y);
    sl_t si;
    logic [63:0] st;
    for (int i = 0; i < 16; i++) si[i] = inv_vt(s[i]);
    st = y ^ ni_key(kl, 31);
    for (int i = 30; i >= 0; i--) st = slayer(si, perm_inv(st)) ^ ni_key(kl, i);
    return st;
  endfunction
  function automatic logic [63:0] diffuse(logic [63:0] x);
    logic [3:0] sum;
    logic [63:0] y;
    sum = '0;
    for (int i = 0; i < 16; i++) sum ^= x[4*i +: 4];
    for (int i = 0; i < 16; i++) y[4*i +: 4] = x[4*i +: 4] ^ sum;
    return y;
  endfunction
  // Y = SL(K30 ^ P(SL(... K0 ^ P(SL(X))))), reversed key order when dec
  function automatic logic [63:0] i_enc(sl_t s, ikl_t kl, logic [63:0] x, bit dec);
    logic [63:0] st;
    st = slayer(s, x);
    for (int r = 0; r < 31; r++) st = slayer(s, i_key(kl, dec ? 30 - r : r) ^ diffuse(st));
    return st;
  endfunction

endpackage
