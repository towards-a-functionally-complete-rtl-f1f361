// tb_ref_pkg -- independent reference arithmetic for the testbenches.
//
// Everything here is written from the mathematical definitions, without the
// Karatsuba/Solinas structure of the RTL: products are reduced with a plain
// 128-bit remainder, transforms use the textbook iterative loops or the direct
// O(N^2) definition.  Testbenches compare the RTL against these results.
package tb_ref_pkg;
  typedef logic [63:0] u64;
  localparam u64 RQ = 64'hFFFF_FFFF_0000_0001;

  function automatic u64 radd(u64 a, u64 b);
    logic [64:0] s = {1'b0, a} + {1'b0, b};
    return u64'(s % {1'b0, RQ});
  endfunction
  function automatic u64 rsub(u64 a, u64 b);
    return radd(a, (b == 0) ? 64'd0 : RQ - b);
  endfunction
  function automatic u64 rneg(u64 a);
    return (a == 0) ? 64'd0 : RQ - a;
  endfunction
  function automatic u64 rmul(u64 a, u64 b);
    logic [127:0] p = {64'd0, a} * {64'd0, b};
    return u64'(p % {64'd0, RQ});
  endfunction
  function automatic u64 rpow(u64 b, u64 e);
    u64 r = 1;
    while (e != 0) begin
      if (e[0]) r = rmul(r, b);
      b = rmul(b, b);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic u64 rpsi(int n);
    return rpow(64'd7, (RQ - 1) / u64'(2 * n));
  endfunction
  function automatic int brev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction
  function automatic u64 rand64();
    u64 r = {$urandom, $urandom};
    return r % RQ;
  endfunction

  // Direct definition: out[p] = sum_j a_j psi^((2*bitrev(p)+1)*j)
  function automatic void ntt_direct(int n, const ref u64 a[], ref u64 o[]);
    u64 psi = rpsi(n);
    o = new[n];
    for (int p = 0; p < n; p++) begin
      u64 root = rpow(psi, u64'(2 * brev(p, $clog2(n)) + 1));
      u64 acc = 0, pw = 1;
      for (int j = 0; j < n; j++) begin
        acc = radd(acc, rmul(a[j], pw));
        pw = rmul(pw, root);
      end
      o[p] = acc;
    end
  endfunction

  // Textbook in-place negacyclic CT NTT (natural in, bit-reversed out).
  function automatic void ntt_fast(int n, ref u64 a[]);
    u64 psi = rpsi(n);
    int t = n;
    for (int m = 1; m < n; m = m * 2) begin
      t = t / 2;
      for (int i = 0; i < m; i++) begin
        u64 s = rpow(psi, u64'(brev(m + i, $clog2(n))));
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          u64 u = a[j], v = rmul(a[j + t], s);
          a[j] = radd(u, v);
          a[j + t] = rsub(u, v);
        end
      end
    end
  endfunction

  // Textbook in-place GS inverse NTT (bit-reversed in, natural out), no 1/N.
  function automatic void intt_fast(int n, ref u64 a[]);
    u64 psii = rpow(rpsi(n), RQ - 2);
    int t = 1;
    for (int m = n / 2; m >= 1; m = m / 2) begin
      int j1 = 0;
      for (int i = 0; i < m; i++) begin
        u64 s = rpow(psii, u64'(brev(m + i, $clog2(n))));
        for (int j = j1; j < j1 + t; j++) begin
          u64 u = a[j], v = a[j + t];
          a[j] = radd(u, v);
          a[j + t] = rmul(rsub(u, v), s);
        end
        j1 += 2 * t;
      end
      t = t * 2;
    end
  endfunction

  // Signed gadget decomposition (most significant digit first), digits mod q.
  function automatic void decomp(u64 x, int l, int logb, ref u64 d[]);
    int r = 64 - l * logb;
    logic [64:0] s = {1'b0, x} + (65'd1 << (r - 1));
    longint unsigned st = 64'(s >> r);
    longint c = 0;
    d = new[l];
    for (int j = l - 1; j >= 0; j--) begin
      longint dig = longint'((st >> ((l - 1 - j) * logb)) & ((64'd1 << logb) - 1)) + c;
      if (dig >= (longint'(1) << (logb - 1))) begin
        dig -= longint'(1) << logb;
        c = 1;
      end else c = 0;
      d[j] = (dig < 0) ? RQ - u64'(-dig) : u64'(dig);
    end
  endfunction

  // External product; acc and result flattened [poly][coef], key flattened
  // [(row*(k+1)+o)*n + p] in the NTT domain (already scaled by 1/n).
  function automatic void extprod(int n, int k, int l, int logb, const ref u64 acc[], const ref u64 key[], ref u64 res[]);
    u64 rows [][];
    rows = new[(k + 1) * l];
    foreach (rows[r]) rows[r] = new[n];
    for (int i = 0; i <= k; i++)
      for (int p = 0; p < n; p++) begin
        u64 d[];
        decomp(acc[i * n + p], l, logb, d);
        for (int j = 0; j < l; j++) rows[i * l + j][p] = d[j];
      end
    foreach (rows[r]) ntt_fast(n, rows[r]);
    res = new[(k + 1) * n];
    for (int o = 0; o <= k; o++) begin
      u64 sum[];
      sum = new[n];
      for (int p = 0; p < n; p++) begin
        sum[p] = 0;
        for (int r = 0; r < (k + 1) * l; r++) sum[p] = radd(sum[p], rmul(rows[r][p], key[(r * (k + 1) + o) * n + p]));
      end
      intt_fast(n, sum);
      for (int p = 0; p < n; p++) res[o * n + p] = sum[p];
    end
  endfunction

  // Multiply every polynomial by X^a (a in [0, 2n)), using X^n = -1: coefficient
  // p moves to p + a, negated once for every wrap past n.
  function automatic void rotate(int n, int k, int a, ref u64 v[]);
    u64 o [];
    o = new[v.size()];
    for (int i = 0; i <= k; i++)
      for (int p = 0; p < n; p++) begin
        int d;
        d = (p + a) % (2 * n);
        if (d < n) o[i * n + d] = v[i * n + p];
        else       o[i * n + d - n] = rneg(v[i * n + p]);
      end
    foreach (v[i]) v[i] = o[i];
  endfunction

  // One blind-rotation step: acc <- ExtProd(acc)*X^a + acc - ExtProd(acc)
  function automatic void br_step(int n, int k, int l, int logb, int a, ref u64 acc[], const ref u64 key[]);
    u64 e[], r[];
    extprod(n, k, l, logb, acc, key, e);
    r = new[e.size()];
    foreach (e[i]) r[i] = e[i];
    rotate(n, k, a, r);
    foreach (acc[i]) acc[i] = radd(r[i], rsub(acc[i], e[i]));
  endfunction

  // Sample extraction at index h: k*n mask values then the body.
  function automatic void extract(int n, int k, int h, const ref u64 acc[], ref u64 lwe[]);
    lwe = new[k * n + 1];
    for (int i = 0; i < k; i++)
      for (int j = 0; j < n; j++)
        lwe[i * n + j] = (j <= h) ? acc[i * n + h - j] : rneg(acc[i * n + h - j + n]);
    lwe[k * n] = acc[k * n + h];
  endfunction

  // Modulus switch of a Z_q value to Z_2n (rounded top bits).
  function automatic int mswitch(u64 x, int n);
    int lg = $clog2(2 * n);
    logic [64:0] s;
    s = {1'b0, x} + (65'd1 << (64 - lg - 1));
    return int'((s >> (64 - lg)) & ((65'd1 << lg) - 1));
  endfunction
endpackage
