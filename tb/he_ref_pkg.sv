// he_ref_pkg: plain sequential reference arithmetic for the testbenches.
//
// Everything here is written the textbook way (128-bit products and the %
// operator, in-place transform loops) so that it is independent of the
// pipelined hardware it checks. Residues are held in 64-bit words; a test
// width W <= 64 only changes which moduli are chosen.
package he_ref_pkg;
  typedef logic [63:0] u64_t;
  typedef u64_t poly_t[];

  function automatic u64_t mulmod(input u64_t a, input u64_t b, input u64_t q);
    logic [127:0] p;
    p = {64'd0, a} * {64'd0, b};
    return u64_t'(p % {64'd0, q});
  endfunction

  function automatic u64_t addmod(input u64_t a, input u64_t b, input u64_t q);
    logic [64:0] s;
    s = ({1'b0, a % q} + {1'b0, b % q}) % {1'b0, q};
    return s[63:0];
  endfunction

  function automatic u64_t submod(input u64_t a, input u64_t b, input u64_t q);
    return addmod(a % q, q - (b % q), q);
  endfunction

  function automatic u64_t powmod(input u64_t b, input u64_t e, input u64_t q);
    u64_t r = 1 % q;
    u64_t x = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, x, q);
      x = mulmod(x, x, q);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic u64_t invmod(input u64_t a, input u64_t q);  // q prime
    return powmod(a, q - 2, q);
  endfunction

  // Barrett constant floor(2^(2W) / q)
  function automatic logic [64:0] barrett_mu(input u64_t q, input int w);
    logic [128:0] one;
    one = 129'd1 << (2 * w);
    return 65'(one / {65'd0, q});
  endfunction

  // Deterministic Miller-Rabin for 64-bit n (bases 2..37).
  function automatic bit is_prime(input u64_t n);
    u64_t d, x;
    int r;
    u64_t bases [12] = '{2, 3, 5, 7, 11, 13, 17, 19, 23, 29, 31, 37};
    if (n < 2) return 0;
    for (int i = 0; i < 12; i++) begin
      if (n == bases[i]) return 1;
      if (n % bases[i] == 0) return 0;
    end
    d = n - 1;
    r = 0;
    while (!d[0]) begin d = d >> 1; r++; end
    for (int i = 0; i < 12; i++) begin
      bit comp = 1;
      x = powmod(bases[i], d, n);
      if (x == 1 || x == n - 1) continue;
      for (int k = 1; k < r; k++) begin
        x = mulmod(x, x, n);
        if (x == n - 1) begin comp = 0; break; end
      end
      if (comp) return 0;
    end
    return 1;
  endfunction

  // The idx-th largest prime q with 2^(w-1) <= q < 2^w and q = 1 mod 2n.
  function automatic u64_t find_prime(input int w, input int n, input int idx);
    u64_t step = 2 * u64_t'(n);
    u64_t c = ((u64_t'(1) << w) - 1) / step * step + 1;
    int found = 0;
    while (c >= (u64_t'(1) << (w - 1))) begin
      if ((w == 64 || c < (u64_t'(1) << w)) && is_prime(c)) begin
        if (found == idx) return c;
        found++;
      end
      c -= step;
    end
    return 0;
  endfunction

  // A primitive 2n-th root of unity mod q (psi^n = -1).
  function automatic u64_t find_psi(input u64_t q, input int n);
    for (u64_t g = 2; g < 1000; g++) begin
      u64_t psi = powmod(g, (q - 1) / (2 * u64_t'(n)), q);
      if (powmod(psi, u64_t'(n), q) == q - 1) return psi;
    end
    return 0;
  endfunction

  function automatic int bitrev(input int k, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r |= ((k >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  // psi_rev[k] = psi^bitrev(k): the twiddle table of both transforms
  function automatic poly_t tw_table(input u64_t q, input u64_t psi, input int n);
    poly_t t = new[n];
    int s = $clog2(n);
    for (int k = 0; k < n; k++) t[k] = powmod(psi, u64_t'(bitrev(k, s)), q);
    return t;
  endfunction

  // Negacyclic forward transform, natural order in, bit-reversed order out.
  function automatic poly_t ntt_ref(input poly_t a_in, input u64_t q, input u64_t psi);
    poly_t a = a_in;
    int n = a.size();
    poly_t tw = tw_table(q, psi, n);
    int t = n;
    for (int m = 1; m < n; m *= 2) begin
      t = t / 2;
      for (int i = 0; i < m; i++) begin
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          u64_t u = a[j];
          u64_t v = mulmod(a[j+t], tw[m+i], q);
          a[j]   = addmod(u, v, q);
          a[j+t] = submod(u, v, q);
        end
      end
    end
    return a;
  endfunction

  // Inverse of ntt_ref: multiplies out the 1/n at the end.
  function automatic poly_t intt_ref(input poly_t a_in, input u64_t q, input u64_t psi);
    poly_t a = a_in;
    int n = a.size();
    poly_t tw = tw_table(q, invmod(psi, q), n);
    int t = 1;
    u64_t ninv = invmod(u64_t'(n), q);
    for (int m = n / 2; m >= 1; m /= 2) begin
      for (int i = 0; i < m; i++) begin
        for (int j = 2 * i * t; j < 2 * i * t + t; j++) begin
          u64_t u = a[j];
          u64_t v = a[j+t];
          a[j]   = addmod(u, v, q);
          a[j+t] = mulmod(submod(u, v, q), tw[m+i], q);
        end
      end
      t *= 2;
    end
    for (int j = 0; j < n; j++) a[j] = mulmod(a[j], ninv, q);
    return a;
  endfunction

  // Schoolbook negacyclic product, for checking the transforms themselves.
  function automatic poly_t negacyclic_mul(input poly_t a, input poly_t b, input u64_t q);
    int n = a.size();
    poly_t r = new[n];
    for (int k = 0; k < n; k++) r[k] = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        u64_t p = mulmod(a[i], b[j], q);
        if (i + j < n) r[i+j] = addmod(r[i+j], p, q);
        else           r[i+j-n] = submod(r[i+j-n], p, q);
      end
    return r;
  endfunction

  function automatic poly_t rand_poly(input int n, input u64_t q);
    poly_t r = new[n];
    for (int i = 0; i < n; i++) r[i] = {$urandom, $urandom} % q;
    return r;
  endfunction

  // ------------------------------------------------------------------
  // RNS parameter set: L moduli q_j for Q and K moduli p_i for P, all
  // w-bit primes = 1 mod 2n, with their roots and the derived constants.
  class rns_cfg;
    int n, w, l, k;
    u64_t q[], p[], psiq[], psip[];

    function new(input int n_, input int w_, input int l_, input int k_);
      n = n_; w = w_; l = l_; k = k_;
      q = new[l]; p = new[k]; psiq = new[l]; psip = new[k];
      for (int j = 0; j < l; j++) begin
        q[j] = find_prime(w, n, j);
        psiq[j] = find_psi(q[j], n);
      end
      for (int i = 0; i < k; i++) begin
        p[i] = find_prime(w, n, l + i);
        psip[i] = find_psi(p[i], n);
      end
    endfunction

    function automatic logic [64:0] mu(input u64_t m);
      return barrett_mu(m, w);
    endfunction

    static function automatic u64_t prod_except(input u64_t a[], input int skip, input u64_t m);
      u64_t r = 1 % m;
      for (int x = 0; x < a.size(); x++) if (x != skip) r = mulmod(r, a[x] % m, m);
      return r;
    endfunction

    function automatic u64_t up_c1(input int j);            // (Q/q_j)^-1 mod q_j
      return invmod(prod_except(q, j, q[j]), q[j]);
    endfunction
    function automatic u64_t up_c2(input int i, input int j); // (Q/q_j) mod p_i
      return prod_except(q, j, p[i]);
    endfunction
    function automatic u64_t dn_c1(input int i);            // (P/p_i)^-1 mod p_i
      return invmod(prod_except(p, i, p[i]), p[i]);
    endfunction
    function automatic u64_t dn_c2(input int j, input int i); // p_i^-1 mod q_j
      return invmod(p[i] % q[j], q[j]);
    endfunction
    function automatic u64_t pinv(input int j);             // P^-1 mod q_j
      return invmod(prod_except(p, -1, q[j]), q[j]);
    endfunction
    function automatic u64_t qinv(input int t, input int j); // q_t^-1 mod q_j
      return invmod(q[t] % q[j], q[j]);
    endfunction
  endclass

  // Fast basis conversion of coefficient vectors (one array per source
  // channel), the textbook formula:
  //   y_i = [ sum_j [x_j * c1_j]_{src_j} * c2_ij ]_{dst_i}
  function automatic void bconv_ref(input poly_t x[], input u64_t src[], input u64_t dst[],
                                    input u64_t c1[], input u64_t c2[][], output poly_t y[]);
    int n = x[0].size();
    y = new[dst.size()];
    for (int i = 0; i < dst.size(); i++) begin
      y[i] = new[n];
      for (int c = 0; c < n; c++) begin
        u64_t acc = 0;
        for (int j = 0; j < src.size(); j++)
          acc = addmod(acc, mulmod(mulmod(x[j][c], c1[j], src[j]), c2[i][j], dst[i]), dst[i]);
        y[i][c] = acc;
      end
    end
  endfunction

  // One rescaling step on coefficient-domain channels 0..m-1 (drops m-1).
  function automatic void rs_ref(input poly_t x[], input u64_t q[], output poly_t y[]);
    int m = x.size();
    int n = x[0].size();
    y = new[m - 1];
    for (int j = 0; j < m - 1; j++) begin
      u64_t qi = invmod(q[m-1] % q[j], q[j]);
      y[j] = new[n];
      for (int c = 0; c < n; c++) y[j][c] = mulmod(submod(x[j][c], x[m-1][c] % q[j], q[j]), qi, q[j]);
    end
  endfunction

  // Relinearization of (d0..d3) as the textbook sequence of ModUp,
  // key products, ModDown (with P^-1 folded into the q-part keys and the
  // scaled basis conversion). d[t][j] and keys are NTT-domain arrays;
  // key[comp][0..3] = ek2_0, ek2_1, ek3_0, ek3_1 with comp < K for the P part
  // and K + j for the (P^-1-scaled) Q part. Result c[l][j] in the
  // coefficient domain.
  function automatic void relin_ref(input rns_cfg cfg, input poly_t d[][], input poly_t key[][],
                                    output poly_t c[][]);
    int n = cfg.n, l = cfg.l, k = cfg.k;
    u64_t c1u[] = new[l], c1d[] = new[k];
    u64_t c2u[][] = new[k], c2d[][] = new[l];
    poly_t dstd[] = new[l], dup[][] = new[2], tmp[], cp[] = new[k], cpq[];
    for (int j = 0; j < l; j++) c1u[j] = cfg.up_c1(j);
    for (int i = 0; i < k; i++) begin
      c2u[i] = new[l];
      for (int j = 0; j < l; j++) c2u[i][j] = cfg.up_c2(i, j);
      c1d[i] = cfg.dn_c1(i);
    end
    for (int j = 0; j < l; j++) begin
      c2d[j] = new[k];
      for (int i = 0; i < k; i++) c2d[j][i] = cfg.dn_c2(j, i);
    end
    // ModUp of d2 and d3
    for (int t = 0; t < 2; t++) begin
      for (int j = 0; j < l; j++) dstd[j] = intt_ref(d[2+t][j], cfg.q[j], cfg.psiq[j]);
      bconv_ref(dstd, cfg.q, cfg.p, c1u, c2u, tmp);
      dup[t] = new[k];
      for (int i = 0; i < k; i++) dup[t][i] = ntt_ref(tmp[i], cfg.p[i], cfg.psip[i]);
    end
    c = new[2];
    for (int o = 0; o < 2; o++) begin
      c[o] = new[l];
      for (int i = 0; i < k; i++) begin
        cp[i] = new[n];
        for (int x = 0; x < n; x++)
          cp[i][x] = addmod(mulmod(dup[0][i][x], key[i][o][x], cfg.p[i]),
                            mulmod(dup[1][i][x], key[i][2+o][x], cfg.p[i]), cfg.p[i]);
        cp[i] = intt_ref(cp[i], cfg.p[i], cfg.psip[i]);
      end
      bconv_ref(cp, cfg.p, cfg.q, c1d, c2d, cpq);
      for (int j = 0; j < l; j++) begin
        poly_t cq = new[n];
        for (int x = 0; x < n; x++)
          cq[x] = addmod(addmod(d[o][j][x], mulmod(d[2][j][x], key[k+j][o][x], cfg.q[j]), cfg.q[j]),
                         mulmod(d[3][j][x], key[k+j][2+o][x], cfg.q[j]), cfg.q[j]);
        cq = intt_ref(cq, cfg.q[j], cfg.psiq[j]);
        c[o][j] = new[n];
        for (int x = 0; x < n; x++) c[o][j][x] = submod(cq[x], cpq[j][x], cfg.q[j]);
      end
    end
  endfunction

  // Two plain rescaling steps of an NTT-domain polynomial (all channels
  // transformed back, two rescalings, forward transform of what is left).
  function automatic void rs2_ntt_ref(input rns_cfg cfg, input poly_t a[], output poly_t y[]);
    poly_t x[] = new[a.size()], r1[], r2[];
    for (int j = 0; j < a.size(); j++) x[j] = intt_ref(a[j], cfg.q[j], cfg.psiq[j]);
    rs_ref(x, cfg.q, r1);
    rs_ref(r1, cfg.q, r2);
    y = new[r2.size()];
    for (int j = 0; j < r2.size(); j++) y[j] = ntt_ref(r2[j], cfg.q[j], cfg.psiq[j]);
  endfunction
endpackage
