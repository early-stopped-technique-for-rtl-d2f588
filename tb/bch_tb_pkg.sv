// bch_tb_pkg -- reference model for the BCH decoder testbenches.
//
// Works out expected values independently of the RTL: GF(2^14) arithmetic
// through exponent/logarithm tables (the RTL multiplies bit-serially),
// syndromes as sums of alpha^(j*p) over the error positions, a textbook
// Berlekamp-Massey over all 2T steps with field inverses (the RTL is an
// inversion-free odd-step form), a systematic encoder built from the
// generator polynomial (product of the minimal polynomials of alpha^1,
// alpha^3, ..., alpha^(2T-1)) and helpers for random error patterns and the
// beat format of the decoder (beat k bit b = position (NB-1-k)*P + b).
// Call init() once before anything else, with the field's degree and
// polynomial when it is not the default GF(2^14).
package bch_tb_pkg;

  // Current field; init() selects it. Default GF(2^14), x^14+x^10+x^6+x+1.
  int M    = 14;
  int Q1   = (1 << 14) - 1;
  int POLY = 'h4443;                     // full polynomial, x^M included

  int exp_t [];
  int log_t [];

  function automatic void init(int m = 14, int poly = 'h4443);
    int x;
    M = m;
    Q1 = (1 << m) - 1;
    POLY = poly;
    exp_t = new[2 * Q1 + 1];
    log_t = new[Q1 + 1];
    x = 1;
    for (int i = 0; i < Q1; i++) begin
      exp_t[i] = x;
      log_t[x] = i;
      x = x << 1;
      if ((x >> M) != 0) x = x ^ POLY;
    end
    for (int i = Q1; i <= 2 * Q1; i++) exp_t[i] = exp_t[i - Q1];
    log_t[0] = -1;
  endfunction

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[log_t[a] + log_t[b]];
  endfunction

  function automatic int inv(int a);
    return exp_t[(Q1 - log_t[a]) % Q1];
  endfunction

  function automatic int apow(longint e);
    longint q;
    int k;
    q = longint'(Q1);
    k = int'(((e % q) + q) % q);
    return exp_t[k];
  endfunction

  // Poly value at x, coefficients c[0..]
  function automatic int peval(int c[], int x);
    int r;
    r = 0;
    for (int i = c.size() - 1; i >= 0; i--) r = mul(r, x) ^ c[i];
    return r;
  endfunction

  // S_j = sum over error positions of alpha^(j*p), j = 1..2T (index j).
  function automatic void syndromes(int pos[$], int t, output int s[]);
    s = new[2 * t + 1];
    for (int j = 0; j <= 2 * t; j++) s[j] = 0;
    foreach (pos[k])
      for (int j = 1; j <= 2 * t; j++) s[j] ^= apow(longint'(j) * pos[k]);
  endfunction

  // Textbook Massey over 2T steps. Returns Lambda (lam), L and the
  // discrepancy of every odd step 2j-1 as dodd[j], j = 1..T.
  function automatic void massey(int s[], int t, output int lam[], output int len,
                                 output int dodd[]);
    int c[];
    int b[];
    int tmp[];
    int l, m, bd, d;
    c = new[2 * t + 2];
    b = new[2 * t + 2];
    dodd = new[t + 1];
    foreach (c[i]) begin c[i] = 0; b[i] = 0; end
    c[0] = 1; b[0] = 1; l = 0; m = 1; bd = 1;
    for (int n = 0; n < 2 * t; n++) begin
      d = s[n + 1];
      for (int i = 1; i <= l; i++) d ^= mul(c[i], s[n + 1 - i]);
      if (n % 2 == 0) dodd[n / 2 + 1] = d;
      if (d == 0) begin
        m++;
      end else if (2 * l <= n) begin
        int coef;
        tmp = c;
        coef = mul(d, inv(bd));
        for (int i = 0; i + m < c.size(); i++) c[i + m] ^= mul(coef, b[i]);
        l = n + 1 - l; b = tmp; bd = d; m = 1;
      end else begin
        int coef;
        coef = mul(d, inv(bd));
        for (int i = 0; i + m < c.size(); i++) c[i + m] ^= mul(coef, b[i]);
        m++;
      end
    end
    lam = c;
    len = l;
  endfunction

  // Iterations ES version 3 makes: first j >= kappa with d_j..d_(j-kappa+1)
  // all zero, else T.
  function automatic int es3_iters(int dodd[], int t, int kappa);
    int run;
    run = 0;
    for (int j = 1; j <= t; j++) begin
      run = (dodd[j] == 0) ? run + 1 : 0;
      if (run >= kappa) return j;
    end
    return t;
  endfunction

  // Generator polynomial over GF(2), g[i] = coefficient of x^i.
  function automatic void generator(int t, output bit g[]);
    bit done_[];
    bit acc[$];
    done_ = new[Q1];
    acc.push_back(1'b1);
    for (int j = 1; j < 2 * t; j += 2) begin
      int mp[$];
      int c;
      bit prod[$];
      if (done_[j]) continue;
      // minimal polynomial of alpha^j over the cyclotomic coset of j
      mp.push_back(1);
      c = j;
      do begin
        int nm[$];
        done_[c] = 1'b1;
        nm.push_back(mul(mp[0], apow(longint'(c))));
        for (int i = 1; i < mp.size(); i++) nm.push_back(mp[i - 1] ^ mul(mp[i], apow(longint'(c))));
        nm.push_back(mp[mp.size() - 1]);
        mp = nm;
        c = (2 * c) % Q1;
      end while (c != j);
      for (int i = 0; i < acc.size() + mp.size() - 1; i++) prod.push_back(1'b0);
      foreach (acc[a]) if (acc[a]) foreach (mp[k]) prod[a + k] ^= mp[k][0];
      acc = prod;
    end
    g = new[acc.size()];
    foreach (acc[i]) g[i] = acc[i];
  endfunction

  // Systematic random codeword of length n: w[p] = bit at position p.
  function automatic void encode_random(bit g[], int n, output bit w[]);
    int r;
    bit rem[];
    r = g.size() - 1;
    w = new[n];
    rem = new[r];
    for (int p = n - 1; p >= r; p--) begin
      bit fb;
      w[p] = 1'($urandom);
      fb = w[p] ^ rem[r - 1];
      for (int i = r - 1; i > 0; i--) rem[i] = rem[i - 1] ^ (fb & g[i]);
      rem[0] = fb & g[0];
    end
    for (int p = 0; p < r; p++) w[p] = rem[p];
  endfunction

  // e distinct random positions below n.
  function automatic void random_positions(int n, int e, output int pos[$]);
    pos = {};
    while (pos.size() < e) begin
      int p;
      bit dup;
      p = int'($urandom_range(n - 1, 0));
      dup = 1'b0;
      foreach (pos[k]) if (pos[k] == p) dup = 1'b1;
      if (!dup) pos.push_back(p);
    end
  endfunction

  // Beat k of a word in the decoder's format.
  function automatic logic [63:0] beat_of(bit w[], int k, int nb, int p);
    logic [63:0] v;
    v = '0;
    for (int b = 0; b < p; b++) begin
      int q;
      q = (nb - 1 - k) * p + b;
      if (q < w.size()) v[b] = w[q];
    end
    return v;
  endfunction

endpackage
