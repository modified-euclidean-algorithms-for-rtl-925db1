// tb_gf_pkg: reference GF(2^8) arithmetic for the testbenches.
//
// Deliberately built differently from the RTL's shift-and-add functions:
// it generates exponent and logarithm tables by stepping alpha = x through
// the field defined by x^8 + x^4 + x^3 + x^2 + 1, and multiplies through
// them. Call init() once before any other function. Also holds the
// polynomial helpers the testbenches use to build codewords, syndromes and
// the expected errata locator and evaluator (coefficient index = degree).
package tb_gf_pkg;

  int exp_t [512];
  int log_t [256];

  function automatic void init();
    int v;
    v = 1;
    for (int i = 0; i < 255; i++) begin
      exp_t[i] = v;
      exp_t[i+255] = v;
      log_t[v] = i;
      v = v << 1;
      if ((v & 'h100) != 0) v = v ^ 'h11D;
    end
    exp_t[510] = exp_t[0];
    exp_t[511] = exp_t[1];
    log_t[0] = 0;
  endfunction

  function automatic int mul(int a, int b);
    if (a == 0 || b == 0) return 0;
    return exp_t[log_t[a] + log_t[b]];
  endfunction

  function automatic int inv(int a);
    if (a == 0) return 0;
    return exp_t[(255 - log_t[a]) % 255];
  endfunction

  // alpha^e, any integer e
  function automatic int pw(int e);
    int r;
    r = e % 255;
    if (r < 0) r += 255;
    return exp_t[r];
  endfunction

  // evaluate polynomial c (c[i] = coefficient of z^i) at z
  function automatic int eval(int c[$], int z);
    int acc;
    acc = 0;
    for (int i = c.size() - 1; i >= 0; i--) acc = mul(acc, z) ^ c[i];
    return acc;
  endfunction

  // c(z) * (1 - x z), in place
  function automatic void mul_lin(ref int c[$], input int x);
    c.push_back(0);
    for (int i = c.size() - 1; i >= 1; i--) c[i] = c[i] ^ mul(x, c[i-1]);
  endfunction

  // product a(z) * b(z)
  function automatic void pmul(input int a[$], input int b[$], ref int r[$]);
    r = {};
    for (int i = 0; i < a.size() + b.size() - 1; i++) r.push_back(0);
    for (int i = 0; i < a.size(); i++)
      for (int j = 0; j < b.size(); j++) r[i+j] ^= mul(a[i], b[j]);
  endfunction

  // random codeword of length n, 2t parity, roots alpha^(b0..b0+2t-1):
  // c(z) = m(z) g(z) with random m(z) of degree < n - 2t.
  function automatic void codeword(int n, int t, int b0, ref int c[$]);
    int g[$];
    int m[$];
    g = {1};
    for (int j = 0; j < 2 * t; j++) begin
      // multiply by (z + alpha^(b0+j))
      g.push_back(0);
      for (int i = g.size() - 1; i >= 1; i--) g[i] = g[i-1] ^ mul(pw(b0 + j), g[i]);
      g[0] = mul(pw(b0 + j), g[0]);
    end
    m = {};
    for (int i = 0; i < n - 2 * t; i++) m.push_back($urandom_range(255));
    pmul(m, g, c);
  endfunction

endpackage
