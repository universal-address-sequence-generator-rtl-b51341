// uasg_tb_pkg: reference model and helpers shared by the UASG testbenches.
//
// The model does not use the recursion the hardware implements. It uses the
// closed form that follows from it: the adder has XORed in v_i once for every
// flip of Gray-code bit i, so after n steps from B(0)
//   A(n) = A(0) xor G(B(0) + n) xor G(B(0)),   G(x) = XOR of v_i over the set
// bits i of the Gray code of x.
// Widths up to 32 bits; the width m is an argument.
package uasg_tb_pkg;

  typedef logic [31:0] vec_t;
  typedef vec_t        matrix_t [32];   // matrix_t[k] is v_(k+1)

  function automatic vec_t mask(int m);
    return (m >= 32) ? 32'hFFFF_FFFF : ((32'h1 << m) - 32'h1);
  endfunction

  function automatic vec_t gray(vec_t x, int m);
    return (x ^ (x >> 1)) & mask(m);
  endfunction

  // Index i (1-based) of the Gray-code bit that flips from k-1 to k.
  function automatic int t_index(vec_t k, int m);
    vec_t d = gray(k, m) ^ gray((k - 1) & mask(m), m);
    for (int i = 0; i < m; i++) if (d[i]) return i + 1;
    return 0;
  endfunction

  function automatic vec_t g_sum(input matrix_t v, vec_t x, int m);
    vec_t s = '0;
    vec_t g = gray(x & mask(m), m);
    for (int i = 0; i < m; i++) if (g[i]) s ^= v[i];
    return s & mask(m);
  endfunction

  function automatic vec_t ref_addr(input matrix_t v, vec_t a0, vec_t b0,
                                     int n, int m);
    return (a0 ^ g_sum(v, (b0 + vec_t'(n)) & mask(m), m) ^ g_sum(v, b0, m)) & mask(m);
  endfunction

  // Rank over GF(2) by Gaussian elimination.
  function automatic int rank(input matrix_t v, int m);
    vec_t rows [32];
    int r = 0;
    for (int i = 0; i < m; i++) rows[i] = v[i] & mask(m);
    for (int c = m - 1; c >= 0; c--) begin
      int p = -1;
      for (int i = r; i < m; i++) if (rows[i][c] && p < 0) p = i;
      if (p >= 0) begin
        vec_t t = rows[p]; rows[p] = rows[r]; rows[r] = t;
        for (int i = 0; i < m; i++) if (i != r && rows[i][c]) rows[i] ^= rows[r];
        r++;
      end
    end
    return r;
  endfunction

endpackage
