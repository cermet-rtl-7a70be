// tb_gf_ref_pkg -- reference arithmetic for the testbenches.
//
// Computes GF(2^m) products a different way from the design: a full
// carry-less product of degree up to 2m-2 followed by polynomial long
// division by the field polynomial. On top of it: the Moore matrix H with the
// basis h_i = x^i, the matrix inverse G = H^-1 (Gauss-Jordan over GF(2^m)) that
// the sender mixes with, and matrix-vector products.
package tb_gf_ref_pkg;

  localparam int unsigned MAXN = 16;
  typedef logic [31:0] mat_t [MAXN][MAXN];

  function automatic logic [31:0] ref_mul(input logic [31:0] a, input logic [31:0] b,
                                          input int unsigned m, input logic [31:0] poly);
    logic [63:0] p;
    p = '0;
    for (int i = 0; i < int'(m); i++) if (b[i]) p = p ^ (64'(a) << i);
    for (int d = 2 * int'(m) - 2; d >= int'(m); d--)
      if (p[d]) p = p ^ (64'(poly) << (d - int'(m)));
    return p[31:0];
  endfunction

  // Multiplicative inverse by exponentiation: a^(2^m - 2).
  function automatic logic [31:0] ref_inv(input logic [31:0] a, input int unsigned m,
                                          input logic [31:0] poly);
    logic [31:0] r, base;
    longint unsigned e;
    r = 1; base = a; e = (64'd1 << m) - 2;
    while (e != 0) begin
      if (e[0]) r = ref_mul(r, base, m, poly);
      base = ref_mul(base, base, m, poly);
      e = e >> 1;
    end
    return r;
  endfunction

  function automatic mat_t ref_h(input int unsigned n, input int unsigned m,
                                 input logic [31:0] poly);
    mat_t h;
    for (int i = 0; i < MAXN; i++) for (int j = 0; j < MAXN; j++) h[i][j] = 0;
    for (int i = 0; i < int'(n); i++) begin
      logic [31:0] v;
      v = 32'(1) << i;
      for (int j = 0; j < int'(n); j++) begin
        h[i][j] = v;
        v = ref_mul(v, v, m, poly);
      end
    end
    return h;
  endfunction

  // Gauss-Jordan inverse; ok is cleared if the matrix is singular.
  function automatic mat_t ref_matinv(input mat_t a_in, input int unsigned n,
                                      input int unsigned m, input logic [31:0] poly,
                                      output bit ok);
    mat_t a, g;
    a = a_in;
    ok = 1;
    for (int i = 0; i < MAXN; i++) for (int j = 0; j < MAXN; j++) g[i][j] = (i == j) ? 1 : 0;
    for (int c = 0; c < int'(n); c++) begin
      int piv;
      logic [31:0] iv;
      piv = -1;
      for (int r = c; r < int'(n); r++) if (piv < 0 && a[r][c] != 0) piv = r;
      if (piv < 0) begin ok = 0; return g; end
      for (int j = 0; j < int'(n); j++) begin
        logic [31:0] t;
        t = a[c][j]; a[c][j] = a[piv][j]; a[piv][j] = t;
        t = g[c][j]; g[c][j] = g[piv][j]; g[piv][j] = t;
      end
      iv = ref_inv(a[c][c], m, poly);
      for (int j = 0; j < int'(n); j++) begin
        a[c][j] = ref_mul(a[c][j], iv, m, poly);
        g[c][j] = ref_mul(g[c][j], iv, m, poly);
      end
      for (int r = 0; r < int'(n); r++) begin
        if (r != c && a[r][c] != 0) begin
          logic [31:0] f;
          f = a[r][c];
          for (int j = 0; j < int'(n); j++) begin
            a[r][j] = a[r][j] ^ ref_mul(f, a[c][j], m, poly);
            g[r][j] = g[r][j] ^ ref_mul(f, g[c][j], m, poly);
          end
        end
      end
    end
    return g;
  endfunction

endpackage
