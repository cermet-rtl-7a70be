// cermet_pkg -- types and constant functions shared by the CERMET receiver.
//
// The receiver unmixes n channels that were premixed at the sender with the
// inverse of an n x n matrix H over GF(2^m). H is the Moore matrix
//   H[i][j] = h_i ^ (2^j)        (0-based row i, column j)
// built from n elements h_i that are linearly independent over GF(2); such an H
// makes every row an MRD (maximum rank distance) code. The paper fixes m = 16
// and this Moore-matrix form. It names neither the field polynomial nor the
// elements h_i: this design chooses the primitive polynomial
// x^16 + x^12 + x^3 + x + 1 and the polynomial basis h_i = x^i, which is
// linearly independent for any n <= m.
//
// The functions below are used only to compute constants at elaboration time
// (the stored H matrix); the datapath multiplies with the gf_mult_rpa module.
package cermet_pkg;

  // Field size m and field polynomial (bit m set) of the default configuration.
  localparam int unsigned  GF_M    = 16;
  localparam logic [31:0]  GF_POLY = 32'h0001_100B;

  // Matrix-multiplication architecture: A1 (one multiplier per product of a
  // data unit, all in parallel) or A2 (a single multiplier, serial).
  typedef enum logic {
    MUL_PARALLEL = 1'b0,
    MUL_SERIAL   = 1'b1
  } mul_arch_e;

  // Galois-field product of a and b modulo poly (degree m), shift-and-add.
  function automatic logic [31:0] gf_mul(input logic [31:0] a, input logic [31:0] b,
                                         input int unsigned m, input logic [31:0] poly);
    logic [31:0] p, aa, bb, mask, modmask;
    p       = '0;
    aa      = a;
    bb      = b;
    mask    = 32'(1) << (m - 1);
    modmask = (m >= 32) ? '1 : ((32'(1) << m) - 1);
    for (int unsigned i = 0; i < m; i++) begin
      if (bb[0]) p = p ^ aa;
      bb = bb >> 1;
      if ((aa & mask) != 0) aa = ((aa << 1) ^ poly) & modmask;
      else                  aa = (aa << 1) & modmask;
    end
    return p;
  endfunction

  // Basis element h_i = x^i.
  function automatic logic [31:0] h_basis(input int unsigned i);
    return 32'(1) << i;
  endfunction

  // Moore-matrix entry H[i][j] = h_i^(2^j): square h_i j times.
  function automatic logic [31:0] h_entry(input int unsigned i, input int unsigned j,
                                          input int unsigned m, input logic [31:0] poly);
    logic [31:0] v;
    v = h_basis(i);
    for (int unsigned s = 0; s < j; s++) v = gf_mul(v, v, m, poly);
    return v;
  endfunction

endpackage
