// gf_pkg: shared constants and elaboration-time helpers for GF(2^m) in a
// normal basis (h_0, ..., h_{m-1}) with h_i = beta^(2^i), beta a root of P(x).
//
// An element a = sum a_i h_i is stored as an m-bit vector, bit i = a_i.
// Squaring (the [1] power) is a cyclic shift of bit i to bit i+1, the square
// root (the [-1] power) the opposite shift, and h_i itself is the unit vector
// with only bit i set.  The field polynomials are the ones listed for the two
// fields of the design; for GF(2^8) the polynomial is x^8+x^7+x^5+x^3+1 (the
// irreducible one of complexity C_N = 21), for GF(2^16) it is
// x^16+x^15+x^13+x^12+x^11+x^10+x^8+x^7+x^5+x^3+x^2+x+1.
//
// The functions below run only at elaboration time: they build the
// Massey-Omura coefficient matrix lambda (bit i*MAXM+j set when the product
// h_i*h_j has a non-zero h_0 coordinate), from which gf_nb_mul is wired.
package gf_pkg;

  localparam int MAXM = 16;
  typedef logic [MAXM-1:0] felem_t;

  // Per-row operation of the Gaussian elimination array (the five inputs of
  // the multiplexer in each GE cell).
  typedef enum logic [2:0] {
    GE_KEEP     = 3'd0,   // hold the value
    GE_SHL      = 3'd1,   // shiftleft: take the right neighbour
    GE_ELIM     = 3'd2,   // eliminate / reduce
    GE_UP_FIRST = 3'd3,   // shiftup: take the first row
    GE_UP_NEXT  = 3'd4    // shiftup: take the next row
  } ge_op_t;

  localparam logic [MAXM:0] POLY_GF256   = 17'h001A9;
  localparam logic [MAXM:0] POLY_GF65536 = 17'h1BDAF;

  // Polynomial-basis product modulo poly (degree m).
  function automatic felem_t poly_mul(felem_t a, felem_t b, int m, logic [MAXM:0] poly);
    logic [2*MAXM-1:0] r;
    r = '0;
    for (int i = 0; i < m; i++)
      if (b[i]) r = r ^ ({{MAXM{1'b0}}, a} << i);
    for (int i = 2*m-2; i >= m; i--)
      if (r[i]) r = r ^ ({{(MAXM-1){1'b0}}, poly} << (i-m));
    return r[MAXM-1:0];
  endfunction

  // Massey-Omura lambda matrix of the normal basis generated by x mod poly.
  function automatic logic [MAXM*MAXM-1:0] nb_lambda(int m, logic [MAXM:0] poly);
    felem_t h   [MAXM];
    felem_t aug [MAXM];   // rows of the basis matrix (poly coords) ...
    felem_t tag [MAXM];   // ... and the normal-basis vector each row stands for
    felem_t p, c;
    logic [MAXM*MAXM-1:0] lam;
    int piv;
    h[0] = felem_t'(2);
    for (int i = 1; i < m; i++) h[i] = poly_mul(h[i-1], h[i-1], m, poly);
    // Gauss-Jordan: make aug[k] the unique row with leading poly bit k.
    for (int i = 0; i < MAXM; i++) begin
      aug[i] = (i < m) ? h[i] : '0;
      tag[i] = (i < m) ? (felem_t'(1) << i) : '0;
    end
    for (int k = 0; k < m; k++) begin
      piv = -1;
      for (int i = k; i < m; i++) if (piv < 0 && aug[i][k]) piv = i;
      if (piv >= 0) begin
        p = aug[piv]; aug[piv] = aug[k]; aug[k] = p;
        p = tag[piv]; tag[piv] = tag[k]; tag[k] = p;
        for (int i = 0; i < m; i++)
          if (i != k && aug[i][k]) begin
            aug[i] = aug[i] ^ aug[k];
            tag[i] = tag[i] ^ tag[k];
          end
      end
    end
    lam = '0;
    for (int i = 0; i < m; i++)
      for (int j = 0; j < m; j++) begin
        p = poly_mul(h[i], h[j], m, poly);
        c = '0;
        for (int k = 0; k < m; k++) if (p[k]) c = c ^ tag[k];
        lam[i*MAXM+j] = c[0];
      end
    return lam;
  endfunction

  // Number of ones in lambda = C_N, the serial Massey-Omura complexity.
  function automatic int nb_complexity(int m, logic [MAXM:0] poly);
    logic [MAXM*MAXM-1:0] lam;
    int n;
    lam = nb_lambda(m, poly);
    n = 0;
    for (int i = 0; i < MAXM*MAXM; i++) n += int'(lam[i]);
    return n;
  endfunction

endpackage
