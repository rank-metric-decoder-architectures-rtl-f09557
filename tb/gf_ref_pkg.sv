// gf_ref_pkg: reference arithmetic for the testbenches, written without the
// design's multiplier.  Elements are in the normal basis generated by a root
// beta of the field polynomial; the reference converts to the polynomial
// basis through a table built by brute force (sum of conjugates of beta),
// multiplies there and converts back.  Also: rank over GF(2), evaluation of
// linearized polynomials, and a random codeword of the Gabidulin code
// (kernel of the binary expansion of H, solved by Gaussian elimination).
package gf_ref_pkg;
  localparam int RM = 8;                         // reference field GF(2^8)
  localparam logic [RM:0] RPOLY = 9'h1A9;        // x^8+x^7+x^5+x^3+1

  typedef logic [RM-1:0] el_t;
  el_t to_poly [256];
  el_t to_nb   [256];
  bit  ready = 0;

  function automatic el_t pm(el_t a, el_t b);
    logic [2*RM-1:0] r = '0;
    for (int i = 0; i < RM; i++) if (b[i]) r ^= {8'h00, a} << i;
    for (int i = 2*RM-2; i >= RM; i--) if (r[i]) r ^= {7'h00, RPOLY} << (i-RM);
    return r[RM-1:0];
  endfunction

  function automatic void init();
    el_t h [RM];
    el_t y;
    h[0] = 8'h02;
    for (int i = 1; i < RM; i++) h[i] = pm(h[i-1], h[i-1]);
    for (int v = 0; v < 256; v++) begin
      y = '0;
      for (int i = 0; i < RM; i++) if (v[i]) y ^= h[i];
      to_poly[v] = y;
      to_nb[y]   = el_t'(v);
    end
    ready = 1;
  endfunction

  function automatic el_t mul(el_t a, el_t b);
    if (!ready) init();
    return to_nb[pm(to_poly[a], to_poly[b])];
  endfunction

  function automatic el_t pw2(el_t a, int k);    // a^(2^k), k may be negative
    el_t r = a;
    int kk = ((k % RM) + RM) % RM;
    for (int i = 0; i < kk; i++) r = mul(r, r);
    return r;
  endfunction

  function automatic el_t inv(el_t a);
    el_t r = 8'hFF;
    for (int k = 1; k < RM; k++) r = mul(r, pw2(a, k));
    return r;
  endfunction

  function automatic el_t lin_eval(el_t c [], el_t x);  // sum_j c_j x^[j]
    el_t y = '0;
    for (int j = 0; j < c.size(); j++) y ^= mul(c[j], pw2(x, j));
    return y;
  endfunction

  function automatic int rank_bits(logic [63:0] rows [], int w);
    logic [63:0] v [];
    int r = 0, p;
    logic [63:0] t;
    v = rows;
    for (int c = 0; c < w; c++) begin
      p = -1;
      for (int i = r; i < v.size(); i++) if (p < 0 && v[i][c]) p = i;
      if (p >= 0) begin
        t = v[p]; v[p] = v[r]; v[r] = t;
        for (int i = 0; i < v.size(); i++) if (i != r && v[i][c]) v[i] ^= v[r];
        r++;
      end
    end
    return r;
  endfunction

  // Syndromes S_l = sum_i h_{(i+l) mod m} r_i.
  function automatic void syndromes(el_t r [], int t, output el_t s [$]);
    el_t acc;
    s = {};
    for (int l = 0; l < 2*t; l++) begin
      acc = '0;
      for (int i = 0; i < r.size(); i++) acc ^= mul(el_t'(1) << ((i + l) % RM), r[i]);
      s.push_back(acc);
    end
  endfunction

  // Random codeword of the (n, n-2t) code: random solution of H c = 0.
  function automatic void codeword(int n, int t, output el_t c [$]);
    // binary system: 2t*RM equations, n*RM unknowns (bit b of c_i = u[i*RM+b])
    logic [63:0] eq [];
    logic [63:0] u;
    int nr, nv, r, p, piv_col [];
    logic [63:0] t64;
    el_t col;
    nr = 2*t*RM; nv = n*RM;
    eq = new[nr];
    for (int k = 0; k < nr; k++) eq[k] = '0;
    for (int i = 0; i < n; i++)
      for (int b = 0; b < RM; b++)
        for (int l = 0; l < 2*t; l++) begin
          col = mul(el_t'(1) << ((i + l) % RM), el_t'(1) << b);
          for (int k = 0; k < RM; k++) eq[l*RM+k][i*RM+b] = col[k];
        end
    // reduce to RRE
    piv_col = new[nr];
    r = 0;
    for (int cidx = 0; cidx < nv && r < nr; cidx++) begin
      p = -1;
      for (int i = r; i < nr; i++) if (p < 0 && eq[i][cidx]) p = i;
      if (p >= 0) begin
        t64 = eq[p]; eq[p] = eq[r]; eq[r] = t64;
        for (int i = 0; i < nr; i++) if (i != r && eq[i][cidx]) eq[i] ^= eq[r];
        piv_col[r] = cidx;
        r++;
      end
    end
    // random free variables, pivots solved
    u = {$urandom, $urandom};
    for (int k = 0; k < r; k++) u[piv_col[k]] = 1'b0;
    for (int k = 0; k < r; k++) u[piv_col[k]] = ^(eq[k] & u);
    c = {};
    for (int i = 0; i < n; i++) c.push_back(u[i*RM +: RM]);
  endfunction

  // Random error of rank tau: e_i = sum_j L_{j,i} E_j.
  function automatic void rank_error(int n, int tau, output el_t e [$]);
    el_t ev;
    logic [63:0] l;
    e = {};
    for (int i = 0; i < n; i++) e.push_back('0);
    for (int j = 0; j < tau; j++) begin
      ev = el_t'($urandom_range(1, 255));
      l  = {$urandom, $urandom};
      for (int i = 0; i < n; i++) if (l[i]) e[i] ^= ev;
    end
  endfunction

  // Rank over GF(2) of the symbols of a word (its rank weight).
  function automatic int rank_weight(el_t w []);
    logic [63:0] rows [];
    rows = new[w.size()];
    for (int i = 0; i < w.size(); i++) rows[i] = 64'(w[i]);
    return rank_bits(rows, RM);
  endfunction
endpackage
