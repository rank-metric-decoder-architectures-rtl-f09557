// root_space: basis of the root space of a linearized polynomial
// sigma(x) = sum_{j<=T} lambda_j x^[j] over GF(2^M) (Berlekamp's
// deterministic method).
//
// sigma is evaluated on the normal basis: row i of an M x M binary matrix is
// sigma(h_i) = sum_j lambda_j h_{(i+j) mod M}, a product by a constant basis
// element (pure XOR logic), formed combinationally when 'start' loads the
// Gaussian elimination array (gauss_elim) with B = I.  The null-space rows of
// B after elimination are the coordinates of linearly independent roots.
//
// Outputs once 'done' pulses: dim = dimension of the root space,
// qdeg = q-degree of sigma, e[0..T-1] the first min(dim,T) roots (zero
// beyond), fail = 1 when dim differs from qdeg (roots not unique, the
// decoding failure condition) or sigma is zero.  Latency: the elimination
// takes at most M(M+1)/2 cycles after the load cycle.
module root_space
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter int            T    = 2,
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] lambda [T+1],
  output logic         busy,
  output logic         done,
  output logic [M-1:0] e      [T],
  output logic [$clog2(M+1)-1:0] dim,
  output logic [$clog2(T+2)-1:0] qdeg,
  output logic         fail
);
  localparam int DW = $clog2(M+1);
  localparam int QW = $clog2(T+2);

  logic [M-1:0] ev   [M];
  logic [M-1:0] prod [M][T+1];
  logic [M-1:0] ident[M];
  logic [M-1:0] m_out[M];
  logic [M-1:0] b_out[M];
  logic [DW-1:0] rank;
  logic          ge_done;
  logic [QW-1:0] qdeg_c;

  for (genvar i = 0; i < M; i++) begin : g_ev
    for (genvar j = 0; j <= T; j++) begin : g_t
      gf_nb_mul #(.M(M), .POLY(POLY)) u_mul (
        .a(lambda[j]), .b(M'(1) << ((i + j) % M)), .c(prod[i][j]));
    end
    always_comb begin
      ev[i] = '0;
      for (int j = 0; j <= T; j++) ev[i] = ev[i] ^ prod[i][j];
      ident[i] = M'(1) << i;
    end
  end

  always_comb begin
    qdeg_c = '0;
    for (int j = 0; j <= T; j++) if (lambda[j] != '0) qdeg_c = QW'(j);
  end

  gauss_elim #(.ROWS(M), .LC(M), .RC(M)) u_ge (
    .clk, .rst_n, .start, .m_in(ev), .b_in(ident),
    .busy, .done(ge_done), .m_out, .b_out, .rank);

  logic lambda_zero;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qdeg        <= '0;
      lambda_zero <= 1'b1;
    end else if (start) begin
      qdeg        <= qdeg_c;
      lambda_zero <= (qdeg_c == '0) && (lambda[0] == '0);
    end
  end

  assign dim  = DW'(M) - rank;
  assign done = ge_done;
  assign fail = lambda_zero || (int'(dim) != int'(qdeg));

  always_comb begin
    for (int k = 0; k < T; k++) e[k] = (k < int'(dim)) ? b_out[k] : '0;
  end
endmodule
