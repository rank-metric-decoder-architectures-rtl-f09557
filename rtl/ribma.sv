// ribma: reformulated inversionless Berlekamp-Massey algorithm (RiBMA) for
// rank metric codes, as a systolic array of 3T+1 ribma_be cells and the BCtrl
// cell.  It solves the key equation sigma(x) (x) S(x) = omega(x) mod x^[2T]
// for the error span polynomial, scaled by a non-zero constant (same root
// space).  Exactly 2T iterations, one per clock.
//
// BCtrl keeps the counter b and Gamma and generates ct = (Delta~_0 != 0) and
// (b >= 0) (equivalently b+1 > 0).  After each iteration
//   ct:  b <- -(b+1), Gamma <- (Delta~_0)^[1]
//   else b <- b+1,    Gamma <- Gamma^[1].
// Initial values: Delta~ = S(x) + x^[3T], Gamma = 1, b = 0, and
// Theta~_k = S_{k-1}^[1] for k = 1..2T, Theta~_0 = 0, Theta~_3T = 0, with the
// term that would sit at position 3T+1 (x^[1] (x) B(x), B = x^[0]) supplied by
// BCtrl as the Theta~_{3T+1} input of the last cell: 1 until the first
// iteration with ct = 1, 0 from then on.  This alignment is what makes the
// cell as drawn (both products use index i+1) compute the iBMA update; with
// Theta~ = Delta~ = S the array loses the x^[1] term and fails, for instance
// whenever S_0 = 1.  Result: lambda_i = Delta~_{T+i} for i = 0..T.
// The cell array, BCtrl and 2T-cycle schedule follow the published RiBMA;
// the initial alignment and the injected 1 are this design's own, chosen so
// that the array reproduces the plain Berlekamp-Massey recursion.
//
// Interface: 'start' (one cycle) loads s[]; 'busy' covers the 2T iteration
// cycles; 'done' pulses one cycle after the last, when lambda[] is valid.
module ribma
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter int            T    = 2,
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] s      [2*T],
  output logic         busy,
  output logic         done,
  output logic [M-1:0] lambda [T+1]
);
  localparam int NC = 3*T + 1;
  localparam logic [M-1:0] ONE = '1;      // 1 = h_0 + ... + h_{M-1}
  localparam int CW = $clog2(2*T+1);

  logic [M-1:0] delta [NC+1];
  logic [M-1:0] theta [NC+1];
  logic [M-1:0] init_d [NC];
  logic [M-1:0] init_t [NC];
  logic [M-1:0] gamma;
  logic         ct, top_b;
  int           b;
  logic [CW-1:0] r;

  always_comb begin
    for (int k = 0; k < NC; k++) begin
      init_d[k] = '0;
      init_t[k] = '0;
    end
    for (int k = 0; k < 2*T; k++) begin
      init_d[k]   = s[k];
      init_t[k+1] = {s[k][M-2:0], s[k][M-1]};
    end
    init_d[3*T] = ONE;
  end

  // Inputs from the right of the last cell.
  assign delta[NC] = '0;
  assign theta[NC] = top_b ? ONE : '0;

  // BCtrl
  assign ct = (delta[0] != '0) && (b >= 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      gamma <= ONE;
      b     <= 0;
      top_b <= 1'b0;
      r     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        gamma <= ONE;
        b     <= 0;
        top_b <= 1'b1;
        r     <= '0;
      end else if (busy) begin
        if (ct) begin
          b     <= -(b + 1);
          gamma <= {delta[0][M-2:0], delta[0][M-1]};
          top_b <= 1'b0;
        end else begin
          b     <= b + 1;
          gamma <= {gamma[M-2:0], gamma[M-1]};
        end
        r <= r + 1'b1;
        if (int'(r) == 2*T-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  for (genvar i = 0; i < NC; i++) begin : g_be
    ribma_be #(.M(M), .POLY(POLY)) u_be (
      .clk, .rst_n,
      .load(start), .en(busy),
      .init_delta(init_d[i]), .init_theta(init_t[i]),
      .delta_next(delta[i+1]), .theta_next(theta[i+1]),
      .gamma, .delta0(delta[0]), .ct,
      .delta(delta[i]), .theta(theta[i])
    );
  end

  for (genvar i = 0; i <= T; i++) begin : g_out
    assign lambda[i] = delta[T+i];
  end
endmodule
