// gabidulin_solver: Gabidulin's algorithm over GF(2^M), q = 2.  Given tau
// linearly independent error values E_0..E_{tau-1} and syndromes S_0.., it
// finds the error locators X_j solving S_l = sum_j X_j^[l] E_j.
//
// Step 1 (forward, one row per clock, tau-1 substeps) builds the triangular
// matrix A and the first column of Q in the division-free form that q = 2
// allows:
//   A_{i,j} = A_{i-1,j} + (A_{i-1,j} A_{i-1,i-1})^[-1]          (j >= i)
//   Q_{i,j} = Q_{i-1,j} + (Q_{i-1,j+1} A_{i-1,i-1})^[-1]        (i+j < tau)
// with A_{0,j} = E_j, Q_{0,j} = S_j; the [-1] power is a cyclic shift.  Only
// tau values of Q are live (q[] below); Q_{i,0} is kept for step 2.
// Step 2 (backward) computes X_i = (Q_{i,0} - sum_{j>i} A_{i,j} X_j)/A_{i,i}
// for i = tau-1 down to 0: A_{i,i}^-1 = A^2 A^4 ... A^(2^(M-1)) takes M-1
// clocks (one load, M-2 serial multiplications), one more clock multiplies
// for X_i, and one clock does the backward elimination Q_{k,0} -= A_{k,i} X_i
// for all k < i.  Hence M+1 clocks per locator and (tau-1) + tau*(M+1)
// clocks in all: 19 for tau = t = 2, M = 8, within the 2t + mt = 20 of the
// paper's latency estimate.
//
// This design holds A in a plain register array and indexes rows with
// multiplexers; it does not move A along the diagonal as the AE/QE array
// does.  A zero pivot A_{i,i} (dependent E_j) sets 'fail'.
//
// Interface: 'start' (one cycle) latches tau, e[], s[]; 'busy' while
// working; 'done' pulses when x[] and fail are final (held until next start).
module gabidulin_solver
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter int            TM   = 2,          // largest tau
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [$clog2(TM+1)-1:0] tau,
  input  logic [M-1:0]           e    [TM],
  input  logic [M-1:0]           s    [TM],
  output logic                   busy,
  output logic                   done,
  output logic [M-1:0]           x    [TM],
  output logic                   fail
);
  localparam int TW = $clog2(TM+1);
  localparam int CW = $clog2(M+1);
  localparam int IW = (TM > 1) ? $clog2(TM) : 1;

  typedef enum logic [2:0] {S_IDLE, S_FWD, S_INV, S_DIV, S_BACK} state_t;
  state_t st;

  logic [M-1:0] a  [TM][TM];
  logic [M-1:0] q  [TM];
  logic [M-1:0] qs [TM];
  logic [TW-1:0] tau_q, i_q;      // forward row / backward index
  logic [CW-1:0] c_q;             // inversion step
  logic [M-1:0] acc, pw, pw_n, piv;
  logic [IW-1:0] ii, im1;          // i_q and i_q-1 as row indices
  assign ii  = IW'(int'(i_q) % TM);
  assign im1 = IW'((int'(i_q) + TM - 1) % TM);

  // Forward datapath: row i-1 and its pivot.
  logic [M-1:0] prow [TM];
  logic [M-1:0] pa   [TM];
  logic [M-1:0] pq   [TM];
  logic [M-1:0] qn   [TM];
  always_comb begin
    for (int j = 0; j < TM; j++) prow[j] = a[im1][j];
    piv = a[im1][im1];
    for (int j = 0; j < TM; j++) qn[j] = (j < TM-1) ? q[(j+1) % TM] : '0;
  end
  for (genvar j = 0; j < TM; j++) begin : g_fwd
    gf_nb_mul #(.M(M), .POLY(POLY)) u_ma (.a(prow[j]), .b(piv), .c(pa[j]));
    gf_nb_mul #(.M(M), .POLY(POLY)) u_mq (.a(qn[j]),   .b(piv), .c(pq[j]));
  end

  // Backward datapath.
  logic [M-1:0] dg, inv_op_a, inv_op_b, inv_p;
  logic [M-1:0] acol [TM];
  logic [M-1:0] pb   [TM];
  always_comb begin
    dg   = a[ii][ii];
    pw_n = {pw[M-2:0], pw[M-1]};
    if (st == S_DIV) begin
      inv_op_a = acc;
      inv_op_b = qs[ii];
    end else begin
      inv_op_a = acc;
      inv_op_b = pw_n;
    end
    for (int k = 0; k < TM; k++) acol[k] = a[k][ii];
  end
  gf_nb_mul #(.M(M), .POLY(POLY)) u_inv (.a(inv_op_a), .b(inv_op_b), .c(inv_p));
  for (genvar k = 0; k < TM; k++) begin : g_back
    gf_nb_mul #(.M(M), .POLY(POLY)) u_mb (.a(acol[k]), .b(x[ii]), .c(pb[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      busy  <= 1'b0;
      done  <= 1'b0;
      fail  <= 1'b0;
      tau_q <= '0;
      i_q   <= '0;
      c_q   <= '0;
      acc   <= '0;
      pw    <= '0;
      for (int k = 0; k < TM; k++) begin
        q[k] <= '0; qs[k] <= '0; x[k] <= '0;
        for (int j = 0; j < TM; j++) a[k][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          tau_q <= tau;
          fail  <= 1'b0;
          for (int k = 0; k < TM; k++) begin
            q[k]  <= s[k];
            qs[k] <= (k == 0) ? s[0] : '0;
            x[k]  <= '0;
            for (int j = 0; j < TM; j++) a[k][j] <= (k == 0) ? e[j] : '0;
          end
          if (tau == '0) begin
            done <= 1'b1;
          end else if (tau == TW'(1)) begin
            busy <= 1'b1;
            i_q  <= '0;
            st   <= S_INV;
            c_q  <= '0;
          end else begin
            busy <= 1'b1;
            i_q  <= TW'(1);
            st   <= S_FWD;
          end
        end
        S_FWD: begin
          for (int j = 0; j < TM; j++)
            if (j >= int'(i_q) && j < int'(tau_q))
              a[ii][j] <= prow[j] ^ {pa[j][0], pa[j][M-1:1]};
          for (int j = 0; j < TM; j++)
            if (j < int'(tau_q) - int'(i_q))
              q[j] <= q[j] ^ {pq[j][0], pq[j][M-1:1]};
          qs[ii] <= q[0] ^ {pq[0][0], pq[0][M-1:1]};
          if (i_q == tau_q - 1'b1) begin
            st  <= S_INV;
            c_q <= '0;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
        S_INV: begin
          // start of a division: acc = pw = dg^2
          if (c_q == '0) begin
            acc <= {dg[M-2:0], dg[M-1]};
            pw  <= {dg[M-2:0], dg[M-1]};
            if (dg == '0) fail <= 1'b1;
            c_q <= CW'(1);
            if (M == 2) st <= S_DIV;
          end else begin
            acc <= inv_p;
            pw  <= pw_n;
            c_q <= c_q + 1'b1;
            if (int'(c_q) == M-2) st <= S_DIV;
          end
        end
        S_DIV: begin
          x[ii] <= inv_p;
          st <= S_BACK;
        end
        S_BACK: begin
          for (int k = 0; k < TM; k++)
            if (k < int'(i_q)) qs[k] <= qs[k] ^ pb[k];
          if (i_q == '0) begin
            st   <= S_IDLE;
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            i_q <= i_q - 1'b1;
            st  <= S_INV;
            c_q <= '0;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
