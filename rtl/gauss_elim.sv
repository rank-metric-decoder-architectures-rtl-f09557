// gauss_elim: pivoting Gaussian elimination array over GF(2) for possibly
// singular matrices, with its controller GCtrl.
//
// The array is ROWS x (LC + RC) ge_pe cells.  The left LC columns hold the
// matrix M, the right RC columns the companion matrix B that undergoes the
// same row operations (identity for the root space).  The pivot is always
// at the top-left ge_q M_00.  GCtrl walks the LC columns; for each it
//   1. while M_00 = 0 and l < ROWS-i: shiftup(i) (row 0 moves to row
//      ROWS-1-i, rows 1..ROWS-1-i move up, the i finished pivot rows at the
//      bottom stay), l = l+1;
//   2. if M_00 = 1: eliminate (every row i<ROWS-1 becomes row i+1 reduced by
//      row 0, shifted one column left; row 0 goes to the bottom), the same
//      row operation without the column shift on B (reduce), i = i+1;
//      otherwise shiftleft M (B holds).
// One operation per clock; at most ROWS*(ROWS+1)/2 cycles when LC = ROWS.
// At the end the first ROWS-i rows of M are zero, so the first ROWS-i rows
// of B span the left null space of the input M; i is its rank.
//
// Interface: 'start' (one cycle) loads m_in/b_in; 'busy' while working;
// 'done' pulses when m_out/b_out/rank are final (they hold until the next
// start).  The 'while' bound of step 1 is ROWS-i, the number of rows not yet
// used as pivots.
module gauss_elim
  import gf_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int LC   = 8,
  parameter int RC   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [LC-1:0]       m_in  [ROWS],
  input  logic [RC-1:0]       b_in  [ROWS],
  output logic                busy,
  output logic                done,
  output logic [LC-1:0]       m_out [ROWS],
  output logic [RC-1:0]       b_out [ROWS],
  output logic [$clog2(ROWS+1)-1:0] rank
);
  localparam int W  = LC + RC;
  localparam int RW = $clog2(ROWS+1);
  localparam int JW = $clog2(LC+1);

  logic   ge_q [ROWS][W];
  ge_op_t op   [ROWS];
  logic [RW-1:0] i_q, l_q;
  logic [JW-1:0] j_q;
  logic          pivot;

  assign pivot = ge_q[0][0];

  // GCtrl: the operation of every row for this cycle.
  always_comb begin
    for (int r = 0; r < ROWS; r++) op[r] = GE_KEEP;
    if (busy) begin
      if (!pivot && (int'(l_q) < ROWS - int'(i_q))) begin
        for (int r = 0; r < ROWS; r++) begin
          if (r < ROWS-1-int'(i_q))       op[r] = GE_UP_NEXT;
          else if (r == ROWS-1-int'(i_q)) op[r] = GE_UP_FIRST;
        end
      end else if (pivot) begin
        for (int r = 0; r < ROWS; r++) op[r] = GE_ELIM;
      end else begin
        for (int r = 0; r < ROWS; r++) op[r] = GE_SHL;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      i_q  <= '0;
      l_q  <= '0;
      j_q  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        i_q  <= '0;
        l_q  <= RW'(1);
        j_q  <= '0;
      end else if (busy) begin
        if (!pivot && (int'(l_q) < ROWS - int'(i_q))) begin
          l_q <= l_q + 1'b1;
        end else begin
          if (pivot) i_q <= i_q + 1'b1;
          l_q <= RW'(1);
          j_q <= j_q + 1'b1;
          if (int'(j_q) == LC-1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < W; c++) begin : g_col
      logic init, shl_in, ea, ep, ef, fi, ni;
      if (c < LC) begin : g_m
        assign init   = m_in[r][c];
        assign shl_in = ge_q[r][(c+1) % LC];
        assign ea     = (r < ROWS-1) ? ge_q[(r+1) % ROWS][(c+1) % LC] : ge_q[0][(c+1) % LC];
        assign ep     = ge_q[0][(c+1) % LC];
      end else begin : g_b
        assign init   = b_in[r][c-LC];
        assign shl_in = ge_q[r][c];
        assign ea     = (r < ROWS-1) ? ge_q[(r+1) % ROWS][c] : ge_q[0][c];
        assign ep     = ge_q[0][c];
      end
      assign ef = (r < ROWS-1) ? ge_q[(r+1) % ROWS][0] : 1'b0;
      assign fi = ge_q[0][c];
      assign ni = ge_q[(r+1) % ROWS][c];
      ge_pe u_pe (
        .clk, .rst_n, .load(start), .init, .op(op[r]),
        .shl_in, .elim_a(ea), .elim_p(ep), .elim_f(ef),
        .first_in(fi), .next_in(ni), .q(ge_q[r][c])
      );
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < LC; c++) m_out[r][c] = ge_q[r][c];
      for (int c = 0; c < RC; c++) b_out[r][c] = ge_q[r][LC+c];
    end
  end
  assign rank = i_q;
endmodule
