// ge_pe: processing element GE_ij of the Gaussian elimination array over
// GF(2).  One register bit behind a five-input multiplexer selected by the
// row's operation code (gf_pkg::ge_op_t):
//   KEEP      hold
//   SHL       shiftleft: right neighbour of the same row
//   ELIM      eliminate/reduce: a ^ (f & p), where a is the cell below (or
//             below-right for the matrix part, which embeds the column shift),
//             p the matching cell of the pivot row 0 and f the first-column
//             bit of the row below; over GF(2) the pivot M_00 is 1, so
//             M_00*a - f*p reduces to a ^ (f & p)
//   UP_FIRST  shiftup: the cell of row 0
//   UP_NEXT   shiftup: the cell of the next row
// 'load' writes init (used to bring in a new matrix).
module ge_pe
  import gf_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  logic   init,
  input  ge_op_t op,
  input  logic   shl_in,
  input  logic   elim_a,
  input  logic   elim_p,
  input  logic   elim_f,
  input  logic   first_in,
  input  logic   next_in,
  output logic   q
);
  logic d;

  always_comb begin
    unique case (op)
      GE_SHL:      d = shl_in;
      GE_ELIM:     d = elim_a ^ (elim_f & elim_p);
      GE_UP_FIRST: d = first_in;
      GE_UP_NEXT:  d = next_in;
      default:     d = q;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= 1'b0;
    else if (load) q <= init;
    else           q <= d;
  end
endmodule
