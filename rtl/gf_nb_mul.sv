// gf_nb_mul: bit-parallel normal basis multiplier over GF(2^M).
//
// Massey-Omura form: product bit k is the bilinear form
//   c_k = XOR over (i,j) with lambda_ij = 1 of a_{(i+k) mod M} & b_{(j+k) mod M},
// that is, the same form as bit 0 applied to both operands rotated by k, since
// rotating by k is the 2^-k power in a normal basis.  lambda is computed at
// elaboration from the field polynomial POLY (gf_pkg), so the module is pure
// combinational AND/XOR logic of M*C_N two-input terms.  The common
// subexpression sharing that reduces the XOR count of this form is left to
// synthesis; the function and critical path (one AND, ceil(log2 C_N) XORs)
// are the same.
module gf_nb_mul
  import gf_pkg::*;
#(
  parameter int             M    = 8,
  parameter logic [MAXM:0]  POLY = POLY_GF256
) (
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic [M-1:0] c
);
  localparam logic [MAXM*MAXM-1:0] LAM = nb_lambda(M, POLY);

  always_comb begin
    for (int k = 0; k < M; k++) begin
      c[k] = 1'b0;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < M; j++)
          if (LAM[i*MAXM+j]) c[k] = c[k] ^ (a[(i+k)%M] & b[(j+k)%M]);
    end
  end
endmodule
