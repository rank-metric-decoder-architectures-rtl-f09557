// ribma_be: processing element BE_i of the systolic RiBMA key equation solver.
//
// Holds one coefficient of each of the two combined polynomials,
// Delta~_i (connection polynomial and discrepancies) and Theta~_i (auxiliary
// polynomial and its discrepancies).  Per iteration, as drawn for the cell:
//   Delta~_i <- Gamma * Delta~_{i+1} + Delta~_0 * Theta~_{i+1}
//   Theta~_i <- (ct ? Delta~_i : Theta~_i)^[1]      ([1] power = cyclic shift)
// Both multipliers feed one adder, so the critical path is one multiplier and
// one adder.  Gamma, ct and Delta~_0 are broadcast from the BCtrl cell.
//
// Interface: 'load' writes init_delta/init_theta; 'en' performs one
// iteration; with neither the cell holds.  Outputs are the registers.
module ribma_be
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         en,
  input  logic [M-1:0] init_delta,
  input  logic [M-1:0] init_theta,
  input  logic [M-1:0] delta_next,   // Delta~_{i+1}
  input  logic [M-1:0] theta_next,   // Theta~_{i+1}
  input  logic [M-1:0] gamma,
  input  logic [M-1:0] delta0,
  input  logic         ct,
  output logic [M-1:0] delta,        // Delta~_i
  output logic [M-1:0] theta         // Theta~_i
);
  logic [M-1:0] p0, p1, sel;

  gf_nb_mul #(.M(M), .POLY(POLY)) u_m0 (.a(gamma),  .b(delta_next), .c(p0));
  gf_nb_mul #(.M(M), .POLY(POLY)) u_m1 (.a(delta0), .b(theta_next), .c(p1));

  always_comb sel = ct ? delta : theta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      delta <= '0;
      theta <= '0;
    end else if (load) begin
      delta <= init_delta;
      theta <= init_theta;
    end else if (en) begin
      delta <= p0 ^ p1;
      theta <= {sel[M-2:0], sel[M-1]};
    end
  end
endmodule
