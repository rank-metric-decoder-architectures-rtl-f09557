// syndrome_unit: syndromes S_l = sum_i h_i^[l] r_i, l = 0..2T-1, of a
// received word r over GF(2^M) (the parity-check matrix H of a Gabidulin code
// whose h_i are the normal basis itself, n = N <= M).
//
// Structure: 2T multiply-accumulate cells working in parallel, one received
// symbol per clock, so a word takes N cycles.  In the normal basis
// h_i^[l] = h_{(i+l) mod M} is the unit vector with bit (i+l) mod M set, so
// cell l multiplies r_i by that one-hot constant.
//
// Interface: 'start' (one cycle) latches the whole word r; 'busy' is high for
// the N accumulation cycles; 'done' pulses in the cycle after the last
// accumulation, when s[] is final.  s[] holds its value until the next start.
module syndrome_unit
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter int            N    = 8,
  parameter int            T    = 2,
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] r    [N],
  output logic         busy,
  output logic         done,
  output logic [M-1:0] s    [2*T]
);
  localparam int IW = $clog2(N+1);

  logic [M-1:0]  rsh [N];       // shift register of the latched word
  logic [IW-1:0] idx;           // index i of the symbol in rsh[0]
  logic [M-1:0]  hk  [2*T];     // h_{(i+l) mod M}
  logic [M-1:0]  prod[2*T];

  for (genvar l = 0; l < 2*T; l++) begin : g_mac
    always_comb hk[l] = M'(1) << ((int'(idx) + l) % M);
    gf_nb_mul #(.M(M), .POLY(POLY)) u_mul (.a(rsh[0]), .b(hk[l]), .c(prod[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      idx  <= '0;
      for (int i = 0; i < N; i++) rsh[i] <= '0;
      for (int l = 0; l < 2*T; l++) s[l] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        idx  <= '0;
        for (int i = 0; i < N; i++) rsh[i] <= r[i];
        for (int l = 0; l < 2*T; l++) s[l] <= '0;
      end else if (busy) begin
        for (int l = 0; l < 2*T; l++) s[l] <= s[l] ^ prod[l];
        for (int i = 0; i < N-1; i++) rsh[i] <= rsh[i+1];
        rsh[N-1] <= '0;
        idx <= idx + 1'b1;
        if (int'(idx) == N-1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
