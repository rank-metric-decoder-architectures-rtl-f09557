// error_word: error word and corrected word of a Gabidulin decoder.
//
// With h_0..h_{N-1} the normal basis, the error location vector L_j of
// locator X_j = sum_i L_{j,i} h_i is simply the coordinate vector of X_j, so
// no computation is needed for it.  The error word is e_i = sum_j L_{j,i} E_j
// and the corrected word c = r - e (XOR).  One term j is accumulated per
// clock, tau clocks in all (one for tau = 0).  With 'bypass' (decoding
// failure) e stays zero
// and c = r.
//
// Interface: 'start' (one cycle) latches tau, r[], ev[] (E_j), x[] (X_j)
// and bypass; 'done' pulses when c[] and e[] are final (held until the next
// start).
module error_word #(
  parameter int M  = 8,
  parameter int N  = 8,
  parameter int TM = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    bypass,
  input  logic [$clog2(TM+1)-1:0] tau,
  input  logic [M-1:0]            r   [N],
  input  logic [M-1:0]            ev  [TM],
  input  logic [M-1:0]            x   [TM],
  output logic                    busy,
  output logic                    done,
  output logic [M-1:0]            c   [N],
  output logic [M-1:0]            e   [N]
);
  localparam int TW = $clog2(TM+1);

  logic [M-1:0]  r_q  [N];
  logic [M-1:0]  ev_q [TM];
  logic [M-1:0]  x_q  [TM];
  logic [TW-1:0] tau_q, j_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      tau_q <= '0;
      j_q   <= '0;
      for (int i = 0; i < N; i++) begin r_q[i] <= '0; e[i] <= '0; end
      for (int j = 0; j < TM; j++) begin ev_q[j] <= '0; x_q[j] <= '0; end
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int i = 0; i < N; i++) begin r_q[i] <= r[i]; e[i] <= '0; end
        for (int j = 0; j < TM; j++) begin ev_q[j] <= ev[j]; x_q[j] <= x[j]; end
        tau_q <= bypass ? '0 : tau;
        j_q   <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (j_q == tau_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          for (int i = 0; i < N; i++)
            if (x_q[int'(j_q) % TM][i % M]) e[i] <= e[i] ^ ev_q[int'(j_q) % TM];
          j_q <= j_q + 1'b1;
          if (j_q + 1'b1 == tau_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) c[i] = r_q[i] ^ e[i];
endmodule
