// gab_decoder: block-level pipelined decoder for an (N, N-2T) Gabidulin code
// over GF(2^M) whose parity-check matrix is built on the normal basis
// (h_i = beta^(2^i), N = M).  Defaults: the (8,4) code over GF(2^8), which
// corrects errors of rank up to 2.
//
// Five units work on five different received words at once:
//   syndrome_unit -> ribma -> root_space -> gabidulin_solver -> error_word
// The data that a later unit needs travel beside the chain in stage
// buffers: the received word r through r_s, r_sigma, r_E, r_X; the
// syndromes through S_sigma, S_E; the error values E through E_X.
// The pipeline advances only when every unit has finished its word, so the
// throughput is set by the slowest unit (root space: at most M(M+1)/2
// elimination steps for a decodable word, up to M*M for a word that fails).
// The five units, the buffers and the lock-step advance follow the published
// pipeline; the ready/valid handshake and where the failure flag travels are
// this design's own choices.  A word whose root space dimension differs from the
// q-degree of sigma(x), or whose error values are dependent, is passed
// through unchanged with out_fail = 1.
//
// Interface: a word r_in is accepted in a cycle with in_valid & in_ready.
// For each accepted word, in order, out_valid pulses for one cycle with the
// corrected word c_out, the error word e_out and out_fail.
module gab_decoder
  import gf_pkg::*;
#(
  parameter int            M    = 8,
  parameter int            N    = 8,
  parameter int            T    = 2,
  parameter logic [MAXM:0] POLY = POLY_GF256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [M-1:0] r_in  [N],
  output logic         out_valid,
  output logic [M-1:0] c_out [N],
  output logic [M-1:0] e_out [N],
  output logic         out_fail
);
  localparam int TW = $clog2(T+1);
  localparam int DW = $clog2(M+1);
  localparam int QW = $clog2(T+2);

  // unit outputs
  logic         syn_busy, syn_done, bma_busy, bma_done, rs_busy, rs_done;
  logic         gab_busy, gab_done, err_busy, err_done;
  logic [M-1:0] syn_s   [2*T];
  logic [M-1:0] lam     [T+1];
  logic [M-1:0] rs_e    [T];
  logic [DW-1:0] rs_dim;
  logic [QW-1:0] rs_qdeg;
  logic         rs_fail, gab_fail;
  logic [M-1:0] gab_x   [T];

  // stage buffers
  logic [M-1:0] r_s [N], r_sig [N], r_e [N], r_x [N];
  logic [M-1:0] s_sig [2*T], s_e [2*T];
  logic [M-1:0] e_x [T];
  logic [TW-1:0] tau_x;
  logic          fail_x;
  logic [4:0]    v;            // stage k holds a word
  logic          adv, adv_q;
  logic [TW-1:0] tau_g;

  assign adv      = !adv_q && !(syn_busy || bma_busy || rs_busy || gab_busy || err_busy)
                    && (in_valid || (v != '0));
  assign in_ready = adv;
  assign tau_g    = rs_fail ? '0 : TW'(rs_dim);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v      <= '0;
      adv_q  <= 1'b0;
      tau_x  <= '0;
      fail_x <= 1'b0;
      for (int i = 0; i < N; i++) begin r_s[i] <= '0; r_sig[i] <= '0; r_e[i] <= '0; r_x[i] <= '0; end
      for (int l = 0; l < 2*T; l++) begin s_sig[l] <= '0; s_e[l] <= '0; end
      for (int j = 0; j < T; j++) e_x[j] <= '0;
    end else begin
      adv_q <= adv;
      if (adv) begin
        v <= {v[3:0], in_valid};
        for (int i = 0; i < N; i++) begin
          r_s[i] <= r_in[i]; r_sig[i] <= r_s[i]; r_e[i] <= r_sig[i]; r_x[i] <= r_e[i];
        end
        for (int l = 0; l < 2*T; l++) begin s_sig[l] <= syn_s[l]; s_e[l] <= s_sig[l]; end
        for (int j = 0; j < T; j++) e_x[j] <= rs_e[j];
        tau_x  <= tau_g;
        fail_x <= rs_fail;
      end
    end
  end

  syndrome_unit #(.M(M), .N(N), .T(T), .POLY(POLY)) u_syn (
    .clk, .rst_n, .start(adv && in_valid), .r(r_in),
    .busy(syn_busy), .done(syn_done), .s(syn_s));

  ribma #(.M(M), .T(T), .POLY(POLY)) u_bma (
    .clk, .rst_n, .start(adv && v[0]), .s(syn_s),
    .busy(bma_busy), .done(bma_done), .lambda(lam));

  root_space #(.M(M), .T(T), .POLY(POLY)) u_rs (
    .clk, .rst_n, .start(adv && v[1]), .lambda(lam),
    .busy(rs_busy), .done(rs_done), .e(rs_e), .dim(rs_dim), .qdeg(rs_qdeg),
    .fail(rs_fail));

  logic [M-1:0] s_e_t [T];
  always_comb for (int j = 0; j < T; j++) s_e_t[j] = s_e[j];

  gabidulin_solver #(.M(M), .TM(T), .POLY(POLY)) u_gab (
    .clk, .rst_n, .start(adv && v[2]), .tau(tau_g), .e(rs_e), .s(s_e_t),
    .busy(gab_busy), .done(gab_done), .x(gab_x), .fail(gab_fail));

  logic fail_err;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                fail_err <= 1'b0;
    else if (adv && v[3])      fail_err <= fail_x || gab_fail;
  end

  error_word #(.M(M), .N(N), .TM(T)) u_err (
    .clk, .rst_n, .start(adv && v[3]), .bypass(fail_x || gab_fail), .tau(tau_x),
    .r(r_x), .ev(e_x), .x(gab_x),
    .busy(err_busy), .done(err_done), .c(c_out), .e(e_out));

  assign out_valid = err_done;
  assign out_fail  = fail_err;
endmodule
