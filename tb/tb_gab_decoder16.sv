// tb_gab_decoder16: end-to-end test of the decoder configured for the
// (16,8) Gabidulin code over GF(2^16), which corrects errors of rank up to
// 4 (M = N = 16, T = 4, POLY = POLY_GF65536).  Same procedure as the
// default-size test: random codewords plus random errors of rank 0..4 must
// be corrected exactly, words with rank-5 or rank-6 errors must be flagged
// (and passed through) or decode to a codeword; words are streamed back to
// back; input stalls, a full pipeline, failures, rank-0 and rank-t words
// must each occur.  Checks the spacing of accepted words (at most
// M(M+1)/2 + 3 = 139 cycles once the pipeline is full) and the latency of
// the first word: at most the 236 cycles of the sum of the stage latencies
// n(n+3)/2 + (n+5)t, plus one start and one done clock per stage.
module tb_gab_decoder16;
  import gf16_ref_pkg::*;
  localparam int M = 16, N = 16, T = 4;
  localparam int NW = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid, in_ready, out_valid, out_fail;
  logic [M-1:0] r_in [N], c_out [N], e_out [N];

  gab_decoder #(.M(M), .N(N), .T(T), .POLY(gf_pkg::POLY_GF65536)) dut (.*);

  int checks = 0, failures = 0;
  el_t cw_q [$][$], er_q [$][$];
  int  tau_q [$];
  int  n_stall = 0, n_full = 0, n_fail = 0, n_rank0 = 0, n_rankt = 0, n_beyond = 0;
  int  cyc = 0, last_acc = -1, max_gap = 0, n_acc = 0, n_out = 0, first_acc = -1, lat0 = -1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc++;

  // producer
  initial begin
    el_t c [$], e [$];
    int tau;
    in_valid = 0;
    for (int i = 0; i < N; i++) r_in[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    for (int w = 0; w < NW; w++) begin
      codeword(N, T, c);
      tau = (w % 10 == 9) ? 5 + (w / 10) % 2 : w % 5;
      rank_error(N, tau, e);
      for (int i = 0; i < N; i++) r_in[i] = c[i] ^ e[i];
      cw_q.push_back(c); er_q.push_back(e); tau_q.push_back(rank_weight(e));
      in_valid = 1;
      @(negedge clk);
      while (!in_ready) begin n_stall++; @(negedge clk); end
      @(posedge clk);
      #1;
      if (last_acc >= 0 && n_acc > 6 && cyc - last_acc > max_gap) max_gap = cyc - last_acc;
      if (n_acc == 0) first_acc = cyc;
      last_acc = cyc; n_acc++;
      if (dut.v == 5'b11111) n_full++;
    end
    in_valid = 0;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    el_t c [$], e [$], s [$], w [];
    int tau;
    bit is_cw, ok, same;
    c = cw_q.pop_front(); e = er_q.pop_front(); tau = tau_q.pop_front();
    n_out++;
    if (n_out == 1) lat0 = cyc - first_acc;
    if (tau == 0) n_rank0++;
    if (tau == T) n_rankt++;
    if (out_fail) n_fail++;
    if (tau <= T) begin
      ok = !out_fail;
      for (int i = 0; i < N; i++) ok &= (c_out[i] == c[i]) && (e_out[i] == e[i]);
      chk(ok, $sformatf("decode rank-%0d error", tau));
      if (!ok && failures < 4) for (int i = 0; i < N; i++) $display("  i=%0d c=%h e=%h cout=%h eout=%h fail=%0d", i, c[i], e[i], c_out[i], e_out[i], out_fail);
    end else begin
      n_beyond++;
      w = new[N];
      for (int i = 0; i < N; i++) w[i] = c_out[i];
      syndromes(w, T, s);
      is_cw = 1;
      foreach (s[l]) is_cw &= (s[l] == '0);
      chk(out_fail || is_cw, "beyond-radius word neither flagged nor a codeword");
      if (out_fail) begin
        same = 1;
        for (int i = 0; i < N; i++) same &= (c_out[i] == (c[i] ^ e[i]));
        chk(same, "failed word not passed through");
      end
    end
    if (n_out == NW) begin
      chk(n_stall > 0, "no input stall seen");
      chk(n_full > 0,  "pipeline never full");
      chk(n_fail > 0,  "no decoding failure seen");
      chk(n_rank0 > 0 && n_rankt > 0, "rank 0 / rank t not both seen");
      chk(max_gap <= M*(M+1)/2 + 3, $sformatf("throughput: gap %0d cycles", max_gap));
      chk(lat0 > 0 && lat0 <= 236 + 10, $sformatf("first-word latency %0d cycles", lat0));
      $display("words=%0d stalls=%0d full=%0d fails=%0d beyond=%0d rank0=%0d rankt=%0d max_gap=%0d first_latency=%0d",
               n_out, n_stall, n_full, n_fail, n_beyond, n_rank0, n_rankt, max_gap, lat0);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
