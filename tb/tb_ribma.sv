// tb_ribma: syndromes of random errors of rank 0..2 in a length-8 word over
// GF(2^8) (reference arithmetic).  The output sigma(x) must vanish on every
// error symbol, be non-zero, have q-degree equal to the rank of the error,
// and be produced after exactly 2t = 4 iterations.
module tb_ribma;
  import gf_ref_pkg::*;
  localparam int M = 8, N = 8, T = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [M-1:0] s [2*T], lambda [T+1];
  always #5 clk = ~clk;
  ribma #(.M(M), .T(T)) dut (.*);
  int checks = 0, failures = 0, n_s0_one = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    el_t e [$], sr [$], lam [], w [];
    int cyc, tau, rk, qd;
    bit ok;
    lam = new[T+1];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      tau = k % (T+1);
      rank_error(N, tau, e);
      w = new[N];
      foreach (e[i]) w[i] = e[i];
      rk = rank_weight(w);
      syndromes(w, T, sr);
      if (sr[0] == 8'hFF) n_s0_one++;
      for (int l = 0; l < 2*T; l++) s[l] = sr[l];
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      for (int j = 0; j <= T; j++) lam[j] = lambda[j];
      qd = -1;
      for (int j = 0; j <= T; j++) if (lam[j] != 0) qd = j;
      ok = (qd >= 0);
      foreach (e[i]) ok &= (lin_eval(lam, e[i]) == '0);
      chk(ok, $sformatf("sigma does not vanish on the rank-%0d error", rk));
      chk(qd == rk, $sformatf("q-degree %0d for rank %0d", qd, rk));
      chk(cyc == 2*T, $sformatf("latency %0d", cyc));
    end
    $display("syndromes with S_0 = 1: %0d", n_s0_one);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
