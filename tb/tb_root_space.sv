// tb_root_space: linearized polynomials with a known root space (built as
// c * (x^[1] + b x) o (x^[1] + E1 x), whose roots are span{E1, E2}) and
// random ones.  Checks the dimension against an independent rank count of
// the evaluations sigma(h_i), that the returned basis vectors are roots,
// independent and span the expected space, the failure flag
// (sigma = 0 or dimension != q-degree), and, for every polynomial that does
// not fail, the bound m(m+1)/2 = 36 clocks for the elimination plus one
// clock of evaluation.  A failing polynomial may take longer (up to m^2 + 1
// clocks when sigma = 0), since each column without a pivot costs a full
// search.
module tb_root_space;
  import gf_ref_pkg::*;
  localparam int M = 8, T = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done, fail;
  logic [M-1:0] lambda [T+1], e [T];
  logic [$clog2(M+1)-1:0] dim;
  logic [$clog2(T+2)-1:0] qdeg;
  always #5 clk = ~clk;
  root_space #(.M(M), .T(T)) dut (.*);
  int checks = 0, failures = 0, max_cyc = 0, n_fail = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    el_t lam [], e1, e2, b, c, h;
    logic [63:0] ev [], rs [], sp [];
    int kind, cyc, d, qd, ne;
    bit ok, exp_fail;
    lam = new[T+1]; ev = new[M];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      kind = k % 4;
      do begin e1 = el_t'($urandom); e2 = el_t'($urandom); end
      while (e1 == 0 || e2 == 0 || e1 == e2);
      do c = el_t'($urandom); while (c == 0);
      foreach (lam[j]) lam[j] = '0;
      ne = kind;
      case (kind)
        0: foreach (lam[j]) lam[j] = el_t'($urandom);           // random
        1: begin lam[0] = mul(c, e1); lam[1] = c; end           // roots {0,E1}
        2: begin                                                // roots span{E1,E2}
             b = mul(e2, e2) ^ mul(e1, e2);
             lam[0] = mul(c, mul(b, e1)); lam[1] = mul(c, mul(e1, e1) ^ b); lam[2] = c;
           end
        default: if (k % 8 == 3) foreach (lam[j]) lam[j] = '0; // zero polynomial
                 else begin lam[0] = mul(c, e1); lam[1] = mul(c, e1 ^ 8'hFF); lam[2] = c; ne = 0; end
      endcase
      for (int j = 0; j <= T; j++) lambda[j] = lam[j];
      for (int i = 0; i < M; i++) begin h = el_t'(1 << i); ev[i] = 64'(lin_eval(lam, h)); end
      d  = M - rank_bits(ev, M);
      qd = -1;
      for (int j = 0; j <= T; j++) if (lam[j] != 0) qd = j;
      exp_fail = (qd < 0) || (d != qd);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      chk(int'(dim) == d, $sformatf("dim %0d, expected %0d", dim, d));
      chk(fail == exp_fail, "fail flag");
      if (fail) n_fail++;
      if (!fail && qd > 0) begin
        ok = 1;
        rs = new[qd];
        for (int r = 0; r < qd; r++) begin ok &= (lin_eval(lam, e[r]) == 0); rs[r] = 64'(e[r]); end
        chk(ok, "a returned vector is not a root");
        chk(rank_bits(rs, M) == qd, "returned roots are dependent");
        if (kind == 1 || kind == 2) begin
          sp = new[qd + kind];
          for (int r = 0; r < qd; r++) sp[r] = rs[r];
          sp[qd] = 64'(e1);
          if (kind == 2) sp[qd+1] = 64'(e2);
          chk(rank_bits(sp, M) == qd, "roots do not span the expected space");
        end
      end
      if (!fail) begin
        chk(cyc <= M*(M+1)/2 + 1, $sformatf("latency %0d", cyc));
        if (cyc > max_cyc) max_cyc = cyc;
      end
    end
    chk(n_fail > 0 && n_fail < 600, "both outcomes must occur");
    $display("worst latency without failure %0d clocks (elimination bound %0d plus 1 evaluation clock), failures flagged %0d",
             max_cyc, M*(M+1)/2, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
