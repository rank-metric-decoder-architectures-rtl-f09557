// tb_gabidulin_solver: random linearly independent error values E_j and
// random locators X_j over GF(2^8), tau = 0..4; syndromes
// S_l = sum_j X_j^[l] E_j come from reference arithmetic.  The solver must
// return X_j exactly, raise 'fail' for dependent E_j, and finish in
// (tau-1) + tau*(M+1) clocks, within the 2t + mt of the paper's estimate.
module tb_gabidulin_solver;
  import gf_ref_pkg::*;
  localparam int M = 8, TM = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done, fail;
  logic [$clog2(TM+1)-1:0] tau;
  logic [M-1:0] e [TM], s [TM], x [TM];
  always #5 clk = ~clk;
  gabidulin_solver #(.M(M), .TM(TM)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    el_t ee [$], xx [TM], acc;
    logic [63:0] rr [];
    int tu, cyc;
    bit dep;
    tau = '0;
    for (int j = 0; j < TM; j++) begin e[j] = '0; s[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      tu = k % (TM + 1);
      dep = (k % 11 == 10) && tu >= 2;
      rank_error(tu, tu, ee);                // tu independent values (empty for 0)
      if (tu > 0) begin
        rr = new[tu];
        foreach (rr[j]) rr[j] = 64'(ee[j]);
        if (rank_bits(rr, M) != tu) begin k--; continue; end
      end
      if (dep) ee[tu-1] = (tu == 2) ? ee[0] : ee[0] ^ ee[1];
      for (int j = 0; j < TM; j++) begin
        xx[j] = el_t'($urandom);
        e[j] = (j < tu) ? ee[j] : el_t'($urandom);
      end
      for (int l = 0; l < TM; l++) begin
        acc = '0;
        for (int j = 0; j < tu; j++) acc ^= mul(pw2(xx[j], l), ee[j]);
        s[l] = acc;
      end
      tau = ($clog2(TM+1))'(tu);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      if (dep) chk(fail, "dependent error values not flagged");
      else begin
        chk(!fail, $sformatf("fail raised for independent values, tau %0d", tu));
        for (int j = 0; j < tu; j++) chk(x[j] == xx[j], $sformatf("X_%0d, tau %0d", j, tu));
        if (tu > 0) begin
          chk(cyc == (tu - 1) + tu*(M+1), $sformatf("latency %0d for tau %0d", cyc, tu));
          chk(cyc <= 2*tu + M*tu, "latency above 2t+mt");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
