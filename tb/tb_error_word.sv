// tb_error_word: random received words, error values E_j and locators X_j.
// The error word must be e_i = sum_{j<tau} X_j[i] E_j (bit i of X_j is the
// coefficient of h_i), the output word r + e, both formed in tau clocks (one clock
// for tau = 0);
// with 'bypass' the error word is zero and r passes unchanged.
module tb_error_word;
  localparam int M = 8, N = 8, TM = 2;
  logic clk = 0, rst_n = 0, start = 0, bypass = 0, busy, done;
  logic [$clog2(TM+1)-1:0] tau = '0;
  logic [M-1:0] r [N], ev [TM], x [TM], c [N], e [N];
  always #5 clk = ~clk;
  error_word #(.M(M), .N(N), .TM(TM)) dut (.*);
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
    logic [M-1:0] ex [N];
    int tu, cyc;
    for (int i = 0; i < N; i++) r[i] = '0;
    for (int j = 0; j < TM; j++) begin ev[j] = '0; x[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      tu = k % (TM + 1);
      bypass = (k % 5 == 4);
      for (int i = 0; i < N; i++) r[i] = M'($urandom);
      for (int j = 0; j < TM; j++) begin ev[j] = M'($urandom); x[j] = M'($urandom); end
      for (int i = 0; i < N; i++) begin
        ex[i] = '0;
        if (!bypass) for (int j = 0; j < tu; j++) if (x[j][i]) ex[i] ^= ev[j];
      end
      tau = ($clog2(TM+1))'(tu);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      for (int i = 0; i < N; i++) begin
        chk(e[i] == ex[i], $sformatf("e_%0d", i));
        chk(c[i] == (r[i] ^ ex[i]), $sformatf("c_%0d", i));
      end
      if (!bypass) chk(cyc == (tu > 0 ? tu : 1), $sformatf("latency %0d for tau %0d", cyc, tu));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
