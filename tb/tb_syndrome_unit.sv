// tb_syndrome_unit: random received words of length 8 over GF(2^8); the 4
// syndromes must match a reference computed with polynomial-basis
// arithmetic, and a word must take exactly N = 8 accumulation cycles.
module tb_syndrome_unit;
  import gf_ref_pkg::*;
  localparam int M = 8, N = 8, T = 2;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [M-1:0] r [N], s [2*T];
  always #5 clk = ~clk;
  syndrome_unit #(.M(M), .N(N), .T(T)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    el_t w [], sr [$];
    int cyc;
    w = new[N];
    for (int i = 0; i < N; i++) r[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin r[i] = 8'($urandom); w[i] = r[i]; end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      syndromes(w, T, sr);
      for (int l = 0; l < 2*T; l++) chk(s[l] == sr[l], $sformatf("S_%0d", l));
      chk(cyc == N, $sformatf("latency %0d cycles, expected %0d", cyc, N));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
