// tb_gauss_elim: 8x8 binary matrices of random rank 0..8, with the 8x8
// identity as right-hand part.  Checks the rank, that each of the first
// ROWS-rank rows of the right-hand result is a combination of input rows
// summing to zero, and that these combinations are independent.  The clock
// count must equal that of a step-by-step software run of the elimination
// algorithm (one clock per shift-up, eliminate or shift-left), and for
// matrices of full rank it must stay within ROWS(ROWS+1)/2 = 36 clocks; the
// reversed identity, which needs the longest pivot searches, must take
// exactly 36.
// Rank-deficient matrices take longer (64 clocks for the zero matrix): every
// column without a pivot costs a full search.
module tb_gauss_elim;
  import gf_ref_pkg::*;
  localparam int ROWS = 8, LC = 8, RC = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [LC-1:0] m_in [ROWS], m_out [ROWS];
  logic [RC-1:0] b_in [ROWS], b_out [ROWS];
  logic [$clog2(ROWS+1)-1:0] rank;
  always #5 clk = ~clk;
  gauss_elim #(.ROWS(ROWS), .LC(LC), .RC(RC)) dut (.*);
  int checks = 0, failures = 0, max_cyc = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // clock count of the algorithm, run on a copy of the matrix
  function automatic int alg_cycles(logic [LC-1:0] a_in [ROWS]);
    logic [LC-1:0] a [ROWS], t [ROWS];
    int i = 0, cyc = 0, l;
    a = a_in;
    for (int j = 0; j < LC; j++) begin
      l = 1;
      while (!a[0][0] && l < ROWS - i) begin
        l++; cyc++;
        t = a;
        for (int r = 0; r <= ROWS - 2 - i; r++) t[r] = a[r+1];
        t[ROWS-1-i] = a[0];
        a = t;
      end
      cyc++;
      t = a;
      if (a[0][0]) begin
        for (int r = 0; r < ROWS - 1; r++)
          for (int c = 0; c < LC; c++)
            t[r][c] = a[r+1][(c+1)%LC] ^ (a[r+1][0] & a[0][(c+1)%LC]);
        for (int c = 0; c < LC; c++) t[ROWS-1][c] = a[0][(c+1)%LC];
        i++;
      end else
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < LC; c++) t[r][c] = a[r][(c+1)%LC];
      a = t;
    end
    return cyc;
  endfunction

  initial begin
    logic [63:0] rows [], base [], nul [];
    logic [LC-1:0] acc;
    int rk, cyc, want;
    rows = new[ROWS];
    for (int i = 0; i < ROWS; i++) begin m_in[i] = '0; b_in[i] = RC'(1) << i; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      want = k % (ROWS + 1);
      base = new[want > 0 ? want : 1];
      foreach (base[j]) base[j] = 64'($urandom % (1 << LC));
      for (int i = 0; i < ROWS; i++) begin
        acc = '0;
        if (want > 0)
          for (int j = 0; j < want; j++) if ($urandom % 2) acc ^= LC'(base[j]);
        if (k % 7 == 0) acc = (i < want) ? LC'(1 << i) : '0;   // sparse cases
        m_in[i] = acc; rows[i] = 64'(acc);
      end
      if (k == 1)                        // worst case: reversed identity
        for (int i = 0; i < ROWS; i++) begin
          m_in[i] = LC'(1) << (LC - 1 - i); rows[i] = 64'(m_in[i]);
        end
      rk = rank_bits(rows, LC);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin if (busy) cyc++; @(negedge clk); end
      chk(int'(rank) == rk, $sformatf("rank %0d, expected %0d", rank, rk));
      nul = new[ROWS - rk > 0 ? ROWS - rk : 1];
      nul[0] = 64'(1);
      for (int r = 0; r < ROWS - rk; r++) begin
        acc = '0;
        for (int i = 0; i < ROWS; i++) if (b_out[r][i]) acc ^= m_in[i];
        chk(acc == '0 && b_out[r] != '0, $sformatf("row %0d of B is not a null combination", r));
        nul[r] = 64'(b_out[r]);
      end
      if (ROWS - rk > 0) chk(rank_bits(nul, RC) == ROWS - rk, "null combinations are dependent");
      chk(cyc == alg_cycles(m_in), $sformatf("latency %0d, algorithm takes %0d", cyc, alg_cycles(m_in)));
      if (rk == ROWS) begin
        chk(cyc <= ROWS*(ROWS+1)/2, $sformatf("latency %0d > %0d", cyc, ROWS*(ROWS+1)/2));
        if (cyc > max_cyc) max_cyc = cyc;
      end
    end
    chk(max_cyc == ROWS*(ROWS+1)/2, "the reversed identity must take exactly ROWS(ROWS+1)/2 clocks");
    $display("worst latency at full rank %0d clocks (bound %0d)", max_cyc, ROWS*(ROWS+1)/2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
