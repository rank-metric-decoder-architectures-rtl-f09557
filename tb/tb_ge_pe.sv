// tb_ge_pe: one cell of the elimination array.  Random operation codes and
// neighbour bits; after each clock the cell must hold the value the
// operation selects (keep, shift left, eliminate, shift up first/next) or
// the load value.
module tb_ge_pe;
  import gf_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, init = 0;
  ge_op_t op = GE_KEEP;
  logic shl_in = 0, elim_a = 0, elim_p = 0, elim_f = 0, first_in = 0, next_in = 0, q;
  always #5 clk = ~clk;
  ge_pe dut (.*);
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
    logic exp_q, old;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(q == 1'b0, "reset value");
    for (int k = 0; k < 2000; k++) begin
      old = q;
      load = ($urandom % 8) == 0; init = 1'($urandom);
      op = ge_op_t'($urandom % 5);
      {shl_in, elim_a, elim_p, elim_f, first_in, next_in} = 6'($urandom);
      unique case (op)
        GE_SHL:      exp_q = shl_in;
        GE_ELIM:     exp_q = elim_a ^ (elim_f & elim_p);
        GE_UP_FIRST: exp_q = first_in;
        GE_UP_NEXT:  exp_q = next_in;
        default:     exp_q = old;
      endcase
      if (load) exp_q = init;
      @(negedge clk);
      chk(q == exp_q, $sformatf("op %s load %0d", op.name(), load));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
