// tb_ribma_be: random operands; after one enabled clock the cell must hold
// Gamma*Delta_{i+1} + Delta_0*Theta_{i+1} and (ct ? Delta_i : Theta_i)^2;
// load and hold are checked too.
module tb_ribma_be;
  import gf_ref_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, en = 0, ct;
  logic [7:0] init_delta, init_theta, delta_next, theta_next, gamma, delta0, delta, theta;
  always #5 clk = ~clk;
  ribma_be #(.M(8)) dut (.*);
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
    logic [7:0] d_old, t_old, sel;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      init_delta = 8'($urandom); init_theta = 8'($urandom);
      load = 1; en = 0;
      @(negedge clk);
      chk(delta == init_delta && theta == init_theta, "load");
      load = 0;
      delta_next = 8'($urandom); theta_next = 8'($urandom);
      gamma = 8'($urandom); delta0 = 8'($urandom); ct = 1'($urandom);
      @(negedge clk);
      chk(delta == init_delta && theta == init_theta, "hold");
      d_old = delta; t_old = theta; en = 1;
      @(negedge clk);
      en = 0;
      sel = ct ? d_old : t_old;
      chk(delta == (mul(gamma, delta_next) ^ mul(delta0, theta_next)), "delta update");
      chk(theta == mul(sel, sel), "theta update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
