// tb_gf_nb_mul: checks the normal basis multiplier over GF(2^8) against a
// reference that multiplies in the polynomial basis, checks the serial
// complexity C_N of both field polynomials (21 and 85), and checks field
// identities (unit, commutativity, squaring = cyclic shift, distributivity)
// for a GF(2^16) instance.
module tb_gf_nb_mul;
  import gf_pkg::*;
  import gf_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0]  a8, b8, c8;
  logic [15:0] a16, b16, c16, d16, e16, s16, x16, y16;

  gf_nb_mul #(.M(8))                        u8  (.a(a8),  .b(b8),  .c(c8));
  gf_nb_mul #(.M(16), .POLY(POLY_GF65536))  u16 (.a(a16), .b(b16), .c(c16));
  gf_nb_mul #(.M(16), .POLY(POLY_GF65536))  u16b(.a(a16), .b(d16), .c(e16));
  gf_nb_mul #(.M(16), .POLY(POLY_GF65536))  u16c(.a(a16), .b(a16), .c(s16));
  gf_nb_mul #(.M(16), .POLY(POLY_GF65536))  u16d(.a(b16), .b(a16), .c(x16));
  gf_nb_mul #(.M(16), .POLY(POLY_GF65536))  u16e(.a(a16), .b(b16 ^ d16), .c(y16));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(nb_complexity(8, POLY_GF256) == 21, "C_N of GF(2^8) is not 21");
    chk(nb_complexity(16, POLY_GF65536) == 85, "C_N of GF(2^16) is not 85");
    for (int k = 0; k < 3000; k++) begin
      a8 = 8'($urandom); b8 = 8'($urandom);
      if (k < 256) begin a8 = 8'(k); b8 = 8'hFF; end
      #1;
      chk(c8 == mul(a8, b8), $sformatf("%h*%h=%h, expected %h", a8, b8, c8, mul(a8, b8)));
    end
    for (int k = 0; k < 1000; k++) begin
      a16 = 16'($urandom); b16 = 16'($urandom); d16 = 16'hFFFF;
      #1;
      chk(e16 == a16, "a*1 != a in GF(2^16)");
      chk(s16 == {a16[14:0], a16[15]}, "a*a is not a cyclic shift in GF(2^16)");
      chk(x16 == c16, "not commutative in GF(2^16)");
      d16 = 16'($urandom);
      #1;
      chk(y16 == (c16 ^ e16), "not distributive in GF(2^16)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
