// tb_posit_asqrt: self-checking test of the approximate Posit32 square root.
// Expected value: 2^(s/2)*(1+f/2) for even scale s and 2^((s-1)/2)*(1+(1+f)/2)
// for odd s, computed in double and rounded by the reference encoder; plus
// exact roots of even powers of two, negative and NaR inputs, and a bound on
// the relative error against the true root.
module tb_posit_asqrt;
  import posit_ref_pkg::*;
  logic [31:0] a, r;
  int checks = 0, failures = 0;
  real max_err = 0.0;

  posit_asqrt #(.N(32)) dut (.a_i(a), .r_o(r));

  task automatic check(input logic [31:0] ta, exp);
    a = ta;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL sqrt a=%h got=%h exp=%h", ta, r, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    real e;
    check(32'h5000_0000, 32'h4800_0000);   // sqrt(4) = 2
    check(32'h4000_0000, 32'h4000_0000);   // sqrt(1) = 1
    check(32'h3000_0000, 32'h3800_0000);   // sqrt(1/4) = 1/2
    check(32'hc000_0000, NAR);             // sqrt(-1)
    check(NAR, NAR);
    check(32'h0000_0000, 32'h0000_0000);
    for (int i = 0; i < 20000; i++) begin
      x = rand_posit(20, 0);
      if (x[31]) x = -x;
      check(x, r2p(mitchell_sqrt(p2r(x))));
      e = (p2r(r) - $sqrt(p2r(x))) / $sqrt(p2r(x));
      if (e < 0.0) e = -e;
      if (e > max_err) max_err = e;
    end
    checks++;
    if (max_err > 0.1112) begin failures++; $display("FAIL max relative error %f", max_err); end
    $display("max relative error %f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
