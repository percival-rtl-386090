// tb_posit_adiv: self-checking test of the approximate Posit32 divider.
// Expected value: Mitchell's approximation 2^(sa-sb)*(1+fa-fb) (borrowing from
// the scale when fa<fb) computed in double and rounded by the reference
// encoder; also checks exact quotients of powers of two, the special cases and
// that the relative error against the true quotient stays within 1/8 (the bound of Mitchell's quotient).
module tb_posit_adiv;
  import posit_ref_pkg::*;
  logic [31:0] a, b, r;
  int checks = 0, failures = 0;
  real max_err = 0.0;

  posit_adiv #(.N(32)) dut (.a_i(a), .b_i(b), .r_o(r));

  task automatic check(input logic [31:0] ta, tb_, exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL div a=%h b=%h got=%h exp=%h", ta, tb_, r, exp);
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
    logic [31:0] x, y;
    real e;
    check(32'h5000_0000, 32'h4800_0000, 32'h4800_0000);   // 4 / 2 = 2
    check(32'h4000_0000, 32'hb800_0000, 32'hc800_0000);   // 1 / -2 = -0.5
    check(32'h4000_0000, 32'h0000_0000, NAR);             // x / 0
    check(32'h0000_0000, 32'h4800_0000, 32'h0000_0000);   // 0 / x
    check(NAR, 32'h4800_0000, NAR);
    for (int i = 0; i < 20000; i++) begin
      x = rand_posit(10, 0);
      y = rand_posit(10, 0);
      check(x, y, r2p(mitchell_div(p2r(x), p2r(y))));
      e = (p2r(r) - p2r(x) / p2r(y)) / (p2r(x) / p2r(y));
      if (e < 0.0) e = -e;
      if (e > max_err) max_err = e;
    end
    checks++;
    if (max_err > 0.1251) begin failures++; $display("FAIL max relative error %f", max_err); end
    $display("max relative error %f", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
