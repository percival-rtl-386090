// tb_posit_mul: self-checking test of the Posit32 multiplier against the
// reference rounding of the exact product (operands keep at most 24 fraction
// bits so that the double product is exact), over the whole dynamic range.
module tb_posit_mul;
  import posit_ref_pkg::*;
  logic [31:0] a, b, r;
  int checks = 0, failures = 0;

  posit_mul #(.N(32)) dut (.a_i(a), .b_i(b), .r_o(r));

  task automatic check(input logic [31:0] ta, tb_, exp);
    a = ta; b = tb_;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL mul a=%h b=%h got=%h exp=%h", ta, tb_, r, exp);
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
    check(32'h4000_0000, 32'h4000_0000, 32'h4000_0000);   // 1 * 1
    check(32'h4800_0000, 32'hc000_0000, 32'hb800_0000);   // 2 * -1 = -2
    check(32'h0000_0000, 32'h4800_0000, 32'h0000_0000);
    check(NAR, 32'h0000_0000, NAR);
    check(MAXPOS, MAXPOS, MAXPOS);
    check(MINPOS, MINPOS, MINPOS);                         // never rounds to zero
    for (int i = 0; i < 20000; i++) begin
      x = rand_posit((i % 2 == 0) ? 4 : 15, 4);
      y = rand_posit((i % 2 == 0) ? 4 : 15, 4);
      check(x, y, r2p(p2r(x) * p2r(y)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
