// tb_quire_to_posit: self-checking test of quire rounding. Random quires are
// +-m*2^s with m of at most 50 bits, whose value m*2^(s-240) is exact in
// double and is rounded by the reference encoder; plus zero, NaR, the
// smallest quire (rounds up to minpos) and the largest (saturates to maxpos).
module tb_quire_to_posit;
  import posit_ref_pkg::*;
  logic [511:0] q;
  logic [31:0]  p;
  int checks = 0, failures = 0;

  quire_to_posit #(.N(32)) dut (.quire_i(q), .p_o(p));

  task automatic check(input logic [511:0] tq, input logic [31:0] exp);
    q = tq;
    #1;
    checks++;
    if (p !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL q2p q=%h got=%h exp=%h", tq, p, exp);
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
    logic [63:0] m;
    int s;
    check('0, 32'h0);
    check({1'b1, 511'b0}, NAR);
    check(512'h1, MINPOS);
    check({1'b0, {511{1'b1}}}, MAXPOS);
    check(512'h1 << 240, 32'h4000_0000);     // 1.0
    check(-(512'h1 << 241), 32'hb800_0000);  // -2.0
    for (int i = 0; i < 20000; i++) begin
      m = {$urandom(), $urandom()} & 64'h0003_ffff_ffff_ffff;
      if (m == 0) m = 1;
      s = $urandom_range(0, 460);
      if (i % 2) check(-((512'(m)) << s), r2p(-real'(m) * pow2(s - 240)));
      else       check((512'(m)) << s,     r2p(real'(m) * pow2(s - 240)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
