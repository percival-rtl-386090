// tb_posit_mac: self-checking test of the quire multiply-accumulate.
// The expected quire is built independently: the exact product m*2^e (m a
// 53-bit integer from the double product) is shifted to the quire's 2^-240
// LSB and added to or subtracted from the previous quire. Covers the whole
// posit range (maxpos^2 = 2^240, minpos^2 = 2^-240), NaR operands and a NaR
// quire.
module tb_posit_mac;
  import posit_ref_pkg::*;
  logic [31:0]  a, b;
  logic         sub;
  logic [511:0] qi, qo, qexp, term;
  int checks = 0, failures = 0;
  localparam logic [511:0] QNAR = {1'b1, 511'b0};

  posit_mac #(.N(32)) dut (.a_i(a), .b_i(b), .sub_i(sub), .quire_i(qi), .quire_o(qo));

  function automatic logic [511:0] exact_term(real v);
    int sc, e;
    real f;
    logic [511:0] t;
    if (v == 0.0) return '0;
    split(v, sc, f);
    t = 512'(longint'((1.0 + f) * pow2(52)));
    e = sc - 52 + 240;
    t = (e >= 0) ? (t << e) : (t >> -e);
    return (v < 0.0) ? -t : t;
  endfunction

  task automatic check(input logic [31:0] ta, tb_, input logic ts, input logic [511:0] tq, exp);
    a = ta; b = tb_; sub = ts; qi = tq;
    #1;
    checks++;
    if (qo !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL mac a=%h b=%h sub=%0d got=%h exp=%h", ta, tb_, ts, qo, exp);
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
    logic [511:0] q;
    check(32'h4000_0000, 32'h4000_0000, 0, '0, 512'h1 << 240);              // 1*1
    check(MAXPOS, MAXPOS, 0, '0, 512'h1 << 480);                             // 2^120 squared
    check(MINPOS, MINPOS, 0, '0, 512'h1);                                    // 2^-240
    check(MINPOS, MINPOS, 1, 512'h1, '0);
    check(NAR, 32'h4000_0000, 0, '0, QNAR);
    check(32'h4000_0000, 32'h4000_0000, 0, QNAR, QNAR);
    check(32'h0, 32'h4000_0000, 0, 512'h1234, 512'h1234);
    q = '0;
    for (int i = 0; i < 20000; i++) begin
      x = rand_posit((i % 2) ? 29 : 5, 4);
      y = rand_posit((i % 2) ? 29 : 5, 4);
      term = exact_term(p2r(x) * p2r(y));
      qexp = (i % 3 == 0) ? q - term : q + term;
      check(x, y, (i % 3 == 0), q, qexp);
      q = qo;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
