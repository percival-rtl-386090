// tb_posit_alu: self-checking test of the posit ALU operations. Comparisons
// are checked against the real values of the posits (NaR below everything and
// equal to itself), sign injection against negation of the real value, and the
// moves against bit copies with sign extension.
module tb_posit_alu;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  pop_e        op;
  logic [63:0] a, r;
  logic [31:0] b;
  int checks = 0, failures = 0;

  posit_alu #(.N(32), .XLEN(64)) dut (.op_i(op), .a_i(a), .b_i(b), .result_o(r));

  task automatic check(input pop_e top, input logic [63:0] ta, input logic [31:0] tb_, input logic [63:0] exp);
    op = top; a = ta; b = tb_;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL alu op=%s a=%h b=%h got=%h exp=%h", top.name(), ta, tb_, r, exp);
    end
  endtask

  // ordering from real values; NaR is the least element
  function automatic bit less(logic [31:0] x, logic [31:0] y);
    if (x == NAR) return y != NAR;
    if (y == NAR) return 0;
    return p2r(x) < p2r(y);
  endfunction

  function automatic logic [31:0] with_sign(logic [31:0] x, bit neg);
    real v;
    if (x == NAR || x == 0) return x;
    v = p2r(x);
    if ((v < 0.0) != neg) v = -v;
    return r2p(v);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, y;
    for (int i = 0; i < 5000; i++) begin
      x = (i % 50 == 0) ? NAR : rand_posit(20, 0);
      y = (i % 7 == 0) ? x : ((i % 45 == 0) ? NAR : rand_posit(20, 0));
      if (i % 60 == 0) x = 32'h0;
      check(OP_PMIN, 64'(x), y, 64'(less(x, y) ? x : y));
      check(OP_PMAX, 64'(x), y, 64'(less(x, y) ? y : x));
      check(OP_PEQ,  64'(x), y, 64'(x == y));
      check(OP_PLT,  64'(x), y, 64'(less(x, y)));
      check(OP_PLE,  64'(x), y, 64'(less(x, y) || x == y));
      check(OP_PSGNJ,  64'(x), y, 64'(with_sign(x, y[31])));
      check(OP_PSGNJN, 64'(x), y, 64'(with_sign(x, !y[31])));
      check(OP_PSGNJX, 64'(x), y, 64'(with_sign(x, x[31] ^ y[31])));
      check(OP_PMVXW, {32'hdead_beef, x}, y, {{32{x[31]}}, x});
      check(OP_PMVWX, {32'hdead_beef, x}, y, {32'h0, x});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
