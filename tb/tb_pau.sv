// tb_pau: self-checking test of the Posit Arithmetic Unit.
// Random sequences of every PAU operation, with random gaps and back-to-back
// issue, are checked against the reference model: posit results against the
// reference rounding, the quire against an exact double-precision running sum
// (operands chosen so that the sum stays exact), and the cycle count from the
// handshake to valid_o against 1 + latency (2 for PADD/PSUB/QMADD/QMSUB, 1 for
// PMUL/PDIV/PSQRT/QROUND, 0 otherwise).
module tb_pau;
  import posit_pkg::*;
  import posit_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, ready, vout, busy, dnext;
  pop_e op;
  logic [63:0] a, res;
  logic [31:0] b;
  logic [6:0]  tag, tag_o;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { pop_e op; logic [63:0] exp; bit has_res; int acc; logic [6:0] tag; } exp_t;
  exp_t pend [$];
  real  qsum = 0.0;
  bit   qnar = 0;
  int   n_ops [pop_e];

  pau #(.N(32), .XLEN(64), .TAG_W(7)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .ready_o(ready),
    .op_i(op), .a_i(a), .b_i(b), .tag_i(tag), .valid_o(vout), .result_o(res), .tag_o(tag_o),
    .busy_o(busy), .done_next_o(dnext));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: results, tags and latency
  bit dnext_seen = 0;
  always @(negedge clk) begin
    if (rst_n && vout) begin
      exp_t e;
      e = pend.pop_front();
      checks++;
      if (cyc - e.acc != 1 + int'(pau_latency(e.op)) || tag_o !== e.tag || !dnext_seen &&
          pau_latency(e.op) > 0) begin
        failures++;
        if (failures < 10) $display("FAIL latency/tag op=%s cycles=%0d", e.op.name(), cyc - e.acc);
      end
      if (e.has_res) begin
        checks++;
        if (res !== e.exp) begin
          failures++;
          if (failures < 10) $display("FAIL result op=%s got=%h exp=%h", e.op.name(), res, e.exp);
        end
      end
      dnext_seen = 0;
    end else if (rst_n && dnext) dnext_seen = 1;
  end

  task automatic send(input pop_e top, input logic [63:0] ta, input logic [31:0] tb_,
                      input logic [63:0] exp, input bit has_res);
    exp_t e;
    op = top; a = ta; b = tb_; valid = 1; tag = 7'($urandom);
    while (!ready) @(negedge clk);
    e.op = top; e.exp = exp; e.has_res = has_res; e.acc = cyc; e.tag = tag;
    pend.push_back(e);
    n_ops[top] = n_ops.exists(top) ? n_ops[top] + 1 : 1;
    @(negedge clk);
    valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  task automatic random_op();
    logic [31:0] x, y;
    logic [63:0] i;
    int k;
    k = $urandom_range(0, 17);
    case (k)
      0, 1: begin x = rand_posit(3, 0); y = rand_posit(3, 0);
        if (k == 0) send(OP_PADD, 64'(x), y, 64'(r2p(p2r(x) + p2r(y))), 1);
        else        send(OP_PSUB, 64'(x), y, 64'(r2p(p2r(x) - p2r(y))), 1); end
      2: begin x = rand_posit(6, 4); y = rand_posit(6, 4); send(OP_PMUL, 64'(x), y, 64'(r2p(p2r(x) * p2r(y))), 1); end
      3: begin x = rand_posit(6, 0); y = rand_posit(6, 0); send(OP_PDIV, 64'(x), y, 64'(r2p(mitchell_div(p2r(x), p2r(y)))), 1); end
      4: begin x = rand_posit(6, 0); send(OP_PSQRT, 64'(x), 0, x[31] ? 64'(NAR) : 64'(r2p(mitchell_sqrt(p2r(x)))), 1); end
      5, 6, 7: begin x = rand_posit(1, 14); y = rand_posit(1, 14);
        if (k != 7) begin qsum = qsum + p2r(x) * p2r(y); send(OP_QMADD, 64'(x), y, 0, 0); end
        else        begin qsum = qsum - p2r(x) * p2r(y); send(OP_QMSUB, 64'(x), y, 0, 0); end end
      8: begin qsum = -qsum; send(OP_QNEG, 0, 0, 0, 0); end
      9, 10: send(OP_QROUND, 0, 0, qnar ? 64'(NAR) : 64'(r2p(qsum)), 1);
      11: begin qsum = 0.0; qnar = 0; send(OP_QCLR, 0, 0, 0, 0); end
      12: begin x = rand_posit(9, 0);
        case ($urandom_range(0, 3))
          0: send(OP_P2I,  64'(x), 0, ref_p2i(x, 32, 1), 1);
          1: send(OP_P2U,  64'(x), 0, ref_p2i(x, 32, 0), 1);
          2: send(OP_P2L,  64'(x), 0, ref_p2i(x, 64, 1), 1);
          default: send(OP_P2LU, 64'(x), 0, ref_p2i(x, 64, 0), 1);
        endcase end
      default: begin
        i = {$urandom(), $urandom()} & 64'h001f_ffff_ffff_ffff;
        if ($urandom_range(0, 1) == 1) i = -i;
        case ($urandom_range(0, 3))
          0: send(OP_I2P,  i, 0, 64'(ref_i2p(i, 32, 1)), 1);
          1: send(OP_U2P,  i, 0, 64'(ref_i2p(i, 32, 0)), 1);
          2: send(OP_L2P,  i, 0, 64'(ref_i2p(i, 64, 1)), 1);
          default: send(OP_LU2P, i, 0, 64'(ref_i2p(i, 64, 0)), 1);
        endcase end
    endcase
  endtask

  initial begin
    valid = 0; op = OP_NONE; a = 0; b = 0; tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // quire: 1*1 + 2*2 - 0.5*4 = 3, negated -> -3; NaR poisons the quire until QCLR
    send(OP_QCLR, 0, 0, 0, 0);
    send(OP_QMADD, 64'h4000_0000, 32'h4000_0000, 0, 0);
    send(OP_QMADD, 64'h4800_0000, 32'h4800_0000, 0, 0);
    send(OP_QMSUB, 64'h3800_0000, 32'h5000_0000, 0, 0);
    send(OP_QROUND, 0, 0, 64'(r2p(3.0)), 1);
    send(OP_QNEG, 0, 0, 0, 0);
    send(OP_QROUND, 0, 0, 64'(r2p(-3.0)), 1);
    send(OP_QMADD, 64'(NAR), 32'h4000_0000, 0, 0);
    send(OP_QROUND, 0, 0, 64'(NAR), 1);
    send(OP_QCLR, 0, 0, 0, 0);
    send(OP_QROUND, 0, 0, 64'h0, 1);
    for (int i = 0; i < 6000; i++) random_op();
    while (pend.size() != 0) @(negedge clk);
    checks++;
    if (n_ops.num() != 18) begin failures++; $display("FAIL only %0d operations exercised", n_ops.num()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
