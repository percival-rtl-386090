// tb_posit_add: self-checking test of the Posit32 adder/subtractor.
// Directed cases (zero, NaR, x-x, 1+1, saturation) and random operands with
// moderate scales are compared with the reference rounding of the exact sum
// computed in double precision.
module tb_posit_add;
  import posit_ref_pkg::*;
  logic [31:0] a, b, r;
  logic        sub;
  int checks = 0, failures = 0;

  posit_add #(.N(32)) dut (.a_i(a), .b_i(b), .sub_i(sub), .r_o(r));

  task automatic check(input logic [31:0] ta, tb_, input logic ts, input logic [31:0] exp);
    a = ta; b = tb_; sub = ts;
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL add a=%h b=%h sub=%0d got=%h exp=%h", ta, tb_, ts, r, exp);
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
    check(32'h4000_0000, 32'h4000_0000, 0, 32'h4800_0000); // 1 + 1 = 2
    check(32'h4000_0000, 32'h4000_0000, 1, 32'h0000_0000); // 1 - 1 = 0
    check(32'h0000_0000, 32'h4000_0000, 1, 32'hc000_0000); // 0 - 1 = -1
    check(32'h1234_5678, 32'h0000_0000, 0, 32'h1234_5678);
    check(NAR, 32'h4000_0000, 0, NAR);
    check(32'h4000_0000, NAR, 1, NAR);
    check(MAXPOS, MAXPOS, 0, MAXPOS);                      // saturates
    check(MINPOS, 32'hffff_ffff, 0, 32'h0000_0000);        // minpos - minpos
    for (int i = 0; i < 20000; i++) begin
      x = rand_posit(3, 0);
      y = rand_posit(3, 0);
      check(x, y, 1'b0, r2p(p2r(x) + p2r(y)));
      check(x, y, 1'b1, r2p(p2r(x) - p2r(y)));
    end
    for (int i = 0; i < 5000; i++) begin   // whole range, tapered rounding
      x = rand_posit(29, 0);
      check(x, x, 1'b0, r2p(2.0 * p2r(x)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
