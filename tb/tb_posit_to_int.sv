// tb_posit_to_int: self-checking test of the four posit-to-integer converters
// (32/64-bit, signed/unsigned): rounding to nearest-even, saturation, NaR and
// 32-bit sign extension, against a reference built from the real value.
module tb_posit_to_int;
  import posit_ref_pkg::*;
  logic [31:0] p;
  logic [63:0] r_w, r_wu, r_l, r_lu;
  int checks = 0, failures = 0;

  posit_to_int #(.OUT_W(32), .SIGNED_OUT(1'b1)) u_w  (.p_i(p), .r_o(r_w));
  posit_to_int #(.OUT_W(32), .SIGNED_OUT(1'b0)) u_wu (.p_i(p), .r_o(r_wu));
  posit_to_int #(.OUT_W(64), .SIGNED_OUT(1'b1)) u_l  (.p_i(p), .r_o(r_l));
  posit_to_int #(.OUT_W(64), .SIGNED_OUT(1'b0)) u_lu (.p_i(p), .r_o(r_lu));

  task automatic cmp(input string n, input logic [63:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s p=%h got=%h exp=%h", n, p, got, exp);
    end
  endtask

  task automatic check(input logic [31:0] tp);
    p = tp;
    #1;
    cmp("W",  r_w,  ref_p2i(tp, 32, 1));
    cmp("WU", r_wu, ref_p2i(tp, 32, 0));
    cmp("L",  r_l,  ref_p2i(tp, 64, 1));
    cmp("LU", r_lu, ref_p2i(tp, 64, 0));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p = 0;
    #1;
    // directed: 1.5 -> 2, 2.5 -> 2 (ties to even), -1 -> 0 unsigned
    check(32'h4400_0000); checks++; if (r_w != 64'd2) failures++;
    check(32'h4a00_0000); checks++; if (r_w != 64'd2) failures++;
    check(32'hc000_0000); checks++; if (r_wu != 64'd0 || r_w != '1) failures++;
    check(NAR); checks++; if (r_l != 64'h8000_0000_0000_0000) failures++;
    check(MAXPOS); check(MINPOS); check(32'h0);
    for (int i = 0; i < 20000; i++) check(rand_posit((i % 3 == 0) ? 17 : 8, 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
