// tb_int_to_posit: self-checking test of the four integer-to-posit converters
// (32/64-bit, signed/unsigned) against reference rounding of the exact integer
// value. Random operands have at most 53 significant bits so the reference
// value is exact.
module tb_int_to_posit;
  import posit_ref_pkg::*;
  logic [63:0] x;
  logic [31:0] p_w, p_wu, p_l, p_lu;
  int checks = 0, failures = 0;

  int_to_posit #(.IN_W(32), .SIGNED_IN(1'b1)) u_w  (.x_i(x), .p_o(p_w));
  int_to_posit #(.IN_W(32), .SIGNED_IN(1'b0)) u_wu (.x_i(x), .p_o(p_wu));
  int_to_posit #(.IN_W(64), .SIGNED_IN(1'b1)) u_l  (.x_i(x), .p_o(p_l));
  int_to_posit #(.IN_W(64), .SIGNED_IN(1'b0)) u_lu (.x_i(x), .p_o(p_lu));

  task automatic cmp(input string n, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%h got=%h exp=%h", n, x, got, exp);
    end
  endtask

  task automatic check(input logic [63:0] tx);
    x = tx;
    #1;
    cmp("W",  p_w,  ref_i2p(tx, 32, 1));
    cmp("WU", p_wu, ref_i2p(tx, 32, 0));
    cmp("L",  p_l,  ref_i2p(tx, 64, 1));
    cmp("LU", p_lu, ref_i2p(tx, 64, 0));
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
    x = 0;
    #1;
    check(64'd1); checks++; if (p_w != 32'h4000_0000) failures++;   // 1
    check(-64'd2); checks++; if (p_l != 32'hb800_0000) failures++;  // -2
    check(64'd0); check(64'h8000_0000_0000_0000); check(64'hffff_ffff_ffff_ffff);
    check(64'h0000_0000_8000_0000);
    for (int i = 0; i < 20000; i++) begin
      m = {$urandom(), $urandom()};
      case (i % 4)
        0: m = m & 64'hffff;                               // small
        1: m = m & 64'h0000_0000_ffff_ffff;                // 32-bit
        2: m = (m & 64'h001f_ffff_ffff_ffff) << $urandom_range(0, 11);
        default: m = -(m & 64'h0000_00ff_ffff_ffff);       // negative
      endcase
      check(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
