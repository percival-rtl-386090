// tb_posit_decoder: self-checking test of the Xposit decoder. Every
// instruction of the extension is encoded from its funct5/fmt/funct3/opcode
// fields and the decoded unit, operation, register-file selection and
// offsets are compared with a table; wrong fmt, unused funct5 and funct3
// values and other opcodes must be illegal. A final sweep covers every
// opcode, funct3, fmt and funct5 combination against a legality rule.
module tb_posit_decoder;
  import posit_pkg::*;
  logic [31:0] instr;
  sc_instr_t   sc;
  logic        ill;
  int checks = 0, failures = 0;

  posit_decoder dut (.instr_i(instr), .sc_o(sc), .illegal_o(ill));

  function automatic logic [31:0] enc(logic [4:0] f5, logic [4:0] rs2, rs1, rd);
    return {f5, 2'b10, rs2, rs1, 3'b000, rd, 7'b0001011};
  endfunction

  task automatic expect_op(input logic [4:0] f5, input fu_e fu, input pop_e op,
                           input bit r1, r1p, r2, rdp, rdi);
    instr = enc(f5, 5'd7, 5'd9, 5'd13);
    #1;
    checks++;
    if (ill || sc.fu != fu || sc.op != op || sc.rs1_used != r1 || sc.rs1_posit != r1p ||
        sc.rs2_used != r2 || sc.rd_posit != rdp || sc.rd_int != rdi ||
        sc.rs1 != 5'd9 || sc.rs2 != 5'd7 || sc.rd != 5'd13) begin
      failures++;
      $display("FAIL decode f5=%b got fu=%s op=%s", f5, sc.fu.name(), sc.op.name());
    end
  endtask

  task automatic expect_illegal(input logic [31:0] ti);
    instr = ti;
    #1;
    checks++;
    if (!ill || sc.fu != FU_NONE) begin failures++; $display("FAIL not illegal %h", ti); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    //            funct5   unit    op         rs1 rs1p rs2 rdp rdi
    expect_op(5'b00000, FU_PAU, OP_PADD,    1, 1, 1, 1, 0);
    expect_op(5'b00001, FU_PAU, OP_PSUB,    1, 1, 1, 1, 0);
    expect_op(5'b00010, FU_PAU, OP_PMUL,    1, 1, 1, 1, 0);
    expect_op(5'b00011, FU_PAU, OP_PDIV,    1, 1, 1, 1, 0);
    expect_op(5'b00100, FU_ALU, OP_PMIN,    1, 1, 1, 1, 0);
    expect_op(5'b00101, FU_ALU, OP_PMAX,    1, 1, 1, 1, 0);
    expect_op(5'b00110, FU_PAU, OP_PSQRT,   1, 1, 0, 1, 0);
    expect_op(5'b00111, FU_PAU, OP_QMADD,   1, 1, 1, 0, 0);
    expect_op(5'b01000, FU_PAU, OP_QMSUB,   1, 1, 1, 0, 0);
    expect_op(5'b01001, FU_PAU, OP_QCLR,    0, 0, 0, 0, 0);
    expect_op(5'b01010, FU_PAU, OP_QNEG,    0, 0, 0, 0, 0);
    expect_op(5'b01011, FU_PAU, OP_QROUND,  0, 0, 0, 1, 0);
    expect_op(5'b01100, FU_PAU, OP_P2I,     1, 1, 0, 0, 1);
    expect_op(5'b01101, FU_PAU, OP_P2U,     1, 1, 0, 0, 1);
    expect_op(5'b01110, FU_PAU, OP_P2L,     1, 1, 0, 0, 1);
    expect_op(5'b01111, FU_PAU, OP_P2LU,    1, 1, 0, 0, 1);
    expect_op(5'b10000, FU_PAU, OP_I2P,     1, 0, 0, 1, 0);
    expect_op(5'b10001, FU_PAU, OP_U2P,     1, 0, 0, 1, 0);
    expect_op(5'b10010, FU_PAU, OP_L2P,     1, 0, 0, 1, 0);
    expect_op(5'b10011, FU_PAU, OP_LU2P,    1, 0, 0, 1, 0);
    expect_op(5'b10100, FU_ALU, OP_PSGNJ,   1, 1, 1, 1, 0);
    expect_op(5'b10101, FU_ALU, OP_PSGNJN,  1, 1, 1, 1, 0);
    expect_op(5'b10110, FU_ALU, OP_PSGNJX,  1, 1, 1, 1, 0);
    expect_op(5'b10111, FU_ALU, OP_PMVXW,   1, 1, 0, 0, 1);
    expect_op(5'b11000, FU_ALU, OP_PMVWX,   1, 0, 0, 1, 0);
    expect_op(5'b11001, FU_ALU, OP_PEQ,     1, 1, 1, 0, 1);
    expect_op(5'b11010, FU_ALU, OP_PLT,     1, 1, 1, 0, 1);
    expect_op(5'b11011, FU_ALU, OP_PLE,     1, 1, 1, 0, 1);
    // PLW p5, -4(x10)
    instr = {12'hffc, 5'd10, 3'b001, 5'd5, 7'b0001011};
    #1; checks++;
    if (ill || sc.fu != FU_LOAD || sc.op != OP_PLW || sc.rd != 5'd5 || !sc.rd_posit ||
        sc.rs1 != 5'd10 || sc.rs1_posit || sc.imm != -64'sd4) begin failures++; $display("FAIL plw"); end
    // PSW p6, 0x7e5(x11) -> imm[11:5]=0x3f, imm[4:0]=0x05
    instr = {7'h3f, 5'd6, 5'd11, 3'b011, 5'h05, 7'b0001011};
    #1; checks++;
    if (ill || sc.fu != FU_STORE || sc.op != OP_PSW || sc.rs2 != 5'd6 || !sc.rs2_used ||
        sc.rd_posit || sc.imm != 64'h7e5) begin failures++; $display("FAIL psw"); end
    for (int f = 28; f < 32; f++) expect_illegal(enc(5'(f), 0, 0, 0));
    expect_illegal({5'b00000, 2'b01, 5'd1, 5'd2, 3'b000, 5'd3, 7'b0001011});  // fmt 01
    expect_illegal({5'b00000, 2'b00, 5'd1, 5'd2, 3'b000, 5'd3, 7'b0001011});  // fmt 00
    expect_illegal({12'h0, 5'd1, 3'b010, 5'd3, 7'b0001011});                  // funct3 010
    expect_illegal({12'h0, 5'd1, 3'b111, 5'd3, 7'b0001011});
    expect_illegal(32'h0000_0013);                                            // addi (not posit)
    expect_illegal(32'h0000_2007);                                            // flw
    // sweep: every opcode, and on custom-0 every funct3, fmt and funct5, with
    // random register fields; legality and unit from an independent rule
    for (int opc = 0; opc < 128; opc++)
      for (int f3 = 0; f3 < 8; f3++)
        for (int fm = 0; fm < 4; fm++)
          for (int f5 = 0; f5 < 32; f5++) begin
            logic [14:0] regs;
            bit legal;
            fu_e fu;
            regs  = 15'($urandom);
            instr = {5'(f5), 2'(fm), regs[14:10], regs[9:5], 3'(f3), regs[4:0], 7'(opc)};
            legal = 1'b0; fu = FU_NONE;
            if (opc == 7'b0001011) begin
              if (f3 == 1) begin legal = 1; fu = FU_LOAD; end
              else if (f3 == 3) begin legal = 1; fu = FU_STORE; end
              else if (f3 == 0 && fm == 2 && f5 <= 27) begin
                legal = 1;
                fu = (f5 == 4 || f5 == 5 || f5 >= 20) ? FU_ALU : FU_PAU;
              end
            end
            #1; checks++;
            if (ill == legal || sc.fu != fu || (legal && (sc.rd != regs[4:0] || sc.rs1 != regs[9:5]))) begin
              failures++;
              if (failures < 10) $display("FAIL sweep %h ill=%b fu=%s", instr, ill, sc.fu.name());
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
