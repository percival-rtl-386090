// posit_decoder: decodes Xposit instructions into a scoreboard entry.
//
// Instructions with the custom-0 opcode 0001011 are split by funct3: 000 is a
// computational instruction (funct5 in bits 31:27 selects the operation, fmt
// in bits 26:25 must be 10), 001 is PLW and 011 is PSW. Each operation is sent
// to a functional unit (PAU, ALU, LOAD, STORE) and marked with the register
// file of each source and of the destination. PLW/PSW carry the sign-extended
// 12-bit offset (I- and S-type layouts). Any other encoding on this opcode,
// and any other opcode, raises illegal_o. Combinational.
// The opcode, funct3, fmt and funct5 values follow the paper's instruction
// table; its decoder pseudocode gives the unit of PADD (PAU), PMIN (ALU), PLW
// and PSW. Sending the other comparisons, sign injections and moves to the ALU
// with PMIN, and all arithmetic, conversion and quire operations to the PAU,
// is this design's choice. Fields the table shows as
// 00000 are not checked (this design's choice).
module posit_decoder
  import posit_pkg::*;
(
  input  logic [31:0] instr_i,
  output sc_instr_t   sc_o,
  output logic        illegal_o
);
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [4:0] funct5;
  logic [1:0] fmt;

  always_comb begin
    opcode = instr_i[6:0];
    funct3 = instr_i[14:12];
    funct5 = instr_i[31:27];
    fmt    = instr_i[26:25];
    sc_o   = '0;
    sc_o.fu  = FU_NONE;
    sc_o.op  = OP_NONE;
    sc_o.rs1 = instr_i[19:15];
    sc_o.rs2 = instr_i[24:20];
    sc_o.rd  = instr_i[11:7];
    illegal_o = 1'b0;

    if (opcode != OPCODE_POSIT) illegal_o = 1'b1;
    else begin
      case (funct3)
        F3_PLW: begin
          sc_o.fu = FU_LOAD;  sc_o.op = OP_PLW;
          sc_o.rs1_used = 1'b1; sc_o.rd_posit = 1'b1;
          sc_o.imm = {{52{instr_i[31]}}, instr_i[31:20]};
        end
        F3_PSW: begin
          sc_o.fu = FU_STORE; sc_o.op = OP_PSW;
          sc_o.rs1_used = 1'b1; sc_o.rs2_used = 1'b1;
          sc_o.imm = {{52{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
        end
        F3_OP: begin
          if (fmt != FMT_POSIT32) illegal_o = 1'b1;
          else begin
            case (funct5)
              // PAU, two posit sources, posit result
              F5_PADD, F5_PSUB, F5_PMUL, F5_PDIV: begin
                sc_o.fu = FU_PAU;
                sc_o.op = (funct5 == F5_PADD) ? OP_PADD : (funct5 == F5_PSUB) ? OP_PSUB :
                          (funct5 == F5_PMUL) ? OP_PMUL : OP_PDIV;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rs2_used = 1'b1; sc_o.rd_posit = 1'b1;
              end
              F5_PSQRT: begin
                sc_o.fu = FU_PAU; sc_o.op = OP_PSQRT;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rd_posit = 1'b1;
              end
              F5_QMADD, F5_QMSUB: begin
                sc_o.fu = FU_PAU; sc_o.op = (funct5 == F5_QMADD) ? OP_QMADD : OP_QMSUB;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rs2_used = 1'b1;
              end
              F5_QCLR:   begin sc_o.fu = FU_PAU; sc_o.op = OP_QCLR; end
              F5_QNEG:   begin sc_o.fu = FU_PAU; sc_o.op = OP_QNEG; end
              F5_QROUND: begin sc_o.fu = FU_PAU; sc_o.op = OP_QROUND; sc_o.rd_posit = 1'b1; end
              F5_PCVTWS, F5_PCVTWUS, F5_PCVTLS, F5_PCVTLUS: begin
                sc_o.fu = FU_PAU;
                sc_o.op = (funct5 == F5_PCVTWS) ? OP_P2I : (funct5 == F5_PCVTWUS) ? OP_P2U :
                          (funct5 == F5_PCVTLS) ? OP_P2L : OP_P2LU;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rd_int = 1'b1;
              end
              F5_PCVTSW, F5_PCVTSWU, F5_PCVTSL, F5_PCVTSLU: begin
                sc_o.fu = FU_PAU;
                sc_o.op = (funct5 == F5_PCVTSW) ? OP_I2P : (funct5 == F5_PCVTSWU) ? OP_U2P :
                          (funct5 == F5_PCVTSL) ? OP_L2P : OP_LU2P;
                sc_o.rs1_used = 1'b1; sc_o.rd_posit = 1'b1;
              end
              // ALU
              F5_PMIN, F5_PMAX, F5_PSGNJ, F5_PSGNJN, F5_PSGNJX: begin
                sc_o.fu = FU_ALU;
                sc_o.op = (funct5 == F5_PMIN)  ? OP_PMIN  : (funct5 == F5_PMAX)  ? OP_PMAX :
                          (funct5 == F5_PSGNJ) ? OP_PSGNJ : (funct5 == F5_PSGNJN) ? OP_PSGNJN : OP_PSGNJX;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rs2_used = 1'b1; sc_o.rd_posit = 1'b1;
              end
              F5_PEQ, F5_PLT, F5_PLE: begin
                sc_o.fu = FU_ALU;
                sc_o.op = (funct5 == F5_PEQ) ? OP_PEQ : (funct5 == F5_PLT) ? OP_PLT : OP_PLE;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rs2_used = 1'b1; sc_o.rd_int = 1'b1;
              end
              F5_PMVXW: begin
                sc_o.fu = FU_ALU; sc_o.op = OP_PMVXW;
                sc_o.rs1_used = 1'b1; sc_o.rs1_posit = 1'b1; sc_o.rd_int = 1'b1;
              end
              F5_PMVWX: begin
                sc_o.fu = FU_ALU; sc_o.op = OP_PMVWX;
                sc_o.rs1_used = 1'b1; sc_o.rd_posit = 1'b1;
              end
              default: illegal_o = 1'b1;
            endcase
          end
        end
        default: illegal_o = 1'b1;
      endcase
    end
    if (illegal_o) begin
      sc_o.fu = FU_NONE; sc_o.op = OP_NONE;
      sc_o.rs1_used = 1'b0; sc_o.rs2_used = 1'b0; sc_o.rd_posit = 1'b0; sc_o.rd_int = 1'b0;
    end
  end
endmodule
