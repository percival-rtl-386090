// posit_pkg: types and constants shared by the Posit32 execution datapath.
//
// The posit format is Posit<N,2> (es fixed to 2, as in the 4.12 draft standard).
// Posit32 is the configuration of the design; the quire is 16*N = 512 bits wide
// with 8*N-16 = 240 fractional bits. The Xposit instruction encoding (custom-0
// opcode 0001011, funct3 000/001/011, fmt 10, funct5 operation codes) follows the
// instruction table of the design. The operation enumeration and the
// functional-unit enumeration are this implementation's own encoding.
package posit_pkg;

  localparam int unsigned POSIT_N   = 32;            // posit width
  localparam int unsigned POSIT_ES  = 2;             // exponent bits (fixed)
  localparam int unsigned QUIRE_W   = 16 * POSIT_N;  // 512-bit quire
  localparam int unsigned QUIRE_FRAC = 8 * POSIT_N - 16; // 240 fraction bits
  localparam int unsigned RV_XLEN   = 64;            // RV64 integer width
  localparam int unsigned SCALE_W   = 12;            // signed scale width used internally

  localparam logic [6:0] OPCODE_POSIT = 7'b0001011;  // custom-0
  localparam logic [2:0] F3_OP  = 3'b000;
  localparam logic [2:0] F3_PLW = 3'b001;
  localparam logic [2:0] F3_PSW = 3'b011;
  localparam logic [1:0] FMT_POSIT32 = 2'b10;

  // funct5 codes of the computational Xposit instructions
  typedef enum logic [4:0] {
    F5_PADD   = 5'b00000, F5_PSUB    = 5'b00001, F5_PMUL    = 5'b00010,
    F5_PDIV   = 5'b00011, F5_PMIN    = 5'b00100, F5_PMAX    = 5'b00101,
    F5_PSQRT  = 5'b00110, F5_QMADD   = 5'b00111, F5_QMSUB   = 5'b01000,
    F5_QCLR   = 5'b01001, F5_QNEG    = 5'b01010, F5_QROUND  = 5'b01011,
    F5_PCVTWS = 5'b01100, F5_PCVTWUS = 5'b01101, F5_PCVTLS  = 5'b01110,
    F5_PCVTLUS= 5'b01111, F5_PCVTSW  = 5'b10000, F5_PCVTSWU = 5'b10001,
    F5_PCVTSL = 5'b10010, F5_PCVTSLU = 5'b10011, F5_PSGNJ   = 5'b10100,
    F5_PSGNJN = 5'b10101, F5_PSGNJX  = 5'b10110, F5_PMVXW   = 5'b10111,
    F5_PMVWX  = 5'b11000, F5_PEQ     = 5'b11001, F5_PLT     = 5'b11010,
    F5_PLE    = 5'b11011
  } funct5_e;

  // Operations as seen by the functional units
  typedef enum logic [4:0] {
    OP_PADD, OP_PSUB, OP_PMUL, OP_PDIV, OP_PSQRT,
    OP_QMADD, OP_QMSUB, OP_QCLR, OP_QNEG, OP_QROUND,
    OP_P2I, OP_P2U, OP_P2L, OP_P2LU,
    OP_I2P, OP_U2P, OP_L2P, OP_LU2P,
    OP_PMIN, OP_PMAX, OP_PEQ, OP_PLT, OP_PLE,
    OP_PSGNJ, OP_PSGNJN, OP_PSGNJX, OP_PMVXW, OP_PMVWX,
    OP_PLW, OP_PSW, OP_NONE
  } pop_e;

  typedef enum logic [2:0] { FU_NONE, FU_PAU, FU_ALU, FU_LOAD, FU_STORE } fu_e;

  // Scoreboard entry produced by the decoder
  typedef struct packed {
    fu_e         fu;
    pop_e        op;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        rs1_used;    // rs1 is read
    logic        rs1_posit;   // rs1 comes from the posit register file (else integer)
    logic        rs2_used;    // rs2 is read (always a posit register)
    logic        rd_posit;    // writes posit register rd
    logic        rd_int;      // writes integer register rd
    logic [63:0] imm;         // sign-extended load/store offset
  } sc_instr_t;

  // Latency in extra cycles after the first (0 = result in the next cycle)
  function automatic int unsigned pau_latency(pop_e op);
    case (op)
      OP_PADD, OP_PSUB, OP_QMADD, OP_QMSUB: return 2;
      OP_PMUL, OP_PDIV, OP_PSQRT, OP_QROUND: return 1;
      default: return 0;
    endcase
  endfunction

endpackage
