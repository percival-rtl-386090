// percival_xposit: the posit execution datapath of the PERCIVAL core.
//
// This is the part that PERCIVAL adds to the CVA6 RV64GC core to execute the
// Xposit extension: instruction decoding of the custom-0 posit opcode, a
// scoreboard over the posit registers, the 32 x 32-bit posit register file,
// the Posit Arithmetic Unit (PAU) with the 512-bit quire, the posit
// operations of the integer ALU and the PLW/PSW load/store path. The rest of
// CVA6 (fetch, integer pipeline and register file, CSRs, MMU, caches, FPU) is
// outside: it presents one posit instruction at a time with the value of its
// integer source register, receives integer results on a write-back port, and
// provides a data memory.
//
// Interface and timing:
//   instr_valid_i/instr_ready_o  handshake of one 32-bit instruction; int_rs1_i
//                                is the integer rs1 value of that instruction
//                                (base address, integer to convert or move).
//                                Illegal encodings are accepted at once and
//                                flagged on illegal_instr_o.
//   int_wb_*                     integer results (PCVT to integer, PEQ/PLT/PLE,
//                                PMV.X.W), one per cycle.
//   mem_*                        request in the issue cycle; load data one cycle
//                                later (mem_rvalid_i must then be high).
// An instruction issues in the cycle its handshake completes. ALU operations
// and loads write back in the next cycle; PAU operations after 1 + latency
// cycles. Instructions issue in order and write back out of order; a source
// produced in the issue cycle is forwarded from the write-back bus. The block
// structure follows the paper; handshakes, port widths, the single write port
// and the hazard rules are this design's choices.
module percival_xposit
  import posit_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned XLEN  = 64,
  parameter int unsigned NREGS = 32
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            instr_valid_i,
  input  logic [31:0]     instr_i,
  input  logic [XLEN-1:0] int_rs1_i,
  output logic            instr_ready_o,
  output logic            illegal_instr_o,
  output logic            int_wb_valid_o,
  output logic [4:0]      int_wb_rd_o,
  output logic [XLEN-1:0] int_wb_data_o,
  output logic            mem_req_o,
  output logic            mem_we_o,
  output logic [XLEN-1:0] mem_addr_o,
  output logic [N-1:0]    mem_wdata_o,
  input  logic            mem_rvalid_i,
  input  logic [N-1:0]    mem_rdata_i
);
  localparam int unsigned TAG_W = 7;   // {rd_posit, rd_int, rd[4:0]}

  // ---------------- decode ----------------
  sc_instr_t sc;
  logic      illegal;
  posit_decoder u_dec (.instr_i(instr_i), .sc_o(sc), .illegal_o(illegal));

  // ---------------- write-back bus ----------------
  logic         p_wb_valid;
  logic [4:0]   p_wb_rd;
  logic [N-1:0] p_wb_data;

  // ---------------- register file ----------------
  logic [N-1:0] rf_rdata1, rf_rdata2;
  posit_regfile #(.N(N), .NREGS(NREGS)) u_prf (
    .clk_i, .rst_ni,
    .raddr1_i(sc.rs1[$clog2(NREGS)-1:0]), .rdata1_o(rf_rdata1),
    .raddr2_i(sc.rs2[$clog2(NREGS)-1:0]), .rdata2_o(rf_rdata2),
    .we_i(p_wb_valid), .waddr_i(p_wb_rd[$clog2(NREGS)-1:0]), .wdata_i(p_wb_data));

  // ---------------- scoreboard / issue ----------------
  logic issue, fwd1, fwd2;
  logic stall_raw, stall_waw, stall_struct, stall_wbport;
  logic pau_ready, pau_valid, pau_busy, pau_done_next;
  logic [XLEN-1:0]  pau_result;
  logic [TAG_W-1:0] pau_tag;

  posit_scoreboard #(.NREGS(NREGS)) u_sb (
    .clk_i, .rst_ni,
    .valid_i(instr_valid_i && !illegal), .sc_i(sc),
    .pau_ready_i(pau_ready),
    .pau_wb_next_i(pau_done_next && (pau_tag[6] || pau_tag[5])),
    .wb_valid_i(p_wb_valid), .wb_rd_i(p_wb_rd),
    .issue_o(issue), .fwd1_o(fwd1), .fwd2_o(fwd2),
    .stall_raw_o(stall_raw), .stall_waw_o(stall_waw),
    .stall_struct_o(stall_struct), .stall_wbport_o(stall_wbport));

  assign instr_ready_o   = illegal || issue;
  assign illegal_instr_o = instr_valid_i && illegal;

  // operands: posit register, forwarded result or integer source
  logic [N-1:0]    opa_posit, opb;
  logic [XLEN-1:0] opa;
  always_comb begin
    opa_posit = fwd1 ? p_wb_data : rf_rdata1;
    opb       = fwd2 ? p_wb_data : rf_rdata2;
    opa       = sc.rs1_posit ? XLEN'(opa_posit) : int_rs1_i;
  end

  // ---------------- PAU ----------------
  pau #(.N(N), .XLEN(XLEN), .TAG_W(TAG_W)) u_pau (
    .clk_i, .rst_ni,
    .valid_i(issue && sc.fu == FU_PAU), .ready_o(pau_ready),
    .op_i(sc.op), .a_i(opa), .b_i(opb), .tag_i({sc.rd_posit, sc.rd_int, sc.rd}),
    .valid_o(pau_valid), .result_o(pau_result), .tag_o(pau_tag),
    .busy_o(pau_busy), .done_next_o(pau_done_next));

  // ---------------- ALU (posit operations) ----------------
  logic [XLEN-1:0] alu_result, alu_result_q;
  logic            alu_valid_q, alu_rd_posit_q, alu_rd_int_q;
  logic [4:0]      alu_rd_q;
  posit_alu #(.N(N), .XLEN(XLEN)) u_alu (.op_i(sc.op), .a_i(opa), .b_i(opb), .result_o(alu_result));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      alu_valid_q    <= 1'b0;
      alu_result_q   <= '0;
      alu_rd_q       <= '0;
      alu_rd_posit_q <= 1'b0;
      alu_rd_int_q   <= 1'b0;
    end else begin
      alu_valid_q <= issue && sc.fu == FU_ALU;
      if (issue && sc.fu == FU_ALU) begin
        alu_result_q   <= alu_result;
        alu_rd_q       <= sc.rd;
        alu_rd_posit_q <= sc.rd_posit;
        alu_rd_int_q   <= sc.rd_int;
      end
    end
  end

  // ---------------- load/store ----------------
  logic            ld_valid;
  logic [4:0]      ld_rd;
  logic [N-1:0]    ld_data;
  posit_lsu #(.N(N), .XLEN(XLEN)) u_lsu (
    .clk_i, .rst_ni,
    .valid_i(issue && (sc.fu == FU_LOAD || sc.fu == FU_STORE)), .store_i(sc.fu == FU_STORE),
    .base_i(int_rs1_i), .imm_i(sc.imm), .sdata_i(opb), .rd_i(sc.rd),
    .mem_req_o, .mem_we_o, .mem_addr_o, .mem_wdata_o, .mem_rvalid_i, .mem_rdata_i,
    .load_valid_o(ld_valid), .load_rd_o(ld_rd), .load_data_o(ld_data));

  // ---------------- write-back ----------------
  logic pau_wp, alu_wp, pau_wi, alu_wi;
  always_comb begin
    pau_wp = pau_valid && pau_tag[6];
    pau_wi = pau_valid && pau_tag[5];
    alu_wp = alu_valid_q && alu_rd_posit_q;
    alu_wi = alu_valid_q && alu_rd_int_q;
    p_wb_valid = pau_wp || alu_wp || ld_valid;
    if (pau_wp)      begin p_wb_rd = pau_tag[4:0]; p_wb_data = pau_result[N-1:0]; end
    else if (alu_wp) begin p_wb_rd = alu_rd_q;     p_wb_data = alu_result_q[N-1:0]; end
    else             begin p_wb_rd = ld_rd;        p_wb_data = ld_data; end
    int_wb_valid_o = pau_wi || alu_wi;
    int_wb_rd_o    = pau_wi ? pau_tag[4:0] : alu_rd_q;
    int_wb_data_o  = pau_wi ? pau_result : alu_result_q;
  end

  // the issue rules leave at most one writer per register file per cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0({pau_wp, alu_wp, ld_valid}));
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(pau_wi && alu_wi));
endmodule
