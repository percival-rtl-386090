// posit_scoreboard: issue checks for posit instructions.
//
// Keeps one pending-write bit per posit register. An instruction may issue
// when none of the following holds:
//   - RAW: a posit source register has a write pending that does not complete
//     in this cycle;
//   - WAW: its posit destination has a write pending that does not complete in
//     this cycle;
//   - structural: it needs the PAU and the PAU cannot accept it;
//   - write port: it is a one-cycle ALU or load operation whose write-back
//     would fall in the same cycle as a PAU result.
// A source whose pending write completes in the issue cycle is taken from the
// write-back bus (fwd1_o/fwd2_o) instead of the register file. Pending bits are
// set on issue and cleared on write-back. Writes to integer registers are
// tracked by the integer pipeline outside this block.
// Tracking posit registers and forwarding follow the paper; the exact hazard
// rules (in-order issue, single write port) are this design's choices.
module posit_scoreboard
  import posit_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic       valid_i,        // a decoded, legal instruction waits to issue
  input  sc_instr_t  sc_i,
  input  logic       pau_ready_i,
  input  logic       pau_wb_next_i,  // the PAU writes a register in the next cycle
  input  logic       wb_valid_i,     // posit register written in this cycle
  input  logic [4:0] wb_rd_i,
  output logic       issue_o,        // instruction issues in this cycle
  output logic       fwd1_o,
  output logic       fwd2_o,
  output logic       stall_raw_o,
  output logic       stall_waw_o,
  output logic       stall_struct_o,
  output logic       stall_wbport_o
);
  logic [NREGS-1:0] pending_q;
  logic rs1_chk, rs2_chk, rs1_wb, rs2_wb, rd_wb;

  always_comb begin
    rs1_chk = sc_i.rs1_used && sc_i.rs1_posit;
    rs2_chk = sc_i.rs2_used;
    rs1_wb  = wb_valid_i && (wb_rd_i == sc_i.rs1);
    rs2_wb  = wb_valid_i && (wb_rd_i == sc_i.rs2);
    rd_wb   = wb_valid_i && (wb_rd_i == sc_i.rd);
    stall_raw_o    = valid_i && ((rs1_chk && pending_q[sc_i.rs1] && !rs1_wb) ||
                                 (rs2_chk && pending_q[sc_i.rs2] && !rs2_wb));
    stall_waw_o    = valid_i && sc_i.rd_posit && pending_q[sc_i.rd] && !rd_wb;
    stall_struct_o = valid_i && (sc_i.fu == FU_PAU) && !pau_ready_i;
    stall_wbport_o = valid_i && (sc_i.fu inside {FU_ALU, FU_LOAD}) && pau_wb_next_i;
    issue_o = valid_i && !stall_raw_o && !stall_waw_o && !stall_struct_o && !stall_wbport_o;
    fwd1_o  = rs1_chk && pending_q[sc_i.rs1] && rs1_wb;
    fwd2_o  = rs2_chk && pending_q[sc_i.rs2] && rs2_wb;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pending_q <= '0;
    else begin
      if (wb_valid_i) pending_q[wb_rd_i] <= 1'b0;
      if (issue_o && sc_i.rd_posit) pending_q[sc_i.rd] <= 1'b1;
    end
  end
endmodule
