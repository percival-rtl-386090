// tb_posit_scoreboard: self-checking test of the issue checks. Random
// instructions and write-backs are applied; a shadow list of pending posit
// destinations gives the expected RAW/WAW/structural/write-port stalls, the
// forwarding selects and the issue decision. Directed sequences first show
// each case on its own.
module tb_posit_scoreboard;
  import posit_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, pau_ready, pau_wb_next, wb_valid;
  logic [4:0] wb_rd;
  sc_instr_t sc;
  logic issue, fwd1, fwd2, s_raw, s_waw, s_str, s_wbp;
  bit   pend [32];
  int checks = 0, failures = 0;
  int n_raw = 0, n_waw = 0, n_str = 0, n_wbp = 0, n_fwd = 0;

  posit_scoreboard #(.NREGS(32)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .sc_i(sc),
    .pau_ready_i(pau_ready), .pau_wb_next_i(pau_wb_next), .wb_valid_i(wb_valid), .wb_rd_i(wb_rd),
    .issue_o(issue), .fwd1_o(fwd1), .fwd2_o(fwd2), .stall_raw_o(s_raw), .stall_waw_o(s_waw),
    .stall_struct_o(s_str), .stall_wbport_o(s_wbp));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    bit e_raw, e_waw, e_str, e_wbp, e_iss, e_f1, e_f2, c1, c2, w1, w2, wd;
    #1;
    c1 = sc.rs1_used && sc.rs1_posit;
    c2 = sc.rs2_used;
    w1 = wb_valid && wb_rd == sc.rs1;
    w2 = wb_valid && wb_rd == sc.rs2;
    wd = wb_valid && wb_rd == sc.rd;
    e_raw = valid && ((c1 && pend[sc.rs1] && !w1) || (c2 && pend[sc.rs2] && !w2));
    e_waw = valid && sc.rd_posit && pend[sc.rd] && !wd;
    e_str = valid && sc.fu == FU_PAU && !pau_ready;
    e_wbp = valid && (sc.fu == FU_ALU || sc.fu == FU_LOAD) && pau_wb_next;
    e_iss = valid && !(e_raw || e_waw || e_str || e_wbp);
    e_f1  = c1 && pend[sc.rs1] && w1;
    e_f2  = c2 && pend[sc.rs2] && w2;
    checks++;
    if ({issue, fwd1, fwd2, s_raw, s_waw, s_str, s_wbp} !== {e_iss, e_f1, e_f2, e_raw, e_waw, e_str, e_wbp}) begin
      failures++;
      if (failures < 10) $display("FAIL sb got=%b exp=%b", {issue, fwd1, fwd2, s_raw, s_waw, s_str, s_wbp},
                                  {e_iss, e_f1, e_f2, e_raw, e_waw, e_str, e_wbp});
    end
    n_raw += int'(e_raw); n_waw += int'(e_waw); n_str += int'(e_str); n_wbp += int'(e_wbp);
    n_fwd += int'(e_iss && (e_f1 || e_f2));
    @(posedge clk);
    if (wb_valid) pend[wb_rd] = 0;
    if (e_iss && sc.rd_posit) pend[sc.rd] = 1;
    @(negedge clk);
  endtask

  function automatic sc_instr_t mk(fu_e fu, logic [4:0] rs1, rs2, rd, bit r1p, bit r2u, bit rdp);
    sc_instr_t s;
    s = '0;
    s.fu = fu; s.op = OP_NONE; s.rs1 = rs1; s.rs2 = rs2; s.rd = rd;
    s.rs1_used = 1; s.rs1_posit = r1p; s.rs2_used = r2u; s.rd_posit = rdp;
    return s;
  endfunction

  initial begin
    for (int i = 0; i < 32; i++) pend[i] = 0;
    valid = 0; pau_ready = 1; pau_wb_next = 0; wb_valid = 0; wb_rd = 0; sc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // p3 <- PAU; then a reader of p3 stalls (RAW) until p3 is written back
    valid = 1; sc = mk(FU_PAU, 1, 2, 3, 1, 1, 1); step();
    sc = mk(FU_ALU, 3, 4, 5, 1, 1, 1); pau_ready = 0;
    #1; checks++; if (!s_raw || issue) failures++;
    step();
    sc = mk(FU_PAU, 6, 7, 3, 1, 1, 1);                   // WAW and structural
    #1; checks++; if (!s_waw || !s_str) failures++;
    step();
    sc = mk(FU_ALU, 8, 9, 10, 1, 1, 1); pau_wb_next = 1; // write port
    #1; checks++; if (!s_wbp) failures++;
    step();
    sc = mk(FU_ALU, 3, 4, 5, 1, 1, 1); pau_wb_next = 0; pau_ready = 1;
    wb_valid = 1; wb_rd = 3;                             // forwarded
    #1; checks++; if (!fwd1 || !issue) failures++;
    step();
    wb_valid = 0;
    for (int i = 0; i < 20000; i++) begin
      valid       = $urandom_range(0, 3) != 0;
      pau_ready   = $urandom_range(0, 3) != 0;
      pau_wb_next = $urandom_range(0, 4) == 0;
      sc = mk(fu_e'($urandom_range(1, 4)), 5'($urandom_range(0, 7)), 5'($urandom_range(0, 7)),
              5'($urandom_range(0, 7)), 1'($urandom), 1'($urandom), 1'($urandom));
      wb_rd = 5'($urandom_range(0, 7));
      wb_valid = pend[wb_rd] && ($urandom_range(0, 1) == 1);
      step();
    end
    checks++;
    if (n_raw == 0 || n_waw == 0 || n_str == 0 || n_wbp == 0 || n_fwd == 0) failures++;
    $display("raw=%0d waw=%0d struct=%0d wbport=%0d fwd=%0d", n_raw, n_waw, n_str, n_wbp, n_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
