// tb_percival_xposit: end-to-end test of the posit datapath at its default
// parameters. The testbench plays the part of the rest of the core: it feeds
// Xposit instructions with their integer rs1 values, collects integer
// write-backs and models a synchronous-read data memory. Programs:
//   - GEMM C = A*B with the quire (QCLR, PLW, PLW, QMADD ..., QROUND, PSW),
//     checked against the rounded exact dot products;
//   - the same GEMM without the quire (PMUL + PADD per step), checked against
//     a reference that rounds after every operation;
//   - a 2x2/stride-2 max-pooling layer with PMAX;
//   - conversions, moves, comparisons, sign injection, division, square root,
//     QMSUB/QNEG and an illegal instruction.
// It counts RAW, WAW, structural and write-port stalls, forwarded operands,
// quire operations and illegal instructions, and fails if any never occurs.
module tb_percival_xposit;
  import posit_ref_pkg::*;
  localparam int GEMM_N = 6;

  logic        clk = 0, rst_n = 0;
  logic        ivalid, iready, illegal;
  logic [31:0] instr;
  logic [63:0] irs1;
  logic        iwb_valid;
  logic [4:0]  iwb_rd;
  logic [63:0] iwb_data;
  logic        mreq, mwe, mrvalid;
  logic [63:0] maddr;
  logic [31:0] mwdata, mrdata;

  percival_xposit dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(ivalid), .instr_i(instr), .int_rs1_i(irs1),
    .instr_ready_o(iready), .illegal_instr_o(illegal), .int_wb_valid_o(iwb_valid),
    .int_wb_rd_o(iwb_rd), .int_wb_data_o(iwb_data), .mem_req_o(mreq), .mem_we_o(mwe),
    .mem_addr_o(maddr), .mem_wdata_o(mwdata), .mem_rvalid_i(mrvalid), .mem_rdata_i(mrdata));

  always #5 clk = ~clk;

  // data memory: 16 KiB, word addressed, one-cycle read latency
  logic [31:0] mem [4096];
  always_ff @(posedge clk) begin
    mrvalid <= mreq && !mwe;
    if (mreq && mwe)  mem[maddr[13:2]] <= mwdata;
    if (mreq && !mwe) mrdata <= mem[maddr[13:2]];
  end

  // integer write-backs
  logic [63:0] xreg [32];
  int n_iwb = 0;
  always @(posedge clk) if (iwb_valid) begin xreg[iwb_rd] <= iwb_data; n_iwb++; end

  int checks = 0, failures = 0;
  int n_raw = 0, n_waw = 0, n_struct = 0, n_wbport = 0, n_fwd = 0, n_illegal = 0, n_quire = 0;
  int cycles = 0;

  // mechanism counters, sampled when inputs are stable
  always @(negedge clk) if (rst_n) begin
    cycles++;
    if (dut.stall_raw)    n_raw++;
    if (dut.stall_waw)    n_waw++;
    if (dut.stall_struct) n_struct++;
    if (dut.stall_wbport) n_wbport++;
    if (dut.issue && (dut.fwd1 || dut.fwd2)) n_fwd++;
    if (illegal) n_illegal++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- instruction encoding ----------------
  function automatic logic [31:0] op(logic [4:0] f5, logic [4:0] rs2, rs1, rd);
    return {f5, 2'b10, rs2, rs1, 3'b000, rd, 7'b0001011};
  endfunction
  function automatic logic [31:0] plw(logic [4:0] rd, logic [11:0] off);
    return {off, 5'd10, 3'b001, rd, 7'b0001011};
  endfunction
  function automatic logic [31:0] psw(logic [4:0] rs2, logic [11:0] off);
    return {off[11:5], rs2, 5'd10, 3'b011, off[4:0], 7'b0001011};
  endfunction

  task automatic issue(input logic [31:0] i, input logic [63:0] x = 0);
    instr = i; irs1 = x; ivalid = 1;
    #1;
    while (!iready) begin @(negedge clk); #1; end
    @(negedge clk);
    ivalid = 0;
    if (i[6:0] == 7'b0001011 && i[14:12] == 3'b000 && i[31:27] inside {[5'b00111:5'b01011]}) n_quire++;
  endtask

  task automatic drain();
    repeat (8) @(negedge clk);
  endtask

  task automatic expect32(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  localparam logic [4:0] F_PADD = 5'b00000, F_PSUB = 5'b00001, F_PMUL = 5'b00010, F_PDIV = 5'b00011,
    F_PMIN = 5'b00100, F_PMAX = 5'b00101, F_PSQRT = 5'b00110, F_QMADD = 5'b00111, F_QMSUB = 5'b01000,
    F_QCLR = 5'b01001, F_QNEG = 5'b01010, F_QROUND = 5'b01011, F_PCVTWS = 5'b01100, F_PCVTLS = 5'b01110,
    F_PCVTSW = 5'b10000, F_PCVTSLU = 5'b10011, F_PSGNJN = 5'b10101, F_PMVXW = 5'b10111,
    F_PMVWX = 5'b11000, F_PEQ = 5'b11001, F_PLT = 5'b11010, F_PLE = 5'b11011;

  localparam int A_BASE = 32'h1000, B_BASE = 32'h2000, C_BASE = 32'h3000, D_BASE = 32'h3800;

  initial begin
    real s, acc;
    logic [31:0] x, y, m;
    ivalid = 0; instr = 0; irs1 = 0;
    for (int i = 0; i < 4096; i++) mem[i] = 0;
    for (int i = 0; i < 32; i++) xreg[i] = 0;
    for (int i = 0; i < GEMM_N * GEMM_N; i++) begin
      mem[(A_BASE >> 2) + i] = rand_posit(1, 14);
      mem[(B_BASE >> 2) + i] = rand_posit(1, 14);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------- GEMM with the quire ----------
    for (int i = 0; i < GEMM_N; i++)
      for (int j = 0; j < GEMM_N; j++) begin
        issue(op(F_QCLR, 0, 0, 0));
        for (int k = 0; k < GEMM_N; k++) begin
          issue(plw(5'd1, 12'd0), 64'(A_BASE + 4 * (i * GEMM_N + k)));
          issue(plw(5'd2, 12'd0), 64'(B_BASE + 4 * (k * GEMM_N + j)));
          issue(op(F_QMADD, 5'd2, 5'd1, 5'd0));
        end
        issue(op(F_QROUND, 0, 0, 5'd3));
        issue(psw(5'd3, 12'd0), 64'(C_BASE + 4 * (i * GEMM_N + j)));
      end
    drain();
    for (int i = 0; i < GEMM_N; i++)
      for (int j = 0; j < GEMM_N; j++) begin
        s = 0.0;
        for (int k = 0; k < GEMM_N; k++)
          s += p2r(mem[(A_BASE >> 2) + i * GEMM_N + k]) * p2r(mem[(B_BASE >> 2) + k * GEMM_N + j]);
        expect32("gemm quire", mem[(C_BASE >> 2) + i * GEMM_N + j], r2p(s));
      end

    // ---------- GEMM without the quire: p5 += p1*p2 with rounding ----------
    for (int i = 0; i < GEMM_N; i++)
      for (int j = 0; j < GEMM_N; j++) begin
        issue(op(F_PMVWX, 0, 5'd0, 5'd5), 64'd0);              // p5 = 0
        for (int k = 0; k < GEMM_N; k++) begin
          issue(plw(5'd1, 12'd0), 64'(A_BASE + 4 * (i * GEMM_N + k)));
          issue(plw(5'd2, 12'd0), 64'(B_BASE + 4 * (k * GEMM_N + j)));
          issue(op(F_PMUL, 5'd2, 5'd1, 5'd4));
          issue(op(F_PADD, 5'd4, 5'd5, 5'd5));
        end
        issue(psw(5'd5, 12'd0), 64'(D_BASE + 4 * (i * GEMM_N + j)));
      end
    drain();
    for (int i = 0; i < GEMM_N; i++)
      for (int j = 0; j < GEMM_N; j++) begin
        acc = 0.0;
        for (int k = 0; k < GEMM_N; k++)
          acc = p2r(r2p(acc + p2r(r2p(p2r(mem[(A_BASE >> 2) + i * GEMM_N + k]) *
                                      p2r(mem[(B_BASE >> 2) + k * GEMM_N + j])))));
        expect32("gemm no quire", mem[(D_BASE >> 2) + i * GEMM_N + j], r2p(acc));
      end

    // ---------- max pooling 2x2, stride 2, on a 4x4 input at A ----------
    for (int oi = 0; oi < 2; oi++)
      for (int oj = 0; oj < 2; oj++) begin
        issue(plw(5'd6, 12'd0), 64'(A_BASE + 4 * ((2 * oi) * 4 + 2 * oj)));
        issue(plw(5'd7, 12'd4), 64'(A_BASE + 4 * ((2 * oi) * 4 + 2 * oj)));
        issue(plw(5'd8, 12'd16), 64'(A_BASE + 4 * ((2 * oi) * 4 + 2 * oj)));
        issue(plw(5'd9, 12'd20), 64'(A_BASE + 4 * ((2 * oi) * 4 + 2 * oj)));
        issue(op(F_PMAX, 5'd7, 5'd6, 5'd6));
        issue(op(F_PMAX, 5'd9, 5'd8, 5'd8));
        issue(op(F_PMAX, 5'd8, 5'd6, 5'd6));
        issue(psw(5'd6, 12'hffc), 64'(C_BASE + 4 + 4 * (oi * 2 + oj)));   // offset -4
      end
    drain();
    for (int oi = 0; oi < 2; oi++)
      for (int oj = 0; oj < 2; oj++) begin
        real mx;
        logic [31:0] mp;
        mp = mem[(A_BASE >> 2) + (2 * oi) * 4 + 2 * oj]; mx = p2r(mp);
        for (int di = 0; di < 2; di++)
          for (int dj = 0; dj < 2; dj++)
            if (p2r(mem[(A_BASE >> 2) + (2 * oi + di) * 4 + 2 * oj + dj]) > mx) begin
              mp = mem[(A_BASE >> 2) + (2 * oi + di) * 4 + 2 * oj + dj]; mx = p2r(mp);
            end
        expect32("maxpool", mem[(C_BASE >> 2) + oi * 2 + oj], mp);
      end

    // ---------- conversions, moves, comparisons, div, sqrt ----------
    issue(op(F_PCVTSW, 0, 5'd1, 5'd10), -64'sd7);          // p10 = -7
    issue(op(F_PMVXW, 0, 5'd10, 5'd11));                   // x11 = bits of p10 (RAW on PAU)
    issue(op(F_PCVTLS, 0, 5'd10, 5'd12));                  // x12 = -7
    issue(op(F_PCVTSLU, 0, 5'd1, 5'd13), 64'd1000);        // p13 = 1000
    issue(op(F_PADD, 5'd10, 5'd13, 5'd14));                // p14 = 993
    issue(op(F_PMIN, 5'd13, 5'd10, 5'd15));                // p15 = -7  (write-port stall)
    issue(op(F_PCVTWS, 0, 5'd14, 5'd16));                  // x16 = 993
    issue(op(F_PLT, 5'd13, 5'd10, 5'd17));                 // x17 = 1
    issue(op(F_PLE, 5'd10, 5'd13, 5'd18));                 // x18 = 0
    issue(op(F_PEQ, 5'd15, 5'd10, 5'd19));                 // x19 = 1
    issue(op(F_PSGNJN, 5'd10, 5'd10, 5'd20));              // p20 = 7
    issue(op(F_PDIV, 5'd20, 5'd13, 5'd21));                // p21 ~ 1000/7
    issue(op(F_PMVWX, 0, 5'd1, 5'd21), 64'h4000_0000);     // WAW on p21 -> 1.0
    issue(op(F_PSQRT, 0, 5'd13, 5'd22));                   // p22 ~ sqrt(1000)
    issue(op(F_PMVXW, 0, 5'd21, 5'd23));
    issue(op(F_PMVXW, 0, 5'd22, 5'd24));
    issue(op(F_PMVXW, 0, 5'd20, 5'd25));
    issue(32'h0000_0013);                                  // not a posit instruction
    issue(op(5'b11111, 0, 0, 0));                          // unused funct5
    // quire: QMSUB and QNEG:  -(0 - 1000*(-7)) = -7000
    issue(op(F_QCLR, 0, 0, 0));
    issue(op(F_QMSUB, 5'd10, 5'd13, 0));
    issue(op(F_QNEG, 0, 0, 0));
    issue(op(F_QROUND, 0, 0, 5'd26));
    issue(op(F_PMVXW, 0, 5'd26, 5'd26));
    drain();
    expect32("pcvt.s.w + pmv.x.w", xreg[11][31:0], r2p(-7.0));
    checks++; if (xreg[11][63:32] !== 32'hffff_ffff) failures++;
    checks++; if (xreg[12] !== -64'sd7) begin failures++; $display("FAIL pcvt.l.s %h", xreg[12]); end
    checks++; if (xreg[16] !== 64'd993) begin failures++; $display("FAIL pcvt.w.s %h", xreg[16]); end
    checks++; if (xreg[17] !== 64'd1 || xreg[18] !== 64'd0 || xreg[19] !== 64'd1) begin
      failures++; $display("FAIL compare %0d %0d %0d", xreg[17], xreg[18], xreg[19]); end
    expect32("pmv.w.x after WAW", xreg[23][31:0], 32'h4000_0000);
    expect32("psqrt", xreg[24][31:0], r2p(mitchell_sqrt(1000.0)));
    expect32("psgnjn", xreg[25][31:0], r2p(7.0));
    expect32("qmsub/qneg", xreg[26][31:0], r2p(-7000.0));

    // ---------- mechanism coverage ----------
    $display("cycles=%0d raw=%0d waw=%0d struct=%0d wbport=%0d fwd=%0d illegal=%0d quire_ops=%0d int_wb=%0d",
             cycles, n_raw, n_waw, n_struct, n_wbport, n_fwd, n_illegal, n_quire, n_iwb);
    checks++; if (n_raw == 0)     begin failures++; $display("FAIL no RAW stall"); end
    checks++; if (n_waw == 0)     begin failures++; $display("FAIL no WAW stall"); end
    checks++; if (n_struct == 0)  begin failures++; $display("FAIL no structural stall"); end
    checks++; if (n_wbport == 0)  begin failures++; $display("FAIL no write-port stall"); end
    checks++; if (n_fwd == 0)     begin failures++; $display("FAIL no forwarding"); end
    checks++; if (n_illegal != 2) begin failures++; $display("FAIL illegal count"); end
    checks++; if (n_quire == 0)   begin failures++; $display("FAIL no quire operation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
