// tb_percival_workloads: runs the two kernels evaluated for this core on the
// full datapath at its default parameters, as instruction streams a compiler
// would emit, and checks every output element.
//   - GEMM C = A*B for n = 16 and 32, once accumulating in the quire
//     (QCLR; PLW, PLW, QMADD per term; QROUND; PSW) and once with PMUL + PADD,
//     which rounds after every step. Inputs are k/16 with k in [-16, 16], the
//     [-1, 1] input range, chosen so that the reference sums are exact in a
//     double: the quire result must equal the once-rounded exact dot product.
//   - Max-pooling: the complete LeNet-5 layer (28x28x6 input, 2x2 kernel,
//     stride 2, 14x14x6 output) and a 3x3/stride-2 layer of the AlexNet and
//     ResNet-50 shape at a reduced 15x15x2 input (7x7x2 output), by PLW and PMAX.
// Feature maps are stored channel by channel, rows in order. The cycle count
// of each kernel is printed. The kernels, the layer shapes and the GEMM sizes
// are the ones the core was evaluated with; the input values, the memory
// layout and the reduced 3x3 layer are this testbench's own choices.
module tb_percival_workloads;
  import posit_ref_pkg::*;

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

  // data memory: 64 KiB, one-cycle read latency
  localparam int MWORDS = 16384;
  logic [31:0] mem [MWORDS];
  always_ff @(posedge clk) begin
    mrvalid <= mreq && !mwe;
    if (mreq && mwe)  mem[maddr[15:2]] <= mwdata;
    if (mreq && !mwe) mrdata <= mem[maddr[15:2]];
  end

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] op(logic [4:0] f5, logic [4:0] rs2, rs1, rd);
    return {f5, 2'b10, rs2, rs1, 3'b000, rd, 7'b0001011};
  endfunction
  function automatic logic [31:0] plw(logic [4:0] rd);
    return {12'd0, 5'd10, 3'b001, rd, 7'b0001011};
  endfunction
  function automatic logic [31:0] psw(logic [4:0] rs2);
    return {7'd0, rs2, 5'd10, 3'b011, 5'd0, 7'b0001011};
  endfunction

  task automatic issue(input logic [31:0] i, input logic [63:0] x = 0);
    instr = i; irs1 = x; ivalid = 1;
    #1;
    while (!iready) begin @(negedge clk); #1; end
    @(negedge clk);
    ivalid = 0;
  endtask

  task automatic expect32(input string what, input int idx, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s [%0d] got=%h exp=%h", what, idx, got, exp);
    end
  endtask

  localparam logic [4:0] F_PADD = 5'b00000, F_PMUL = 5'b00010, F_PMAX = 5'b00101,
    F_QMADD = 5'b00111, F_QCLR = 5'b01001, F_QROUND = 5'b01011, F_PMVWX = 5'b11000;

  // word addresses of the operands
  localparam int A_W = 0, B_W = 1024, C_W = 2048, D_W = 3072, X_W = 4096, Y_W = 12288;

  task automatic gemm(input int n, input bit quire);
    longint t0;
    real acc;
    for (int i = 0; i < n * n; i++) begin
      mem[A_W + i] = r2p(real'(int'($urandom_range(32)) - 16) / 16.0);
      mem[B_W + i] = r2p(real'(int'($urandom_range(32)) - 16) / 16.0);
    end
    t0 = cycles;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (quire) issue(op(F_QCLR, 0, 0, 0));
        else       issue(op(F_PMVWX, 0, 0, 5'd5), 64'd0);
        for (int k = 0; k < n; k++) begin
          issue(plw(5'd1), 64'(4 * (A_W + i * n + k)));
          issue(plw(5'd2), 64'(4 * (B_W + k * n + j)));
          if (quire) issue(op(F_QMADD, 5'd2, 5'd1, 5'd0));
          else begin
            issue(op(F_PMUL, 5'd2, 5'd1, 5'd4));
            issue(op(F_PADD, 5'd4, 5'd5, 5'd5));
          end
        end
        if (quire) begin
          issue(op(F_QROUND, 0, 0, 5'd5));
        end
        issue(psw(5'd5), 64'(4 * ((quire ? C_W : D_W) + i * n + j)));
      end
    repeat (8) @(negedge clk);
    $display("GEMM %0dx%0d %s: %0d cycles", n, n, quire ? "quire" : "pmul+padd", cycles - t0);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        acc = 0.0;
        for (int k = 0; k < n; k++)
          if (quire) acc += p2r(mem[A_W + i * n + k]) * p2r(mem[B_W + k * n + j]);
          else acc = p2r(r2p(acc + p2r(r2p(p2r(mem[A_W + i * n + k]) * p2r(mem[B_W + k * n + j])))));
        expect32(quire ? "gemm quire" : "gemm", i * n + j, mem[(quire ? C_W : D_W) + i * n + j], r2p(acc));
      end
  endtask

  task automatic maxpool(input string name, input int h, input int c, input int k, input int s);
    int o;
    longint t0;
    logic [31:0] mp;
    o = (h - k) / s + 1;
    for (int i = 0; i < h * h * c; i++) mem[X_W + i] = rand_posit(3, 0);
    t0 = cycles;
    for (int ch = 0; ch < c; ch++)
      for (int oi = 0; oi < o; oi++)
        for (int oj = 0; oj < o; oj++) begin
          for (int di = 0; di < k; di++)
            for (int dj = 0; dj < k; dj++) begin
              issue(plw((di == 0 && dj == 0) ? 5'd6 : 5'd7),
                    64'(4 * (X_W + (ch * h + oi * s + di) * h + oj * s + dj)));
              if (di != 0 || dj != 0) issue(op(F_PMAX, 5'd7, 5'd6, 5'd6));
            end
          issue(psw(5'd6), 64'(4 * (Y_W + (ch * o + oi) * o + oj)));
        end
    repeat (8) @(negedge clk);
    $display("max-pool %s %0dx%0dx%0d k=%0d s=%0d: %0d cycles", name, h, h, c, k, s, cycles - t0);
    for (int ch = 0; ch < c; ch++)
      for (int oi = 0; oi < o; oi++)
        for (int oj = 0; oj < o; oj++) begin
          mp = mem[X_W + (ch * h + oi * s) * h + oj * s];
          for (int di = 0; di < k; di++)
            for (int dj = 0; dj < k; dj++)
              if (p2r(mem[X_W + (ch * h + oi * s + di) * h + oj * s + dj]) > p2r(mp))
                mp = mem[X_W + (ch * h + oi * s + di) * h + oj * s + dj];
          expect32(name, (ch * o + oi) * o + oj, mem[Y_W + (ch * o + oi) * o + oj], mp);
        end
  endtask

  initial begin
    ivalid = 0; instr = 0; irs1 = 0;
    for (int i = 0; i < MWORDS; i++) mem[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    gemm(16, 1'b1);
    gemm(16, 1'b0);
    gemm(32, 1'b1);
    gemm(32, 1'b0);
    maxpool("LeNet-5", 28, 6, 2, 2);
    maxpool("3x3 stride 2", 15, 2, 3, 2);
    checks++;
    if (illegal) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
