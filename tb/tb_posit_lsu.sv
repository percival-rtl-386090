// tb_posit_lsu: self-checking test of the PLW/PSW path with a synchronous
// memory model: addresses are base + offset (negative offsets included),
// stores write rs2 data, and each load writes back its destination and the
// memory word exactly one cycle after the request.
module tb_posit_lsu;
  logic clk = 0, rst_n = 0;
  logic valid, store;
  logic [63:0] base, imm, maddr;
  logic [31:0] sdata, mwdata, mrdata, ldata;
  logic [4:0]  rd, lrd;
  logic mreq, mwe, mrvalid, lvalid;
  logic [31:0] mem [256];
  int checks = 0, failures = 0;

  posit_lsu #(.N(32), .XLEN(64)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .store_i(store),
    .base_i(base), .imm_i(imm), .sdata_i(sdata), .rd_i(rd), .mem_req_o(mreq), .mem_we_o(mwe),
    .mem_addr_o(maddr), .mem_wdata_o(mwdata), .mem_rvalid_i(mrvalid), .mem_rdata_i(mrdata),
    .load_valid_o(lvalid), .load_rd_o(lrd), .load_data_o(ldata));

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    mrvalid <= mreq && !mwe;
    if (mreq && mwe) mem[maddr[9:2]] <= mwdata;
    if (mreq && !mwe) mrdata <= mem[maddr[9:2]];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] ea;
    logic [31:0] shadow [256];
    logic        exp_ld;
    logic [4:0]  exp_rd;
    logic [31:0] exp_data;
    for (int i = 0; i < 256; i++) begin mem[i] = 32'(i * 3); shadow[i] = 32'(i * 3); end
    valid = 0; store = 0; base = 0; imm = 0; sdata = 0; rd = 0; mrvalid = 0; mrdata = 0;
    exp_ld = 0; exp_rd = 0; exp_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // check the write-back of the previous request
      checks++;
      if (lvalid !== exp_ld || (exp_ld && (lrd !== exp_rd || ldata !== exp_data))) begin
        failures++; if (failures < 10) $display("FAIL load wb i=%0d", i);
      end
      valid = $urandom_range(0, 3) != 0;
      store = $urandom_range(0, 1);
      ea    = 64'(($urandom_range(0, 255)) * 4);
      imm   = 64'($signed(12'($urandom_range(0, 60) * 4 - 120)));
      base  = ea - imm;
      sdata = $urandom();
      rd    = 5'($urandom);
      #1;
      checks++;
      if (mreq !== valid || mwe !== (valid && store) || (valid && maddr !== ea)) begin
        failures++; if (failures < 10) $display("FAIL request i=%0d", i);
      end
      exp_ld = valid && !store;
      exp_rd = rd;
      exp_data = shadow[ea[9:2]];
      if (valid && store) shadow[ea[9:2]] = sdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
