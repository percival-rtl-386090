// tb_posit_regfile: self-checking test of the posit register file: reset to
// zero, random writes and reads on both ports against a shadow copy, p0 is
// writable, and reads see a write only after the clock edge.
module tb_posit_regfile;
  logic clk = 0, rst_n = 0;
  logic [4:0]  ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  logic        we;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;

  posit_regfile #(.N(32), .NREGS(32)) dut (.clk_i(clk), .rst_ni(rst_n), .raddr1_i(ra1), .rdata1_o(rd1),
    .raddr2_i(ra2), .rdata2_o(rd2), .we_i(we), .waddr_i(wa), .wdata_i(wd));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      ra1 = 5'(i); #1; checks++; if (rd1 != 0) failures++;
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom();
      ra1 = wa; ra2 = 5'($urandom);
      #1;
      checks++; if (rd1 !== shadow[ra1] || rd2 !== shadow[ra2]) begin
        failures++; if (failures < 10) $display("FAIL read before edge");
      end
      @(posedge clk);
      if (we) shadow[wa] = wd;
      #1;
      checks++; if (rd1 !== shadow[ra1] || rd2 !== shadow[ra2]) begin
        failures++; if (failures < 10) $display("FAIL read after edge a=%0d", ra1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
