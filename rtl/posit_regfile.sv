// posit_regfile: the posit register file p0-p31.
//
// NREGS registers of N bits, two combinational read ports and one write port
// written on the rising clock edge. Unlike x0, p0 is an ordinary register, as
// f0 is in the F extension. All registers reset to zero (posit 0). Register
// count and width follow the paper; port count and reset are this design's.
module posit_regfile #(
  parameter int unsigned N     = 32,
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [$clog2(NREGS)-1:0] raddr1_i,
  output logic [N-1:0]             rdata1_o,
  input  logic [$clog2(NREGS)-1:0] raddr2_i,
  output logic [N-1:0]             rdata2_o,
  input  logic                     we_i,
  input  logic [$clog2(NREGS)-1:0] waddr_i,
  input  logic [N-1:0]             wdata_i
);
  logic [N-1:0] regs_q [NREGS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < int'(NREGS); i++) regs_q[i] <= '0;
    end else if (we_i) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end

  assign rdata1_o = regs_q[raddr1_i];
  assign rdata2_o = regs_q[raddr2_i];
endmodule
