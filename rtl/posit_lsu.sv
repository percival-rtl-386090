// posit_lsu: address generation and data path for PLW and PSW.
//
// The effective address is base (integer rs1) plus the sign-extended 12-bit
// offset, as for FLW/FSW. The memory request is issued combinationally in the
// issue cycle: PSW drives the posit from rs2 as write data, PLW remembers its
// destination register. The memory returns load data one cycle after the
// request (synchronous-read memory), and the load is written back in that
// cycle. Base+offset addressing follows the paper; the memory interface and its
// fixed one-cycle read latency are this design's choices.
module posit_lsu #(
  parameter int unsigned N    = 32,
  parameter int unsigned XLEN = 64
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            valid_i,
  input  logic            store_i,
  input  logic [XLEN-1:0] base_i,
  input  logic [XLEN-1:0] imm_i,
  input  logic [N-1:0]    sdata_i,
  input  logic [4:0]      rd_i,
  output logic            mem_req_o,
  output logic            mem_we_o,
  output logic [XLEN-1:0] mem_addr_o,
  output logic [N-1:0]    mem_wdata_o,
  input  logic            mem_rvalid_i,
  input  logic [N-1:0]    mem_rdata_i,
  output logic            load_valid_o,
  output logic [4:0]      load_rd_o,
  output logic [N-1:0]    load_data_o
);
  logic       pend_q;
  logic [4:0] rd_q;

  assign mem_req_o   = valid_i;
  assign mem_we_o    = valid_i && store_i;
  assign mem_addr_o  = base_i + imm_i;
  assign mem_wdata_o = sdata_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= 1'b0;
      rd_q   <= '0;
    end else begin
      pend_q <= valid_i && !store_i;
      if (valid_i && !store_i) rd_q <= rd_i;
    end
  end

  assign load_valid_o = pend_q;
  assign load_rd_o    = rd_q;
  assign load_data_o  = mem_rdata_i;

  // the memory answers every load in the following cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> mem_rvalid_i);
endmodule
