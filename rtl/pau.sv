// pau: Posit Arithmetic Unit with the quire register.
//
// Three groups of units sit between an operand demultiplexer and a result
// multiplexer: COMP (ADD for PADD/PSUB, MUL, approximate DIV, approximate
// SQRT), CONV (posit to int/uint/long/ulong and back) and FUSED (MAC into the
// 512-bit quire and Q2P rounding of the quire). The quire is a register inside
// the PAU: QCLR clears it, QNEG negates it, QMADD/QMSUB accumulate into it and
// QROUND reads it; no instruction names it.
//
// The unit is not pipelined and holds one operation at a time. On a valid_i &
// ready_o handshake the operator, operands and a tag are registered; the
// selected unit then evaluates combinationally from those registers over a
// multi-cycle path. valid_o (with result_o and tag_o) rises 1 + L cycles after
// the handshake cycle, with L = 2 for PADD/PSUB/QMADD/QMSUB, L = 1 for
// PMUL/PDIV/PSQRT/QROUND and L = 0 for every other operation. A new operation
// may be accepted in the cycle a result is delivered. done_next_o warns one
// cycle ahead that valid_o will rise, so the issue logic can keep the single
// register-file write port free. The quire state changes when a quire
// operation completes.
//
// Groups, units and latencies follow the paper; the handshake, the tag, the
// operand isolation of idle groups and the multi-cycle timing scheme are this
// design's choices.
module pau
  import posit_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned XLEN  = 64,
  parameter int unsigned TAG_W = 7
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             valid_i,
  output logic             ready_o,
  input  pop_e             op_i,
  input  logic [XLEN-1:0]  a_i,       // posit (low N bits) or integer operand
  input  logic [N-1:0]     b_i,       // posit operand
  input  logic [TAG_W-1:0] tag_i,
  output logic             valid_o,
  output logic [XLEN-1:0]  result_o,
  output logic [TAG_W-1:0] tag_o,
  output logic             busy_o,
  output logic             done_next_o
);
  localparam int unsigned QW = 16 * N;

  pop_e             op_q;
  logic [XLEN-1:0]  a_q;
  logic [N-1:0]     b_q;
  logic [1:0]       cnt_q;
  logic             busy_q;
  logic [QW-1:0]    quire_q;

  // ---------------- operand steering ----------------
  logic is_comp, is_p2i, is_i2p, is_mac;
  logic [N-1:0]    comp_a, comp_b, conv_p, mac_a, mac_b;
  logic [XLEN-1:0] conv_x;

  always_comb begin
    is_comp = op_q inside {OP_PADD, OP_PSUB, OP_PMUL, OP_PDIV, OP_PSQRT};
    is_p2i  = op_q inside {OP_P2I, OP_P2U, OP_P2L, OP_P2LU};
    is_i2p  = op_q inside {OP_I2P, OP_U2P, OP_L2P, OP_LU2P};
    is_mac  = op_q inside {OP_QMADD, OP_QMSUB};
    comp_a  = is_comp ? a_q[N-1:0] : '0;
    comp_b  = is_comp ? b_q : '0;
    conv_p  = is_p2i  ? a_q[N-1:0] : '0;
    conv_x  = is_i2p  ? a_q : '0;
    mac_a   = is_mac  ? a_q[N-1:0] : '0;
    mac_b   = is_mac  ? b_q : '0;
  end

  // ---------------- COMP ----------------
  logic [N-1:0] add_r, mul_r, div_r, sqrt_r;
  posit_add   #(.N(N)) u_add  (.a_i(comp_a), .b_i(comp_b), .sub_i(op_q == OP_PSUB), .r_o(add_r));
  posit_mul   #(.N(N)) u_mul  (.a_i(comp_a), .b_i(comp_b), .r_o(mul_r));
  posit_adiv  #(.N(N)) u_div  (.a_i(comp_a), .b_i(comp_b), .r_o(div_r));
  posit_asqrt #(.N(N)) u_sqrt (.a_i(comp_a), .r_o(sqrt_r));

  // ---------------- CONV ----------------
  logic [XLEN-1:0] p2i_r, p2u_r, p2l_r, p2lu_r;
  logic [N-1:0]    i2p_r, u2p_r, l2p_r, lu2p_r;
  posit_to_int #(.N(N), .OUT_W(32), .SIGNED_OUT(1'b1), .XLEN(XLEN)) u_p2i  (.p_i(conv_p), .r_o(p2i_r));
  posit_to_int #(.N(N), .OUT_W(32), .SIGNED_OUT(1'b0), .XLEN(XLEN)) u_p2u  (.p_i(conv_p), .r_o(p2u_r));
  posit_to_int #(.N(N), .OUT_W(64), .SIGNED_OUT(1'b1), .XLEN(XLEN)) u_p2l  (.p_i(conv_p), .r_o(p2l_r));
  posit_to_int #(.N(N), .OUT_W(64), .SIGNED_OUT(1'b0), .XLEN(XLEN)) u_p2lu (.p_i(conv_p), .r_o(p2lu_r));
  int_to_posit #(.N(N), .IN_W(32), .SIGNED_IN(1'b1), .XLEN(XLEN)) u_i2p  (.x_i(conv_x), .p_o(i2p_r));
  int_to_posit #(.N(N), .IN_W(32), .SIGNED_IN(1'b0), .XLEN(XLEN)) u_u2p  (.x_i(conv_x), .p_o(u2p_r));
  int_to_posit #(.N(N), .IN_W(64), .SIGNED_IN(1'b1), .XLEN(XLEN)) u_l2p  (.x_i(conv_x), .p_o(l2p_r));
  int_to_posit #(.N(N), .IN_W(64), .SIGNED_IN(1'b0), .XLEN(XLEN)) u_lu2p (.x_i(conv_x), .p_o(lu2p_r));

  // ---------------- FUSED ----------------
  logic [QW-1:0] mac_q;
  logic [N-1:0]  q2p_r;
  posit_mac      #(.N(N)) u_mac (.a_i(mac_a), .b_i(mac_b), .sub_i(op_q == OP_QMSUB), .quire_i(quire_q), .quire_o(mac_q));
  quire_to_posit #(.N(N)) u_q2p (.quire_i(quire_q), .p_o(q2p_r));

  // ---------------- control ----------------
  assign valid_o     = busy_q && (cnt_q == 2'd0);
  assign ready_o     = !busy_q || valid_o;
  assign busy_o      = busy_q;
  assign done_next_o = busy_q && (cnt_q == 2'd1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      op_q   <= OP_NONE;
      a_q    <= '0;
      b_q    <= '0;
      tag_o  <= '0;
    end else begin
      if (valid_o) busy_q <= 1'b0;
      else if (busy_q) cnt_q <= cnt_q - 2'd1;
      if (valid_i && ready_o) begin
        busy_q <= 1'b1;
        cnt_q  <= 2'(pau_latency(op_i));
        op_q   <= op_i;
        a_q    <= a_i;
        b_q    <= b_i;
        tag_o  <= tag_i;
      end
    end
  end

  // quire register
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) quire_q <= '0;
    else if (valid_o) begin
      case (op_q)
        OP_QMADD, OP_QMSUB: quire_q <= mac_q;
        OP_QCLR:            quire_q <= '0;
        OP_QNEG:            quire_q <= ~quire_q + 1'b1;   // NaR maps to itself
        default: ;
      endcase
    end
  end

  // ---------------- result multiplexer ----------------
  always_comb begin
    case (op_q)
      OP_PADD, OP_PSUB: result_o = XLEN'(add_r);
      OP_PMUL:          result_o = XLEN'(mul_r);
      OP_PDIV:          result_o = XLEN'(div_r);
      OP_PSQRT:         result_o = XLEN'(sqrt_r);
      OP_QROUND:        result_o = XLEN'(q2p_r);
      OP_P2I:           result_o = p2i_r;
      OP_P2U:           result_o = p2u_r;
      OP_P2L:           result_o = p2l_r;
      OP_P2LU:          result_o = p2lu_r;
      OP_I2P:           result_o = XLEN'(i2p_r);
      OP_U2P:           result_o = XLEN'(u2p_r);
      OP_L2P:           result_o = XLEN'(l2p_r);
      OP_LU2P:          result_o = XLEN'(lu2p_r);
      default:          result_o = '0;
    endcase
  end

  // a result is only delivered for an operation that was accepted
  assert property (@(posedge clk_i) disable iff (!rst_ni) valid_o |-> busy_q);
endmodule
