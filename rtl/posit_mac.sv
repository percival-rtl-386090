// posit_mac: posit multiply-accumulate into the quire (MAC unit, QMADD/QMSUB).
//
// The product of two Posit<N,2> operands is formed exactly: the significands
// are multiplied and the (2N-4)-bit product is placed in a 16N-bit two's
// complement fixed-point word with 8N-16 fraction bits, shifted by the sum of
// the scales. Since the smallest posit is 2^-(4N-8), every product lands on or
// above the quire LSB and no bit is lost. The term is negated for negative
// products (and once more for QMSUB) and added to the quire. NaR in an
// operand or in the quire makes the quire NaR (100...0). Combinational; the
// PAU holds the operands for the 2 extra cycles of the MAC latency and writes
// quire_o into the quire register. The quire format follows the posit
// standard; the datapath is this design's own.
module posit_mac #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0]    a_i,
  input  logic [N-1:0]    b_i,
  input  logic            sub_i,
  input  logic [16*N-1:0] quire_i,
  output logic [16*N-1:0] quire_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;
  localparam int unsigned QW = 16 * N;
  localparam int unsigned QF = 8 * N - 16;
  localparam int unsigned PW = 2 * (FW + 1);
  localparam int unsigned TW = QW + 2 * FW;       // product aligned with 2*FW extra LSBs

  logic za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ea, eb;
  logic [FW-1:0] fa, fb;
  logic [PW-1:0] prod;
  logic [TW-1:0] t_wide;
  logic [QW-1:0] term;
  int            shamt;
  logic          q_nar;

  posit_decode #(.N(N), .SW(SW)) u_da (.p_i(a_i), .zero_o(za), .nar_o(na), .sign_o(sa), .scale_o(ea), .frac_o(fa));
  posit_decode #(.N(N), .SW(SW)) u_db (.p_i(b_i), .zero_o(zb), .nar_o(nb), .sign_o(sb), .scale_o(eb), .frac_o(fb));

  always_comb begin
    prod   = {{(FW+1){1'b0}}, 1'b1, fa} * {{(FW+1){1'b0}}, 1'b1, fb};
    // product value = prod * 2^(ea+eb-2FW); quire integer = value * 2^QF
    shamt  = int'(ea) + int'(eb) + int'(QF);
    if (shamt < 0) shamt = 0;
    t_wide = TW'(prod) << shamt;
    term   = t_wide[TW-1 -: QW];
    if (za || zb) term = '0;
    if (sa ^ sb ^ sub_i) term = ~term + 1'b1;
    q_nar  = (quire_i == {1'b1, {(QW-1){1'b0}}});
    if (na || nb || q_nar) quire_o = {1'b1, {(QW-1){1'b0}}};
    else                   quire_o = quire_i + term;
  end
endmodule
