// posit_mul: Posit<N,2> multiplier (MUL unit of the PAU COMP group).
//
// Both operands are decoded to sign/scale/significand; the (N-2)-bit
// significands are multiplied exactly, the scales added, and the product is
// normalised and rounded to nearest-even. NaR in gives NaR, a zero operand
// gives zero. Combinational; inside the PAU it is a multi-cycle path with a
// latency of 1 extra cycle. The datapath structure is this design's own.
module posit_mul #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] a_i,
  input  logic [N-1:0] b_i,
  output logic [N-1:0] r_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;
  localparam int unsigned PW = 2 * (FW + 1);

  logic za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ea, eb;
  logic [FW-1:0] fa, fb;
  logic [PW-1:0] prod;

  posit_decode #(.N(N), .SW(SW)) u_da (.p_i(a_i), .zero_o(za), .nar_o(na), .sign_o(sa), .scale_o(ea), .frac_o(fa));
  posit_decode #(.N(N), .SW(SW)) u_db (.p_i(b_i), .zero_o(zb), .nar_o(nb), .sign_o(sb), .scale_o(eb), .frac_o(fb));

  assign prod = {{(FW+1){1'b0}}, 1'b1, fa} * {{(FW+1){1'b0}}, 1'b1, fb};

  // product of two [1,2) significands lies in [1,4): MSB has scale ea+eb+1
  posit_norm_encode #(.N(N), .MW(PW), .SW(SW)) u_enc (
    .sign_i(sa ^ sb), .mag_i(prod), .scale_msb_i(ea + eb + SW'(1)), .sticky_i(1'b0),
    .zero_i(za || zb), .nar_i(na || nb), .p_o(r_o));
endmodule
