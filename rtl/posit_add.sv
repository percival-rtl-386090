// posit_add: Posit<N,2> adder/subtractor (ADD unit of the PAU COMP group).
//
// One unit serves PADD and PSUB: when sub_i is set the two's complement of
// operand B is taken first, which negates a posit exactly. Both operands are
// decoded to sign/scale/significand, the smaller is aligned to the larger with
// a sticky bit, magnitudes are added or subtracted, and the sum is normalised
// and rounded to nearest-even by posit_norm_encode. NaR in gives NaR; x + (-x)
// gives exact zero.
// The logic is combinational. Inside the PAU it is a multi-cycle path: the
// operands are held for the 2 extra cycles of the ADD latency (3 cycles from
// issue to result). The reuse of one unit for add and subtract follows the
// paper; the alignment datapath is this design's own.
module posit_add #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] a_i,
  input  logic [N-1:0] b_i,
  input  logic         sub_i,
  output logic [N-1:0] r_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;
  localparam int unsigned S  = FW + 1;     // significand 1.f
  localparam int unsigned G  = S + 2;      // alignment guard bits
  localparam int unsigned MW = S + G + 1;  // with carry

  logic [N-1:0] b_eff;
  logic za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ea, eb, e_big, e_sml, e_dif;
  logic [FW-1:0] fa, fb;
  logic [S-1:0]  m_big, m_sml;
  logic          s_big, s_sml, swap;
  int unsigned   d;
  logic [S+G-1:0] big_x, sml_x;
  logic           sticky;
  logic [MW-1:0]  sum;
  logic           sign_r, zero_r;

  assign b_eff = sub_i ? (~b_i + 1'b1) : b_i;

  posit_decode #(.N(N), .SW(SW)) u_da (.p_i(a_i),   .zero_o(za), .nar_o(na), .sign_o(sa), .scale_o(ea), .frac_o(fa));
  posit_decode #(.N(N), .SW(SW)) u_db (.p_i(b_eff), .zero_o(zb), .nar_o(nb), .sign_o(sb), .scale_o(eb), .frac_o(fb));

  always_comb begin
    swap  = (eb > ea) || ((eb == ea) && (fb > fa));
    e_big = swap ? eb : ea;
    e_sml = swap ? ea : eb;
    m_big = swap ? {1'b1, fb} : {1'b1, fa};
    m_sml = swap ? {1'b1, fa} : {1'b1, fb};
    s_big = swap ? sb : sa;
    s_sml = swap ? sa : sb;
    e_dif = e_big - e_sml;                     // 0..240, fits in SW bits
    d     = int'(e_dif);
    big_x = {m_big, {G{1'b0}}};
    sml_x = (d >= S + G) ? '0 : ({m_sml, {G{1'b0}}} >> d);
    sticky = 1'b0;
    for (int i = 0; i < int'(S + G); i++)
      if (i < int'(d)) sticky = sticky | (i < int'(G) ? 1'b0 : m_sml[i - G]);
    if (s_big == s_sml) sum = {1'b0, big_x} + {1'b0, sml_x};
    else                sum = {1'b0, big_x} - {1'b0, sml_x} - MW'(sticky);
    sign_r = s_big;
    zero_r = (sum == '0) && !sticky;
    // special operands: one side zero returns the other exactly
    if (za || zb) sign_r = za ? sb : sa;
  end

  logic [N-1:0] r_norm;
  posit_norm_encode #(.N(N), .MW(MW), .SW(SW)) u_enc (
    .sign_i(sign_r), .mag_i(sum), .scale_msb_i(e_big + SW'(1)), .sticky_i(sticky),
    .zero_i(zero_r), .nar_i(1'b0), .p_o(r_norm));

  always_comb begin
    if (na || nb)     r_o = {1'b1, {(N-1){1'b0}}};
    else if (za)      r_o = b_eff;
    else if (zb)      r_o = a_i;
    else              r_o = r_norm;
  end
endmodule
