// posit_adiv: logarithm-approximate Posit<N,2> divider (DIV unit, PDIV).
//
// Mitchell's approximation log2(1+f) ~ f turns the division into a
// subtraction: the result has scale sa-sb and significand 1+(fa-fb); when
// fa < fb the borrow is taken from the scale, giving 2^(sa-sb-1)*(2+fa-fb).
// The result is rounded to nearest-even. The maximum relative error of this
// approximation is 1/9 (11.1%). Division by zero and NaR inputs give NaR;
// 0/x gives 0. Combinational; inside the PAU its latency is 1 extra cycle.
// The logarithmic approximation follows the paper; the exact datapath and
// the special cases are this design's own.
module posit_adiv #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] a_i,
  input  logic [N-1:0] b_i,
  output logic [N-1:0] r_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;

  logic za, na, sa, zb, nb, sb;
  logic signed [SW-1:0] ea, eb, es;
  logic [FW-1:0] fa, fb;
  logic [FW:0]   diff;
  logic [FW+2:0] mag;

  posit_decode #(.N(N), .SW(SW)) u_da (.p_i(a_i), .zero_o(za), .nar_o(na), .sign_o(sa), .scale_o(ea), .frac_o(fa));
  posit_decode #(.N(N), .SW(SW)) u_db (.p_i(b_i), .zero_o(zb), .nar_o(nb), .sign_o(sb), .scale_o(eb), .frac_o(fb));

  always_comb begin
    diff = {1'b0, fa} - {1'b0, fb};
    // diff[FW] set means fa < fb: wrap the fraction (adds 1) and borrow from the scale
    es   = ea - eb - (diff[FW] ? SW'(1) : SW'(0));
    mag  = {1'b1, diff[FW-1:0], 2'b00};
  end

  posit_norm_encode #(.N(N), .MW(FW+3), .SW(SW)) u_enc (
    .sign_i(sa ^ sb), .mag_i(mag), .scale_msb_i(es), .sticky_i(1'b0),
    .zero_i(za), .nar_i(na || nb || zb), .p_o(r_o));
endmodule
