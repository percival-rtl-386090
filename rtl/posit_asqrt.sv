// posit_asqrt: logarithm-approximate Posit<N,2> square root (SQRT unit, PSQRT).
//
// With log2(x) ~ s + f (Mitchell), the root is 2^((s+f)/2). For an even scale
// the result is 2^(s/2)*(1+f/2); for an odd scale it is 2^((s-1)/2)*(1+(1+f)/2).
// Both cases reduce to significand {1, s[0], f} with scale floor(s/2), which is
// then rounded to nearest-even. Only operand A is used. Negative inputs and NaR
// give NaR, zero gives zero. Combinational; inside the PAU its latency is 1
// extra cycle. The approximation follows the paper; the datapath is this
// design's own.
module posit_asqrt #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] a_i,
  output logic [N-1:0] r_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;

  logic za, na, sa;
  logic signed [SW-1:0] ea;
  logic [FW-1:0] fa;
  logic [FW+2:0] mag;

  posit_decode #(.N(N), .SW(SW)) u_da (.p_i(a_i), .zero_o(za), .nar_o(na), .sign_o(sa), .scale_o(ea), .frac_o(fa));

  assign mag = {1'b1, ea[0], fa, 1'b0};

  posit_norm_encode #(.N(N), .MW(FW+3), .SW(SW)) u_enc (
    .sign_i(1'b0), .mag_i(mag), .scale_msb_i(ea >>> 1), .sticky_i(1'b0),
    .zero_i(za), .nar_i(na || (sa && !za)), .p_o(r_o));
endmodule
