// quire_to_posit: rounds the quire to a Posit<N,2> (Q2P unit, QROUND).
//
// The 16N-bit quire is a two's complement fixed-point number with 8N-16
// fraction bits. Its magnitude is taken, the leading one located and the bits
// below it rounded to nearest-even into a posit (saturating at maxpos/minpos);
// the sign is applied by two's complement. The NaR quire (100...0) gives NaR,
// the zero quire gives zero. Combinational; in the PAU its latency is 1 extra
// cycle. The datapath is this design's own.
module quire_to_posit #(
  parameter int unsigned N = 32
) (
  input  logic [16*N-1:0] quire_i,
  output logic [N-1:0]    p_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned QW = 16 * N;
  localparam int unsigned QF = 8 * N - 16;

  logic          neg, nar;
  logic [QW-1:0] mag;

  always_comb begin
    neg = quire_i[QW-1];
    nar = (quire_i == {1'b1, {(QW-1){1'b0}}});
    mag = neg ? (~quire_i + 1'b1) : quire_i;
  end

  posit_norm_encode #(.N(N), .MW(QW), .SW(SW)) u_enc (
    .sign_i(neg), .mag_i(mag), .scale_msb_i($signed(SW'(QW - 1 - QF))), .sticky_i(1'b0),
    .zero_i(quire_i == '0), .nar_i(nar), .p_o(p_o));
endmodule
