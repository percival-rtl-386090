// int_to_posit: integer to Posit<N,2> conversion (I2P, U2P, L2P, LU2P units).
//
// One parameterised module serves the four CONV units: IN_W selects the low 32
// or all 64 bits of the integer operand and SIGNED_IN whether it is two's
// complement. The magnitude is normalised by a leading-one search and rounded
// to nearest-even into a posit, whose sign is then applied by two's
// complement. Combinational, latency 0 in the PAU. The paper names the units;
// the datapath is this design's own.
module int_to_posit #(
  parameter int unsigned N         = 32,
  parameter int unsigned IN_W      = 32,
  parameter bit          SIGNED_IN = 1'b1,
  parameter int unsigned XLEN      = 64
) (
  input  logic [XLEN-1:0] x_i,
  output logic [N-1:0]    p_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned MW = (IN_W > N + 1) ? IN_W : N + 1;

  logic [IN_W-1:0] x, ax;
  logic            neg;
  logic [MW-1:0]   mag;

  always_comb begin
    x   = x_i[IN_W-1:0];
    neg = SIGNED_IN && x[IN_W-1];
    ax  = neg ? (~x + 1'b1) : x;
    mag = MW'(ax);
  end

  posit_norm_encode #(.N(N), .MW(MW), .SW(SW)) u_enc (
    .sign_i(neg), .mag_i(mag), .scale_msb_i($signed(SW'(MW - 1))), .sticky_i(1'b0),
    .zero_i(x == '0), .nar_i(1'b0), .p_o(p_o));
endmodule
