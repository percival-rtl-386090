// posit_to_int: Posit<N,2> to integer conversion (P2I, P2U, P2L, P2LU units).
//
// One parameterised module serves the four CONV units: OUT_W selects a 32- or
// 64-bit result and SIGNED_OUT a signed or unsigned one. The significand is
// shifted to a fixed-point value with one extra fraction bit, rounded to
// nearest-even with a sticky bit, and saturated to the target range. NaR gives
// the pattern 100...0 (the integer NaN of the posit standard). Negative values
// saturate to 0 for unsigned targets. The XLEN-bit result sign-extends 32-bit
// results, like the RV64 F-extension conversions. Combinational, latency 0 in
// the PAU. Rounding, saturation and NaR handling are this design's choices; the
// paper only names the units.
module posit_to_int #(
  parameter int unsigned N          = 32,
  parameter int unsigned OUT_W      = 32,
  parameter bit          SIGNED_OUT = 1'b1,
  parameter int unsigned XLEN       = 64
) (
  input  logic [N-1:0]    p_i,
  output logic [XLEN-1:0] r_o
);
  localparam int unsigned SW = 12;
  localparam int unsigned FW = N - 3;
  localparam int unsigned VW = FW + 2 + OUT_W + 1;   // fixed point, FW+1 fraction bits

  logic z, nar, s;
  logic signed [SW-1:0] sc;
  logic [FW-1:0] f;
  logic [VW-1:0] v;
  logic [OUT_W+1:0] m;       // rounded magnitude
  logic          guard, sticky, big;
  logic [OUT_W-1:0] res;

  posit_decode #(.N(N), .SW(SW)) u_dec (.p_i(p_i), .zero_o(z), .nar_o(nar), .sign_o(s), .scale_o(sc), .frac_o(f));

  always_comb begin
    big = (sc >= $signed(SW'(OUT_W)));
    v   = '0;
    if (!big && sc >= -$signed(SW'(1)))
      v = VW'({1'b1, f}) << (sc + 1);          // value * 2^(FW+1)
    guard  = v[FW];
    sticky = |v[FW-1:0];
    m      = (OUT_W+2)'(v[VW-1:FW+1]) + (OUT_W+2)'(guard && (sticky || v[FW+1]));
    if (SIGNED_OUT) begin
      if (!s) res = (big || m > (OUT_W+2)'({1'b0, {(OUT_W-1){1'b1}}})) ? {1'b0, {(OUT_W-1){1'b1}}} : m[OUT_W-1:0];
      else    res = (big || m > (OUT_W+2)'({1'b1, {(OUT_W-1){1'b0}}})) ? {1'b1, {(OUT_W-1){1'b0}}} : (~m[OUT_W-1:0] + 1'b1);
    end else begin
      if (!s) res = (big || m > (OUT_W+2)'({OUT_W{1'b1}})) ? {OUT_W{1'b1}} : m[OUT_W-1:0];
      else    res = '0;
    end
    if (nar)    res = {1'b1, {(OUT_W-1){1'b0}}};
    else if (z) res = '0;
    r_o = XLEN'(signed'(res));
  end
endmodule
