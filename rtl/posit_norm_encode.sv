// posit_norm_encode: normalises an unsigned magnitude and rounds it to a
// Posit<N,2> (combinational).
//
// Input value: (-1)^sign_i * mag_i * 2^(scale_msb_i - (MW-1)), i.e. scale_msb_i
// is the scale the value would have if mag_i had its top bit set. A leading-one
// search shifts the magnitude up and corrects the scale; the bits below the
// hidden one become the fraction plus guard/sticky bits. The regime is built by
// an arithmetic shift of {regime pair, exponent, fraction} and the result is
// rounded to nearest, ties to even. Out-of-range values saturate to maxpos or
// minpos (a posit never rounds to zero or NaR). Negative results are the two's
// complement of the magnitude. zero_i / nar_i force the special encodings.
// Rounding and saturation follow the posit standard; the structure is this
// design's own.
module posit_norm_encode #(
  parameter int unsigned N  = 32,
  parameter int unsigned MW = 64,   // magnitude width, at least N-1
  parameter int unsigned SW = 12
) (
  input  logic                 sign_i,
  input  logic [MW-1:0]        mag_i,
  input  logic signed [SW-1:0] scale_msb_i,
  input  logic                 sticky_i,
  input  logic                 zero_i,
  input  logic                 nar_i,
  output logic [N-1:0]         p_o
);
  localparam int unsigned FW = N - 3;           // fraction bits kept
  localparam int unsigned XW = FW + 4;          // {regime pair, exp, frac}
  localparam int unsigned YW = XW + N;

  logic [MW-1:0]        norm;
  int unsigned          lz;
  logic                 found;
  logic signed [SW-1:0] scale, r;
  logic [1:0]           e;
  logic [FW-1:0]        frac;
  logic                 sticky, guard, rnd_sticky, round_up;
  logic [XW-1:0]        x;
  logic signed [YW-1:0] y;
  int unsigned          sh;
  logic [N-2:0]         body, body_r;
  logic                 is_zero_mag;

  always_comb begin
    // leading-one detection
    lz    = 0;
    found = 1'b0;
    for (int i = MW-1; i >= 0; i--) begin
      if (!found && mag_i[i]) found = 1'b1;
      else if (!found) lz = lz + 1;
    end
    is_zero_mag = !found;
    norm  = mag_i << lz;
    scale = scale_msb_i - SW'(lz);
    // fraction and sticky below the hidden bit
    frac   = '0;
    sticky = sticky_i;
    for (int i = 0; i < int'(FW); i++)
      if (int'(MW) - 2 - i >= 0) frac[FW-1-i] = norm[MW-2-i];
    for (int i = 0; i < int'(MW) - 1 - int'(FW); i++) sticky = sticky | norm[i];

    r = scale >>> 2;
    e = scale[1:0];
    x = {(r >= 0) ? 2'b10 : 2'b01, e, frac};
    if (r >= 0) sh = int'(r);
    else        sh = int'(-32'(r) - 1);
    if (sh > N) sh = N;
    y = $signed({x, {N{1'b0}}}) >>> sh;
    body       = y[YW-1 -: N-1];
    guard      = y[YW-N];
    rnd_sticky = sticky | (|y[YW-N-1:0]);
    round_up   = guard & (rnd_sticky | body[0]);
    body_r     = (round_up && !(&body)) ? body + 1'b1 : body;
    if (r >= $signed(SW'(N - 2))) body_r = '1;                       // maxpos
    else if (r < -$signed(SW'(N - 2))) body_r = {{(N-2){1'b0}}, 1'b1};    // minpos

    if (nar_i)                        p_o = {1'b1, {(N-1){1'b0}}};
    else if (zero_i || is_zero_mag)   p_o = '0;
    else if (sign_i)                  p_o = ~{1'b0, body_r} + 1'b1;
    else                              p_o = {1'b0, body_r};
  end
endmodule
