// posit_decode: splits a Posit<N,2> into sign, scale and fraction (combinational).
//
// The posit is taken to sign-magnitude form (two's complement of negative
// values), the regime run is counted from the bit after the sign, and the two
// exponent bits and the fraction are read after the regime terminator. Missing
// exponent or fraction bits read as zero. The value is
//   (-1)^sign * (1 + frac/2^(N-3)) * 2^scale,  scale = 4*r + e.
// Zero (all zeros) and NaR (1 followed by zeros) are flagged separately.
// The sign-magnitude decoding is this design's choice; the field definitions
// follow the posit format.
module posit_decode #(
  parameter int unsigned N  = 32,
  parameter int unsigned SW = 12
) (
  input  logic [N-1:0]         p_i,
  output logic                 zero_o,
  output logic                 nar_o,
  output logic                 sign_o,
  output logic signed [SW-1:0] scale_o,
  output logic [N-4:0]         frac_o    // N-3 fraction bits, left aligned
);
  logic [N-1:0] mag;
  logic [N-2:0] body, rem;
  logic         r0, run;
  int unsigned  k;
  logic signed [SW-1:0] r;

  always_comb begin
    zero_o = (p_i == '0);
    nar_o  = (p_i == {1'b1, {(N-1){1'b0}}});
    sign_o = p_i[N-1];
    mag    = p_i[N-1] ? (~p_i + 1'b1) : p_i;
    body   = mag[N-2:0];
    r0     = body[N-2];
    k      = 0;
    run    = 1'b1;
    for (int i = N-2; i >= 0; i--) begin
      if (run && (body[i] == r0)) k = k + 1;
      else run = 1'b0;
    end
    r   = r0 ? SW'(k - 1) : -SW'(k);
    rem = (k + 1 >= N - 1) ? '0 : (body << (k + 1));
    scale_o = (r <<< 2) + SW'({1'b0, rem[N-2:N-3]});
    frac_o  = rem[N-4:0];
  end
endmodule
