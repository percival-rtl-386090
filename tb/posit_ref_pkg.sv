// posit_ref_pkg: reference Posit32 arithmetic for the testbenches.
//
// Works on IEEE double values, independently of the RTL: p2r() decodes a posit
// bit by bit into a real, r2p() encodes a real by writing out the regime,
// exponent and fraction bit stream and rounding it to nearest, ties to even,
// with saturation to maxpos/minpos. r2p is exact whenever its argument is an
// exact double, which the testbenches arrange by choosing operands with few
// significant bits.
package posit_ref_pkg;

  localparam logic [31:0] NAR    = 32'h8000_0000;
  localparam logic [31:0] MAXPOS = 32'h7fff_ffff;
  localparam logic [31:0] MINPOS = 32'h0000_0001;

  function automatic real pow2(int e);
    real v = 1.0;
    if (e >= 0) repeat (e) v = v * 2.0;
    else        repeat (-e) v = v / 2.0;
    return v;
  endfunction

  function automatic real p2r(logic [31:0] p);
    logic [31:0] v;
    int i, k, r, e;
    logic r0;
    real f, w, val;
    if (p == 0) return 0.0;
    v  = p[31] ? -p : p;
    i  = 30;
    r0 = v[30];
    k  = 0;
    while (i >= 0 && v[i] == r0) begin k++; i--; end
    i--;                                   // terminator
    r = r0 ? k - 1 : -k;
    e = 0;
    repeat (2) begin e = e * 2 + ((i >= 0) ? int'(v[i]) : 0); i--; end
    f = 0.0; w = 0.5;
    while (i >= 0) begin if (v[i]) f += w; w = w / 2.0; i--; end
    val = (1.0 + f) * pow2(4 * r + e);
    return p[31] ? -val : val;
  endfunction

  function automatic logic [31:0] r2p(real x);
    real a, f;
    int sc, r, e, nb;
    logic [30:0] body;
    logic guard, sticky, s, bitv;
    if (x == 0.0) return 32'h0;
    s = (x < 0.0);
    a = s ? -x : x;
    sc = 0;
    while (a >= 2.0) begin a = a / 2.0; sc++; end
    while (a < 1.0)  begin a = a * 2.0; sc--; end
    f = a - 1.0;
    r = (sc >= 0) ? sc / 4 : -((-sc + 3) / 4);
    e = sc - 4 * r;
    if (r >= 30)       body = '1;
    else if (r <= -31) body = 31'd1;
    else begin
      body = '0; guard = 0; sticky = 0; nb = 0;
      // regime
      if (r >= 0) begin
        for (int j = 0; j <= r; j++) begin
          bitv = 1; if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
        end
        bitv = 0; if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
      end else begin
        for (int j = 0; j < -r; j++) begin
          bitv = 0; if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
        end
        bitv = 1; if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
      end
      // exponent
      for (int j = 1; j >= 0; j--) begin
        bitv = e[j]; if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
      end
      // fraction
      for (int j = 0; j < 60; j++) begin
        f = f * 2.0;
        if (f >= 1.0) begin bitv = 1; f = f - 1.0; end else bitv = 0;
        if (nb < 31) body[30-nb] = bitv; else if (nb == 31) guard = bitv; else sticky |= bitv; nb++;
      end
      if (f != 0.0) sticky = 1;
      if (guard && (sticky || body[0]) && body != '1) body = body + 1;
    end
    return s ? -{1'b0, body} : {1'b0, body};
  endfunction

  // random posit with |scale| roughly below 4*rmax and low fraction bits cleared
  function automatic logic [31:0] rand_posit(int rmax, int clr_bits);
    real x;
    int sc;
    logic [31:0] p;
    sc = int'($urandom_range(0, 8 * rmax)) - 4 * rmax;
    x  = (1.0 + real'($urandom_range(0, 1 << 20)) / real'(1 << 20)) * pow2(sc);
    p  = r2p(x);
    p  = p & ~((32'd1 << clr_bits) - 1);
    if (p == 0) p = 32'h4000_0000;
    if ($urandom_range(0, 1) == 1) p = -p;
    return p;
  endfunction

  // |x| = (1+f) * 2^sc with 0 <= f < 1
  function automatic void split(real x, output int sc, output real f);
    real a;
    a  = (x < 0.0) ? -x : x;
    sc = 0;
    while (a >= 2.0) begin a = a / 2.0; sc++; end
    while (a < 1.0)  begin a = a * 2.0; sc--; end
    f = a - 1.0;
  endfunction

  // Mitchell (logarithm-approximate) quotient and square root
  function automatic real mitchell_div(real x, real y);
    int sx, sy;
    real fx, fy, m;
    split(x, sx, fx);
    split(y, sy, fy);
    if (fx >= fy) m = (1.0 + fx - fy) * pow2(sx - sy);
    else          m = (2.0 + fx - fy) * pow2(sx - sy - 1);
    return ((x < 0.0) != (y < 0.0)) ? -m : m;
  endfunction

  function automatic real mitchell_sqrt(real x);
    int s;
    real f;
    split(x, s, f);
    if (s % 2 == 0) return (1.0 + f / 2.0) * pow2(s / 2);
    else            return (1.0 + (1.0 + f) / 2.0) * pow2((s - 1) / 2);
  endfunction

  // round a real to the nearest integer, ties to even
  function automatic real rne(real x);
    real fl, d;
    fl = $floor(x);
    d  = x - fl;
    if (d > 0.5) return fl + 1.0;
    if (d < 0.5) return fl;
    return ($floor(fl / 2.0) * 2.0 == fl) ? fl : fl + 1.0;
  endfunction

  // exact real (integer valued, 0 <= v < 2^64) to 64 bits
  function automatic logic [63:0] r2u64(real v);
    if (v >= pow2(63)) return {1'b1, 63'(longint'(v - pow2(63)))};
    return 64'(longint'(v));
  endfunction

  // reference posit -> integer conversion (w = 32/64, sgn = signed)
  function automatic logic [63:0] ref_p2i(logic [31:0] p, int w, bit sgn);
    real v;
    logic [63:0] r;
    if (p == NAR) r = 64'h8000_0000_0000_0000 >> (64 - w);
    else begin
      v  = rne(p2r(p));
      if (sgn && v >= pow2(w - 1))      r = (64'h1 << (w - 1)) - 1;       // max
      else if (sgn && v < -pow2(w - 1)) r = -(64'h1 << (w - 1));          // min
      else if (!sgn && v >= pow2(w))    r = (w == 64) ? '1 : (64'h1 << w) - 1;
      else if (!sgn && v < 0.0)         r = '0;
      else if (v < 0.0)                 r = -r2u64(-v);
      else                              r = r2u64(v);
    end
    if (w == 32) r = {{32{r[31]}}, r[31:0]};
    return r;
  endfunction

  // reference integer -> posit conversion of the low w bits of x
  function automatic logic [31:0] ref_i2p(logic [63:0] x, int w, bit sgn);
    logic [63:0] v;
    real r;
    v = (w == 32) ? {32'h0, x[31:0]} : x;
    if (sgn && v[w-1]) begin
      v = (w == 32) ? {32'h0, -x[31:0]} : -x;
      r = -(real'(v[63:32]) * pow2(32) + real'(v[31:0]));
    end else
      r = real'(v[63:32]) * pow2(32) + real'(v[31:0]);
    return r2p(r);
  endfunction

endpackage
