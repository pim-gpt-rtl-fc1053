// bf16_ref_pkg: reference arithmetic for the testbenches.
// Converts bfloat16 to and from real, rounding to nearest even on the way back
// and flushing results below the normal range to zero, the same conventions as
// the RTL. Sums and products of two BF16 values within a 2^40 range are exact
// in a real, so one rounding here gives the correctly rounded BF16 result.
package bf16_ref_pkg;
  function automatic real b2r(input logic [15:0] x);
    logic [10:0] e;
    if (x[14:7] == 8'd0) return 0.0;
    e = 11'(int'(x[14:7]) - 127 + 1023);
    return $bitstoreal({x[15], e, x[6:0], 45'd0});
  endfunction

  function automatic logic [15:0] r2b(input real r);
    logic [63:0] d;
    logic [10:0] de;
    logic [51:0] dm;
    int          e;
    logic [8:0]  m;
    logic        g, st;
    d  = $realtobits(r);
    de = d[62:52];
    dm = d[51:0];
    if (de == 11'd0) return {d[63], 15'd0};
    e  = int'(de) - 1023 + 127;
    m  = {2'b01, dm[51:45]};
    g  = dm[44];
    st = (dm[43:0] != 44'd0);
    if (g && (st || m[0])) m = m + 9'd1;
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (e <= 0)   return {d[63], 15'd0};
    if (e >= 255) return {d[63], 8'hFF, 7'd0};
    return {d[63], 8'(e), m[6:0]};
  endfunction

  // random normal BF16 with exponent in [lo, hi]
  function automatic logic [15:0] rnd(input int lo, input int hi);
    logic [15:0] x;
    x[15]   = 1'($urandom);
    x[14:7] = 8'(lo + int'($urandom % (hi - lo + 1)));
    x[6:0]  = 7'($urandom);
    return x;
  endfunction

  function automatic logic [15:0] fadd(input logic [15:0] x, input logic [15:0] y);
    logic [15:0] r;
    r = r2b(b2r(x) + b2r(y));
    return (r == 16'h8000 && !(x[15] && y[15])) ? 16'h0000 : r;
  endfunction

  function automatic logic [15:0] fmul(input logic [15:0] x, input logic [15:0] y);
    return r2b(b2r(x) * b2r(y));
  endfunction

  // 16-element dot product with the MAC unit's adder-tree order
  function automatic logic [15:0] dot16(input logic [255:0] v, input logic [255:0] w);
    logic [15:0] p [16];
    for (int i = 0; i < 16; i++) p[i] = fmul(v[16*i +: 16], w[16*i +: 16]);
    for (int n = 8; n >= 1; n = n / 2)
      for (int i = 0; i < n; i++) p[i] = fadd(p[2*i], p[2*i+1]);
    return p[0];
  endfunction

  // relative error of a BF16 result against a real value
  function automatic real relerr(input logic [15:0] got, input real want);
    real g;
    g = b2r(got);
    if (want == 0.0) return (g < 0.0) ? -g : g;
    return ((g - want) / want < 0.0) ? -(g - want) / want : (g - want) / want;
  endfunction
endpackage
