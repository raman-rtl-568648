// posit_ref_pkg: reference arithmetic for the testbenches, written with real
// numbers and independent of the RTL.
//   p2r     : posit(nb,2) word -> real (NaR returns 0.0; test it separately)
//   r2p16   : real -> nearest posit(16,2) word, found by binary search over the
//             monotonic positive patterns (ties to the even pattern, saturating)
//   amul    : approximate product of two posit(8,2) words as the logarithmic
//             multiplier defines it: (1+x)(1+y) ~ 1+x+y if x+y<1, else 2(x+y)
//   pdist   : distance between two posit(16,2) words in ULPs of the pattern
package posit_ref_pkg;
  function automatic real p2r(input logic [15:0] pin, input int nb);
    logic [15:0] p;
    int   i, k, run, e, nbits;
    real  f, scale, fw;
    logic s, r0;
    p = pin & ((16'd1 << nb) - 1);
    if (p == 0) return 0.0;
    if (p == (16'd1 << (nb - 1))) return 0.0;
    s = p[nb-1];
    if (s) p = ((~p) + 1) & ((16'd1 << nb) - 1);
    r0  = p[nb-2];
    run = 0;
    i   = nb - 2;
    while (i >= 0 && p[i] == r0) begin run++; i--; end
    k = r0 ? run - 1 : -run;
    i--;                                  // skip terminator
    e = 0;
    for (int j = 0; j < 2; j++) begin
      e = e * 2;
      if (i >= 0) begin e += p[i]; i--; end
    end
    f  = 1.0;
    fw = 0.5;
    while (i >= 0) begin
      if (p[i]) f += fw;
      fw /= 2.0; i--;
    end
    scale = 2.0 ** (4 * k + e);
    return s ? -(f * scale) : f * scale;
  endfunction

  function automatic logic [15:0] r2p16(input real x);
    real a, lo_v, hi_v;
    int  lo, hi, mid;
    logic [15:0] r;
    if (x == 0.0) return 16'h0000;
    a  = (x < 0.0) ? -x : x;
    lo = 1; hi = 16'h7FFF;
    if (a <= p2r(16'(lo), 16)) r = 16'(lo);
    else if (a >= p2r(16'(hi), 16)) r = 16'(hi);
    else begin
      while (hi - lo > 1) begin
        mid = (lo + hi) / 2;
        if (p2r(16'(mid), 16) <= a) lo = mid; else hi = mid;
      end
      lo_v = a - p2r(16'(lo), 16);
      hi_v = p2r(16'(hi), 16) - a;
      if (lo_v < hi_v) r = 16'(lo);
      else if (hi_v < lo_v) r = 16'(hi);
      else r = (lo % 2 == 0) ? 16'(lo) : 16'(hi);
    end
    return (x < 0.0) ? (~r + 1'b1) : r;
  endfunction

  function automatic real amul(input logic [7:0] a, input logic [7:0] b);
    real xa, xb, ma, mb, s, m;
    int  ea, eb;
    xa = p2r(16'(a), 8);
    xb = p2r(16'(b), 8);
    if (xa == 0.0 || xb == 0.0) return 0.0;
    ma = (xa < 0.0) ? -xa : xa;
    mb = (xb < 0.0) ? -xb : xb;
    ea = 0; eb = 0;
    while (ma >= 2.0) begin ma /= 2.0; ea++; end
    while (ma < 1.0)  begin ma *= 2.0; ea--; end
    while (mb >= 2.0) begin mb /= 2.0; eb++; end
    while (mb < 1.0)  begin mb *= 2.0; eb--; end
    s = (ma - 1.0) + (mb - 1.0);
    m = (s < 1.0) ? (1.0 + s) : (2.0 * s);
    m = m * (2.0 ** (ea + eb));
    return ((xa < 0.0) != (xb < 0.0)) ? -m : m;
  endfunction

  function automatic int pdist(input logic [15:0] a, input logic [15:0] b);
    int d;
    d = int'(signed'(a)) - int'(signed'(b));
    return (d < 0) ? -d : d;
  endfunction
endpackage
