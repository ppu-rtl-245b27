// Reference posit arithmetic for the testbenches.
//
// Written independently of the RTL: a posit code is decoded to a real number
// by walking its bits, and a real number is rounded to posit<n,es> by binary
// search over the (monotonic) positive codes followed by a comparison with the
// midpoint, which is the value of the (n+1)-bit posit between the two
// neighbours; ties go to the even code, values beyond maxpos/minpos saturate.
// binary32 words are converted with plain arithmetic. All posits up to 16 bits
// and their sums, products and quotients are held exactly or near enough in a
// double for these checks.
package posit_ref_pkg;

  function automatic longint unsigned pmask(int n);
    return (n >= 64) ? '1 : ((64'd1 << n) - 1);
  endfunction

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic bit is_nar(longint unsigned p, int n);
    return (p & pmask(n)) == (64'd1 << (n - 1));
  endfunction

  function automatic real posit_to_real(longint unsigned p_in, int n, int es);
    longint unsigned p;
    bit  s, rb;
    int  i, run, k, e, fbits;
    real f, v;
    p = p_in & pmask(n);
    if (p == 0 || is_nar(p, n)) return 0.0;
    s = p[n-1];
    if (s) p = (~p + 1) & pmask(n);
    i  = n - 2;
    rb = p[i];
    run = 0;
    while (i >= 0 && p[i] == rb) begin run++; i--; end
    i--;                      // stop bit
    k = rb ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e * 2;
      if (i >= 0) begin e += int'(p[i]); i--; end
    end
    f = 1.0;
    fbits = 0;
    while (i >= 0) begin
      fbits++;
      if (p[i]) f += pow2(-fbits);
      i--;
    end
    v = f * pow2(k * (2 ** es) + e);
    return s ? -v : v;
  endfunction

  function automatic longint unsigned neg(longint unsigned p, int n);
    return (~p + 1) & pmask(n);
  endfunction

  function automatic longint unsigned real_to_posit(real r, int n, int es);
    real a, mid, vlo;
    longint unsigned lo, hi, m, maxp, c;
    if (r == 0.0) return 0;
    a    = (r < 0.0) ? -r : r;
    maxp = (64'd1 << (n - 1)) - 1;
    if (a >= posit_to_real(maxp, n, es)) c = maxp;
    else if (a <= posit_to_real(1, n, es)) c = 1;
    else begin
      lo = 1; hi = maxp;            // val(lo) <= a < val(hi)
      while (hi - lo > 1) begin
        m = (lo + hi) / 2;
        if (posit_to_real(m, n, es) <= a) lo = m; else hi = m;
      end
      vlo = posit_to_real(lo, n, es);
      if (vlo == a) c = lo;
      else begin
        mid = posit_to_real((lo << 1) | 1, n + 1, es);
        if (a < mid) c = lo;
        else if (a > mid) c = hi;
        else c = lo[0] ? hi : lo;
      end
    end
    return (r < 0.0) ? neg(c, n) : c;
  endfunction

  function automatic real float_to_real(logic [31:0] f);
    int  ex;
    real m, v;
    ex = int'(f[30:23]);
    m  = real'(f[22:0]) / 8388608.0;
    if (ex == 0) v = m * pow2(-126);
    else         v = (1.0 + m) * pow2(ex - 127);
    return f[31] ? -v : v;
  endfunction

  // exact for values representable as normal binary32 numbers
  function automatic logic [31:0] real_to_float(real r);
    real a;
    int  ex;
    logic [31:0] f;
    if (r == 0.0) return 32'h0;
    a  = (r < 0.0) ? -r : r;
    ex = 0;
    while (a >= 2.0) begin a = a / 2.0; ex++; end
    while (a < 1.0)  begin a = a * 2.0; ex--; end
    f = {(r < 0.0), 8'(ex + 127), 23'($rtoi((a - 1.0) * 8388608.0))};
    return f;
  endfunction

endpackage
