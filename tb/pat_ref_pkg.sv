// Reference arithmetic for the reconstructor testbenches, written
// independently of the RTL: integer square root by bisection, and the three
// per-pixel formulas (DAS, DAS-CF, DMAS) over a list of channel samples.
package pat_ref_pkg;

  // floor(sqrt(x)) by bisection
  function automatic longint unsigned isqrt(longint unsigned x);
    longint unsigned lo = 0, hi = 64'd4294967296, mid;
    while (hi - lo > 1) begin
      mid = (lo + hi) / 2;
      if (mid * mid <= x) lo = mid; else hi = mid;
    end
    return lo;
  endfunction

  // sign(s) * floor(sqrt(|s| * 2^16))
  function automatic longint sroot(int s);
    longint unsigned m = (s < 0) ? longint'(-s) : longint'(s);
    longint r = longint'(isqrt(m << 16));
    return (s < 0) ? -r : r;
  endfunction

  // 0 DAS, 1 DAS-CF, 2 DMAS over n samples
  function automatic longint pixel(int mode, int s[], int n);
    longint a = 0;
    longint unsigned b = 0;
    longint unsigned num, q;
    for (int i = 0; i < n; i++) begin
      if (mode == 2) begin
        a += sroot(s[i]);
        b += longint'((s[i] < 0) ? -s[i] : s[i]) << 16;
      end else begin
        a += s[i];
        b += longint'(s[i]) * longint'(s[i]);
      end
    end
    if (mode == 0) return a;
    if (mode == 2) return (a * a - longint'(b)) >>> 1;
    if (b == 0) return 0;
    num = longint'(a * a) << 10;
    q = num / b;
    return (q > 64'hFFFFF) ? 64'hFFFFF : q;
  endfunction
endpackage
