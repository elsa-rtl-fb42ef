// elsa_ref_pkg: reference arithmetic for the testbenches, written from the
// definition of the approximate multiplier rather than from the RTL.
//
// The original AM stream for X*W runs |N(W)| cycles c = 1, 2, ...; cycle c
// carries the inverted sign bit of X when c is odd and bit X_{n-1-tz(c)}
// when c is even (tz = number of trailing zeros). Each stream bit, XORed
// with W's sign, counts the product up (1) or down (0). The accelerated AM
// replaces the floor(|N(W)|/2) sign-bit cycles by one preset and keeps the
// even cycles c = 2, 4, ..., 2*floor(|N(W)|/2). Counters saturate at the
// ends of their ACC_W-bit range on every step.
package elsa_ref_pkg;

  function automatic int sx(int pattern, int width);
    int v;
    v = pattern & ((1 << width) - 1);
    if (v >= (1 << (width - 1))) v -= (1 << width);
    return v;
  endfunction

  function automatic int sat(int v, int width);
    int hi, lo;
    hi = (1 << (width - 1)) - 1;
    lo = -(1 << (width - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  function automatic int tzc(int c);
    int n;
    n = 0;
    while (c % 2 == 0) begin
      c = c / 2;
      n++;
    end
    return n;
  endfunction

  // half of |N(W)|: number of stream cycles of the accelerated AM
  function automatic int am_k(int w, int dw);
    int m;
    m = sx(w, dw);
    if (m < 0) m = -m;
    return m / 2;
  endfunction

  // accelerated AM; acc is the counter before the operation
  function automatic int am_ref(int acc, bit accumulate, int x, int w, int dw, int accw);
    int  k, a, bitv;
    bit  xm, wm;
    k  = am_k(w, dw);
    xm = ((x >> (dw - 1)) & 1) != 0;
    wm = ((w >> (dw - 1)) & 1) != 0;
    a  = accumulate ? acc : 0;
    a  = sat(a + (((!xm) ^ wm) ? k : -k), accw);
    for (int c = 2; c <= 2 * k; c += 2) begin
      bitv = (x >> (dw - 1 - tzc(c))) & 1;
      a = sat(a + (((bitv != 0) ^ wm) ? 1 : -1), accw);
    end
    return a;
  endfunction

  // HSig and HTanh of a value s in units of 2^-(dw-1)
  function automatic int hsig_ref(int s, int dw);
    int one, v;
    one = 1 << (dw - 1);
    if (s > 2 * one) return one - 1;
    if (s <= -2 * one) return 0;
    v = (s >>> 2) + one / 2;
    if (v > one - 1) v = one - 1;
    if (v < 0) v = 0;
    return v;
  endfunction

  function automatic int htanh_ref(int s, int dw);
    int one;
    one = 1 << (dw - 1);
    if (s >= one) return one - 1;
    if (s <= -one) return -one;
    return s;
  endfunction

endpackage
