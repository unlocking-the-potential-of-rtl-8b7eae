// mcc_ref_pkg: integer reference model of the MCC arithmetic, used by the
// testbenches to compute expected values independently of the RTL.
//
// Values are fixed point held in plain ints, Q3.12 (16-bit) unless a
// testbench calls set_format first (e.g. set_format(11, 7) for Q3.7). Every
// operation is done exactly in wide integers and then clamped to the word
// range; a multiply divides the exact product by 2^frac rounding toward
// minus infinity.
package mcc_ref_pkg;

  int QW   = 16;           // word width
  int QF   = 12;           // fraction bits
  int QMAX = 32767;
  int QMIN = -32768;
  int ONE  = 4096;
  int SIX  = 6 * 4096;

  function automatic void set_format(int w, int f);
    QW   = w;
    QF   = f;
    QMAX = (1 << (w - 1)) - 1;
    QMIN = -(1 << (w - 1));
    ONE  = 1 << f;
    SIX  = 6 << f;
  endfunction

  function automatic int clamp(longint v);
    if (v > QMAX) return QMAX;
    if (v < QMIN) return QMIN;
    return int'(v);
  endfunction

  function automatic bit add_ovf(int a, int b);
    longint s = longint'(a) + longint'(b);
    return (s > QMAX) || (s < QMIN);
  endfunction

  function automatic int add(int a, int b);
    return clamp(longint'(a) + longint'(b));
  endfunction

  function automatic int sub(int a, int b);
    return clamp(longint'(a) - longint'(b));
  endfunction

  // exact product scaled back by 2^QF, rounding toward minus infinity
  function automatic longint floor_scale(longint p);
    return p >>> QF;
  endfunction

  function automatic int mul(int a, int b);
    return clamp(floor_scale(longint'(a) * longint'(b)));
  endfunction

  function automatic bit mul_ovf(int a, int b);
    longint q = floor_scale(longint'(a) * longint'(b));
    return (q > QMAX) || (q < QMIN);
  endfunction

  function automatic int relu6(int x);
    if (x < 0)   return 0;
    if (x > SIX) return SIX;
    return x;
  endfunction

  // ReLU6(2R^2 + R + R + 2C(1+|R|)), each step saturating, in this order.
  function automatic int modf(int r, int c);
    int rr = mul(r, r);
    int t1 = add(rr, rr);
    int t2 = add(r, r);
    int ab = (r < 0) ? sub(0, r) : r;
    int t3 = add(ONE, ab);
    int cm = mul(c, t3);
    int t4 = add(cm, cm);
    return relu6(add(add(t1, t2), t4));
  endfunction

  function automatic int ctx(int cp, int cd, int cu);
    return relu6(add(add(cp, cd), cu));
  endfunction

  // 16-bit two's complement pattern to int and back
  function automatic int s16(logic [15:0] v);
    return int'($signed(v));
  endfunction

endpackage
