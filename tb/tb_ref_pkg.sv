// tb_ref_pkg: reference arithmetic for the controller testbenches.
//
// These functions restate the controller's arithmetic with 64-bit integers,
// independently of the RTL, so testbenches can predict every output sample:
// the widening of an ADC code, one step of a second-order section, and the
// scaling and limiting in front of the DAC.
package tb_ref_pkg;

  typedef struct {
    longint b0, b1, b2, a0, a1, a2;
  } coef_t;

  typedef struct {
    longint x1, x2, y1, y2;
  } hist_t;

  // 12-bit ADC code to the 24-bit signal word: scale by 2**8.
  function automatic longint widen(longint adc);
    return adc * 256;
  endfunction

  // Sum selected by the multiplexer: bit 0 = RX, bit 1 = Ref.
  function automatic longint mux_ref(int sel, longint rx, longint rf);
    longint s = 0;
    if ((sel & 1) != 0) s += widen(rx);
    if ((sel & 2) != 0) s += widen(rf);
    return s;
  endfunction

  // Floor division by 2**n for a signed value.
  function automatic longint floor_shift(longint v, int n);
    longint d = longint'(1) << n;
    longint q = v / d;
    if ((v % d) != 0 && v < 0) q -= 1;
    return q;
  endfunction

  function automatic longint sat(longint v, int bits);
    longint hi = (longint'(1) << (bits - 1)) - 1;
    longint lo = -(longint'(1) << (bits - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // One sample through a section: y = (b.x - a1 y1 - a2 y2) / a0 with
  // |a0| = 2**22, a 50-bit accumulator and a result limited to 24 bits.
  function automatic longint biquad_step(coef_t c, ref hist_t h, input longint x);
    longint acc, y;
    acc = c.b0 * x + c.b1 * h.x1 + c.b2 * h.x2 - c.a1 * h.y1 - c.a2 * h.y2;
    acc = acc & ((longint'(1) << 50) - 1);
    if (acc >= (longint'(1) << 49)) acc -= (longint'(1) << 50);
    y = floor_shift(acc, 22);
    if (c.a0 < 0) y = -y;
    y = sat(y, 24);
    h.x2 = h.x1; h.x1 = x;
    h.y2 = h.y1; h.y1 = y;
    return y;
  endfunction

  // 24-bit filter word to the 14-bit DAC code.
  function automatic longint dac_ref(longint y);
    return sat(floor_shift(y, 6), 14);
  endfunction

endpackage
