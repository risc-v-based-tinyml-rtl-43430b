// tb_dsc_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL. Integer model of int8 requantization:
// y = clamp(zp + floor(((acc + bias) * mult + 2^(s-1)) / 2^s), lo, hi) with
// s = 31 - shift, and the int16 saturation the hardware applies before adding
// the zero point.
package tb_dsc_ref_pkg;
  function automatic int ref_requant(longint acc, longint bias, longint mult, int shift,
                                     int zp, int lo, int hi);
    longint x, p, r;
    int s, y;
    x = acc + bias;
    p = x * mult;
    s = 31 - shift;
    r = p + (longint'(1) << (s - 1));
    // floor division by 2^s
    if (r >= 0) r = r / (longint'(1) << s);
    else r = -((-r + (longint'(1) << s) - 1) / (longint'(1) << s));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    y = int'(r) + zp;
    if (y < lo) y = lo;
    if (y > hi) y = hi;
    return y;
  endfunction
endpackage
