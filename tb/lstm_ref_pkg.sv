// lstm_ref_pkg: integer reference model of the (4,8) fixed-point LSTM arithmetic, used by the
// testbenches to compute expected values independently of the RTL.
//
// Values are raw codes (value * 16). A product of two codes carries 8 fractional bits; rnd()
// brings such a value back to 4 fractional bits by adding 8 and shifting right by 4 (flooring),
// then clamps it to [-128, 127].
package lstm_ref_pkg;

  function automatic int rnd(input longint s);
    longint r;
    r = (s + 8) >>> 4;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int hsig(input int v);
    if (v < -48) return 0;
    if (v >= 48) return 16;
    return (v >>> 3) + 8;
  endfunction

  function automatic int htanh(input int v);
    return (v > 16) ? 16 : (v < -16) ? -16 : v;
  endfunction

  // Random raw code in [-range, range].
  function automatic int rand_code(input int range);
    return int'($urandom_range(2 * range)) - range;
  endfunction

endpackage
