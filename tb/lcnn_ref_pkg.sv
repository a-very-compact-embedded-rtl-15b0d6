// lcnn_ref_pkg: reference arithmetic for the testbenches, written in real
// numbers straight from the defining equations, independent of the RTL's
// bit-level shifts:
//   weight  w = (-1)^s * 2^-e
//   layer   A = Q8( g( sum(a * w) + b ) * 2^i )
//   Q8(x)   = 0 if |x| <= 2^-8, else sign(x) * min(round(|x| * 128), 127) / 128
// with round() taking halves away from zero. All values involved have few
// enough significant bits that double precision is exact.
package lcnn_ref_pkg;

  function automatic real wval(input logic s, input int unsigned e);
    real m;
    m = 1.0;
    for (int k = 0; k < int'(e); k++) m = m / 2.0;
    return s ? -m : m;
  endfunction

  function automatic real pow2(input int i);
    real m;
    m = 1.0;
    if (i >= 0) for (int k = 0; k < i; k++) m = m * 2.0;
    else        for (int k = 0; k < -i; k++) m = m / 2.0;
    return m;
  endfunction

  // Q_Fixed8 of x, returned as the integer code (value * 128).
  function automatic int q8(input real x);
    real ax, m;
    ax = (x < 0.0) ? -x : x;
    if (ax <= 1.0 / 256.0) return 0;
    m = $floor(ax * 128.0 + 0.5);
    if (m > 127.0) m = 127.0;
    return (x < 0.0) ? -int'(m) : int'(m);
  endfunction

  function automatic real relu(input real x, input logic en);
    return (en && x < 0.0) ? 0.0 : x;
  endfunction

endpackage
