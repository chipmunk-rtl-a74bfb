// chipmunk_ref_pkg: bit-exact reference arithmetic for the Chipmunk testbenches.
//
// Written independently of the RTL from the number format: 8-bit values with
// F = 5 fractional bits, 16-bit saturating accumulation, requantisation by an
// arithmetic shift of F with saturation, and activation tables rounded to
// the nearest 1/32. lstm_ref_unit() computes one unit's gate sequence for
// one time step; the testbenches combine these into tiles and arrays.
package chipmunk_ref_pkg;

  localparam int F = 5;

  function automatic int sat16(input int v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic int rq(input int acc);
    int s;
    s = acc >>> F;
    if (s > 127)  return 127;
    if (s < -128) return -128;
    return s;
  endfunction

  function automatic int clamp8(input int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  function automatic int sigm_ref(input int v);
    real r;
    r = 32.0 / (1.0 + $exp(-real'(v) / 32.0));
    return clamp8($rtoi($floor(r + 0.5)));
  endfunction

  function automatic int tanh_ref(input int v);
    real t, e2;
    t  = real'(v) / 32.0;
    e2 = $exp(2.0 * t);
    return clamp8($rtoi($floor(32.0 * (e2 - 1.0) / (e2 + 1.0) + 0.5)));
  endfunction

  // acc + v*2^F, saturated
  function automatic int add_w(input int acc, input int v);
    return sat16(acc + v * 32);
  endfunction

  function automatic int mac(input int acc, input int a, input int b);
    return sat16(acc + a * b);
  endfunction

  // random signed value in [-m, m]
  function automatic int rnd(input int m);
    return int'($urandom_range(2 * m, 0)) - m;
  endfunction

endpackage
