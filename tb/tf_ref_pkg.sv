// tf_ref_pkg: behavioural reference arithmetic for the testbenches.
//
// Written independently of the RTL's fixed-point helpers: the rescale is
// computed in double precision and rounded half up with $floor, then
// saturated, so a slip in the RTL's shift-and-round shows up as a mismatch.
package tf_ref_pkg;

  // sat_bits(zy + round(acc * m / 2^s)), optionally max(., zy) for ReLU
  function automatic int ref_rq(input longint acc, input int m, input int s,
                                input int zy, input int bits, input bit relu = 1'b0);
    real    v;
    longint r;
    longint hi, lo;
    v  = $floor((real'(acc) * real'(m)) / (2.0 ** s) + 0.5);
    r  = longint'(v) + zy;
    hi = (longint'(1) << (bits - 1)) - 1;
    lo = -(longint'(1) << (bits - 1));
    if (r > hi) r = hi;
    if (r < lo) r = lo;
    if (relu && r < zy) r = zy;
    return int'(r);
  endfunction

  // uniformly distributed signed 'bits'-bit value
  function automatic int rnd_q(input int bits);
    return int'($urandom_range(0, (1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  // small zero point for a 'bits'-bit tensor
  function automatic int rnd_zp(input int bits);
    return int'($urandom_range(0, (1 << (bits - 2)) - 1)) - (1 << (bits - 3));
  endfunction

  // fixed-point multiplier / shift pair approximating factor f
  function automatic void mk_ms(input real f, output int m, output int s);
    s = 30;
    while (s > 0 && f * (2.0 ** s) > 65535.0) s--;
    m = int'($floor(f * (2.0 ** s) + 0.5));
    if (m < 1) m = 1;
  endfunction

endpackage
