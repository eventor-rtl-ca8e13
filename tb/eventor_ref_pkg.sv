// eventor_ref_pkg: bit-exact reference arithmetic for the testbenches.
//
// Written with plain 64-bit integer arithmetic, independently of the RTL's
// pipelines: canonical projection (homography, Q.28 accumulation, truncating
// division to Q9.7 with saturation at +/-32767) and proportional projection
// (a*x0 + b, round half up to an integer voxel). Also holds the stimulus
// helpers that turn real numbers into Q11.21 / Q9.7 codes.
package eventor_ref_pkg;

  // signed uniform random integer in [lo, hi]
  function automatic int srange(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  function automatic longint to_q21(real r);
    return longint'($floor(r * 2097152.0 + 0.5));
  endfunction

  function automatic longint to_q7(real r);
    return longint'($floor(r * 128.0 + 0.5));
  endfunction

  // q = trunc(num * 2^7 / den), saturated to +/-32767
  function automatic longint ref_div(longint num, longint den);
    longint an, ad, q;
    an = (num < 0) ? -num : num;
    ad = (den < 0) ? -den : den;
    if (ad == 0) q = 32767;
    else begin
      q = (an * 128) / ad;
      if (q > 32767) q = 32767;
    end
    return ((num < 0) != (den < 0)) ? -q : q;
  endfunction

  // canonical projection of (x, y) (Q9.7 codes) through h (Q11.21 codes)
  function automatic void ref_pz0(input longint h[9], input longint x, input longint y,
                                  output longint x0, output longint y0);
    longint u, v, w;
    u = h[0] * x + h[1] * y + h[2] * 128;
    v = h[3] * x + h[4] * y + h[5] * 128;
    w = h[6] * x + h[7] * y + h[8] * 128;
    x0 = ref_div(u, w);
    y0 = ref_div(v, w);
  endfunction

  // nearest voxel coordinate of a*c0 + b (a, b Q11.21; c0 Q9.7)
  function automatic longint ref_round(longint a, longint c0, longint b);
    longint s;
    s = a * c0 + b * 128 + (longint'(1) <<< 27);
    return s >>> 28;
  endfunction

endpackage
