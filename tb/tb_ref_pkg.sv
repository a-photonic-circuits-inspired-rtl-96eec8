// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL:
// rounding of a 24-fraction-bit sum to a 16-bit word with 12 fraction bits (round half up,
// saturate), and floating-point versions of the activations.
package tb_ref_pkg;
  function automatic int q_round(input longint acc);
    longint r;
    r = acc + 2048;
    r = (r >= 0) ? r / 4096 : -((-r + 4095) / 4096);   // floor division
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  function automatic int sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic real sigma_r(input real x);
    return x * x / (x * x + (0.3 + 0.25 * x) * (0.3 + 0.25 * x));
  endfunction

  function automatic real elu_r(input real x);
    return (x > 0.0) ? x : $exp(x) - 1.0;
  endfunction

  function automatic int to_q(input real x);
    return sat16(longint'($floor(x * 4096.0 + 0.5)));
  endfunction

  function automatic int rnd_w(input int range_q);   // uniform integer in [-range_q, range_q]
    return int'($urandom_range(2 * range_q)) - range_q;
  endfunction
endpackage
