// tb_ref_pkg: reference arithmetic for the testbenches, written from the number
// format and the GRU equations rather than from the RTL.
//
// Words are signed 16-bit Q4.12. A product is formed exactly and shifted right by 12
// (toward minus infinity); every stored result saturates to [-32768, 32767]. A dot
// product adds all exact products and the bias (scaled by 2^12) before the shift.
// The activation tables are modelled by their defining formula: for an input x the
// table entry is f((floor(x / 256) + 0.5) / 16) * 4096, rounded to nearest.
package tb_ref_pkg;

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int mul_q(input int a, input int b);
    return sat16((longint'(a) * longint'(b)) >>> 12);
  endfunction

  function automatic int add_q(input int a, input int b);
    return sat16(longint'(a) + longint'(b));
  endfunction

  // sum_c w[c]*v[c] + bias, narrowed to a word
  function automatic int dot_q(input int w [], input int v [], input int bias);
    longint s;
    s = longint'(bias) <<< 12;
    foreach (w[c]) s += longint'(w[c]) * longint'(v[c]);
    return sat16(s >>> 12);
  endfunction

  function automatic int round_r(input real f);
    return (f >= 0.0) ? int'($floor(f + 0.5)) : -int'($floor(-f + 0.5));
  endfunction

  function automatic real bin_mid(input int x);
    int k;
    k = x >>> 8;           // floor(x / 256) for a signed 16-bit value
    return (real'(k) + 0.5) / 16.0;
  endfunction

  function automatic int sig_q(input int x);
    return round_r(4096.0 / (1.0 + $exp(-bin_mid(x))));
  endfunction

  function automatic int tanh_q(input int x);
    real v;
    v = bin_mid(x);
    return round_r(4096.0 * ($exp(2.0 * v) - 1.0) / ($exp(2.0 * v) + 1.0));
  endfunction

  // random word in [-span, span)
  function automatic int rnd(input int span);
    return int'($urandom_range(2 * span - 1)) - span;
  endfunction

endpackage
