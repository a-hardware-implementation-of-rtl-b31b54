// nn_ref_pkg: bit-exact reference model of the integer network, written
// directly from the arithmetic definitions and independent of the RTL
// (the activation table is recomputed here with $exp instead of being read
// from the block RAM contents).
package nn_ref_pkg;

  // G16[m] = min(65535, floor(65536 / (1 + exp(-2 m / 16)) + 0.5))
  function automatic int g16(input int m);
    real v;
    v = 65536.0 / (1.0 + $exp(-2.0 * real'(m) / 16.0));
    g16 = $rtoi($floor(v + 0.5));
    if (g16 > 65535) g16 = 65535;
  endfunction

  // 8-bit activation of a signed pre-activation a; magnitudes past the last
  // table word (1023) read that word
  function automatic int act8(input int a);
    int g, m;
    m = (a < 0) ? -a : a;
    if (m > 1023) m = 1023;
    g = (a < 0) ? 65536 - g16(m) : g16(m);
    act8 = (g + 128) / 256;
    if (act8 > 255) act8 = 255;
  endfunction

  // wrap an integer to a signed 8-bit value
  function automatic int wrap8(input int v);
    wrap8 = ((v % 256) + 256) % 256;
    if (wrap8 >= 128) wrap8 -= 256;
  endfunction

  // wrap an integer to a signed value of the given width
  function automatic int wrapn(input int v, input int bits);
    int r;
    r = 1 << bits;
    wrapn = ((v % r) + r) % r;
    if (wrapn >= r / 2) wrapn -= r;
  endfunction

  // floor(v / 2**s) for signed v
  function automatic int floor_shift(input int v, input int s);
    int d;
    d = 1 << s;
    floor_shift = (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  // pre-activation of one neuron with n inputs
  function automatic int pre_act(input int n, input int x[8], input int w[8],
                                 input int theta, input int shift);
    int s;
    s = 0;
    for (int k = 0; k < n; k++) s += x[k] * w[k];
    pre_act = floor_shift(s, shift) + theta;
  endfunction

endpackage
