// tb_ref_pkg: reference arithmetic for the testbenches, written
// independently of the design: 6.8 values and 2.8 weights as integers,
// products summed exactly, then floor-divided by 2^8 and clipped to the
// 14-bit range.
package tb_ref_pkg;
  function automatic int ref_rescale(input longint a);
    longint q;
    if (a >= 0) q = a / 256;
    else        q = -((-a + 255) / 256);
    if (q > 8191)  q = 8191;
    if (q < -8192) q = -8192;
    return int'(q);
  endfunction

  function automatic int ref_relu(input int v);
    return (v < 0) ? 0 : v;
  endfunction

  // random 6.8 value in [-lim, lim]
  function automatic int rnd_val(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

  // random 2.8 weight in [-512, 511] scaled down by 'div'
  function automatic int rnd_wgt(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction
endpackage
