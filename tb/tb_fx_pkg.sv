// tb_fx_pkg: reference arithmetic for the testbenches.
//
// Q8.8 fixed point computed through real numbers and integer clamping, written
// apart from the design's own helpers so that the testbenches check the RTL
// against an independent model: product = floor(a*b/256), sums clamp to 16 bits.
package tb_fx_pkg;

  function automatic int clamp16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int rmul(input int a, input int b);
    return clamp16(longint'($floor(real'(a) * real'(b) / 256.0)));
  endfunction

  function automatic int radd(input int a, input int b);
    return clamp16(longint'(a) + longint'(b));
  endfunction

  function automatic int rmax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  // signed 16-bit lane k of a 128-bit word
  function automatic int lane(input logic [127:0] w, input int k);
    return int'($signed(w[16*k +: 16]));
  endfunction

  // small random Q8.8 value in [-lim, lim]
  function automatic int rnd(input int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

endpackage
