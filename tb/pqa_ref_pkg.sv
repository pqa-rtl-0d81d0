// pqa_ref_pkg: reference arithmetic for the PQA testbenches, written
// independently of the RTL (plain integer arithmetic on longint).
package pqa_ref_pkg;
  function automatic longint clamp(input longint v, input longint lo, input longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction
  // floor division by 2^f for signed values
  function automatic longint floor_shift(input longint v, input int f);
    longint d;
    d = longint'(1) << f;
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction
  // q = clamp(floor(x*mult/2^frac) + zp, 0, 2^bits-1)
  function automatic longint quant(input longint x, input longint mult, input longint zp,
                                   input int bits, input int frac = 8);
    return clamp(floor_shift(x * mult, frac) + zp, 0, (longint'(1) << bits) - 1);
  endfunction
  // y = clamp(floor((q-zp)*scale/2^frac), -2^(w-1), 2^(w-1)-1)
  function automatic longint dequant(input longint q, input longint scale, input longint zp,
                                     input int w = 16, input int frac = 8);
    return clamp(floor_shift((q - zp) * scale, frac), -(longint'(1) << (w-1)),
                 (longint'(1) << (w-1)) - 1);
  endfunction
  function automatic longint sat(input longint v, input int w = 16);
    return clamp(v, -(longint'(1) << (w-1)), (longint'(1) << (w-1)) - 1);
  endfunction
endpackage
