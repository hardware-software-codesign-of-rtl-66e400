// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Computes the MF-DFP results the way the number format defines them, with
// integer multiplication and floor division instead of the shifts the RTL
// uses, so that the testbenches check the RTL against an independent model.
package tb_ref_pkg;

  // Decode a 4-bit weight code {sign, k}: w = (-1)^sign * 2^-k.
  // Returns x*w scaled by 2^7 (the RTL's product alignment).
  function automatic longint ref_prod(input int x, input int code);
    longint mag = longint'(x) * (longint'(1) << 7) / (longint'(1) << (code & 7));
    return ((code & 8) != 0) ? -mag : mag;
  endfunction

  // floor(a / 2^s) for s >= 0, by division
  function automatic longint floor_div_pow2(input longint a, input int s);
    longint d = longint'(1) << s;
    longint q = a / d;
    if ((a % d != 0) && (a < 0)) q = q - 1;
    return q;
  endfunction

  // Re-align a sum with m+7 fractional bits to n fractional bits, truncate
  // toward minus infinity and saturate to 8 bits. sat is set on saturation.
  function automatic int ref_route(input longint sum, input int m, input int n, output bit sat);
    int sh = m + 7 - n;
    longint v;
    if (sh >= 0) v = (sh > 62) ? (sum < 0 ? -1 : 0) : floor_div_pow2(sum, sh);
    else         v = sum * (longint'(1) << (-sh));
    sat = 0;
    if (v > 127)  begin v = 127;  sat = 1; end
    if (v < -128) begin v = -128; sat = 1; end
    return int'(v);
  endfunction

  function automatic int ref_nl(input int v, input bit relu);
    return (relu && v < 0) ? 0 : v;
  endfunction

  function automatic int rnd_act();
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  function automatic int rnd_radix(input int lo, input int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

endpackage
