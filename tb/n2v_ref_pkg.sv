// n2v_ref_pkg -- reference arithmetic for the testbenches.
//
// Written independently of the RTL from the number format the design
// documents: signed 32-bit words with 16 fraction bits, products shifted
// right by 16 (floor), dot products summed at full precision and shifted
// once, reciprocal 2^32/(2^16 + s) floor-rounded and saturated to the
// largest positive word.
package n2v_ref_pkg;

  localparam int FRAC = 16;
  localparam int ONE  = 1 << FRAC;

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC);
  endfunction

  function automatic int rrecip(int s);
    longint den, q;
    den = longint'(s) + longint'(ONE);
    if (den <= 0) return 32'h7fff_ffff;
    q = (64'sd1 <<< (2*FRAC)) / den;
    if (q > 64'sh7fff_ffff) return 32'h7fff_ffff;
    return int'(q);
  endfunction

endpackage
