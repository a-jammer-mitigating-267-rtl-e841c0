// tb_model_pkg: integer reference arithmetic for the SANDMAN testbenches.
// A plain re-statement of the number formats (7 fraction bits, truncating
// right shifts, saturation to a given width) with no shared code from the
// design, so that a testbench can predict every stored value exactly.
package tb_model_pkg;
  typedef struct { longint re, im; } cx;

  function automatic longint satw(longint v, int w);
    longint hi = (64'sd1 <<< (w - 1)) - 1;
    if (v > hi) return hi;
    if (v < -hi - 1) return -hi - 1;
    return v;
  endfunction

  // (a * b) / 2^sh, optionally conjugating b, saturated to 22 bits
  function automatic cx mulq(cx a, cx b, bit conj_b, int sh = 7);
    cx r;
    longint bi = conj_b ? -b.im : b.im;
    r.re = satw((a.re * b.re - a.im * bi) >>> sh, 22);
    r.im = satw((a.re * bi + a.im * b.re) >>> sh, 22);
    return r;
  endfunction

  function automatic longint srand(int w);  // random signed w-bit value
    longint v = longint'($urandom_range(0, (1 << w) - 1));
    return v - (64'sd1 <<< (w - 1));
  endfunction
endpackage
