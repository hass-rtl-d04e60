// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the
// RTL: magnitude clipping, the dot product of one SPE vector and 16-bit requantisation.
package tb_ref_pkg;
  function automatic longint ref_clip(input longint v, input longint tau);
    longint m;
    m = (v < 0) ? -v : v;
    return (m < tau) ? 0 : v;
  endfunction

  function automatic longint ref_requant(input longint v, input int frac);
    longint s;
    s = v >>> frac;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return s;
  endfunction

  // random 16-bit value that is zero with probability pz percent and otherwise small
  function automatic shortint rnd_val(input int pz, input int range);
    int r;
    if (($urandom % 100) < pz) return 16'sd0;
    r = int'($urandom % (2 * range + 1)) - range;
    if (r == 0) r = 1;
    return shortint'(r);
  endfunction
endpackage
