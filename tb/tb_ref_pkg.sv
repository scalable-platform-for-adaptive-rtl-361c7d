// tb_ref_pkg: reference arithmetic for the SPARC testbenches, written
// independently of the RTL from the formulas of the design's documentation
// (centre of gravity, lookup-table corrections, integrator law, clamp).
package tb_ref_pkg;

  function automatic longint sat(input longint v, input int bits);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  // CoG slope, pixels given as pix[y*4+x] for a 4-wide bank grid, p used.
  // Result: pixels * 2^12, truncated toward zero; zero flux gives 0.
  function automatic int cog_ref(input int unsigned pix [16], input int side_max,
                                 input int p, input bit want_y);
    longint s, c, q;
    s = 0; c = 0;
    for (int y = 0; y < p; y++)
      for (int x = 0; x < p; x++) begin
        longint v;
        v = pix[y*side_max + x];
        s += v;
        c += (want_y ? (2*y - (p-1)) : (2*x - (p-1))) * v;
      end
    if (s == 0) return 0;
    q = ((c < 0 ? -c : c) * 2048) / s;
    return int'(c < 0 ? -q : q);
  endfunction

  // Linearization (correction table indexed by the slope's top 10 bits in
  // offset binary) followed by offset subtraction.
  function automatic int linoff_ref(input int s, input int corr, input int off,
                                    input bit lin_en, input bit off_en);
    longint v;
    v = s;
    if (lin_en) v = sat(v + corr, 16);
    if (off_en) v = sat(v - off, 16);
    return int'(v);
  endfunction

  function automatic int lin_index(input int s);
    return ((s + 32768) >> 6) & 1023;
  endfunction

  // Integrator law with gain and leak in Q1.15.
  function automatic longint integ_ref(input longint phi, input longint res,
                                       input int shift, input int gain, input int leak);
    longint r, g, lk;
    r  = sat(res >>> shift, 32);
    g  = (r * gain) >>> 15;
    lk = (phi * leak) >>> 15;
    return sat(phi + g - lk, 32);
  endfunction

  function automatic int clamp_ref(input longint v, input int lo, input int hi);
    return (v > hi) ? hi : ((v < lo) ? lo : int'(v));
  endfunction

endpackage
