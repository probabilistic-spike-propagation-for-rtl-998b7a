// psp_ref_pkg: reference functions for the testbenches, written from the
// algorithm description rather than from the RTL: the xorshift32 sequence,
// the scaled threshold r and the piecewise-linear termination point.
package psp_ref_pkg;
  import psp_pkg::*;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    return y ^ (y << 5);
  endfunction

  // r = floor(rnd16 * mag / 2^16)
  function automatic longint scaled_r(input longint rnd16, input longint mag);
    return (rnd16 * mag) / 65536;
  endfunction

  // number of positions reached for threshold r according to the PWL model
  function automatic longint pwl_ref(input longint r, input longint n_max,
                                     input pwl_seg_t segs [NSEG]);
    int k;
    longint t;
    if (n_max == 0) return 0;
    k = 0;
    for (int s = 0; s < NSEG; s++) if (longint'(segs[s].w_k) >= r) k = s;
    t = longint'(segs[k].x_k) + 1;
    if (longint'(segs[k].w_k) >= r)
      t += ((longint'(segs[k].w_k) - r) * longint'(segs[k].slope_k)) / 65536;
    if (t > n_max) t = n_max;
    if (t < 1) t = 1;
    return t;
  endfunction

  // build a PWL model of a sorted magnitude list w[0..n-1] from 5 equal
  // position segments; slope in Q16.16 positions per magnitude unit; the last
  // segment ends at position n with magnitude w[n-1]; a flat segment gets the
  // largest slope, so any threshold below its level reaches past its end
  function automatic void pwl_fit(input int w [], input int n, output pwl_seg_t segs [NSEG]);
    for (int s = 0; s < NSEG; s++) begin
      int x0, x1;
      longint dw;
      x0 = (s * n) / NSEG;
      x1 = ((s + 1) * n) / NSEG;
      if (x0 >= n) x0 = n - 1;
      segs[s].x_k = pos_t'(x0);
      segs[s].w_k = 16'(w[x0]);
      dw = (x1 < n) ? longint'(w[x0]) - longint'(w[x1]) : longint'(w[x0]) - longint'(w[n-1]);
      if (dw <= 0) segs[s].slope_k = 32'hFFFF_FFFF;
      else         segs[s].slope_k = 32'((longint'(x1) - longint'(x0)) * 65536 / dw);
    end
  endfunction
endpackage
