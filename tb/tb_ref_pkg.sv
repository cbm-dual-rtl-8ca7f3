// tb_ref_pkg: reference arithmetic for the testbenches, written from the
// equations rather than from the RTL: the ATMS state increment and the
// random number helpers.
package tb_ref_pkg;

  // dX = 1 + 2^e, e = sat(y) * alpha, y = floor((1-2S) Z / T0);
  // y >= 8 or e >= 8 gives 1 + 256, e < 0 gives 1.
  function automatic int ref_dx(int z, bit s, int log2t0, int alpha);
    int zs, y, e;
    zs = s ? -z : z;
    // floor division by a power of two
    if (zs >= 0) y = zs / (1 << log2t0);
    else         y = -((-zs + (1 << log2t0) - 1) / (1 << log2t0));
    if (y >= 8) return 257;
    if (y < -32) y = -32;
    e = y * alpha;
    if (e >= 8) return 257;
    if (e < 0)  return 1;
    return 1 + (1 << e);
  endfunction

  function automatic bit ref_det(int z, bit s, int log2t0);
    int zs, y;
    zs = s ? -z : z;
    if (zs >= 0) y = zs / (1 << log2t0);
    else         y = -((-zs + (1 << log2t0) - 1) / (1 << log2t0));
    return y >= 8;
  endfunction

endpackage
