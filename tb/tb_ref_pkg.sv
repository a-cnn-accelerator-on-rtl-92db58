// tb_ref_pkg: reference arithmetic for the testbenches, written directly
// from the number format (16-bit values with 8 fractional bits, sums shifted
// right by 8 with rounding toward minus infinity, saturation to 16 bits).
package tb_ref_pkg;
  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // Normalization then activation (0 none, 1 ReLU, 2 ReLU6).
  function automatic int post(int v, bit norm_en, int sc, int sh, int relu);
    int r;
    r = norm_en ? sat((longint'(v) * longint'(sc) >>> 8) + longint'(sh)) : v;
    if (relu != 0 && r < 0) r = 0;
    if (relu == 2 && r > 1536) r = 1536;
    return r;
  endfunction

  // Pooling of a run of values: 0 none (first value), 1 average, 2 max.
  function automatic int pool_run(int vals [$], int mode, int recip);
    longint acc;
    int mx;
    acc = 0;
    mx = vals[0];
    foreach (vals[i]) begin
      acc += longint'(vals[i]) * longint'(recip);
      if (vals[i] > mx) mx = vals[i];
    end
    if (mode == 1) return sat(acc >>> 15);
    if (mode == 2) return mx;
    return vals[0];
  endfunction
endpackage
