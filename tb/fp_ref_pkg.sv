// fp_ref_pkg: reference FP32 helpers for the testbenches, computed with the
// simulator's double-precision reals rather than with the RTL.
// f2r() widens an FP32 pattern to a real (zero/subnormal patterns read as 0);
// r2f() rounds a real to FP32, nearest even, flushing results below the normal
// range to zero like the RTL does.
// The models follow the arithmetic the paper describes (FP32 MAC, 3-xorshift WR, CSB block walk); the rounding, the xorshift variant and the cycle formula are this design's own choices, mirrored here.
package fp_ref_pkg;
  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[62:0] == 63'd0 || e <= 0) return {d[63], 31'd0};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], e[7:0], m[22:0]};
  endfunction

  // random normal FP32 value with exponent field in [e0, e0+span)
  function automatic logic [31:0] rnd_fp(int e0, int span);
    logic [31:0] r;
    r = $urandom;
    return {r[31], 8'(e0 + int'($urandom % span)), r[22:0]};
  endfunction

  // Reference of the weight recomputation unit: three xorshift32 generators
  // (three rounds each, shifts 13/17/5) on seed+index, top 16 bits summed,
  // centred by 3*2^15, times the scale, read with frac fraction bits.
  function automatic logic [31:0] xs_ref(logic [31:0] seed, logic [31:0] idx);
    logic [31:0] x;
    x = seed + idx;
    if (x == 0) x = 1;
    for (int r = 0; r < 3; r++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
    end
    return x;
  endfunction

  function automatic logic [31:0] wr_ref(logic [2:0][31:0] seeds, logic [31:0] idx,
                                         int scale, int frac = 32);
    longint g;
    g = 0;
    for (int i = 0; i < 3; i++) g += longint'(xs_ref(seeds[i], idx) >> 16);
    g -= 98304;
    return r2f(real'(g * scale) * (2.0 ** (-frac)));
  endfunction

  // acc + w*x with the product and the sum each rounded to FP32
  function automatic logic [31:0] mac_ref(logic [31:0] acc, logic [31:0] w, logic [31:0] x);
    return r2f(f2r(acc) + f2r(r2f(f2r(w) * f2r(x))));
  endfunction

  // Reference partial sum of one CSB block as the PE computes it.
  // phase: 0 forward, 1 backward (rotated activations), 2 weight update.
  // visited returns the number of MACs the block costs.
  function automatic logic [31:0] block_ref(logic [15:0] mask, logic [31:0] vals[16],
      logic [31:0] acts[16], logic [31:0] wbase, int phase, int len, int scale,
      logic [2:0][31:0] seeds, output int visited);
    logic [31:0] acc, w, g, x;
    int k;
    bit use_wr;
    use_wr = (phase != 2) && (scale != 0);
    acc = 0; k = 0; visited = 0;
    for (int j = 0; j < len; j++) begin
      if (!use_wr && !mask[j]) continue;
      g = mask[j] ? vals[k] : 32'd0;
      if (mask[j]) k++;
      w = use_wr ? r2f(f2r(g) + f2r(wr_ref(seeds, wbase + j, scale))) : g;
      x = (phase == 1) ? acts[len - 1 - j] : acts[j];
      acc = (visited == 0) ? r2f(f2r(w) * f2r(x)) : mac_ref(acc, w, x);
      visited++;
    end
    return acc;
  endfunction
endpackage
