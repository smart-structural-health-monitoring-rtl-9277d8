// di_ref_pkg -- reference model of the DI map computation for testbenches.
//
// Works out one DI pixel from the baseline and damage traces with real
// arithmetic for the square root and the rate constant, following the
// fixed-point definition of the engine: positions in whole mm, distance
// d16 = floor(sqrt(256 d^2)), start sample sn = ((16 z + d16) K + 2^19) >> 20
// with K = round(65536 fs / (1000 c)), window samples past the trace end
// count as zero, DI = sum_k (sum_m bs - dm)^2 saturated to 32 bits.
// The algorithm steps follow the published Algorithm 1; the fixed-point
// rounding is this design's own definition, mirrored here.
package di_ref_pkg;

  typedef struct {
    int n_ch, trace_len, window, dx, dz, circ, ring, fs_dec, c_mps;
  } geom_t;

  // number of window samples that fell past a trace end (all calls)
  int unsigned oor_count = 0;

  function automatic longint unsigned di_pixel(geom_t g, int row, int col,
                                                ref int bs[], ref int dm[]);
    longint k, x, z, xr, d2, d16, sn, acc;
    longint delta [];
    delta = new[g.window];
    foreach (delta[i]) delta[i] = 0;
    k = longint'($floor(65536.0 * real'(g.fs_dec) / (1000.0 * real'(g.c_mps)) + 0.5));
    x = row * g.dx;
    z = col * g.dz;
    for (int m = 0; m < g.n_ch; m++) begin
      xr  = (m * g.circ) / g.n_ch;
      d2  = (x - xr) * (x - xr) + (z - g.ring) * (z - g.ring);
      d16 = longint'($floor($sqrt(256.0 * real'(d2))));
      sn  = ((16 * z + d16) * k + (1 << 19)) >>> 20;
      for (int i = 0; i < g.window; i++) begin
        if (sn + i < g.trace_len) begin
          int idx, b, d;
          idx = m * g.trace_len + int'(sn) + i;
          b = bs[idx];
          d = dm[idx];
          delta[i] = delta[i] + longint'(b - d);
        end else
          oor_count++;
      end
    end
    acc = 0;
    foreach (delta[i]) acc += delta[i] * delta[i];
    if (acc > 64'hFFFF_FFFF) acc = 64'hFFFF_FFFF;
    return acc;
  endfunction

endpackage
