// oaken_ref_pkg: reference model of the Oaken KV encoding for the testbenches.
//
// Written with plain integer arithmetic, separately from the RTL, from the
// algorithm: group split by four thresholds, group shift, per-group min/max,
// sigma = (2^m-1)/(Max-Min) in 16 fraction bits, Q = round((v-Min)*sigma),
// step = (Max-Min)/(2^m-1) in 8 fraction bits, decode Min + q*step and
// undo the shift by the sign of the result. Also a generator of test vectors
// that mixes the three groups.
package oaken_ref_pkg;

  localparam int N = 64;

  typedef struct {
    int lo_o, lo_i, hi_i, hi_o;
  } rthr_t;

  typedef struct {
    int  nib   [N];       // dense 4-bit code per position
    int  cidx  [N];       // packed COO entries: index, group (1 outer), sign
    int  cgrp  [N];
    int  csgn  [N];
    int  count;
    int  min   [3];       // per group: 0 inner, 1 middle, 2 outer
    int  step  [3];
    int  sigma [3];
    int  grp   [N];
  } renc_t;

  function automatic int group_of(int x, rthr_t t);
    if (x > t.hi_o || x < t.lo_o) return 2;
    if (x > t.hi_i || x < t.lo_i) return 1;
    return 0;
  endfunction

  function automatic int shifted(int x, rthr_t t);
    case (group_of(x, t))
      2: return (x > t.hi_o) ? x - t.hi_o : x - t.lo_o;
      1: return (x > t.hi_i) ? x - t.hi_i : x - t.lo_i;
      default: return x;
    endcase
  endfunction

  function automatic renc_t encode(int x [N], rthr_t t);
    renc_t r;
    int    mn [3], mx [3];
    bit    seen [3];
    for (int g = 0; g < 3; g++) begin mn[g] = 0; mx[g] = 0; seen[g] = 0; end
    for (int i = 0; i < N; i++) begin
      int g, v;
      g = group_of(x[i], t);
      v = shifted(x[i], t);
      r.grp[i] = g;
      if (!seen[g] || v < mn[g]) mn[g] = v;
      if (!seen[g] || v > mx[g]) mx[g] = v;
      seen[g] = 1;
    end
    for (int g = 0; g < 3; g++) begin
      longint rng, qmax;
      qmax       = (g == 1) ? 15 : 31;
      rng        = mx[g] - mn[g];
      r.min[g]   = mn[g];
      r.sigma[g] = (rng == 0) ? 0 : int'((qmax * 65536) / rng);
      r.step[g]  = int'((rng * 256) / qmax);
    end
    r.count = 0;
    for (int i = 0; i < N; i++) begin
      longint q, qmax;
      int g;
      g    = r.grp[i];
      qmax = (g == 1) ? 15 : 31;
      q    = ((longint'(shifted(x[i], t) - r.min[g]) * r.sigma[g]) + 32768) / 65536;
      if (q > qmax) q = qmax;
      r.nib[i] = int'(q) % 16;
      if (g != 1) begin
        r.cidx[r.count] = i;
        r.cgrp[r.count] = (g == 2);
        r.csgn[r.count] = int'(q) / 16;
        r.count++;
      end
    end
    for (int k = r.count; k < N; k++) begin r.cidx[k] = 0; r.cgrp[k] = 0; r.csgn[k] = 0; end
    return r;
  endfunction

  function automatic int clamp16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // decode one element given its code and group (0 inner, 1 middle, 2 outer)
  function automatic int decode(int q, int g, int mn, int step, rthr_t t);
    longint rec;
    rec = mn + ((longint'(q) * step + 128) / 256);
    case (g)
      1: return clamp16(rec >= 0 ? rec + t.hi_i : rec + t.lo_i);
      2: return clamp16(rec >= 0 ? rec + t.hi_o : rec + t.lo_o);
      default: return clamp16(rec);
    endcase
  endfunction

  // decode a whole record
  function automatic void decode_vec(renc_t r, rthr_t t, output int y [N]);
    for (int i = 0; i < N; i++) begin
      int g, q;
      g = r.grp[i];
      q = r.nib[i];
      for (int k = 0; k < r.count; k++) if (r.cidx[k] == i) q = r.nib[i] + 16 * r.csgn[k];
      y[i] = decode(q, g, r.min[g], r.step[g], t);
    end
  endfunction

  function automatic rthr_t default_thr();
    rthr_t t;
    t.lo_o = -3000; t.lo_i = -200; t.hi_i = 200; t.hi_o = 3000;
    return t;
  endfunction

  // random element: about 4% outer, 6% inner, 90% middle (the paper's ratio)
  function automatic int rand_elem(rthr_t t, int outer_pct, int inner_pct);
    int c;
    c = $urandom_range(99);
    if (c < outer_pct)
      return ($urandom_range(1)) ? t.hi_o + 1 + $urandom_range(9000) : t.lo_o - 1 - $urandom_range(9000);
    if (c < outer_pct + inner_pct)
      return t.lo_i + $urandom_range(t.hi_i - t.lo_i);
    return ($urandom_range(1)) ? t.hi_i + 1 + $urandom_range(t.hi_o - t.hi_i - 1)
                               : t.lo_i - 1 - $urandom_range(t.lo_i - 1 - t.lo_o);
  endfunction

endpackage
