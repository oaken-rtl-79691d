// oaken_pkg: types, constants and the shared quantization arithmetic of the
// Oaken KV-cache quantization datapath.
//
// A KV vector is processed in units of VEC_LEN = 64 elements (the 6-bit COO
// index of the paper addresses 64 positions), streamed LANES = 32 elements per
// beat. Every element is a 16-bit value; this design uses signed 16-bit fixed
// point (the paper's accelerator works on FP16, see the README).
//
// Encoded record of one vector (this design's layout, the paper gives none):
//   dense record  : 64 x 4-bit codes (element i in bits [4i+3:4i]) followed by
//                   a 128-bit scale block (scales_t), 48 bytes in total
//   sparse record : one 8-bit COO entry {idx[5:0], grp, sgn} per outlier, packed
//                   with no gaps, entry k in byte k
// Middle-group codes are 4-bit, inner/outer codes 5-bit (as in the paper); the
// low 4 bits of an outlier code live in the dense slot of that element and its
// top bit ("sign") in the COO entry.
package oaken_pkg;

  localparam int DATA_W       = 16;   // KV element width (paper: 16-bit)
  localparam int LANES        = 32;   // elements per beat (vector unit width)
  localparam int VEC_LEN      = 64;   // elements per quantized vector
  localparam int IDX_W        = 6;    // COO index width (paper: 6 bits)
  localparam int INLIER_BITS  = 4;    // middle group code width (paper: 4)
  localparam int OUTLIER_BITS = 5;    // inner/outer code width (paper: 5)
  localparam int COO_W        = 8;    // COO entry width (paper: 8)
  localparam int SIGMA_FRAC   = 16;   // fraction bits of sigma
  localparam int SIGMA_W      = 22;   // width of sigma
  localparam int STEP_FRAC    = 8;    // fraction bits of the dequantization step
  localparam int STEP_W       = 24;   // width of the step
  localparam int DENSE_BYTES  = VEC_LEN * INLIER_BITS / 8;   // 32
  localparam int SCALE_BYTES  = 16;
  localparam int DENSE_REC_BYTES  = DENSE_BYTES + SCALE_BYTES; // 48
  localparam int SPARSE_MAX_BYTES = VEC_LEN;                   // 64
  localparam int MEM_DATA_W   = 512;  // one record per memory transfer

  typedef logic signed [DATA_W-1:0] data_t;

  typedef enum logic [1:0] {
    GRP_INNER  = 2'd0,
    GRP_MIDDLE = 2'd1,
    GRP_OUTER  = 2'd2
  } grp_e;

  // Four offline thresholds, T_lo^o <= T_lo^i <= T_hi^i <= T_hi^o.
  typedef struct packed {
    data_t hi_o;
    data_t hi_i;
    data_t lo_i;
    data_t lo_o;
  } thr_t;

  // Per-group scale: minimum of the (shifted) group and the dequantization
  // step (Max-Min)/(2^m-1) with STEP_FRAC fraction bits.
  typedef struct packed {
    data_t             min;
    logic [STEP_W-1:0] step;
  } gscale_t;

  typedef struct packed {
    logic [7:0] pad;
    gscale_t    outer;
    gscale_t    inner;
    gscale_t    middle;
  } scales_t;

  typedef struct packed {
    logic [IDX_W-1:0] idx;
    logic             grp;   // 1: outer group, 0: inner group
    logic             sgn;   // top bit of the 5-bit outlier code
  } coo_t;

  // Q(x) = round((x - Min) * sigma), clamped to the code range.
  function automatic logic [OUTLIER_BITS-1:0] quantize(
      input data_t x, input data_t min, input logic [SIGMA_W-1:0] sigma,
      input int unsigned bits);
    logic [DATA_W:0]              diff;
    logic [DATA_W+SIGMA_W:0]      prod;
    logic [DATA_W+SIGMA_W:0]      q;
    // x >= min holds for every member of the group, so diff is non-negative
    diff = (DATA_W+1)'($signed({x[DATA_W-1], x}) - $signed({min[DATA_W-1], min}));
    prod = (DATA_W+SIGMA_W+1)'(diff) * (DATA_W+SIGMA_W+1)'(sigma);
    q    = (prod + (1 << (SIGMA_FRAC - 1))) >> SIGMA_FRAC;
    if (q > (DATA_W+SIGMA_W+1)'((1 << bits) - 1)) q = (DATA_W+SIGMA_W+1)'((1 << bits) - 1);
    return q[OUTLIER_BITS-1:0];
  endfunction

  // Inverse of quantize: Min + q * step, rounded, before the group un-shift.
  function automatic logic signed [DATA_W+1:0] dequantize(
      input logic [OUTLIER_BITS-1:0] q, input gscale_t s);
    logic [STEP_W+OUTLIER_BITS:0] prod;
    prod = (STEP_W+OUTLIER_BITS+1)'(q) * (STEP_W+OUTLIER_BITS+1)'(s.step);
    prod = (prod + (1 << (STEP_FRAC - 1))) >> STEP_FRAC;
    return $signed((DATA_W+2)'($signed(s.min))) + $signed((DATA_W+2)'(prod));
  endfunction

  // Undo the group shift: the sign of the reconstructed value selects the
  // threshold that was subtracted; the result saturates to DATA_W bits.
  function automatic data_t unshift(input logic signed [DATA_W+1:0] v,
                                    input data_t t_lo, input data_t t_hi);
    logic signed [DATA_W+2:0] r;
    r = (v >= 0) ? (DATA_W+3)'(v) + (DATA_W+3)'(t_hi) : (DATA_W+3)'(v) + (DATA_W+3)'(t_lo);
    if (r > (DATA_W+3)'(32767))  return data_t'(16'sh7fff);
    if (r < -(DATA_W+3)'(32768)) return data_t'(16'sh8000);
    return data_t'(r);
  endfunction

  function automatic data_t sat(input logic signed [DATA_W+1:0] v);
    if (v > (DATA_W+2)'(32767))  return data_t'(16'sh7fff);
    if (v < -(DATA_W+2)'(32768)) return data_t'(16'sh8000);
    return data_t'(v);
  endfunction

endpackage
