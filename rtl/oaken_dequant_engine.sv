// oaken_dequant_engine: restores 16-bit KV vectors from the Oaken encoding
// (dequantization engine: inlier dequantizer + outlier dequantizer).
//
// A record (dense 4-bit codes, per-group scales, packed COO entries and their
// count) is accepted with in_valid/in_ready and held in the record buffer,
// together with the threshold set of its layer. The zero-insert shifter
// expands the COO list to per-position outlier flags, group and sign bits.
// The record is then streamed out in NBEATS beats of LANES elements:
//   inlier dequantizer : positions without a COO entry; 4-bit code ->
//                        Min_m + q*step_m, then the middle-group shift
//                        (T_hi^i or T_lo^i, chosen by the sign) is undone
//   outlier dequantizer: the outlier extractor takes the 4 low bits of the
//                        code from the dense slot, the concatenator prepends
//                        the sign bit of the COO entry; the 5-bit code is
//                        decoded with the inner or outer scale and, for the
//                        outer group, the outer shift is undone
// The two paths are zero where the other one is active and are merged by OR.
// Interface: valid/ready on both sides; out_last marks the last beat of a
// vector. A new record is accepted in the cycle its predecessor's last beat
// leaves, so back-to-back records stream at one beat per cycle.
// The paper gives the blocks and their order (Fig. 9(b)); that the
// dequantizer also takes the thresholds to undo the group shift, and the
// single record buffer, are this design's choices.
module oaken_dequant_engine
  import oaken_pkg::*;
#(
  parameter int unsigned LANES   = oaken_pkg::LANES,
  parameter int unsigned VEC_LEN = oaken_pkg::VEC_LEN
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  thr_t                           thr,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [VEC_LEN*INLIER_BITS-1:0] in_dense,
  input  scales_t                        in_scales,
  input  coo_t                           in_coo [VEC_LEN],
  input  logic [$clog2(VEC_LEN+1)-1:0]   in_count,
  output logic                           out_valid,
  input  logic                           out_ready,
  output data_t                          out_data [LANES],
  output logic                           out_last
);

  localparam int unsigned NBEATS = VEC_LEN / LANES;
  localparam int unsigned BW     = (NBEATS > 1) ? $clog2(NBEATS) : 1;

  logic                           full;
  logic [BW-1:0]                  beat;
  logic [VEC_LEN*INLIER_BITS-1:0] dense_q;
  scales_t                        scales_q;
  coo_t                           coo_q [VEC_LEN];
  logic [$clog2(VEC_LEN+1)-1:0]   count_q;
  thr_t                           thr_q;

  logic out_fire, in_fire;
  assign out_valid = full;
  assign out_last  = (32'(beat) == NBEATS - 1);
  assign out_fire  = out_valid && out_ready;
  assign in_ready  = !full || (out_fire && out_last);
  assign in_fire   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= 1'b0;
      beat    <= '0;
      count_q <= '0;
    end else begin
      if (out_fire) beat <= out_last ? '0 : beat + 1'b1;
      if (in_fire) begin
        full    <= 1'b1;
        count_q <= in_count;
      end else if (out_fire && out_last) begin
        full <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) begin
      dense_q  <= in_dense;
      scales_q <= in_scales;
      coo_q    <= in_coo;
      thr_q    <= thr;
    end
  end

  // zero-insert shifter (5)
  logic is_out [VEC_LEN];
  logic o_grp  [VEC_LEN];
  logic o_sgn  [VEC_LEN];

  oaken_zero_insert_shifter #(.VEC_LEN(VEC_LEN), .DEPTH(VEC_LEN)) u_zis (
    .entries (coo_q), .count (count_q), .is_out, .grp (o_grp), .sgn (o_sgn));

  // inlier (4) and outlier (5) dequantizers, OR merge
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned             e;
      logic [INLIER_BITS-1:0]  nib;
      logic [OUTLIER_BITS-1:0] q5;
      data_t                   inl, outl;
      e    = 32'(beat) * LANES + l;
      nib  = dense_q[e * INLIER_BITS +: INLIER_BITS];
      q5   = {o_sgn[e], nib};                       // concatenator
      inl  = '0;
      outl = '0;
      if (!is_out[e]) begin
        inl = unshift(dequantize({1'b0, nib}, scales_q.middle), thr_q.lo_i, thr_q.hi_i);
      end else begin
        if (o_grp[e]) outl = unshift(dequantize(q5, scales_q.outer), thr_q.lo_o, thr_q.hi_o);
        else          outl = sat(dequantize(q5, scales_q.inner));
      end
      out_data[l] = inl | outl;
    end
  end

endmodule
