// oaken_quant_engine: online per-token KV quantization (Oaken quantization
// engine, decomposer + inlier quantizer + outlier quantizer).
//
// Operation on one VEC_LEN-element vector, streamed in NBEATS = VEC_LEN/LANES
// beats of LANES elements:
//   1. IN   : each beat passes the decomposer (group split and group shift)
//             and is written to the inlier and outlier buffers, while three
//             min/max finders track the middle, inner and outer groups.
//   2. SIGMA: three sigma calculators turn the group ranges into scaling
//             factors (m = 4 for middle, 5 for inner and outer).
//   3. QUANT: the buffers are read back beat by beat; the inlier quantizer
//             codes middle values to 4 bits, the outlier quantizer codes inner
//             and outer values to 5 bits. The outlier splitter sends the low 4
//             bits of an outlier code to the dense slot (merged by OR with the
//             inlier code, which is zero there) and its top bit with the index
//             and group bit into a COO entry; the zero-remove shifter packs the
//             COO entries.
//   4. OUT  : the record (dense codes, per-group scales, packed COO entries
//             and their count) is held with out_valid until out_ready.
// Interface: valid/ready on both sides. `thr` is sampled with the first beat
// of a vector. in_ready is high only in the IN phase.
// Timing: NBEATS + 26 + NBEATS cycles from first beat to out_valid; one vector
// at a time (no overlap of vectors inside the engine).
// The dataflow and bit widths follow the paper's Fig. 9(a) and Section 4;
// the phase sequencing, buffering of a whole vector and fixed-point number
// formats are this design's choices.
module oaken_quant_engine
  import oaken_pkg::*;
#(
  parameter int unsigned LANES   = oaken_pkg::LANES,
  parameter int unsigned VEC_LEN = oaken_pkg::VEC_LEN
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  thr_t                         thr,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  data_t                        in_data [LANES],
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [VEC_LEN*INLIER_BITS-1:0] out_dense,
  output scales_t                      out_scales,
  output coo_t                         out_coo [VEC_LEN],
  output logic [$clog2(VEC_LEN+1)-1:0] out_count
);

  localparam int unsigned NBEATS = VEC_LEN / LANES;
  localparam int unsigned BW     = (NBEATS > 1) ? $clog2(NBEATS) : 1;

  typedef enum logic [1:0] {S_IN, S_SIGMA, S_QUANT, S_OUT} state_e;
  state_e state;

  logic [BW-1:0] beat;
  logic          sig_start, sig_started;
  logic [2:0]    sig_done_q;
  thr_t          thr_q, thr_use;

  // ---------------- decomposer (1) ----------------
  grp_e  d_grp [LANES];
  data_t d_inl [LANES];
  data_t d_out [LANES];

  assign thr_use = (beat == '0) ? thr : thr_q;

  oaken_decomposer #(.LANES(LANES)) u_dec (
    .x (in_data), .thr (thr_use), .grp (d_grp), .inlier (d_inl), .outlier (d_out)
  );

  logic in_fire;
  assign in_ready = (state == S_IN);
  assign in_fire  = in_valid && in_ready;

  // ---------------- buffers ----------------
  data_t inl_buf [VEC_LEN];
  data_t out_buf [VEC_LEN];
  grp_e  grp_buf [VEC_LEN];

  always_ff @(posedge clk) begin
    if (in_fire) begin
      for (int l = 0; l < LANES; l++) begin
        inl_buf[32'(beat) * LANES + l] <= d_inl[l];
        out_buf[32'(beat) * LANES + l] <= d_out[l];
        grp_buf[32'(beat) * LANES + l] <= d_grp[l];
      end
    end
  end

  // ---------------- min/max finders ----------------
  logic  m_mask [LANES], i_mask [LANES], o_mask [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      m_mask[l] = (d_grp[l] == GRP_MIDDLE);
      i_mask[l] = (d_grp[l] == GRP_INNER);
      o_mask[l] = (d_grp[l] == GRP_OUTER);
    end
  end

  logic  clear;
  data_t m_min, m_max, i_min, i_max, o_min, o_max;
  logic  m_any, i_any, o_any;   // group occupancy, for observation only

  assign clear = (state == S_OUT) && out_ready;

  oaken_minmax_finder #(.LANES(LANES)) u_mm_mid (
    .clk, .rst_n, .clear, .en (in_fire), .val (d_inl), .mask (m_mask),
    .min (m_min), .max (m_max), .any (m_any));
  oaken_minmax_finder #(.LANES(LANES)) u_mm_inner (
    .clk, .rst_n, .clear, .en (in_fire), .val (d_out), .mask (i_mask),
    .min (i_min), .max (i_max), .any (i_any));
  oaken_minmax_finder #(.LANES(LANES)) u_mm_outer (
    .clk, .rst_n, .clear, .en (in_fire), .val (d_out), .mask (o_mask),
    .min (o_min), .max (o_max), .any (o_any));

  // ---------------- sigma calculators ----------------
  logic [SIGMA_W-1:0] sig_m, sig_i, sig_o;
  gscale_t            sc_m, sc_i, sc_o;
  logic               dn_m, dn_i, dn_o;

  assign sig_start = (state == S_SIGMA) && !sig_started;

  oaken_sigma_calc #(.BITS(INLIER_BITS)) u_sig_mid (
    .clk, .rst_n, .start (sig_start), .min (m_min), .max (m_max),
    .done (dn_m), .sigma (sig_m), .scale (sc_m));
  oaken_sigma_calc #(.BITS(OUTLIER_BITS)) u_sig_inner (
    .clk, .rst_n, .start (sig_start), .min (i_min), .max (i_max),
    .done (dn_i), .sigma (sig_i), .scale (sc_i));
  oaken_sigma_calc #(.BITS(OUTLIER_BITS)) u_sig_outer (
    .clk, .rst_n, .start (sig_start), .min (o_min), .max (o_max),
    .done (dn_o), .sigma (sig_o), .scale (sc_o));

  // ---------------- quantizers, outlier splitter ----------------
  logic [INLIER_BITS-1:0]  q_nib   [LANES];
  coo_t                    q_coo   [LANES];
  logic                    q_flag  [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int unsigned             e;
      logic [OUTLIER_BITS-1:0] qi, qo;
      e  = 32'(beat) * LANES + l;
      qi = '0;
      qo = '0;
      if (grp_buf[e] == GRP_MIDDLE) qi = quantize(inl_buf[e], sc_m.min, sig_m, INLIER_BITS);
      if (grp_buf[e] == GRP_INNER)  qo = quantize(out_buf[e], sc_i.min, sig_i, OUTLIER_BITS);
      if (grp_buf[e] == GRP_OUTER)  qo = quantize(out_buf[e], sc_o.min, sig_o, OUTLIER_BITS);
      // OR merge of the inlier code and the low bits of the outlier code
      q_nib[l]     = qi[INLIER_BITS-1:0] | qo[INLIER_BITS-1:0];
      q_coo[l].idx = IDX_W'(e);
      q_coo[l].grp = (grp_buf[e] == GRP_OUTER);
      q_coo[l].sgn = qo[OUTLIER_BITS-1];
      q_flag[l]    = (grp_buf[e] != GRP_MIDDLE);
    end
  end

  logic q_push;
  assign q_push = (state == S_QUANT);

  oaken_zero_remove_shifter #(.LANES(LANES), .DEPTH(VEC_LEN)) u_zrs (
    .clk, .rst_n, .clear, .push (q_push), .in_entry (q_coo), .in_flag (q_flag),
    .entries (out_coo), .count (out_count));

  always_ff @(posedge clk) begin
    if (q_push) begin
      for (int l = 0; l < LANES; l++)
        out_dense[(32'(beat) * LANES + l) * INLIER_BITS +: INLIER_BITS] <= q_nib[l];
    end
  end

  assign out_scales.pad    = '0;
  assign out_scales.middle = sc_m;
  assign out_scales.inner  = sc_i;
  assign out_scales.outer  = sc_o;
  assign out_valid         = (state == S_OUT);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IN;
      beat        <= '0;
      sig_started <= 1'b0;
      sig_done_q  <= '0;
      thr_q       <= '0;
    end else begin
      unique case (state)
        S_IN: if (in_fire) begin
          if (beat == '0) thr_q <= thr;
          if (32'(beat) == NBEATS - 1) begin
            beat  <= '0;
            state <= S_SIGMA;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_SIGMA: begin
          sig_started <= 1'b1;
          sig_done_q  <= sig_done_q | {dn_o, dn_i, dn_m};
          if (&(sig_done_q | {dn_o, dn_i, dn_m})) begin
            sig_started <= 1'b0;
            sig_done_q  <= '0;
            state       <= S_QUANT;
          end
        end
        S_QUANT: begin
          if (32'(beat) == NBEATS - 1) begin
            beat  <= '0;
            state <= S_OUT;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_OUT: if (out_ready) state <= S_IN;
        default: state <= S_IN;
      endcase
    end
  end


endmodule
