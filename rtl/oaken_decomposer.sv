// oaken_decomposer: splits one beat of KV elements into the three Oaken
// quantization groups and applies the group shift.
//
// For every lane, using the four offline thresholds:
//   outer  : x < T_lo^o or x > T_hi^o      shifted by -T_hi^o / -T_lo^o
//   middle : T_lo^o <= x < T_lo^i or T_hi^i < x <= T_hi^o
//                                           shifted by -T_hi^i / -T_lo^i
//   inner  : T_lo^i <= x <= T_hi^i          not shifted
// Middle-group values go to the inlier path and inner/outer values to the
// outlier path; the other path carries zero at that lane. The group
// definitions and shifts are the paper's (Eq. 1 and the group-shift function).
// Purely combinational. The shifted values fit DATA_W bits as long as the
// thresholds are ordered T_lo^o <= T_lo^i <= 0 <= T_hi^i <= T_hi^o.
module oaken_decomposer
  import oaken_pkg::*;
#(
  parameter int unsigned LANES = oaken_pkg::LANES
) (
  input  data_t             x       [LANES],
  input  thr_t              thr,
  output grp_e              grp     [LANES],
  output data_t             inlier  [LANES],
  output data_t             outlier [LANES]
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (x[l] > thr.hi_o) begin
        grp[l]     = GRP_OUTER;
        inlier[l]  = '0;
        outlier[l] = x[l] - thr.hi_o;
      end else if (x[l] < thr.lo_o) begin
        grp[l]     = GRP_OUTER;
        inlier[l]  = '0;
        outlier[l] = x[l] - thr.lo_o;
      end else if (x[l] > thr.hi_i) begin
        grp[l]     = GRP_MIDDLE;
        inlier[l]  = x[l] - thr.hi_i;
        outlier[l] = '0;
      end else if (x[l] < thr.lo_i) begin
        grp[l]     = GRP_MIDDLE;
        inlier[l]  = x[l] - thr.lo_i;
        outlier[l] = '0;
      end else begin
        grp[l]     = GRP_INNER;
        inlier[l]  = '0;
        outlier[l] = x[l];
      end
    end
  end

endmodule
