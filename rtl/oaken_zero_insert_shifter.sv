// oaken_zero_insert_shifter: expands a packed COO list back to positions.
//
// Input: the first `count` of DEPTH packed COO entries of one vector. Output:
// for each of the VEC_LEN positions, whether an outlier sits there and its
// group and sign bits; positions without an entry read as inliers (the
// "zero insert" restores the gaps the zero-remove shifter dropped). Purely
// combinational: every valid entry is decoded onto the position its index
// names. The paper names the zero-insert shifter and its role; the
// compare-and-select structure is this design's.
module oaken_zero_insert_shifter
  import oaken_pkg::*;
#(
  parameter int unsigned VEC_LEN = oaken_pkg::VEC_LEN,
  parameter int unsigned DEPTH   = oaken_pkg::VEC_LEN
) (
  input  coo_t                       entries [DEPTH],
  input  logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       is_out  [VEC_LEN],
  output logic                       grp     [VEC_LEN],
  output logic                       sgn     [VEC_LEN]
);

  always_comb begin
    for (int p = 0; p < VEC_LEN; p++) begin
      is_out[p] = 1'b0;
      grp[p]    = 1'b0;
      sgn[p]    = 1'b0;
    end
    // each valid entry drops its flag, group and sign into its position
    for (int k = 0; k < DEPTH; k++) begin
      if (k < 32'(count)) begin
        is_out[entries[k].idx] = 1'b1;
        grp[entries[k].idx]    = entries[k].grp;
        sgn[entries[k].idx]    = entries[k].sgn;
      end
    end
  end

endmodule
