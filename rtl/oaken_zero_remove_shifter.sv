// oaken_zero_remove_shifter: packs the COO entries of a vector with no gaps.
//
// Each beat brings LANES candidate COO entries and a flag per lane telling
// whether that lane holds an outlier. Flagged entries are appended, in lane
// order, behind the entries already collected for the vector; unflagged lanes
// are dropped (the "zero remove"). The lane-to-slot shift is computed from a
// running prefix count. `clear` empties the buffer; `push` appends one beat,
// visible on `entries`/`count` the next cycle. Up to DEPTH entries are held;
// as every position of a vector can be an outlier at most once, DEPTH =
// VEC_LEN never overflows. The paper names the zero-remove shifter and its
// role in the fused dense-and-sparse encoding; its insides are this design's.
module oaken_zero_remove_shifter
  import oaken_pkg::*;
#(
  parameter int unsigned LANES = oaken_pkg::LANES,
  parameter int unsigned DEPTH = oaken_pkg::VEC_LEN
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       push,
  input  coo_t                       in_entry [LANES],
  input  logic                       in_flag  [LANES],
  output coo_t                       entries  [DEPTH],
  output logic [$clog2(DEPTH+1)-1:0] count
);

  coo_t                       buf_q [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  coo_t                       buf_d [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] cnt_d;

  always_comb begin
    buf_d = buf_q;
    cnt_d = cnt_q;
    for (int l = 0; l < LANES; l++) begin
      if (in_flag[l] && (32'(cnt_d) < DEPTH)) begin
        buf_d[cnt_d[$clog2(DEPTH)-1:0]] = in_entry[l];
        cnt_d        = cnt_d + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else if (clear) begin
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else if (push) begin
      cnt_q <= cnt_d;
      buf_q <= buf_d;
    end
  end

  assign entries = buf_q;
  assign count   = cnt_q;

endmodule
