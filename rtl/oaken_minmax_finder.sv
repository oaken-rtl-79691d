// oaken_minmax_finder: running minimum and maximum of one quantization group
// over the beats of a vector.
//
// Each beat presents LANES values with a per-lane membership mask. `clear`
// restarts the search (it has priority over `en`); `en` folds one beat in.
// Outputs are registered and valid from the cycle after the last `en`. When no
// element of the group has been seen, min = max = 0 so that the range, and
// with it sigma, is zero. The paper shows a comparator pair feeding Min and
// Max registers (Fig. 9(a)); the tree of comparisons per beat is this
// design's choice.
module oaken_minmax_finder
  import oaken_pkg::*;
#(
  parameter int unsigned LANES = oaken_pkg::LANES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        en,
  input  data_t       val  [LANES],
  input  logic        mask [LANES],
  output data_t       min,
  output data_t       max,
  output logic        any
);

  data_t mn_q, mx_q;
  logic  any_q;
  data_t mn_d, mx_d;
  logic  any_d;

  always_comb begin
    mn_d  = mn_q;
    mx_d  = mx_q;
    any_d = any_q;
    for (int l = 0; l < LANES; l++) begin
      if (mask[l]) begin
        if (!any_d || val[l] < mn_d) mn_d = val[l];
        if (!any_d || val[l] > mx_d) mx_d = val[l];
        any_d = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mn_q  <= '0;
      mx_q  <= '0;
      any_q <= 1'b0;
    end else if (clear) begin
      mn_q  <= '0;
      mx_q  <= '0;
      any_q <= 1'b0;
    end else if (en) begin
      mn_q  <= mn_d;
      mx_q  <= mx_d;
      any_q <= any_d;
    end
  end

  assign min = any_q ? mn_q : '0;
  assign max = any_q ? mx_q : '0;
  assign any = any_q;

endmodule
