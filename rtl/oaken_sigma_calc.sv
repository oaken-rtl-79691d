// oaken_sigma_calc: computes the online scaling factor of one group.
//
//   sigma = (2^m - 1) / (Max - Min)          (Eq. 2 of the paper)
// in fixed point with SIGMA_FRAC fraction bits, using the sequential divider,
// and the dequantization step (Max - Min) / (2^m - 1) with STEP_FRAC fraction
// bits, which is what is stored with the KV cache (division by a constant).
// A `start` pulse samples min/max; `done` pulses when sigma is ready, about 25
// cycles later. A zero range gives sigma = 0 and step = 0: every member then
// codes as 0 and decodes to Min exactly. The equation is the paper's; the
// number formats and the sequential division are this design's choices.
module oaken_sigma_calc
  import oaken_pkg::*;
#(
  parameter int unsigned BITS = 4   // code width m
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  data_t               min,
  input  data_t               max,
  output logic                done,
  output logic [SIGMA_W-1:0]  sigma,
  output gscale_t             scale
);

  localparam int DW = 24;
  localparam logic [DW-1:0] QMAX = DW'((1 << BITS) - 1);

  logic [DATA_W:0]   range_d;
  logic [DW-1:0]     quo;
  logic              busy;
  logic [DATA_W:0]   range_q;
  data_t             min_q;

  assign range_d = (DATA_W+1)'($signed({max[DATA_W-1], max}) - $signed({min[DATA_W-1], min}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      range_q <= '0;
      min_q   <= '0;
    end else if (start) begin
      range_q <= range_d;
      min_q   <= min;
    end
  end

  oaken_seq_div #(.W(DW)) u_div (
    .clk, .rst_n, .start,
    .dividend (QMAX << SIGMA_FRAC),
    .divisor  (DW'(range_d)),
    .busy,
    .done,
    .quotient (quo)
  );

  assign sigma      = SIGMA_W'(quo);
  assign scale.min  = min_q;
  assign scale.step = STEP_W'(((DW+1)'(range_q) << STEP_FRAC) / (DW+1)'(QMAX));

endmodule
