// oaken_threshold_regs: the control registers that hold the offline-profiled
// outlier thresholds.
//
// Oaken profiles four thresholds (T_lo^o, T_lo^i, T_hi^i, T_hi^o) offline for
// every decoder layer, separately for keys and values, and the quantization
// engine reads the set of the layer being processed. This block stores
// NUM_LAYERS x 2 sets (one thr_t each) written by the host, one set per write,
// and serves two independent combinational read ports: one for the write
// (quantize) path and one for the read (dequantize) path of the DMA unit.
// Writes take effect on the next clock edge; all sets reset to zero.
// Per-layer, per-K/V storage follows the paper; the register organisation,
// the two read ports and the reset value are this design's choices.
module oaken_threshold_regs
  import oaken_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 80
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host write port
  input  logic                          we,
  input  logic [$clog2(NUM_LAYERS)-1:0] w_layer,
  input  logic                          w_is_v,   // 0: key, 1: value
  input  thr_t                          w_thr,
  // read port A (quantization engine)
  input  logic [$clog2(NUM_LAYERS)-1:0] a_layer,
  input  logic                          a_is_v,
  output thr_t                          a_thr,
  // read port B (dequantization engine)
  input  logic [$clog2(NUM_LAYERS)-1:0] b_layer,
  input  logic                          b_is_v,
  output thr_t                          b_thr
);

  thr_t regs [NUM_LAYERS][2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NUM_LAYERS; l++) begin
        regs[l][0] <= '0;
        regs[l][1] <= '0;
      end
    end else if (we && (32'(w_layer) < NUM_LAYERS)) begin
      regs[w_layer][w_is_v] <= w_thr;
    end
  end

  always_comb begin
    a_thr = '0;
    b_thr = '0;
    if (32'(a_layer) < NUM_LAYERS) a_thr = regs[a_layer][a_is_v];
    if (32'(b_layer) < NUM_LAYERS) b_thr = regs[b_layer][b_is_v];
  end

endmodule
