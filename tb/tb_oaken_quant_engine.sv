// tb_oaken_quant_engine: random KV vectors with the paper's 4/90/6 group mix
// (and vectors with no outliers, only outliers, and constant values) through
// the quantization engine; dense codes, scales and the packed COO list are
// compared with the reference encoder. Output back-pressure is random, and
// the cycles from first beat to out_valid are checked against the documented
// latency.
module tb_oaken_quant_engine;
  import oaken_pkg::*;
  import oaken_ref_pkg::*;
  localparam int L = 32, NV = 64;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  thr_t thr;
  logic in_valid, in_ready, out_valid, out_ready;
  data_t in_data [L];
  logic [NV*4-1:0] out_dense;
  scales_t out_scales;
  coo_t out_coo [NV];
  logic [$clog2(NV+1)-1:0] out_count;
  int checks = 0, failures = 0;

  oaken_quant_engine #(.LANES(L), .VEC_LEN(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit chk_scale(gscale_t s, int mn, int st);
    return int'(s.min) == mn && int'(s.step) == st;
  endfunction

  initial begin
    rthr_t t;
    in_valid = 0; out_ready = 0;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    t = default_thr();
    thr.hi_o = data_t'(t.hi_o); thr.hi_i = data_t'(t.hi_i); thr.lo_i = data_t'(t.lo_i); thr.lo_o = data_t'(t.lo_o);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      int x [NV];
      renc_t r;
      int cyc;
      for (int i = 0; i < NV; i++) begin
        case (it % 25)
          0: x[i] = rand_elem(t, 0, 0);
          1: x[i] = rand_elem(t, 50, 50);
          2: x[i] = 1000;
          default: x[i] = rand_elem(t, 4, 6);
        endcase
      end
      r = encode(x, t);
      for (int b = 0; b < NV / L; b++) begin
        @(negedge clk);
        for (int l = 0; l < L; l++) in_data[l] = data_t'(x[b*L + l]);
        in_valid = 1;
        while (!in_ready) @(negedge clk);
        if (b == 0) cyc = 0;
      end
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc + 1 > NV / L + 26 + NV / L + 1) begin failures++; $display("latency %0d", cyc); end
      repeat ($urandom_range(3)) @(negedge clk);
      checks++;
      if (!chk_scale(out_scales.middle, r.min[1], r.step[1]) ||
          !chk_scale(out_scales.inner, r.min[0], r.step[0]) ||
          !chk_scale(out_scales.outer, r.min[2], r.step[2])) begin
        failures++; $display("scale mismatch it %0d", it);
      end
      for (int i = 0; i < NV; i++) begin
        checks++;
        if (int'(out_dense[i*4 +: 4]) != r.nib[i]) begin
          failures++;
          if (failures < 10) $display("it %0d nib %0d: %0d vs %0d (x=%0d)", it, i, out_dense[i*4 +: 4], r.nib[i], x[i]);
        end
      end
      checks++;
      if (int'(out_count) != r.count) begin failures++; $display("count %0d vs %0d", out_count, r.count); end
      for (int k = 0; k < r.count; k++) begin
        checks++;
        if (int'(out_coo[k].idx) != r.cidx[k] || int'(out_coo[k].grp) != r.cgrp[k] ||
            int'(out_coo[k].sgn) != r.csgn[k]) failures++;
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
