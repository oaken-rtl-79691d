// tb_oaken_dequant_engine: records produced by the reference encoder from
// random KV vectors are fed back to back; each restored element is compared
// with the reference decoder. Checks that with out_ready held high a stream
// of records leaves at one beat per cycle, and that random back-pressure
// loses nothing.
module tb_oaken_dequant_engine;
  import oaken_pkg::*;
  import oaken_ref_pkg::*;
  localparam int L = 32, NV = 64, NREC = 400;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  thr_t thr;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [NV*4-1:0] in_dense;
  scales_t in_scales;
  coo_t in_coo [NV];
  logic [$clog2(NV+1)-1:0] in_count;
  data_t out_data [L];
  int checks = 0, failures = 0;
  rthr_t t;
  int exp_q [$];
  int beats = 0, bp_phase = 0, first_cyc = -1, last_cyc = 0, cyc = 0;

  oaken_dequant_engine #(.LANES(L), .VEC_LEN(NV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic gscale_t mk(int mn, int st);
    gscale_t g;
    g.min = data_t'(mn); g.step = STEP_W'(st);
    return g;
  endfunction

  // producer
  initial begin
    in_valid = 0; in_dense = '0; in_scales = '0; in_count = '0;
    for (int k = 0; k < NV; k++) in_coo[k] = '0;
    t = default_thr();
    thr.hi_o = data_t'(t.hi_o); thr.hi_i = data_t'(t.hi_i); thr.lo_i = data_t'(t.lo_i); thr.lo_o = data_t'(t.lo_o);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NREC; n++) begin
      int x [NV], y [NV];
      renc_t r;
      for (int i = 0; i < NV; i++) x[i] = rand_elem(t, (n % 10 == 0) ? 0 : 4, 6);
      r = encode(x, t);
      decode_vec(r, t, y);
      for (int i = 0; i < NV; i++) exp_q.push_back(y[i]);
      @(negedge clk);
      for (int i = 0; i < NV; i++) in_dense[i*4 +: 4] = 4'(r.nib[i]);
      in_scales.pad = '0;
      in_scales.inner = mk(r.min[0], r.step[0]);
      in_scales.middle = mk(r.min[1], r.step[1]);
      in_scales.outer = mk(r.min[2], r.step[2]);
      for (int k = 0; k < NV; k++) begin
        in_coo[k].idx = IDX_W'(r.cidx[k]); in_coo[k].grp = r.cgrp[k][0]; in_coo[k].sgn = r.csgn[k][0];
      end
      in_count = ($clog2(NV+1))'(r.count);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
  end

  // consumer: back-pressure only in the second half
  always @(negedge clk) out_ready = (beats < NREC) ? 1'b1 : ($urandom_range(3) != 0);

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready) begin
      if (beats == 0) first_cyc = cyc;
      if (beats == 99) last_cyc = cyc;
      for (int l = 0; l < L; l++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_data[l]) != e) begin
          failures++;
          if (failures < 10) $display("beat %0d lane %0d: %0d vs %0d", beats, l, out_data[l], e);
        end
      end
      checks++;
      if (out_last != (beats % (NV / L) == NV / L - 1)) failures++;
      beats++;
      if (beats == NREC * NV / L) begin
        checks++;
        // 100 beats (50 records) with out_ready high: the engine itself may
        // not add more than one bubble per record over the producer's rate
        if (last_cyc - first_cyc > 99 + 50 * 2) begin failures++; $display("rate %0d cycles", last_cyc - first_cyc); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
