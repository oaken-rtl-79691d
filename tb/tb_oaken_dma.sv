// tb_oaken_dma: end-to-end test of the DMA unit at its default parameters.
//
// Programs different thresholds for several layers (keys and values), writes
// KV vectors of several streams through the quantization engine, MMU and
// memory model, then reads them back through the dequantization engine and
// compares every restored element with the reference encode/decode of the
// same vector. A read of one stream runs while another is being written.
// Checked besides the data: the token index of every write acknowledge,
// sequential placement of each stream's dense and sparse records (a record
// either follows the previous one or starts a fresh page), the last-beat
// flag, and the read error on a token never written. Each mechanism must
// happen at least once: new dense page, new sparse page, a vector without
// outliers, a vector with inner and outer outliers, output back-pressure,
// memory back-pressure, both paths asking the MMU in the same cycle, the
// read path holding its full window of tokens in flight, and a refused read.
module tb_oaken_dma;
  import oaken_pkg::*;
  import oaken_ref_pkg::*;
  localparam int L = LANES, NV = VEC_LEN, NB = VEC_LEN / LANES;
  localparam int AW = 38, TWW = $clog2(32768 + 1);

  logic clk = 0, rst_n = 1, mmu_clear = 0;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  logic thr_we = 0; logic [6:0] thr_layer = 0; logic thr_is_v = 0; thr_t thr_data = '0;
  logic kv_in_valid = 0, kv_in_ready; data_t kv_in_data [L];
  logic [2:0] kv_in_stream = 0; logic [6:0] kv_in_layer = 0; logic kv_in_is_v = 0;
  logic wr_ack, wr_error; logic [TWW-1:0] wr_ack_token;
  logic rd_req_valid = 0, rd_req_ready; logic [2:0] rd_req_stream = 0; logic [6:0] rd_req_layer = 0;
  logic rd_req_is_v = 0; logic [TWW-1:0] rd_req_first = 0, rd_req_count = 0;
  logic kv_out_valid, kv_out_ready = 1, kv_out_last, rd_error;
  data_t kv_out_data [L];
  logic mem_wr_valid, mem_wr_ready, mem_rd_valid, mem_rd_ready, mem_rsp_valid;
  logic [AW-1:0] mem_wr_addr, mem_rd_addr; logic [7:0] mem_wr_len, mem_rd_len;
  logic [511:0] mem_wr_data, mem_rsp_data;
  logic [18:0] pages_used;

  oaken_dma dut (.*);

  oaken_mem_model #(.ADDR_W(AW), .LATENCY(8), .STALL(1'b1)) u_mem (
    .clk, .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_addr (mem_wr_addr),
    .wr_len (mem_wr_len), .wr_data (mem_wr_data), .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready),
    .rd_addr (mem_rd_addr), .rd_len (mem_rd_len), .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_dpage = 0, m_spage = 0, m_noout = 0, m_both = 0, m_outstall = 0, m_conflict = 0, m_rderr = 0, m_credit = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream -> layer / key-value
  localparam int NSTREAM = 3;
  int st_layer [NSTREAM] = '{3, 3, 79};
  bit st_isv   [NSTREAM] = '{0, 1, 0};
  int st_tokens[NSTREAM] = '{100, 140, 20};
  rthr_t lthr [80][2];
  int    yexp [NSTREAM][$];        // restored values, token-major
  int    nwritten [NSTREAM];
  longint last_d [8], last_s [8];

  function automatic rthr_t mk_thr(int l, int v);
    rthr_t t;
    t.hi_i = 150 + 3 * l + 20 * v; t.lo_i = -(140 + 2 * l);
    t.hi_o = 2500 + 10 * l;        t.lo_o = -(2600 + 7 * l + 50 * v);
    return t;
  endfunction

  // write one vector of stream s and wait for its acknowledge
  task automatic write_vec(int s, int kind);
    int x [NV], y [NV];
    renc_t r;
    rthr_t t;
    bit has_i, has_o;
    t = lthr[st_layer[s]][st_isv[s]];
    for (int i = 0; i < NV; i++)
      x[i] = (kind == 0) ? rand_elem(t, 0, 0) : (kind == 2) ? rand_elem(t, 30, 40) : rand_elem(t, 4, 6);
    r = encode(x, t);
    decode_vec(r, t, y);
    has_i = 0; has_o = 0;
    for (int k = 0; k < r.count; k++) if (r.cgrp[k] != 0) has_o = 1; else has_i = 1;
    if (r.count == 0) m_noout++;
    if (has_i && has_o) m_both++;
    for (int i = 0; i < NV; i++) yexp[s].push_back(y[i]);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      kv_in_valid = 1; kv_in_stream = 3'(s); kv_in_layer = 7'(st_layer[s]); kv_in_is_v = st_isv[s];
      for (int l = 0; l < L; l++) kv_in_data[l] = data_t'(x[b*L + l]);
      @(posedge clk);
      while (!kv_in_ready) @(posedge clk);
    end
    #1 kv_in_valid = 0;
    while (!wr_ack) @(posedge clk);
    checks++;
    if (wr_error || int'(wr_ack_token) != nwritten[s]) begin
      failures++; $display("write ack s%0d token %0d vs %0d err %0d", s, wr_ack_token, nwritten[s], wr_error);
    end
    nwritten[s]++;
    @(posedge clk);
  endtask

  // placement check on every memory write
  int wr_phase = 0;  // 0 dense next, 1 sparse next
  always @(posedge clk) begin
    if (mem_wr_valid && mem_wr_ready) begin
      int s;
      longint a;
      s = int'(dut.w_stream_q);
      a = longint'(mem_wr_addr);
      if (mem_wr_len == 8'(DENSE_REC_BYTES) && dut.w_state == dut.W_DENSE) begin
        checks++;
        if (last_d[s] >= 0 && a != last_d[s] + DENSE_REC_BYTES) begin
          if (a % 4096 != 0) begin failures++; $display("dense record misplaced %h", a); end
          else m_dpage++;
        end
        last_d[s] = a;
      end else begin
        checks++;
        if (last_s[s] >= 0 && a != last_s[s]) begin
          if (a % 4096 != 0) begin failures++; $display("sparse record misplaced %h", a); end
          else m_spage++;
        end
        last_s[s] = a + longint'(mem_wr_len);
      end
    end
    if (kv_out_valid && !kv_out_ready) m_outstall++;
    if (dut.mmu_conflict) m_conflict++;
    if (dut.lk_cnt != 0 && !dut.mi_sparse && 32'(dut.inflight) == 8) m_credit++;
    if (rd_error) m_rderr++;
  end

  // read tokens [first, first+count) of stream s and compare
  task automatic read_tokens(int s, int first, int count, bit bp);
    int nb, exp_beats;
    @(negedge clk);
    rd_req_valid = 1; rd_req_stream = 3'(s); rd_req_layer = 7'(st_layer[s]); rd_req_is_v = st_isv[s];
    rd_req_first = TWW'(first); rd_req_count = TWW'(count);
    @(posedge clk);
    while (!rd_req_ready) @(posedge clk);
    #1 rd_req_valid = 0;
    nb = 0;
    exp_beats = count * NB;
    while (nb < exp_beats) begin
      @(negedge clk);
      kv_out_ready = bp ? ($urandom_range(2) != 0) : 1'b1;
      @(posedge clk);
      if (kv_out_valid && kv_out_ready) begin
        int base;
        base = (first + nb / NB) * NV + (nb % NB) * L;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (int'(kv_out_data[l]) != yexp[s][base + l]) begin
            failures++;
            if (failures < 10) $display("s%0d tok %0d elem %0d: %0d vs %0d", s, first + nb / NB,
                                        (nb % NB) * L + l, kv_out_data[l], yexp[s][base + l]);
          end
        end
        checks++;
        if (kv_out_last != (nb == exp_beats - 1)) begin failures++; $display("last flag wrong at beat %0d", nb); end
        nb++;
      end
    end
    #1 kv_out_ready = 1;
  endtask

  initial begin
    for (int l = 0; l < L; l++) kv_in_data[l] = '0;
    for (int s = 0; s < 8; s++) begin last_d[s] = -1; last_s[s] = -1; end
    for (int s = 0; s < NSTREAM; s++) nwritten[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // thresholds for all layers
    for (int l = 0; l < 80; l++)
      for (int v = 0; v < 2; v++) begin
        lthr[l][v] = mk_thr(l, v);
        @(negedge clk);
        thr_we = 1; thr_layer = 7'(l); thr_is_v = v[0];
        thr_data.hi_o = data_t'(lthr[l][v].hi_o); thr_data.hi_i = data_t'(lthr[l][v].hi_i);
        thr_data.lo_i = data_t'(lthr[l][v].lo_i); thr_data.lo_o = data_t'(lthr[l][v].lo_o);
      end
    @(negedge clk) thr_we = 0;

    // phase 1: stream 0, 100 tokens, many outliers in the second half
    for (int t = 0; t < st_tokens[0]; t++) write_vec(0, (t % 17 == 5) ? 0 : (t >= 50) ? 2 : 1);
    // phase 2: write stream 1 while stream 0 is read back with back-pressure
    fork
      for (int t = 0; t < st_tokens[1]; t++) write_vec(1, (t % 9 == 0) ? 0 : 2);
      begin
        read_tokens(0, 0, 60, 1);
        read_tokens(0, 60, 40, 0);
      end
    join
    // phase 3: stream 2 (last layer), then read everything back
    for (int t = 0; t < st_tokens[2]; t++) write_vec(2, 1);
    read_tokens(1, 0, st_tokens[1], 1);
    read_tokens(2, 0, st_tokens[2], 0);
    read_tokens(0, 95, 5, 0);
    // a read beyond what was written is refused
    @(negedge clk);
    rd_req_valid = 1; rd_req_stream = 3'd2; rd_req_layer = 7'd79; rd_req_first = TWW'(st_tokens[2]); rd_req_count = 1;
    @(posedge clk);
    while (!rd_req_ready) @(posedge clk);
    #1 rd_req_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (m_rderr == 0) begin failures++; $display("unwritten token read not refused"); end

    $display("mechanisms: dense_page=%0d sparse_page=%0d no_outlier=%0d inner+outer=%0d out_stall=%0d mem_stall=%0d mmu_conflict=%0d rd_error=%0d read_window_full=%0d pages=%0d",
             m_dpage, m_spage, m_noout, m_both, m_outstall, u_mem.n_stall, m_conflict, m_rderr, m_credit, pages_used);
    checks++; if (m_dpage == 0)        begin failures++; $display("no dense page change"); end
    checks++; if (m_spage == 0)        begin failures++; $display("no sparse page change"); end
    checks++; if (m_noout == 0)        begin failures++; $display("no outlier-free vector"); end
    checks++; if (m_both == 0)         begin failures++; $display("no inner+outer vector"); end
    checks++; if (m_outstall == 0)     begin failures++; $display("no output stall"); end
    checks++; if (u_mem.n_stall == 0)  begin failures++; $display("no memory stall"); end
    checks++; if (m_conflict == 0)     begin failures++; $display("no MMU conflict"); end
    checks++; if (m_credit == 0)       begin failures++; $display("read window never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
