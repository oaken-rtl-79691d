// tb_oaken_head_workload: one attention head through the DMA unit, at the
// DMA's default parameters, for a 1K-input / 1K-output request.
//
// A head of dimension 128 is two 64-element vectors per token for the key
// and two for the value, so it occupies four streams. For every one of
// NTOK = 2048 tokens the test writes the head's K and V (the four vectors
// of one token are written one after the other, as a decode step would), with
// elements drawn so that about 4 % fall in the outer group and 6 % in the
// inner group. It then reads each stream's whole history back in a single
// request, as an attention step over all past tokens does, and compares
// every restored element with the reference model.
// Also checked: the number of pages taken equals what the placement rule
// (records packed in order, a fresh page when one would not fit) gives for
// the observed record sizes. Reported: the storage cost in bits per element
// (dense codes, COO bytes and the scale block) and the read rate in cycles
// per output beat, which must be close to one: the lookups and memory reads
// of later tokens overlap the dequantization of earlier ones.
module tb_oaken_head_workload;
  import oaken_pkg::*;
  import oaken_ref_pkg::*;
  localparam int L = LANES, NV = VEC_LEN, NB = VEC_LEN / LANES;
  localparam int AW = 38, TWW = $clog2(32768 + 1);
  localparam int NTOK = 2048, NS = 4, LAYER = 17, PAGE = 4096;

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

  oaken_mem_model #(.ADDR_W(AW), .LATENCY(8), .STALL(1'b0)) u_mem (
    .clk, .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_addr (mem_wr_addr),
    .wr_len (mem_wr_len), .wr_data (mem_wr_data), .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready),
    .rd_addr (mem_rd_addr), .rd_len (mem_rd_len), .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  rthr_t thr_k, thr_v;
  int    yexp [NS][$];
  int    nwritten [NS];
  // placement model: bytes used in each stream's current dense / sparse page
  int    d_off [NS], s_off [NS];
  int    exp_pages = 0;
  longint n_outliers = 0;

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream s: 0,1 key halves, 2,3 value halves
  function automatic bit is_v(int s); return s >= 2; endfunction

  task automatic write_vec(int s);
    int x [NV], y [NV];
    renc_t r;
    rthr_t t;
    t = is_v(s) ? thr_v : thr_k;
    for (int i = 0; i < NV; i++) x[i] = rand_elem(t, 4, 6);
    r = encode(x, t);
    decode_vec(r, t, y);
    n_outliers += r.count;
    for (int i = 0; i < NV; i++) yexp[s].push_back(y[i]);
    if (d_off[s] < 0 || d_off[s] + DENSE_REC_BYTES > PAGE) begin exp_pages++; d_off[s] = 0; end
    d_off[s] += DENSE_REC_BYTES;
    if (r.count > 0) begin
      if (s_off[s] < 0 || s_off[s] + r.count > PAGE) begin exp_pages++; s_off[s] = 0; end
      s_off[s] += r.count;
    end
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      kv_in_valid = 1; kv_in_stream = 3'(s); kv_in_layer = 7'(LAYER); kv_in_is_v = is_v(s);
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
  endtask

  task automatic read_all(int s, output longint cycles);
    int nb;
    longint t0;
    @(negedge clk);
    rd_req_valid = 1; rd_req_stream = 3'(s); rd_req_layer = 7'(LAYER); rd_req_is_v = is_v(s);
    rd_req_first = '0; rd_req_count = TWW'(NTOK);
    @(posedge clk);
    while (!rd_req_ready) @(posedge clk);
    t0 = $time;
    #1 rd_req_valid = 0;
    nb = 0;
    while (nb < NTOK * NB) begin
      @(posedge clk);
      if (kv_out_valid && kv_out_ready) begin
        for (int l = 0; l < L; l++) begin
          checks++;
          if (int'(kv_out_data[l]) != yexp[s][nb * L + l]) begin
            failures++;
            if (failures < 10) $display("s%0d beat %0d lane %0d: %0d vs %0d", s, nb, l,
                                        kv_out_data[l], yexp[s][nb * L + l]);
          end
        end
        checks++;
        if (kv_out_last != (nb == NTOK * NB - 1)) begin failures++; $display("last flag wrong at beat %0d", nb); end
        nb++;
      end
    end
    cycles = ($time - t0) / 10;
  endtask

  initial begin
    longint cyc, total_cyc;
    real bits;
    for (int l = 0; l < L; l++) kv_in_data[l] = '0;
    for (int s = 0; s < NS; s++) begin nwritten[s] = 0; d_off[s] = -1; s_off[s] = -1; end
    thr_k = default_thr();
    thr_v.lo_o = -2800; thr_v.lo_i = -180; thr_v.hi_i = 190; thr_v.hi_o = 3100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < 2; v++) begin
      rthr_t t;
      t = v ? thr_v : thr_k;
      @(negedge clk);
      thr_we = 1; thr_layer = 7'(LAYER); thr_is_v = v[0];
      thr_data.hi_o = data_t'(t.hi_o); thr_data.hi_i = data_t'(t.hi_i);
      thr_data.lo_i = data_t'(t.lo_i); thr_data.lo_o = data_t'(t.lo_o);
    end
    @(negedge clk) thr_we = 0;

    for (int t = 0; t < NTOK; t++)
      for (int s = 0; s < NS; s++) write_vec(s);

    repeat (4) @(posedge clk);
    checks++;
    if (int'(pages_used) != exp_pages) begin
      failures++; $display("pages used %0d, placement rule gives %0d", pages_used, exp_pages);
    end

    total_cyc = 0;
    for (int s = 0; s < NS; s++) begin
      read_all(s, cyc);
      total_cyc += cyc;
    end

    bits = (real'(NS) * NTOK * (DENSE_BYTES * 8) + real'(n_outliers) * COO_W) / (real'(NS) * NTOK * NV);
    $display("workload: %0d tokens x %0d streams, outliers %0.2f %%, pages %0d",
             NTOK, NS, 100.0 * real'(n_outliers) / (real'(NS) * NTOK * NV), pages_used);
    $display("storage: %0.3f bits/element for codes + COO, %0.3f with scales",
             bits, bits + real'(SCALE_BYTES * 8) / NV);
    $display("read: %0.3f cycles per output beat", real'(total_cyc) / (real'(NS) * NTOK * NB));
    // with about 10 % outliers the codes + COO cost must sit near 4.8 bits
    checks++;
    if (bits < 4.6 || bits > 5.0) begin failures++; $display("storage cost out of range"); end
    // reads of past tokens must stream at (close to) one beat per cycle
    checks++;
    if (real'(total_cyc) > 1.05 * real'(NS) * NTOK * NB) begin
      failures++; $display("read path does not stream");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
