// oaken_dma: the KV-cache path of the DMA unit of one Oaken compute core,
// with the quantization engine, dequantization engine, memory management
// unit and the threshold control registers.
//
// Write path (KV of the current token from the matrix processing unit to
// device memory): one VEC_LEN-element vector arrives as NBEATS beats on kv_in
// with its stream, layer and key/value tag (sampled on the first beat). The
// quantization engine encodes it with the thresholds of that layer; the MMU
// allocates the next token slot of the stream and returns the addresses of
// the dense and sparse records; the DMA then writes the 48-byte dense record
// (codes + scales) and, if the vector has outliers, the packed COO record
// (one byte per outlier). wr_ack pulses with the token index when both writes
// have been accepted (wr_error set if the MMU refused).
//
// Read path (past KV cache from device memory to the processing unit): a
// request names a stream, its layer and K/V tag, a first token and a count.
// The read path is a pipeline of three stages joined by FIFOs, so that the
// records of successive tokens, which the MMU placed back to back, are
// requested in an unbroken sequence of consecutive addresses:
//   lookup  : one MMU lookup per token (every second cycle at most);
//   issue   : a dense read request and, if the token has outliers, a sparse
//             one; at most RD_DEPTH tokens may be between this stage and the
//             dequantization engine;
//   collect : the in-order responses are assembled into a record FIFO of
//             RD_DEPTH entries, which therefore never overflows although the
//             memory response channel cannot be stalled.
// The dequantization engine streams each record out on kv_out. With a memory
// latency of a few cycles this sustains one output beat per cycle.
// kv_out_last marks the last beat of the request. A lookup of a token never
// written raises rd_error for one cycle; the tokens before it are still
// delivered, the rest of the request is dropped (kv_out_last is not given).
//
// Memory port: one request per record (address in bytes, length in bytes,
// up to 64 bytes in a 512-bit word, byte k in bits [8k+7:8k]); read data
// returns in request order on mem_rsp_valid, without back-pressure.
// The MMU is shared by both paths; a write-path command wins when both
// request in the same cycle.
//
// The set of blocks, their placement in the DMA and the dataflow follow the
// paper (Fig. 8, Fig. 9, Fig. 10); the port protocols, the sequencing, the
// RD_DEPTH read window and the record layout in memory are this design's
// choices.
module oaken_dma
  import oaken_pkg::*;
#(
  parameter int unsigned     NUM_LAYERS  = 80,
  parameter int unsigned     NUM_STREAMS = 8,
  parameter int unsigned     MAX_SEQ     = 32768,
  parameter int unsigned     PAGE_BYTES  = 4096,
  parameter int unsigned     NUM_PAGES   = 262144,
  parameter int unsigned     ADDR_W      = 38,
  parameter longint unsigned BASE_ADDR   = 0,
  parameter int unsigned     RD_DEPTH    = 8,
  localparam int unsigned    SW = (NUM_STREAMS > 1) ? $clog2(NUM_STREAMS) : 1,
  localparam int unsigned    TW = $clog2(MAX_SEQ + 1),
  localparam int unsigned    YW = $clog2(NUM_LAYERS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mmu_clear,
  // threshold registers (host)
  input  logic                  thr_we,
  input  logic [YW-1:0]         thr_layer,
  input  logic                  thr_is_v,
  input  thr_t                  thr_data,
  // write path: KV from the processing unit
  input  logic                  kv_in_valid,
  output logic                  kv_in_ready,
  input  data_t                 kv_in_data [LANES],
  input  logic [SW-1:0]         kv_in_stream,
  input  logic [YW-1:0]         kv_in_layer,
  input  logic                  kv_in_is_v,
  output logic                  wr_ack,
  output logic [TW-1:0]         wr_ack_token,
  output logic                  wr_error,
  // read path: request and restored KV to the processing unit
  input  logic                  rd_req_valid,
  output logic                  rd_req_ready,
  input  logic [SW-1:0]         rd_req_stream,
  input  logic [YW-1:0]         rd_req_layer,
  input  logic                  rd_req_is_v,
  input  logic [TW-1:0]         rd_req_first,
  input  logic [TW-1:0]         rd_req_count,
  output logic                  kv_out_valid,
  input  logic                  kv_out_ready,
  output data_t                 kv_out_data [LANES],
  output logic                  kv_out_last,
  output logic                  rd_error,
  // device memory
  output logic                  mem_wr_valid,
  input  logic                  mem_wr_ready,
  output logic [ADDR_W-1:0]     mem_wr_addr,
  output logic [7:0]            mem_wr_len,
  output logic [MEM_DATA_W-1:0] mem_wr_data,
  output logic                  mem_rd_valid,
  input  logic                  mem_rd_ready,
  output logic [ADDR_W-1:0]     mem_rd_addr,
  output logic [7:0]            mem_rd_len,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_DATA_W-1:0] mem_rsp_data,
  // status
  output logic [$clog2(NUM_PAGES+1)-1:0] pages_used
);

  localparam int unsigned NBEATS = VEC_LEN / LANES;
  localparam int unsigned BW     = (NBEATS > 1) ? $clog2(NBEATS) : 1;
  localparam int unsigned CW     = $clog2(VEC_LEN + 1);

  // ---------------- threshold registers ----------------
  thr_t          w_thr, r_thr;
  logic [YW-1:0] r_layer_q;
  logic          r_isv_q;

  oaken_threshold_regs #(.NUM_LAYERS(NUM_LAYERS)) u_thr (
    .clk, .rst_n, .we (thr_we), .w_layer (thr_layer), .w_is_v (thr_is_v), .w_thr (thr_data),
    .a_layer (kv_in_layer), .a_is_v (kv_in_is_v), .a_thr (w_thr),
    .b_layer (r_layer_q), .b_is_v (r_isv_q), .b_thr (r_thr));

  // ---------------- quantization engine ----------------
  logic                           q_out_valid, q_out_ready;
  logic [VEC_LEN*INLIER_BITS-1:0] q_dense;
  scales_t                        q_scales;
  coo_t                           q_coo [VEC_LEN];
  logic [CW-1:0]                  q_count;

  oaken_quant_engine #(.LANES(LANES), .VEC_LEN(VEC_LEN)) u_qe (
    .clk, .rst_n, .thr (w_thr),
    .in_valid (kv_in_valid), .in_ready (kv_in_ready), .in_data (kv_in_data),
    .out_valid (q_out_valid), .out_ready (q_out_ready),
    .out_dense (q_dense), .out_scales (q_scales), .out_coo (q_coo), .out_count (q_count));

  logic [BW-1:0] w_beat;
  logic [SW-1:0] w_stream_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_beat     <= '0;
      w_stream_q <= '0;
    end else if (kv_in_valid && kv_in_ready) begin
      if (w_beat == '0) w_stream_q <= kv_in_stream;
      w_beat <= (32'(w_beat) == NBEATS - 1) ? '0 : w_beat + 1'b1;
    end
  end

  // ---------------- MMU and its arbitration ----------------
  logic              m_cmd_valid, m_cmd_ready, m_cmd_lookup;
  logic [SW-1:0]     m_cmd_stream;
  logic [TW-1:0]     m_cmd_token;
  logic [7:0]        m_cmd_sbytes;
  logic              m_rsp_valid, m_rsp_ready, m_rsp_error;
  logic [TW-1:0]     m_rsp_token;
  logic [ADDR_W-1:0] m_rsp_daddr, m_rsp_saddr;
  logic [7:0]        m_rsp_dsize, m_rsp_ssize;
  logic              m_new_page;

  logic w_mreq, r_mreq, owner_w, owner_w_q, mmu_conflict;
  logic [SW-1:0] r_stream_q;
  logic [TW-1:0] r_tok_q;

  assign owner_w      = w_mreq;                // write path has priority
  assign m_cmd_valid  = w_mreq || r_mreq;
  assign m_cmd_lookup = !owner_w;
  assign m_cmd_stream = owner_w ? w_stream_q : r_stream_q;
  assign m_cmd_token  = r_tok_q;
  assign m_cmd_sbytes = 8'(q_count);
  assign mmu_conflict = w_mreq && r_mreq && m_cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          owner_w_q <= 1'b0;
    else if (m_cmd_valid && m_cmd_ready) owner_w_q <= owner_w;
  end

  oaken_mmu #(
    .NUM_STREAMS (NUM_STREAMS), .MAX_SEQ (MAX_SEQ), .PAGE_BYTES (PAGE_BYTES),
    .NUM_PAGES (NUM_PAGES), .ADDR_W (ADDR_W), .BASE_ADDR (BASE_ADDR)
  ) u_mmu (
    .clk, .rst_n, .clear (mmu_clear),
    .cmd_valid (m_cmd_valid), .cmd_ready (m_cmd_ready), .cmd_lookup (m_cmd_lookup),
    .cmd_stream (m_cmd_stream), .cmd_token (m_cmd_token), .cmd_sparse_bytes (m_cmd_sbytes),
    .rsp_valid (m_rsp_valid), .rsp_ready (m_rsp_ready), .rsp_error (m_rsp_error),
    .rsp_token (m_rsp_token), .rsp_dense_addr (m_rsp_daddr), .rsp_dense_size (m_rsp_dsize),
    .rsp_sparse_addr (m_rsp_saddr), .rsp_sparse_size (m_rsp_ssize),
    .pages_used, .new_page (m_new_page));

  // ---------------- write sequencer ----------------
  typedef enum logic [2:0] {W_IDLE, W_ALLOC, W_RSP, W_DENSE, W_SPARSE, W_DONE} wstate_e;
  wstate_e           w_state;
  logic [ADDR_W-1:0] w_daddr, w_saddr;
  logic [7:0]        w_ssize;
  logic [TW-1:0]     w_tok;
  logic              w_err;
  logic              w_rsp, r_rsp;

  assign w_mreq = (w_state == W_ALLOC);
  assign w_rsp  = m_rsp_valid && owner_w_q;
  assign r_rsp  = m_rsp_valid && !owner_w_q;

  logic [MEM_DATA_W-1:0] w_sparse_word;
  always_comb begin
    w_sparse_word = '0;
    for (int k = 0; k < VEC_LEN; k++) w_sparse_word[k*COO_W +: COO_W] = q_coo[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_state <= W_IDLE;
      w_daddr <= '0;
      w_saddr <= '0;
      w_ssize <= '0;
      w_tok   <= '0;
      w_err   <= 1'b0;
    end else begin
      unique case (w_state)
        W_IDLE:   if (q_out_valid) w_state <= W_ALLOC;
        W_ALLOC:  if (m_cmd_ready) w_state <= W_RSP;
        W_RSP:    if (w_rsp) begin
          w_daddr <= m_rsp_daddr;
          w_saddr <= m_rsp_saddr;
          w_ssize <= m_rsp_ssize;
          w_tok   <= m_rsp_token;
          w_err   <= m_rsp_error;
          w_state <= m_rsp_error ? W_DONE : W_DENSE;
        end
        W_DENSE:  if (mem_wr_ready) w_state <= (w_ssize != 0) ? W_SPARSE : W_DONE;
        W_SPARSE: if (mem_wr_ready) w_state <= W_DONE;
        W_DONE:   w_state <= W_IDLE;
        default:  w_state <= W_IDLE;
      endcase
    end
  end

  assign q_out_ready  = (w_state == W_DONE);
  assign wr_ack       = (w_state == W_DONE);
  assign wr_ack_token = w_tok;
  assign wr_error     = (w_state == W_DONE) && w_err;
  assign mem_wr_valid = (w_state == W_DENSE) || (w_state == W_SPARSE);
  assign mem_wr_addr  = (w_state == W_SPARSE) ? w_saddr : w_daddr;
  assign mem_wr_len   = (w_state == W_SPARSE) ? w_ssize : 8'(DENSE_REC_BYTES);
  assign mem_wr_data  = (w_state == W_SPARSE) ? w_sparse_word
                                              : MEM_DATA_W'({q_scales, q_dense});

  // ---------------- read sequencer ----------------
  // Three decoupled stages so that table lookups, memory reads and
  // dequantization of successive tokens overlap:
  //   lookup  : one MMU lookup per token, entries into the lookup FIFO
  //   issue   : dense then (if any) sparse read request per token, at most
  //             RD_DEPTH tokens between request and dequantization
  //   collect : responses, in order, assembled into the record FIFO, which
  //             always has room for every token in flight (the memory
  //             response channel has no back-pressure)
  localparam int unsigned LK_DEPTH = 4;
  localparam int unsigned LKW      = $clog2(LK_DEPTH);
  localparam int unsigned RFW      = $clog2(RD_DEPTH);

  typedef enum logic [1:0] {R_IDLE, R_RUN, R_DRAIN} rstate_e;
  rstate_e r_state;

  typedef struct packed {
    logic [ADDR_W-1:0] daddr;
    logic [ADDR_W-1:0] saddr;
    logic [7:0]        ssize;
  } lk_t;

  logic [TW-1:0]  r_look_left, r_count_q, r_vec_out;
  logic           r_err, lk_pend;
  lk_t            lk_q [LK_DEPTH];
  logic [LKW-1:0] lk_wp, lk_rp;
  logic [LKW:0]   lk_cnt;
  logic           lk_push, lk_pop;

  logic           mi_sparse;        // sparse request of the head entry next
  logic [RFW:0]   inflight;         // tokens requested and not yet dequantized
  logic           mi_fire, mi_new;  // any read request / a token's first one

  logic [7:0]     if_size [RD_DEPTH];   // sparse size of each token in flight
  logic [RFW-1:0] if_wp, if_rp;
  logic           rc_sparse;            // next response is a sparse record
  logic           rc_commit;

  logic [VEC_LEN*INLIER_BITS-1:0] rf_dense  [RD_DEPTH];
  scales_t                        rf_scales [RD_DEPTH];
  coo_t                           rf_coo    [RD_DEPTH][VEC_LEN];
  logic [7:0]                     rf_size   [RD_DEPTH];
  logic [RFW-1:0]                 rf_wp, rf_rp;
  logic [RFW:0]                   rf_cnt;

  logic dq_in_valid, dq_in_ready, dq_out_valid, dq_out_last, dq_fire;

  assign rd_req_ready = (r_state == R_IDLE);
  assign r_mreq       = (r_state == R_RUN) && (r_look_left != 0) && !lk_pend &&
                        (32'(lk_cnt) < LK_DEPTH);
  assign m_rsp_ready  = owner_w_q ? (w_state == W_RSP) : 1'b1;
  assign lk_push      = r_rsp && !m_rsp_error;
  assign lk_pop       = mi_fire && (mi_sparse || lk_q[lk_rp].ssize == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_state     <= R_IDLE;
      r_look_left <= '0;
      r_count_q   <= '0;
      r_stream_q  <= '0;
      r_layer_q   <= '0;
      r_isv_q     <= 1'b0;
      r_tok_q     <= '0;
      r_err       <= 1'b0;
      lk_pend     <= 1'b0;
    end else begin
      r_err <= 1'b0;
      unique case (r_state)
        R_IDLE: if (rd_req_valid && rd_req_count != 0) begin
          r_stream_q  <= rd_req_stream;
          r_layer_q   <= rd_req_layer;
          r_isv_q     <= rd_req_is_v;
          r_tok_q     <= rd_req_first;
          r_look_left <= rd_req_count;
          r_count_q   <= rd_req_count;
          r_state     <= R_RUN;
        end
        R_RUN: begin
          if (r_mreq && m_cmd_ready && !w_mreq) begin
            lk_pend     <= 1'b1;
            r_tok_q     <= r_tok_q + 1'b1;
            r_look_left <= r_look_left - 1'b1;
          end
          if (r_rsp) begin
            lk_pend <= 1'b0;
            if (m_rsp_error) begin   // stop at the first token not written
              r_err       <= 1'b1;
              r_look_left <= '0;
            end
          end
          if (r_look_left == 0 && !lk_pend) r_state <= R_DRAIN;
        end
        R_DRAIN: if (lk_cnt == 0 && inflight == 0 && !dq_out_valid) r_state <= R_IDLE;
        default: r_state <= R_IDLE;
      endcase
    end
  end

  // lookup FIFO
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_wp  <= '0;
      lk_rp  <= '0;
      lk_cnt <= '0;
    end else begin
      if (lk_push) lk_wp <= lk_wp + 1'b1;
      if (lk_pop)  lk_rp <= lk_rp + 1'b1;
      lk_cnt <= lk_cnt + (LKW+1)'(lk_push) - (LKW+1)'(lk_pop);
    end
  end
  always_ff @(posedge clk) begin
    if (lk_push) lk_q[lk_wp] <= '{daddr: m_rsp_daddr, saddr: m_rsp_saddr, ssize: m_rsp_ssize};
  end

  // issue stage
  assign mem_rd_valid = (lk_cnt != 0) && (mi_sparse || 32'(inflight) < RD_DEPTH);
  assign mem_rd_addr  = mi_sparse ? lk_q[lk_rp].saddr : lk_q[lk_rp].daddr;
  assign mem_rd_len   = mi_sparse ? lk_q[lk_rp].ssize : 8'(DENSE_REC_BYTES);
  assign mi_fire      = mem_rd_valid && mem_rd_ready;
  assign mi_new       = mi_fire && !mi_sparse;
  assign dq_fire      = dq_in_valid && dq_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mi_sparse <= 1'b0;
      inflight  <= '0;
      if_wp     <= '0;
    end else begin
      if (mi_fire) mi_sparse <= !mi_sparse && (lk_q[lk_rp].ssize != 0);
      if (mi_new)  if_wp <= if_wp + 1'b1;
      inflight <= inflight + (RFW+1)'(mi_new) - (RFW+1)'(dq_fire);
    end
  end
  always_ff @(posedge clk) begin
    if (mi_new) if_size[if_wp] <= lk_q[lk_rp].ssize;
  end

  // collect stage and record FIFO
  assign rc_commit = mem_rsp_valid && (rc_sparse || if_size[if_rp] == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc_sparse <= 1'b0;
      if_rp     <= '0;
      rf_wp     <= '0;
      rf_rp     <= '0;
      rf_cnt    <= '0;
    end else begin
      if (mem_rsp_valid) rc_sparse <= !rc_sparse && (if_size[if_rp] != 0);
      if (rc_commit) begin
        if_rp <= if_rp + 1'b1;
        rf_wp <= rf_wp + 1'b1;
      end
      if (dq_fire) rf_rp <= rf_rp + 1'b1;
      rf_cnt <= rf_cnt + (RFW+1)'(rc_commit) - (RFW+1)'(dq_fire);
    end
  end

  always_ff @(posedge clk) begin
    if (mem_rsp_valid && !rc_sparse) begin
      rf_dense[rf_wp]  <= mem_rsp_data[VEC_LEN*INLIER_BITS-1:0];
      rf_scales[rf_wp] <= mem_rsp_data[VEC_LEN*INLIER_BITS +: $bits(scales_t)];
      rf_size[rf_wp]   <= if_size[if_rp];
      for (int k = 0; k < VEC_LEN; k++) rf_coo[rf_wp][k] <= '0;
    end
    if (mem_rsp_valid && rc_sparse) begin
      for (int k = 0; k < VEC_LEN; k++) rf_coo[rf_wp][k] <= mem_rsp_data[k*COO_W +: COO_W];
    end
  end

  assign dq_in_valid = (rf_cnt != 0);
  assign rd_error    = r_err;

  // ---------------- dequantization engine ----------------
  oaken_dequant_engine #(.LANES(LANES), .VEC_LEN(VEC_LEN)) u_dq (
    .clk, .rst_n, .thr (r_thr),
    .in_valid (dq_in_valid), .in_ready (dq_in_ready),
    .in_dense (rf_dense[rf_rp]), .in_scales (rf_scales[rf_rp]), .in_coo (rf_coo[rf_rp]),
    .in_count (CW'(rf_size[rf_rp])),
    .out_valid (dq_out_valid), .out_ready (kv_out_ready), .out_data (kv_out_data),
    .out_last (dq_out_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                         r_vec_out <= '0;
    else if (r_state == R_IDLE)                         r_vec_out <= '0;
    else if (dq_out_valid && kv_out_ready && dq_out_last) r_vec_out <= r_vec_out + 1'b1;
  end

  assign kv_out_valid = dq_out_valid;
  assign kv_out_last  = dq_out_last && (r_vec_out == r_count_q - 1'b1);

endmodule
