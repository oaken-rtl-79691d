// oaken_mmu: Oaken memory management unit for the quantized KV cache.
//
// Keeps two management tables, one for dense records and one for sparse
// (COO) records. Each holds, for every KV stream (one attention head of one
// layer, key or value, as the host maps it) and every token position up to
// MAX_SEQ, the physical byte address and the transfer size of that token's
// record. Physical space is handed out in pages of PAGE_BYTES on demand:
// each stream has a current dense page and a current sparse page, and the
// record of the next token is placed right behind the previous one in that
// page, so the records of consecutive tokens form one contiguous burst per
// page. When a record does not fit in what is left of the page, the next free
// page is taken (records never straddle a page). Pages come from a linear
// pool of NUM_PAGES pages starting at BASE_ADDR; `clear` returns them all.
//
// Commands (valid/ready), one at a time, with a registered response
// (valid/ready) one cycle after acceptance:
//   MMU_ALLOC  : allocate the next token of cmd_stream; the dense record has
//                the fixed size DENSE_REC_BYTES, the sparse one
//                cmd_sparse_bytes (0 means no outliers and takes no space).
//                Returns the token index, both addresses and sizes.
//                Errors: stream full (MAX_SEQ tokens) or no free page.
//   MMU_LOOKUP : return the table entries of (cmd_stream, cmd_token).
//                Error: token not yet written.
// The two tables with address and size per token, page granularity, on-demand
// allocation and sequential placement follow the paper (Section 5.2, Fig. 10);
// the linear page pool, the page size and the never-straddle rule are this
// design's choices.
module oaken_mmu
  import oaken_pkg::*;
#(
  parameter int unsigned    NUM_STREAMS = 8,
  parameter int unsigned    MAX_SEQ     = 32768,
  parameter int unsigned    PAGE_BYTES  = 4096,
  parameter int unsigned    NUM_PAGES   = 262144,
  parameter int unsigned    ADDR_W      = 38,
  parameter longint unsigned BASE_ADDR  = 0,
  localparam int unsigned   SW = (NUM_STREAMS > 1) ? $clog2(NUM_STREAMS) : 1,
  localparam int unsigned   TW = $clog2(MAX_SEQ + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_lookup,        // 0: MMU_ALLOC, 1: MMU_LOOKUP
  input  logic [SW-1:0]     cmd_stream,
  input  logic [TW-1:0]     cmd_token,
  input  logic [7:0]        cmd_sparse_bytes,
  // response
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic              rsp_error,
  output logic [TW-1:0]     rsp_token,
  output logic [ADDR_W-1:0] rsp_dense_addr,
  output logic [7:0]        rsp_dense_size,
  output logic [ADDR_W-1:0] rsp_sparse_addr,
  output logic [7:0]        rsp_sparse_size,
  // status
  output logic [$clog2(NUM_PAGES+1)-1:0] pages_used,
  output logic              new_page           // pulses when a page is taken
);

  localparam int unsigned PW = $clog2(NUM_PAGES + 1);
  localparam int unsigned LW = $clog2(PAGE_BYTES + 1);
  localparam int unsigned IW = SW + $clog2(MAX_SEQ);
  localparam int unsigned EW = ADDR_W + 8;

  // management tables: {address, transfer size}
  logic [EW-1:0] dense_tab  [NUM_STREAMS * MAX_SEQ];
  logic [EW-1:0] sparse_tab [NUM_STREAMS * MAX_SEQ];

  logic [TW-1:0]     len    [NUM_STREAMS];
  logic [ADDR_W-1:0] d_next [NUM_STREAMS];
  logic [LW-1:0]     d_left [NUM_STREAMS];
  logic [ADDR_W-1:0] s_next [NUM_STREAMS];
  logic [LW-1:0]     s_left [NUM_STREAMS];
  logic [PW-1:0]     free_ptr;

  logic busy;   // response pending
  logic cmd_fire;
  assign cmd_ready = !busy;
  assign cmd_fire  = cmd_valid && cmd_ready;

  function automatic logic [ADDR_W-1:0] page_addr(input logic [PW-1:0] p);
    return ADDR_W'(BASE_ADDR) + ADDR_W'(p) * ADDR_W'(PAGE_BYTES);
  endfunction

  // ---------------- allocation decision ----------------
  logic [TW-1:0]     a_tok;
  logic              d_new, s_new, a_err;
  logic [PW:0]       need;
  logic [ADDR_W-1:0] a_daddr, a_saddr;
  logic [IW-1:0]     w_idx, r_idx;

  always_comb begin
    a_tok   = len[cmd_stream];
    d_new   = 32'(d_left[cmd_stream]) < DENSE_REC_BYTES;
    s_new   = (cmd_sparse_bytes != 0) && (32'(s_left[cmd_stream]) < 32'(cmd_sparse_bytes));
    need    = (PW+1)'(d_new) + (PW+1)'(s_new);
    a_err   = (32'(a_tok) >= MAX_SEQ) || (32'(cmd_sparse_bytes) > PAGE_BYTES) ||
              ((PW+1)'(free_ptr) + need > (PW+1)'(NUM_PAGES));
    a_daddr = d_new ? page_addr(free_ptr) : d_next[cmd_stream];
    a_saddr = s_new ? page_addr(free_ptr + PW'(d_new)) : s_next[cmd_stream];
    w_idx   = IW'({cmd_stream, a_tok[$clog2(MAX_SEQ)-1:0]});
    r_idx   = IW'({cmd_stream, cmd_token[$clog2(MAX_SEQ)-1:0]});
  end

  // ---------------- tables ----------------
  logic [EW-1:0] d_rd, s_rd;
  always_ff @(posedge clk) begin
    if (cmd_fire && !cmd_lookup && !a_err) begin
      dense_tab[w_idx]  <= {a_daddr, 8'(DENSE_REC_BYTES)};
      sparse_tab[w_idx] <= {a_saddr, cmd_sparse_bytes};
    end
    if (cmd_fire && cmd_lookup) begin
      d_rd <= dense_tab[r_idx];
      s_rd <= sparse_tab[r_idx];
    end
  end

  // ---------------- per-stream state and response ----------------
  logic              lookup_q, err_q;
  logic [TW-1:0]     tok_q;
  logic [ADDR_W-1:0] daddr_q, saddr_q;
  logic [7:0]        ssize_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      free_ptr <= '0;
      new_page <= 1'b0;
      lookup_q <= 1'b0;
      err_q    <= 1'b0;
      tok_q    <= '0;
      daddr_q  <= '0;
      saddr_q  <= '0;
      ssize_q  <= '0;
      for (int s = 0; s < NUM_STREAMS; s++) begin
        len[s]    <= '0;
        d_next[s] <= '0;
        d_left[s] <= '0;
        s_next[s] <= '0;
        s_left[s] <= '0;
      end
    end else if (clear) begin
      busy     <= 1'b0;
      free_ptr <= '0;
      new_page <= 1'b0;
      for (int s = 0; s < NUM_STREAMS; s++) begin
        len[s]    <= '0;
        d_left[s] <= '0;
        s_left[s] <= '0;
      end
    end else begin
      new_page <= 1'b0;
      if (rsp_valid && rsp_ready) busy <= 1'b0;
      if (cmd_fire) begin
        busy     <= 1'b1;
        lookup_q <= cmd_lookup;
        if (cmd_lookup) begin
          tok_q <= cmd_token;
          err_q <= (cmd_token >= len[cmd_stream]);
        end else begin
          tok_q   <= a_tok;
          err_q   <= a_err;
          daddr_q <= a_daddr;
          saddr_q <= a_saddr;
          ssize_q <= cmd_sparse_bytes;
          if (!a_err) begin
            len[cmd_stream]    <= a_tok + 1'b1;
            free_ptr           <= free_ptr + PW'(need);
            new_page           <= d_new || s_new;
            d_next[cmd_stream] <= a_daddr + ADDR_W'(DENSE_REC_BYTES);
            d_left[cmd_stream] <= (d_new ? LW'(PAGE_BYTES) : d_left[cmd_stream]) - LW'(DENSE_REC_BYTES);
            if (cmd_sparse_bytes != 0) begin
              s_next[cmd_stream] <= a_saddr + ADDR_W'(cmd_sparse_bytes);
              s_left[cmd_stream] <= (s_new ? LW'(PAGE_BYTES) : s_left[cmd_stream]) - LW'(cmd_sparse_bytes);
            end
          end
        end
      end
    end
  end

  assign rsp_valid       = busy;
  assign rsp_error       = err_q;
  assign rsp_token       = tok_q;
  assign rsp_dense_addr  = lookup_q ? d_rd[EW-1:8] : daddr_q;
  assign rsp_dense_size  = err_q ? 8'd0 : (lookup_q ? d_rd[7:0] : 8'(DENSE_REC_BYTES));
  assign rsp_sparse_addr = lookup_q ? s_rd[EW-1:8] : saddr_q;
  assign rsp_sparse_size = err_q ? 8'd0 : (lookup_q ? s_rd[7:0] : ssize_q);
  assign pages_used      = free_ptr;

endmodule
