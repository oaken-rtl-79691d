// oaken_mem_model: behavioural model of the device memory (LPDDR or HBM behind
// its controllers) as the DMA unit sees it. Not synthesizable.
//
// Byte-addressed sparse storage. A write request moves `len` bytes of the
// 512-bit word (byte k in bits [8k+7:8k]) to `addr`. A read request returns
// `len` bytes from `addr` LATENCY cycles later, in request order, on
// rsp_valid (bytes past `len`, and never-written bytes, read as zero). With
// STALL set, wr_ready and rd_ready drop at random to exercise back-pressure.
// Counts writes, reads and stall cycles for the testbench.
module oaken_mem_model #(
  parameter int unsigned ADDR_W  = 38,
  parameter int unsigned LATENCY = 8,
  parameter bit          STALL   = 1'b1
) (
  input  logic              clk,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [7:0]        wr_len,
  input  logic [511:0]      wr_data,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [ADDR_W-1:0] rd_addr,
  input  logic [7:0]        rd_len,
  output logic              rsp_valid,
  output logic [511:0]      rsp_data
);

  logic [7:0] mem [longint];
  typedef struct { longint due; logic [511:0] data; } pend_t;
  pend_t  pend [$];
  longint cyc = 0;
  int     n_wr = 0, n_rd = 0, n_stall = 0;

  initial begin
    wr_ready = 1'b1; rd_ready = 1'b1; rsp_valid = 1'b0; rsp_data = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if ((wr_valid && !wr_ready) || (rd_valid && !rd_ready)) n_stall++;
    if (wr_valid && wr_ready) begin
      for (int k = 0; k < int'(wr_len); k++) mem[longint'(wr_addr) + k] = wr_data[k*8 +: 8];
      n_wr++;
    end
    if (rd_valid && rd_ready) begin
      pend_t p;
      p.due  = cyc + LATENCY;
      p.data = '0;
      for (int k = 0; k < int'(rd_len); k++)
        if (mem.exists(longint'(rd_addr) + k)) p.data[k*8 +: 8] = mem[longint'(rd_addr) + k];
      pend.push_back(p);
      n_rd++;
    end
    rsp_valid <= 1'b0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= pend[0].data;
      void'(pend.pop_front());
    end
    wr_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
    rd_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
  end

endmodule
