// tb_oaken_mmu: random allocations on several streams against a software
// model of the page allocator (sequential placement, new page when a record
// does not fit, pool exhaustion, stream full), lookups of written and
// unwritten tokens, and `clear`. Runs with small pages and a small pool so
// that every case happens; each case is counted and must occur.
module tb_oaken_mmu;
  localparam int NS = 4, MS = 16, PB = 128, NP = 40, AW = 20;
  localparam longint BASE = 'h1000;
  localparam int SW = $clog2(NS), TW = $clog2(MS + 1);
  logic clk = 0, rst_n = 1, clear;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  logic cmd_valid, cmd_ready, cmd_lookup;
  logic [SW-1:0] cmd_stream;
  logic [TW-1:0] cmd_token;
  logic [7:0] cmd_sparse_bytes;
  logic rsp_valid, rsp_ready, rsp_error;
  logic [TW-1:0] rsp_token;
  logic [AW-1:0] rsp_dense_addr, rsp_sparse_addr;
  logic [7:0] rsp_dense_size, rsp_sparse_size;
  logic [$clog2(NP+1)-1:0] pages_used;
  logic new_page;
  int checks = 0, failures = 0;
  int n_full = 0, n_oom = 0, n_dpage = 0, n_spage = 0, n_lookerr = 0, n_zero = 0;

  oaken_mmu #(.NUM_STREAMS(NS), .MAX_SEQ(MS), .PAGE_BYTES(PB), .NUM_PAGES(NP),
              .ADDR_W(AW), .BASE_ADDR(BASE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  int len [NS], dnext [NS], dleft [NS], snext [NS], sleft [NS], freep;
  int tdaddr [NS][MS], tsaddr [NS][MS], tssize [NS][MS];

  task automatic do_cmd(input bit lk, input int s, input int tok, input int sb,
                        output bit err, output int rtok, output int da, output int ds,
                        output int sa, output int ss);
    @(negedge clk);
    cmd_valid = 1; cmd_lookup = lk; cmd_stream = SW'(s); cmd_token = TW'(tok); cmd_sparse_bytes = 8'(sb);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
    rsp_ready = 1;
    while (!rsp_valid) @(posedge clk);
    #1;
    err = rsp_error; rtok = rsp_token; da = rsp_dense_addr; ds = rsp_dense_size;
    sa = rsp_sparse_addr; ss = rsp_sparse_size;
    @(posedge clk);
    #1 rsp_ready = 0;
  endtask

  task automatic model_reset();
    for (int s = 0; s < NS; s++) begin len[s] = 0; dleft[s] = 0; sleft[s] = 0; dnext[s] = 0; snext[s] = 0; end
    freep = 0;
  endtask

  task automatic alloc_check(input int s, input int sb);
    bit err, eerr, dn, sn;
    int rtok, da, ds, sa, ss, eda, esa, need;
    do_cmd(0, s, 0, sb, err, rtok, da, ds, sa, ss);
    dn = dleft[s] < 48;
    sn = (sb != 0) && (sleft[s] < sb);
    need = dn + sn;
    eerr = (len[s] >= MS) || (freep + need > NP);
    checks++;
    if (err != eerr) begin failures++; $display("alloc s%0d err %0d vs %0d", s, err, eerr); return; end
    if (eerr) begin
      if (len[s] >= MS) n_full++; else n_oom++;
      return;
    end
    eda = dn ? int'(BASE) + freep * PB : dnext[s];
    esa = sn ? int'(BASE) + (freep + dn) * PB : snext[s];
    if (dn && len[s] > 0) n_dpage++;
    if (sn && len[s] > 0) n_spage++;
    if (sb == 0) n_zero++;
    checks++;
    if (rtok != len[s] || da != eda || ds != 48 || (sb != 0 && sa != esa) || ss != sb) begin
      failures++;
      $display("alloc s%0d t%0d: tok %0d da %h/%h sa %h/%h ss %0d/%0d", s, len[s], rtok, da, eda, sa, esa, ss, sb);
    end
    tdaddr[s][len[s]] = da; tsaddr[s][len[s]] = sa; tssize[s][len[s]] = sb;
    freep += need;
    dnext[s] = eda + 48; dleft[s] = (dn ? PB : dleft[s]) - 48;
    if (sb != 0) begin snext[s] = esa + sb; sleft[s] = (sn ? PB : sleft[s]) - sb; end
    len[s]++;
    checks++;
    if (int'(pages_used) != freep) begin failures++; $display("pages_used %0d vs %0d", pages_used, freep); end
  endtask

  task automatic lookup_check(input int s, input int tok);
    bit err;
    int rtok, da, ds, sa, ss;
    do_cmd(1, s, tok, 0, err, rtok, da, ds, sa, ss);
    checks++;
    if (tok >= len[s]) begin
      n_lookerr++;
      if (!err) begin failures++; $display("lookup of unwritten token not refused"); end
    end else if (err || da != tdaddr[s][tok] || ds != 48 || ss != tssize[s][tok] ||
                 (ss != 0 && sa != tsaddr[s][tok])) begin
      failures++;
      $display("lookup s%0d t%0d: da %h/%h ss %0d/%0d", s, tok, da, tdaddr[s][tok], ss, tssize[s][tok]);
    end
  endtask

  initial begin
    clear = 0; cmd_valid = 0; cmd_lookup = 0; cmd_stream = '0; cmd_token = '0; cmd_sparse_bytes = '0; rsp_ready = 0;
    model_reset();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < 90; i++) begin
        int s, sb;
        s  = $urandom_range(NS - 1);
        sb = ($urandom_range(4) == 0) ? 0 : 1 + $urandom_range(round == 0 ? 15 : 63);
        alloc_check(s, sb);
        if ($urandom_range(2) == 0) lookup_check($urandom_range(NS - 1), $urandom_range(MS));
      end
      for (int s = 0; s < NS; s++) for (int tok = 0; tok < len[s]; tok++) lookup_check(s, tok);
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      model_reset();
      checks++;
      if (pages_used != 0) failures++;
    end
    checks++;
    if (n_full == 0 || n_oom == 0 || n_dpage == 0 || n_spage == 0 || n_lookerr == 0 || n_zero == 0) begin
      failures++;
      $display("cases: full %0d oom %0d dpage %0d spage %0d lookerr %0d zero %0d",
               n_full, n_oom, n_dpage, n_spage, n_lookerr, n_zero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
