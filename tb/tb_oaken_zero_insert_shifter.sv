// tb_oaken_zero_insert_shifter: random sets of outlier positions packed in
// ascending order (as the encoder emits them), with junk beyond `count`;
// checks the per-position flags, group and sign bits.
module tb_oaken_zero_insert_shifter;
  import oaken_pkg::*;
  localparam int N = 64;
  coo_t entries [N];
  logic [$clog2(N+1)-1:0] count;
  logic is_out [N], grp [N], sgn [N];
  int checks = 0, failures = 0;

  oaken_zero_insert_shifter #(.VEC_LEN(N), .DEPTH(N)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      bit ex [N], eg [N], es [N];
      int c, dens;
      dens = (it % 20 == 0) ? 100 : $urandom_range(25);
      c = 0;
      for (int p = 0; p < N; p++) begin
        ex[p] = ($urandom_range(99) < dens);
        eg[p] = ex[p] ? $urandom_range(1) : 0;
        es[p] = ex[p] ? $urandom_range(1) : 0;
        if (ex[p]) begin
          entries[c].idx = IDX_W'(p); entries[c].grp = eg[p]; entries[c].sgn = es[p];
          c++;
        end
      end
      for (int k = c; k < N; k++) entries[k] = coo_t'($urandom());
      count = ($clog2(N+1))'(c);
      #1;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (is_out[p] != ex[p] || grp[p] != eg[p] || sgn[p] != es[p]) begin
          failures++;
          if (failures < 10) $display("pos %0d: %0d%0d%0d vs %0d%0d%0d", p, is_out[p], grp[p], sgn[p], ex[p], eg[p], es[p]);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
