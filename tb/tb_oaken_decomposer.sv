// tb_oaken_decomposer: random beats and threshold sets, including values on
// every threshold, against the reference group split and group shift.
module tb_oaken_decomposer;
  import oaken_pkg::*;
  import oaken_ref_pkg::*;
  localparam int L = 32;
  data_t x [L];
  thr_t  thr;
  grp_e  grp [L];
  data_t inlier [L], outlier [L];
  int checks = 0, failures = 0;
  int cnt [3];

  oaken_decomposer #(.LANES(L)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rthr_t t;
    cnt[0] = 0; cnt[1] = 0; cnt[2] = 0;
    for (int it = 0; it < 2000; it++) begin
      t.hi_i = $urandom_range(1000);       t.lo_i = -int'($urandom_range(1000));
      t.hi_o = t.hi_i + $urandom_range(8000); t.lo_o = t.lo_i - int'($urandom_range(8000));
      thr.hi_o = data_t'(t.hi_o); thr.hi_i = data_t'(t.hi_i);
      thr.lo_i = data_t'(t.lo_i); thr.lo_o = data_t'(t.lo_o);
      for (int l = 0; l < L; l++) begin
        int v, c;
        c = $urandom_range(9);
        case (c)
          0: v = t.hi_o;  1: v = t.lo_o;  2: v = t.hi_i;  3: v = t.lo_i;
          4: v = t.hi_o + 1; 5: v = t.lo_o - 1;
          default: v = rand_elem(t, 10, 20);
        endcase
        x[l] = data_t'(v);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        int g, s, ei, eo;
        g  = group_of(int'(x[l]), t);
        s  = shifted(int'(x[l]), t);
        ei = (g == 1) ? s : 0;
        eo = (g == 1) ? 0 : s;
        cnt[g]++;
        checks++;
        if (int'(grp[l]) != ((g == 0) ? 0 : (g == 1) ? 1 : 2) ||
            int'(inlier[l]) != ei || int'(outlier[l]) != eo) begin
          failures++;
          if (failures < 10) $display("x=%0d grp %0d/%0d in %0d/%0d out %0d/%0d", x[l], grp[l], g,
                                      inlier[l], ei, outlier[l], eo);
        end
      end
      #1;
    end
    checks++;
    if (cnt[0] == 0 || cnt[1] == 0 || cnt[2] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
