// tb_oaken_minmax_finder: random multi-beat vectors with random membership
// masks (including empty groups) against a software min/max.
module tb_oaken_minmax_finder;
  import oaken_pkg::*;
  localparam int L = 32;
  logic clk = 0, rst_n = 1, clear, en;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  data_t val [L];
  logic  mask [L];
  data_t min, max;
  logic  any;
  int checks = 0, failures = 0, empties = 0;

  oaken_minmax_finder #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; en = 0;
    for (int l = 0; l < L; l++) begin val[l] = '0; mask[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      int nb, mn, mx, dens;
      bit seen;
      nb = 1 + $urandom_range(3);
      dens = $urandom_range(4) == 0 ? 0 : $urandom_range(100);
      seen = 0; mn = 0; mx = 0;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int b = 0; b < nb; b++) begin
        for (int l = 0; l < L; l++) begin
          val[l]  = data_t'($urandom());
          mask[l] = ($urandom_range(99) < dens);
          if (mask[l]) begin
            if (!seen || int'(val[l]) < mn) mn = int'(val[l]);
            if (!seen || int'(val[l]) > mx) mx = int'(val[l]);
            seen = 1;
          end
        end
        en = 1;
        @(negedge clk);
        en = 0;
      end
      if (!seen) empties++;
      checks++;
      if (int'(min) != mn || int'(max) != mx || any != seen) begin
        failures++;
        if (failures < 10) $display("min %0d/%0d max %0d/%0d", min, mn, max, mx);
      end
    end
    checks++;
    if (empties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
