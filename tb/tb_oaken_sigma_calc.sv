// tb_oaken_sigma_calc: random group ranges (including a zero range) for 4-bit
// and 5-bit codes; checks sigma, step, min and that the result is ready
// within 26 cycles of start.
module tb_oaken_sigma_calc;
  import oaken_pkg::*;
  logic clk = 0, rst_n = 1, start;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  data_t min, max;
  logic d4, d5;
  logic [SIGMA_W-1:0] s4, s5;
  gscale_t g4, g5;
  int checks = 0, failures = 0;

  oaken_sigma_calc #(.BITS(4)) dut4 (.clk, .rst_n, .start, .min, .max, .done (d4), .sigma (s4), .scale (g4));
  oaken_sigma_calc #(.BITS(5)) dut5 (.clk, .rst_n, .start, .min, .max, .done (d5), .sigma (s5), .scale (g5));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; min = '0; max = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 600; it++) begin
      int a, b, cyc;
      longint r;
      a = int'(data_t'($urandom()));
      b = (it % 50 == 0) ? a : int'(data_t'($urandom()));
      if (it % 3 == 0) b = a + $urandom_range(40);
      if (b > 32767) b = 32767;
      if (a > b) begin int t; t = a; a = b; b = t; end
      r = b - a;
      @(negedge clk);
      min = data_t'(a); max = data_t'(b); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!d4) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 26) begin failures++; $display("latency %0d", cyc); end
      checks++;
      if (longint'(s4) != ((r == 0) ? 0 : (15 * 65536) / r) ||
          longint'(s5) != ((r == 0) ? 0 : (31 * 65536) / r) ||
          longint'(g4.step) != (r * 256) / 15 || longint'(g5.step) != (r * 256) / 31 ||
          int'(g4.min) != a || int'(g5.min) != a || !d5) begin
        failures++;
        if (failures < 10) $display("r=%0d s4=%0d s5=%0d st4=%0d st5=%0d", r, s4, s5, g4.step, g5.step);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
