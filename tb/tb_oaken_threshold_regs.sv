// tb_oaken_threshold_regs: writes random threshold sets to every layer and
// K/V slot and reads them back through both read ports; also checks the reset
// value and that an out-of-range layer reads zero.
module tb_oaken_threshold_regs;
  import oaken_pkg::*;
  localparam int L = 80;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  logic we;
  logic [$clog2(L)-1:0] w_layer, a_layer, b_layer;
  logic w_is_v, a_is_v, b_is_v;
  thr_t w_thr, a_thr, b_thr;
  thr_t model [L][2];
  int checks = 0, failures = 0;

  oaken_threshold_regs #(.NUM_LAYERS(L)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; w_layer = 0; w_is_v = 0; w_thr = '0; a_layer = 0; a_is_v = 0; b_layer = 0; b_is_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    a_layer = 7; b_layer = 79; b_is_v = 1;
    #1;
    checks++; if (a_thr !== '0 || b_thr !== '0) begin failures++; $display("reset value wrong"); end
    for (int l = 0; l < L; l++)
      for (int v = 0; v < 2; v++) begin
        @(negedge clk);
        we = 1; w_layer = l[$clog2(L)-1:0]; w_is_v = v[0];
        w_thr = {$urandom(), $urandom()};
        model[l][v] = w_thr;
      end
    @(negedge clk) we = 0;
    for (int i = 0; i < 400; i++) begin
      int la, lb, va, vb;
      la = $urandom_range(L-1); lb = $urandom_range(L-1); va = $urandom_range(1); vb = $urandom_range(1);
      a_layer = la[$clog2(L)-1:0]; a_is_v = va[0]; b_layer = lb[$clog2(L)-1:0]; b_is_v = vb[0];
      #1;
      checks++;
      if (a_thr !== model[la][va] || b_thr !== model[lb][vb]) begin
        failures++; $display("mismatch layer %0d/%0d", la, lb);
      end
      @(negedge clk);
    end
    a_layer = 7'd100; #1;
    checks++; if (a_thr !== '0) begin failures++; $display("out of range layer not zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
