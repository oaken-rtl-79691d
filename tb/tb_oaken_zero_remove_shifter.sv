// tb_oaken_zero_remove_shifter: pushes two beats of random flags and entries
// per vector and checks the packed list and count against a software
// compaction.
module tb_oaken_zero_remove_shifter;
  import oaken_pkg::*;
  localparam int L = 32, D = 64;
  logic clk = 0, rst_n = 1, clear, push;
  initial #1 rst_n = 1'b0;   // a real falling edge applies the asynchronous reset at once
  coo_t in_entry [L];
  logic in_flag [L];
  coo_t entries [D];
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;

  oaken_zero_remove_shifter #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    coo_t exp_q [$];
    clear = 0; push = 0;
    for (int l = 0; l < L; l++) begin in_entry[l] = '0; in_flag[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      int dens;
      dens = (it % 10 == 0) ? 100 : (it % 10 == 1) ? 0 : $urandom_range(30);
      exp_q.delete();
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int b = 0; b < D / L; b++) begin
        for (int l = 0; l < L; l++) begin
          in_entry[l] = coo_t'($urandom());
          in_flag[l]  = ($urandom_range(99) < dens);
          if (in_flag[l]) exp_q.push_back(in_entry[l]);
        end
        push = 1;
        @(negedge clk);
        push = 0;
      end
      checks++;
      if (int'(count) != exp_q.size()) begin failures++; $display("count %0d/%0d", count, exp_q.size()); end
      for (int k = 0; k < exp_q.size(); k++) begin
        checks++;
        if (entries[k] !== exp_q[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
