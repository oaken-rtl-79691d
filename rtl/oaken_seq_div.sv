// oaken_seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// A `start` pulse loads dividend and divisor; W cycles later `done` pulses for
// one cycle with quotient = dividend / divisor. Division by zero returns zero.
// Helper of the sigma calculator.
module oaken_seq_div #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);

  logic [W-1:0]         q_q, d_q;
  logic [W:0]           r_q;
  logic [$clog2(W+1)-1:0] cnt_q;
  logic [W:0]           r_shift;
  logic                 ge;

  assign r_shift = {r_q[W-1:0], q_q[W-1]};
  assign ge      = r_shift >= {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q   <= '0;
      d_q   <= '0;
      r_q   <= '0;
      cnt_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q_q   <= dividend;
        d_q   <= divisor;
        r_q   <= '0;
        cnt_q <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        r_q   <= ge ? r_shift - {1'b0, d_q} : r_shift;
        q_q   <= {q_q[W-2:0], ge};
        cnt_q <= cnt_q + 1'b1;
        if (32'(cnt_q) == W - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient = (d_q == '0) ? '0 : q_q;

endmodule
