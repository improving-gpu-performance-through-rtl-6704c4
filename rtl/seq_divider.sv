// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Helper of launch_calc. A pulse on start latches dividend and divisor; W
// cycles later done pulses for one cycle with quotient and remainder, which
// stay valid until the next start. A zero divisor gives an all-ones quotient
// and the dividend as remainder (this design's choice: "no limit").
module seq_divider #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  logic [W-1:0]         q_q, d_q;
  logic [W:0]           r_q;
  logic [$clog2(W+1)-1:0] cnt_q;
  logic [W:0]           r_shift;

  assign r_shift = {r_q[W-1:0], q_q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_q <= '0; d_q <= '0; r_q <= '0; cnt_q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        q_q   <= dividend;
        d_q   <= divisor;
        r_q   <= '0;
        cnt_q <= W[$clog2(W+1)-1:0];
        busy  <= 1'b1;
      end else if (busy) begin
        if (r_shift >= {1'b0, d_q}) begin
          r_q <= r_shift - {1'b0, d_q};
          q_q <= {q_q[W-2:0], 1'b1};
        end else begin
          r_q <= r_shift;
          q_q <= {q_q[W-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign quotient  = q_q;
  assign remainder = r_q[W-1:0];
endmodule
