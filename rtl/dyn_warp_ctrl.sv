// dyn_warp_ctrl: Dynamic Warp Execution controller of one SM.
//
// The paper lets every SM but SM0 issue memory instructions from non-owner
// warps with a probability that adapts: SM0 never issues them and serves as
// the reference. Every PERIOD cycles (1000 in the paper) each SM compares
// the stall cycles it counted in the period with SM0's count for the same
// period; more stalls lower the probability by one step (p = 0.1), fewer
// raise it, equal leaves it. The probability is a saturating counter of
// STEPS steps (0 .. 1 in tenths) that starts at 1.
//
// Implementation (own choices): all SMs leave reset together, so their
// periods line up. At the last cycle of a period the count is latched into
// period_stalls; one cycle later the comparison with ref_stalls (SM0's
// period_stalls) is made. Each cycle a 16-bit LFSR draws r in 0..STEPS-1
// as ((lfsr ^ salt) * STEPS) >> 16, and mem_allow = (r < prob); salt is a
// per-SM constant input that keeps the SMs' draws apart. The reference SM
// always has mem_allow = 0. A stall cycle is a cycle with warps resident but
// no warp issued (input stall).
module dyn_warp_ctrl #(
  parameter int unsigned PERIOD = 1000,
  parameter int unsigned STEPS  = 10,
  parameter logic [15:0] SEED   = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        is_ref,
  input  logic [15:0] salt,
  input  logic        stall,
  input  logic [15:0] ref_stalls,
  output logic [15:0] period_stalls,
  output logic [3:0]  prob,
  output logic        mem_allow,
  output logic        prob_up,
  output logic        prob_down
);
  logic [$clog2(PERIOD)-1:0] cyc_q;
  logic [15:0]               cnt_q;
  logic                      cmp_q;
  logic [15:0]               lfsr_q;
  logic [31:0]               scaled;

  assign scaled = 32'(lfsr_q ^ salt) * 32'(STEPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_q <= '0; cnt_q <= '0; cmp_q <= 1'b0; period_stalls <= '0;
      prob  <= 4'(STEPS);
      lfsr_q <= SEED;
    end else begin
      lfsr_q <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};
      cmp_q  <= 1'b0;
      if (int'(cyc_q) == PERIOD - 1) begin
        cyc_q         <= '0;
        period_stalls <= cnt_q + 16'(stall);
        cnt_q         <= '0;
        cmp_q         <= 1'b1;
      end else begin
        cyc_q <= cyc_q + 1'b1;
        cnt_q <= cnt_q + 16'(stall);
      end
      if (prob_down) prob <= prob - 1'b1;
      else if (prob_up) prob <= prob + 1'b1;
    end
  end

  assign prob_down = cmp_q && !is_ref && (period_stalls > ref_stalls) && (prob != 0);
  assign prob_up   = cmp_q && !is_ref && (period_stalls < ref_stalls) && (int'(prob) != STEPS);
  assign mem_allow = !is_ref && (scaled[31:16] < 16'(prob));
endmodule
