// reg_share_ctrl: register access mechanism of register sharing.
//
// For each issue port it takes (WarpId, RegNo) and decides, as in the
// paper's register access flow:
//   (b) unshared warp            -> access directly;
//   (c) shared warp, RegNo < t*R_w (its unshared registers) -> directly;
//   (e) shared register: granted only if the warp holds, or can take, the
//       lock of its warp pair; otherwise retry is raised and the warp must
//       try again later.
// RegNo counts from 0 here, so "RegNo < rwt" is the paper's 1-based
// "RegNo <= R_w t".
//
// Locks: one per pair of shared warps (warp k of slot U+2j with warp k of
// slot U+2j+1), at most NW/2, each holding the id of the warp that owns the
// pair's shared registers plus a valid bit (the valid bit is this design's
// choice). A lock is freed when its holder warp exits. Deadlock avoidance
// (paper, Fig. 8): a warp may take a free lock only if no warp of the
// partner block holds any lock. Ports are served in order within a cycle, a
// later port seeing the locks taken by earlier ones, so two schedulers never
// break the rule together.
//
// All outputs except the lock state are combinational from the requests;
// locks change on the clock edge. row is the physical register-file row of
// the access (rs_pkg::reg_row). When the plan does not share registers
// every access is unshared.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, which a lint tool reports as a
// signal used both synchronously and asynchronously. Assertions are not
// logic, so the warning stands.
module reg_share_ctrl
  import rs_pkg::*;
#(
  parameter int unsigned NW    = NUM_WARPS,
  parameter int unsigned NTB   = MAX_TB,
  parameter int unsigned NPORT = NUM_SCHED
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               kernel_start,
  input  launch_plan_t       plan,
  input  logic [3:0]         warp_slot [NW],
  input  logic [5:0]         warp_k    [NW],
  input  logic [NW-1:0]      warp_shared,
  input  logic [NW-1:0]      warp_exit,
  input  logic [NPORT-1:0]   req_valid,
  input  logic [WID_W-1:0]   req_warp [NPORT],
  input  logic [REG_W-1:0]   req_reg  [NPORT],
  output logic [NPORT-1:0]   gnt,
  output logic [NPORT-1:0]   retry,
  output logic [NPORT-1:0]   acquired,      // this grant took a free lock
  output logic [NPORT-1:0]   shared_hit,    // granted access to a shared register
  output logic [NPORT-1:0]   private_hit,   // shared warp, unshared register
  output logic [NPORT-1:0]   deadlock_deny, // refused by the deadlock rule
  output logic [ROW_W-1:0]   row      [NPORT],
  output logic [NTB-1:0]     slot_holds,
  output logic               release_evt
);
  localparam int unsigned NLOCK = NW / 2;

  logic [NLOCK-1:0] lk_valid_q;
  logic [WID_W-1:0] lk_wid_q [NLOCK];

  logic [NLOCK-1:0] v_d;
  logic [WID_W-1:0] wid_d [NLOCK];

  function automatic int unsigned slot_of(input logic [WID_W-1:0] w, input logic [3:0] ws [NW]);
    return int'(ws[w]);
  endfunction

  always_comb begin
    logic [NTB-1:0] holds;
    v_d   = lk_valid_q;
    wid_d = lk_wid_q;
    for (int p = 0; p < NPORT; p++) begin
      gnt[p] = 1'b0; retry[p] = 1'b0; acquired[p] = 1'b0;
      shared_hit[p] = 1'b0; private_hit[p] = 1'b0; deadlock_deny[p] = 1'b0;
      row[p] = reg_row(plan, warp_slot[req_warp[p]], warp_k[req_warp[p]], req_reg[p]);
    end
    for (int p = 0; p < NPORT; p++) begin
      int unsigned w, s, ps, li;
      w  = int'(req_warp[p]);
      s  = int'(warp_slot[w]);
      ps = int'(plan.n_unshared) + ((s - int'(plan.n_unshared)) ^ 1);
      li = ((s - int'(plan.n_unshared)) / 2) * int'(plan.warps_per_tb) + int'(warp_k[w]);
      // slots holding locks given the locks taken so far this cycle
      holds = '0;
      for (int l = 0; l < NLOCK; l++)
        if (v_d[l] && slot_of(wid_d[l], warp_slot) < NTB) holds[slot_of(wid_d[l], warp_slot)] = 1'b1;
      if (req_valid[p]) begin
        if (plan.res != SHARE_REG || !warp_shared[w]) begin
          gnt[p] = 1'b1;                                   // (b) unshared warp
        end else if (req_reg[p] < plan.rwt) begin
          gnt[p] = 1'b1;                                   // (c) unshared register
          private_hit[p] = 1'b1;
        end else if (li < NLOCK && v_d[li] && int'(wid_d[li]) == w) begin
          gnt[p] = 1'b1;                                   // (e) lock already held
          shared_hit[p] = 1'b1;
        end else if (li < NLOCK && !v_d[li] && !holds[ps]) begin
          gnt[p] = 1'b1;                                   // (e) lock taken now
          shared_hit[p] = 1'b1;
          acquired[p] = 1'b1;
          v_d[li]   = 1'b1;
          wid_d[li] = WID_W'(w);
        end else begin
          retry[p] = 1'b1;                                 // (e) retry later
          deadlock_deny[p] = (li < NLOCK) && !v_d[li] && holds[ps];
        end
      end
    end
    holds = '0;
    for (int l = 0; l < NLOCK; l++)
      if (lk_valid_q[l] && slot_of(lk_wid_q[l], warp_slot) < NTB) holds[slot_of(lk_wid_q[l], warp_slot)] = 1'b1;
    slot_holds = holds;
  end

  // Releases: a lock is freed when its holder warp exits.
  logic [NLOCK-1:0] rel;
  always_comb begin
    for (int l = 0; l < NLOCK; l++) rel[l] = lk_valid_q[l] && warp_exit[lk_wid_q[l]];
  end
  assign release_evt = |rel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_valid_q <= '0;
      for (int l = 0; l < NLOCK; l++) lk_wid_q[l] <= '0;
    end else if (kernel_start) begin
      lk_valid_q <= '0;
    end else begin
      for (int l = 0; l < NLOCK; l++) begin
        lk_valid_q[l] <= v_d[l] && !rel[l];
        lk_wid_q[l]   <= wid_d[l];
      end
    end
  end

  // The two blocks of a pair never both hold locks (deadlock rule).
  logic rule_ok;
  always_comb begin
    rule_ok = 1'b1;
    for (int j = 0; j < int'(plan.n_pairs); j++)
      if (slot_holds[(int'(plan.n_unshared) + 2*j) % NTB] &&
          slot_holds[(int'(plan.n_unshared) + 2*j + 1) % NTB]) rule_ok = 1'b0;
  end
  assert property (@(posedge clk) disable iff (!rst_n) rule_ok);
endmodule
