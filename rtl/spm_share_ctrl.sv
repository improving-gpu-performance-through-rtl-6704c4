// spm_share_ctrl: scratchpad access mechanism of scratchpad sharing.
//
// For each issue port it takes (warp, SMemLoc), finds the warp's
// thread-block slot and decides, as in the paper's scratchpad access flow:
//   (b) block is unshared                  -> access directly;
//   (c) SMemLoc < t*R_tb (private part)    -> access directly;
//   (e) shared location: granted only if the block holds, or can take, the
//       lock of its block pair, else retry.
// Locations count from 0, so "SMemLoc < spriv" is the paper's 1-based
// "SMemLoc <= R_tb t".
//
// One lock per shared pair of blocks (at most NTB/2), holding the slot id of
// the owning block plus a valid bit (own choice). The lock is freed when
// that block finishes (tb_finish); the waiting block then takes it on its
// next try. Only one block of a pair ever holds the region, so no
// deadlock-avoidance rule is needed (paper: deadlock cannot occur here).
// Ports are served in order within a cycle. addr is the physical byte
// address (rs_pkg::spm_addr_map). Grants are combinational; locks change on
// the clock edge. When the plan does not share scratchpad every access is
// unshared.
module spm_share_ctrl
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
  input  logic [NTB-1:0]     slot_shared,
  input  logic [NTB-1:0]     tb_finish,
  input  logic [NPORT-1:0]   req_valid,
  input  logic [WID_W-1:0]   req_warp [NPORT],
  input  logic [SPA_W-1:0]   req_loc  [NPORT],
  output logic [NPORT-1:0]   gnt,
  output logic [NPORT-1:0]   retry,
  output logic [NPORT-1:0]   acquired,
  output logic [NPORT-1:0]   shared_hit,
  output logic [NPORT-1:0]   private_hit,
  output logic [SPA_W-1:0]   addr     [NPORT],
  output logic [NTB-1:0]     slot_holds,
  output logic               release_evt
);
  localparam int unsigned NLOCK = NTB / 2;
  localparam int unsigned SW    = $clog2(NTB);

  logic [NLOCK-1:0] lk_valid_q;
  logic [SW-1:0]    lk_tb_q [NLOCK];
  logic [NLOCK-1:0] v_d;
  logic [SW-1:0]    tb_d [NLOCK];

  always_comb begin
    v_d  = lk_valid_q;
    tb_d = lk_tb_q;
    for (int p = 0; p < NPORT; p++) begin
      int unsigned s, li;
      s  = int'(warp_slot[req_warp[p]]);
      li = (s - int'(plan.n_unshared)) / 2;
      gnt[p] = 1'b0; retry[p] = 1'b0; acquired[p] = 1'b0;
      shared_hit[p] = 1'b0; private_hit[p] = 1'b0;
      addr[p] = spm_addr_map(plan, warp_slot[req_warp[p]], req_loc[p]);
      if (req_valid[p]) begin
        if (plan.res != SHARE_SPM || s >= NTB || !slot_shared[s]) begin
          gnt[p] = 1'b1;                                   // (b) unshared block
        end else if (req_loc[p] < plan.spriv[SPA_W-1:0] || plan.spriv[SPA_W]) begin
          gnt[p] = 1'b1;                                   // (c) private location
          private_hit[p] = 1'b1;
        end else if (li < NLOCK && v_d[li] && int'(tb_d[li]) == s) begin
          gnt[p] = 1'b1;                                   // (e) region already owned
          shared_hit[p] = 1'b1;
        end else if (li < NLOCK && !v_d[li]) begin
          gnt[p] = 1'b1;                                   // (e) region taken now
          shared_hit[p] = 1'b1;
          acquired[p] = 1'b1;
          v_d[li]  = 1'b1;
          tb_d[li] = SW'(s);
        end else begin
          retry[p] = 1'b1;                                 // (e) retry later
        end
      end
    end
    slot_holds = '0;
    for (int l = 0; l < NLOCK; l++)
      if (lk_valid_q[l]) slot_holds[lk_tb_q[l]] = 1'b1;
  end

  logic [NLOCK-1:0] rel;
  always_comb begin
    for (int l = 0; l < NLOCK; l++) rel[l] = lk_valid_q[l] && tb_finish[lk_tb_q[l]];
  end
  assign release_evt = |rel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_valid_q <= '0;
      for (int l = 0; l < NLOCK; l++) lk_tb_q[l] <= '0;
    end else if (kernel_start) begin
      lk_valid_q <= '0;
    end else begin
      for (int l = 0; l < NLOCK; l++) begin
        lk_valid_q[l] <= v_d[l] && !rel[l];
        lk_tb_q[l]    <= tb_d[l];
      end
    end
  end
endmodule
