// tb_warp_model: behavioural front end of one SM for the system tests.
//
// Every warp runs the same short program of LEN instructions once its block
// is launched (its warp_active bit rises). Instruction i names register
//   i mod max(rwt,1)          for i < 2   (unshared registers first, as the
//                                          reordered declarations give)
//   rpt-1 - (i mod 3)          otherwise  (shared registers for shared warps)
// instructions 1, 5, 9, ... are global memory instructions (latency MEMLAT,
// others ALULAT), and with SPM=1 (and a kernel that has scratchpad) every
// third instruction touches scratchpad:
// location 4k (private part) for i < 3, spb-4(k+1) (shared part) after, k
// being the warp's index in its block. After the last instruction completes
// the warp exits (one-cycle warp_exit pulse).
//
// Data check: each instruction issued on port 0 writes its register (lane
// 0..31 = tag) one cycle later and, if it touches scratchpad, stores the tag
// there; every register or scratchpad read of a value the same warp wrote
// earlier must return it. mismatches counts failures, reads_checked checks.
module tb_warp_model
  import rs_pkg::*;
#(
  parameter int NW     = NUM_WARPS,
  parameter int NS     = NUM_SCHED,
  parameter int LEN    = 16,
  parameter int MEMLAT = 12,
  parameter int ALULAT = 2,
  parameter bit SPM    = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  launch_plan_t           plan,
  input  logic [NW-1:0]          warp_active,
  input  logic [NS-1:0]          issue_valid,
  input  logic [WID_W-1:0]       issue_warp [NS],
  input  logic [LANES-1:0][31:0] rf_data    [NS],
  input  logic [31:0]            spm_rdata  [NS],
  output warp_instr_t            instr [NW],
  output logic [NW-1:0]          warp_exit,
  output logic                   wb_en,
  output logic [WID_W-1:0]       wb_warp,
  output logic [REG_W-1:0]       wb_reg,
  output logic [LANES-1:0]       wb_mask,
  output logic [LANES-1:0][31:0] wb_data,
  output logic                   st_en,
  output logic [WID_W-1:0]       st_warp,
  output logic [SPA_W-1:0]       st_loc,
  output logic [31:0]            st_data,
  output int                     mismatches,
  output int                     reads_checked
);
  int pc [NW], waitc [NW];
  bit run [NW], prev_act [NW];
  int gen [NW];                         // launch generation of the warp slot
  int unsigned reg_sh [NW][256];        // last tag written, 0 = none
  int unsigned spm_sh [NW][4];          // by (warp, private/shared)
  // pending read checks
  bit             chk_q [NS];
  int unsigned    exp_r_q [NS], exp_s_q [NS];
  bit             chk_s_q [NS];
  int             w_q [NS];

  function automatic warp_instr_t gen_instr(input int w, input int i);
    warp_instr_t d;
    int k, rw;
    d = '0;
    k = (plan.warps_per_tb != 0) ? (w % int'(plan.warps_per_tb)) : 0;
    rw = (plan.rwt > 0) ? int'(plan.rwt) : 1;
    d.valid = 1'b1;
    d.reg_no = REG_W'((i < 2) ? (i % rw) : (int'(plan.rpt) - 1 - (i % 3)));
    d.is_mem = (i % 4 == 1);
    d.uses_spm = SPM && plan.spb != 0 && (i % 3 == 1);
    d.spm_addr = SPA_W'((i < 3) ? 4 * k : int'(plan.spb) - 4 * (k + 1));
    return d;
  endfunction

  always_comb begin
    for (int w = 0; w < NW; w++) begin
      instr[w] = '0;
      if (run[w] && waitc[w] == 0 && pc[w] < LEN) instr[w] = gen_instr(w, pc[w]);
      warp_exit[w] = run[w] && waitc[w] == 0 && pc[w] == LEN;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int w = 0; w < NW; w++) begin
        pc[w] <= 0; waitc[w] <= 0; run[w] <= 0; prev_act[w] <= 0; gen[w] <= 0;
      end
      for (int p = 0; p < NS; p++) begin chk_q[p] <= 0; chk_s_q[p] <= 0; end
      wb_en <= 0; st_en <= 0; mismatches <= 0; reads_checked <= 0;
    end else begin
      wb_en <= 0; st_en <= 0;
      // read checks of last cycle's issues
      for (int p = 0; p < NS; p++) begin
        if (chk_q[p]) begin
          reads_checked <= reads_checked + 1;
          if (rf_data[p][5] != exp_r_q[p]) begin
            mismatches <= mismatches + 1;
            $display("register mismatch warp %0d: %0h exp %0h", w_q[p], rf_data[p][5], exp_r_q[p]);
          end
        end
        if (chk_s_q[p]) begin
          reads_checked <= reads_checked + 1;
          if (spm_rdata[p] != exp_s_q[p]) begin
            mismatches <= mismatches + 1;
            $display("scratchpad mismatch warp %0d: %0h exp %0h", w_q[p], spm_rdata[p], exp_s_q[p]);
          end
        end
      end
      for (int w = 0; w < NW; w++) begin
        prev_act[w] <= warp_active[w];
        if (warp_active[w] && !prev_act[w]) begin
          run[w] <= 1; pc[w] <= 0; waitc[w] <= 0; gen[w] <= gen[w] + 1;
          for (int r = 0; r < 256; r++) reg_sh[w][r] = 0;
          for (int r = 0; r < 4; r++) spm_sh[w][r] = 0;
        end else if (run[w]) begin
          if (waitc[w] > 0) waitc[w] <= waitc[w] - 1;
          if (warp_exit[w]) run[w] <= 0;
        end
      end
      for (int p = 0; p < NS; p++) begin
        chk_q[p] <= 0; chk_s_q[p] <= 0;
        if (issue_valid[p]) begin
          int w;
          warp_instr_t d;
          int unsigned tag;
          w = int'(issue_warp[p]);
          d = gen_instr(w, pc[w]);
          tag = 32'(w * 65536 + gen[w] * 256 + pc[w] + 1);
          w_q[p] <= w;
          if (reg_sh[w][d.reg_no] != 0) begin chk_q[p] <= 1; exp_r_q[p] <= reg_sh[w][d.reg_no]; end
          if (d.uses_spm && spm_sh[w][(pc[w] < 3) ? 0 : 1] != 0) begin
            chk_s_q[p] <= 1; exp_s_q[p] <= spm_sh[w][(pc[w] < 3) ? 0 : 1];
          end
          pc[w]    <= pc[w] + 1;
          waitc[w] <= d.is_mem ? MEMLAT : ALULAT;
          if (p == 0) begin
            wb_en <= 1; wb_warp <= WID_W'(w); wb_reg <= d.reg_no; wb_mask <= '1;
            for (int l = 0; l < LANES; l++) wb_data[l] <= tag;
            reg_sh[w][d.reg_no] = tag;
            if (d.uses_spm) begin
              st_en <= 1; st_warp <= WID_W'(w); st_loc <= d.spm_addr; st_data <= tag;
              spm_sh[w][(pc[w] < 3) ? 0 : 1] = tag;
            end
          end
        end
      end
    end
  end
endmodule
