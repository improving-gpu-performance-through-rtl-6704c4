// tb_gpu_share_small: the whole design end to end with 3 SMs instead of 14.
//
// Same test as the full-size end-to-end bench, with the top's SM count
// overridden to 3 (every SM keeps its default size: 48 warps, 8 block
// slots, 32768 registers, 16 KB scratchpad, 1000-cycle monitoring period)
// so that it builds and runs in a fraction of the time. SM0 is the
// reference SM, SMs 1 and 2 adapt their probability. Two kernels:
//   MUM-like (256 threads, 28 registers per thread, no scratchpad), which
//     is register-limited: 4 blocks per SM without sharing, 6 with sharing
//     at t = 0.1 (2 unshared blocks + 2 shared pairs);
//   lavaMD-like (128 threads, 8 registers, 7200 bytes of scratchpad), which
//     is scratchpad-limited: 2 blocks without sharing, 4 with (2 pairs).
// Checked: the plans, that every thread block of each grid is launched
// exactly once and finishes, that kernel_done comes, that register and
// scratchpad data read back is what each warp wrote, that SM0 (the
// reference) keeps issuing no non-owner memory instruction, and that each
// mechanism happens at least once (shared launch, lock taken, access
// refused, deadlock rule, ownership transfer, owner-first issue, non-owner
// memory instruction held back, probability change, scratchpad region lock).
module tb_gpu_share_small;
  import rs_pkg::*;
  localparam int N = 3, NW = NUM_WARPS, NS = NUM_SCHED;
  localparam int GRID_A = N * 6 * 40, GRID_B = N * 4 * 8;

  logic clk = 0, rst_n = 0, kernel_start = 0;
  kernel_cfg_t cfg;
  logic [15:0] grid_tbs;
  logic plan_valid, kernel_done;
  launch_plan_t plan;
  logic [N-1:0] launch_valid;
  logic [3:0] launch_slot [N];
  logic [15:0] launch_tb;
  warp_instr_t instr [N][NW];
  logic [NW-1:0] warp_exit [N];
  logic [NS-1:0] issue_valid [N];
  logic [WID_W-1:0] issue_warp [N][NS];
  logic [LANES-1:0][31:0] rf_data [N][NS];
  logic [31:0] spm_rdata [N][NS];
  logic [N-1:0] wb_en, st_en;
  logic [WID_W-1:0] wb_warp [N], st_warp [N];
  logic [REG_W-1:0] wb_reg [N];
  logic [LANES-1:0] wb_mask [N];
  logic [LANES-1:0][31:0] wb_data [N];
  logic [SPA_W-1:0] st_loc [N];
  logic [31:0] st_data [N];
  logic [N-1:0] sharing_mode;
  logic [NW-1:0] warp_active [N];
  logic [3:0] mem_prob [N];
  logic [15:0] period_stalls [N];
  sm_events_t events [N];

  gpu_share_top #(.N(N)) dut (.*);

  logic spm_phase = 0;
  int mism [N], rds [N];
  logic mrst;
  assign mrst = rst_n && !kernel_start;

  for (genvar i = 0; i < N; i++) begin : g_fe
    tb_warp_model #(.NW(NW), .NS(NS), .LEN(24), .MEMLAT(40), .SPM(1)) m (
      .clk, .rst_n(mrst), .plan, .warp_active(warp_active[i]), .issue_valid(issue_valid[i]),
      .issue_warp(issue_warp[i]), .rf_data(rf_data[i]), .spm_rdata(spm_rdata[i]),
      .instr(instr[i]), .warp_exit(warp_exit[i]), .wb_en(wb_en[i]), .wb_warp(wb_warp[i]),
      .wb_reg(wb_reg[i]), .wb_mask(wb_mask[i]), .wb_data(wb_data[i]), .st_en(st_en[i]),
      .st_warp(st_warp[i]), .st_loc(st_loc[i]), .st_data(st_data[i]),
      .mismatches(mism[i]), .reads_checked(rds[i]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n [string];
  bit seen [int];

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (launch_valid[i]) begin
        if (seen.exists(int'(launch_tb))) n["dup_launch"]++;
        seen[int'(launch_tb)] = 1;
      end
      if (events[i].launch_shared) n["launch_shared"]++;
      if (events[i].lock_acquire)  n[spm_phase ? "spm_lock" : "reg_lock"]++;
      if (events[i].lock_deny)     n[spm_phase ? "spm_deny" : "reg_deny"]++;
      if (events[i].deadlock_deny) n["deadlock_deny"]++;
      if (events[i].own_transfer)  n["own_transfer"]++;
      if (events[i].owf_bypass)    n["owf_bypass"]++;
      if (events[i].dwe_gate)      n[i == 0 ? "dwe_gate_sm0" : "dwe_gate"]++;
      if (events[i].prob_up || events[i].prob_down) n["prob_change"]++;
      if (events[i].stall)         n["stall"]++;
      if (i == 0 && events[i].nonown_issue && !spm_phase) begin
        for (int p = 0; p < NS; p++)
          if (issue_valid[0][p] && instr[0][issue_warp[0][p]].is_mem &&
              dut.g_sm[0].u_sm.cls[issue_warp[0][p]] == CLS_NONOWNER) n["sm0_nonowner_mem"]++;
      end
    end
  end

  task automatic run_kernel(input int tpb, input int rpt, input int spb, input int grid,
                            input int eu, input int es, input bit espm);
    int cyc;
    cfg.threads_per_tb = 11'(tpb); cfg.regs_per_thread = 8'(rpt);
    cfg.spm_per_tb = 15'(spb); cfg.t_tenths = 4'(T_TENTHS);
    grid_tbs = 16'(grid);
    seen.delete();
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    cyc = 0;
    while (!kernel_done && cyc < 300000) begin @(negedge clk); cyc++; end
    check(kernel_done, "kernel finished");
    check(plan_valid && int'(plan.n_unshared) == eu && int'(plan.n_pairs) == es &&
          (plan.res == SHARE_SPM) == espm && plan.sharing,
          $sformatf("plan U=%0d S=%0d res=%0d", plan.n_unshared, plan.n_pairs, plan.res));
    check(seen.num() == grid, $sformatf("blocks launched %0d of %0d", seen.num(), grid));
    check(sharing_mode == '1, "every SM in sharing mode");
    $display("kernel of %0d blocks took %0d cycles", grid, cyc);
  endtask

  initial begin
    cfg = '0; grid_tbs = 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run_kernel(256, 28, 0, GRID_A, 2, 2, 1'b0);       // MUM-like
    spm_phase = 1;
    run_kernel(128, 8, 7200, GRID_B, 0, 2, 1'b1);     // lavaMD-like
    begin
      int tm = 0, tr = 0;
      for (int i = 0; i < N; i++) begin tm += mism[i]; tr += rds[i]; end
      check(tm == 0 && tr > 1000, $sformatf("data: %0d mismatches in %0d reads", tm, tr));
    end
    check(mem_prob[0] == 10, "reference SM probability untouched");
    check(!n.exists("dup_launch"), "no block launched twice");
    check(!n.exists("sm0_nonowner_mem"), "SM0 issued no non-owner memory instruction");
    foreach (n[k]) $display("  %-16s %0d", k, n[k]);
    begin
      string must [11] = '{"launch_shared","reg_lock","reg_deny","deadlock_deny","own_transfer",
                           "owf_bypass","dwe_gate","dwe_gate_sm0","prob_change","spm_lock","spm_deny"};
      foreach (must[i]) check(n.exists(must[i]) && n[must[i]] > 0, {"mechanism never seen: ", must[i]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
