// tb_sm_share_unit: one SM running two kernels through the warp model.
//
// Kernel A shares registers with the block counts of a MUM-like kernel
// (256 threads, 28 registers per thread, t = 0.1): 2 unshared blocks and 2
// shared pairs, 8 warps per block, 2 unshared registers per shared warp.
// Kernel B shares scratchpad like lavaMD (128 threads, 7200 bytes, t = 0.1):
// 2 shared pairs, 720 private bytes per block. Each kernel runs GRID blocks.
// Checked: every block launched finishes, data read back from registers and
// scratchpad is what the same warp wrote, stall events match an independent
// count, the two blocks of a pair never both hold locks, and the mechanisms
// (lock taken, access refused and retried, deadlock rule, ownership
// transfer, owner issued ahead of unshared warps, non-owner memory
// instruction held back, probability lowered) each happen at least once.
module tb_sm_share_unit;
  import rs_pkg::*;
  localparam int NW = 48, NS = 2, GRID = 24;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  launch_plan_t plan;
  logic launch_req, launch_gnt;
  logic [3:0] launch_slot;
  warp_instr_t instr [NW];
  logic [NW-1:0] warp_exit, warp_active;
  logic [NS-1:0] issue_valid;
  logic [WID_W-1:0] issue_warp [NS];
  logic [LANES-1:0][31:0] rf_data [NS];
  logic [31:0] spm_rdata [NS];
  logic wb_en, st_en;
  logic [WID_W-1:0] wb_warp, st_warp;
  logic [REG_W-1:0] wb_reg;
  logic [LANES-1:0] wb_mask;
  logic [LANES-1:0][31:0] wb_data;
  logic [SPA_W-1:0] st_loc;
  logic [31:0] st_data;
  logic sharing_mode;
  logic [7:0] slot_active, slot_owner;
  logic [15:0] period_stalls;
  logic [3:0] mem_prob;
  sm_events_t ev;
  int mism_a, rd_a, mism_b, rd_b;
  int checks = 0, failures = 0;
  int n [string];
  int my_stalls, launched, finished;
  bit spm_phase;

  sm_share_unit #(.PERIOD(50)) dut (
    .clk, .rst_n, .kernel_start, .plan, .is_ref(1'b0), .salt(16'h4321), .ref_stalls(16'd0),
    .launch_req, .launch_slot, .launch_gnt, .instr, .warp_exit,
    .issue_valid, .issue_warp, .rf_data, .spm_rdata,
    .wb_en, .wb_warp, .wb_reg, .wb_mask, .wb_data, .st_en, .st_warp, .st_loc, .st_data,
    .sharing_mode, .slot_active, .slot_owner, .warp_active, .period_stalls, .mem_prob, .events(ev));

  // two models, one per kernel kind; the active one drives the SM
  warp_instr_t ia [NW], ib [NW];
  logic [NW-1:0] xa, xb;
  logic wa, wb2, sa, sb;
  logic [WID_W-1:0] wwa, wwb, swa, swb;
  logic [REG_W-1:0] wra, wrb;
  logic [LANES-1:0] wma, wmb;
  logic [LANES-1:0][31:0] wda, wdb;
  logic [SPA_W-1:0] sla, slb;
  logic [31:0] sda, sdb;
  logic rst_a, rst_b;
  assign rst_a = rst_n && !spm_phase;
  assign rst_b = rst_n && spm_phase;

  tb_warp_model #(.NW(NW), .NS(NS), .LEN(24), .MEMLAT(40), .SPM(0)) m_a (.clk, .rst_n(rst_a), .plan,
    .warp_active, .issue_valid, .issue_warp, .rf_data, .spm_rdata, .instr(ia), .warp_exit(xa),
    .wb_en(wa), .wb_warp(wwa), .wb_reg(wra), .wb_mask(wma), .wb_data(wda),
    .st_en(sa), .st_warp(swa), .st_loc(sla), .st_data(sda), .mismatches(mism_a), .reads_checked(rd_a));
  tb_warp_model #(.NW(NW), .NS(NS), .LEN(16), .SPM(1)) m_b (.clk, .rst_n(rst_b), .plan,
    .warp_active, .issue_valid, .issue_warp, .rf_data, .spm_rdata, .instr(ib), .warp_exit(xb),
    .wb_en(wb2), .wb_warp(wwb), .wb_reg(wrb), .wb_mask(wmb), .wb_data(wdb),
    .st_en(sb), .st_warp(swb), .st_loc(slb), .st_data(sdb), .mismatches(mism_b), .reads_checked(rd_b));

  always_comb begin
    instr = spm_phase ? ib : ia;  warp_exit = spm_phase ? xb : xa;
    wb_en = spm_phase ? wb2 : wa; wb_warp = spm_phase ? wwb : wwa; wb_reg = spm_phase ? wrb : wra;
    wb_mask = spm_phase ? wmb : wma; wb_data = spm_phase ? wdb : wda;
    st_en = spm_phase ? sb : sa; st_warp = spm_phase ? swb : swa; st_loc = spm_phase ? slb : sla;
    st_data = spm_phase ? sdb : sda;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // event counters and independent stall count
  always @(posedge clk) if (rst_n && !kernel_start) begin
    if (ev.lock_acquire)  n["lock_acquire"]++;
    if (ev.lock_deny)     n["lock_deny"]++;
    if (ev.deadlock_deny) n["deadlock_deny"]++;
    if (ev.own_transfer)  n["own_transfer"]++;
    if (ev.owf_bypass)    n["owf_bypass"]++;
    if (ev.dwe_gate)      n["dwe_gate"]++;
    if (ev.prob_down)     n["prob_down"]++;
    if (ev.shared_hit)    n["shared_hit"]++;
    if (ev.private_hit)   n["private_hit"]++;
    if (ev.nonown_issue)  n["nonown_issue"]++;
    if (ev.launch_shared) n["launch_shared"]++;
    if (spm_phase && ev.lock_acquire) n["spm_lock"]++;
    if (spm_phase && ev.lock_deny)    n["spm_deny"]++;
    if (ev.stall) n["stall_ev"]++;
    if ((|warp_active) && !(|issue_valid)) my_stalls++;
    if (ev.launch) launched++;
    if (ev.tb_finish) finished += $countones(dut.u_state.tb_finish);
  end

  task automatic run_kernel(input int grid);
    int given;
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    given = 0;
    while (given < grid || slot_active != 0) begin
      launch_gnt = (given < grid) && launch_req;
      if (launch_gnt) given++;
      @(negedge clk);
      launch_gnt = 0;
    end
  endtask

  initial begin
    plan = '0; launch_gnt = 0; spm_phase = 0; my_stalls = 0; launched = 0; finished = 0;
    plan.res = SHARE_REG; plan.sharing = 1; plan.n_unshared = 2; plan.n_pairs = 2; plan.n_max = 6;
    plan.n_default = 4; plan.warps_per_tb = 8; plan.rpt = 28; plan.rwt = 2; plan.spb = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    check(sharing_mode, "sharing mode set");
    run_kernel(GRID);
    $display("kernel A done at %0t, prob %0d", $time, mem_prob);
    check(launched == GRID && finished == GRID, $sformatf("kernel A blocks %0d/%0d", launched, finished));
    check(mism_a == 0 && rd_a > 100, $sformatf("kernel A data: %0d mismatches of %0d reads", mism_a, rd_a));
    // kernel B: scratchpad sharing
    spm_phase = 1;
    plan = '0;
    plan.res = SHARE_SPM; plan.sharing = 1; plan.n_unshared = 0; plan.n_pairs = 2; plan.n_max = 4;
    plan.n_default = 2; plan.warps_per_tb = 4; plan.rpt = 8; plan.rwt = 0; plan.spb = 7200; plan.spriv = 720;
    launched = 0; finished = 0;
    run_kernel(GRID);
    check(launched == GRID && finished == GRID, $sformatf("kernel B blocks %0d/%0d", launched, finished));
    check(mism_b == 0 && rd_b > 20, $sformatf("kernel B data: %0d mismatches of %0d reads", mism_b, rd_b));
    check(n["stall_ev"] == my_stalls, $sformatf("stalls %0d vs %0d", n["stall_ev"], my_stalls));
    foreach (n[k]) $display("  %-14s %0d", k, n[k]);
    begin
      string must [13] = '{"lock_acquire","lock_deny","deadlock_deny","own_transfer","owf_bypass",
                           "dwe_gate","prob_down","shared_hit","private_hit","nonown_issue",
                           "launch_shared","spm_lock","spm_deny"};
      foreach (must[i]) check(n.exists(must[i]) && n[must[i]] > 0, {"mechanism never seen: ", must[i]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
