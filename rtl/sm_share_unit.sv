// sm_share_unit: the resource-sharing logic of one streaming multiprocessor.
//
// It joins the parts the paper adds to an SM:
//   sharing_state   slots, partner ids, shared/owner bits, ownership transfer
//   owf_scheduler   NS warp schedulers (two per SM in the evaluated GPU);
//                   scheduler p serves the warps w with w mod NS == p
//   reg_share_ctrl  register access check and per-warp-pair locks
//   spm_share_ctrl  scratchpad access check and per-block-pair locks
//   dyn_warp_ctrl   probability of issuing non-owner memory instructions
//   reg_file, scratchpad  the storage the checked accesses go to
//
// Issue, per scheduler and cycle: a warp is eligible when it is active, its
// next instruction (instr[w], from the SM front end, outside this design) is
// valid, it is not waiting on a lock, and -- while registers are shared --
// it is not a non-owner warp with a memory instruction that the dynamic
// warp execution draw holds back. A shared warp counts as non-owner only
// while the partner block is the pair's owner; until one block of the pair
// has taken the shared part, both are scheduled like unshared warps (the
// paper defines owner and non-owner only once one block waits for the
// other). The OWF scheduler picks one; its highest
// register number and, if any, its scratchpad location are checked. If both
// are granted the instruction issues: issue_valid/issue_warp are high in
// that cycle, and the register row (and scratchpad word) read for it comes
// out one cycle later on rf_data / spm_rdata. If refused, the warp is marked
// waiting and is not picked again until a lock is released or ownership
// changes, when all waiting warps retry (the paper only says the access is
// retried in another cycle; waking on release is this design's choice).
//
// A stall cycle, counted for dynamic warp execution, is a cycle with warps
// resident and none issued. wb_* writes a register row back and st_* writes
// a scratchpad word, both addressed by warp and register / location and
// translated like the reads. events carries one-cycle pulses of the
// mechanisms for monitoring.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of assertions in the sub-blocks, which a lint
// tool reports as a signal used both synchronously and asynchronously. Assertions are not
// logic, so the warning stands.
module sm_share_unit
  import rs_pkg::*;
#(
  parameter int unsigned NW       = NUM_WARPS,
  parameter int unsigned NTB      = MAX_TB,
  parameter int unsigned NS       = NUM_SCHED,
  parameter int unsigned ROWS     = RF_ROWS,
  parameter int unsigned SPMB     = SPM_BYTES,
  parameter int unsigned PERIOD   = DWE_PERIOD
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    kernel_start,
  input  launch_plan_t            plan,
  input  logic                    is_ref,
  input  logic [15:0]             salt,
  input  logic [15:0]             ref_stalls,
  // block launch
  output logic                    launch_req,
  output logic [3:0]              launch_slot,
  input  logic                    launch_gnt,
  // front end
  input  warp_instr_t             instr [NW],
  input  logic [NW-1:0]           warp_exit,
  // issue
  output logic [NS-1:0]           issue_valid,
  output logic [WID_W-1:0]        issue_warp [NS],
  output logic [LANES-1:0][31:0]  rf_data    [NS],
  output logic [31:0]             spm_rdata  [NS],
  // write-back of registers and scratchpad stores
  input  logic                    wb_en,
  input  logic [WID_W-1:0]        wb_warp,
  input  logic [REG_W-1:0]        wb_reg,
  input  logic [LANES-1:0]        wb_mask,
  input  logic [LANES-1:0][31:0]  wb_data,
  input  logic                    st_en,
  input  logic [WID_W-1:0]        st_warp,
  input  logic [SPA_W-1:0]        st_loc,
  input  logic [31:0]             st_data,
  // status
  output logic                    sharing_mode,
  output logic [NTB-1:0]          slot_active,
  output logic [NTB-1:0]          slot_owner,
  output logic [NW-1:0]           warp_active,
  output logic [15:0]             period_stalls,
  output logic [3:0]              mem_prob,
  output sm_events_t              events
);
  localparam int unsigned NWS = NW / NS;

  logic [TBID_W-1:0] partner [NTB];
  logic [NTB-1:0]    slot_shared, tb_finish, reg_holds, spm_holds, slot_holds;
  logic [NW-1:0]     warp_shared, warp_owner;
  logic [3:0]        warp_slot [NW];
  logic [5:0]        warp_k    [NW];
  logic [15:0]       warp_age  [NW];
  logic              own_xfer;

  sharing_state #(.NW(NW), .NTB(NTB)) u_state (
    .clk, .rst_n, .kernel_start, .plan,
    .launch_req, .launch_slot, .launch_gnt,
    .warp_exit, .slot_holds,
    .sharing_mode, .partner, .slot_active, .slot_shared, .slot_owner, .tb_finish,
    .warp_active, .warp_shared, .warp_owner, .warp_slot, .warp_k, .warp_age,
    .own_transfer(own_xfer)
  );

  assign slot_holds = (plan.res == SHARE_REG) ? reg_holds : spm_holds;

  // ---------------- dynamic warp execution ----------------
  logic mem_allow, stall, p_up, p_down;
  dyn_warp_ctrl #(.PERIOD(PERIOD), .STEPS(10)) u_dwe (
    .clk, .rst_n, .is_ref, .salt, .stall, .ref_stalls,
    .period_stalls, .prob(mem_prob), .mem_allow, .prob_up(p_up), .prob_down(p_down)
  );

  // ---------------- eligibility and class ----------------
  logic [NW-1:0] blocked_q, eligible, gated;
  warp_class_e   cls [NW];
  logic          dwe_on;
  assign dwe_on = (plan.res == SHARE_REG) && plan.sharing;

  function automatic logic partner_owns(input logic [3:0] slot);
    logic [TBID_W-1:0] ps;
    ps = partner[slot[$clog2(NTB)-1:0]];
    return (int'(ps) < NTB) && slot_owner[ps[$clog2(NTB)-1:0]];
  endfunction

  always_comb begin
    for (int w = 0; w < NW; w++) begin
      // a shared warp is a non-owner only once its partner block owns the
      // pair; before either block has taken the shared part it runs as unshared
      cls[w] = !warp_shared[w] ? CLS_UNSHARED :
               warp_owner[w]   ? CLS_OWNER    :
               partner_owns(warp_slot[w]) ? CLS_NONOWNER : CLS_UNSHARED;
      gated[w] = dwe_on && warp_active[w] && instr[w].valid && !blocked_q[w] &&
                 (cls[w] == CLS_NONOWNER) && instr[w].is_mem && !mem_allow;
      eligible[w] = warp_active[w] && instr[w].valid && !blocked_q[w] && !gated[w];
    end
  end

  // ---------------- schedulers ----------------
  logic [NS-1:0]      s_valid, s_bypass;
  logic [WID_W-1:0]   s_warp [NS];
  warp_class_e        s_cls  [NS];

  for (genvar p = 0; p < NS; p++) begin : g_sched
    logic [NWS-1:0]         el;
    warp_class_e            c   [NWS];
    logic [15:0]            a   [NWS];
    logic [$clog2(NWS)-1:0] sel;
    always_comb begin
      for (int i = 0; i < NWS; i++) begin
        el[i] = eligible[i * NS + p];
        c[i]  = cls[i * NS + p];
        a[i]  = warp_age[i * NS + p];
      end
    end
    owf_scheduler #(.NW(NWS)) u_owf (
      .eligible(el), .cls(c), .age(a),
      .valid(s_valid[p]), .sel(sel), .sel_cls(s_cls[p]), .bypass(s_bypass[p])
    );
    assign s_warp[p] = WID_W'(int'(sel) * NS + p);
  end

  // ---------------- access checks ----------------
  logic [NS-1:0]    r_gnt, r_retry, r_acq, r_sh, r_pr, r_dl;
  logic [ROW_W-1:0] r_row [NS];
  logic             r_rel;
  logic [REG_W-1:0] q_reg [NS];
  logic [NS-1:0]    m_req, m_gnt, m_retry, m_acq, m_sh, m_pr;
  logic [SPA_W-1:0] m_loc [NS], m_addr [NS];
  logic             m_rel;

  always_comb begin
    for (int p = 0; p < NS; p++) begin
      q_reg[p] = instr[s_warp[p]].reg_no;
      m_req[p] = s_valid[p] && instr[s_warp[p]].uses_spm;
      m_loc[p] = instr[s_warp[p]].spm_addr;
    end
  end

  reg_share_ctrl #(.NW(NW), .NTB(NTB), .NPORT(NS)) u_regc (
    .clk, .rst_n, .kernel_start, .plan, .warp_slot, .warp_k, .warp_shared, .warp_exit,
    .req_valid(s_valid), .req_warp(s_warp), .req_reg(q_reg),
    .gnt(r_gnt), .retry(r_retry), .acquired(r_acq), .shared_hit(r_sh), .private_hit(r_pr),
    .deadlock_deny(r_dl), .row(r_row), .slot_holds(reg_holds), .release_evt(r_rel)
  );

  spm_share_ctrl #(.NW(NW), .NTB(NTB), .NPORT(NS)) u_spmc (
    .clk, .rst_n, .kernel_start, .plan, .warp_slot, .slot_shared, .tb_finish,
    .req_valid(m_req), .req_warp(s_warp), .req_loc(m_loc),
    .gnt(m_gnt), .retry(m_retry), .acquired(m_acq), .shared_hit(m_sh), .private_hit(m_pr),
    .addr(m_addr), .slot_holds(spm_holds), .release_evt(m_rel)
  );

  logic [NS-1:0] ok, deny;
  always_comb begin
    for (int p = 0; p < NS; p++) begin
      ok[p]   = s_valid[p] && r_gnt[p] && (!m_req[p] || m_gnt[p]);
      deny[p] = s_valid[p] && !ok[p];
    end
  end
  assign issue_valid = ok;
  assign issue_warp  = s_warp;

  // ---------------- waiting warps ----------------
  logic wake;
  assign wake = r_rel || m_rel || (|tb_finish) || own_xfer;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) blocked_q <= '0;
    else if (kernel_start || wake) blocked_q <= '0;
    else begin
      for (int p = 0; p < NS; p++)
        if (deny[p]) blocked_q[s_warp[p]] <= 1'b1;
      for (int w = 0; w < NW; w++)
        if (warp_exit[w]) blocked_q[w] <= 1'b0;
    end
  end

  // ---------------- storage ----------------
  logic [ROW_W-1:0] wb_row;
  assign wb_row = reg_row(plan, warp_slot[wb_warp], warp_k[wb_warp], wb_reg);

  reg_file #(.LANES(LANES), .ROWS(ROWS), .NRD(NS)) u_rf (
    .clk, .rd_en(ok), .rd_row(r_row), .rd_data(rf_data),
    .wr_en(wb_en), .wr_row(wb_row), .wr_mask(wb_mask), .wr_data(wb_data)
  );

  logic [NS:0]      sp_en, sp_we;
  logic [SPA_W-1:0] sp_addr  [NS+1];
  logic [31:0]      sp_wdata [NS+1];
  logic [31:0]      sp_rdata [NS+1];
  always_comb begin
    for (int p = 0; p < NS; p++) begin
      sp_en[p] = ok[p] && m_req[p];
      sp_we[p] = 1'b0;
      sp_addr[p] = m_addr[p];
      sp_wdata[p] = '0;
      spm_rdata[p] = sp_rdata[p];
    end
    sp_en[NS]    = st_en;
    sp_we[NS]    = st_en;
    sp_addr[NS]  = spm_addr_map(plan, warp_slot[st_warp], st_loc);
    sp_wdata[NS] = st_data;
  end

  scratchpad #(.BYTES(SPMB), .NPORT(NS + 1)) u_spm (
    .clk, .en(sp_en), .we(sp_we), .addr(sp_addr), .wdata(sp_wdata), .rdata(sp_rdata)
  );

  // ---------------- stalls and events ----------------
  assign stall = (|warp_active) && !(|ok);

  always_comb begin
    events = '0;
    events.launch        = launch_gnt && launch_req;
    events.launch_shared = launch_gnt && launch_req && slot_shared[launch_slot[$clog2(NTB)-1:0]];
    events.tb_finish     = |tb_finish;
    events.own_transfer  = own_xfer;
    events.lock_acquire  = |(r_acq | (m_acq & ok));
    events.lock_deny     = |deny;
    events.deadlock_deny = |(r_dl & s_valid);
    events.shared_hit    = |((r_sh | m_sh) & ok);
    events.private_hit   = |((r_pr | m_pr) & ok);
    events.stall         = stall;
    events.dwe_gate      = |gated;
    events.prob_up       = p_up;
    events.prob_down     = p_down;
    for (int p = 0; p < NS; p++) begin
      if (ok[p] && s_cls[p] == CLS_OWNER)    events.owner_issue    = 1'b1;
      if (ok[p] && s_cls[p] == CLS_UNSHARED) events.unshared_issue = 1'b1;
      if (ok[p] && s_cls[p] == CLS_NONOWNER) events.nonown_issue   = 1'b1;
      if (ok[p] && s_bypass[p])              events.owf_bypass     = 1'b1;
    end
  end
endmodule
