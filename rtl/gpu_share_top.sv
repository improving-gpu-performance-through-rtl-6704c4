// gpu_share_top: resource sharing across the SMs of a GPU.
//
// N_SM sm_share_unit instances (14 in the evaluated GPU) share one
// launch_calc and a thread-block dispatcher. A kernel is started with a
// kernel_start pulse carrying its description (cfg) and its number of
// thread blocks (grid_tbs). launch_calc works out the per-SM plan (U
// unshared blocks, S shared pairs, private sizes); then every SM's slots are
// cleared and the dispatcher hands out thread blocks, one per cycle, round
// robin over the SMs that have a free slot, until the grid is used up. Each
// launch is reported on launch_valid / launch_slot / launch_tb so that the
// SM front ends (outside this design) can start the block's warps.
// kernel_done pulses once every block has been launched and has finished.
//
// SM0 is the reference SM of dynamic warp execution: it never issues memory
// instructions of non-owner warps, and its per-period stall count is fed to
// all other SMs. The block dispatcher itself is not described by the paper;
// round robin is this design's choice. The SM pipelines (instruction supply,
// execution, memory system) are outside this design: per SM, the next
// instruction of each warp and the warp exits come in as ports, and issue,
// register and scratchpad read data go out.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of assertions in the sub-blocks, which a lint
// tool reports as a signal used both synchronously and asynchronously. Assertions are not
// logic, so the warning stands.
module gpu_share_top
  import rs_pkg::*;
#(
  parameter int unsigned N     = N_SM,
  parameter int unsigned NW    = NUM_WARPS,
  parameter int unsigned NS    = NUM_SCHED,
  parameter int unsigned PER   = DWE_PERIOD
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    kernel_start,
  input  kernel_cfg_t             cfg,
  input  logic [15:0]             grid_tbs,
  output logic                    plan_valid,
  output launch_plan_t            plan,
  output logic                    kernel_done,
  // block launches
  output logic [N-1:0]            launch_valid,
  output logic [3:0]              launch_slot [N],
  output logic [15:0]             launch_tb,
  // SM front ends
  input  warp_instr_t             instr     [N][NW],
  input  logic [NW-1:0]           warp_exit [N],
  output logic [NS-1:0]           issue_valid [N],
  output logic [WID_W-1:0]        issue_warp  [N][NS],
  output logic [LANES-1:0][31:0]  rf_data     [N][NS],
  output logic [31:0]             spm_rdata   [N][NS],
  input  logic [N-1:0]            wb_en,
  input  logic [WID_W-1:0]        wb_warp   [N],
  input  logic [REG_W-1:0]        wb_reg    [N],
  input  logic [LANES-1:0]        wb_mask   [N],
  input  logic [LANES-1:0][31:0]  wb_data   [N],
  input  logic [N-1:0]            st_en,
  input  logic [WID_W-1:0]        st_warp   [N],
  input  logic [SPA_W-1:0]        st_loc    [N],
  input  logic [31:0]             st_data   [N],
  // status
  output logic [N-1:0]            sharing_mode,
  output logic [NW-1:0]           warp_active [N],
  output logic [3:0]              mem_prob  [N],
  output logic [15:0]             period_stalls [N],
  output sm_events_t              events    [N]
);
  typedef enum logic [1:0] {K_IDLE, K_CALC, K_RUN} kstate_e;
  kstate_e state_q;

  logic        calc_done, calc_busy;
  launch_plan_t calc_plan;
  logic        sm_kstart;
  logic [15:0] left_q, next_id_q;
  logic [$clog2(N)-1:0] rr_q;

  launch_calc u_calc (
    .clk, .rst_n, .start(kernel_start && state_q == K_IDLE), .cfg,
    .busy(calc_busy), .done(calc_done), .plan(calc_plan)
  );

  logic [N-1:0] lreq, lgnt;
  logic [7:0]   sact [N];
  logic [7:0]   sown [N];

  // round-robin choice among requesting SMs
  logic                 any_req;
  logic [$clog2(N)-1:0] pick;
  always_comb begin
    any_req = 1'b0;
    pick    = '0;
    for (int i = N - 1; i >= 0; i--) begin
      int unsigned j;
      j = (int'(rr_q) + i) % N;
      if (lreq[j]) begin
        any_req = 1'b1;
        pick    = ($clog2(N))'(j);
      end
    end
    lgnt = '0;
    if (state_q == K_RUN && any_req && left_q != 0) lgnt[pick] = 1'b1;
  end

  logic busy_any;
  always_comb begin
    busy_any = 1'b0;
    for (int i = 0; i < N; i++) busy_any |= (|sact[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= K_IDLE; plan <= '0; plan_valid <= 1'b0; left_q <= '0; next_id_q <= '0;
      rr_q <= '0; kernel_done <= 1'b0; sm_kstart <= 1'b0; launch_tb <= '0;
    end else begin
      kernel_done <= 1'b0;
      sm_kstart   <= 1'b0;
      unique case (state_q)
        K_IDLE: if (kernel_start) begin
          left_q     <= grid_tbs;
          next_id_q  <= '0;
          plan_valid <= 1'b0;
          state_q    <= K_CALC;
        end
        K_CALC: if (calc_done) begin
          plan       <= calc_plan;
          plan_valid <= 1'b1;
          sm_kstart  <= 1'b1;
          state_q    <= K_RUN;
        end
        K_RUN: begin
          if (|lgnt) begin
            left_q    <= left_q - 1'b1;
            next_id_q <= next_id_q + 1'b1;
            launch_tb <= next_id_q;
            rr_q      <= ($clog2(N))'((int'(pick) + 1) % N);
          end
          if (!sm_kstart && left_q == 0 && !busy_any && !(|lgnt)) begin
            kernel_done <= 1'b1;
            state_q     <= K_IDLE;
          end
        end
        default: state_q <= K_IDLE;
      endcase
    end
  end

  // launch_valid/launch_slot are registered together with launch_tb
  logic [3:0] lslot [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      launch_valid <= '0;
      for (int i = 0; i < N; i++) launch_slot[i] <= '0;
    end else begin
      launch_valid <= lgnt;
      for (int i = 0; i < N; i++) launch_slot[i] <= lslot[i];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_sm
    sm_share_unit #(.NW(NW), .NS(NS), .PERIOD(PER)) u_sm (
      .clk, .rst_n, .kernel_start(sm_kstart), .plan,
      .is_ref(i == 0), .salt(16'(i * 16'h3D17)), .ref_stalls(period_stalls[0]),
      .launch_req(lreq[i]), .launch_slot(lslot[i]), .launch_gnt(lgnt[i]),
      .instr(instr[i]), .warp_exit(warp_exit[i]),
      .issue_valid(issue_valid[i]), .issue_warp(issue_warp[i]),
      .rf_data(rf_data[i]), .spm_rdata(spm_rdata[i]),
      .wb_en(wb_en[i]), .wb_warp(wb_warp[i]), .wb_reg(wb_reg[i]), .wb_mask(wb_mask[i]),
      .wb_data(wb_data[i]),
      .st_en(st_en[i]), .st_warp(st_warp[i]), .st_loc(st_loc[i]), .st_data(st_data[i]),
      .sharing_mode(sharing_mode[i]), .slot_active(sact[i]), .slot_owner(sown[i]),
      .warp_active(warp_active[i]), .period_stalls(period_stalls[i]), .mem_prob(mem_prob[i]),
      .events(events[i])
    );
  end
endmodule
