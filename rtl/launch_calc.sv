// launch_calc: how many thread blocks an SM launches with resource sharing.
//
// Given a kernel's block size, registers per thread, scratchpad bytes per
// block and the sharing threshold t, it computes the launch plan of one SM:
// U unshared blocks and S shared pairs, M = U + 2S blocks in all.
//
// Following the paper, for the limiting resource (R units per SM, R_tb per
// block):  S + U = floor(R/R_tb)  keeps as many blocks progressing as without
// sharing, and  U*R_tb + S*(1+t)*R_tb <= R  must fit.  With
// base = floor(R/R_tb) and rem = R mod R_tb this gives
//   S = min(base, floor(rem / (t*R_tb))),  M = base + S,
// the integer form of M = base + (R/R_tb - base)/t. M is then limited, as in
// the paper, by the resident-thread and resident-block limits; this design
// also limits it by the other, unshared resource. When M is cut, the pairs
// are cut first: S' = M - D and U' = D - S', where D is the number of blocks
// an SM holds without sharing, so S' + U' = D still holds. The sharing-mode
// bit is set when M > D.
//
// Own choices: the resource with the smaller block count is the one shared
// (registers on a tie); registers per block are counted per whole warp
// (warps * 32 * regs per thread) so that the register-file layout of
// rs_pkg always fits; the private parts floor(t*R_w) and floor(t*R_tb) are
// rounded down. The six divisions run one after the other on one sequential
// divider, each taking one issue cycle, 24 steps and one result cycle:
// with start high in cycle 0, done is high in cycle 6*26+2 = 158.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, which a lint tool reports as a
// signal used both synchronously and asynchronously. Assertions are not
// logic, so the warning stands.
module launch_calc
  import rs_pkg::*;
#(
  parameter int unsigned REGS     = REGS_PER_SM,
  parameter int unsigned SPM      = SPM_BYTES,
  parameter int unsigned MAXTB    = MAX_TB,
  parameter int unsigned MAXTHR   = MAX_THREADS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  kernel_cfg_t  cfg,
  output logic         busy,
  output logic         done,
  output launch_plan_t plan
);
  localparam int unsigned DW = 24;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_FINAL} state_e;
  state_e state_q;

  kernel_cfg_t    cfg_q;
  logic [2:0]     op_q;
  logic [DW-1:0]  quo_q [6];
  logic [DW-1:0]  rem_q [6];

  logic [5:0]     wpb;
  logic [DW-1:0]  thr_blk, rtb_reg;
  logic           share_spm;
  logic [DW-1:0]  dvd, dvs;
  logic           div_start, div_busy, div_done;
  logic [DW-1:0]  div_q, div_r;

  assign wpb     = 6'((32'(cfg_q.threads_per_tb) + 31) >> 5);
  assign thr_blk = DW'(wpb) * DW'(WARP_SIZE);
  assign rtb_reg = thr_blk * DW'(cfg_q.regs_per_thread);

  // Resource chosen after the first two divisions: the scarcer one.
  assign share_spm = quo_q[1] < quo_q[0];

  always_comb begin
    dvd = '0; dvs = '0;
    unique case (op_q)
      3'd0: begin dvd = DW'(REGS);   dvs = rtb_reg; end
      3'd1: begin dvd = DW'(SPM);    dvs = DW'(cfg_q.spm_per_tb); end
      3'd2: begin dvd = DW'(MAXTHR); dvs = thr_blk; end
      3'd3: begin
        dvd = (share_spm ? rem_q[1] : rem_q[0]) * DW'(10);
        dvs = DW'(cfg_q.t_tenths) * (share_spm ? DW'(cfg_q.spm_per_tb) : rtb_reg);
      end
      3'd4: begin dvd = DW'(cfg_q.t_tenths) * DW'(cfg_q.regs_per_thread); dvs = DW'(10); end
      default: begin dvd = DW'(cfg_q.t_tenths) * DW'(cfg_q.spm_per_tb); dvs = DW'(10); end
    endcase
  end

  assign div_start = (state_q == S_ISSUE);

  seq_divider #(.W(DW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(dvd), .divisor(dvs),
    .busy(div_busy), .done(div_done), .quotient(div_q), .remainder(div_r)
  );

  // Saturate a count to 15 (4-bit plan fields; MAXTB <= 15).
  function automatic int unsigned sat(input logic [DW-1:0] v);
    return (v > DW'(15)) ? 15 : int'(v);
  endfunction

  function automatic int unsigned min2(input int unsigned a, input int unsigned b);
    return (a < b) ? a : b;
  endfunction

  launch_plan_t plan_d;
  int unsigned  base, other, s_fit, m, d, sp;
  always_comb begin
    base   = share_spm ? sat(quo_q[1]) : sat(quo_q[0]);
    other  = min2(min2(sat(quo_q[2]), MAXTB), share_spm ? sat(quo_q[0]) : sat(quo_q[1]));
    s_fit  = min2(sat(quo_q[3]), base);
    m      = min2(base + s_fit, other);
    d      = min2(base, other);
    sp     = m - d;
    plan_d = '0;
    plan_d.res          = share_spm ? SHARE_SPM : SHARE_REG;
    plan_d.n_pairs      = 4'(sp);
    plan_d.n_unshared   = 4'(d - sp);
    plan_d.n_max        = 4'(m);
    plan_d.n_default    = 4'(d);
    plan_d.sharing      = (m > d);
    plan_d.warps_per_tb = wpb;
    plan_d.rpt          = cfg_q.regs_per_thread;
    plan_d.rwt          = 8'(quo_q[4]);
    plan_d.spb          = cfg_q.spm_per_tb;
    plan_d.spriv        = 15'(quo_q[5]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cfg_q   <= '0;
      op_q    <= '0;
      done    <= 1'b0;
      plan    <= '0;
      for (int i = 0; i < 6; i++) begin quo_q[i] <= '0; rem_q[i] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          cfg_q   <= cfg;
          op_q    <= '0;
          state_q <= S_ISSUE;
        end
        S_ISSUE: state_q <= S_WAIT;
        S_WAIT: if (div_done) begin
          quo_q[op_q] <= div_q;
          rem_q[op_q] <= div_r;
          if (op_q == 3'd5) state_q <= S_FINAL;
          else begin
            op_q    <= op_q + 1'b1;
            state_q <= S_ISSUE;
          end
        end
        S_FINAL: begin
          plan    <= plan_d;
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // The plan must fit the thread-block slots.
  assert property (@(posedge clk) disable iff (!rst_n) done |-> plan.n_max <= 4'(MAXTB));
endmodule
