// rs_pkg: shared sizes, types and address-mapping functions of the
// resource-sharing SM.
//
// The sizes are those of the evaluated GPU configuration: 32768 32-bit
// registers, 16 KB of scratchpad, at most 8 resident thread blocks and 1536
// resident threads (48 warps of 32 threads) per SM, 14 SMs, and a sharing
// threshold t = 0.1 (90 % of a shared block's resource is shared).
// The threshold is held in tenths (t = T_TENTHS / 10), which covers every
// threshold the evaluation sweeps (0.1 ... 1.0).
//
// The physical layout of a sharing SM (this design's own choice; the paper
// only says unshared warps use (WarpId, RegNo) directly):
//   thread-block slots 0 .. U-1           unshared blocks, R_tb units each
//   slots U+2j, U+2j+1 (j = 0 .. S-1)     shared pair j, (1+t)R_tb units
// Inside pair j, for registers, warp k of each side owns a group of
// R_w + R_w*t rows: side 0 private, side 1 private, then the shared rows.
// For scratchpad, the pair owns SPB + SPB*t bytes: side 0 private, side 1
// private, then the shared part.
package rs_pkg;

  localparam int unsigned WARP_SIZE   = 32;
  localparam int unsigned LANES       = 32;
  localparam int unsigned REGS_PER_SM = 32768;
  localparam int unsigned RF_ROWS     = REGS_PER_SM / LANES;   // 1024 warp-registers
  localparam int unsigned SPM_BYTES   = 16384;
  localparam int unsigned MAX_TB      = 8;
  localparam int unsigned MAX_THREADS = 1536;
  localparam int unsigned NUM_WARPS   = MAX_THREADS / WARP_SIZE; // 48
  localparam int unsigned N_SM        = 14;
  localparam int unsigned NUM_SCHED   = 2;
  localparam int unsigned T_TENTHS    = 1;
  localparam int unsigned DWE_PERIOD  = 1000;

  localparam int unsigned WID_W  = $clog2(NUM_WARPS);       // 6
  localparam int unsigned TBID_W = $clog2(MAX_TB + 1);      // 4: ids 0..T-1, T means "none"
  localparam int unsigned ROW_W  = $clog2(RF_ROWS);         // 10
  localparam int unsigned REG_W  = 8;                       // register number 0..255
  localparam int unsigned SPA_W  = $clog2(SPM_BYTES);       // 14

  typedef enum logic [0:0] {SHARE_REG = 1'b0, SHARE_SPM = 1'b1} share_res_e;

  // Scheduling class of a warp, highest value is served first (OWF).
  typedef enum logic [1:0] {
    CLS_NONOWNER = 2'd0,
    CLS_UNSHARED = 2'd1,
    CLS_OWNER    = 2'd2
  } warp_class_e;

  // Kernel description given at launch.
  typedef struct packed {
    logic [10:0] threads_per_tb;   // 1 .. 1024
    logic [7:0]  regs_per_thread;  // R_w in warp-registers
    logic [14:0] spm_per_tb;       // bytes, 0 .. 16384
    logic [3:0]  t_tenths;         // 1 .. 10
  } kernel_cfg_t;

  // Result of the launch computation (Section "Computing No of Thread Blocks").
  typedef struct packed {
    share_res_e  res;          // the resource that is shared
    logic [3:0]  n_unshared;   // U
    logic [3:0]  n_pairs;      // S
    logic [3:0]  n_max;        // M = U + 2S
    logic [3:0]  n_default;    // blocks an SM would hold without sharing
    logic        sharing;      // sharing-mode bit: M > default
    logic [5:0]  warps_per_tb; // WPB
    logic [7:0]  rpt;          // registers per thread (R_w)
    logic [7:0]  rwt;          // unshared registers per shared warp, floor(t R_w)
    logic [14:0] spb;          // scratchpad bytes per block (R_tb)
    logic [14:0] spriv;        // private scratchpad bytes per shared block, floor(t R_tb)
  } launch_plan_t;

  // Next instruction of a warp, as presented by the SM front end.
  typedef struct packed {
    logic             valid;    // an instruction is ready to issue
    logic             is_mem;   // long-latency global memory instruction
    logic             uses_spm; // accesses scratchpad at spm_addr
    logic [REG_W-1:0] reg_no;   // highest register number the instruction names
    logic [SPA_W-1:0] spm_addr; // highest scratchpad byte location it touches
  } warp_instr_t;

  // One-cycle event pulses of an SM, counted by whoever watches them.
  typedef struct packed {
    logic launch;        // a thread block was launched into a slot
    logic launch_shared; // ... into a shared slot (as a non-owner)
    logic tb_finish;     // a thread block finished
    logic own_transfer;  // an owner block finished and its partner became owner
    logic lock_acquire;  // a lock on a shared register group / scratchpad region was taken
    logic lock_deny;     // a shared access was refused (retry later)
    logic deadlock_deny; // refused because the partner block holds locks
    logic shared_hit;    // an access to a shared register/location was granted
    logic private_hit;   // a shared warp accessed its private part
    logic owner_issue;   // an owner warp issued
    logic unshared_issue;// an unshared warp issued
    logic nonown_issue;  // a non-owner warp issued
    logic owf_bypass;    // an owner warp was issued ahead of a ready unshared warp
    logic dwe_gate;      // a non-owner memory instruction was held back
    logic stall;         // warps resident but nothing issued
    logic prob_up;       // memory-issue probability raised
    logic prob_down;     // memory-issue probability lowered
  } sm_events_t;

  // Physical register-file row of (warp slot k of thread-block slot s, register r).
  function automatic logic [ROW_W-1:0] reg_row(input launch_plan_t p,
                                               input logic [3:0] slot,
                                               input logic [5:0] k,
                                               input logic [REG_W-1:0] r);
    int unsigned row, pair, side, grp;
    if (p.res != SHARE_REG || slot < p.n_unshared) begin
      row = (int'(slot) * int'(p.warps_per_tb) + int'(k)) * int'(p.rpt) + int'(r);
    end else begin
      pair = (int'(slot) - int'(p.n_unshared)) / 2;
      side = (int'(slot) - int'(p.n_unshared)) % 2;
      grp  = int'(p.n_unshared) * int'(p.warps_per_tb) * int'(p.rpt)
           + (pair * int'(p.warps_per_tb) + int'(k)) * (int'(p.rpt) + int'(p.rwt));
      if (int'(r) < int'(p.rwt)) row = grp + side * int'(p.rwt) + int'(r);
      else                       row = grp + int'(p.rwt) + int'(r);  // 2*rwt + (r - rwt)
    end
    return row[ROW_W-1:0];
  endfunction

  // Physical scratchpad byte address of location a of thread-block slot s.
  function automatic logic [SPA_W-1:0] spm_addr_map(input launch_plan_t p,
                                                    input logic [3:0] slot,
                                                    input logic [SPA_W-1:0] a);
    int unsigned ad, pair, side, grp;
    if (p.res != SHARE_SPM || slot < p.n_unshared) begin
      ad = int'(slot) * int'(p.spb) + int'(a);
    end else begin
      pair = (int'(slot) - int'(p.n_unshared)) / 2;
      side = (int'(slot) - int'(p.n_unshared)) % 2;
      grp  = int'(p.n_unshared) * int'(p.spb) + pair * (int'(p.spb) + int'(p.spriv));
      if (int'(a) < int'(p.spriv)) ad = grp + side * int'(p.spriv) + int'(a);
      else                         ad = grp + int'(p.spriv) + int'(a);
    end
    return ad[SPA_W-1:0];
  endfunction

endpackage
