// sharing_state: thread-block slots and sharing bookkeeping of one SM.
//
// It holds what the paper lists as the hardware of resource sharing: the
// SM's sharing-mode bit, the partner block id of every slot (MAX_TB stands
// for "-1", no partner), a shared bit and an owner bit per warp, and counts
// the live warps of every slot. Under a launch plan (launch_calc) slots
// 0..U-1 hold unshared blocks and slots U+2j / U+2j+1 form shared pair j.
//
// Launch: launch_req is high while a slot below M is free, launch_slot is
// the lowest such slot; a launch_gnt pulse fills it: its warps
// slot*WPB .. slot*WPB+WPB-1 become active and get increasing dynamic warp
// ids (the age used by the scheduler). A warp_exit pulse retires a warp; the
// last one of a slot pulses tb_finish for that slot and frees it.
//
// Ownership (paper, Section 4): a block whose partner waits on resources it
// holds is the owner. Here a slot becomes owner when it holds a lock
// (slot_holds, from the access controllers) and its partner holds none. When
// an owner block finishes, ownership passes to its partner (own_transfer)
// and the block launched next into the freed slot starts as a non-owner.
// The owner bit is kept per slot: all warps of a block share it, and the
// per-warp bits the paper counts are read out from it.
// kernel_start clears all slots. Everything updates on the clock edge.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions, which a lint tool reports as a
// signal used both synchronously and asynchronously. Assertions are not
// logic, so the warning stands.
module sharing_state
  import rs_pkg::*;
#(
  parameter int unsigned NW  = NUM_WARPS,
  parameter int unsigned NTB = MAX_TB
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 kernel_start,
  input  launch_plan_t         plan,
  // launch handshake with the block dispatcher
  output logic                 launch_req,
  output logic [3:0]           launch_slot,
  input  logic                 launch_gnt,
  // warp retirement from the pipeline
  input  logic [NW-1:0]        warp_exit,
  // which slots hold locks on the shared resource
  input  logic [NTB-1:0]       slot_holds,
  // state read by the rest of the SM
  output logic                 sharing_mode,
  output logic [TBID_W-1:0]    partner   [NTB],
  output logic [NTB-1:0]       slot_active,
  output logic [NTB-1:0]       slot_shared,
  output logic [NTB-1:0]       slot_owner,
  output logic [NTB-1:0]       tb_finish,
  output logic [NW-1:0]        warp_active,
  output logic [NW-1:0]        warp_shared,
  output logic [NW-1:0]        warp_owner,
  output logic [3:0]           warp_slot [NW],
  output logic [5:0]           warp_k    [NW],
  output logic [15:0]          warp_age  [NW],
  output logic                 own_transfer
);
  logic [NTB-1:0] active_q, owner_q;
  logic [6:0]     live_q [NTB];
  logic [NW-1:0]  wact_q;
  logic [15:0]    age_q [NW];
  logic [15:0]    age_ctr_q;

  // ---------------- static layout from the plan ----------------
  always_comb begin
    for (int w = 0; w < NW; w++) begin
      warp_slot[w] = 4'(NTB);            // not mapped
      warp_k[w]    = '0;
      for (int s = 0; s < NTB; s++) begin
        if (w >= s * int'(plan.warps_per_tb) && w < (s + 1) * int'(plan.warps_per_tb)) begin
          warp_slot[w] = 4'(s);
          warp_k[w]    = 6'(w - s * int'(plan.warps_per_tb));
        end
      end
    end
  end

  always_comb begin
    for (int s = 0; s < NTB; s++) begin
      slot_shared[s] = plan.sharing && (s >= int'(plan.n_unshared)) && (s < int'(plan.n_max));
      if (slot_shared[s])
        partner[s] = TBID_W'(int'(plan.n_unshared) + ((s - int'(plan.n_unshared)) ^ 1));
      else
        partner[s] = TBID_W'(NTB);
    end
  end

  assign sharing_mode = plan.sharing;

  // ---------------- launch slot choice ----------------
  always_comb begin
    launch_req  = 1'b0;
    launch_slot = '0;
    for (int s = NTB - 1; s >= 0; s--) begin
      if (s < int'(plan.n_max) && !active_q[s]) begin
        launch_req  = 1'b1;
        launch_slot = 4'(s);
      end
    end
  end

  // ---------------- slot finish ----------------
  logic [NTB-1:0] exit_in_slot;   // some warp of the slot exits this cycle
  logic [6:0]     exits   [NTB];
  always_comb begin
    for (int s = 0; s < NTB; s++) begin
      exits[s] = '0;
      for (int w = 0; w < NW; w++)
        if (warp_exit[w] && wact_q[w] && int'(warp_slot[w]) == s) exits[s] = exits[s] + 1'b1;
      exit_in_slot[s] = (exits[s] != 0);
      tb_finish[s]    = active_q[s] && exit_in_slot[s] && (exits[s] == live_q[s]);
    end
  end

  // ---------------- ownership ----------------
  logic [NTB-1:0] owner_d;
  logic           xfer;
  always_comb begin
    owner_d = owner_q;
    xfer    = 1'b0;
    for (int s = 0; s < NTB; s++) begin
      int unsigned ps;
      ps = int'(partner[s]);
      if (!slot_shared[s]) begin
        owner_d[s] = 1'b0;
      end else if (tb_finish[s]) begin
        owner_d[s] = 1'b0;                              // leaves; replacement starts non-owner
      end else if (tb_finish[ps] && owner_q[ps]) begin
        owner_d[s] = 1'b1;                              // ownership passes to the partner
        xfer       = 1'b1;
      end else if (slot_holds[s] && !slot_holds[ps]) begin
        owner_d[s] = 1'b1;
      end else if (slot_holds[ps] && !slot_holds[s]) begin
        owner_d[s] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q  <= '0;
      owner_q   <= '0;
      wact_q    <= '0;
      age_ctr_q <= '0;
      for (int s = 0; s < NTB; s++) live_q[s] <= '0;
      for (int w = 0; w < NW; w++)  age_q[w]  <= '0;
    end else if (kernel_start) begin
      active_q <= '0;
      owner_q  <= '0;
      wact_q   <= '0;
      for (int s = 0; s < NTB; s++) live_q[s] <= '0;
    end else begin
      owner_q <= owner_d;
      for (int s = 0; s < NTB; s++) begin
        live_q[s] <= live_q[s] - exits[s];
        if (tb_finish[s]) active_q[s] <= 1'b0;
      end
      for (int w = 0; w < NW; w++)
        if (warp_exit[w]) wact_q[w] <= 1'b0;
      if (launch_gnt && launch_req) begin
        active_q[launch_slot] <= 1'b1;
        live_q[launch_slot]   <= 7'(plan.warps_per_tb);
        owner_q[launch_slot]  <= 1'b0;
        for (int w = 0; w < NW; w++) begin
          if (warp_slot[w] == launch_slot) begin
            wact_q[w] <= 1'b1;
            age_q[w]  <= age_ctr_q + 16'(warp_k[w]);
          end
        end
        age_ctr_q <= age_ctr_q + 16'(plan.warps_per_tb);
      end
    end
  end

  always_comb begin
    for (int w = 0; w < NW; w++) begin
      warp_shared[w] = (int'(warp_slot[w]) < NTB) ? slot_shared[warp_slot[w][$clog2(NTB)-1:0]] : 1'b0;
      warp_owner[w]  = (int'(warp_slot[w]) < NTB) ? (slot_shared[warp_slot[w][$clog2(NTB)-1:0]] &&
                                                    owner_q[warp_slot[w][$clog2(NTB)-1:0]]) : 1'b0;
      warp_age[w]    = age_q[w];
    end
  end

  assign slot_active  = active_q;
  assign slot_owner   = owner_q;
  assign warp_active  = wact_q;
  assign own_transfer = xfer;

  // A warp only exits while it is active; a slot is only filled when free.
  assert property (@(posedge clk) disable iff (!rst_n || kernel_start)
                   launch_gnt |-> launch_req);
endmodule
