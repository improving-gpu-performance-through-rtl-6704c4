// tb_sharing_state: slot launch, warp layout, partner ids, ownership.
//
// Plan: 1 unshared block + 1 shared pair (slots 1,2), 2 warps per block.
// The test launches three blocks, checks warp activity, shared bits,
// partner ids (8 = none) and dynamic warp ids, makes slot 1 take a lock
// (owner), finishes slot 1 and checks that ownership moves to slot 2, that
// slot 1 is offered again and its new block starts as a non-owner, and that
// kernel_start clears everything.
module tb_sharing_state;
  import rs_pkg::*;
  localparam int NW = 16, NTB = 8;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  launch_plan_t plan;
  logic launch_req, launch_gnt, sharing_mode, own_transfer;
  logic [3:0] launch_slot;
  logic [NW-1:0] warp_exit, warp_active, warp_shared, warp_owner;
  logic [NTB-1:0] slot_holds, slot_active, slot_shared, slot_owner, tb_finish;
  logic [TBID_W-1:0] partner [NTB];
  logic [3:0] warp_slot [NW];
  logic [5:0] warp_k [NW];
  logic [15:0] warp_age [NW];
  int checks = 0, failures = 0;

  sharing_state #(.NW(NW), .NTB(NTB)) dut (.clk, .rst_n, .kernel_start, .plan, .launch_req,
    .launch_slot, .launch_gnt, .warp_exit, .slot_holds, .sharing_mode, .partner, .slot_active,
    .slot_shared, .slot_owner, .tb_finish, .warp_active, .warp_shared, .warp_owner, .warp_slot,
    .warp_k, .warp_age, .own_transfer);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic launch(input int exp_slot);
    check(launch_req && int'(launch_slot) == exp_slot, $sformatf("offers slot %0d (got %0d)", exp_slot, launch_slot));
    launch_gnt = 1; @(negedge clk); launch_gnt = 0;
  endtask

  initial begin
    plan = '0;
    plan.res = SHARE_REG; plan.sharing = 1; plan.n_unshared = 1; plan.n_pairs = 1;
    plan.n_max = 3; plan.n_default = 2; plan.warps_per_tb = 2; plan.rpt = 10; plan.rwt = 1;
    warp_exit = 0; slot_holds = 0; launch_gnt = 0;
    @(negedge clk); rst_n = 1; @(negedge clk);
    check(sharing_mode, "sharing bit");
    check(partner[0] == 8 && partner[1] == 2 && partner[2] == 1 && partner[3] == 8, "partner ids");
    check(warp_shared == 16'b0000_0000_0011_1100, "shared warps 2..5");
    check(warp_slot[3] == 1 && warp_k[3] == 1 && warp_slot[4] == 2 && warp_k[4] == 0, "warp layout");
    launch(0); launch(1); launch(2);
    check(!launch_req, "no slot beyond M");
    check(warp_active == 16'b0000_0000_0011_1111, "warps of three blocks active");
    check(warp_age[0] == 0 && warp_age[1] == 1 && warp_age[4] == 4 && warp_age[5] == 5, "dynamic ids");
    check(warp_owner == 0, "no owner yet");
    slot_holds = 8'b0000_0010; @(negedge clk);
    check(slot_owner == 8'b0000_0010 && warp_owner == 16'b0000_0000_0000_1100, "slot 1 owner");
    slot_holds = 0;
    warp_exit = 16'b0000_0000_0000_0100; #1 check(tb_finish == 0, "one warp left"); @(negedge clk);
    warp_exit = 16'b0000_0000_0000_1000; #1;
    check(tb_finish == 8'b0000_0010 && own_transfer, "slot 1 finishes, ownership transfer");
    @(negedge clk); warp_exit = 0;
    check(slot_owner == 8'b0000_0100 && warp_owner == 16'b0000_0000_0011_0000, "slot 2 now owner");
    check(slot_active == 8'b0000_0101, "slot 1 free");
    launch(1);
    check(slot_owner == 8'b0000_0100, "new block is non-owner");
    check(warp_age[2] == 6 && warp_age[3] == 7, "new dynamic ids");
    // new block takes a lock while the owner holds none: ownership follows the lock
    slot_holds = 8'b0000_0010; @(negedge clk);
    check(slot_owner == 8'b0000_0010, "ownership follows the lock holder");
    slot_holds = 0;
    // unshared block finishing does not transfer anything
    warp_exit = 16'b0000_0000_0000_0011; #1;
    check(tb_finish == 8'b0000_0001 && !own_transfer, "unshared block finishes");
    @(negedge clk); warp_exit = 0;
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    check(slot_active == 0 && warp_active == 0 && slot_owner == 0, "kernel start clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
