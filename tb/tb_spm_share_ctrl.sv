// tb_spm_share_ctrl: scratchpad access flow on a hand-built plan.
//
// Plan: one unshared block (slot 0) and one shared pair (slots 1, 2), 100
// bytes per block, t = 0.1 so 10 private bytes per shared block. Warps 0,1
// are in slot 0, 2,3 in slot 1, 4,5 in slot 2. Expected addresses by hand:
// slot 0 -> location; pair region at 100: side 0 private 100.., side 1
// private 110.., shared part at 120 + (loc - 10).
module tb_spm_share_ctrl;
  import rs_pkg::*;
  localparam int NW = 8, NTB = 4;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  launch_plan_t plan;
  logic [3:0] warp_slot [NW];
  logic [NTB-1:0] slot_shared, tb_finish, slot_holds;
  logic [1:0] req_valid, gnt, retry, acquired, shared_hit, private_hit;
  logic [WID_W-1:0] req_warp [2];
  logic [SPA_W-1:0] req_loc [2], addr [2];
  logic release_evt;
  int checks = 0, failures = 0;

  spm_share_ctrl #(.NW(NW), .NTB(NTB), .NPORT(2)) dut (.clk, .rst_n, .kernel_start, .plan,
    .warp_slot, .slot_shared, .tb_finish, .req_valid, .req_warp, .req_loc, .gnt, .retry,
    .acquired, .shared_hit, .private_hit, .addr, .slot_holds, .release_evt);
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

  task automatic acc(input int w, input int loc, input bit exp_gnt, input int exp_addr,
                     input string what);
    req_valid = 2'b01; req_warp[0] = WID_W'(w); req_loc[0] = SPA_W'(loc);
    #1;
    check(gnt[0] == exp_gnt && retry[0] == !exp_gnt, {what, ": grant"});
    if (exp_gnt) check(int'(addr[0]) == exp_addr, $sformatf("%s: addr %0d exp %0d", what, addr[0], exp_addr));
    @(negedge clk);
    req_valid = '0;
  endtask

  initial begin
    plan = '0;
    plan.res = SHARE_SPM; plan.sharing = 1; plan.n_unshared = 1; plan.n_pairs = 1; plan.n_max = 3;
    plan.n_default = 2; plan.warps_per_tb = 2; plan.spb = 100; plan.spriv = 10;
    for (int w = 0; w < NW; w++) warp_slot[w] = 4'(w / 2);
    slot_shared = 4'b0110; tb_finish = 0; req_valid = 0;
    req_warp = '{default: '0}; req_loc = '{default: '0};
    @(negedge clk); rst_n = 1; @(negedge clk);

    acc(0, 50, 1, 50, "unshared block");
    acc(2, 5, 1, 105, "private location side 0");
    acc(5, 9, 1, 119, "private location side 1");
    acc(3, 50, 1, 160, "shared location: region taken");
    check(slot_holds == 4'b0010, "slot 1 holds the region");
    acc(4, 10, 0, 0, "partner block waits");
    acc(2, 99, 1, 209, "any warp of the owning block");
    tb_finish = 4'b0010; #1; check(release_evt, "released when the block finishes");
    @(negedge clk); tb_finish = 0;
    check(slot_holds == 0, "region free");
    acc(4, 10, 1, 120, "waiting block takes the region");
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    req_valid = 2'b11; req_warp[0] = 4; req_loc[0] = 40; req_warp[1] = 2; req_loc[1] = 40; #1;
    check(gnt == 2'b01 && retry == 2'b10, "port 0 wins the region");
    @(negedge clk); req_valid = 0;
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    plan.res = SHARE_REG; plan.spriv = 0;
    acc(4, 40, 1, 2 * 100 + 40, "no scratchpad sharing under a register plan");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
