// tb_reg_share_ctrl: register access flow on a small hand-built plan.
//
// Plan: U = 1 unshared block (slot 0), one shared pair (slots 1 and 2), two
// warps per block, 10 registers per thread, t = 0.1 so 1 unshared register
// per shared warp. Warps 0,1 are in slot 0; 2,3 in slot 1; 4,5 in slot 2.
// Expected rows, worked out by hand from the layout: unshared warp w,
// register r -> w*10 + r; pair group of warp k starts at 20 + 11k, side 0
// private row +0, side 1 private row +1, shared register r at +1 + r.
// The sequence covers unshared access, private access, lock taking, a lock
// held by the partner warp, the deadlock rule, release on warp exit, two
// ports in one cycle, and a plan that shares scratchpad instead.
module tb_reg_share_ctrl;
  import rs_pkg::*;
  localparam int NW = 8, NTB = 4;
  logic clk = 0, rst_n = 0, kernel_start = 0;
  launch_plan_t plan;
  logic [3:0] warp_slot [NW];
  logic [5:0] warp_k [NW];
  logic [NW-1:0] warp_shared, warp_exit;
  logic [1:0] req_valid, gnt, retry, acquired, shared_hit, private_hit, deadlock_deny;
  logic [WID_W-1:0] req_warp [2];
  logic [REG_W-1:0] req_reg [2];
  logic [ROW_W-1:0] row [2];
  logic [NTB-1:0] slot_holds;
  logic release_evt;
  int checks = 0, failures = 0;

  reg_share_ctrl #(.NW(NW), .NTB(NTB), .NPORT(2)) dut (.clk, .rst_n, .kernel_start, .plan,
    .warp_slot, .warp_k, .warp_shared, .warp_exit, .req_valid, .req_warp, .req_reg,
    .gnt, .retry, .acquired, .shared_hit, .private_hit, .deadlock_deny, .row,
    .slot_holds, .release_evt);
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

  // one access on port 0; checked before the clock edge that commits it
  task automatic acc(input int w, input int r, input bit exp_gnt, input int exp_row,
                     input string what);
    req_valid = 2'b01; req_warp[0] = WID_W'(w); req_reg[0] = REG_W'(r);
    #1;
    check(gnt[0] == exp_gnt && retry[0] == !exp_gnt, {what, ": grant"});
    if (exp_gnt) check(int'(row[0]) == exp_row, $sformatf("%s: row %0d exp %0d", what, row[0], exp_row));
    @(negedge clk);
    req_valid = '0;
  endtask

  initial begin
    plan = '0;
    plan.res = SHARE_REG; plan.sharing = 1; plan.n_unshared = 1; plan.n_pairs = 1; plan.n_max = 3;
    plan.n_default = 2; plan.warps_per_tb = 2; plan.rpt = 10; plan.rwt = 1;
    for (int w = 0; w < NW; w++) begin
      warp_slot[w] = 4'(w / 2); warp_k[w] = 6'(w % 2);
      warp_shared[w] = (w >= 2 && w < 6);
    end
    warp_exit = '0; req_valid = '0; req_warp = '{default: '0}; req_reg = '{default: '0};
    @(negedge clk); rst_n = 1; @(negedge clk);

    acc(0, 9, 1, 9, "unshared warp");
    acc(1, 3, 1, 13, "unshared warp 1");
    acc(2, 0, 1, 20, "private reg side 0");
    #1 check(private_hit == 2'b00, "no hit flags after request drops");
    acc(4, 0, 1, 21, "private reg side 1");
    acc(2, 5, 1, 26, "shared reg: lock taken");
    check(slot_holds == 4'b0010, "slot 1 holds a lock");
    acc(4, 5, 0, 0, "shared reg held by partner warp");
    acc(4, 1, 0, 0, "first shared reg (r = rwt) needs the lock");
    req_valid = 2'b01; req_warp[0] = 2; req_reg[0] = 1; #1;
    check(gnt[0] && shared_hit[0] && !private_hit[0] && row[0] == 22, "r = rwt is a shared reg");
    req_valid = 2'b01; req_warp[0] = 2; req_reg[0] = 0; #1;
    check(gnt[0] && private_hit[0] && !shared_hit[0] && row[0] == 20, "r = rwt-1 is private");
    @(negedge clk); req_valid = 0;
    acc(2, 9, 1, 30, "lock already held");
    // deadlock rule: warp 5 (slot 2, k=1) may not take free lock 1
    req_valid = 2'b01; req_warp[0] = 5; req_reg[0] = 3; #1;
    check(retry[0] && deadlock_deny[0], "deadlock rule refuses free lock");
    @(negedge clk); req_valid = 0;
    acc(3, 3, 1, 31 + 1 + 3, "warp 3 takes lock 1");
    // exits: warp 2 leaves, warp 3 still holds lock 1, so warp 4 still refused
    warp_exit = 8'b0000_0100; #1; check(release_evt, "release on exit"); @(negedge clk); warp_exit = 0;
    acc(4, 5, 0, 0, "partner block still holds a lock");
    warp_exit = 8'b0000_1000; @(negedge clk); warp_exit = 0;
    check(slot_holds == 4'b0000, "all locks free");
    acc(4, 5, 1, 26, "lock passes to the other side");
    check(slot_holds == 4'b0100, "slot 2 holds now");
    // two ports in one cycle after a fresh kernel
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    req_valid = 2'b11; req_warp[0] = 2; req_reg[0] = 5; req_warp[1] = 4; req_reg[1] = 5; #1;
    check(gnt == 2'b01 && acquired == 2'b01, "port 0 wins the same lock");
    @(negedge clk); req_valid = 0;
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    req_valid = 2'b11; req_warp[0] = 3; req_reg[0] = 4; req_warp[1] = 4; req_reg[1] = 4; #1;
    check(gnt == 2'b01 && deadlock_deny == 2'b10, "port 1 sees port 0's lock in the same cycle");
    @(negedge clk); req_valid = 0;
    // a plan sharing scratchpad: registers are all unshared
    kernel_start = 1; @(negedge clk); kernel_start = 0;
    plan.res = SHARE_SPM;
    acc(4, 7, 1, 4 * 10 + 7, "no register sharing under a scratchpad plan");
    check(slot_holds == 0, "no lock taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
