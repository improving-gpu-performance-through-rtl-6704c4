// tb_dyn_warp_ctrl: a reference controller (SM0) and one other SM with a
// 20-cycle period. The test sets how many stall cycles each sees per period
// and checks that the other SM's probability moves by one step per period
// in the right direction exactly one cycle after the period ends,
// saturates at 0 and 10, and that mem_allow is never set at SM0, always
// set at probability 10, never at 0, and about half the time at 5.
module tb_dyn_warp_ctrl;
  localparam int PER = 20;
  logic clk = 0, rst_n = 0;
  logic stall0, stall1;
  logic [15:0] ps0, ps1;
  logic [3:0] prob0, prob1;
  logic allow0, allow1, up0, up1, dn0, dn1;
  int checks = 0, failures = 0;

  dyn_warp_ctrl #(.PERIOD(PER), .STEPS(10), .SEED(16'h1234)) u_ref (.clk, .rst_n, .is_ref(1'b1), .salt(16'h0000),
    .stall(stall0), .ref_stalls(ps0), .period_stalls(ps0), .prob(prob0), .mem_allow(allow0),
    .prob_up(up0), .prob_down(dn0));
  dyn_warp_ctrl #(.PERIOD(PER), .STEPS(10), .SEED(16'hBEEF)) u_sm (.clk, .rst_n, .is_ref(1'b0), .salt(16'h0101),
    .stall(stall1), .ref_stalls(ps0), .period_stalls(ps1), .prob(prob1), .mem_allow(allow1),
    .prob_up(up1), .prob_down(dn1));

  always #5 clk = ~clk;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (prob=%0d)", what, prob1); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one period: SM0 stalls n0 cycles, the other SM n1 cycles
  task automatic period(input int n0, input int n1);
    for (int c = 0; c < PER; c++) begin
      stall0 = (c < n0); stall1 = (c < n1);
      @(negedge clk);
      check(!allow0, "reference never allows");
    end
  endtask

  initial begin
    int prev, hits;
    stall0 = 0; stall1 = 0;
    @(negedge clk); rst_n = 1;
    check(prob1 == 10, "starts at 1.0");
    for (int c = 0; c < 50; c++) begin @(negedge clk); check(allow1, "allowed at 1.0"); end
    // align to a period start: 50 cycles done, 10 more reach 60 = 3 periods
    repeat (10) @(negedge clk);
    // more stalls than SM0: probability falls one step per period
    for (int k = 0; k < 12; k++) begin
      prev = prob1;
      period(2, 8);
      @(negedge clk);   // comparison happens one cycle after the period
      check(int'(prob1) == ((prev > 0) ? prev - 1 : 0), $sformatf("down step %0d", k));
      // the extra cycle belongs to the next period; keep stall counts per period aligned
      stall0 = 0; stall1 = 0;
      repeat (PER - 1) @(negedge clk);
    end
    check(prob1 == 0, "saturates at 0");
    hits = 0;
    for (int c = 0; c < 100; c++) begin @(negedge clk); if (allow1) hits++; end
    check(hits == 0, "never allowed at 0");
    // realign: 12 periods of 2*PER? each loop used 2*PER cycles, then 100 cycles = 5 periods
    // fewer stalls than SM0: probability rises
    for (int k = 0; k < 5; k++) begin
      prev = prob1;
      period(9, 1);
      @(negedge clk);
      check(int'(prob1) == prev + 1, $sformatf("up step %0d", k));
      stall0 = 0; stall1 = 0;
      repeat (PER - 1) @(negedge clk);
    end
    check(prob1 == 5, "at 0.5");
    hits = 0;
    for (int c = 0; c < 1000; c++) begin @(negedge clk); if (allow1) hits++; end
    check(hits > 350 && hits < 650, $sformatf("about half allowed at 0.5: %0d", hits));
    // equal stalls: no change
    prev = prob1;
    period(4, 4); @(negedge clk);
    check(prob1 == 4'(prev), "equal stalls keep probability");
    stall0 = 0; stall1 = 0; repeat (PER - 1) @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      period(9, 0); @(negedge clk); stall0 = 0; stall1 = 0; repeat (PER - 1) @(negedge clk);
    end
    check(prob1 == 10, "saturates at 1.0");
    check(prob0 == 10, "reference probability untouched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
