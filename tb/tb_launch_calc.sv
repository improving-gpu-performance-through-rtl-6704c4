// tb_launch_calc: checks the per-SM launch plan against published numbers.
//
// For the 8 register-limited and 7 scratchpad-limited kernels of the
// evaluation (block size, registers per thread or scratchpad bytes per
// block) and for the six sharing amounts 0,10,30,50,70,90 % (t = 1.0 ..
// 0.1), the number of resident blocks M must equal the published table of
// resident blocks. It also checks U + S = blocks without sharing, M = U + 2S,
// the shared resource, the sharing bit, the private sizes floor(t*R_w) and
// floor(t*R_tb), and the latency from start to done (start high in cycle 0, done high in cycle 158).
// The scratchpad kernels' registers per thread are not published; 8 is used
// so that registers never limit them.
module tb_launch_calc;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  kernel_cfg_t cfg;
  logic busy, done;
  launch_plan_t plan;
  int checks = 0, failures = 0;

  launch_calc dut (.clk, .rst_n, .start, .cfg, .busy, .done, .plan);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input string name, input int tpb, input int rpt, input int spb,
                     input int t, input int exp_m, input bit exp_spm, input int exp_def);
    int cyc;
    @(negedge clk);
    cfg.threads_per_tb = 11'(tpb); cfg.regs_per_thread = 8'(rpt);
    cfg.spm_per_tb = 15'(spb); cfg.t_tenths = 4'(t);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(int'(plan.n_max) == exp_m, $sformatf("%s t=%0d M=%0d exp %0d", name, t, plan.n_max, exp_m));
    check(int'(plan.n_unshared) + int'(plan.n_pairs) == exp_def,
          $sformatf("%s t=%0d U+S=%0d exp %0d", name, t, plan.n_unshared + plan.n_pairs, exp_def));
    check(int'(plan.n_unshared) + 2 * int'(plan.n_pairs) == int'(plan.n_max), $sformatf("%s M=U+2S", name));
    check(plan.sharing == (exp_m > exp_def), $sformatf("%s sharing bit", name));
    check((plan.res == SHARE_SPM) == exp_spm, $sformatf("%s shared resource", name));
    check(int'(plan.rwt) == (t * rpt) / 10, $sformatf("%s rwt=%0d", name, plan.rwt));
    check(int'(plan.spriv) == (t * spb) / 10, $sformatf("%s spriv=%0d", name, plan.spriv));
    check(int'(plan.warps_per_tb) == (tpb + 31) / 32, $sformatf("%s wpb", name));
    check(cyc == 158, $sformatf("%s latency %0d", name, cyc));
  endtask

  int ts [6] = '{10, 9, 7, 5, 3, 1};
  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // name, threads/block, regs/thread, spm, expected blocks for t=1.0 .. 0.1
    begin : regs
      string nm [8] = '{"backprop","b+tree","hotspot","LIB","MUM","mri-q","sgemm","stencil"};
      int tp [8] = '{256, 508, 256, 192, 256, 256, 128, 512};
      int rg [8] = '{24, 24, 36, 36, 28, 24, 48, 28};
      int ex [8][6] = '{'{5,5,5,5,6,6}, '{2,2,2,3,3,3}, '{3,3,3,4,4,6}, '{4,4,5,5,6,8},
                        '{4,4,4,5,5,6}, '{5,5,5,5,6,6}, '{5,5,5,5,6,8}, '{2,2,2,2,2,3}};
      for (int a = 0; a < 8; a++)
        for (int i = 0; i < 6; i++) run(nm[a], tp[a], rg[a], 0, ts[i], ex[a][i], 1'b0, ex[a][0]);
    end
    begin : spms
      string nm [7] = '{"CONV1","CONV2","lavaMD","NW1","NW2","SRAD1","SRAD2"};
      int tp [7] = '{64, 128, 128, 16, 16, 256, 256};
      int sp [7] = '{2560, 5184, 7200, 2180, 2180, 6144, 5120};
      int ex [7][6] = '{'{6,6,6,6,7,8}, '{3,3,3,3,3,4}, '{2,2,2,2,2,4}, '{7,7,7,8,8,8},
                        '{7,7,7,8,8,8}, '{2,2,2,3,4,4}, '{3,3,3,3,3,5}};
      for (int a = 0; a < 7; a++)
        for (int i = 0; i < 6; i++) run(nm[a], tp[a], 8, sp[a], ts[i], ex[a][i], 1'b1, ex[a][0]);
    end
    // worked example of the paper's motivation: hotspot needs 9216 registers per block
    run("hotspot-R", 256, 36, 0, 1, 6, 1'b0, 3);
    check(plan.n_unshared == 0 && plan.n_pairs == 3, "hotspot U=0 S=3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
