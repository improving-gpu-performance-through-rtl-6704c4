// tb_owf_scheduler: random eligible sets, classes and ages; the chosen warp
// must be the eligible warp of the highest class (owner > unshared >
// non-owner) with the smallest age, computed here by a separate scan.
module tb_owf_scheduler;
  import rs_pkg::*;
  localparam int NW = 24;
  logic [NW-1:0] eligible;
  warp_class_e   cls [NW];
  logic [15:0]   age [NW];
  logic          valid, bypass;
  logic [4:0]    sel;
  warp_class_e   sel_cls;
  int checks = 0, failures = 0;
  int n_owner = 0, n_bypass = 0, n_nonown = 0;

  owf_scheduler #(.NW(NW)) dut (.eligible, .cls, .age, .valid, .sel, .sel_cls, .bypass);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      int best, bestk, key;
      bit any_unsh;
      int dens = (it % 4) + 1;     // vary how many warps are eligible
      for (int w = 0; w < NW; w++) begin
        eligible[w] = ($urandom_range(0, 7) < dens);
        cls[w]      = warp_class_e'($urandom_range(0, 2));
        age[w]      = 16'(w * 97 + (it * 13) % 1000);   // distinct within a draw
        if ($urandom_range(0, 1)) age[w] = 16'(2000 + (NW - w) * 5 + it % 3);
      end
      #1;
      best = -1; bestk = -1; any_unsh = 0;
      for (int w = 0; w < NW; w++) if (eligible[w]) begin
        key = int'(cls[w]) * 65536 + (65535 - int'(age[w]));
        if (cls[w] == CLS_UNSHARED) any_unsh = 1;
        if (key > bestk) begin bestk = key; best = w; end
      end
      checks++;
      if (valid != (best >= 0)) begin failures++; $display("valid mismatch it=%0d", it); end
      if (best >= 0) begin
        checks++;
        if (int'(sel) != best || sel_cls != cls[best]) begin
          failures++; $display("it=%0d sel=%0d exp=%0d", it, sel, best);
        end
        checks++;
        if (bypass != (cls[best] == CLS_OWNER && any_unsh)) begin failures++; $display("bypass it=%0d", it); end
        if (cls[best] == CLS_OWNER) n_owner++;
        if (cls[best] == CLS_NONOWNER) n_nonown++;
        if (bypass) n_bypass++;
      end
      #1;
    end
    checks++;
    if (n_owner == 0 || n_bypass == 0 || n_nonown == 0) begin
      failures++; $display("a case never happened %0d %0d %0d", n_owner, n_bypass, n_nonown);
    end
    $display("owner picks %0d, owner-over-unshared %0d, non-owner picks %0d", n_owner, n_bypass, n_nonown);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
