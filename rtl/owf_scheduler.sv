// owf_scheduler: Owner Warp First warp selection for one warp scheduler.
//
// Among the eligible warps it picks the one of the highest class, in the
// paper's order shared-owner > unshared > shared-non-owner, and within a
// class the oldest warp (smallest dynamic warp id, i.e. launched first), as
// the paper describes for unshared warps. Selection is combinational: sel
// and sel_cls are valid in the same cycle as eligible. bypass is high when
// the chosen warp is an owner warp while an unshared warp was also eligible
// (the case where OWF differs from an unshared-first order).
// Dynamic ids are compared as 16-bit numbers; they wrap after 65536 warp
// launches in a kernel, which this design accepts.
module owf_scheduler
  import rs_pkg::*;
#(
  parameter int unsigned NW = NUM_WARPS / NUM_SCHED
) (
  input  logic [NW-1:0]        eligible,
  input  warp_class_e          cls [NW],
  input  logic [15:0]          age [NW],
  output logic                 valid,
  output logic [$clog2(NW)-1:0] sel,
  output warp_class_e          sel_cls,
  output logic                 bypass
);
  always_comb begin
    logic unsh_ready;
    valid      = 1'b0;
    sel        = '0;
    sel_cls    = CLS_NONOWNER;
    unsh_ready = 1'b0;
    for (int w = 0; w < NW; w++) begin
      if (eligible[w]) begin
        if (cls[w] == CLS_UNSHARED) unsh_ready = 1'b1;
        if (!valid || cls[w] > sel_cls || (cls[w] == sel_cls && age[w] < age[sel])) begin
          valid   = 1'b1;
          sel     = ($clog2(NW))'(w);
          sel_cls = cls[w];
        end
      end
    end
    bypass = valid && (sel_cls == CLS_OWNER) && unsh_ready;
  end
endmodule
