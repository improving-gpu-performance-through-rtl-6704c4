// tb_scratchpad: random word reads and writes on three ports against a
// shadow copy (registered reads, old data on a same-cycle write, the higher
// port winning two writes to one word).
module tb_scratchpad;
  localparam int BYTES = 16384, NP = 3;
  logic clk = 0;
  logic [NP-1:0] en, we;
  logic [13:0] addr [NP];
  logic [31:0] wdata [NP], rdata [NP];
  logic [31:0] shadow [BYTES/4];
  logic [31:0] exp_q [NP];
  logic [NP-1:0] chk_q;
  int checks = 0, failures = 0;

  scratchpad #(.BYTES(BYTES), .NPORT(NP)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk_q = 0; en = 0; we = 0;
    for (int a = 0; a < BYTES / 4; a++) begin
      @(negedge clk);
      en = 3'b001; we = 3'b001; addr[0] = 14'(a * 4); wdata[0] = 32'(a ^ 32'h5a5a0000);
      shadow[a] = wdata[0];
    end
    for (int it = 0; it < 8000; it++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++)
        if (chk_q[p]) begin checks++; if (rdata[p] !== exp_q[p]) begin failures++; $display("p%0d it=%0d", p, it); end end
      for (int p = 0; p < NP; p++) begin
        en[p] = $urandom_range(0, 1) == 1;
        we[p] = en[p] && ($urandom_range(0, 2) == 0);
        addr[p] = 14'($urandom_range(0, 63) * 4 + $urandom_range(0, 3));
        wdata[p] = $urandom;
        exp_q[p] = shadow[addr[p][13:2]];
      end
      chk_q = en & ~we;
      for (int p = 0; p < NP; p++) if (en[p] && we[p]) shadow[addr[p][13:2]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
