// tb_reg_file: random masked row writes and two-port reads against a
// shadow copy; read data must appear one cycle after the read and show the
// value before a same-cycle write.
module tb_reg_file;
  localparam int LANES = 32, ROWS = 1024;
  logic clk = 0;
  logic [1:0] rd_en;
  logic [9:0] rd_row [2];
  logic [LANES-1:0][31:0] rd_data [2];
  logic wr_en;
  logic [9:0] wr_row;
  logic [LANES-1:0] wr_mask;
  logic [LANES-1:0][31:0] wr_data;
  logic [LANES-1:0][31:0] shadow [ROWS];
  logic [LANES-1:0][31:0] exp_q [2];
  logic [1:0] chk_q;
  int checks = 0, failures = 0;

  reg_file #(.LANES(LANES), .ROWS(ROWS), .NRD(2)) dut (.clk, .rd_en, .rd_row, .rd_data,
    .wr_en, .wr_row, .wr_mask, .wr_data);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every row through the write port
    rd_en = 0; chk_q = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 10'(r); wr_mask = '1;
      for (int l = 0; l < LANES; l++) wr_data[l] = 32'(r * 1000 + l);
      shadow[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      if (chk_q[0]) begin checks++; if (rd_data[0] !== exp_q[0]) begin failures++; $display("port0 it=%0d", it); end end
      if (chk_q[1]) begin checks++; if (rd_data[1] !== exp_q[1]) begin failures++; $display("port1 it=%0d", it); end end
      rd_en  = 2'($urandom_range(0, 3));
      rd_row[0] = 10'($urandom_range(0, 31)); rd_row[1] = 10'($urandom_range(0, 31));
      wr_en  = $urandom_range(0, 1) == 1;
      wr_row = 10'($urandom_range(0, 31));
      wr_mask = LANES'({$urandom, $urandom});
      for (int l = 0; l < LANES; l++) wr_data[l] = $urandom;
      chk_q = rd_en;
      exp_q[0] = shadow[rd_row[0]]; exp_q[1] = shadow[rd_row[1]];
      if (wr_en) for (int l = 0; l < LANES; l++) if (wr_mask[l]) shadow[wr_row][l] = wr_data[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
