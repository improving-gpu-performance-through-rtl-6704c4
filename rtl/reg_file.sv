// reg_file: banked SM register file, one bank per SIMD lane.
//
// The register file of the paper's figure is drawn as RF_1 .. RF_32, one
// per ALU lane. Here each of the LANES banks holds ROWS 32-bit words; a row
// across all banks is one warp-register (32 threads x 32 bits), so
// 32768 registers make 1024 rows. NRD read ports each read a whole row,
// with the data registered (one-cycle latency). One write port writes a row
// with a per-lane mask. Read and write of the same row in the same cycle
// return the old data. The number of ports is this design's choice.
module reg_file #(
  parameter int unsigned LANES = 32,
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned NRD   = 2
) (
  input  logic                           clk,
  input  logic [NRD-1:0]                 rd_en,
  input  logic [$clog2(ROWS)-1:0]        rd_row  [NRD],
  output logic [LANES-1:0][31:0]         rd_data [NRD],
  input  logic                           wr_en,
  input  logic [$clog2(ROWS)-1:0]        wr_row,
  input  logic [LANES-1:0]               wr_mask,
  input  logic [LANES-1:0][31:0]         wr_data
);
  for (genvar l = 0; l < LANES; l++) begin : g_bank
    logic [31:0] bank [ROWS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_mask[l]) bank[wr_row] <= wr_data[l];
    end
    for (genvar p = 0; p < NRD; p++) begin : g_rd
      always_ff @(posedge clk) begin
        if (rd_en[p]) rd_data[p][l] <= bank[rd_row[p]];
      end
    end
  end
endmodule
