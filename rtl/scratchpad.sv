// scratchpad: SM scratchpad (CUDA shared memory), 16 KB by default.
//
// Organised as BYTES/4 words of 32 bits. NPORT ports, each with a byte
// address (the low two bits are ignored), a write enable and write data;
// read data is registered (one-cycle latency) and returns the old word on a
// same-cycle write. Two writes to one word in a cycle: the higher port wins.
// The port count and word width are this design's choices.
module scratchpad #(
  parameter int unsigned BYTES = 16384,
  parameter int unsigned NPORT = 2
) (
  input  logic                        clk,
  input  logic [NPORT-1:0]            en,
  input  logic [NPORT-1:0]            we,
  input  logic [$clog2(BYTES)-1:0]    addr  [NPORT],
  input  logic [31:0]                 wdata [NPORT],
  output logic [31:0]                 rdata [NPORT]
);
  localparam int unsigned WORDS = BYTES / 4;
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      if (en[p]) begin
        rdata[p] <= mem[addr[p][$clog2(BYTES)-1:2]];
        if (we[p]) mem[addr[p][$clog2(BYTES)-1:2]] <= wdata[p];
      end
    end
  end
endmodule
