// global_buffer - the 2 KB global buffer of a channel.
//
// It holds a vector shared by all banks, for example the input vector of a
// GeMV, as 64 words of 32 bytes. One write port, filled by the
// controller. N_RD read ports, one per bank, each combinational, so every
// bank's MAC unit can take its word in the same cycle. The banks run
// SIMD, so in practice they all read the same word.
// Size (2 KB) is the paper's. The 64 x 256-bit organisation and the port
// arrangement are this design's.
module global_buffer #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 256,
  parameter int N_RD  = 16
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(DEPTH)-1:0]            waddr,
  input  logic [WIDTH-1:0]                    wdata,
  input  logic [N_RD-1:0][$clog2(DEPTH)-1:0]  raddr,
  output logic [N_RD-1:0][WIDTH-1:0]          rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  always_comb for (int i = 0; i < N_RD; i++) rdata[i] = mem[raddr[i]];
endmodule
