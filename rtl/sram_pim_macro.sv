// sram_pim_macro - one SRAM-PIM macro: a 128-input, 8-output BF16
// matrix-vector unit with its weights held in the macro (8 KB array).
//
// Weights. The array holds N_SETS tiles of N_IN x N_OUT BF16 weights. The
// default 4 x 128 x 8 x 16 b = 64 kb is the paper's macro size. They are
// loaded one 256-bit word (LANES weights) per cycle: w_addr = {chunk, o}
// writes W[o][chunk*LANES +: LANES] of tile w_set.
//
// Compute. The input vector streams in one LANES-wide chunk per cycle
// (x_valid, with x_first on chunk 0 and x_last on the final chunk), the
// same 256 bits per cycle the bank's hybrid-bonding link delivers. Each
// cycle every output o forms the chunk's partial sum: the LANES products
// W[o][k]*x[k] are added in lane order. The partial sum then goes into the
// output's accumulator (replacing it on x_first). One cycle after x_last, y
// holds the N_OUT dot products and y_valid pulses. A 128-input vector takes
// 8 chunks plus one cycle of latency.
//
// The shape (128 x 8, BF16) and the 64 kb array are the paper's numbers. How
// the tiles are organised, the 16-lane streaming, the order of the additions
// and the truncating BF16 arithmetic are this design's choices (the fabricated
// macro's circuit is not described).
module sram_pim_macro
  import compair_pkg::*;
#(
  parameter int N_IN   = 128,
  parameter int N_OUT  = 8,
  parameter int N_SETS = 4,
  parameter int LANES  = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight load
  input  logic                           w_we,
  input  logic [$clog2(N_SETS)-1:0]      w_set,
  input  logic [$clog2(N_IN/LANES*N_OUT)-1:0] w_addr,
  input  bf16_t [LANES-1:0]              w_data,
  // compute
  input  logic                           x_valid,
  input  logic                           x_first,
  input  logic                           x_last,
  input  logic [$clog2(N_SETS)-1:0]      x_set,
  input  bf16_t [LANES-1:0]              x_data,
  output logic                           y_valid,
  output bf16_t [N_OUT-1:0]              y
);
  localparam int NCH = N_IN / LANES;
  localparam int CB  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int OB  = $clog2(N_OUT);

  // weight memory: one entry per (tile, chunk), holding all outputs' lanes
  bf16_t [N_OUT-1:0][LANES-1:0] wmem [N_SETS*NCH];
  logic  [CB-1:0]               chunk_q;
  logic  [CB-1:0]               chunk;
  bf16_t [N_OUT-1:0]            acc_q;

  always_ff @(posedge clk) begin
    if (w_we) wmem[int'(w_set) * NCH + int'(w_addr[OB +: CB])][w_addr[OB-1:0]] <= w_data;
  end

  assign chunk = x_first ? '0 : chunk_q;

  bf16_t [N_OUT-1:0] part, nacc;
  always_comb begin
    bf16_t [N_OUT-1:0][LANES-1:0] wrow;
    wrow = wmem[int'(x_set) * NCH + int'(chunk)];
    for (int o = 0; o < N_OUT; o++) begin
      part[o] = bf16_mul(wrow[o][0], x_data[0]);
      for (int k = 1; k < LANES; k++) part[o] = bf16_add(part[o], bf16_mul(wrow[o][k], x_data[k]));
      nacc[o] = x_first ? part[o] : bf16_add(acc_q[o], part[o]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chunk_q <= '0;
      acc_q   <= '0;
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      y_valid <= x_valid && x_last;
      if (x_valid) begin
        acc_q   <= nacc;
        chunk_q <= chunk + CB'(1);
        if (x_last) y <= nacc;
      end
    end
  end
endmodule
