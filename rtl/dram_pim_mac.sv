// dram_pim_mac - the 16-input BF16 MAC unit of a DRAM-PIM bank.
//
// One operation per cycle on two 32-byte words (16 BF16 lanes each): word a
// from the bank's column path, word b from the global buffer or a second
// DRAM word.
//   MAC   : acc <= (first ? 0 : acc) + tree(a[k] * b[k])
//   EWMUL : ew  <= a[k] * b[k]       (element-wise multiply)
//   EWADD : ew  <= a[k] + b[k]       (element-wise add)
// The 16 products go through a pairwise adder tree ((p0+p1)+(p2+p3))... as
// drawn under the DRAM array in the paper's channel figure. Results are
// registered, so acc and ew are valid the cycle after `valid`.
// The 16 lanes, BF16 and the multiplier/adder-tree shape follow the paper.
// The operation encoding and the truncating arithmetic are this design's.
module dram_pim_mac
  import compair_pkg::*;
#(
  parameter int LANES = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid,
  input  logic [1:0]         op,      // 0 MAC, 1 EWMUL, 2 EWADD
  input  logic               first,   // MAC: start a new accumulation
  input  bf16_t [LANES-1:0]  a,
  input  bf16_t [LANES-1:0]  b,
  output bf16_t              acc,
  output bf16_t [LANES-1:0]  ew
);
  localparam logic [1:0] M_MAC = 2'd0, M_EWMUL = 2'd1, M_EWADD = 2'd2;

  bf16_t [LANES-1:0] prod;
  bf16_t             dot;
  always_comb begin
    bf16_t [LANES-1:0] t;
    for (int k = 0; k < LANES; k++) prod[k] = bf16_mul(a[k], b[k]);
    t = prod;
    for (int w = LANES / 2; w >= 1; w = w / 2)
      for (int k = 0; k < w; k++) t[k] = bf16_add(t[2*k], t[2*k+1]);
    dot = t[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= BF16_ZERO;
      ew  <= '0;
    end else if (valid) begin
      case (op)
        M_MAC:   acc <= first ? dot : bf16_add(acc, dot);
        M_EWMUL: ew  <= prod;
        M_EWADD: for (int k = 0; k < LANES; k++) ew[k] <= bf16_add(a[k], b[k]);
        default: ;
      endcase
    end
  end
endmodule
