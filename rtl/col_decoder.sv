// col_decoder - the decoupled column decoder of a CompAir DRAM-PIM bank.
//
// A conventional DRAM-PIM bank picks 32 B of its 1 KB row with one 32:1
// column decoder. That is enough for the bank's own 16 MACs but starves the
// SRAM-PIMs bonded underneath. CompAir splits the decoder in two stages:
//   8:1 stage  : sel8 picks 128 B (1024 bits) of the row; this wide word goes
//                to the hybrid-bonding IOs and the SRAM-PIM side (col128)
//   4:1 stage  : sel4 picks 32 B (256 bits) of that for the 16 MACs (col32)
// The write path uses the same selects. The 32-byte word wdata (when we32)
// or the 128-byte word wdata128 (when we128) is merged into the row and
// returned as row_wr for write-back. Purely combinational.
// The 8:1 + 4:1 split and the 1 KB row are the paper's. The write-merge path
// is this design's.
module col_decoder #(
  parameter int ROW_BITS = 8192
) (
  input  logic [ROW_BITS-1:0]    row,
  input  logic [2:0]             sel8,
  input  logic [1:0]             sel4,
  output logic [ROW_BITS/8-1:0]  col128,
  output logic [ROW_BITS/32-1:0] col32,
  input  logic                   we32,
  input  logic [ROW_BITS/32-1:0] wdata,
  input  logic                   we128,
  input  logic [ROW_BITS/8-1:0]  wdata128,
  output logic [ROW_BITS-1:0]    row_wr
);
  localparam int W8 = ROW_BITS / 8;
  localparam int W4 = ROW_BITS / 32;

  assign col128 = row[int'(sel8) * W8 +: W8];
  assign col32  = col128[int'(sel4) * W4 +: W4];

  always_comb begin
    logic [W8-1:0] c;
    c = col128;
    if (we32) c[int'(sel4) * W4 +: W4] = wdata;
    if (we128) c = wdata128;
    row_wr = row;
    row_wr[int'(sel8) * W8 +: W8] = c;
  end
endmodule
