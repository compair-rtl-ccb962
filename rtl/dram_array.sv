// dram_array - behavioural model of the 32 MB DRAM cell array of one bank,
// with its sense amplifiers acting as a 1 KB row buffer.
//
// DRAM cells and sense amplifiers are a process-specific analog macro. This
// model gives their function only: ROWS rows of 1 KB held in a plain
// array, one open row, no refresh and no analog timing.
// Interface: act with row opens a row, and the row buffer `rowbuf` holds its
// contents from the next clock edge. wr writes wrow into the open row and
// into the row buffer on the clock edge. One command per cycle. The DRAM
// timings (tRCD, tRAS, tCL, tRP) are not modelled: activate takes one
// cycle and column access is free. The array starts with whatever the
// simulator puts in it, as a real DRAM does; rowbuf starts at zero.
// Size (32 MB, 1 KB rows) follows the paper. The timing is simplified here.
module dram_array #(
  parameter int ROWS     = 32768,
  parameter int ROW_BITS = 8192
) (
  input  logic                     clk,
  input  logic                     act,
  input  logic [$clog2(ROWS)-1:0]  row,
  input  logic                     wr,
  input  logic [ROW_BITS-1:0]      wrow,
  output logic [ROW_BITS-1:0]      rowbuf
);
  logic [ROW_BITS-1:0]     mem [ROWS];
  logic [$clog2(ROWS)-1:0] open_q;

  initial begin
    rowbuf = '0;
    open_q = '0;
  end

  always @(posedge clk) begin
    if (act) begin
      open_q <= row;
      rowbuf <= mem[row];
    end else if (wr) begin
      mem[open_q] <= wrow;
      rowbuf      <= wrow;
    end
  end
endmodule
