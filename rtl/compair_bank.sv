// compair_bank - one CompAir bank: a DRAM-PIM bank on the DRAM die bonded 1:1
// to an SRAM-PIM bank on the logic die.
//
// DRAM side: the 32 MB array (behavioural model) with its 1 KB row buffer,
// the decoupled column decoder (8:1 to 128 B for the bonds, then 4:1 to 32 B
// for the MACs) and the 16-lane BF16 MAC unit. Logic side: four SRAM-PIM
// macros and the bank controller / hybrid-bonding IO (bank_io), which also
// connects the bank to its four NoC routers (inj/ej, one flit each per
// cycle). The 256-bit buses between bank_io and the DRAM side are the bank's
// 256 hybrid bonds. The global-buffer word gb_rdata arrives from the channel.
// The composition is the paper's. Interfaces and timing are those of the
// sub-blocks.
module compair_bank
  import compair_pkg::*;
#(
  parameter int ROWS       = 32768,
  parameter int FIFO_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [3:0]    bx,       // mesh position of the bank's router 0
  input  logic [3:0]    by,
  input  logic          start,
  input  bank_cmd_t     cmd,
  input  logic [255:0]  wdata,
  output logic          busy,
  output logic          done,
  output logic          rvalid,
  output logic [255:0]  rdata,
  output logic [5:0]    gb_raddr,
  input  logic [255:0]  gb_rdata,
  output flit_t [3:0]   inj,
  input  logic  [3:0]   inj_credit,
  input  flit_t [3:0]   ej,
  output logic  [3:0]   ej_credit
);
  localparam int RAW = $clog2(ROWS);

  logic              d_act, d_wr, d_we32;
  logic [RAW-1:0]    d_row;
  logic [2:0]        d_sel8;
  logic [1:0]        d_sel4;
  logic [255:0]      d_wdata, d_col32;
  logic [1023:0]     d_col128;
  logic [8191:0]     rowbuf, row_wr;

  logic              m_valid, m_first;
  logic [1:0]        m_op;
  logic [255:0]      m_a, m_b, m_ew;
  bf16_t             m_acc;

  logic              s_mode16, s_we, s_xvalid, s_yvalid;
  logic [1:0]        s_macro, s_set;
  logic [5:0]        s_waddr;
  logic [4:0]        s_chunk;
  logic [255:0]      s_data, s_y;

  dram_array #(.ROWS(ROWS)) u_array (
    .clk, .act(d_act), .row(d_row), .wr(d_wr), .wrow(row_wr), .rowbuf(rowbuf)
  );

  col_decoder u_coldec (
    .row(rowbuf), .sel8(d_sel8), .sel4(d_sel4), .col128(d_col128), .col32(d_col32),
    .we32(d_we32), .wdata(d_wdata), .we128(1'b0), .wdata128('0), .row_wr(row_wr)
  );

  dram_pim_mac u_mac (
    .clk, .rst_n, .valid(m_valid), .op(m_op), .first(m_first),
    .a(m_a), .b(m_b), .acc(m_acc), .ew(m_ew)
  );

  sram_pim_bank u_sram (
    .clk, .rst_n, .mode16(s_mode16),
    .w_we(s_we), .w_macro(s_macro), .w_set(s_set), .w_addr(s_waddr), .w_data(s_data),
    .x_valid(s_xvalid), .x_chunk(s_chunk), .x_set(s_set), .x_data(s_data),
    .y_valid(s_yvalid), .y(s_y)
  );

  bank_io #(.FIFO_DEPTH(FIFO_DEPTH), .ROW_AW(RAW)) u_io (
    .clk, .rst_n, .bx, .by, .start, .cmd, .wdata, .busy, .done, .rvalid, .rdata,
    .d_act, .d_row, .d_wr, .d_sel8, .d_sel4, .d_we32, .d_wdata, .d_col32, .d_col128,
    .m_valid, .m_op, .m_first, .m_a, .m_b, .m_acc, .m_ew, .gb_raddr, .gb_rdata,
    .s_mode16, .s_we, .s_macro, .s_set, .s_waddr, .s_data, .s_xvalid, .s_chunk,
    .s_yvalid, .s_y,
    .inj, .inj_credit, .ej, .ej_credit
  );
endmodule
