// compair_channel - one CompAir memory channel, the unit a device controller
// drives: 16 CompAir banks (DRAM-PIM bank + four SRAM-PIM macros each), the
// 2 KB global buffer and the 4 x 16 CompAir-NoC mesh joining the banks'
// routers.
//
// Control is SIMD. A command is accepted (cmd_valid && cmd_ready) only when
// every bank is idle. It starts in all banks set in bank_mask, which then run
// it in lock step on their own data. done pulses once the last of them
// finishes. Host data: wdata is written by BC_WRITE to every masked bank
// (use a one-hot mask to load banks separately). rvalid/rdata return
// BC_READ results per bank. The global buffer is filled through gb_we/
// gb_addr/gb_wdata and read by all banks' MAC units.
//
// Bank b owns the 2 x 2 routers at x = 2*(b%8)+{0,1}, y = 2*(b/8)+{0,1};
// bank router r is at (x0 + r%2, y0 + r/2). noc_ev exposes each router's
// event strobes (bypass, buffered, ALU stall, loop-back, iteration wrap,
// compute) for monitoring.
// Paper: 16 banks per channel, 4 routers and 4 SRAM-PIM macros per bank,
// 2 KB global buffer, 4 x 16 mesh. This design's: the command interface,
// bank-to-router placement and the monitoring port.
module compair_channel
  import compair_pkg::*;
#(
  parameter int N_BANKS    = 16,
  parameter int ROWS       = 32768,
  parameter int FIFO_DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  bank_cmd_t                     cmd,
  input  logic [N_BANKS-1:0]            bank_mask,
  input  logic [255:0]                  wdata,
  output logic                          done,
  output logic [N_BANKS-1:0]            rvalid,
  output logic [N_BANKS-1:0][255:0]     rdata,
  input  logic                          gb_we,
  input  logic [5:0]                    gb_addr,
  input  logic [255:0]                  gb_wdata,
  output logic [4*N_BANKS-1:0][5:0]     noc_ev
);
  localparam int MX = 16;
  localparam int MY = (4 * N_BANKS) / MX;
  localparam int NR = MX * MY;

  logic [N_BANKS-1:0]        busy, bdone, start;
  logic [N_BANKS-1:0]        running_q;
  logic [N_BANKS-1:0][5:0]   gb_raddr;
  logic [N_BANKS-1:0][255:0] gb_rdata;

  flit_t [NR-1:0] inj, ej;
  logic  [NR-1:0] inj_credit, ej_credit;

  assign cmd_ready = (busy == '0) && (running_q == '0);
  assign start     = (cmd_valid && cmd_ready) ? bank_mask : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q <= '0;
      done      <= 1'b0;
    end else begin
      running_q <= (running_q | start) & ~bdone;
      done      <= (running_q != '0) && (((running_q | start) & ~bdone) == '0);
    end
  end

  global_buffer #(.DEPTH(64), .WIDTH(256), .N_RD(N_BANKS)) u_gb (
    .clk, .we(gb_we), .waddr(gb_addr), .wdata(gb_wdata), .raddr(gb_raddr), .rdata(gb_rdata)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    localparam int X0 = 2 * (b % (MX / 2));
    localparam int Y0 = 2 * (b / (MX / 2));
    flit_t [3:0] b_inj, b_ej;
    logic  [3:0] b_ic, b_ec;
    for (genvar r = 0; r < 4; r++) begin : g_r
      localparam int R = (Y0 + r / 2) * MX + X0 + r % 2;
      assign inj[R]       = b_inj[r];
      assign b_ic[r]      = inj_credit[R];
      assign b_ej[r]      = ej[R];
      assign ej_credit[R] = b_ec[r];
    end
    compair_bank #(.ROWS(ROWS), .FIFO_DEPTH(FIFO_DEPTH)) u_bank (
      .clk, .rst_n, .bx(4'(X0)), .by(4'(Y0)), .start(start[b]), .cmd, .wdata,
      .busy(busy[b]), .done(bdone[b]), .rvalid(rvalid[b]), .rdata(rdata[b]),
      .gb_raddr(gb_raddr[b]), .gb_rdata(gb_rdata[b]),
      .inj(b_inj), .inj_credit(b_ic), .ej(b_ej), .ej_credit(b_ec)
    );
  end

  compair_noc #(.MESH_X(MX), .MESH_Y(MY), .FIFO_DEPTH(FIFO_DEPTH)) u_noc (
    .clk, .rst_n, .inj, .inj_credit, .ej, .ej_credit, .ev(noc_ev)
  );
endmodule
