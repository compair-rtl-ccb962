// compair_noc - the CompAir-NoC of one channel: a MESH_X x MESH_Y 2D mesh of
// noc_router instances (default 16 x 4 = 64 routers, four per bank).
//
// Router r = y*MESH_X + x sits at column x, row y. East is x+1, south is y+1.
// Neighbouring routers are joined by a flit link and a credit wire in
// each direction. Edge ports are tied off: nothing arrives on them, and they
// never return a credit, so a packet steered off the mesh stalls, which the
// routers' assertions catch. Each router's local port is brought out. inj/inj_credit carry
// packets from the bank IO into the router (a credit returns when the router
// accepts the flit, and the IO may hold at most FIFO_DEPTH unacknowledged
// flits). ej/ej_credit carry finished packets back to the bank IO.
//
// The mesh size and the 2 Curry ALUs per router are the paper's. Which router
// belongs to which bank is decided by the channel top.
module compair_noc
  import compair_pkg::*;
#(
  parameter int MESH_X     = 16,
  parameter int MESH_Y     = 4,
  parameter int FIFO_DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  flit_t [MESH_X*MESH_Y-1:0]     inj,
  output logic  [MESH_X*MESH_Y-1:0]     inj_credit,
  output flit_t [MESH_X*MESH_Y-1:0]     ej,
  input  logic  [MESH_X*MESH_Y-1:0]     ej_credit,
  output logic  [MESH_X*MESH_Y-1:0][5:0] ev
);
  localparam int NR = MESH_X * MESH_Y;

  flit_t [NR-1:0][N_PORTS-1:0] fin, fout;
  logic  [NR-1:0][N_PORTS-1:0] cin, cout;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int R = y * MESH_X + x;
      // north neighbour (y-1)
      if (y > 0) begin : g_n
        assign fin[R][P_N] = fout[R-MESH_X][P_S];
        assign cin[R][P_N] = cout[R-MESH_X][P_S];
      end else begin : g_nn
        assign fin[R][P_N] = '0;
        assign cin[R][P_N] = 1'b0;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign fin[R][P_S] = fout[R+MESH_X][P_N];
        assign cin[R][P_S] = cout[R+MESH_X][P_N];
      end else begin : g_ns
        assign fin[R][P_S] = '0;
        assign cin[R][P_S] = 1'b0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign fin[R][P_E] = fout[R+1][P_W];
        assign cin[R][P_E] = cout[R+1][P_W];
      end else begin : g_ne
        assign fin[R][P_E] = '0;
        assign cin[R][P_E] = 1'b0;
      end
      if (x > 0) begin : g_w
        assign fin[R][P_W] = fout[R-1][P_E];
        assign cin[R][P_W] = cout[R-1][P_E];
      end else begin : g_nw
        assign fin[R][P_W] = '0;
        assign cin[R][P_W] = 1'b0;
      end
      assign fin[R][P_L]   = inj[R];
      assign cin[R][P_L]   = ej_credit[R];
      assign inj_credit[R] = cout[R][P_L];
      assign ej[R]         = fout[R][P_L];

      noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_r (
        .my_x(4'(x)), .my_y(4'(y)),
        .clk, .rst_n,
        .flit_in   (fin[R]),
        .credit_out(cout[R]),
        .flit_out  (fout[R]),
        .credit_in (cin[R]),
        .ev        (ev[R])
      );
    end
  end
endmodule
