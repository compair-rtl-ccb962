// noc_router - CompAir-NoC router: a low-latency mesh router with two Curry
// ALUs that compute on packets while they pass through.
//
// Ports 0..4 are N, S, E, W and the local port of the bank IO. A sixth
// internal input, the loop-back slot, holds a packet whose next path step
// runs on this same router again.
//
// Pipeline. A flit arriving on an input whose FIFO is empty can bypass the
// FIFO and take the switch in its arrival cycle. It then sits in the output
// register one cycle later, so it spends 1 cycle per hop. A flit that loses
// arbitration, or finds older flits ahead, is written into the FIFO and
// leaves 2 or more cycles after arrival. Routing is dimension order (X
// first, then Y). Links use credits: an output sends only while the next
// router's input FIFO has room. The router returns a credit upstream whenever
// a flit leaves one of its inputs.
//
// Flit compute. Each flit carries a packet whose Path lists up to four steps.
// A step names a router (a hop offset from the previous step's router) and
// an operation for its Curry ALU. A flit that reaches the router named by
// its current step is given the Curry ALU selected by Type[3]. The ALU result
// replaces the flit's Data in the same cycle as the switch traversal.
// The flit then moves on to the next step. After the last step the path starts
// again while IterNum counts down (IterNum 0 or 1 = one pass). When the path
// is finished the packet is ejected to the local port. Two flits that need
// the same ALU in one cycle, or an ALU busy with its IterTag update, stall
// the loser. Arbitration is round robin over the six inputs.
//
// Follows the paper: SWIFT-style bypass (1-2 cycles per router), flit compute
// in parallel with switch traversal, two Curry ALUs per router, DOR routing,
// 72-bit packet. This design's own choices: one virtual channel, FIFO depth,
// the sideband carrying the absolute step destination, the loop-back slot,
// Y growing southward, IterNum semantics and Type[3] as ALU select.
module noc_router
  import compair_pkg::*;
#(
  parameter int FIFO_DEPTH = 4,
  parameter int N_ALU      = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // mesh coordinates of this router (strapped at instantiation; ports rather
  // than parameters so that all routers share one module)
  input  logic  [3:0]          my_x,
  input  logic  [3:0]          my_y,
  input  flit_t [N_PORTS-1:0]  flit_in,
  output logic  [N_PORTS-1:0]  credit_out,
  output flit_t [N_PORTS-1:0]  flit_out,
  input  logic  [N_PORTS-1:0]  credit_in,
  // event strobes for monitoring: bypass, buffered, alu_stall, loopback, iter_wrap, compute
  output logic  [5:0]          ev
);
  localparam int NI = N_PORTS + 1;     // inputs incl. loop-back
  localparam int NO = N_PORTS + 1;     // outputs incl. loop-back
  localparam int P_LOOP = N_PORTS;
  localparam int AW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;
  localparam int CW = $clog2(FIFO_DEPTH + 1);

  // ---------------------------------------------------------------- FIFOs
  flit_t [N_PORTS-1:0][FIFO_DEPTH-1:0] fifo_q;
  logic  [N_PORTS-1:0][AW-1:0]         rd_q, wr_q;
  logic  [N_PORTS-1:0][CW-1:0]         cnt_q;
  flit_t                               loop_q;

  flit_t [NI-1:0] cand;
  logic  [NI-1:0] from_fifo;
  always_comb begin
    for (int i = 0; i < N_PORTS; i++) begin
      from_fifo[i] = (cnt_q[i] != '0);
      cand[i]      = from_fifo[i] ? fifo_q[i][rd_q[i]] : flit_in[i];
    end
    from_fifo[P_LOOP] = 1'b0;
    cand[P_LOOP]      = loop_q;
  end

  // ------------------------------------------- per-input route + step plan
  logic    [NI-1:0]            at_dst;
  logic    [NI-1:0][2:0]       want;        // requested output
  flit_t   [NI-1:0]            nxt;         // flit after this router (data fixed later)
  logic    [NI-1:0]            wrap;
  logic    [NI-1:0]            is_last;

  function automatic logic [2:0] dor(input logic [3:0] dx, input logic [3:0] dy);
    if (dx > my_x) return 3'(P_E);
    if (dx < my_x) return 3'(P_W);
    if (dy > my_y) return 3'(P_S);
    if (dy < my_y) return 3'(P_N);
    return 3'(P_LOOP);
  endfunction

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      logic [2:0] len, ns;
      path_t      pe;
      logic [3:0] nx, ny;
      nxt[i]     = cand[i];
      ns         = 3'd0;
      pe         = PATH_END;
      nx         = 4'd0;
      ny         = 4'd0;
      wrap[i]    = 1'b0;
      is_last[i] = 1'b0;
      at_dst[i]  = cand[i].valid && (cand[i].dst_x == my_x) && (cand[i].dst_y == my_y);
      len        = path_len(cand[i].pkt);
      want[i]    = dor(cand[i].dst_x, cand[i].dst_y);
      if (at_dst[i]) begin
        ns = 3'(cand[i].step) + 3'd1;
        if (ns >= len) begin
          if (cand[i].pkt.iter_num > 4'd1) begin
            wrap[i]              = 1'b1;
            nxt[i].pkt.iter_num  = cand[i].pkt.iter_num - 4'd1;
            ns                   = 3'd0;
          end else begin
            is_last[i] = 1'b1;
          end
        end
        if (is_last[i] || len == 3'd0) begin
          want[i] = 3'(P_L);
        end else begin
          pe          = cand[i].pkt.path[ns[1:0]];
          nx          = my_x + 4'(pe.x);
          ny          = my_y + 4'(pe.y);
          nxt[i].step  = ns[1:0];
          nxt[i].dst_x = nx;
          nxt[i].dst_y = ny;
          want[i]      = dor(nx, ny);
        end
      end
    end
  end

  // ---------------------------------------------------------- allocation
  logic [N_PORTS-1:0][CW-1:0] cred_q;
  logic [2:0]                 rr_q;
  logic [NI-1:0]              gnt;
  logic [NO-1:0]              out_used;
  logic [N_ALU-1:0]           alu_used;
  logic [N_ALU-1:0]           alu_busy;
  logic [N_ALU-1:0][2:0]      alu_src;
  logic [NO-1:0][2:0]         out_src;
  logic                       alu_stall;

  function automatic logic needs_alu(input flit_t f);
    return f.pkt.ptype != PT_NONE;
  endfunction

  always_comb begin
    gnt       = '0;
    out_used  = '0;
    alu_used  = '0;
    alu_src   = '0;
    out_src   = '0;
    alu_stall = 1'b0;
    for (int k = 0; k < NI; k++) begin
      int i;
      logic ok;
      int   a;
      i  = (int'(rr_q) + k) % NI;
      a  = (N_ALU > 1) ? int'(cand[i].pkt.alu_sel) : 0;
      ok = cand[i].valid && !out_used[want[i]];
      if (want[i] < 3'(N_PORTS)) ok = ok && (cred_q[want[i]] != '0);
      else                       ok = ok && (!loop_q.valid || i == P_LOOP);
      if (ok && at_dst[i] && needs_alu(cand[i])) begin
        if (alu_used[a] || alu_busy[a]) begin
          ok        = 1'b0;
          alu_stall = 1'b1;
        end
      end
      if (ok) begin
        gnt[i]            = 1'b1;
        out_used[want[i]] = 1'b1;
        out_src[want[i]]  = 3'(i);
        if (at_dst[i] && needs_alu(cand[i])) begin
          alu_used[a] = 1'b1;
          alu_src[a]  = 3'(i);
        end
      end
    end
  end

  // ----------------------------------------------------------- Curry ALUs
  bf16_t [N_ALU-1:0] alu_res;
  bf16_t [N_ALU-1:0] alu_arg, alu_iarg;
  for (genvar g = 0; g < N_ALU; g++) begin : g_alu
    flit_t      f;
    path_t      pe;
    logic [1:0] mode;
    assign f  = cand[alu_src[g]];
    assign pe = f.pkt.path[f.step];
    always_comb begin
      case (f.pkt.ptype)
        PT_READ:      mode = 2'd1;
        PT_BROADCAST: mode = 2'd2;
        PT_WRITE:     mode = pe.iter_tag ? 2'd3 : 2'd2;
        default:      mode = 2'd0;
      endcase
    end
    curry_alu u_ca (
      .clk, .rst_n,
      .fire    (alu_used[g]),
      .mode    (mode),
      .in_val  (f.pkt.data),
      .in_op   (pe.op),
      .wr_reg  (pe.wr_reg),
      .iter_tag(pe.iter_tag && f.pkt.ptype != PT_WRITE),
      .result  (alu_res[g]),
      .busy    (alu_busy[g]),
      .arg_reg (alu_arg[g]),
      .iter_arg(alu_iarg[g])
    );
  end

  // flit leaving input i, with its data replaced by the ALU result
  flit_t [NI-1:0] leave;
  always_comb begin
    for (int i = 0; i < NI; i++) begin
      leave[i] = nxt[i];
      if (at_dst[i] && needs_alu(cand[i])) begin
        for (int g = 0; g < N_ALU; g++)
          if (alu_used[g] && int'(alu_src[g]) == i) leave[i].pkt.data = alu_res[g];
      end
    end
  end

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q     <= '0;
      wr_q     <= '0;
      cnt_q    <= '0;
      loop_q   <= '0;
      rr_q     <= '0;
      flit_out <= '0;
      for (int o = 0; o < N_PORTS; o++) cred_q[o] <= CW'(FIFO_DEPTH);
      credit_out <= '0;
    end else begin
      // inputs
      for (int i = 0; i < N_PORTS; i++) begin
        logic push, pop;
        pop  = from_fifo[i] && gnt[i];
        push = flit_in[i].valid && (from_fifo[i] || !gnt[i]);
        if (push) begin
          fifo_q[i][wr_q[i]] <= flit_in[i];
          wr_q[i] <= (int'(wr_q[i]) == FIFO_DEPTH - 1) ? '0 : wr_q[i] + AW'(1);
        end
        if (pop) rd_q[i] <= (int'(rd_q[i]) == FIFO_DEPTH - 1) ? '0 : rd_q[i] + AW'(1);
        cnt_q[i]      <= cnt_q[i] + CW'(push) - CW'(pop);
        credit_out[i] <= gnt[i];
      end
      // loop-back slot
      if (gnt[P_LOOP]) loop_q.valid <= 1'b0;
      if (out_used[P_LOOP]) loop_q <= leave[out_src[P_LOOP]];
      // outputs and credits
      for (int o = 0; o < N_PORTS; o++) begin
        flit_out[o] <= out_used[o] ? leave[out_src[o]] : '0;
        cred_q[o]   <= cred_q[o] - CW'(out_used[o]) + CW'(credit_in[o]);
      end
      rr_q <= (rr_q == 3'(NI - 1)) ? 3'd0 : rr_q + 3'd1;
    end
  end

  // ---------------------------------------------------------------- events
  always_comb begin
    ev    = '0;
    ev[2] = alu_stall;
    for (int i = 0; i < N_PORTS; i++) begin
      if (gnt[i] && !from_fifo[i]) ev[0] = 1'b1;
      if (flit_in[i].valid && (from_fifo[i] || !gnt[i])) ev[1] = 1'b1;
    end
    ev[3] = out_used[P_LOOP];
    for (int i = 0; i < NI; i++) begin
      if (gnt[i] && wrap[i]) ev[4] = 1'b1;
      if (gnt[i] && at_dst[i] && needs_alu(cand[i])) ev[5] = 1'b1;
    end
  end

  // --------------------------------------------------------------- checks
  for (genvar i = 0; i < N_PORTS; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(flit_in[i].valid && int'(cnt_q[i]) == FIFO_DEPTH && !gnt[i]));
  end
  for (genvar o = 0; o < N_PORTS; o++) begin : g_cchk
    a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
      int'(cred_q[o]) <= FIFO_DEPTH);
  end
endmodule
