// tb_noc_router - one router at (X,Y) = (1,1). Checks: 1-cycle bypass for a
// flit that only passes through, FIFO buffering and 2-cycle delay for the loser of
// an output conflict, credit back-pressure, register write and flit compute
// with the next step's destination computed, ALU conflicts between two flits
// that need the same Curry ALU, parallel use of the two ALUs, and a path whose
// next step runs on the same router (loop-back).
module tb_noc_router;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  import tb_pkt_pkg::*;
  logic clk = 0, rst_n = 0;
  flit_t [N_PORTS-1:0] fin = '0, fout;
  logic  [N_PORTS-1:0] cout, cin = '0;
  logic  [5:0] ev;
  logic        hold_e = 0;
  int checks = 0, failures = 0, cyc = 0;
  int n_bypass = 0, n_buf = 0, n_stall = 0, n_loop = 0;

  noc_router dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1), .flit_in(fin), .credit_out(cout),
                                  .flit_out(fout), .credit_in(cin), .ev);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_bypass <= n_bypass + int'(ev[0]);
    n_buf    <= n_buf + int'(ev[1]);
    n_stall  <= n_stall + int'(ev[2]);
    n_loop   <= n_loop + int'(ev[3]);
  end
  // return a credit for every flit taken from an output (east can be held)
  always @(posedge clk) for (int o = 0; o < N_PORTS; o++)
    cin[o] <= fout[o].valid && !(o == P_E && hold_e);

  // log of output flits
  flit_t got_f [$];
  int    got_p [$];
  int    got_t [$];
  always @(negedge clk) for (int o = 0; o < N_PORTS; o++)
    if (fout[o].valid) begin got_f.push_back(fout[o]); got_p.push_back(o); got_t.push_back(cyc); end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic flit_t fl(input packet_t p, input int dx, input int dy, input int st = 0);
    flit_t f;
    f.valid = 1; f.pkt = p; f.dst_x = 4'(dx); f.dst_y = 4'(dy); f.step = 2'(st);
    return f;
  endfunction

  task automatic drive(input int port, input flit_t f);
    fin[port] = f;
  endtask
  task automatic tick();
    @(negedge clk);
    fin = '0;
  endtask

  initial begin
    int t0, s0;
    bf16_t seven, v;
    seven = from_int(7);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. pass-through W -> E, 1 cycle
    got_f.delete(); got_p.delete(); got_t.delete();
    t0 = cyc;
    drive(P_W, fl(pkt(PT_SCALAR, from_int(3), 0, step(2, 0, OP_ADD)), 3, 1));
    tick(); tick();
    chk("pass-through out E", got_p.size() == 1 && got_p[0] == P_E);
    chk("pass-through 1 cycle", got_t.size() == 1 && got_t[0] - t0 == 1);
    chk("pass-through data", got_f.size() == 1 && got_f[0].pkt.data == from_int(3));
    // 2. write ArgReg of ALU 0 (= 7) from the local port, ejected back
    got_f.delete(); got_p.delete(); got_t.delete();
    drive(P_L, make_flit(pkt(PT_WRITE, seven, 0, step(0, 0, OP_ADD)), 4'd1, 4'd1));
    tick(); tick();
    chk("write ejected", got_p.size() == 1 && got_p[0] == P_L);
    // ALU 1 ArgReg = 2
    drive(P_L, make_flit(pkt(PT_WRITE, from_int(2), 0, step(0, 0, OP_ADD), .alu(1)), 4'd1, 4'd1));
    tick(); tick();
    // 3. flit compute: arrives from N at its step-0 router, *= 7, next step (+1,0)
    got_f.delete(); got_p.delete(); got_t.delete();
    drive(P_N, fl(pkt(PT_SCALAR, from_int(3), 0, step(0, 1, OP_MUL), step(1, 0, OP_ADD)), 1, 1));
    tick(); tick();
    chk("compute goes east", got_p.size() == 1 && got_p[0] == P_E);
    chk("compute data 3*7", got_f.size() == 1 && got_f[0].pkt.data == from_int(21));
    chk("next dst (2,1) step 1", got_f.size() == 1 && got_f[0].dst_x == 2 && got_f[0].dst_y == 1 && got_f[0].step == 1);
    // 4. ALU conflict: N and S both need ALU 0 in the same cycle
    got_f.delete(); got_p.delete(); got_t.delete();
    s0 = n_stall;
    t0 = cyc;
    drive(P_N, fl(pkt(PT_SCALAR, from_int(1), 0, step(0, 1, OP_ADD), step(-1, 0, OP_ADD)), 1, 1));
    drive(P_S, fl(pkt(PT_SCALAR, from_int(2), 0, step(0, -1, OP_ADD), step(1, 0, OP_ADD)), 1, 1));
    tick(); tick(); tick(); tick();
    chk("conflict: both delivered", got_p.size() == 2);
    chk("conflict: stall seen", n_stall > s0);
    chk("conflict: serialised", got_t.size() == 2 && got_t[1] - got_t[0] == 1);
    for (int k = 0; k < got_f.size(); k++)
      chk("conflict data", got_f[k].pkt.data == from_int(8) || got_f[k].pkt.data == from_int(9));
    // 5. the two ALUs in parallel: N uses ALU0, S uses ALU1, same cycle
    got_f.delete(); got_p.delete(); got_t.delete();
    drive(P_N, fl(pkt(PT_SCALAR, from_int(1), 0, step(0, 1, OP_MUL), step(-1, 0, OP_ADD)), 1, 1));
    drive(P_S, fl(pkt(PT_SCALAR, from_int(5), 0, step(0, -1, OP_MUL), step(1, 0, OP_ADD), .alu(1)), 1, 1));
    tick(); tick(); tick();
    chk("two ALUs same cycle", got_t.size() == 2 && got_t[0] == got_t[1]);
    for (int k = 0; k < got_f.size(); k++)
      if (got_p[k] == P_W) chk("alu0 1*7", got_f[k].pkt.data == seven);
      else                 chk("alu1 5*2", got_f[k].pkt.data == from_int(10));
    // 6. loop-back: steps (0,0) then (0,0) on this router: (4 + 7) * 7
    got_f.delete(); got_p.delete(); got_t.delete();
    s0 = n_loop;
    drive(P_L, make_flit(pkt(PT_SCALAR, from_int(4), 0, step(0, 0, OP_ADD), step(0, 0, OP_MUL)), 4'd1, 4'd1));
    tick(); tick(); tick(); tick();
    v = ref_op(2, ref_op(0, from_int(4), seven), seven);
    chk("loopback used", n_loop > s0);
    chk("loopback result", got_f.size() == 1 && got_p[0] == P_L && got_f[0].pkt.data == v);
    // 7. back-pressure: east credits held; 6 flits W->E, only 4 pass
    got_f.delete(); got_p.delete(); got_t.delete();
    hold_e = 1;
    s0 = n_buf;
    for (int k = 0; k < 6; k++) begin
      if (k < 4) drive(P_W, fl(pkt(PT_SCALAR, from_int(k), 0, step(2, 0, OP_ADD)), 3, 1));
      else       drive(P_N, fl(pkt(PT_SCALAR, from_int(k), 0, step(2, 0, OP_ADD)), 3, 1));
      tick();
    end
    repeat (4) tick();
    chk("credit limit 4", got_f.size() == 4);
    chk("blocked flits buffered", n_buf > s0);
    hold_e = 0;
    // release: one credit per taken flit is returned now
    cin[P_E] = 1; @(negedge clk); cin[P_E] = 1; @(negedge clk); cin[P_E] = 0;
    repeat (4) tick();
    chk("after credits all 6", got_f.size() == 6);
    chk("bypass seen", n_bypass > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
