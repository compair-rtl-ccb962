// tb_compair_noc - full 16x4 CompAir-NoC mesh. The testbench drives every
// local port the way a bank IO would: it injects flits when it holds an
// injection credit and returns an ejection credit for every flit it takes.
// Scenarios:
//  1. zero-load latency across the whole mesh: one cycle per router
//     (bypass), 18 hops plus ejection.
//  2. the exponential series of the in-transit computation example: one
//     Scalar packet with IterNum = 6 visits three routers per iteration. It
//     uses *=, /= with IterTag (ArgReg 6 -= 1 each pass) and +=. The result
//     is compared with the same sequence of BF16 operations.
//  3. hierarchical reduction: eight 4-leaf Reduce trees run at the same time
//     (partials kept with WrReg), then second-level Reduce packets combine
//     partials of neighbouring trees.
//  4. Broadcast loads a value into the ArgRegs of four routers. Read
//     packets then return them.
//  5. random traffic: 300 Scalar packets with 1..4 random path steps between
//     random routers on ALU 1 (ArgReg 0, so += keeps the data, which is a
//     distinct normal BF16 pattern per packet). Each must
//     arrive once, unchanged, at the router of its last step.
//  6. the five-stage RoPE rearrangement on one bank's four routers:
//     Write, "0 -=" with WrReg and Read packets turn [q0 q1 ... q7] into
//     [-q1 q0 -q3 q2 -q5 q4 -q7 q6].
module tb_compair_noc;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  import tb_pkt_pkg::*;
  localparam int MX = 16, MY = 4, NR = MX * MY, FD = 4;
  logic clk = 0, rst_n = 0;
  flit_t [NR-1:0] inj = '0, ej;
  logic  [NR-1:0] inj_credit, ej_credit = '0;
  logic  [NR-1:0][5:0] ev;
  int checks = 0, failures = 0, cyc = 0;
  int cred [NR];
  int n_ev [6];

  compair_noc #(.MESH_X(MX), .MESH_Y(MY), .FIFO_DEPTH(FD)) dut (.clk, .rst_n, .inj,
    .inj_credit, .ej, .ej_credit, .ev);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int r = 0; r < NR; r++) begin
      ej_credit[r] <= ej[r].valid;
      for (int e = 0; e < 6; e++) n_ev[e] += int'(ev[r][e]);
    end
  end

  // ejection log
  flit_t ej_f [$];
  int    ej_r [$];
  int    ej_t [$];
  always @(negedge clk) for (int r = 0; r < NR; r++)
    if (ej[r].valid) begin ej_f.push_back(ej[r]); ej_r.push_back(r); ej_t.push_back(cyc); end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0d)", what, cyc); end
  endtask

  function automatic int rid(input int x, input int y);
    return y * MX + x;
  endfunction

  // inject a list of (router, packet) in the same cycle where credits allow
  int     q_r [$];
  packet_t q_p [$];
  task automatic push(input int x, input int y, input packet_t p);
    q_r.push_back(rid(x, y)); q_p.push_back(p);
  endtask
  task automatic run_queue();
    while (q_r.size() > 0) begin
      logic [NR-1:0] used;
      int k;
      used = '0;
      k = 0;
      while (k < q_r.size()) begin
        int r;
        r = q_r[k];
        if (!used[r] && cred[r] > 0) begin
          inj[r] = make_flit(q_p[k], 4'(r % MX), 4'(r / MX));
          used[r] = 1; cred[r]--;
          q_r.delete(k); q_p.delete(k);
        end else k++;
      end
      @(negedge clk);
      inj = '0;
    end
  endtask
  always @(posedge clk) for (int r = 0; r < NR; r++) if (inj_credit[r]) cred[r]++;

  task automatic wait_ej(input int n, input int limit);
    int t;
    t = 0;
    while (ej_f.size() < n && t < limit) begin @(negedge clk); t++; end
    repeat (3) @(negedge clk);
  endtask
  task automatic clr();
    ej_f.delete(); ej_r.delete(); ej_t.delete();
  endtask
  task automatic write_arg(input int x, input int y, input bf16_t v, input logic alu = 0);
    push(x, y, pkt(PT_WRITE, v, 0, step(0, 0, OP_ADD), .alu(alu)));
  endtask

  bf16_t vals [16];
  bf16_t part [8];
  int    exp_r [300];
  logic  seen [300];

  initial begin
    int t0;
    bf16_t x, res, a;
    for (int e = 0; e < 6; e++) n_ev[e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // credits count from here: before reset the credit wires hold junk
    for (int r = 0; r < NR; r++) cred[r] = FD;
    @(negedge clk);

    // 1. zero-load latency (0,0) -> (15,3)
    clr();
    t0 = cyc;
    push(0, 0, pkt(PT_SCALAR, from_int(5), 0, step(7, 0, OP_ADD), step(7, 0, OP_ADD),
                   step(1, 3, OP_ADD), .alu(1)));
    run_queue();
    wait_ej(1, 100);
    chk("latency: delivered at (15,3)", ej_r.size() == 1 && ej_r[0] == rid(15, 3));
    chk("latency: 1 cycle per router", ej_t.size() == 1 && ej_t[0] - t0 == 19);
    chk("latency: data", ej_f.size() == 1 && ej_f[0].pkt.data == from_int(5));

    // 2. exponential series: Res = 1 + Res * x / i, i = 6..1
    clr();
    x = r2b(0.75);
    write_arg(0, 0, from_int(6));
    push(0, 0, pkt(PT_WRITE, from_int(1), 0, step(0, 0, OP_SUB, 0, 1)));   // IterArg 1, IterOp -=
    write_arg(1, 0, BF16_ONE);
    write_arg(0, 1, x);
    run_queue();
    wait_ej(4, 100);
    clr();
    push(1, 0, pkt(PT_SCALAR, BF16_ONE, 6, step(-1, 1, OP_MUL), step(0, -1, OP_DIV, 0, 1),
                   step(1, 0, OP_ADD)));
    run_queue();
    wait_ej(1, 400);
    res = BF16_ONE;
    for (int i = 6; i >= 1; i--) res = ref_op(0, ref_op(3, ref_op(2, res, x), from_int(i)), BF16_ONE);
    chk("exp: one packet back at (1,0)", ej_r.size() == 1 && ej_r[0] == rid(1, 0));
    chk("exp: value", ej_f.size() == 1 && ej_f[0].pkt.data == res);
    if (ej_f.size() == 1 && ej_f[0].pkt.data != res)
      $display("   exp got %h want %h", ej_f[0].pkt.data, res);
    chk("exp: close to e^x", res != 0 && (b2r(res) - 2.117) < 0.02 && (b2r(res) - 2.117) > -0.02);

    // 3. hierarchical reduction
    clr();
    for (int i = 0; i < 16; i++) begin
      vals[i] = rnd_bf16(4);
      // rows y = 0..3: trees forward at x = 0,2,4,6 and backward at x = 14,12,10,8
      write_arg((i % 4) * 2, i / 4, vals[i]);
      write_arg(14 - (i % 4) * 2, i / 4, ref_op(2, vals[i], from_int(2)));
    end
    run_queue();
    wait_ej(32, 200);
    clr();
    for (int y = 0; y < 4; y++) begin
      push(0, y, pkt(PT_REDUCE, BF16_ZERO, 0, step(0, 0, OP_ADD), step(2, 0, OP_ADD),
                     step(2, 0, OP_ADD), step(2, 0, OP_ADD, 1)));
      push(14, y, pkt(PT_REDUCE, BF16_ZERO, 0, step(0, 0, OP_ADD), step(-2, 0, OP_ADD),
                      step(-2, 0, OP_ADD), step(-2, 0, OP_ADD, 1)));
    end
    run_queue();
    wait_ej(8, 200);
    chk("reduce L1: 8 results", ej_f.size() == 8);
    for (int y = 0; y < 4; y++) begin
      a = BF16_ZERO;
      for (int k = 0; k < 4; k++) a = ref_op(0, a, vals[y * 4 + k]);
      part[y] = a;
      a = BF16_ZERO;
      for (int k = 0; k < 4; k++) a = ref_op(0, a, ref_op(2, vals[y * 4 + k], from_int(2)));
      part[4 + y] = a;
    end
    for (int k = 0; k < ej_f.size(); k++) begin
      int x0, y0;
      x0 = ej_r[k] % MX; y0 = ej_r[k] / MX;
      chk("reduce L1 location", x0 == 6 || x0 == 8);
      chk("reduce L1 value", ej_f[k].pkt.data == (x0 == 6 ? part[y0] : part[4 + y0]));
    end
    // level 2: (6,y) + (8,y) + (8,y+1) + (6,y+1), two trees in parallel
    clr();
    for (int y = 0; y < 4; y += 2)
      push(6, y, pkt(PT_REDUCE, BF16_ZERO, 0, step(0, 0, OP_ADD), step(2, 0, OP_ADD),
                     step(0, 1, OP_ADD), step(-2, 0, OP_ADD)));
    run_queue();
    wait_ej(2, 200);
    chk("reduce L2: 2 results", ej_f.size() == 2);
    for (int k = 0; k < ej_f.size(); k++) begin
      int y0;
      y0 = ej_r[k] / MX - 1;
      a = ref_op(0, ref_op(0, ref_op(0, part[y0], part[4 + y0]), part[4 + y0 + 1]), part[y0 + 1]);
      chk("reduce L2 at (6,y+1)", ej_r[k] % MX == 6);
      chk("reduce L2 value", ej_f[k].pkt.data == a);
    end

    // 4. broadcast to (3,1) (4,1) (5,1) (5,2) on ALU 0, then read back
    clr();
    a = r2b(-1.5);
    push(2, 1, pkt(PT_BROADCAST, a, 0, step(1, 0, OP_ADD), step(1, 0, OP_ADD), step(1, 0, OP_ADD),
                   step(0, 1, OP_ADD)));
    run_queue();
    wait_ej(1, 100);
    clr();
    push(3, 1, pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
    push(4, 1, pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
    push(5, 1, pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
    push(5, 2, pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
    run_queue();
    wait_ej(4, 100);
    chk("broadcast: 4 reads", ej_f.size() == 4);
    for (int k = 0; k < ej_f.size(); k++) chk("broadcast value", ej_f[k].pkt.data == a);

    // 5. random traffic
    clr();
    for (int k = 0; k < 300; k++) begin
      int sx, sy, cx, cy, n;
      path_t p [4];
      sx = $urandom_range(MX - 1); sy = $urandom_range(MY - 1);
      cx = sx; cy = sy;
      n = $urandom_range(4, 1);
      for (int s = 0; s < 4; s++) begin
        if (s < n) begin
          int nx, ny;
          nx = $urandom_range(MX - 1); ny = $urandom_range(MY - 1);
          if (nx - cx > 7) nx = cx + 7;
          if (nx - cx < -8) nx = cx - 8;
          p[s] = step(nx - cx, ny - cy, OP_ADD);
          cx = nx; cy = ny;
        end else p[s] = PATH_END;
      end
      exp_r[k] = rid(cx, cy);
      seen[k] = 0;
      push(sx, sy, pkt(PT_SCALAR, 16'h3C00 + 16'(k), 0, p[0], p[1], p[2], p[3], .alu(1)));
    end
    run_queue();
    wait_ej(300, 3000);
    chk("random: all 300 delivered", ej_f.size() == 300);
    for (int k = 0; k < ej_f.size(); k++) begin
      int id;
      id = 0;
      for (int j = 0; j < 300; j++) if (ej_f[k].pkt.data == 16'h3C00 + 16'(j)) id = j + 1;
      chk("random: known data", id != 0);
      if (id != 0) begin
        chk("random: delivered once", !seen[id - 1]);
        chk("random: right router", ej_r[k] == exp_r[id - 1]);
        seen[id - 1] = 1;
      end
    end
    // 6. RoPE rearrangement on one bank's 2 x 2 routers, five stages:
    //    out = [-q1, q0, -q3, q2, -q5, q4, -q7, q6]
    begin
      bf16_t qv [8];
      bf16_t ro [8];
      int    rx [4], ry [4];
      for (int i = 0; i < 8; i++) qv[i] = rnd_bf16(4);
      rx = '{10, 11, 10, 11}; ry = '{2, 2, 3, 3};   // routers 0,1 (top) and 2,3 (bottom)
      // stage 1: top <- q1, q3 ; bottom <- q0, q2
      clr();
      push(rx[0], ry[0], pkt(PT_WRITE, qv[1], 0, step(0, 0, OP_ADD)));
      push(rx[1], ry[1], pkt(PT_WRITE, qv[3], 0, step(0, 0, OP_ADD)));
      push(rx[2], ry[2], pkt(PT_WRITE, qv[0], 0, step(0, 0, OP_ADD)));
      push(rx[3], ry[3], pkt(PT_WRITE, qv[2], 0, step(0, 0, OP_ADD)));
      run_queue(); wait_ej(4, 100);
      // stage 2: top "0 -=" with WrReg (ArgReg = -q) ; bottom Read q0, q2
      clr();
      push(rx[0], ry[0], pkt(PT_SCALAR, BF16_ZERO, 0, step(0, 0, OP_SUB, 1)));
      push(rx[1], ry[1], pkt(PT_SCALAR, BF16_ZERO, 0, step(0, 0, OP_SUB, 1)));
      push(rx[2], ry[2], pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
      push(rx[3], ry[3], pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
      run_queue(); wait_ej(4, 100);
      for (int k = 0; k < ej_f.size(); k++) begin
        if (ej_r[k] == rid(rx[2], ry[2])) ro[1] = ej_f[k].pkt.data;
        if (ej_r[k] == rid(rx[3], ry[3])) ro[3] = ej_f[k].pkt.data;
      end
      // stage 3: top Read -q1, -q3 ; bottom <- q5, q7
      clr();
      push(rx[0], ry[0], pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
      push(rx[1], ry[1], pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
      push(rx[2], ry[2], pkt(PT_WRITE, qv[5], 0, step(0, 0, OP_ADD)));
      push(rx[3], ry[3], pkt(PT_WRITE, qv[7], 0, step(0, 0, OP_ADD)));
      run_queue(); wait_ej(4, 100);
      for (int k = 0; k < ej_f.size(); k++) begin
        if (ej_r[k] == rid(rx[0], ry[0])) ro[0] = ej_f[k].pkt.data;
        if (ej_r[k] == rid(rx[1], ry[1])) ro[2] = ej_f[k].pkt.data;
      end
      // stage 4: top <- q4, q6 ; bottom "0 -=" with WrReg
      clr();
      push(rx[0], ry[0], pkt(PT_WRITE, qv[4], 0, step(0, 0, OP_ADD)));
      push(rx[1], ry[1], pkt(PT_WRITE, qv[6], 0, step(0, 0, OP_ADD)));
      push(rx[2], ry[2], pkt(PT_SCALAR, BF16_ZERO, 0, step(0, 0, OP_SUB, 1)));
      push(rx[3], ry[3], pkt(PT_SCALAR, BF16_ZERO, 0, step(0, 0, OP_SUB, 1)));
      run_queue(); wait_ej(4, 100);
      // stage 5: all four Read
      clr();
      for (int r = 0; r < 4; r++) push(rx[r], ry[r], pkt(PT_READ, BF16_ZERO, 0, step(0, 0, OP_ADD)));
      run_queue(); wait_ej(4, 100);
      for (int k = 0; k < ej_f.size(); k++) begin
        if (ej_r[k] == rid(rx[0], ry[0])) ro[5] = ej_f[k].pkt.data;
        if (ej_r[k] == rid(rx[1], ry[1])) ro[7] = ej_f[k].pkt.data;
        if (ej_r[k] == rid(rx[2], ry[2])) ro[4] = ej_f[k].pkt.data;
        if (ej_r[k] == rid(rx[3], ry[3])) ro[6] = ej_f[k].pkt.data;
      end
      for (int i = 0; i < 8; i += 2) begin
        chk("RoPE odd position negated", ro[i] == {~qv[i + 1][15], qv[i + 1][14:0]});
        chk("RoPE even position moved", ro[i + 1] == qv[i]);
      end
    end

    $display("events: bypass=%0d buffered=%0d alu_stall=%0d loopback=%0d wrap=%0d compute=%0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5]);
    chk("mechanism: bypass", n_ev[0] > 0);
    chk("mechanism: buffering", n_ev[1] > 0);
    chk("mechanism: ALU stall", n_ev[2] > 0);
    chk("mechanism: loop-back", n_ev[3] > 0);
    chk("mechanism: iteration wrap", n_ev[4] > 0);
    chk("mechanism: compute", n_ev[5] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
