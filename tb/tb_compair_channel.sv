// tb_compair_channel - end-to-end test of one CompAir channel at full size
// (16 banks of 32 MB, four SRAM-PIM macros per bank, 2 KB global buffer,
// 4 x 16 NoC): no parameter is overridden. It runs one complete
// computation through the SIMD command port:
//   1. fills the global buffer, loads per-bank vectors and shared SRAM-PIM
//      weights into DRAM,
//   2. all banks: MAC of 8 DRAM words with the global buffer (a GEMV row),
//      element-wise add, SRAM_Write of a weight tile, SRAM_Compute in the
//      (512,8) and the (256,16) shape; every bank's results are read back
//      and compared with a BF16 reference,
//   3. reduces the 16 banks' MAC results over the NoC. Write packets put each
//      bank's value into its router's ArgReg. Then come four Reduce trees in
//      parallel (SIMD inject in banks 0, 4, 8, 12), two second-level trees
//      and a final one, with partials kept through WrReg. The sum saved by
//      bank 15 must equal the reference sum taken in the same order,
//   4. back-pressure: bank 0 injects 8 packets without saving, so its 4-deep
//      ejection FIFO and the router's input FIFO fill. Then 8 saves drain
//      them in order,
//   5. an iterated packet (IterNum = 4, IterTag set) that stays on one
//      router: loop-back, iteration wrap and an ALU stall on the IterTag
//      update.
// Mechanism counters: NoC bypass, buffering, ALU stall, loop-back, iteration
// wrap and in-router compute (from the routers' event strobes), plus each
// bank command kind. A mechanism that never happened is a failure.
module tb_compair_channel;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  import tb_pkt_pkg::*;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done;
  bank_cmd_t cmd = '0;
  logic [NB-1:0] bank_mask = '0, rvalid;
  logic [255:0] wdata = '0;
  logic [NB-1:0][255:0] rdata;
  logic gb_we = 0;
  logic [5:0] gb_addr = 0;
  logic [255:0] gb_wdata = 0;
  logic [4*NB-1:0][5:0] noc_ev;
  int checks = 0, failures = 0, cyc = 0;
  int n_ev [6];
  int n_cmd [16];

  compair_channel dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int r = 0; r < 4 * NB; r++) for (int e = 0; e < 6; e++) n_ev[e] += int'(noc_ev[r][e]);
  end

  logic [255:0] gb [64];
  logic [255:0] mem [NB][2048];      // model of the words this test touches
  logic [255:0] rd_q [NB];

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s (t=%0d)", w, cyc); end
  endtask
  function automatic bf16_t ln(input logic [255:0] w, input int k);
    return w[k*16 +: 16];
  endfunction
  function automatic logic [255:0] rnd_word(input int span);
    logic [255:0] w;
    for (int k = 0; k < 16; k++) w[k*16 +: 16] = rnd_bf16(span);
    return w;
  endfunction

  task automatic issue(input bank_cmd_t c, input logic [NB-1:0] m);
    cmd = c; bank_mask = m; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    n_cmd[int'(c.op)]++;
    while (!done) begin
      for (int b = 0; b < NB; b++) if (rvalid[b]) rd_q[b] = rdata[b];
      @(negedge clk);
    end
    @(negedge clk);
  endtask
  int clr_a [5] = '{210, 211, 212, 220, 230};
  task automatic wr(input int b_or_all, input int a, input logic [255:0] d);
    bank_cmd_t c;
    c = '0; c.op = BC_WRITE; c.dst = 20'(a);
    wdata = d;
    issue(c, b_or_all < 0 ? '1 : NB'(1) << b_or_all);
    for (int b = 0; b < NB; b++) if (b_or_all < 0 || b == b_or_all) mem[b][a] = d;
  endtask
  task automatic rd_all(input int a, input string what);
    bank_cmd_t c;
    c = '0; c.op = BC_READ; c.src = 20'(a);
    for (int b = 0; b < NB; b++) rd_q[b] = 'x;
    issue(c, '1);
    for (int b = 0; b < NB; b++) chk(what, rd_q[b] == mem[b][a]);
  endtask
  task automatic set_lane(input int b, input int a, input int lane, input bf16_t v);
    logic [255:0] w;
    w = mem[b][a]; w[lane*16 +: 16] = v; mem[b][a] = w;
  endtask

  bf16_t W [4][8][128];
  bf16_t macv [NB];
  initial begin
    bank_cmd_t c;
    bf16_t r, p, q, t0, t1, l2a, l2b, tot;
    logic [255:0] e;
    for (int e2 = 0; e2 < 6; e2++) n_ev[e2] = 0;
    for (int k = 0; k < 16; k++) n_cmd[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. global buffer and DRAM contents
    for (int i = 0; i < 64; i++) begin
      gb[i] = rnd_word(2);
      gb_we = 1; gb_addr = 6'(i); gb_wdata = gb[i];
      @(negedge clk);
    end
    gb_we = 0;
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 8; i++) wr(b, 64 + i, rnd_word(2));       // MAC operands
      for (int i = 0; i < 4; i++) wr(b, 96 + i, rnd_word(3));       // EW operands
      for (int i = 0; i < 32; i++) wr(b, 1024 + i, rnd_word(1));    // SRAM-PIM inputs
    end
    wr(-1, 200, '0);
    wr(-1, 202, '0);
    for (int w = 0; w < 256; w++) begin                            // shared weight tile
      e = rnd_word(1);
      wr(-1, 512 + w, e);
      for (int k = 0; k < 16; k++) W[w / 64][w % 8][((w % 64) / 8) * 16 + k] = ln(e, k);
    end

    // 2. compute in all banks
    c = '0; c.op = BC_MAC; c.src = 20'd64; c.gb = 6'd10; c.len = 8'd8; c.dst = 20'd200; c.lane = 4'd0;
    issue(c, '1);
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 8; i++) begin
        bf16_t tt [16];
        for (int k = 0; k < 16; k++) tt[k] = ref_op(2, ln(mem[b][64 + i], k), ln(gb[10 + i], k));
        for (int w = 8; w >= 1; w /= 2) for (int k = 0; k < w; k++) tt[k] = ref_op(0, tt[2*k], tt[2*k+1]);
        r = (i == 0) ? tt[0] : ref_op(0, r, tt[0]);
      end
      macv[b] = r;
      set_lane(b, 200, 0, r);
    end
    rd_all(200, "MAC in every bank");
    c = '0; c.op = BC_EWADD; c.src = 20'd96; c.src2 = 20'd98; c.dst = 20'd100; c.len = 8'd2;
    issue(c, '1);
    for (int b = 0; b < NB; b++) for (int i = 0; i < 2; i++) begin
      for (int k = 0; k < 16; k++) e[k*16 +: 16] = ref_op(0, ln(mem[b][96 + i], k), ln(mem[b][98 + i], k));
      mem[b][100 + i] = e;
    end
    rd_all(100, "EWADD word 0");
    rd_all(101, "EWADD word 1");
    c = '0; c.op = BC_SRAM_WR; c.len = 8'd64; c.wset = 2'd1;
    for (int part = 0; part < 4; part++) begin
      c.src = 20'(512 + part * 64);
      issue(c, '1);
    end
    for (int m16 = 0; m16 < 2; m16++) begin
      c = '0; c.op = BC_SRAM_COMP; c.src = 20'd1024; c.len = (m16 != 0) ? 8'd16 : 8'd32; c.wset = 2'd1;
      c.mode16 = m16[0]; c.dst = 20'(300 + m16);
      issue(c, '1);
      for (int b = 0; b < NB; b++) begin
        for (int o = 0; o < 16; o++) begin
          bf16_t md [4];
          for (int m = 0; m < 4; m++) begin
            int base;
            base = (m16 != 0) ? (m % 2) * 8 : m * 8;
            for (int cc = 0; cc < 8; cc++) begin
              p = ref_op(2, W[m][o % 8][cc*16], ln(mem[b][1024 + base + cc], 0));
              for (int k = 1; k < 16; k++)
                p = ref_op(0, p, ref_op(2, W[m][o % 8][cc*16 + k], ln(mem[b][1024 + base + cc], k)));
              q = (cc == 0) ? p : ref_op(0, q, p);
            end
            md[m] = q;
          end
          if (m16 == 0) r = (o < 8) ? ref_op(0, ref_op(0, md[0], md[1]), ref_op(0, md[2], md[3])) : 16'h0;
          else      r = (o < 8) ? ref_op(0, md[0], md[1]) : ref_op(0, md[2], md[3]);
          e[o*16 +: 16] = r;
        end
        mem[b][300 + m16] = e;
      end
      rd_all(300 + m16, (m16 != 0) ? "SRAM_Compute (256,16)" : "SRAM_Compute (512,8)");
    end

    // 3. NoC reduction of the 16 MAC results. The words that NoC saves write
    //    one lane of are cleared first: the DRAM starts with unknown contents.
    foreach (clr_a[i]) wr(-1, clr_a[i], '0);
    // 3. NoC reduction of the 16 MAC results
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd200; c.lane = 4'd0; c.rtr = 2'd0;
    c.pkt = pkt(PT_WRITE, 16'h0, 0, step(0, 0, OP_ADD));
    issue(c, '1);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd210; c.lane = 4'd0; c.rtr = 2'd0;
    issue(c, '1);
    for (int b = 0; b < NB; b++) set_lane(b, 210, 0, macv[b]);
    rd_all(210, "Write packet returned");
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd202; c.lane = 4'd0; c.rtr = 2'd0;
    c.pkt = pkt(PT_REDUCE, 16'h0, 0, step(0, 0, OP_ADD), step(2, 0, OP_ADD), step(2, 0, OP_ADD),
                step(2, 0, OP_ADD, 1));
    issue(c, 16'h1111);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd211; c.lane = 4'd0; c.rtr = 2'd0;
    issue(c, 16'h8888);
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd202; c.lane = 4'd0; c.rtr = 2'd0;
    c.pkt = pkt(PT_REDUCE, 16'h0, 0, step(0, 0, OP_ADD), step(7, 0, OP_ADD), step(1, 0, OP_ADD, 1));
    issue(c, 16'h0808);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd211; c.lane = 4'd1; c.rtr = 2'd0;
    issue(c, 16'h8080);
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd202; c.lane = 4'd0; c.rtr = 2'd0;
    c.pkt = pkt(PT_REDUCE, 16'h0, 0, step(0, 0, OP_ADD), step(0, 2, OP_ADD));
    issue(c, 16'h0080);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd212; c.lane = 4'd0; c.rtr = 2'd0;
    issue(c, 16'h8000);
    begin
      bf16_t pg [4];
      for (int g = 0; g < 4; g++) begin
        r = 16'h0;
        for (int k = 0; k < 4; k++) r = ref_op(0, r, macv[4 * g + k]);
        pg[g] = r;
        set_lane(4 * g + 3, 211, 0, r);
      end
      l2a = ref_op(0, ref_op(0, ref_op(0, 16'h0, pg[0]), 16'h0), pg[1]);
      l2b = ref_op(0, ref_op(0, ref_op(0, 16'h0, pg[2]), 16'h0), pg[3]);
      set_lane(7, 211, 1, l2a);
      set_lane(15, 211, 1, l2b);
      tot = ref_op(0, ref_op(0, 16'h0, l2a), l2b);
      set_lane(15, 212, 0, tot);
    end
    rd_all(211, "reduce levels 1 and 2");
    rd_all(212, "reduce total in bank 15");

    // 4. back-pressure: 8 packets into bank 0 router 2 (ALU 1, ArgReg 0)
    for (int i = 0; i < 8; i++) begin
      c = '0; c.op = BC_NOC_INJ; c.src = 20'd64; c.lane = 4'(i); c.rtr = 2'd2;
      c.pkt = pkt(PT_SCALAR, 16'h0, 0, step(0, 0, OP_ADD), .alu(1));
      issue(c, 16'h0001);
    end
    repeat (20) @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd220; c.lane = 4'(i); c.rtr = 2'd2;
      issue(c, 16'h0001);
      set_lane(0, 220, i, ln(mem[0][64], i));
    end
    rd_all(220, "back-pressured packets in order");

    // 5. iterated packet on bank 5 router 1: ArgReg = v, result = d + 4v
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd96; c.lane = 4'd3; c.rtr = 2'd1;
    c.pkt = pkt(PT_WRITE, 16'h0, 0, step(0, 0, OP_ADD));
    issue(c, 16'h0020);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd230; c.lane = 4'd0; c.rtr = 2'd1;
    issue(c, 16'h0020);
    set_lane(5, 230, 0, ln(mem[5][96], 3));
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd97; c.lane = 4'd2; c.rtr = 2'd1;
    c.pkt = pkt(PT_SCALAR, 16'h0, 4, step(0, 0, OP_ADD, 0, 1));
    issue(c, 16'h0020);
    c = '0; c.op = BC_NOC_SAVE; c.dst = 20'd230; c.lane = 4'd1; c.rtr = 2'd1;
    issue(c, 16'h0020);
    r = ln(mem[5][97], 2);
    for (int i = 0; i < 4; i++) r = ref_op(0, r, ln(mem[5][96], 3));
    set_lane(5, 230, 1, r);
    rd_all(230, "iterated packet");

    $display("NoC events: bypass=%0d buffered=%0d alu_stall=%0d loopback=%0d wrap=%0d compute=%0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5]);
    $display("commands: write=%0d read=%0d mac=%0d ewadd=%0d sram_wr=%0d sram_comp=%0d inj=%0d save=%0d",
             n_cmd[BC_WRITE], n_cmd[BC_READ], n_cmd[BC_MAC], n_cmd[BC_EWADD], n_cmd[BC_SRAM_WR],
             n_cmd[BC_SRAM_COMP], n_cmd[BC_NOC_INJ], n_cmd[BC_NOC_SAVE]);
    chk("mechanism: bypass", n_ev[0] > 0);
    chk("mechanism: buffering", n_ev[1] > 0);
    chk("mechanism: ALU stall", n_ev[2] > 0);
    chk("mechanism: loop-back", n_ev[3] > 0);
    chk("mechanism: iteration wrap", n_ev[4] > 0);
    chk("mechanism: in-router compute", n_ev[5] > 0);
    chk("mechanism: MAC", n_cmd[BC_MAC] > 0);
    chk("mechanism: element-wise", n_cmd[BC_EWADD] > 0);
    chk("mechanism: SRAM write", n_cmd[BC_SRAM_WR] > 0);
    chk("mechanism: SRAM compute both shapes", n_cmd[BC_SRAM_COMP] == 2);
    chk("mechanism: inject/save", n_cmd[BC_NOC_INJ] > 0 && n_cmd[BC_NOC_SAVE] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
