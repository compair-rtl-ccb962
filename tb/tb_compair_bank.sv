// tb_compair_bank - one CompAir bank: DRAM-PIM array with column decoder and
// MAC unit, the SRAM-PIM bank and the bank IO controller. The bank's four
// NoC routers are replaced by a loop-back model here: injected flits are
// checked and acknowledged with a credit, and the testbench ejects packets
// into the bank. A small row count is used (the controller has no size-
// dependent logic). Checked:
//   WRITE/READ of random words at random addresses,
//   MAC over len words with the global buffer (3 cycles per word: activate,
//     column, MAC), result in one lane with the other lanes kept,
//   EWMUL/EWADD over several words,
//   SRAM_Write of a full tile (256 words) then SRAM_Compute in (512,8) and
//     (256,16) shapes, compared with the BF16 reference,
//   NOC_INJ (flit built at the right router with Data from DRAM) and
//     NOC_SAVE (ejected Data written into a lane).
module tb_compair_bank;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  import tb_pkt_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, start = 0;
  bank_cmd_t cmd = '0;
  logic [255:0] wdata = '0, rdata, gb_rdata;
  logic busy, done, rvalid;
  logic [5:0] gb_raddr;
  flit_t [3:0] inj, ej = '0;
  logic [3:0] inj_credit = '0, ej_credit;
  logic [255:0] gb [64];
  logic [255:0] mem [ROWS*32];
  int checks = 0, failures = 0, cyc = 0;

  logic [3:0] bx = 4, by = 2;
  compair_bank #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign gb_rdata = gb[gb_raddr];

  flit_t inj_log [$];
  int    inj_rtr [$];
  always @(posedge clk) begin
    inj_credit <= '0;
    for (int r = 0; r < 4; r++) if (inj[r].valid) begin
      inj_log.push_back(inj[r]); inj_rtr.push_back(r); inj_credit[r] <= 1'b1;
    end
  end

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  function automatic bf16_t ln(input logic [255:0] w, input int k);
    return w[k*16 +: 16];
  endfunction
  function automatic logic [255:0] rnd_word(input int span);
    logic [255:0] w;
    for (int k = 0; k < 16; k++) w[k*16 +: 16] = rnd_bf16(span);
    return w;
  endfunction

  // issue one command, return its cycle count (start edge to done)
  task automatic issue(input bank_cmd_t c, output int n);
    int t0;
    cmd = c; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    n = cyc - t0;
    @(negedge clk);
  endtask
  task automatic wr(input int a, input logic [255:0] d);
    bank_cmd_t c;
    int n;
    c = '0; c.op = BC_WRITE; c.dst = 20'(a);
    wdata = d;
    issue(c, n);
    mem[a] = d;
  endtask
  task automatic rd(input int a, output logic [255:0] d);
    bank_cmd_t c;
    int n;
    logic got;
    c = '0; c.op = BC_READ; c.src = 20'(a);
    cmd = c; start = 1;
    @(negedge clk); start = 0;
    got = 0;
    while (!done) begin if (rvalid) begin got = 1; d = rdata; end @(negedge clk); end
    if (rvalid) begin got = 1; d = rdata; end
    chk("read returns data", got);
    @(negedge clk);
  endtask

  bf16_t W [4][8][128];
  initial begin
    logic [255:0] d, e;
    bank_cmd_t c;
    int n4, n8, n;
    bf16_t r, p, q;
    for (int i = 0; i < 64; i++) gb[i] = rnd_word(3);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    // WRITE / READ
    for (int i = 0; i < ROWS * 32; i++) wr(i, rnd_word(3));
    for (int it = 0; it < 100; it++) begin
      int a;
      a = $urandom_range(ROWS * 32 - 1);
      rd(a, d);
      chk("write/read", d == mem[a]);
    end

    // MAC: DRAM[dst].lane 5 = sum_i dot(DRAM[src+i], GB[gb+i])
    for (int L = 4; L <= 8; L += 4) begin
      c = '0; c.op = BC_MAC; c.src = 20'd40; c.gb = 6'd3; c.len = 8'(L); c.dst = 20'd100; c.lane = 4'd5;
      issue(c, n);
      if (L == 4) n4 = n; else n8 = n;
      r = 0;
      for (int i = 0; i < L; i++) begin
        bf16_t t [16];
        for (int k = 0; k < 16; k++) t[k] = ref_op(2, ln(mem[40 + i], k), ln(gb[3 + i], k));
        for (int w = 8; w >= 1; w /= 2) for (int k = 0; k < w; k++) t[k] = ref_op(0, t[2*k], t[2*k+1]);
        r = (i == 0) ? t[0] : ref_op(0, r, t[0]);
      end
      e = mem[100]; e[5*16 +: 16] = r; mem[100] = e;
      rd(100, d);
      chk("MAC result in lane, other lanes kept", d == e);
    end
    chk("MAC: 3 cycles per word", n8 - n4 == 12);

    // EWMUL / EWADD over 5 words
    for (int op = 0; op < 2; op++) begin
      c = '0; c.op = (op != 0) ? BC_EWADD : BC_EWMUL; c.src = 20'd200; c.src2 = 20'd300; c.dst = 20'd400; c.len = 8'd5;
      issue(c, n);
      for (int i = 0; i < 5; i++) begin
        for (int k = 0; k < 16; k++) e[k*16 +: 16] = ref_op((op != 0) ? 0 : 2, ln(mem[200 + i], k), ln(mem[300 + i], k));
        mem[400 + i] = e;
        rd(400 + i, d);
        chk((op != 0) ? "EWADD" : "EWMUL", d == e);
      end
    end

    // SRAM_Write: 256 words from DRAM[512..767] into tile 2
    for (int w = 0; w < 256; w++) begin
      int m, cc, o;
      m = w / 64; cc = (w % 64) / 8; o = w % 8;
      for (int k = 0; k < 16; k++) W[m][o][cc*16 + k] = ln(mem[512 + w], k);
    end
    c = '0; c.op = BC_SRAM_WR; c.src = 20'd512; c.wset = 2'd2;
    // len is 8 bits: write the tile as four 64-word commands
    for (int part = 0; part < 4; part++) begin
      c.src = 20'(512 + part * 64); c.len = 8'd64;
      issue(c, n);
    end
    for (int m16 = 0; m16 < 2; m16++) begin
      c = '0; c.op = BC_SRAM_COMP; c.src = 20'd800; c.len = (m16 != 0) ? 8'd16 : 8'd32; c.wset = 2'd2;
      c.mode16 = m16[0]; c.dst = 20'd1000 + 20'(m16);
      issue(c, n);
      for (int o = 0; o < 16; o++) begin
        bf16_t md [4];
        for (int m = 0; m < 4; m++) begin
          int base;
          base = (m16 != 0) ? (m % 2) * 8 : m * 8;       // first input chunk of macro m
          for (int cc = 0; cc < 8; cc++) begin
            p = ref_op(2, W[m][o % 8][cc*16], ln(mem[800 + base + cc], 0));
            for (int k = 1; k < 16; k++) p = ref_op(0, p, ref_op(2, W[m][o % 8][cc*16 + k], ln(mem[800 + base + cc], k)));
            q = (cc == 0) ? p : ref_op(0, q, p);
          end
          md[m] = q;
        end
        if (m16 == 0) r = (o < 8) ? ref_op(0, ref_op(0, md[0], md[1]), ref_op(0, md[2], md[3])) : 16'h0;
        else      r = (o < 8) ? ref_op(0, md[0], md[1]) : ref_op(0, md[2], md[3]);
        e[o*16 +: 16] = r;
      end
      mem[1000 + m16] = e;
      rd(1000 + m16, d);
      chk((m16 != 0) ? "SRAM_Compute (256,16)" : "SRAM_Compute (512,8)", d == e);
    end

    // NOC_INJ from router 3: flit at (bx+1, by+1) with Data = lane 7 of DRAM[60]
    inj_log.delete(); inj_rtr.delete();
    c = '0; c.op = BC_NOC_INJ; c.src = 20'd60; c.lane = 4'd7; c.rtr = 2'd3;
    c.pkt = pkt(PT_SCALAR, 16'h0, 2, step(1, 0, OP_ADD), step(-1, 0, OP_MUL, 1));
    issue(c, n);
    chk("inject: one flit", inj_log.size() == 1 && inj_rtr[0] == 3);
    if (inj_log.size() == 1) begin
      packet_t pp;
      pp = c.pkt; pp.data = ln(mem[60], 7);
      chk("inject: flit", inj_log[0] == make_flit(pp, 4'd5, 4'd3));
    end
    // 5 packets injected back to back: credits run out at 4 and return
    for (int i = 0; i < 5; i++) begin
      c.lane = 4'(i);
      issue(c, n);
    end
    chk("inject: 6 flits total", inj_log.size() == 6);

    // NOC_SAVE: eject 3 packets at router 1 first, then save them
    for (int i = 0; i < 3; i++) begin
      ej[1] = make_flit(pkt(PT_SCALAR, from_int(10 + i), 0, step(0, 0, OP_ADD)), 4'd5, 4'd2);
      @(negedge clk);
      ej[1] = '0;
    end
    for (int i = 0; i < 3; i++) begin
      c = '0; c.op = BC_NOC_SAVE; c.rtr = 2'd1; c.dst = 20'd70; c.lane = 4'(i);
      issue(c, n);
      e = mem[70]; e[i*16 +: 16] = from_int(10 + i); mem[70] = e;
    end
    rd(70, d);
    chk("NOC_SAVE lanes", d == mem[70]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
