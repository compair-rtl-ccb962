// tb_dram_pim_mac - the 16-lane DRAM-PIM MAC unit. Random BF16 vectors check
// MAC over several 32-byte words (pairwise adder tree, accumulate, `first`
// restarts), element-wise multiply and element-wise add. Every operation
// produces its result one cycle after `valid`. A 4-word MAC thus takes 4
// cycles, one word per cycle, as the per-bank 16-MAC rate gives.
module tb_dram_pim_mac;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, first = 0;
  logic [1:0] op = 0;
  bf16_t [15:0] a = '0, b = '0, ew;
  bf16_t acc;
  int checks = 0, failures = 0;
  dram_pim_mac dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  function automatic bf16_t rdot(input bf16_t [15:0] x, input bf16_t [15:0] y);
    bf16_t t [16];
    for (int k = 0; k < 16; k++) t[k] = ref_op(2, x[k], y[k]);
    for (int w = 8; w >= 1; w /= 2) for (int k = 0; k < w; k++) t[k] = ref_op(0, t[2*k], t[2*k+1]);
    return t[0];
  endfunction

  initial begin
    bf16_t r;
    bf16_t [15:0] ea;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      // MAC over 4 words, one per cycle
      r = 0;
      for (int w = 0; w < 4; w++) begin
        for (int k = 0; k < 16; k++) begin a[k] = rnd_bf16(3); b[k] = rnd_bf16(3); end
        valid = 1; op = 0; first = (w == 0);
        r = (w == 0) ? rdot(a, b) : ref_op(0, r, rdot(a, b));
        @(negedge clk);
      end
      valid = 0;
      chk("mac 4 words in 4 cycles", acc == r);
      // element-wise ops
      for (int k = 0; k < 16; k++) begin a[k] = rnd_bf16(5); b[k] = rnd_bf16(5); end
      op = 1; valid = 1; @(negedge clk); valid = 0;
      for (int k = 0; k < 16; k++) ea[k] = ref_op(2, a[k], b[k]);
      chk("ewmul", ew == ea);
      op = 2; valid = 1; @(negedge clk); valid = 0;
      for (int k = 0; k < 16; k++) ea[k] = ref_op(0, a[k], b[k]);
      chk("ewadd", ew == ea);
      chk("acc held", acc == r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
