// tb_sram_pim_macro - one SRAM-PIM macro: 128 inputs x 8 outputs per weight
// tile, 4 tiles (8 KB). Loads random weights into all tiles. It then streams
// 128-input vectors as 8 chunks of 16 BF16 and checks the 8 dot products.
// The rate is one chunk per cycle, and y_valid comes one cycle after the
// last chunk. A 128-input GEMV thus takes 8 cycles + 1.
module tb_sram_pim_macro;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, w_we = 0, x_valid = 0, x_first = 0, x_last = 0;
  logic [1:0] w_set = 0, x_set = 0;
  logic [5:0] w_addr = 0;
  bf16_t [15:0] w_data = '0, x_data = '0;
  logic y_valid;
  bf16_t [7:0] y;
  bf16_t W [4][8][128];
  bf16_t X [128];
  int checks = 0, failures = 0, cyc = 0;
  sram_pim_macro dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    bf16_t e, p;
    int t0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 4; s++) for (int c = 0; c < 8; c++) for (int o = 0; o < 8; o++) begin
      for (int k = 0; k < 16; k++) begin W[s][o][c*16+k] = rnd_bf16(2); w_data[k] = W[s][o][c*16+k]; end
      w_we = 1; w_set = 2'(s); w_addr = {3'(c), 3'(o)};
      @(negedge clk);
    end
    w_we = 0;
    for (int it = 0; it < 40; it++) begin
      int s;
      s = $urandom_range(3);
      for (int i = 0; i < 128; i++) X[i] = rnd_bf16(2);
      t0 = cyc;
      for (int c = 0; c < 8; c++) begin
        x_valid = 1; x_first = (c == 0); x_last = (c == 7); x_set = 2'(s);
        for (int k = 0; k < 16; k++) x_data[k] = X[c*16+k];
        @(negedge clk);
      end
      x_valid = 0; x_first = 0; x_last = 0;
      chk("y_valid after 8+1 cycles", y_valid && cyc - t0 == 8);
      for (int o = 0; o < 8; o++) begin
        for (int c = 0; c < 8; c++) begin
          p = ref_op(2, W[s][o][c*16], X[c*16]);
          for (int k = 1; k < 16; k++) p = ref_op(0, p, ref_op(2, W[s][o][c*16+k], X[c*16+k]));
          e = (c == 0) ? p : ref_op(0, e, p);
        end
        chk("dot product", y[o] == e);
      end
      @(negedge clk);
      chk("y_valid one cycle", !y_valid);
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
