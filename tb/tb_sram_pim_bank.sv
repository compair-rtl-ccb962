// tb_sram_pim_bank - the SRAM-PIM bank of four macros in both shapes the
// reconfigurable adder tree supports: (512 inputs, 8 outputs) and (256
// inputs, 16 outputs). Inputs arrive as 16-BF16 chunks, one per cycle, with
// the chunk index. Results are compared with the same BF16 operation order
// (per-macro chunk accumulation, then the adder tree). y_valid comes 2
// cycles after the last chunk.
module tb_sram_pim_bank;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0, mode16 = 0, w_we = 0, x_valid = 0;
  logic [1:0] w_macro = 0, w_set = 0, x_set = 0;
  logic [5:0] w_addr = 0;
  logic [4:0] x_chunk = 0;
  bf16_t [15:0] w_data = '0, x_data = '0;
  logic y_valid;
  bf16_t [15:0] y;
  bf16_t W [4][8][128];     // one tile (set 1) of every macro
  bf16_t X [512];
  int checks = 0, failures = 0, cyc = 0;
  sram_pim_bank dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  function automatic bf16_t mdot(input int m, input int o, input int base);
    bf16_t e, p;
    for (int c = 0; c < 8; c++) begin
      p = ref_op(2, W[m][o][c*16], X[base + c*16]);
      for (int k = 1; k < 16; k++) p = ref_op(0, p, ref_op(2, W[m][o][c*16+k], X[base + c*16+k]));
      e = (c == 0) ? p : ref_op(0, e, p);
    end
    return e;
  endfunction
  initial begin
    int t0, n;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 4; m++) for (int c = 0; c < 8; c++) for (int o = 0; o < 8; o++) begin
      for (int k = 0; k < 16; k++) begin W[m][o][c*16+k] = rnd_bf16(2); w_data[k] = W[m][o][c*16+k]; end
      w_we = 1; w_macro = 2'(m); w_set = 2'd1; w_addr = {3'(c), 3'(o)};
      @(negedge clk);
    end
    w_we = 0;
    for (int it = 0; it < 20; it++) begin
      mode16 = it[0];
      n = mode16 ? 16 : 32;
      for (int i = 0; i < 512; i++) X[i] = rnd_bf16(2);
      t0 = cyc;
      for (int c = 0; c < n; c++) begin
        x_valid = 1; x_chunk = 5'(c); x_set = 2'd1;
        for (int k = 0; k < 16; k++) x_data[k] = X[c*16+k];
        @(negedge clk);
      end
      x_valid = 0;
      @(negedge clk);
      chk("y_valid 2 cycles after last chunk", y_valid && cyc - t0 == n + 1);
      for (int o = 0; o < 8; o++) begin
        if (!mode16) begin
          chk("(512,8) output", y[o] == ref_op(0, ref_op(0, mdot(0, o, 0), mdot(1, o, 128)),
                                              ref_op(0, mdot(2, o, 256), mdot(3, o, 384))));
          chk("(512,8) upper zero", y[8 + o] == 0);
        end else begin
          chk("(256,16) low", y[o] == ref_op(0, mdot(0, o, 0), mdot(1, o, 128)));
          chk("(256,16) high", y[8 + o] == ref_op(0, mdot(2, o, 0), mdot(3, o, 128)));
        end
      end
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
