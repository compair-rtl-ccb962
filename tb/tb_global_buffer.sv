// tb_global_buffer - the 2 KB channel global buffer (64 x 32 bytes). Writes
// random words, then reads them through all 16 read ports at random
// addresses. A word written on a clock edge is readable right after it
// (combinational read).
module tb_global_buffer;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0;
  logic [255:0] wdata = 0;
  logic [15:0][5:0] raddr = '0;
  logic [15:0][255:0] rdata;
  logic [255:0] model [64];
  int checks = 0, failures = 0;
  global_buffer dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i);
      for (int k = 0; k < 8; k++) wdata[k*32 +: 32] = $urandom;
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 200; it++) begin
      if (it % 4 == 0) begin
        we = 1; waddr = 6'($urandom_range(63));
        for (int k = 0; k < 8; k++) wdata[k*32 +: 32] = $urandom;
        model[waddr] = wdata;
        @(negedge clk); we = 0;
      end
      for (int p = 0; p < 16; p++) raddr[p] = 6'($urandom_range(63));
      #1;
      for (int p = 0; p < 16; p++) chk("read port", rdata[p] == model[raddr[p]]);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
