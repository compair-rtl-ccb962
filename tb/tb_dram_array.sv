// tb_dram_array - behavioural DRAM array with a 1 KB row buffer. The array
// uses a small ROWS here (the model has no size-dependent logic). It opens
// random rows, writes whole rows, re-opens them and compares with a model.
// Activation takes one cycle: the row is in rowbuf after the next edge.
module tb_dram_array;
  localparam int ROWS = 64;
  logic clk = 0, act = 0, wr = 0;
  logic [5:0] row = 0;
  logic [8191:0] wrow = 0, rowbuf;
  logic [8191:0] model [ROWS];
  logic          known [ROWS];
  int checks = 0, failures = 0;
  dram_array #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    for (int i = 0; i < ROWS; i++) known[i] = 0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      act = 1; row = 6'($urandom_range(ROWS - 1));
      @(negedge clk);
      act = 0;
      if (known[row]) chk("row read after 1 cycle", rowbuf == model[row]);
      if ($urandom_range(1) != 0) begin
        for (int k = 0; k < 256; k++) wrow[k*32 +: 32] = $urandom;
        wr = 1;
        @(negedge clk);
        wr = 0;
        model[row] = wrow; known[row] = 1;
        chk("row buffer follows write", rowbuf == wrow);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
