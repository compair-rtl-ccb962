// tb_curry_alu - drives the Curry ALU through its modes: register writes,
// InputVal op ArgReg for all four operators, WrReg accumulation, the
// two-cycle IterTag update (ArgReg = ArgReg IterOp IterArg) with its busy
// cycle, and Read. Expected values come from the real-number reference.
module tb_curry_alu;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fire = 0, wr_reg = 0, iter_tag = 0;
  logic [1:0] mode = 0;
  bf16_t in_val = 0, result, arg_reg, iter_arg;
  alu_op_e in_op = OP_ADD;
  logic busy;
  int checks = 0, failures = 0;

  curry_alu dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input string what, input bf16_t got, input bf16_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  // apply one flit for one clock; result sampled before the edge
  task automatic flit(input logic [1:0] m, input bf16_t v, input alu_op_e o, input logic w, input logic it, output bf16_t r);
    @(negedge clk);
    mode = m; in_val = v; in_op = o; wr_reg = w; iter_tag = it; fire = 1;
    #1 r = result;
    @(negedge clk);
    fire = 0; wr_reg = 0; iter_tag = 0;
  endtask

  initial begin
    bf16_t r, two, one, three, x;
    two = from_int(2); one = from_int(1); three = from_int(3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Write ArgReg = 2, then InputVal 1 += ArgReg -> 3 (InputOp mode)
    flit(2, two, OP_ADD, 0, 0, r);
    chk("load", arg_reg, two);
    flit(0, one, OP_ADD, 0, 0, r);
    chk("1 += 2", r, three);
    chk("argreg kept", arg_reg, two);
    // all operators against ArgReg, random values
    for (int n = 0; n < 200; n++) begin
      bf16_t v, ar;
      int o;
      v = rnd_bf16(10); ar = rnd_bf16(10); o = n % 4;
      flit(2, ar, OP_ADD, 0, 0, r);
      flit(0, v, alu_op_e'(o), 0, 0, r);
      chk("op", r, ref_op(o, v, ar));
    end
    // WrReg: running sum of 1..8 in ArgReg
    flit(2, BF16_ZERO, OP_ADD, 0, 0, r);
    for (int k = 1; k <= 8; k++) flit(0, from_int(k), OP_ADD, 1, 0, r);
    chk("wrreg sum", arg_reg, from_int(36));
    // IterOp mode: IterArg = 1, IterOp = +=, ArgReg = 2 -> after a tagged flit ArgReg = 3
    flit(3, one, OP_ADD, 0, 0, r);
    chk("iterarg", iter_arg, one);
    flit(2, two, OP_ADD, 0, 0, r);
    @(negedge clk);
    mode = 0; in_val = from_int(5); in_op = OP_MUL; iter_tag = 1; fire = 1;
    #1 chk("tagged result 5*2", result, from_int(10));
    @(negedge clk);
    fire = 0; iter_tag = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set in update cycle"); end
    chk("argreg before update", arg_reg, two);
    @(negedge clk);
    chk("argreg after IterOp", arg_reg, three);
    checks++;
    if (busy) begin failures++; $display("FAIL busy stuck"); end
    // exponent counter of the series: IterArg=1, IterOp=-=, ArgReg=6 -> 5
    flit(3, one, OP_SUB, 0, 0, r);
    flit(2, from_int(6), OP_ADD, 0, 0, r);
    flit(0, from_int(12), OP_DIV, 0, 1, r);
    chk("12 /= 6", r, from_int(2));
    @(negedge clk);
    chk("6 -= 1", arg_reg, from_int(5));
    // Read
    flit(1, BF16_ZERO, OP_ADD, 0, 0, r);
    chk("read", r, from_int(5));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
