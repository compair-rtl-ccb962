// tb_bf16_alu - checks the BF16 add/sub/mul/div unit against real-number
// reference arithmetic on directed corner cases and 4000 random operands.
module tb_bf16_alu;
  import compair_pkg::*;
  import tb_bf16_pkg::*;
  alu_op_e op;
  bf16_t   a, b, y;
  int checks = 0, failures = 0;

  bf16_alu dut (.op(op), .a(a), .b(b), .y(y));

  task automatic check(input int o, input bf16_t x1, input bf16_t x2, input bf16_t exp);
    op = alu_op_e'(o); a = x1; b = x2;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, x1, x2, y, exp);
    end
  endtask

  initial begin
    // directed: 1+1=2, 3-1=2, 2*3=6, 6/4=1.5, x-x=0, x/0=inf, 0*x=0
    check(0, 16'h3F80, 16'h3F80, 16'h4000);
    check(1, 16'h4040, 16'h3F80, 16'h4000);
    check(2, 16'h4000, 16'h4040, 16'h40C0);
    check(3, 16'h40C0, 16'h4080, 16'h3FC0);
    check(1, 16'h4123, 16'h4123, 16'h0000);
    check(3, 16'h3F80, 16'h0000, 16'h7F80);
    check(2, 16'h0000, 16'h4123, 16'h0000);
    // 1 - tiny truncates toward zero to the value just below 1
    check(1, 16'h3F80, 16'h2000, 16'h3F7F);
    for (int n = 0; n < 4000; n++) begin
      int o;
      bf16_t x1, x2;
      o  = n % 4;
      x1 = rnd_bf16(20);
      x2 = rnd_bf16(20);
      check(o, x1, x2, ref_op(o, x1, x2));
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
