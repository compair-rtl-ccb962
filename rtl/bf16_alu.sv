// bf16_alu - the arithmetic unit inside a Curry ALU: one BF16 adder,
// subtractor, multiplier and divider, selected by the 2-bit opcode.
//
// y = a op b with op = +=, -=, *=, /= (codes 0..3). a is the left value
// (the flit's InputVal or ArgReg), b the right value (ArgReg or IterArg).
// Purely combinational: the router evaluates it in the same cycle as switch
// traversal ("flit compute" runs in parallel with ST).
//
// The paper fixes one adder, multiplier and divider per ALU. The number
// handling is this design's own: exact result truncated toward zero, subnormals
// flushed to zero, overflow and x/0 give infinity (see compair_pkg).
module bf16_alu
  import compair_pkg::*;
(
  input  alu_op_e op,
  input  bf16_t   a,
  input  bf16_t   b,
  output bf16_t   y
);
  always_comb y = bf16_op(op, a, b);
endmodule
