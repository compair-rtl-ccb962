// tb_bf16_pkg - reference BF16 arithmetic for the testbenches, computed
// independently of the RTL through double-precision reals. A BF16 result is
// the exact (double) value truncated toward zero to 8 significant bits, with
// subnormals flushed to zero - the number handling the RTL documents.
package tb_bf16_pkg;
  function automatic real b2r(input logic [15:0] b);
    int e;
    real m;
    e = int'(b[14:7]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(b[6:0]) / 128.0;
    if (b[15]) m = -m;
    return m * (2.0 ** real'(e - 127));
  endfunction

  function automatic logic [15:0] r2b(input real r);
    logic [63:0] bits;
    int          e;
    if (r == 0.0) return 16'h0000;
    bits = $realtobits(r);
    e = int'(bits[62:52]) - 1023 + 127;
    if (e <= 0)   return {bits[63], 15'd0};
    if (e >= 255) return {bits[63], 8'hFF, 7'd0};
    return {bits[63], e[7:0], bits[51:45]};
  endfunction

  function automatic logic [15:0] ref_op(input int op, input logic [15:0] a, input logic [15:0] b);
    case (op)
      0: return r2b(b2r(a) + b2r(b));
      1: return r2b(b2r(a) - b2r(b));
      2: return r2b(b2r(a) * b2r(b));
      default: return r2b(b2r(a) / b2r(b));
    endcase
  endfunction

  // random normal BF16 with exponent in [127-span, 127+span]
  function automatic logic [15:0] rnd_bf16(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom_range(1, 0)), 8'(e), 7'($urandom_range(127, 0))};
  endfunction

  function automatic logic [15:0] from_int(input int v);
    return r2b(real'(v));
  endfunction
endpackage
