// tb_pkt_pkg - helpers shared by the NoC testbenches to build packets of the
// packet-level ISA.
package tb_pkt_pkg;
  import compair_pkg::*;

  function automatic path_t step(input int dx, input int dy, input alu_op_e op,
                                 input logic wr = 1'b0, input logic it = 1'b0);
    path_t p;
    p.x = 4'(dx); p.y = 4'(dy); p.wr_reg = wr; p.iter_tag = it; p.op = op;
    return p;
  endfunction

  function automatic packet_t pkt(input pkt_type_e t, input bf16_t d, input int iters,
                                  input path_t p0, input path_t p1 = PATH_END,
                                  input path_t p2 = PATH_END, input path_t p3 = PATH_END,
                                  input logic alu = 1'b0);
    packet_t p;
    p.alu_sel = alu; p.ptype = t; p.data = d; p.iter_num = 4'(iters);
    p.path[0] = p0; p.path[1] = p1; p.path[2] = p2; p.path[3] = p3;
    return p;
  endfunction
endpackage
