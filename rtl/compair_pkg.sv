// compair_pkg - types, constants and BF16 arithmetic shared by the CompAir
// channel RTL.
//
// Data format. Every datapath works on BF16 words (1 sign, 8 exponent,
// 7 fraction bits). The arithmetic here is the simplest exact scheme: the
// result is the exact value truncated toward zero, subnormal inputs and
// results flush to zero, overflow gives infinity and x/0 gives infinity.
// The ISA names the operations (+=, -=, *=, /=) but not their rounding, so
// the rounding mode is this design's choice.
//
// Packet format. A CompAir-NoC packet is one 72-bit flit (packet-level ISA):
//   Type(4) | Data(16) | IterNum(4) | Path[0..3] (4 x 12)
//   Path = X(4, signed) | Y(4, signed) | WrReg(1) | IterTag(1) | Opcode(2)
// The field widths follow the packet-level ISA table. The encodings of Type and
// Opcode, the all-ones "end of path" entry and the use of Type[3] as the
// Curry ALU select are this design's choices.
//
// Route sideband. Next to each flit travels a small lookahead bundle
// (absolute destination of the current path step and the step index). The
// router figure shows such lookahead wires beside flit_in; here they move in
// the same cycle as the flit.
package compair_pkg;

  typedef logic [15:0] bf16_t;

  // Curry ALU opcodes, in the order of the row-level ISA table.
  typedef enum logic [1:0] {
    OP_ADD = 2'd0,   // +=
    OP_SUB = 2'd1,   // -=
    OP_MUL = 2'd2,   // *=
    OP_DIV = 2'd3    // /=
  } alu_op_e;

  // Packet types (packet-level ISA lists seven).
  typedef enum logic [2:0] {
    PT_NONE      = 3'd0,
    PT_SCALAR    = 3'd1,
    PT_REDUCE    = 3'd2,
    PT_EXCHANGE  = 3'd3,
    PT_BROADCAST = 3'd4,
    PT_READ      = 3'd5,
    PT_WRITE     = 3'd6
  } pkt_type_e;

  typedef struct packed {
    logic signed [3:0] x;        // hop offset in X from the previous step's router
    logic signed [3:0] y;        // hop offset in Y
    logic              wr_reg;   // write the result into ArgReg
    logic              iter_tag; // after computing, ArgReg = ArgReg IterOp IterArg
    alu_op_e           op;
  } path_t;                      // 12 bits

  localparam path_t PATH_END = 12'hFFF;   // marks an unused Path slot

  typedef struct packed {
    logic              alu_sel;  // Type[3]: which of the two Curry ALUs
    pkt_type_e         ptype;    // Type[2:0]
    bf16_t             data;
    logic [3:0]        iter_num;
    path_t [0:3]       path;
  } packet_t;                    // 72 bits

  // Flit on a link: packet + lookahead sideband.
  typedef struct packed {
    logic       valid;
    logic [3:0] dst_x;           // router that executes the current step
    logic [3:0] dst_y;
    logic [1:0] step;            // index of the current Path entry
    packet_t    pkt;
  } flit_t;

  localparam int FLIT_W = $bits(flit_t);

  // Router port numbering.
  localparam int P_N = 0, P_S = 1, P_E = 2, P_W = 3, P_L = 4;
  localparam int N_PORTS = 5;

  // Number of valid path entries (entries before the first PATH_END).
  function automatic logic [2:0] path_len(input packet_t p);
    logic [2:0] n;
    logic       stop;
    n = 3'd0;
    stop = 1'b0;
    for (int i = 0; i < 4; i++) begin
      if (p.path[i] == PATH_END) stop = 1'b1;
      if (!stop) n = n + 3'd1;
    end
    return n;
  endfunction

  // Flit for a packet injected at router (x, y): the first step's router is
  // (x, y) + Path[0] offset.
  function automatic flit_t make_flit(input packet_t p, input logic [3:0] x, input logic [3:0] y);
    flit_t f;
    f.valid = 1'b1;
    f.pkt   = p;
    f.step  = 2'd0;
    if (p.path[0] == PATH_END) begin
      f.dst_x = x;
      f.dst_y = y;
    end else begin
      f.dst_x = x + 4'(p.path[0].x);
      f.dst_y = y + 4'(p.path[0].y);
    end
    return f;
  endfunction

  // ---------------------------------------------------------------- BF16
  localparam bf16_t BF16_ZERO = 16'h0000;
  localparam bf16_t BF16_ONE  = 16'h3F80;

  function automatic bf16_t bf16_pack(input logic s, input int e, input logic [6:0] m);
    if (e <= 0)   return {s, 15'd0};
    if (e >= 255) return {s, 8'hFF, 7'd0};
    return {s, e[7:0], m};
  endfunction

  function automatic bf16_t bf16_add(input bf16_t a, input bf16_t b);
    logic        sa, sb, sw;
    logic [7:0]  ea, eb, d;
    logic [7:0]  ma, mb;
    logic [31:0] fa, fb, mask;
    logic        sticky;
    logic [32:0] s;
    logic [32:0] sh;
    int          p, e;
    bf16_t       t;
    if (a[14:7] == 8'd0) return (b[14:7] == 8'd0) ? BF16_ZERO : b;
    if (b[14:7] == 8'd0) return a;
    if (a[14:7] == 8'hFF) return a;
    if (b[14:7] == 8'hFF) return b;
    // order so that |a| >= |b|
    sw = (b[14:0] > a[14:0]);
    if (sw) begin t = a; a = b; b = t; end
    sa = a[15]; sb = b[15];
    ea = a[14:7]; eb = b[14:7];
    ma = {1'b1, a[6:0]}; mb = {1'b1, b[6:0]};
    d  = ea - eb;
    fa = {ma, 24'd0};
    if (d >= 8'd32) begin
      fb = 32'd0;
      sticky = 1'b1;
    end else begin
      mask   = (32'd1 << d) - 32'd1;
      fb     = {mb, 24'd0} >> d;
      sticky = |({mb, 24'd0} & mask);
    end
    if (sa == sb) s = {1'b0, fa} + {1'b0, fb};
    else          s = {1'b0, fa} - {1'b0, fb} - {32'd0, sticky};
    if (s == 33'd0) return BF16_ZERO;
    p = 0;
    for (int i = 0; i < 33; i++) if (s[i]) p = i;
    sh = s << (32 - p);
    e  = int'(ea) + p - 31;
    return bf16_pack(sa, e, sh[31:25]);
  endfunction

  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] pr;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'hFF || b[14:7] == 8'hFF) return {s, 8'hFF, 7'd0};
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    pr = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    e  = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (pr[15]) return bf16_pack(s, e + 1, pr[14:8]);
    return bf16_pack(s, e, pr[13:7]);
  endfunction

  function automatic bf16_t bf16_div(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] q;
    int          e;
    s = a[15] ^ b[15];
    if (b[14:7] == 8'd0 || a[14:7] == 8'hFF) return {s, 8'hFF, 7'd0};
    if (a[14:7] == 8'd0 || b[14:7] == 8'hFF) return {s, 15'd0};
    q = {1'b1, a[6:0], 8'd0} / {8'd0, 1'b1, b[6:0]};
    e = int'(a[14:7]) - int'(b[14:7]);
    if (q[8]) return bf16_pack(s, e + 127, q[7:1]);
    return bf16_pack(s, e + 126, q[6:0]);
  endfunction

  function automatic bf16_t bf16_op(input alu_op_e op, input bf16_t a, input bf16_t b);
    // one adder serves += and -= (the sign of b is flipped for -=)
    case (op)
      OP_ADD, OP_SUB: return bf16_add(a, {b[15] ^ (op == OP_SUB), b[14:0]});
      OP_MUL:         return bf16_mul(a, b);
      default:        return bf16_div(a, b);
    endcase
  endfunction

  // ------------------------------------------------------- bank commands
  // SIMD command sent by the memory controller to every bank in a mask.
  // Word addresses select a 32-byte DRAM word: {row[14:0], col8[2:0], col4[1:0]}.
  typedef enum logic [3:0] {
    BC_NOP       = 4'd0,
    BC_WRITE     = 4'd1,   // DRAM[dst] <= wdata
    BC_READ      = 4'd2,   // rdata <= DRAM[src]
    BC_MAC       = 4'd3,   // DRAM[dst].lane <= sum_i dot(DRAM[src+i], GB[gb+i]), i < len
    BC_EWMUL     = 4'd4,   // DRAM[dst+i] <= DRAM[src+i] * DRAM[src2+i]
    BC_EWADD     = 4'd5,   // DRAM[dst+i] <= DRAM[src+i] + DRAM[src2+i]
    BC_SRAM_WR   = 4'd6,   // SRAM_Write: len words from DRAM[src] into the weight tiles
    BC_SRAM_COMP = 4'd7,   // SRAM_Compute: inputs DRAM[src..], outputs to DRAM[dst]
    BC_NOC_INJ   = 4'd8,   // packet (Data = DRAM[src].lane) into router rtr of the bank
    BC_NOC_SAVE  = 4'd9    // next ejected packet's Data -> DRAM[dst].lane
  } bank_op_e;

  typedef struct packed {
    bank_op_e    op;
    logic [19:0] src;
    logic [19:0] src2;
    logic [19:0] dst;
    logic [7:0]  len;
    logic [3:0]  lane;
    logic [5:0]  gb;       // global-buffer word index
    logic [1:0]  rtr;      // router of the bank (0..3)
    logic [1:0]  wset;     // SRAM-PIM weight tile
    logic        mode16;   // SRAM-PIM bank shape: 0 = (512,8), 1 = (256,16)
    packet_t     pkt;      // packet template for BC_NOC_INJ (Data is replaced)
  } bank_cmd_t;

endpackage
