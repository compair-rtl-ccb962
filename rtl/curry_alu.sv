// curry_alu - single-operand ("curried") ALU of a CompAir-NoC router.
//
// A flit does not wait for a second flit. It brings a unary function, an
// operator (InputOp) and its left value (InputVal). The right value lives in
// the ALU as ArgReg. One flit thus triggers result = InputVal op ArgReg, and
// the result replaces the flit's data in place. Two control bits
// from the packet path entry act after the operation:
//   WrReg   - ArgReg <= result (the ALU keeps a running value, e.g. a partial sum)
//   IterTag - ArgReg <= ArgReg IterOp IterArg (an iteration counter such as the
//             "6 -= 1" of the exponential series)
// There is one bf16_alu. The operand muxes MUX(L), MUX(R) and MUX(Op) let the same ALU
// do the IterTag update. That update takes the cycle after the flit's
// operation, and `busy` is high during it so the router holds off new flits.
//
// Modes (mode input), chosen by the router from the packet type:
//   CA_COMPUTE  result = in_val op ArgReg (Scalar, Reduce, Exchange)
//   CA_READ     result = ArgReg           (Read)
//   CA_LOAD     ArgReg <= in_val          (Write, Broadcast); result = in_val
//   CA_LOAD_IT  IterArg <= in_val, IterOp <= in_op (Write with IterTag set)
// Timing: result is combinational from the inputs and ArgReg; register
// updates land on the clock edge where fire is high (or the following
// edge for the IterTag update). Reset clears ArgReg and IterArg, IterOp = -=.
// ArgReg, IterArg, IterOp and the three muxes come from the paper's Curry
// ALU diagram. The mode encoding and the write path of IterArg/IterOp are this
// design's.
module curry_alu
  import compair_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       fire,
  input  logic [1:0] mode,
  input  bf16_t      in_val,
  input  alu_op_e    in_op,
  input  logic       wr_reg,
  input  logic       iter_tag,
  output bf16_t      result,
  output logic       busy,
  output bf16_t      arg_reg,
  output bf16_t      iter_arg
);
  localparam logic [1:0] CA_COMPUTE = 2'd0, CA_READ = 2'd1, CA_LOAD = 2'd2, CA_LOAD_IT = 2'd3;

  bf16_t   arg_q, iter_arg_q;
  alu_op_e iter_op_q;
  logic    pend_q;          // IterTag update scheduled for this cycle

  // operand muxes
  bf16_t   mux_l, mux_r, alu_y;
  alu_op_e mux_op;
  always_comb begin
    if (pend_q) begin
      mux_l  = arg_q;
      mux_r  = iter_arg_q;
      mux_op = iter_op_q;
    end else begin
      mux_l  = in_val;
      mux_r  = arg_q;
      mux_op = in_op;
    end
  end

  bf16_alu u_alu (.op(mux_op), .a(mux_l), .b(mux_r), .y(alu_y));

  always_comb begin
    case (mode)
      CA_COMPUTE: result = alu_y;
      CA_READ:    result = arg_q;
      default:    result = in_val;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arg_q      <= BF16_ZERO;
      iter_arg_q <= BF16_ZERO;
      iter_op_q  <= OP_SUB;
      pend_q     <= 1'b0;
    end else if (pend_q) begin
      arg_q  <= alu_y;
      pend_q <= 1'b0;
    end else if (fire) begin
      case (mode)
        CA_COMPUTE: begin
          if (iter_tag)    pend_q <= 1'b1;
          else if (wr_reg) arg_q  <= alu_y;
        end
        CA_LOAD:    arg_q <= in_val;
        CA_LOAD_IT: begin
          iter_arg_q <= in_val;
          iter_op_q  <= in_op;
        end
        default: ;
      endcase
    end
  end

  assign busy     = pend_q;
  assign arg_reg  = arg_q;
  assign iter_arg = iter_arg_q;

  // the router must not fire the ALU while its IterTag update is pending
  a_no_fire_busy: assert property (@(posedge clk) disable iff (!rst_n) !(fire && pend_q));
endmodule
