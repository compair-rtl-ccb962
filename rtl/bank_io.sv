// bank_io - per-bank controller and hybrid-bonding IO on the logic die.
//
// Every bank in the command's mask receives the same command (SIMD) and
// executes it on its own data. The controller sequences the bank's DRAM
// array and moves data between the array, the bank's 16-lane MAC unit, the
// four SRAM-PIM macros and the bank's four NoC routers. Commands (bank_op_e,
// word address = {row, col8, col4}):
//   WRITE / READ  one 32-byte word from / to the host port
//   MAC           dot product of len DRAM words with global-buffer words;
//                 the BF16 result goes to one lane of DRAM[dst]
//   EWMUL / EWADD len element-wise operations DRAM[dst+i] = DRAM[src+i] op DRAM[src2+i]
//   SRAM_WR       SRAM_Write: len weight words from DRAM into SRAM-PIM tile wset;
//                 the word at DRAM address a goes to tile word w = a % 256,
//                 i.e. macro w/64, address w%64 = {chunk, output}, so a tile
//                 can be written by several commands
//   SRAM_COMP     SRAM_Compute: len input chunks (32 for (512,8), 16 for (256,16))
//                 from DRAM, the 16 outputs written as one word to DRAM[dst]
//   NOC_INJ       one packet into router rtr of the bank; its Data is lane
//                 `lane` of DRAM[src] (the "(*Addr)" of the packet-level ISA)
//   NOC_SAVE      waits for the next packet ejected by router rtr and writes
//                 its Data into lane `lane` of DRAM[dst]
// Timing: each DRAM word access costs an activate cycle and a column cycle.
// The SRAM-PIM commands use the wide 8:1 output of the decoupled column
// decoder: one access fetches 128 B, which then crosses the 256 hybrid bonds
// as four 256-bit beats on consecutive cycles (SRAM src and len must be
// multiples of 4 words). busy is high from the accepted start until the cycle
// after done.
// From the paper: the SRAM_Write/SRAM_Compute/NoC command roles, 256 bonds
// per bank, DRAM feeding SRAM-PIM inputs and taking results back, and the
// 8:1 + 4:1 decoder. This design's own choices: the command encoding, the
// state machine, the ejection FIFOs and the timing.
module bank_io
  import compair_pkg::*;
#(
  parameter int FIFO_DEPTH = 4,
  parameter int ROW_AW     = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [3:0]            bx,      // router 0 of this bank sits at (bx, by)
  input  logic [3:0]            by,
  input  logic                  start,
  input  bank_cmd_t             cmd,
  input  logic [255:0]          wdata,
  output logic                  busy,
  output logic                  done,
  output logic                  rvalid,
  output logic [255:0]          rdata,
  // DRAM array + column decoder
  output logic                  d_act,
  output logic [ROW_AW-1:0]     d_row,
  output logic                  d_wr,
  output logic [2:0]            d_sel8,
  output logic [1:0]            d_sel4,
  output logic                  d_we32,
  output logic [255:0]          d_wdata,
  input  logic [255:0]          d_col32,
  input  logic [1023:0]         d_col128,
  // MAC unit and global buffer
  output logic                  m_valid,
  output logic [1:0]            m_op,
  output logic                  m_first,
  output logic [255:0]          m_a,
  output logic [255:0]          m_b,
  input  bf16_t                 m_acc,
  input  logic [255:0]          m_ew,
  output logic [5:0]            gb_raddr,
  input  logic [255:0]          gb_rdata,
  // SRAM-PIM bank (over the hybrid bonds)
  output logic                  s_mode16,
  output logic                  s_we,
  output logic [1:0]            s_macro,
  output logic [1:0]            s_set,
  output logic [5:0]            s_waddr,
  output logic [255:0]          s_data,
  output logic                  s_xvalid,
  output logic [4:0]            s_chunk,
  input  logic                  s_yvalid,
  input  logic [255:0]          s_y,
  // the bank's four routers
  output flit_t [3:0]           inj,
  input  logic  [3:0]           inj_credit,
  input  flit_t [3:0]           ej,
  output logic  [3:0]           ej_credit
);
  typedef enum logic [3:0] {
    S_IDLE, S_RA, S_RA2, S_RB, S_RB2, S_OP, S_MACW, S_WAITS, S_WAITE, S_WA, S_WB, S_DONE
  } state_e;

  localparam int CW = $clog2(FIFO_DEPTH + 1);
  localparam int AW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  state_e         st_q;
  bank_cmd_t      c_q;
  logic [7:0]     i_q;
  logic [1:0]     beat_q;
  logic [255:0]   wa_q, wb_q, res_q;
  logic [1023:0]  buf_q;
  logic           lane_mode_q;
  logic [3:0][CW-1:0] icred_q;

  // ejection FIFOs, one per router
  bf16_t [3:0][FIFO_DEPTH-1:0] ef_q;
  logic  [3:0][AW-1:0]         ef_rd_q, ef_wr_q;
  logic  [3:0][CW-1:0]         ef_cnt_q;

  function automatic logic [19:0] addr_of(input state_e s, input bank_cmd_t c, input logic [7:0] i);
    case (s)
      S_RB, S_RB2: return c.src2 + 20'(i);
      S_WA, S_WB:  return (c.op == BC_EWMUL || c.op == BC_EWADD) ? c.dst + 20'(i) : c.dst;
      default:     return (c.op == BC_MAC || c.op == BC_EWMUL || c.op == BC_EWADD ||
                           c.op == BC_SRAM_WR || c.op == BC_SRAM_COMP) ? c.src + 20'(i) : c.src;
    endcase
  endfunction

  logic [19:0] addr;
  assign addr   = addr_of(st_q, c_q, i_q);
  assign d_row  = addr[5 +: ROW_AW];
  assign d_sel8 = addr[4:2];
  assign d_sel4 = addr[1:0];
  assign d_act  = (st_q == S_RA) || (st_q == S_RB) || (st_q == S_WA);
  assign d_wr   = (st_q == S_WB);
  assign d_we32 = (st_q == S_WB);

  // word written back: whole word, or one lane replaced
  always_comb begin
    d_wdata = res_q;
    if (lane_mode_q) begin
      d_wdata = d_col32;
      d_wdata[int'(c_q.lane) * 16 +: 16] = res_q[15:0];
    end
  end

  logic sram_op, last_beat, all_beats_done;
  assign sram_op        = (c_q.op == BC_SRAM_WR) || (c_q.op == BC_SRAM_COMP);
  assign last_beat      = (beat_q == 2'd3);
  assign all_beats_done = (i_q + 8'd4 >= c_q.len);

  // datapath strobes
  assign gb_raddr = c_q.gb + 6'(i_q);
  assign m_valid  = (st_q == S_OP) && (c_q.op == BC_MAC || c_q.op == BC_EWMUL || c_q.op == BC_EWADD);
  assign m_op     = (c_q.op == BC_EWMUL) ? 2'd1 : (c_q.op == BC_EWADD) ? 2'd2 : 2'd0;
  assign m_first  = (i_q == 8'd0);
  assign m_a      = wa_q;
  assign m_b      = (c_q.op == BC_MAC) ? gb_rdata : wb_q;

  logic [7:0] widx, tidx;
  assign widx     = i_q + 8'(beat_q);             // word index within the command
  assign tidx     = c_q.src[7:0] + widx;          // tile word index = low address bits
  assign s_mode16 = c_q.mode16;
  assign s_set    = c_q.wset;
  assign s_data   = buf_q[int'(beat_q) * 256 +: 256];
  assign s_we     = (st_q == S_OP) && (c_q.op == BC_SRAM_WR);
  assign s_macro  = tidx[7:6];
  assign s_waddr  = tidx[5:0];
  assign s_xvalid = (st_q == S_OP) && (c_q.op == BC_SRAM_COMP);
  assign s_chunk  = widx[4:0];

  // packet injection
  logic inj_fire;
  assign inj_fire = (st_q == S_OP) && (c_q.op == BC_NOC_INJ) && (icred_q[c_q.rtr] != '0);
  always_comb begin
    packet_t p;
    p      = c_q.pkt;
    p.data = wa_q[int'(c_q.lane) * 16 +: 16];
    inj    = '0;
    for (int r = 0; r < 4; r++)
      if (inj_fire && int'(c_q.rtr) == r) inj[r] = make_flit(p, bx + 4'(r % 2), by + 4'(r / 2));
  end

  logic ej_pop;
  assign ej_pop = (st_q == S_WAITE) && (ef_cnt_q[c_q.rtr] != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      c_q         <= '0;
      i_q         <= '0;
      beat_q      <= '0;
      wa_q        <= '0;
      wb_q        <= '0;
      res_q       <= '0;
      buf_q       <= '0;
      lane_mode_q <= 1'b0;
      rvalid      <= 1'b0;
      rdata       <= '0;
      done        <= 1'b0;
      for (int r = 0; r < 4; r++) icred_q[r] <= CW'(FIFO_DEPTH);
      ef_rd_q     <= '0;
      ef_wr_q     <= '0;
      ef_cnt_q    <= '0;
      ej_credit   <= '0;
    end else begin
      rvalid <= 1'b0;
      done   <= 1'b0;
      // ejection FIFOs
      for (int r = 0; r < 4; r++) begin
        logic push, pop;
        push = ej[r].valid;
        pop  = ej_pop && int'(c_q.rtr) == r;
        if (push) begin
          ef_q[r][ef_wr_q[r]] <= ej[r].pkt.data;
          ef_wr_q[r] <= (int'(ef_wr_q[r]) == FIFO_DEPTH - 1) ? '0 : ef_wr_q[r] + AW'(1);
        end
        if (pop) ef_rd_q[r] <= (int'(ef_rd_q[r]) == FIFO_DEPTH - 1) ? '0 : ef_rd_q[r] + AW'(1);
        ef_cnt_q[r]  <= ef_cnt_q[r] + CW'(push) - CW'(pop);
        ej_credit[r] <= pop;
        icred_q[r]   <= icred_q[r] + CW'(inj_credit[r]) - CW'(inj_fire && int'(c_q.rtr) == r);
      end

      case (st_q)
        S_IDLE: if (start) begin
          c_q         <= cmd;
          i_q         <= '0;
          beat_q      <= '0;
          lane_mode_q <= 1'b0;
          res_q       <= wdata;
          case (cmd.op)
            BC_WRITE:    st_q <= S_WA;
            BC_NOC_SAVE: st_q <= S_WAITE;
            BC_NOP:      st_q <= S_DONE;
            default:     st_q <= S_RA;
          endcase
        end
        S_RA:  st_q <= S_RA2;
        S_RA2: begin
          wa_q  <= d_col32;
          buf_q <= d_col128;
          case (c_q.op)
            BC_READ: begin
              rdata  <= d_col32;
              rvalid <= 1'b1;
              st_q   <= S_DONE;
            end
            BC_EWMUL, BC_EWADD: st_q <= S_RB;
            default:            st_q <= S_OP;
          endcase
        end
        S_RB:  st_q <= S_RB2;
        S_RB2: begin
          wb_q <= d_col32;
          st_q <= S_OP;
        end
        S_OP: begin
          case (c_q.op)
            BC_MAC: begin
              if (i_q + 8'd1 >= c_q.len) st_q <= S_MACW;
              else begin
                i_q  <= i_q + 8'd1;
                st_q <= S_RA;
              end
            end
            BC_EWMUL, BC_EWADD: st_q <= S_MACW;
            BC_NOC_INJ: if (inj_fire) st_q <= S_DONE;
            default: begin        // SRAM_WR / SRAM_COMP: four beats per access
              beat_q <= beat_q + 2'd1;
              if (last_beat) begin
                i_q <= i_q + 8'd4;
                if (all_beats_done) st_q <= (c_q.op == BC_SRAM_COMP) ? S_WAITS : S_DONE;
                else                st_q <= S_RA;
              end
            end
          endcase
        end
        S_MACW: begin
          if (c_q.op == BC_MAC) begin
            res_q       <= {240'd0, m_acc};
            lane_mode_q <= 1'b1;
          end else begin
            res_q <= m_ew;
          end
          st_q <= S_WA;
        end
        S_WAITS: if (s_yvalid) begin
          res_q <= s_y;
          st_q  <= S_WA;
        end
        S_WAITE: if (ej_pop) begin
          res_q       <= {240'd0, ef_q[c_q.rtr][ef_rd_q[c_q.rtr]]};
          lane_mode_q <= 1'b1;
          st_q        <= S_WA;
        end
        S_WA: st_q <= S_WB;
        S_WB: begin
          if ((c_q.op == BC_EWMUL || c_q.op == BC_EWADD) && i_q + 8'd1 < c_q.len) begin
            i_q  <= i_q + 8'd1;
            st_q <= S_RA;
          end else begin
            st_q <= S_DONE;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (st_q != S_IDLE);

  a_sram_align: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_OP && sram_op) |-> (c_q.src[1:0] == 2'd0 && c_q.len[1:0] == 2'd0));
  a_ej_room: assert property (@(posedge clk) disable iff (!rst_n)
    !(ej[0].valid && int'(ef_cnt_q[0]) == FIFO_DEPTH));
endmodule
