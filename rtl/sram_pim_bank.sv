// sram_pim_bank - the four SRAM-PIM macros stacked under one DRAM-PIM bank,
// used together as one (512,8) or (256,16) matrix unit.
//
// Mode (512,8) (mode16 = 0): the 512-input vector streams as 32 chunks of 16.
// Macro m takes chunks 8m..8m+7, and the four 8-wide results are added as
// ((y0 + y1) + (y2 + y3)). Mode (256,16) (mode16 = 1): 16 chunks. Chunks 0-7
// go to macros 0 and 2, chunks 8-15 to macros 1 and 3. Outputs 0-7 are y0 + y1
// and outputs 8-15 are y2 + y3. Either way macro 3 finishes last; its result
// is combined with the others' stored results and y (16 BF16, upper half
// zero in (512,8) mode) is valid two cycles after the last chunk.
//
// Weights load through w_macro/w_addr one 256-bit word per cycle into tile
// w_set of the selected macro.
//
// The two shapes come from the paper. The way chunks map to macros and the
// order of the additions are this design's choices.
module sram_pim_bank
  import compair_pkg::*;
#(
  parameter int N_MACRO = 4,
  parameter int N_IN    = 128,
  parameter int N_OUT   = 8,
  parameter int N_SETS  = 4,
  parameter int LANES   = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           mode16,
  input  logic                           w_we,
  input  logic [1:0]                     w_macro,
  input  logic [$clog2(N_SETS)-1:0]      w_set,
  input  logic [$clog2(N_IN/LANES*N_OUT)-1:0] w_addr,
  input  bf16_t [LANES-1:0]              w_data,
  input  logic                           x_valid,
  input  logic [4:0]                     x_chunk,   // chunk index 0..31 / 0..15
  input  logic [$clog2(N_SETS)-1:0]      x_set,
  input  bf16_t [LANES-1:0]              x_data,
  output logic                           y_valid,
  output bf16_t [2*N_OUT-1:0]            y
);
  localparam int NCH = N_IN / LANES;   // chunks per macro (8)

  logic  [N_MACRO-1:0]            mv, mf, ml, myv;
  bf16_t [N_MACRO-1:0][N_OUT-1:0] my, yreg;

  always_comb begin
    int c, grp;
    c   = int'(x_chunk);
    grp = c / NCH;
    for (int m = 0; m < N_MACRO; m++) begin
      if (!mode16) mv[m] = x_valid && (grp == m);
      else         mv[m] = x_valid && (grp == (m % 2));
      mf[m] = (c % NCH) == 0;
      ml[m] = (c % NCH) == NCH - 1;
    end
  end

  for (genvar m = 0; m < N_MACRO; m++) begin : g_m
    sram_pim_macro #(.N_IN(N_IN), .N_OUT(N_OUT), .N_SETS(N_SETS), .LANES(LANES)) u_macro (
      .clk, .rst_n,
      .w_we   (w_we && int'(w_macro) == m),
      .w_set, .w_addr, .w_data,
      .x_valid(mv[m]), .x_first(mf[m]), .x_last(ml[m]), .x_set, .x_data,
      .y_valid(myv[m]), .y(my[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      yreg    <= '0;
      y_valid <= 1'b0;
      y       <= '0;
    end else begin
      for (int m = 0; m < N_MACRO; m++) if (myv[m]) yreg[m] <= my[m];
      y_valid <= myv[N_MACRO-1];
      if (myv[N_MACRO-1]) begin
        for (int o = 0; o < N_OUT; o++) begin
          if (!mode16) begin
            y[o]         <= bf16_add(bf16_add(yreg[0][o], yreg[1][o]), bf16_add(yreg[2][o], my[3][o]));
            y[N_OUT + o] <= BF16_ZERO;
          end else begin
            y[o]         <= bf16_add(yreg[0][o], my[1][o]);
            y[N_OUT + o] <= bf16_add(yreg[2][o], my[3][o]);
          end
        end
      end
    end
  end
endmodule
