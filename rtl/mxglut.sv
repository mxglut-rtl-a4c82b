// mxglut: accelerator core - matrix unit, RLB sequencer and SRAM subsystem.
//
// MxGLUT runs FP8-INT4 (weight-only quantised linear layers) and FP8-FP8
// (attention) GEMMs on one LUT-based array with no FP multipliers, and
// switches per kernel between output-stationary and weight-stationary
// dataflows. This module holds:
//   * mxmpu     ROWS x COLS array (64 x 64 by default),
//   * rlb_ctrl  kernel sequencer,
//   * 16 activation, 16 weight and 16 output sram_pp macros (8 KB each,
//     128/32/128-bit, two banks each, 384 KB in total at the defaults).
// The DMA engine, AXI interconnect, instruction controller and SoC FSM are
// outside; their connections are ports: kernel start/config, the ping-pong
// bank selects, and the DMA side of each SRAM group. The input banks
// (activation, weight) and the output bank switch separately, so a WS
// kernel with cfg_acc can add to results an earlier kernel left in the
// output SRAM while new inputs were loaded.
//
// Word layouts (this design's choice):
//   activation word (ROWS x 32 bit, lane i -> array row i):
//     OS: word g, lane i = A[i][4g..4g+3] (INT4, a1 in bits 7:0) or A[i][g]
//     WS: word m, lane j = A[m][4j..4j+3] (INT4) or A[m][j]
//   weight word (COLS x 8 bit, lane k -> column k):
//     OS: word g*B+b, lane k = BCQ code of plane b, group g, column k
//         (INT4, in bits 3:0) or the FP8 weight W[g][k]
//     WS: word b*ROWS+t, lane k = code/weight of row ROWS-1-t
//   output word (COLS x FP32): OS word i = output row i; WS word m = O[m].
// Timing: start -> done; see rlb_ctrl for the cycle schedule.
module mxglut
  import mx_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  parameter int WBITS = INT_BITS,
  localparam int NA   = ROWS * 32 / 128,   // activation macros
  localparam int NW   = COLS * 8 / 32,     // weight macros
  localparam int NO   = COLS * 32 / 128,   // output macros
  localparam int AW_A = 8,                 // 8 KB / 128 bit / 2 banks
  localparam int AW_W = 10,                // 8 KB / 32 bit / 2 banks
  localparam int AW_O = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // kernel interface (from the instruction controller)
  input  logic                 start,
  input  prec_e                cfg_prec,
  input  df_e                  cfg_df,
  input  logic [AW_A:0]        cfg_len,
  input  logic                 cfg_acc,     // continue an earlier kernel's sums
  input  logic                 cfg_drain,   // OS: write the tile out at the end
  output logic                 busy,
  output logic                 done,
  // ping-pong banks used by compute (activation+weight, output); the DMA
  // side uses the other bank of each
  input  logic                 in_bank_sel,
  input  logic                 out_bank_sel,
  // DMA side of the SRAMs
  input  logic                 act_dma_we,
  input  logic [AW_A-1:0]      act_dma_addr,
  input  logic [ROWS*32-1:0]   act_dma_wdata,
  input  logic                 wgt_dma_we,
  input  logic [AW_W-1:0]      wgt_dma_addr,
  input  logic [COLS*8-1:0]    wgt_dma_wdata,
  input  logic                 out_dma_re,
  input  logic [AW_O-1:0]      out_dma_addr,
  output logic [COLS*32-1:0]   out_dma_rdata
);

  localparam int PW = (WBITS > 1) ? $clog2(WBITS) : 1;

  prec_e           prec;
  df_e             df;
  logic            act_re, wgt_re, out_re, out_we;
  logic [AW_A-1:0] act_raddr;
  logic [AW_W-1:0] wgt_raddr;
  logic [AW_O-1:0] out_raddr, out_waddr;
  logic            act_valid, w_shift, out_shift, out_clr, ps_from_sram, bot_valid;
  logic [PW-1:0]   ws_plane;

  logic [ROWS*32-1:0] act_word;
  logic [COLS*8-1:0]  wgt_word;
  logic [COLS*32-1:0] out_rword, out_wword;

  logic [31:0] act_top [ROWS];
  logic [7:0]  w_top   [COLS];
  logic [31:0] ps_top  [COLS];
  logic [31:0] ps_bot  [COLS];

  rlb_ctrl #(.ROWS(ROWS), .WBITS(WBITS), .AW_A(AW_A), .AW_W(AW_W), .AW_O(AW_O)) u_ctrl (
    .clk, .rst_n, .start, .cfg_prec, .cfg_df, .cfg_len, .cfg_acc, .cfg_drain, .busy, .done, .prec, .df,
    .act_re, .act_raddr, .wgt_re, .wgt_raddr, .out_re, .out_raddr, .out_we, .out_waddr,
    .act_valid, .w_shift, .out_shift, .out_clr, .ps_from_sram, .ws_plane, .bot_valid
  );

  // ---------------- SRAM subsystem ----------------
  for (genvar m = 0; m < NA; m++) begin : g_act
    logic [127:0] unused_rd;
    sram_pp #(.WIDTH(128)) u_mem (
      .clk, .bank_sel(in_bank_sel),
      .c_re(act_re), .c_raddr(act_raddr), .c_rdata(act_word[128*m +: 128]),
      .c_we(1'b0), .c_waddr('0), .c_wdata('0),
      .d_re(1'b0), .d_we(act_dma_we), .d_addr(act_dma_addr),
      .d_wdata(act_dma_wdata[128*m +: 128]), .d_rdata(unused_rd)
    );
  end
  for (genvar m = 0; m < NW; m++) begin : g_wgt
    logic [31:0] unused_rd;
    sram_pp #(.WIDTH(32)) u_mem (
      .clk, .bank_sel(in_bank_sel),
      .c_re(wgt_re), .c_raddr(wgt_raddr), .c_rdata(wgt_word[32*m +: 32]),
      .c_we(1'b0), .c_waddr('0), .c_wdata('0),
      .d_re(1'b0), .d_we(wgt_dma_we), .d_addr(wgt_dma_addr),
      .d_wdata(wgt_dma_wdata[32*m +: 32]), .d_rdata(unused_rd)
    );
  end
  for (genvar m = 0; m < NO; m++) begin : g_out
    sram_pp #(.WIDTH(128)) u_mem (
      .clk, .bank_sel(out_bank_sel),
      .c_re(out_re), .c_raddr(out_raddr), .c_rdata(out_rword[128*m +: 128]),
      .c_we(out_we), .c_waddr(out_waddr), .c_wdata(out_wword[128*m +: 128]),
      .d_re(out_dma_re), .d_we(1'b0), .d_addr(out_dma_addr),
      .d_wdata('0), .d_rdata(out_dma_rdata[128*m +: 128])
    );
  end

  // ---------------- array ----------------
  always_comb begin
    for (int i = 0; i < ROWS; i++) act_top[i] = act_word[32*i +: 32];
    for (int k = 0; k < COLS; k++) begin
      w_top[k]  = wgt_word[8*k +: 8];
      ps_top[k] = ps_from_sram ? out_rword[32*k +: 32] : 32'd0;
      out_wword[32*k +: 32] = ps_bot[k];
    end
  end

  mxmpu #(.ROWS(ROWS), .COLS(COLS), .WBITS(WBITS)) u_mpu (
    .clk, .rst_n, .prec, .df, .ws_plane,
    .act_top, .act_valid, .w_top, .w_shift, .ps_top, .out_shift, .out_clr,
    .ps_bot, .bot_valid
  );

endmodule
