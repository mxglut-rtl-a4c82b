// tb_mxglut_full: end-to-end test of the accelerator core at its default
// size (64 x 64 RACs, 48 SRAM macros). Runs the same sequence as
// tb_mxglut: OS FP8-INT4 (64 activation groups = reduction depth 256,
// 4 bit planes), WS FP8-FP8 (16 vectors), OS FP8-FP8 (depth 64) and
// WS FP8-INT4 back to back with ping-pong SRAM banks, then an OS tile
// continued over two kernels and a WS kernel accumulating onto an earlier
// one. Checks every output, every cycle count and every mechanism.
module tb_mxglut_full;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 64, C = 64, G_OS = 64, M_WS = 16, NKERN = 4;

  `include "mxglut_test.svh"

  mxglut dut (
    .clk, .rst_n, .start, .cfg_prec, .cfg_df, .cfg_len, .cfg_acc, .cfg_drain, .busy, .done,
    .in_bank_sel(bank_sel), .out_bank_sel(out_bank),
    .act_dma_we, .act_dma_addr, .act_dma_wdata, .wgt_dma_we, .wgt_dma_addr, .wgt_dma_wdata,
    .out_dma_re, .out_dma_addr, .out_dma_rdata
  );
endmodule
