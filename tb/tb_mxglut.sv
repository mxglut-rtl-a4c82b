// tb_mxglut: end-to-end test of the accelerator core on an 8 x 4 array.
// Four kernels (OS FP8-INT4, WS FP8-FP8, OS FP8-FP8, WS FP8-INT4) run back
// to back with ping-pong SRAM banks, then two split reductions (an OS tile
// accumulated over two kernels without an intermediate drain, and a WS
// kernel adding to an earlier kernel's results in the output SRAM); all
// outputs, the cycle count of every kernel and the occurrence of each
// mechanism are checked.
module tb_mxglut;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 8, C = 4, G_OS = 6, M_WS = 5, NKERN = 4;

  `include "mxglut_test.svh"

  mxglut #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .start, .cfg_prec, .cfg_df, .cfg_len, .cfg_acc, .cfg_drain, .busy, .done,
    .in_bank_sel(bank_sel), .out_bank_sel(out_bank),
    .act_dma_we, .act_dma_addr, .act_dma_wdata, .wgt_dma_we, .wgt_dma_addr, .wgt_dma_wdata,
    .out_dma_re, .out_dma_addr, .out_dma_rdata
  );
endmodule
