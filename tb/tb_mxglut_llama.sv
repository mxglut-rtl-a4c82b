// tb_mxglut_llama: the accelerator core at its default size running kernels
// as large as one SRAM bank allows, the tile shapes of an LLM layer:
//  - prefill linear layer (FP8-INT4, OS): 64 tokens x 64 outputs with a
//    reduction depth of 1024 per kernel (256 activation words, 1024 weight
//    words = a full bank of each), and a 64 x 64 tile whose reduction
//    continues over a second kernel without leaving the array;
//  - prefill attention (FP8-FP8, OS): reduction depth 256 per kernel;
//  - decode (WS): 64 activation vectors (batch 64) per kernel, FP8-INT4 and
//    FP8-FP8, and a reduction continued in the output SRAM.
// Data are random with the value ranges of the other tests; every output,
// every cycle count and every mechanism is checked (shared test body).
module tb_mxglut_llama;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 64, C = 64, G_OS = 256, M_WS = 64, NKERN = 4;

  `include "mxglut_test.svh"

  // backstop behind the shared body's own watchdog
  initial begin
    #(64'd10 * 64'd800000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  mxglut dut (
    .clk, .rst_n, .start, .cfg_prec, .cfg_df, .cfg_len, .cfg_acc, .cfg_drain, .busy, .done,
    .in_bank_sel(bank_sel), .out_bank_sel(out_bank),
    .act_dma_we, .act_dma_addr, .act_dma_wdata, .wgt_dma_we, .wgt_dma_addr, .wgt_dma_wdata,
    .out_dma_re, .out_dma_addr, .out_dma_rdata
  );
endmodule
