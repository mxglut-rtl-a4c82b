// mxglut_test.svh: end-to-end test body shared by tb_mxglut (reduced array),
// tb_mxglut_full and tb_mxglut_llama (default 64 x 64 array). The including module defines
// R, C (array size of the DUT), G_OS (activation words of the OS kernels),
// M_WS (activation vectors of the WS kernels), NKERN (kernels to run) and
// instantiates the DUT as `dut`.
//
// Kernels run with ping-pong buffering: while one kernel computes on one
// bank, the DMA side loads the next kernel's data into the other bank and
// reads the previous kernel's results. Data are random; the reference GEMM
// (tb_fp_pkg) accumulates in the order of the selected dataflow. The weight
// bit-plane reinterpretation of INT4 weights is done here, as the off-chip
// preprocessing would. With NKERN >= 4 two split reductions follow
// (cfg_acc / cfg_drain). Mechanisms are counted from the DUT's own control
// signals; one that never occurs is a failure.

  localparam int AW_A = 8, AW_W = 10, AW_O = 8;
  localparam int GMAX = (G_OS > R) ? G_OS : R;   // activation groups per row

  logic                clk = 0, rst_n = 0;
  logic                start = 0;
  prec_e               cfg_prec;
  df_e                 cfg_df;
  logic [AW_A:0]       cfg_len;
  logic                busy, done;
  logic                cfg_acc = 0, cfg_drain = 1;
  logic                bank_sel = 0, out_bank = 0;
  logic                act_dma_we = 0, wgt_dma_we = 0, out_dma_re = 0;
  logic [AW_A-1:0]     act_dma_addr = 0;
  logic [AW_W-1:0]     wgt_dma_addr = 0;
  logic [AW_O-1:0]     out_dma_addr = 0;
  logic [R*32-1:0]     act_dma_wdata = 0;
  logic [C*8-1:0]      wgt_dma_wdata = 0;
  logic [C*32-1:0]     out_dma_rdata;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_os = 0, n_ws = 0, n_int4 = 0, n_fp8 = 0, n_plane_shift = 0, n_neg = 0;
  int n_pingpong = 0, n_ws_preload = 0, n_drain = 0, n_wpreload = 0;
  int n_os_cont = 0, n_ws_acc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // activations A[row][n], weights W[n][k] (FP8 byte or INT4 code), per kernel
  logic [7:0]  A [2][(M_WS > R ? M_WS : R)][4*GMAX];
  logic [7:0]  W [2][4*GMAX][C];
  logic [31:0] O [2][(M_WS > R ? M_WS : R)][C];
  prec_e       kprec [2];
  df_e         kdf   [2];
  int          klen  [2];
  logic        kacc  [2];   // continue from the other slot's kernel
  logic        kdrain[2];

  function automatic logic [3:0] code(input int s, input int g, input int k, input int b);
    return {W[s][4*g][k][b], W[s][4*g+1][k][b], W[s][4*g+2][k][b], W[s][4*g+3][k][b]};
  endfunction

  function automatic real prod(input int s, input int i, input int g, input int k, input int b);
    logic [7:0] a4 [4];
    if (kprec[s] == PREC_FP8) return fp8_prod(A[s][i][g], W[s][g][k]);
    for (int q = 0; q < 4; q++) a4[q] = A[s][i][4*g+q];
    return bcq_sum(a4, code(s, g, k, b)) * pow2(b);
  endfunction

  task automatic make_kernel(input int s, input prec_e p, input df_e d, input int len,
                             input logic acc = 1'b0, input logic drain = 1'b1);
    int rows, groups, nb;
    kprec[s] = p; kdf[s] = d; klen[s] = len; kacc[s] = acc; kdrain[s] = drain;
    rows   = (d == DF_OS) ? R : len;
    groups = (d == DF_OS) ? len : R;
    nb     = (p == PREC_INT4) ? 4 : 1;
    for (int i = 0; i < rows; i++)
      for (int n = 0; n < 4 * groups; n++) A[s][i][n] = rand_fp8(3, 10, 3);
    for (int n = 0; n < 4 * groups; n++)
      for (int k = 0; k < C; k++)
        W[s][n][k] = (p == PREC_INT4) ? {4'h0, 4'($urandom)} : rand_fp8(3, 10, 3);
    // reference
    for (int i = 0; i < rows; i++)
      for (int k = 0; k < C; k++) begin
        logic [31:0] o;
        o = acc ? O[1-s][i][k] : 32'd0;
        if (d == DF_OS) begin
          for (int g = 0; g < groups; g++)
            for (int b = 0; b < nb; b++) o = add32(o, to_fp32(prod(s, i, g, k, b)));
        end else begin
          for (int b = 0; b < nb; b++)
            for (int g = 0; g < groups; g++) o = add32(o, to_fp32(prod(s, i, g, k, b)));
        end
        O[s][i][k] = o;
      end
    for (int g = 0; g < groups; g++)
      for (int k = 0; k < C; k++)
        for (int b = 0; b < nb; b++)
          if (p == PREC_INT4 && code(s, g, k, b)[3] == 1'b0) n_neg++;
  endtask

  // DMA: load kernel s into the bank opposite to bank_sel
  task automatic dma_load(input int s);
    int nb, groups, rows;
    nb     = (kprec[s] == PREC_INT4) ? 4 : 1;
    groups = (kdf[s] == DF_OS) ? klen[s] : R;
    rows   = (kdf[s] == DF_OS) ? R : klen[s];
    if (kdf[s] == DF_OS) begin
      for (int g = 0; g < groups; g++) begin
        @(negedge clk);
        for (int i = 0; i < R; i++)
          act_dma_wdata[32*i +: 32] = (kprec[s] == PREC_INT4)
            ? {A[s][i][4*g+3], A[s][i][4*g+2], A[s][i][4*g+1], A[s][i][4*g]}
            : {24'd0, A[s][i][g]};
        act_dma_addr = AW_A'(g); act_dma_we = 1;
      end
      for (int g = 0; g < groups; g++)
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          act_dma_we = 0;
          for (int k = 0; k < C; k++)
            wgt_dma_wdata[8*k +: 8] = (kprec[s] == PREC_INT4) ? {4'h0, code(s, g, k, b)} : W[s][g][k];
          wgt_dma_addr = AW_W'(g * nb + b); wgt_dma_we = 1;
        end
    end else begin
      for (int m = 0; m < rows; m++) begin
        @(negedge clk);
        for (int j = 0; j < R; j++)
          act_dma_wdata[32*j +: 32] = (kprec[s] == PREC_INT4)
            ? {A[s][m][4*j+3], A[s][m][4*j+2], A[s][m][4*j+1], A[s][m][4*j]}
            : {24'd0, A[s][m][j]};
        act_dma_addr = AW_A'(m); act_dma_we = 1;
      end
      for (int b = 0; b < nb; b++)
        for (int t = 0; t < R; t++) begin
          @(negedge clk);
          act_dma_we = 0;
          for (int k = 0; k < C; k++)
            wgt_dma_wdata[8*k +: 8] = (kprec[s] == PREC_INT4)
              ? {4'h0, code(s, R - 1 - t, k, b)} : W[s][R - 1 - t][k];
          wgt_dma_addr = AW_W'(b * R + t); wgt_dma_we = 1;
        end
    end
    @(negedge clk);
    act_dma_we = 0; wgt_dma_we = 0;
  endtask

  // DMA: read results of kernel s from the bank opposite to bank_sel
  task automatic dma_check(input int s);
    int rows;
    rows = (kdf[s] == DF_OS) ? R : klen[s];
    for (int i = 0; i < rows; i++) begin
      @(negedge clk);
      out_dma_addr = AW_O'(i); out_dma_re = 1;
      @(negedge clk);
      out_dma_re = 0;
      for (int k = 0; k < C; k++) begin
        checks++;
        if (out_dma_rdata[32*k +: 32] !== O[s][i][k]) begin
          failures++;
          if (failures < 10)
            $display("kernel %0d (prec %0d df %0d) O[%0d][%0d] = %h, expected %h",
                     s, kprec[s], kdf[s], i, k, out_dma_rdata[32*k +: 32], O[s][i][k]);
        end
      end
    end
  endtask

  // expected start-to-done cycles of this design's schedule
  function automatic int expected_cycles(input int s);
    int nb;
    nb = (kprec[s] == PREC_INT4) ? 4 : 1;
    if (kdf[s] == DF_OS) return klen[s] * nb + (R + 1) + (kdrain[s] ? R : 0) + 1;
    // per plane: R preload + M stream + flush (last result leaves R+2 cycles
    // after its activation word is read, then the write count is seen)
    return nb * (R + klen[s] + R + 3) + 1;
  endfunction

  task automatic run_kernel(input int s);
    longint t0;
    @(negedge clk);
    cfg_prec = kprec[s]; cfg_df = kdf[s]; cfg_len = (AW_A+1)'(klen[s]);
    cfg_acc = kacc[s]; cfg_drain = kdrain[s];
    start = 1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(posedge clk);
    checks++;
    if (int'(cyc - t0) != expected_cycles(s)) begin
      failures++;
      $display("kernel %0d took %0d cycles, expected %0d", s, cyc - t0, expected_cycles(s));
    end
    if (kdf[s] == DF_OS) n_os++; else n_ws++;
    if (kprec[s] == PREC_INT4) n_int4++; else n_fp8++;
  endtask

  // mechanisms observed on the design's own control signals
  always @(posedge clk) if (rst_n) begin
    if (dut.out_shift) n_drain++;                               // OS drain cycle
    if (dut.w_shift && dut.df == DF_WS) n_wpreload++;           // WS weight preload
    if (dut.ps_from_sram && dut.act_valid) begin
      if (dut.ws_plane != 0) n_ws_preload++;                    // plane b-1 psum in
      else n_ws_acc++;                                          // earlier kernel's result in
    end
    if (dut.act_valid && dut.prec == PREC_INT4 && dut.df == DF_OS) n_plane_shift++;
    if (start && !busy && cfg_df == DF_OS && cfg_acc) n_os_cont++; // OS tile continued
  end

  // watchdog
  initial begin
    #(64'd10 * 64'd400000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prec_e plist [4];
    df_e   dlist [4];
    int    llist [4];
    plist = '{PREC_INT4, PREC_FP8, PREC_FP8, PREC_INT4};
    dlist = '{DF_OS, DF_WS, DF_OS, DF_WS};
    llist = '{G_OS, M_WS, G_OS, M_WS};
    cfg_prec = PREC_INT4; cfg_df = DF_OS; cfg_len = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // first kernel: load bank 0 (bank_sel = 1 -> DMA side is bank 0)
    bank_sel = 1;
    make_kernel(0, plist[0], dlist[0], llist[0]);
    dma_load(0);
    for (int kn = 0; kn < NKERN; kn++) begin
      int s;
      s = kn % 2;
      @(negedge clk);
      bank_sel = ~bank_sel;   // compute on the freshly loaded bank
      out_bank = bank_sel;
      if (kn > 0) n_pingpong++;
      fork
        run_kernel(s);
        begin
          if (kn > 0) dma_check(1 - s);   // previous results
          if (kn + 1 < NKERN) begin
            make_kernel(1 - s, plist[(kn + 1) % 4], dlist[(kn + 1) % 4], llist[(kn + 1) % 4]);
            dma_load(1 - s);
          end
        end
      join
    end
    @(negedge clk);
    bank_sel = ~bank_sel;
    out_bank = bank_sel;
    dma_check((NKERN - 1) % 2);
    if (NKERN >= 4) begin
      // split reductions: an OS tile accumulated over two kernels without
      // draining in between, then a WS kernel adding to the output SRAM
      // contents of an earlier WS kernel (output bank held, inputs flipped)
      make_kernel(0, PREC_INT4, DF_OS, G_OS, 1'b0, 1'b0);
      dma_load(0);
      @(negedge clk); bank_sel = ~bank_sel;
      run_kernel(0);
      make_kernel(1, PREC_FP8, DF_OS, G_OS, 1'b1, 1'b1);
      dma_load(1);
      @(negedge clk); bank_sel = ~bank_sel;
      run_kernel(1);
      @(negedge clk); out_bank = ~out_bank;
      dma_check(1);
      make_kernel(0, PREC_FP8, DF_WS, M_WS);
      dma_load(0);
      @(negedge clk); bank_sel = ~bank_sel;
      run_kernel(0);
      make_kernel(1, PREC_INT4, DF_WS, M_WS, 1'b1);
      dma_load(1);
      @(negedge clk); bank_sel = ~bank_sel;
      run_kernel(1);
      @(negedge clk); out_bank = ~out_bank;
      dma_check(1);
    end
    // every mechanism must have occurred
    $display("mechanisms: OS=%0d WS=%0d INT4=%0d FP8=%0d plane_shift=%0d neg_mux=%0d ws_psum_preload=%0d wgt_preload=%0d os_drain=%0d pingpong=%0d os_continue=%0d ws_acc=%0d",
             n_os, n_ws, n_int4, n_fp8, n_plane_shift, n_neg, n_ws_preload, n_wpreload, n_drain, n_pingpong, n_os_cont, n_ws_acc);
    if (NKERN >= 4) begin
      checks += 12;
      if (n_os_cont == 0) failures++;
      if (n_ws_acc == 0) failures++;
      if (n_os == 0) failures++;
      if (n_ws == 0) failures++;
      if (n_int4 == 0) failures++;
      if (n_fp8 == 0) failures++;
      if (n_plane_shift == 0) failures++;
      if (n_neg == 0) failures++;
      if (n_ws_preload == 0) failures++;
      if (n_wpreload == 0) failures++;
      if (n_drain == 0) failures++;
      if (n_pingpong == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
