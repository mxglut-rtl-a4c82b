// tb_mxmpu: the 2-D array driven directly (no sequencer, no SRAM) on a
// 4 x 4 array: an output-stationary FP8-INT4 GEMM (weights propagating down
// the columns, outputs drained through the output chain) and a
// weight-stationary FP8-FP8 GEMM (weights preloaded, outputs forwarded down
// the columns). Also checks the drain and WS result timing.
module tb_mxmpu;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  localparam int R = 4, C = 4, G = 3, M = 5;

  logic        clk = 0, rst_n = 0;
  prec_e       prec;
  df_e         df;
  logic [1:0]  ws_plane = 0;
  logic [31:0] act_top [R];
  logic        act_valid = 0, w_shift = 0, out_shift = 0, out_clr = 0;
  logic [7:0]  w_top  [C];
  logic [31:0] ps_top [C];
  logic [31:0] ps_bot [C];
  logic        bot_valid;
  int checks = 0, failures = 0;

  logic [7:0]  A [M][4*G];
  logic [7:0]  W [4*G][C];

  mxmpu #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .prec, .df, .ws_plane, .act_top,
    .act_valid, .w_top, .w_shift, .ps_top, .out_shift, .out_clr, .ps_bot, .bot_valid);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [3:0] code(input int g, input int k, input int b);
    return {W[4*g][k][b], W[4*g+1][k][b], W[4*g+2][k][b], W[4*g+3][k][b]};
  endfunction

  initial begin
    prec = PREC_INT4; df = DF_OS;
    for (int i = 0; i < R; i++) act_top[i] = 0;
    for (int k = 0; k < C; k++) begin w_top[k] = 0; ps_top[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- OS, FP8-INT4 ----------------
    for (int i = 0; i < R; i++) for (int n = 0; n < 4*G; n++) A[i][n] = rand_fp8(3, 10, 3);
    for (int n = 0; n < 4*G; n++) for (int k = 0; k < C; k++) W[n][k] = {4'h0, 4'($urandom)};
    out_clr = 1; @(negedge clk); out_clr = 0;
    w_shift = 1;
    for (int t = 0; t < 4*G; t++) begin
      int g, b;
      g = t / 4; b = t % 4;
      act_valid = (b == 0);
      for (int i = 0; i < R; i++) act_top[i] = {A[i][4*g+3], A[i][4*g+2], A[i][4*g+1], A[i][4*g]};
      for (int k = 0; k < C; k++) w_top[k] = {4'h0, code(g, k, b)};
      @(negedge clk);
    end
    act_valid = 0;
    repeat (R + 1) @(negedge clk);
    out_shift = 1;
    for (int d = 0; d < R; d++) begin
      int i;
      i = R - 1 - d;
      for (int k = 0; k < C; k++) begin
        logic [31:0] o;
        logic [7:0]  a4 [4];
        o = 0;
        for (int g = 0; g < G; g++) begin
          for (int q = 0; q < 4; q++) a4[q] = A[i][4*g+q];
          for (int b = 0; b < 4; b++) o = add32(o, to_fp32(bcq_sum(a4, code(g, k, b)) * pow2(b)));
        end
        checks++;
        if (ps_bot[k] !== o) begin
          failures++;
          if (failures < 40) $display("OS O[%0d][%0d] = %h expected %h", i, k, ps_bot[k], o);
        end
      end
      @(negedge clk);
    end
    out_shift = 0; w_shift = 0;
    // ---------------- WS, FP8-FP8 ----------------
    prec = PREC_FP8; df = DF_WS;
    for (int m = 0; m < M; m++) for (int j = 0; j < R; j++) A[m][j] = rand_fp8(3, 10, 3);
    for (int j = 0; j < R; j++) for (int k = 0; k < C; k++) W[j][k] = rand_fp8(3, 10, 3);
    w_shift = 1;
    for (int t = 0; t < R; t++) begin
      for (int k = 0; k < C; k++) w_top[k] = W[R-1-t][k];
      @(negedge clk);
    end
    w_shift = 0;
    fork
      begin
        for (int m = 0; m < M; m++) begin
          act_valid = 1;
          for (int j = 0; j < R; j++) act_top[j] = {24'd0, A[m][j]};
          @(negedge clk);
        end
        act_valid = 0;
      end
      begin
        int got;
        longint t0;
        got = 0;
        t0 = 0;
        while (got < M) begin
          @(negedge clk);
          t0++;
          if (bot_valid) begin
            // result m leaves the bottom R+1 cycles after its activation
            checks++;
            if (t0 != got + R + 1) failures++;
            for (int k = 0; k < C; k++) begin
              logic [31:0] o;
              o = 0;
              for (int j = 0; j < R; j++) o = add32(o, to_fp32(fp8_prod(A[got][j], W[j][k])));
              checks++;
              if (ps_bot[k] !== o) begin
                failures++;
                if (failures < 40) $display("WS O[%0d][%0d] = %h expected %h", got, k, ps_bot[k], o);
              end
            end
            got++;
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
