// tb_mxlpe: one processing element row (LUT generator + LUT block + NRAC
// RACs) driven directly, NRAC = 4.
//  - OS FP8-INT4: G activation groups, each followed by B bit-plane codes per
//    column; checks the accumulated outputs against the reference BCQ GEMV
//    and that the LUT block stays valid for exactly B cycles per group
//    (row_valid high B cycles, one cycle after the activation).
//  - WS FP8-FP8: weights preloaded through w_in/w_shift (checked on w_out),
//    then M activations each adding to a partial sum entering on ps_in;
//    ps_out must equal ps_in + a*w one cycle after the LUT is valid.
//  - out_shift moves ps_in to ps_out, out_clr zeroes the outputs.
module tb_mxlpe;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  localparam int N = 4, G = 5, M = 6;

  logic        clk = 0, rst_n = 0;
  prec_e       prec;
  df_e         df;
  logic [1:0]  ws_plane = 0;
  logic [31:0] act = 0;
  logic        act_valid = 0, w_shift = 0, out_shift = 0, out_clr = 0;
  logic [7:0]  w_in   [N];
  logic [31:0] ps_in  [N];
  logic [7:0]  w_out  [N];
  logic [31:0] ps_out [N];
  logic        row_valid;
  int checks = 0, failures = 0;

  logic [7:0]  A [G][4];
  logic [3:0]  Wc [G][4][N];   // code per group, plane, column
  logic [7:0]  Wf [N];
  logic [31:0] P  [M][N];
  logic [7:0]  Af [M];

  mxlpe #(.NRAC(N)) dut (.clk, .rst_n, .prec, .df, .ws_plane, .act, .act_valid,
    .w_in, .w_shift, .ps_in, .out_shift, .out_clr, .w_out, .ps_out, .row_valid);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk32(input logic [31:0] got, input logic [31:0] expv, input string what);
    checks++;
    if (got !== expv) begin
      failures++;
      if (failures < 20) $display("%s: got %h expected %h", what, got, expv);
    end
  endtask

  initial begin
    int rv_cnt;
    prec = PREC_INT4; df = DF_OS;
    for (int k = 0; k < N; k++) begin w_in[k] = 0; ps_in[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- OS, FP8-INT4 ----------------
    for (int g = 0; g < G; g++) for (int q = 0; q < 4; q++) A[g][q] = rand_fp8(3, 10, 3);
    for (int g = 0; g < G; g++) for (int b = 0; b < 4; b++) for (int k = 0; k < N; k++)
      Wc[g][b][k] = 4'($urandom);
    out_clr = 1; @(negedge clk); out_clr = 0;
    for (int k = 0; k < N; k++) chk32(ps_out[k], 32'h0, "out_clr");
    w_shift = 1;
    rv_cnt = 0;
    for (int t = 0; t < 4*G; t++) begin
      int g, b;
      g = t / 4; b = t % 4;
      act_valid = (b == 0);
      act = {A[g][3], A[g][2], A[g][1], A[g][0]};
      for (int k = 0; k < N; k++) w_in[k] = {4'h0, Wc[g][b][k]};
      @(negedge clk);
      // row_valid follows the LUT block: plane b of group g was used in this
      // cycle's predecessor for t >= 1
      if (row_valid) rv_cnt++;
      // weight propagate: w_out is w_in of the previous cycle
      for (int k = 0; k < N; k++) begin
        checks++;
        if (w_out[k] !== {4'h0, Wc[g][b][k]}) failures++;
      end
    end
    act_valid = 0;
    repeat (2) begin @(negedge clk); if (row_valid) rv_cnt++; end
    checks++;
    if (rv_cnt != 4*G) begin
      failures++;
      $display("row_valid high %0d cycles, expected %0d", rv_cnt, 4*G);
    end
    for (int k = 0; k < N; k++) begin
      logic [31:0] o;
      o = 0;
      for (int g = 0; g < G; g++)
        for (int b = 0; b < 4; b++) o = add32(o, to_fp32(bcq_sum(A[g], Wc[g][b][k]) * pow2(b)));
      chk32(ps_out[k], o, $sformatf("OS col %0d", k));
    end
    // outputs hold while nothing is valid
    repeat (3) @(negedge clk);
    // out_shift: ps_out takes ps_in
    for (int k = 0; k < N; k++) ps_in[k] = $urandom;
    out_shift = 1; @(negedge clk); out_shift = 0;
    for (int k = 0; k < N; k++) chk32(ps_out[k], ps_in[k], "out_shift");
    out_clr = 1; @(negedge clk); out_clr = 0;
    for (int k = 0; k < N; k++) chk32(ps_out[k], 32'h0, "out_clr 2");
    w_shift = 0;
    // ---------------- WS, FP8-FP8 ----------------
    prec = PREC_FP8; df = DF_WS;
    for (int k = 0; k < N; k++) Wf[k] = rand_fp8(3, 10, 3);
    w_shift = 1;
    for (int k = 0; k < N; k++) w_in[k] = Wf[k];
    @(negedge clk);
    w_shift = 0;
    for (int k = 0; k < N; k++) w_in[k] = 8'hFF;   // must be ignored now
    for (int m = 0; m < M; m++) begin
      Af[m] = rand_fp8(3, 10, 3);
      for (int k = 0; k < N; k++) P[m][k] = to_fp32(fp8_val(rand_fp8(3, 10, 0)));
    end
    for (int m = 0; m < M; m++) begin
      // cycle t: activation; cycle t+1: LUT valid, partial sum present
      act_valid = 1; act = {24'd0, Af[m]};
      @(negedge clk);
      act_valid = 0;
      for (int k = 0; k < N; k++) ps_in[k] = P[m][k];
      checks++;
      if (row_valid) failures++;          // nothing written yet
      @(negedge clk);
      checks++;
      if (!row_valid) begin failures++; $display("WS row_valid missing m=%0d", m); end
      for (int k = 0; k < N; k++) begin
        chk32(ps_out[k], add32(P[m][k], to_fp32(fp8_prod(Af[m], Wf[k]))),
              $sformatf("WS m=%0d col %0d", m, k));
        checks++;
        if (w_out[k] !== Wf[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
