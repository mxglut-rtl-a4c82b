// tb_rlb_ctrl: the kernel sequencer alone, ROWS = 4, with a behavioural
// model of the array's bot_valid (a WS result leaves the bottom ROWS+2
// cycles after its activation strobe). A monitor samples every cycle and
// checks the strobe sequences against the schedule of the RLB dataflow:
//  - OS: weight words 0..G*B-1 one per cycle, activation word g every B
//    cycles, act_valid one cycle after the read, out_clr only in the start
//    cycle, drain writes to output words ROWS-1..0 with out_shift.
//  - WS: per plane b, weight words b*ROWS..b*ROWS+ROWS-1 and w_shift for
//    exactly ROWS cycles, M activation reads 0..M-1, partial-sum reads from
//    the output SRAM only for b > 0, M output writes 0..M-1, ws_plane = b.
//  - cfg_acc / cfg_drain: an OS kernel with cfg_acc issues no out_clr, one
//    without cfg_drain skips the drain; a WS kernel with cfg_acc also reads
//    the output SRAM in plane 0.
//  - start-to-done cycle counts: OS G*B + (ROWS+1) + ROWS + 1 (ROWS fewer
//    without drain), WS B*(ROWS + M + ROWS + 3) + 1.
module tb_rlb_ctrl;
  import mx_pkg::*;

  localparam int R = 4;

  logic        clk = 0, rst_n = 0, start = 0;
  prec_e       cfg_prec = PREC_INT4;
  df_e         cfg_df = DF_OS;
  logic [8:0]  cfg_len = 0;
  logic        cfg_acc = 0, cfg_drain = 1;
  logic        busy, done;
  prec_e       prec;
  df_e         df;
  logic        act_re, wgt_re, out_re, out_we;
  logic [7:0]  act_raddr, out_raddr, out_waddr;
  logic [9:0]  wgt_raddr;
  logic        act_valid, w_shift, out_shift, out_clr, ps_from_sram;
  logic [1:0]  ws_plane;
  logic        bot_valid;
  logic [R:0]  bv_dly;
  int checks = 0, failures = 0;
  longint cyc = 0;

  rlb_ctrl #(.ROWS(R)) dut (.clk, .rst_n, .start, .cfg_prec, .cfg_df, .cfg_len,
    .cfg_acc, .cfg_drain, .busy, .done, .prec, .df, .act_re, .act_raddr, .wgt_re, .wgt_raddr, .out_re,
    .out_raddr, .out_we, .out_waddr, .act_valid, .w_shift, .out_shift, .out_clr,
    .ps_from_sram, .ws_plane, .bot_valid);

  always #5 clk = ~clk;

  // array model: in WS the bottom row flags its result R+1 cycles after the
  // activation reaches the array (act_valid): R-1 skew stages, LUT load,
  // accumulate, registered row_valid
  always_ff @(posedge clk) bv_dly <= {bv_dly[R-1:0], act_valid && df == DF_WS};
  assign bot_valid = bv_dly[R];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 30) $display("t=%0t %s", $time, s);
  endtask

  // event logs filled by the monitor during a kernel
  int wgt_log[$], act_log[$], outw_log[$], outr_log[$], plane_log[$];
  int n_actvalid, n_wshift, n_outshift, n_clr, n_psram;
  logic act_re_d;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (wgt_re) wgt_log.push_back(int'(wgt_raddr));
      if (act_re) begin act_log.push_back(int'(act_raddr)); plane_log.push_back(int'(ws_plane)); end
      if (out_we) outw_log.push_back(int'(out_waddr));
      if (out_re) outr_log.push_back(int'(out_raddr));
      if (act_valid) n_actvalid++;
      if (w_shift && df == DF_WS) n_wshift++;
      if (out_shift) begin
        n_outshift++;
        if (!out_we) fail("out_shift without output write");
      end
      if (out_clr) begin
        n_clr++;
        if (!(start && !busy)) fail("out_clr outside the start cycle");
      end
      if (ps_from_sram && act_valid) n_psram++;
      checks++;
      if (act_valid !== act_re_d) fail("act_valid is not the read strobe delayed by one");
      act_re_d <= act_re;
    end else act_re_d <= 1'b0;
  end

  task automatic run(input prec_e p, input df_e d, input int len,
                     input logic acc = 1'b0, input logic drain = 1'b1);
    longint t0;
    int nb, exp_cyc;
    nb = (p == PREC_INT4) ? 4 : 1;
    wgt_log.delete(); act_log.delete(); outw_log.delete(); outr_log.delete(); plane_log.delete();
    n_actvalid = 0; n_wshift = 0; n_outshift = 0; n_clr = 0; n_psram = 0;
    @(negedge clk);
    cfg_prec = p; cfg_df = d; cfg_len = 9'(len); cfg_acc = acc; cfg_drain = drain;
    start = 1;
    @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) fail("busy not set");
    while (!done) @(posedge clk);
    exp_cyc = (d == DF_OS) ? len * nb + (R + 1) + (drain ? R : 0) + 1 : nb * (R + len + R + 3) + 1;
    checks++;
    if (int'(cyc - t0) != exp_cyc) fail($sformatf("kernel took %0d cycles, expected %0d", cyc - t0, exp_cyc));
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy) fail("busy after done");
    if (d == DF_OS) begin
      checks++;
      if (wgt_log.size() != len * nb) fail("OS weight read count");
      for (int i = 0; i < wgt_log.size(); i++) begin
        checks++;
        if (wgt_log[i] != i) fail($sformatf("OS weight word %0d read as %0d", i, wgt_log[i]));
      end
      checks++;
      if (act_log.size() != len) fail("OS activation read count");
      for (int i = 0; i < act_log.size(); i++) begin
        checks++;
        if (act_log[i] != i) fail("OS activation order");
      end
      checks++;
      if (outw_log.size() != (drain ? R : 0) || n_outshift != (drain ? R : 0)) fail("OS drain length");
      for (int i = 0; i < outw_log.size(); i++) begin
        checks++;
        if (outw_log[i] != R - 1 - i) fail("OS drain address order");
      end
      checks++;
      if (n_clr != (acc ? 0 : 1) || outr_log.size() != 0 || n_psram != 0) fail("OS clear / preload strobes");
    end else begin
      checks++;
      if (wgt_log.size() != nb * R || n_wshift != nb * R) fail($sformatf("WS preload length %0d/%0d", wgt_log.size(), n_wshift));
      for (int i = 0; i < wgt_log.size(); i++) begin
        checks++;
        if (wgt_log[i] != i) fail("WS weight order");
      end
      checks++;
      if (act_log.size() != nb * len || outw_log.size() != nb * len) fail("WS stream/write count");
      for (int i = 0; i < act_log.size(); i++) begin
        checks++;
        if (act_log[i] != i % len || plane_log[i] != i / len) fail("WS activation order / plane");
      end
      for (int i = 0; i < outw_log.size(); i++) begin
        checks++;
        if (outw_log[i] != i % len) fail("WS output write order");
      end
      checks++;
      if (outr_log.size() != (acc ? nb : nb - 1) * len || n_psram != (acc ? nb : nb - 1) * len)
        fail("WS partial-sum preload count");
      for (int i = 0; i < outr_log.size(); i++) begin
        checks++;
        if (outr_log[i] != i % len) fail("WS partial-sum read order");
      end
      checks++;
      if (n_clr != 0) fail("out_clr in WS");
    end
    checks++;
    if (n_actvalid != act_log.size()) fail("act_valid count");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(PREC_INT4, DF_OS, 3);
    run(PREC_FP8,  DF_OS, 5);
    run(PREC_INT4, DF_WS, 6);
    run(PREC_FP8,  DF_WS, 2);
    run(PREC_INT4, DF_OS, 1);
    run(PREC_FP8,  DF_WS, 1);
    run(PREC_INT4, DF_OS, 2, 1'b0, 1'b0);   // first part of a split reduction
    run(PREC_FP8,  DF_OS, 3, 1'b1, 1'b1);   // continued, then drained
    run(PREC_INT4, DF_WS, 3, 1'b1);         // adds to earlier output-SRAM results
    run(PREC_FP8,  DF_WS, 2, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
