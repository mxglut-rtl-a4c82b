// tb_lut_block: LUT storage, per-entry FP shifters and bit-plane FSM.
// Checks: OS FP8-INT4 load -> B cycles valid with exponent + b (b = 0..3);
// back-to-back groups keep valid high; WS FP8-INT4 -> one cycle with the
// given plane; FP8-FP8 -> one cycle, sign-extended exponent, metadata.
module tb_lut_block;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  logic       clk = 0, rst_n = 0;
  prec_e      prec;
  df_e        df;
  logic [1:0] ws_plane;
  logic       load, sgn_d, zero_d;
  logic [7:0] ent_d [LUT_ENTRIES];
  lut_ent_t   q [LUT_ENTRIES];
  logic       valid;
  int checks = 0, failures = 0;
  logic [7:0] held [LUT_ENTRIES];

  lut_block #(.WBITS(4)) dut (.clk, .rst_n, .prec, .df, .ws_plane, .load,
    .ent_d, .sgn_d, .zero_d, .q, .valid);

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic exp_valid, input int b, input logic fp8mode,
                     input logic s_meta, input logic z_meta);
    checks++;
    if (valid !== exp_valid) begin
      failures++;
      $display("%0t valid %b expected %b", $time, valid, exp_valid);
    end
    if (exp_valid) begin
      for (int i = 0; i < LUT_ENTRIES; i++) begin
        logic ok;
        if (fp8mode)
          ok = (q[i].exp == 7'(signed'(held[i][7:3]))) && (q[i].man == held[i][2:0])
               && (q[i].sign == s_meta) && (q[i].zero == z_meta);
        else
          ok = (q[i].zero == (held[i][6:3] == 0)) && (q[i].sign == held[i][7])
               && (q[i].man == held[i][2:0])
               && (int'(q[i].exp) == int'(held[i][6:3]) + b);
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("%0t entry %0d b=%0d got %p held %h", $time, i, b, q[i], held[i]);
        end
      end
    end
  endtask

  task automatic do_load(input logic s, input logic z);
    @(negedge clk);
    for (int i = 0; i < LUT_ENTRIES; i++) begin
      ent_d[i] = rand_fp8(0, 15, 10);
      held[i]  = ent_d[i];
    end
    sgn_d = s; zero_d = z; load = 1;
    @(negedge clk);
    load = 0;
  endtask

  initial begin
    load = 0; sgn_d = 0; zero_d = 0; ws_plane = 0;
    prec = PREC_INT4; df = DF_OS;
    for (int i = 0; i < LUT_ENTRIES; i++) ent_d[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(1'b0, 0, 1'b0, 1'b0, 1'b0);
    // OS FP8-INT4: four planes
    for (int g = 0; g < 3; g++) begin
      do_load(1'b0, 1'b0);
      for (int b = 0; b < 4; b++) begin
        chk(1'b1, b, 1'b0, 1'b0, 1'b0);
        if (b < 3) @(negedge clk);
      end
      @(negedge clk);
      chk(1'b0, 0, 1'b0, 1'b0, 1'b0);
    end
    // back-to-back groups: load again in the last plane cycle
    do_load(1'b0, 1'b0);
    for (int g = 0; g < 3; g++) begin
      for (int b = 0; b < 4; b++) begin
        chk(1'b1, b, 1'b0, 1'b0, 1'b0);
        if (b == 3 && g < 2) begin
          for (int i = 0; i < LUT_ENTRIES; i++) ent_d[i] = rand_fp8(0, 15, 10);
          load = 1;
          @(negedge clk);
          load = 0;
          for (int i = 0; i < LUT_ENTRIES; i++) held[i] = ent_d[i];
        end else @(negedge clk);
      end
    end
    chk(1'b0, 0, 1'b0, 1'b0, 1'b0);
    // WS FP8-INT4, plane 2 and 3
    df = DF_WS;
    for (int p = 2; p < 4; p++) begin
      ws_plane = 2'(p);
      do_load(1'b0, 1'b0);
      chk(1'b1, p, 1'b0, 1'b0, 1'b0);
      @(negedge clk);
      chk(1'b0, 0, 1'b0, 1'b0, 1'b0);
    end
    // FP8-FP8, OS and WS: one cycle, bypassed shifters
    prec = PREC_FP8;
    for (int t = 0; t < 4; t++) begin
      df = t[0] ? DF_WS : DF_OS;
      do_load(t[1], t == 3);
      chk(1'b1, 0, 1'b1, t[1], t == 3);
      @(negedge clk);
      chk(1'b0, 0, 1'b1, 1'b0, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
