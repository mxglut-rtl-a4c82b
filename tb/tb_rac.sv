// tb_rac: read-accumulate unit in both precisions and both dataflows.
// LUT entries are built here from random activations with the reference
// model (BCQ sums shifted by plane b, or FP8 mantissa products); the RAC's
// partial sum must match reference FP32 accumulation of the reference
// product a x w. Also checks weight propagate and output shift/preload.
module tb_rac;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  logic        clk = 0, rst_n = 0;
  prec_e       prec;
  df_e         df;
  lut_ent_t    ent [LUT_ENTRIES];
  logic        ent_valid, w_shift, out_shift, out_clr = 0;
  logic [7:0]  w_in, w_out;
  logic [31:0] ps_in, ps_out;
  int checks = 0, failures = 0;

  rac dut (.clk, .rst_n, .prec, .df, .ent, .ent_valid, .w_in, .w_shift,
           .ps_in, .out_shift, .out_clr, .w_out, .ps_out);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic lut_ent_t enc(input real v, input int eshift);
    lut_ent_t r;
    real a;
    int e;
    r = '0;
    if (v == 0.0) begin r.zero = 1; return r; end
    r.sign = (v < 0.0);
    a = r.sign ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    r.exp = 7'(e + 7 + eshift);
    r.man = 3'(int'((a - 1.0) * 8.0));
    return r;
  endfunction

  task automatic chk(input logic [31:0] expv, input string what);
    checks++;
    if (ps_out !== expv) begin
      failures++;
      if (failures < 10) $display("%s: got %h exp %h", what, ps_out, expv);
    end
  endtask

  // one product: load weight, then one valid cycle
  task automatic step(input logic [7:0] w, input real prod, input logic [31:0] psin,
                      inout logic [31:0] acc);
    @(negedge clk);
    w_in = w; w_shift = 1; ent_valid = 0; out_shift = 0;
    @(negedge clk);
    checks++;
    if (w_out !== w) failures++;
    w_shift = 0; ent_valid = 1; ps_in = psin;
    @(negedge clk);
    ent_valid = 0;
    acc = add32((df == DF_OS) ? acc : psin, to_fp32(prod));
    chk(acc, "step");
  endtask

  initial begin
    logic [31:0] acc;
    logic [7:0]  a [4];
    ent_valid = 0; w_shift = 0; out_shift = 0; w_in = 0; ps_in = 0;
    prec = PREC_INT4; df = DF_OS;
    for (int i = 0; i < LUT_ENTRIES; i++) ent[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    acc = 0;
    for (int pass = 0; pass < 4; pass++) begin
      prec = pass[0] ? PREC_FP8 : PREC_INT4;
      df   = pass[1] ? DF_WS : DF_OS;
      // clear through the output chain
      @(negedge clk); out_shift = 1; ps_in = 32'h0;
      @(negedge clk); out_shift = 0;
      acc = 0;
      chk(32'h0, "clear");
      for (int t = 0; t < 300; t++) begin
        logic [7:0] w;
        real prod;
        logic [31:0] psin;
        psin = to_fp32(real'($urandom_range(2000, 0)) / 16.0 - 60.0);
        if (prec == PREC_INT4) begin
          int b;
          b = $urandom_range(3, 0);
          for (int i = 0; i < 4; i++) a[i] = rand_fp8(3, 11, 5);
          for (int c = 0; c < 8; c++) ent[c] = enc(bcq_sum(a, {1'b1, 3'(c)}), b);
          w    = {4'h0, 4'($urandom)};
          prod = bcq_sum(a, w[3:0]) * pow2(b);
        end else begin
          a[0] = rand_fp8(3, 11, 5);
          for (int c = 0; c < 8; c++) begin
            ent[c] = enc(fp8_prod({1'b0, a[0][6:0]}, {1'b0, 4'd7, 3'(c)}), 0);
            ent[c].sign = a[0][7];
            ent[c].zero = (a[0][6:3] == 0);
            ent[c].exp  = ent[c].exp - 7'sd7;   // LUT exponent is unbiased
          end
          w    = rand_fp8(3, 11, 5);
          prod = fp8_prod(a[0], w);
        end
        step(w, prod, psin, acc);
      end
    end
    // output shift takes ps_in regardless of valid
    @(negedge clk); out_shift = 1; ent_valid = 1; ps_in = 32'h4040_0000;
    @(negedge clk); out_shift = 0; ent_valid = 0;
    chk(32'h4040_0000, "shift");
    // synchronous clear
    @(negedge clk); out_clr = 1;
    @(negedge clk); out_clr = 0;
    chk(32'h0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
