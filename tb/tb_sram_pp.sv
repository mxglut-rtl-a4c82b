// tb_sram_pp: the two-bank ping-pong SRAM, once at a small size (16-bit
// words, 64 bytes: 16 words per bank) and once at the paper's activation
// macro size (128-bit words, 8 KB). Against a reference model it checks:
// one-cycle read latency on both sides, that the DMA side only ever reaches
// the bank the compute side is not using, that flipping bank_sel swaps the
// banks, and simultaneous compute read + compute write + DMA access.
module tb_sram_pp;

  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- small instance ----------
  localparam int W1 = 16, D1 = 16;
  logic          bs1 = 0, cre1 = 0, cwe1 = 0, dre1 = 0, dwe1 = 0;
  logic [3:0]    cra1 = 0, cwa1 = 0, da1 = 0;
  logic [W1-1:0] cwd1 = 0, dwd1 = 0, crd1, drd1;
  logic [W1-1:0] ref1 [2][D1];

  sram_pp #(.WIDTH(W1), .BYTES(64)) u_small (.clk, .bank_sel(bs1),
    .c_re(cre1), .c_raddr(cra1), .c_rdata(crd1), .c_we(cwe1), .c_waddr(cwa1), .c_wdata(cwd1),
    .d_re(dre1), .d_we(dwe1), .d_addr(da1), .d_wdata(dwd1), .d_rdata(drd1));

  // ---------- paper-size activation macro ----------
  logic          bs2 = 0, cre2 = 0, cwe2 = 0, dre2 = 0, dwe2 = 0;
  logic [7:0]    cra2 = 0, cwa2 = 0, da2 = 0;
  logic [127:0]  cwd2 = 0, dwd2 = 0, crd2, drd2;

  sram_pp u_full (.clk, .bank_sel(bs2),
    .c_re(cre2), .c_raddr(cra2), .c_rdata(crd2), .c_we(cwe2), .c_waddr(cwa2), .c_wdata(cwd2),
    .d_re(dre2), .d_we(dwe2), .d_addr(da2), .d_wdata(dwd2), .d_rdata(drd2));

  task automatic chk(input logic [127:0] got, input logic [127:0] expv, input string s);
    checks++;
    if (got !== expv) begin
      failures++;
      if (failures < 20) $display("t=%0t %s: got %h expected %h", $time, s, got, expv);
    end
  endtask

  initial begin
    logic          exp_c, exp_d;
    logic [W1-1:0] ec, ed;
    @(negedge clk);
    // fill both banks of the small instance through the DMA side
    for (int b = 0; b < 2; b++) begin
      bs1 = !b[0];                       // DMA reaches bank !bank_sel = b
      for (int a = 0; a < D1; a++) begin
        dwe1 = 1; da1 = 4'(a); dwd1 = W1'($urandom);
        ref1[b][a] = dwd1;
        @(negedge clk);
      end
    end
    dwe1 = 0;
    // random mixed traffic, checking one-cycle read latency on both sides
    exp_c = 0; exp_d = 0; ec = 0; ed = 0;
    for (int t = 0; t < 2000; t++) begin
      if (t % 97 == 0) bs1 = !bs1;
      cre1 = 1'($urandom); cra1 = 4'($urandom);
      cwe1 = 1'($urandom); cwa1 = 4'($urandom); cwd1 = W1'($urandom);
      dre1 = 1'($urandom); dwe1 = !dre1 && 1'($urandom); da1 = 4'($urandom); dwd1 = W1'($urandom);
      // reads return the contents before this cycle's writes
      if (cre1) ec = ref1[bs1][cra1];
      if (dre1) ed = ref1[!bs1][da1];
      exp_c = cre1; exp_d = dre1;
      if (cwe1) ref1[bs1][cwa1] = cwd1;
      if (dwe1) ref1[!bs1][da1] = dwd1;
      @(negedge clk);
      if (exp_c) chk(128'(crd1), 128'(ec), "compute read");
      if (exp_d) chk(128'(drd1), 128'(ed), "DMA read");
    end
    // read data holds when no read is issued
    cre1 = 0; dre1 = 0; cwe1 = 0; dwe1 = 0;
    @(negedge clk);
    chk(128'(crd1), 128'(ec), "compute read hold");
    chk(128'(drd1), 128'(ed), "DMA read hold");

    // paper size: DMA loads bank 1 while compute owns bank 0, then flip
    bs2 = 0;
    for (int a = 0; a < 256; a++) begin
      dwe2 = 1; da2 = 8'(a); dwd2 = {4{32'(a * 7 + 3)}};
      cwe2 = 1; cwa2 = 8'(a); cwd2 = {4{32'(a ^ 32'h55)}};
      @(negedge clk);
    end
    dwe2 = 0; cwe2 = 0;
    bs2 = 1;                              // compute now sees the DMA-loaded bank
    for (int a = 0; a < 256; a++) begin
      cre2 = 1; cra2 = 8'(a);
      dre2 = 1; da2 = 8'(255 - a);
      @(negedge clk);
      chk(crd2, {4{32'(a * 7 + 3)}}, "flip: compute sees DMA bank");
      chk(drd2, {4{32'((255 - a) ^ 32'h55)}}, "flip: DMA sees compute bank");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
