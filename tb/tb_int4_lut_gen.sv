// tb_int4_lut_gen: random check of the shared FP8-INT4 LUT generator.
// Entry at index c must equal a1 + s2 a2 + s3 a3 + s4 a4 with s = +1 for a
// set bit of {1, c}, rounded pairwise to FP8 as the two-level SFASU tree does.
module tb_int4_lut_gen;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  fp8_t act [4];
  fp8_t ent [LUT_ENTRIES];
  int checks = 0, failures = 0;

  int4_lut_gen dut (.act(act), .ent(ent));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] a [4];
    for (int t = 0; t < 4000; t++) begin
      for (int i = 0; i < 4; i++) begin
        a[i]   = (t < 2000) ? rand_fp8(1, 12, 5) : 8'($urandom);
        act[i] = fp8_t'(a[i]);
      end
      #1;
      for (int c = 0; c < 8; c++) begin
        logic [7:0] expv;
        expv = to_fp8(bcq_sum(a, {1'b1, 3'(c)}));
        checks++;
        if (8'(ent[c]) !== expv && !(8'(ent[c]) == 8'h00 && expv == 8'h00)) begin
          failures++;
          if (failures < 10) $display("a=%h %h %h %h c=%0d got %h exp %h", a[0], a[1], a[2], a[3], c, ent[c], expv);
        end
      end
    end
    // a = (1, 1, 1, 1): index 7 = 4, index 0 = -2, index 3 = 2, index 4 = 0
    for (int i = 0; i < 4; i++) act[i] = fp8_t'(8'h38);
    #1;
    checks += 4;
    if (8'(ent[7]) !== 8'h48) failures++;
    if (8'(ent[0]) !== 8'hC0) failures++;
    if (8'(ent[3]) !== 8'h40) failures++;
    if (8'(ent[4]) !== 8'h00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
