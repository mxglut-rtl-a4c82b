// tb_lut_gen: mode selection of the LUT generator. In FP8-INT4 mode the
// entries are the BCQ sums of the four bus bytes; in FP8-FP8 mode the
// products of byte 0 with 1.q, plus its sign and zero flag.
module tb_lut_gen;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  prec_e       prec;
  logic [31:0] act;
  logic [7:0]  ent [LUT_ENTRIES];
  logic        sgn, zero;
  int checks = 0, failures = 0;

  lut_gen dut (.prec(prec), .act(act), .ent(ent), .sgn(sgn), .zero(zero));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] a [4];
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < 4; i++) a[i] = rand_fp8(1, 12, 5);
      act  = {a[3], a[2], a[1], a[0]};
      prec = PREC_INT4;
      #1;
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (ent[c] !== to_fp8(bcq_sum(a, {1'b1, 3'(c)}))) failures++;
      end
      prec = PREC_FP8;
      #1;
      checks++;
      if (sgn !== a[0][7] || zero !== (a[0][6:3] == 0)) failures++;
      if (a[0][6:3] != 0) begin
        for (int c = 0; c < 8; c++) begin
          real got;
          got = (a[0][7] ? -1.0 : 1.0) * (1.0 + real'(ent[c][2:0]) / 8.0)
              * pow2(int'(signed'(ent[c][7:3])));
          checks++;
          if (got != fp8_prod(a[0], {1'b0, 4'd7, 3'(c)})) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
