// tb_fp8_lut_gen: exhaustive check of the FP8-FP8 LUT generator.
// For every activation and every weight mantissa q, the entry decoded as
// 2^(E_LUT) * 1.mmm (times the activation sign) must equal the reference
// product of the activation with the weight 1.q x 2^0 (exponent field 7).
// Also checks the worked example of activation 8'b00010101.
module tb_fp8_lut_gen;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  fp8_t       act;
  logic [7:0] ent [LUT_ENTRIES];
  logic       sgn, zero;
  int checks = 0, failures = 0;

  fp8_lut_gen dut (.act(act), .ent(ent), .sgn(sgn), .zero(zero));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      act = fp8_t'(8'(a));
      #1;
      checks++;
      if (zero !== (a[6:3] == 0) || sgn !== a[7]) failures++;
      if (a[6:3] != 0) begin
        for (int q = 0; q < 8; q++) begin
          real got, expv;
          logic signed [4:0] el;
          el   = signed'(ent[q][7:3]);
          got  = (sgn ? -1.0 : 1.0) * (1.0 + real'(ent[q][2:0]) / 8.0) * pow2(int'(el));
          // weight 1.q with biased exponent 7 (value 1.q): product exponent
          // of entry = real exponent of a*1.q, i.e. E_LUT = e_a + delta - 7
          expv = fp8_prod(8'(a), {1'b0, 4'd7, 3'(q)});
          checks++;
          if (got != expv) begin
            failures++;
            if (failures < 10) $display("act %h q %0d: entry %h = %f, expected %f", a, q, ent[q], got, expv);
          end
        end
      end
    end
    // worked example (activation 1.101 x 2^(2-7)): entries 000, 010, 111
    act = fp8_t'(8'b0001_0101);
    #1;
    checks += 3;
    if (ent[0] !== {5'b11011, 3'b101}) failures++;
    if (ent[2] !== {5'b11100, 3'b000}) failures++;
    if (ent[7] !== {5'b11100, 3'b100}) failures++;
    // round to nearest: 1.101 x 1.001 = 1.110101 -> 1.111
    checks++;
    if (ent[1] !== {5'b11011, 3'b111}) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
