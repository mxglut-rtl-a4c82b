// tb_sfasu: exhaustive check of the shared FP8 add/sub unit.
// All 65536 operand pairs; sum and difference are compared with exact real
// arithmetic rounded to FP8 by the reference model.
module tb_sfasu;
  import mx_pkg::*;
  import tb_fp_pkg::*;

  fp8_t x, y, s, d;
  int checks = 0, failures = 0;

  sfasu dut (.x(x), .y(y), .sum(s), .diff(d));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        logic [7:0] es, ed;
        x = fp8_t'(8'(i));
        y = fp8_t'(8'(j));
        #1;
        es = to_fp8(fp8_val(8'(i)) + fp8_val(8'(j)));
        ed = to_fp8(fp8_val(8'(i)) - fp8_val(8'(j)));
        checks += 2;
        if (8'(s) !== es) begin
          failures++;
          if (failures < 10) $display("sum  %h + %h: got %h exp %h", i, j, s, es);
        end
        if (8'(d) !== ed) begin
          failures++;
          if (failures < 10) $display("diff %h - %h: got %h exp %h", i, j, d, ed);
        end
      end
    end
    // paper-style example: 1.5 + 0.5 = 2.0, 1.5 - 0.5 = 1.0
    x = fp8_t'(8'h3C); y = fp8_t'(8'h30); #1;
    checks++;
    if (8'(s) !== 8'h40 || 8'(d) !== 8'h38) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
