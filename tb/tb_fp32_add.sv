// tb_fp32_add: random and corner-case check of the FP32 adder against real
// arithmetic rounded to nearest even (exponent differences kept below 28 so
// the real sum is exact), plus cases with large exponent differences.
module tb_fp32_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] ea);
    checks++;
    if (y !== ea) begin
      failures++;
      if (failures < 10) $display("%h + %h: got %h exp %h", a, b, y, ea);
    end
  endtask

  initial begin
    for (int t = 0; t < 50000; t++) begin
      int e1, e2;
      e1 = $urandom_range(160, 90);
      e2 = e1 + int'($urandom_range(54, 0)) - 27;
      a  = {1'($urandom), 8'(e1), 23'($urandom)};
      b  = {1'($urandom), 8'(e2), 23'($urandom)};
      if (t % 7 == 0) b[22:10] = a[22:10];   // near cancellation
      if (t % 11 == 0) b = {~a[31], a[30:0]};  // exact cancellation
      #1;
      check(add32(a, b));
    end
    // zeros and a far-away small operand
    a = 32'h3F80_0000; b = 32'h0000_0000; #1; check(32'h3F80_0000);
    a = 32'h0000_0000; b = 32'hC040_0000; #1; check(32'hC040_0000);
    a = 32'h3F80_0000; b = 32'h2000_0001; #1; check(32'h3F80_0000);
    // tie to even: 1 + 2^-24 -> 1 ; (1+2^-23) + 2^-24 -> 1+2^-22
    a = 32'h3F80_0000; b = 32'h3380_0000; #1; check(32'h3F80_0000);
    a = 32'h3F80_0001; b = 32'h3380_0000; #1; check(32'h3F80_0002);
    // sticky beyond guard: 1 + (2^-24 + 2^-40) rounds up
    a = 32'h3F80_0000; b = 32'h3380_0100; #1; check(32'h3F80_0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
