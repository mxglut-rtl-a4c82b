// tb_fp_pkg: reference arithmetic for the MxGLUT testbenches.
//
// Independent of the RTL: values are handled as `real` numbers and rounded
// with plain arithmetic. FP8 is E4M3 with bias 7, flush-to-zero and
// saturation at +-480 (the design's number rules); FP32 rounding is to
// nearest even with flush-to-zero. Also holds the GEMM reference that
// accumulates in the same order as the array does (output stationary:
// groups then bit planes; weight stationary: bit planes then rows).
package tb_fp_pkg;

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp8_val(input logic [7:0] v);
    if (v[6:3] == 4'd0) return 0.0;
    return (v[7] ? -1.0 : 1.0) * (1.0 + real'(v[2:0]) / 8.0) * pow2(int'(v[6:3]) - 7);
  endfunction

  // round a real to E4M3, ties away from zero
  function automatic logic [7:0] to_fp8(input real x);
    logic s;
    real  a, m;
    int   e;
    if (x == 0.0) return 8'h00;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = $floor(a * 8.0 + 0.5);
    if (m >= 16.0) begin m = 8.0; e++; end
    if (e + 7 <= 0) return 8'h00;
    if (e + 7 > 15) return {s, 7'h7F};
    return {s, 4'(e + 7), 3'(int'(m) - 8)};
  endfunction

  function automatic real fp32_val(input logic [31:0] v);
    if (v[30:23] == 8'd0) return 0.0;
    return (v[31] ? -1.0 : 1.0) * (1.0 + real'(v[22:0]) / 8388608.0) * pow2(int'(v[30:23]) - 127);
  endfunction

  // round a real to binary32, nearest even, flush-to-zero, saturating
  function automatic logic [31:0] to_fp32(input real x);
    logic s;
    real  a, f, fl;
    int   e;
    longint mi;
    if (x == 0.0) return 32'h0;
    s = (x < 0.0);
    a = s ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f  = a * 8388608.0;
    fl = $floor(f);
    mi = longint'(fl);
    if ((f - fl) > 0.5 || ((f - fl) == 0.5 && mi[0])) mi++;
    if (mi >= 64'd16777216) begin mi = 64'd8388608; e++; end
    if (e + 127 <= 0) return 32'h0;
    if (e + 127 >= 255) return {s, 8'hFE, 23'h7FFFFF};
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

  function automatic logic [31:0] add32(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(fp32_val(a) + fp32_val(b));
  endfunction

  // FP8 x FP8 product as the LUT scheme forms it: the mantissa product is
  // rounded to 4 significant bits, exponents are added exactly.
  function automatic real fp8_prod(input logic [7:0] a, input logic [7:0] w);
    real p;
    int  e;
    if (a[6:3] == 0 || w[6:3] == 0) return 0.0;
    p = (1.0 + real'(a[2:0]) / 8.0) * (1.0 + real'(w[2:0]) / 8.0);
    e = 0;
    if (p >= 2.0) begin p = p / 2.0; e = 1; end
    p = $floor(p * 8.0 + 0.5) / 8.0;
    if (p >= 2.0) begin p = p / 2.0; e++; end
    return ((a[7] ^ w[7]) ? -1.0 : 1.0) * p * pow2(int'(a[6:3]) + int'(w[6:3]) - 14 + e);
  endfunction

  // BCQ signed sum s1*a1 + s2*a2 + s3*a3 + s4*a4 as the LUT generator forms
  // it: pairs are rounded to FP8 first, then their sum. bits[3] -> a1.
  function automatic real bcq_sum(input logic [7:0] a [4], input logic [3:0] bits);
    real t [4];
    for (int i = 0; i < 4; i++) t[i] = (bits[3-i] ? 1.0 : -1.0) * fp8_val(a[i]);
    return fp8_val(to_fp8(fp8_val(to_fp8(t[0] + t[1])) + fp8_val(to_fp8(t[2] + t[3]))));
  endfunction

  // random FP8 with a bounded exponent range; pz = percent zeros
  function automatic logic [7:0] rand_fp8(input int emin, input int emax, input int pz);
    if (int'($urandom_range(99, 0)) < pz) return 8'h00;
    return {1'($urandom), 4'($urandom_range(emax, emin)), 3'($urandom)};
  endfunction

endpackage
