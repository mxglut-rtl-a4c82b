// sfasu: shared FP8 add/sub unit of the FP8-INT4 LUT generator.
//
// Produces x+y and x-y of two FP8 (E4M3) operands in one combinational pass.
// As in the paper, the front end is shared by both results: unpack, exponent
// compare, operand swap (larger magnitude first) and mantissa alignment.
// Only the final add, the final subtract and their normalise/round stages are
// duplicated. Control and sign logic picks, per result, whether the
// magnitudes are added or subtracted and which sign the result takes.
//
// Design choices the paper leaves open: the aligned mantissa is 19 bits wide
// so no shifted-out bit is lost and rounding is exact; rounding is to nearest
// with ties away from zero; results below the smallest normal flush to +0;
// results above 1.111b x 2^8 saturate. An exponent field of 0 reads as zero.
//
// Interface: x, y in; sum = x+y, diff = x-y out. Purely combinational.
module sfasu
  import mx_pkg::*;
(
  input  fp8_t x,
  input  fp8_t y,
  output fp8_t sum,
  output fp8_t diff
);

  // Normalise a 20-bit magnitude whose LSB weighs 2^(e_big-25) and round it
  // to an FP8 value.
  function automatic fp8_t norm_round(input logic [19:0] r, input logic [3:0] e_big,
                                      input logic s);
    fp8_t        res;
    int          lz;
    logic [19:0] n;
    logic [3:0]  m4;
    int          er;
    lz = 20;
    for (int i = 19; i >= 0; i--) begin
      if (r[i]) begin
        lz = 19 - i;
        break;
      end
    end
    n  = r << lz;
    m4 = {1'b0, n[18:16]} + {3'b000, n[15]};
    er = int'(e_big) + 1 - lz + int'(m4[3]);
    if (r == '0 || er <= 0) begin
      res = '0;
    end else if (er > 15) begin
      res = '{sign: s, exp: 4'hF, man: 3'b111};
    end else begin
      res = '{sign: s, exp: 4'(er), man: m4[2:0]};
    end
    return res;
  endfunction

  // ---- shared front end ----
  logic        x_big;
  fp8_t        op_hi, op_lo;
  logic [3:0]  d;
  logic [18:0] mant_big, mant_small;
  logic        sign_sum, sign_diff, sub_sum, sub_diff;

  always_comb begin
    // exponent compare (zero has exponent 0, so it is never the larger)
    x_big  = ({x.exp, x.man} >= {y.exp, y.man});
    op_hi    = x_big ? x : y;
    op_lo  = x_big ? y : x;
    d      = op_hi.exp - op_lo.exp;
    // align mantissa
    mant_big   = (op_hi.exp == 4'd0)   ? '0 : {1'b1, op_hi.man, 15'd0};
    mant_small = (op_lo.exp == 4'd0) ? '0 : ({1'b1, op_lo.man, 15'd0} >> d);
    // control and sign logic
    sub_sum   = x.sign ^ y.sign;
    sub_diff  = ~(x.sign ^ y.sign);
    sign_sum  = x_big ? x.sign : y.sign;
    sign_diff = x_big ? x.sign : ~y.sign;
  end

  // ---- dedicated add and subtract paths ----
  logic [19:0] r_add, r_sub;
  always_comb begin
    r_add = {1'b0, mant_big} + {1'b0, mant_small};
    r_sub = {1'b0, mant_big} - {1'b0, mant_small};
    sum   = norm_round(sub_sum  ? r_sub : r_add, op_hi.exp, sign_sum);
    diff  = norm_round(sub_diff ? r_sub : r_add, op_hi.exp, sign_diff);
  end

endmodule
