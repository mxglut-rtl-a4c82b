// fp8_lut_gen: FP8-FP8 LUT generator.
//
// Builds the eight LUT entries of one FP8 activation for FP8xFP8 GEMM. The
// activation mantissa 1.mmm is multiplied by each possible weight mantissa
// 1.000 .. 1.111 (index q = weight mantissa bits). Each 8-bit product P is
// normalised (delta = P[7]) and rounded to a 3-bit fraction; the entry is
// {E_LUT[4:0], m[2:0]} with E_LUT = e_a + delta - 7 as a 5-bit signed value.
// This follows the paper's algorithm; the activation sign is not part of the
// entry and leaves as separate metadata.
//
// Design choices: rounding is to nearest with ties away from zero (the paper
// says round-to-nearest); a rounding carry (1.111x -> 10.000) adds one to the
// exponent; an exponent field of 0 flushes the activation to zero and is
// signalled on `zero`, because the 8-bit entry has no zero code.
//
// Interface: act in; ent[q], sgn, zero out. Purely combinational.
module fp8_lut_gen
  import mx_pkg::*;
(
  input  fp8_t       act,
  output logic [7:0] ent [LUT_ENTRIES],
  output logic       sgn,
  output logic       zero
);

  always_comb begin
    logic [3:0]        ma;
    logic [7:0]        p;
    logic              delta;
    logic [3:0]        m4;
    logic signed [5:0] e_lut;
    ma = {1'b1, act.man};
    for (int q = 0; q < LUT_ENTRIES; q++) begin
      p     = ma * {1'b1, 3'(q)};
      delta = p[7];
      m4    = delta ? ({1'b0, p[6:4]} + {3'b000, p[3]})
                    : ({1'b0, p[5:3]} + {3'b000, p[2]});
      e_lut = $signed({2'b00, act.exp}) + $signed({5'd0, delta})
            + $signed({5'd0, m4[3]}) - 6'sd7;
      ent[q] = {e_lut[4:0], m4[2:0]};
    end
    sgn  = act.sign;
    zero = (act.exp == 4'd0);
  end

endmodule
