// lut_gen: LUT generator of one MxLPE.
//
// Holds the dedicated FP8-FP8 LUT generator and the shared FP8-INT4 LUT
// generator and forwards the eight 8-bit entries of the active precision
// mode, plus the activation sign/zero metadata used in FP8-FP8 mode.
//
// The activation bus word is 32 bits: in FP8-INT4 mode it carries a1..a4
// (a1 in bits 7:0); in FP8-FP8 mode one activation in bits 7:0 (lane
// placement is this design's choice). In FP8-INT4 mode `sgn` and `zero` are
// unused and driven low.
//
// Interface: prec, act in; ent, sgn, zero out. Purely combinational.
module lut_gen
  import mx_pkg::*;
(
  input  prec_e       prec,
  input  logic [31:0] act,
  output logic [7:0]  ent [LUT_ENTRIES],
  output logic        sgn,
  output logic        zero
);

  fp8_t       a4 [4];
  fp8_t       int4_ent [LUT_ENTRIES];
  logic [7:0] fp8_ent  [LUT_ENTRIES];
  logic       fp8_sgn, fp8_zero;

  always_comb begin
    for (int i = 0; i < 4; i++) a4[i] = fp8_t'(act[8*i +: 8]);
  end

  fp8_lut_gen  u_fp8  (.act(fp8_t'(act[7:0])), .ent(fp8_ent), .sgn(fp8_sgn), .zero(fp8_zero));
  int4_lut_gen u_int4 (.act(a4), .ent(int4_ent));

  always_comb begin
    for (int i = 0; i < LUT_ENTRIES; i++)
      ent[i] = (prec == PREC_FP8) ? fp8_ent[i] : 8'(int4_ent[i]);
    sgn  = (prec == PREC_FP8) && fp8_sgn;
    zero = (prec == PREC_FP8) && fp8_zero;
  end

endmodule
