// int4_lut_gen: shared FP8-INT4 LUT generator.
//
// Turns a group of four FP8 activations a1..a4 into the eight LUT entries
// a1 +/- a2 +/- a3 +/- a4 used by FP8-INT4 (BCQ) GEMM. Only the entries with
// +a1 are built; the other eight are their negatives and are produced later
// by the RAC's negation MUX. Six SFASUs in two levels, wired as in the paper:
//   level 1: (a1,a2) -> a1+a2, a1-a2      (a3,a4) -> a3+a4, a3-a4
//   level 2: (a1+a2, a3+a4) -> e1, e4     (a1+a2, a3-a4) -> e2, e3
//            (a1-a2, a3+a4) -> e5, e8     (a1-a2, a3-a4) -> e6, e7
// where e1 = a1+a2+a3+a4, e2 = a1+a2+a3-a4, ..., e8 = a1-a2-a3-a4.
//
// Index order (this design's choice, consistent with the paper's BCQ rule
// bit 1 -> +1): entry e_n sits at index 8-n, so index bits [2],[1],[0] give
// the signs of a2, a3, a4. Level-1 sums are rounded to FP8 before level 2.
//
// Interface: act[0..3] = a1..a4 in; ent[0..7] out. Purely combinational.
module int4_lut_gen
  import mx_pkg::*;
(
  input  fp8_t act [4],
  output fp8_t ent [LUT_ENTRIES]
);

  fp8_t s12, d12, s34, d34;
  fp8_t e1, e2, e3, e4, e5, e6, e7, e8;

  sfasu u_l1_12 (.x(act[0]), .y(act[1]), .sum(s12), .diff(d12));
  sfasu u_l1_34 (.x(act[2]), .y(act[3]), .sum(s34), .diff(d34));

  sfasu u_l2_a (.x(s12), .y(s34), .sum(e1), .diff(e4));
  sfasu u_l2_b (.x(s12), .y(d34), .sum(e2), .diff(e3));
  sfasu u_l2_c (.x(d12), .y(s34), .sum(e5), .diff(e8));
  sfasu u_l2_d (.x(d12), .y(d34), .sum(e6), .diff(e7));

  always_comb begin
    ent[7] = e1;  // + + +
    ent[6] = e2;  // + + -
    ent[5] = e3;  // + - +
    ent[4] = e4;  // + - -
    ent[3] = e5;  // - + +
    ent[2] = e6;  // - + -
    ent[1] = e7;  // - - +
    ent[0] = e8;  // - - -
  end

endmodule
