// rac: read-accumulate unit (one of 64 per MxLPE).
//
// Each cycle with ent_valid=1 the RAC turns the row's broadcast LUT entries
// into one product using its stationary or propagating weight, then adds it
// to an FP32 partial sum:
//  * FP8-FP8: the 8:1 MUX picks the entry addressed by the weight's 3-bit
//    mantissa; sign = activation sign XOR weight sign, exponent = entry
//    exponent + weight exponent; the 2:1 negation MUX is bypassed.
//  * FP8-INT4: the weight is a 4-bit BCQ code of one bit plane. Its MSB
//    drives the 2:1 MUX (MSB 1: +entry, MSB 0: -entry); the 8:1 MUX index is
//    the lower three bits, inverted when the MSB is 0. The inversion is
//    this design's reading of the sign symmetry e(-c) = -e(c). The bit-plane
//    shift was already applied in the LUT block.
// The product is widened to FP32 (exponent + 120, fraction padded) and fed
// to the FP32 adder; a zero activation or a zero FP8 weight gives +0.
//
// Registers: w_q (weight) loads from the row above when w_shift=1 (OS
// propagate every cycle, WS preload); out_q (partial sum) either
//   out_clr=1    : cleared (start of an output-stationary kernel),
//   out_shift=1  : takes ps_in (output drain / preload down the column),
//   OS, valid    : out_q + product (output stays local),
//   WS, valid    : ps_in + product (output forwarded down the column).
// w_out and ps_out are these registers, feeding the row below.
module rac
  import mx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  prec_e       prec,
  input  df_e         df,
  input  lut_ent_t    ent [LUT_ENTRIES],
  input  logic        ent_valid,
  input  logic [7:0]  w_in,
  input  logic        w_shift,
  input  logic [31:0] ps_in,
  input  logic        out_shift,
  input  logic        out_clr,
  output logic [7:0]  w_out,
  output logic [31:0] ps_out
);

  logic [7:0]  w_q;
  logic [31:0] out_q;
  logic [2:0]  idx;
  lut_ent_t    sel;
  logic        p_sign, p_zero;
  logic signed [7:0] p_exp;
  logic [31:0] prod, acc_in, sum;

  always_comb begin
    if (prec == PREC_FP8) begin
      idx    = w_q[2:0];
      sel    = ent[idx];
      p_sign = sel.sign ^ w_q[7];
      p_exp  = 8'(sel.exp) + signed'({4'b0000, w_q[6:3]});
      p_zero = sel.zero || (w_q[6:3] == 4'd0);
    end else begin
      idx    = w_q[2:0] ^ {3{~w_q[3]}};
      sel    = ent[idx];
      p_sign = sel.sign ^ ~w_q[3];
      p_exp  = 8'(sel.exp);
      p_zero = sel.zero;
    end
    prod   = p_zero ? 32'd0
                    : {p_sign, 8'(p_exp + 8'(FP32_BIAS_DELTA)), sel.man, 20'd0};
    acc_in = (df == DF_OS) ? out_q : ps_in;
  end

  fp32_add u_add (.a(acc_in), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      out_q <= '0;
    end else begin
      if (w_shift) w_q <= w_in;
      if (out_clr)        out_q <= '0;
      else if (out_shift) out_q <= ps_in;
      else if (ent_valid) out_q <= sum;
    end
  end

  assign w_out  = w_q;
  assign ps_out = out_q;

endmodule
