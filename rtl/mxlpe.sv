// mxlpe: mixed-precision LUT-based processing element (one array row).
//
// One LUT generator and one LUT block feed NRAC read-accumulate units. An
// activation word arriving with act_valid is turned into eight LUT entries
// and captured by the LUT block; from the next cycle the entries (shifted
// per bit plane in FP8-INT4 mode) are broadcast to every RAC of the row,
// which selects and accumulates with its own weight. Weights enter from the
// row above on w_in and leave on w_out; partial sums likewise on ps_in and
// ps_out. Following the paper, all multiplication is moved into LUT
// construction; the RACs only select, fix sign/exponent and add.
//
// row_valid is a registered copy of the LUT-valid, so it marks the cycle in
// which this row's ps_out carries a newly written partial sum (used to flag
// weight-stationary results at the bottom of the array; this design's own).
//
// Timing: act at cycle t -> entries valid at t+1 (t+1..t+B in OS FP8-INT4)
// -> ps_out updated at the end of that cycle.
module mxlpe
  import mx_pkg::*;
#(
  parameter int NRAC  = 64,
  parameter int WBITS = INT_BITS,
  localparam int PW = (WBITS > 1) ? $clog2(WBITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  prec_e         prec,
  input  df_e           df,
  input  logic [PW-1:0] ws_plane,
  input  logic [31:0]   act,
  input  logic          act_valid,
  input  logic [7:0]    w_in   [NRAC],
  input  logic          w_shift,
  input  logic [31:0]   ps_in  [NRAC],
  input  logic          out_shift,
  input  logic          out_clr,
  output logic [7:0]    w_out  [NRAC],
  output logic [31:0]   ps_out [NRAC],
  output logic          row_valid
);

  logic [7:0] gen_ent [LUT_ENTRIES];
  logic       gen_sgn, gen_zero;
  lut_ent_t   bcast   [LUT_ENTRIES];
  logic       bvalid;

  lut_gen u_gen (
    .prec (prec), .act(act), .ent(gen_ent), .sgn(gen_sgn), .zero(gen_zero)
  );

  lut_block #(.WBITS(WBITS)) u_lut (
    .clk, .rst_n, .prec, .df, .ws_plane,
    .load(act_valid), .ent_d(gen_ent), .sgn_d(gen_sgn), .zero_d(gen_zero),
    .q(bcast), .valid(bvalid)
  );

  for (genvar k = 0; k < NRAC; k++) begin : g_rac
    rac u_rac (
      .clk, .rst_n, .prec, .df,
      .ent(bcast), .ent_valid(bvalid),
      .w_in(w_in[k]), .w_shift,
      .ps_in(ps_in[k]), .out_shift, .out_clr,
      .w_out(w_out[k]), .ps_out(ps_out[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_valid <= 1'b0;
    else        row_valid <= bvalid && !out_shift;
  end

endmodule
