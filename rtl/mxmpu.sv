// mxmpu: mixed-precision matrix unit, ROWS MxLPEs x COLS RACs.
//
// Every row has its own LUT generator and broadcasts its LUT entries along
// the row (row-wise LUT broadcast). Columns are linked by two register
// chains: the weight chain (top input w_top, one register per RAC, used to
// propagate weights every cycle in output-stationary mode and to preload
// them in weight-stationary mode) and the output chain (top input ps_top,
// bottom output ps_bot, used to drain results in OS mode and to forward
// partial sums in WS mode).
//
// Activations for all rows arrive together on act_top with one act_valid;
// row i receives them i cycles later through a triangular delay line of
// ROWS(ROWS-1)/2 registers, which matches the register overhead the paper
// gives for this dataflow. The skew lines up each row's LUT with the weight
// (OS) or partial sum (WS) that reaches it through the column chains.
//
// bot_valid is the bottom row's row_valid: in WS mode it marks a finished
// output vector on ps_bot. out_clr zeroes every partial-sum register (used
// before an output-stationary kernel). Mode inputs are held for a kernel.
module mxmpu
  import mx_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  parameter int WBITS = INT_BITS,
  localparam int PW = (WBITS > 1) ? $clog2(WBITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  prec_e         prec,
  input  df_e           df,
  input  logic [PW-1:0] ws_plane,
  input  logic [31:0]   act_top [ROWS],
  input  logic          act_valid,
  input  logic [7:0]    w_top   [COLS],
  input  logic          w_shift,
  input  logic [31:0]   ps_top  [COLS],
  input  logic          out_shift,
  input  logic          out_clr,
  output logic [31:0]   ps_bot  [COLS],
  output logic          bot_valid
);

  logic [7:0]  w_chain  [ROWS+1][COLS];
  logic [31:0] ps_chain [ROWS+1][COLS];
  logic        rv       [ROWS];

  for (genvar k = 0; k < COLS; k++) begin : g_edge
    assign w_chain[0][k]  = w_top[k];
    assign ps_chain[0][k] = ps_top[k];
    assign ps_bot[k]      = ps_chain[ROWS][k];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    logic [31:0] act_row;
    logic        val_row;
    if (i == 0) begin : g_noskew
      assign act_row = act_top[0];
      assign val_row = act_valid;
    end else begin : g_skew
      logic [31:0] act_dly [i];
      logic        val_dly [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            act_dly[s] <= '0;
            val_dly[s] <= 1'b0;
          end
        end else begin
          act_dly[0] <= act_top[i];
          val_dly[0] <= act_valid;
          for (int s = 1; s < i; s++) begin
            act_dly[s] <= act_dly[s-1];
            val_dly[s] <= val_dly[s-1];
          end
        end
      end
      assign act_row = act_dly[i-1];
      assign val_row = val_dly[i-1];
    end

    mxlpe #(.NRAC(COLS), .WBITS(WBITS)) u_pe (
      .clk, .rst_n, .prec, .df, .ws_plane,
      .act(act_row), .act_valid(val_row),
      .w_in(w_chain[i]), .w_shift,
      .ps_in(ps_chain[i]), .out_shift, .out_clr,
      .w_out(w_chain[i+1]), .ps_out(ps_chain[i+1]),
      .row_valid(rv[i])
    );
  end

  assign bot_valid = rv[ROWS-1];

endmodule
