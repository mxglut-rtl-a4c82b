// lut_block: flip-flop LUT, per-entry FP shifters and bit-plane FSM.
//
// Stores the eight 8-bit entries of one activation (group) plus the sign and
// zero metadata, and broadcasts them every cycle to all RACs of the MxLPE.
// In FP8-INT4 mode each entry passes its own FP shifter, which multiplies it
// by 2^b for bit plane b by adding b to the exponent, so the RACs need no
// shifter of their own. In FP8-FP8 mode the shifters are bypassed and the
// entry's 5-bit signed exponent is sign-extended.
//
// Bit-plane state machine (encoding is this design's choice):
//  * OS, FP8-INT4: a load starts a run of B cycles with b = 0, 1, .., B-1;
//    a load in the last cycle of a run starts the next run seamlessly.
//  * WS, or FP8-FP8: each load is valid for one cycle; in WS FP8-INT4 the
//    plane b is given by the sequencer on ws_plane.
// Timing: entries captured at the clock edge where load=1 are on q with
// valid=1 from the next cycle on.
//
// Interface: prec, df, ws_plane, load, ent_d, sgn_d, zero_d in; q, valid out.
module lut_block
  import mx_pkg::*;
#(
  parameter int WBITS = INT_BITS,
  localparam int PW = (WBITS > 1) ? $clog2(WBITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  prec_e         prec,
  input  df_e           df,
  input  logic [PW-1:0] ws_plane,
  input  logic          load,
  input  logic [7:0]    ent_d [LUT_ENTRIES],
  input  logic          sgn_d,
  input  logic          zero_d,
  output lut_ent_t      q     [LUT_ENTRIES],
  output logic          valid
);

  logic [7:0]    ent_q [LUT_ENTRIES];
  logic          sgn_q, zero_q;
  logic [PW-1:0] cnt_q;
  logic          busy_q;
  logic          multi;     // OS FP8-INT4: B cycles per load

  assign multi = (df == DF_OS) && (prec == PREC_INT4) && (WBITS > 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LUT_ENTRIES; i++) ent_q[i] <= '0;
      sgn_q  <= 1'b0;
      zero_q <= 1'b1;
      cnt_q  <= '0;
      busy_q <= 1'b0;
    end else begin
      if (load) begin
        for (int i = 0; i < LUT_ENTRIES; i++) ent_q[i] <= ent_d[i];
        sgn_q  <= sgn_d;
        zero_q <= zero_d;
        cnt_q  <= '0;
        busy_q <= 1'b1;
      end else if (busy_q) begin
        if (multi && (int'(cnt_q) != WBITS - 1)) begin
          cnt_q <= cnt_q + 1'b1;
        end else begin
          busy_q <= 1'b0;
        end
      end
    end
  end

  assign valid = busy_q;

  // per-entry FP shifters
  logic [PW-1:0] b;
  assign b = multi ? cnt_q : ws_plane;

  always_comb begin
    for (int i = 0; i < LUT_ENTRIES; i++) begin
      if (prec == PREC_FP8) begin
        q[i].zero = zero_q;
        q[i].sign = sgn_q;
        q[i].exp  = 7'(signed'(ent_q[i][7:3]));
        q[i].man  = ent_q[i][2:0];
      end else begin
        q[i].zero = (ent_q[i][6:3] == 4'd0);
        q[i].sign = ent_q[i][7];
        q[i].exp  = signed'({3'b000, ent_q[i][6:3]}) + signed'(7'(b));
        q[i].man  = ent_q[i][2:0];
      end
    end
  end

endmodule
