// rlb_ctrl: kernel sequencer of the reconfigurable LUT-centric broadcast
// (RLB) dataflow.
//
// Runs one GEMM kernel on the array in the dataflow and precision chosen at
// start (the paper switches dataflow per kernel invocation; the sequencer
// itself is this design's own, as the paper gives no controller details).
// B = WBITS bit planes in FP8-INT4 mode, 1 in FP8-FP8 mode.
//
// Output stationary (prefill), len = number of activation words G:
//   start clears all partial-sum registers (out_clr) in the start cycle,
//   unless cfg_acc is set: the kernel then continues the sums the array
//   still holds, so a reduction longer than one SRAM bank is split over
//   several kernels without any partial sum leaving the array.
//   RUN   G*B cycles: weight word t read every cycle and propagated down the
//         columns; activation word g read every B cycles (LUT block steps
//         through the B planes itself).
//   WAIT  ROWS+1 cycles until the last (most delayed) row has accumulated.
//   DRAIN ROWS cycles: output chain shifts down, the bottom row's value is
//         written to output word ROWS-1-d, zeros shift in from the top.
//         Skipped when cfg_drain is 0 (a later kernel continues the tile).
// Weight stationary (decode), len = number of activation vectors M; for each
// plane b = 0..B-1:
//   PRE    ROWS cycles: weight words b*ROWS+t shifted in (word t -> row
//          ROWS-1-t) and then held.
//   STREAM M cycles: activation word i read; output word i (plane b-1's
//          partial sum; for b = 0 zero, or with cfg_acc the result of an
//          earlier kernel) read one cycle later as the top preload of the
//          output chain.
//   FLUSH  until all M results of the pass left the bottom (bot_valid) and
//          were written to output words 0..M-1.
// start-to-done: OS G*B + (ROWS+1) + ROWS + 1 (without drain G*B + ROWS + 2),
// WS B*(ROWS + M + ROWS + 3) + 1.
// Timing: SRAM reads have one cycle of latency, so array strobes are the
// read enables delayed by one cycle. done pulses for one cycle at the end.
module rlb_ctrl
  import mx_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int WBITS = INT_BITS,
  parameter int AW_A  = 8,
  parameter int AW_W  = 10,
  parameter int AW_O  = 8,
  localparam int PW = (WBITS > 1) ? $clog2(WBITS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  prec_e           cfg_prec,
  input  df_e             cfg_df,
  input  logic [AW_A:0]   cfg_len,
  input  logic            cfg_acc,
  input  logic            cfg_drain,
  output logic            busy,
  output logic            done,
  output prec_e           prec,
  output df_e             df,
  // SRAM side
  output logic            act_re,
  output logic [AW_A-1:0] act_raddr,
  output logic            wgt_re,
  output logic [AW_W-1:0] wgt_raddr,
  output logic            out_re,
  output logic [AW_O-1:0] out_raddr,
  output logic            out_we,
  output logic [AW_O-1:0] out_waddr,
  // array side
  output logic            act_valid,
  output logic            w_shift,
  output logic            out_shift,
  output logic            out_clr,
  output logic            ps_from_sram,
  output logic [PW-1:0]   ws_plane,
  input  logic            bot_valid
);

  typedef enum logic [2:0] {
    S_IDLE, S_OS_RUN, S_OS_WAIT, S_OS_DRAIN, S_WS_PRE, S_WS_STREAM, S_WS_FLUSH, S_DONE
  } state_e;

  state_e        st_q;
  logic [AW_A:0] len_q;
  logic [AW_A:0] grp_q;       // OS activation word / WS vector index
  logic [PW-1:0] pl_q;        // OS plane within group / WS pass plane
  logic [15:0]   cnt_q;       // wait, drain and preload counter
  logic [AW_O:0] wr_q;        // WS results written in this pass
  logic          acc_q, drain_q;
  logic          act_re_q, pre_q;
  logic [AW_A-1:0] act_raddr_q;
  int            nb;

  assign nb   = (prec == PREC_INT4) ? WBITS : 1;
  assign busy = (st_q != S_IDLE);
  assign done = (st_q == S_DONE);

  // SRAM strobes
  always_comb begin
    act_re    = 1'b0;
    act_raddr = grp_q[AW_A-1:0];
    wgt_re    = 1'b0;
    wgt_raddr = '0;
    out_we    = 1'b0;
    out_waddr = '0;
    out_shift = 1'b0;
    case (st_q)
      S_OS_RUN: begin
        wgt_re    = 1'b1;
        wgt_raddr = AW_W'(int'(grp_q) * nb + int'(pl_q));
        act_re    = (pl_q == '0);
      end
      S_OS_DRAIN: begin
        out_shift = 1'b1;
        out_we    = 1'b1;
        out_waddr = AW_O'(ROWS - 1 - int'(cnt_q));
      end
      S_WS_PRE: begin
        wgt_re    = 1'b1;
        wgt_raddr = AW_W'(int'(pl_q) * ROWS + int'(cnt_q));
      end
      S_WS_STREAM: act_re = 1'b1;
      default: ;
    endcase
    if ((st_q == S_WS_STREAM || st_q == S_WS_FLUSH) && bot_valid) begin
      out_we    = 1'b1;
      out_waddr = wr_q[AW_O-1:0];
    end
    out_re       = act_re_q && (df == DF_WS) && (pl_q != '0 || acc_q);
    out_raddr    = AW_O'(act_raddr_q);
    act_valid    = act_re_q;
    w_shift      = (df == DF_OS) ? 1'b1 : pre_q;
    ps_from_sram = (df == DF_WS) && (pl_q != '0 || acc_q);
    ws_plane     = pl_q;
    out_clr      = (st_q == S_IDLE) && start && (cfg_df == DF_OS) && !cfg_acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      prec        <= PREC_INT4;
      df          <= DF_OS;
      len_q       <= '0;
      acc_q       <= 1'b0;
      drain_q     <= 1'b1;
      grp_q       <= '0;
      pl_q        <= '0;
      cnt_q       <= '0;
      wr_q        <= '0;
      act_re_q    <= 1'b0;
      pre_q       <= 1'b0;
      act_raddr_q <= '0;
    end else begin
      act_re_q    <= act_re;
      pre_q       <= (st_q == S_WS_PRE);
      act_raddr_q <= act_raddr;
      if (out_we && df == DF_WS) wr_q <= wr_q + 1'b1;
      case (st_q)
        S_IDLE: if (start) begin
          prec  <= cfg_prec;
          df    <= cfg_df;
          len_q <= cfg_len;
          acc_q   <= cfg_acc;
          drain_q <= cfg_drain;
          grp_q <= '0;
          pl_q  <= '0;
          cnt_q <= '0;
          wr_q  <= '0;
          st_q  <= (cfg_df == DF_OS) ? S_OS_RUN : S_WS_PRE;
        end
        S_OS_RUN: begin
          if (int'(pl_q) == nb - 1) begin
            pl_q <= '0;
            if (grp_q == len_q - 1'b1) begin
              cnt_q <= '0;
              st_q  <= S_OS_WAIT;
            end else begin
              grp_q <= grp_q + 1'b1;
            end
          end else begin
            pl_q <= pl_q + 1'b1;
          end
        end
        S_OS_WAIT: begin
          if (int'(cnt_q) == ROWS) begin
            cnt_q <= '0;
            st_q  <= drain_q ? S_OS_DRAIN : S_DONE;
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_OS_DRAIN: begin
          if (int'(cnt_q) == ROWS - 1) st_q <= S_DONE;
          else cnt_q <= cnt_q + 1'b1;
        end
        S_WS_PRE: begin
          if (int'(cnt_q) == ROWS - 1) begin
            cnt_q <= '0;
            grp_q <= '0;
            wr_q  <= '0;
            st_q  <= S_WS_STREAM;
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_WS_STREAM: begin
          if (grp_q == len_q - 1'b1) st_q <= S_WS_FLUSH;
          else grp_q <= grp_q + 1'b1;
        end
        S_WS_FLUSH: begin
          if (wr_q == (AW_O+1)'(len_q)) begin
            if (int'(pl_q) == nb - 1) st_q <= S_DONE;
            else begin
              pl_q  <= pl_q + 1'b1;
              cnt_q <= '0;
              st_q  <= S_WS_PRE;
            end
          end
        end
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // A kernel needs at least one activation word.
  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_IDLE && start) |-> (cfg_len != '0));

endmodule
