// fp32_add: single-precision floating-point adder of the RAC.
//
// Computes y = a + b for IEEE-754 binary32 operands in one combinational
// pass: swap so |a| >= |b|, align the smaller mantissa with guard, round and
// sticky bits, add or subtract, normalise, round to nearest even.
// The paper only names this unit; its number handling is this design's own:
// an exponent field of 0 reads as zero (flush-to-zero, matching the FP8
// side), results below the smallest normal flush to +0, overflow saturates
// to the largest finite value, NaN and infinity are not modelled (FP8
// products and partial sums of LLM GEMMs stay far from the FP32 limits).
//
// Interface: a, b in; y out. Purely combinational.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic        a_zero, b_zero, swap;
    logic [31:0] op_hi, op_lo;
    logic [7:0]  d;
    logic [26:0] mb, ms, ms_sh;
    logic        sticky, sub;
    logic [27:0] r;
    logic [26:0] n;
    int          e, lz;
    logic [24:0] m_rnd;
    logic        rnd_up;

    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    swap   = (a[30:0] < b[30:0]);
    op_hi    = swap ? b : a;
    op_lo  = swap ? a : b;
    d      = op_hi[30:23] - op_lo[30:23];
    mb     = {1'b1, op_hi[22:0], 3'b000};
    ms     = {1'b1, op_lo[22:0], 3'b000};
    if (d >= 8'd27) begin
      ms_sh  = '0;
      sticky = 1'b1;
    end else begin
      ms_sh  = ms >> d;
      sticky = |(ms & ((27'd1 << d) - 27'd1));
    end
    ms_sh[0] = ms_sh[0] | sticky;
    sub = op_hi[31] ^ op_lo[31];
    r   = sub ? ({1'b0, mb} - {1'b0, ms_sh}) : ({1'b0, mb} + {1'b0, ms_sh});

    e  = int'(op_hi[30:23]);
    lz = 0;
    if (r[27]) begin
      n = {r[27:2], r[1] | r[0]};
      e = e + 1;
    end else begin
      lz = 27;
      for (int i = 26; i >= 0; i--) begin
        if (r[i]) begin
          lz = 26 - i;
          break;
        end
      end
      n = r[26:0] << lz;
      e = e - lz;
    end
    rnd_up = n[2] & (n[1] | n[0] | n[3]);
    m_rnd  = {1'b0, n[26:3]} + {24'd0, rnd_up};
    if (m_rnd[24]) e = e + 1;

    if (a_zero && b_zero) begin
      y = '0;
    end else if (b_zero) begin
      y = a;
    end else if (a_zero) begin
      y = b;
    end else if (r == '0 || e <= 0) begin
      y = '0;
    end else if (e >= 255) begin
      y = {op_hi[31], 8'hFE, 23'h7FFFFF};
    end else begin
      y = {op_hi[31], 8'(e), m_rnd[24] ? m_rnd[23:1] : m_rnd[22:0]};
    end
  end

endmodule
