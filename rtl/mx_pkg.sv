// mx_pkg: types and constants shared by the MxGLUT datapath.
//
// FP8 is E4M3 (1 sign, 4 exponent, 3 mantissa bits, bias 7). The design
// flushes subnormals to zero (an exponent field of 0 means zero) and has no
// NaN/Inf codes; these two points are the design's reading of the paper's
// flush-to-zero rule. lut_ent_t is the 12-bit word the LUT block broadcasts
// to every RAC of a row: a zero flag, a sign, a signed exponent that still
// carries the FP8 bias of 7, and the three fraction bits of 1.mmm.
package mx_pkg;

  localparam int FP8_BIAS    = 7;
  localparam int LUT_ENTRIES = 8;    // 2^(r-1) with group size r = 4
  localparam int INT_BITS    = 4;    // B: weight bit planes in FP8-INT4 mode
  localparam int FP32_BIAS_DELTA = 127 - FP8_BIAS;  // 120

  // Precision mode of a kernel.
  typedef enum logic {
    PREC_INT4 = 1'b0,   // FP8 activations x INT4 (BCQ) weights
    PREC_FP8  = 1'b1    // FP8 activations x FP8 weights
  } prec_e;

  // Stationary operand of a kernel (RLB dataflow).
  typedef enum logic {
    DF_OS = 1'b0,       // output stationary (prefill)
    DF_WS = 1'b1        // weight stationary (decode)
  } df_e;

  typedef struct packed {
    logic       sign;
    logic [3:0] exp;
    logic [2:0] man;
  } fp8_t;

  typedef struct packed {
    logic              zero;
    logic              sign;
    logic signed [6:0] exp;   // biased by FP8_BIAS
    logic [2:0]        man;
  } lut_ent_t;

endpackage
