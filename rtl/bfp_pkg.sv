// bfp_pkg -- number formats, widths and shared types of the BFP NPU core.
//
// Formats. Inputs are BF16 (1 sign, 8 exponent, 7 fraction bits, bias 127).
// A block of DIM inputs (one row of A or one column of B) becomes DIM
// signed 8-bit two's-complement mantissas plus one 8-bit shared exponent:
// the shared exponent is the block maximum and each significand 1.f is
// shifted right by (e_sh - e_i) + 1, so a mantissa holds 7 magnitude bits and
// its LSB weighs 2^(e_sh - 127 - 6).  A dot product of two such blocks is
// therefore acc * 2^(eA + eB - 266), where acc is the 22-bit fixed-point
// accumulator value and eA + eB the 9-bit exponent sum.  Outputs are IEEE
// FP32; the 22-bit accumulator fits its 24-bit significand, so the
// BFP-to-FP step is exact apart from flushing under/overflow.
//
// The 22-bit accumulator width follows the paper's 22-bit intermediate
// result register; BF16 in, FP32 out and the 8-bit mantissa are this
// design's own choices (the paper names no FP format).  With 8-bit
// mantissas (|m| <= 127) a 128-term dot product is at most 127*127*128 =
// 2,064,512 < 2^21, so 22 signed bits never overflow at DIM = 128.
package bfp_pkg;

  localparam int unsigned EXP_W   = 8;          // BF16 / FP32 exponent field
  localparam int unsigned FRAC_W  = 7;          // BF16 fraction field
  localparam int unsigned MANT_W  = 8;          // signed BFP mantissa
  localparam int unsigned ACC_W   = 22;         // mantissa accumulator
  localparam int unsigned ESUM_W  = EXP_W + 1;  // eA + eB
  localparam int unsigned FP_BIAS = 127;
  // FP32 exponent field = p + esum - OUT_EXP_OFF, p = leading-one position.
  localparam int unsigned OUT_EXP_OFF = 2 * (FP_BIAS + MANT_W - 2) - FP_BIAS;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [FRAC_W-1:0] frac;
  } bf16_t;

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] frac;
  } fp32_t;

  typedef logic signed [MANT_W-1:0] mant_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [EXP_W-1:0]         exp_t;
  typedef logic [ESUM_W-1:0]        esum_t;

  // Dataflow of the systolic array.
  typedef enum logic {
    DF_WS = 1'b0,   // weight (B) stationary, A streams
    DF_OS = 1'b1    // output stationary, A and B stream
  } dataflow_e;

  // Fault-injection saboteur modes.
  typedef enum logic [1:0] {
    FI_FLIP = 2'd0, // XOR with mask (transient when held one cycle)
    FI_SA0  = 2'd1, // masked bits stuck at 0
    FI_SA1  = 2'd2  // masked bits stuck at 1
  } fault_kind_e;

  // One fault request: a site (row, col) inside a block and a bit mask.
  typedef struct packed {
    logic        en;
    fault_kind_e kind;
    logic [7:0]  row;
    logic [7:0]  col;
    logic [31:0] mask;
  } fault_t;

  // Sticky error flags of the four protected parts.
  typedef struct packed {
    logic mant;   // ABFT mismatch in the mantissa array
    logic expo;   // recompute-and-compare mismatch in the EU array
    logic f2b;    // DMR mismatch in an FP-to-BFP converter
    logic b2f;    // DMR mismatch in the BFP-to-FP converter
  } err_flags_t;

endpackage
