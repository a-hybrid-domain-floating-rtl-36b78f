// hcim_pkg: shared constants and types of the hybrid-domain FP8 CIM macro.
//
// The macro multiplies FP8 (E4M3) activations with FP8 weights held in a
// 4x4 SRAM mantissa array and accumulates the products. Every mantissa
// product 1.X * 1.W is split into a digital sub-addition (1 + X + W) and an
// analog sub-multiplication (X * W). The defaults below are the sizes of the
// 4x4 proof-of-concept array and of the E4M3 format; ACC_W, the width of the
// signed fixed-point result, is this design's own choice.
package hcim_pkg;

  localparam int unsigned ROWS     = 4;   // weight-activation pairs per macro
  localparam int unsigned COLS     = 4;   // mantissa bits per row (array columns)
  localparam int unsigned EXP_W    = 4;   // E4M3 exponent field
  localparam int unsigned FRAC_W   = 3;   // E4M3 fraction field
  localparam int unsigned BIAS     = 7;   // E4M3 exponent bias
  localparam int unsigned ADC_BITS = 3;   // flash ADC resolution
  localparam int unsigned ACC_W    = 16;  // signed fixed-point result width

  // One FP8 E4M3 number: sign, biased exponent, fraction (hidden bit not stored).
  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [FRAC_W-1:0] frac;
  } fp8_t;

  // Sequencer phases of one macro operation.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_EXP     = 3'd1,   // exponent unit result settles
    PH_ADD     = 3'd2,   // digital sub-ADD, one column per cycle
    PH_MUL_POS = 3'd3,   // analog sub-MUL, rows with positive products
    PH_MUL_NEG = 3'd4,   // analog sub-MUL, rows with negative products
    PH_DRAIN   = 3'd5,   // last ADC code enters shift-and-add
    PH_MERGE   = 3'd6    // PM forms the result
  } phase_t;

endpackage
