// consmax_pkg -- shared types and constants of the ConSmax hardware.
//
// Two floating-point formats are used, both with an 8-bit exponent (bias 127):
//   fp16_t : bfloat16, 1 sign / 8 exponent / 7 fraction bits. The LUT entries and the
//            scaling constant C are stored in this format.
//   fp24_t : 1 sign / 8 exponent / 15 fraction bits. It holds the product of two bfloat16
//            significands exactly, so the MSB-LUT x LSB-LUT merge loses nothing; EXP REG and
//            every multiplier result use it.
// The published design fixes the widths (16b and 24b) but not the field layout; the layout
// above is this design's choice. Exponent 0 encodes zero (no subnormals); exponent 255 is an
// ordinary finite exponent (no Inf/NaN); results that overflow saturate to the largest finite
// value.
//
// The host configuration port selects one of three register sets per unit with cfg_sel_e.
package consmax_pkg;

  localparam int unsigned EXP_W  = 8;
  localparam int unsigned BIAS   = 127;
  localparam int unsigned FRAC16 = 7;
  localparam int unsigned FRAC24 = 15;

  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [FRAC16-1:0] frac;
  } fp16_t;

  typedef struct packed {
    logic              sign;
    logic [EXP_W-1:0]  exp;
    logic [FRAC24-1:0] frac;
  } fp24_t;

  // Number of entries of each bitwidth-split LUT (one per 4-bit slice value).
  localparam int unsigned LUT_DEPTH = 16;
  localparam int unsigned LUT_AW    = 4;

  // Register set addressed by the configuration port.
  typedef enum logic [1:0] {
    CFG_MSB_LUT = 2'd0,   // INT-FP LUT for the upper nibble: e^(16*s*m)
    CFG_LSB_LUT = 2'd1,   // INT-FP LUT for the lower nibble: e^(s*l)
    CFG_SCALE   = 2'd2    // scaling register: C = e^(-beta)/gamma
  } cfg_sel_e;

endpackage
