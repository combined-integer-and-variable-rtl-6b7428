// civp_pkg: types and constants shared by the combined integer and variable
// precision (CIVP) multiplier.
//
// It defines the operating modes of the combined unit, the IEEE 754 binary
// field widths of the three floating point formats, and the exception flag
// bundle the floating point multipliers report. The double and quadruple
// widths (1/11/52 and 1/15/112 bits) follow the format figures of the design;
// the single precision exponent width (8 bits) is the standard IEEE 754 value,
// the design itself only states its 23-bit fraction. The mode encoding and the
// flag bundle are this implementation's own choices.
package civp_pkg;

  // Operating modes of the combined multiplier.
  typedef enum logic [1:0] {
    MODE_INT24 = 2'd0,  // 24x24 bit unsigned integer product
    MODE_SP    = 2'd1,  // IEEE 754 binary32 product
    MODE_DP    = 2'd2,  // IEEE 754 binary64 product
    MODE_QP    = 2'd3   // IEEE 754 binary128 product
  } civp_mode_e;

  // Field widths: exponent and stored fraction.
  localparam int unsigned SP_EXP_W  = 8;
  localparam int unsigned SP_FRAC_W = 23;
  localparam int unsigned DP_EXP_W  = 11;
  localparam int unsigned DP_FRAC_W = 52;
  localparam int unsigned QP_EXP_W  = 15;
  localparam int unsigned QP_FRAC_W = 112;

  // Widths of the dedicated multiplier blocks.
  localparam int unsigned WIDE_W   = 24;  // wide port of the 24x24 and 24x9 blocks
  localparam int unsigned NARROW_W = 9;   // narrow port of the 24x9 and 9x9 blocks

  // Operand slice widths: 57 = 9 + 24 + 24 and 114 = 57 + 57.
  localparam int unsigned DP_SIG_W = NARROW_W + 2 * WIDE_W;  // 57
  localparam int unsigned QP_SIG_W = 2 * DP_SIG_W;           // 114

  // Exception flags of a floating point product.
  typedef struct packed {
    logic invalid;    // infinity times zero, or a NaN operand
    logic overflow;   // rounded result too large, infinity returned
    logic underflow;  // rounded result below the normal range, zero returned
  } fp_flags_t;

endpackage
