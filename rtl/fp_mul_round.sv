// fp_mul_round: format-generic IEEE 754 multiply logic around an external
// significand multiplier.
//
// The architecture is about the significand product only; this helper adds
// the rest of a floating point multiplication so the three format units can
// be used and checked as real multipliers. It unpacks the two operands,
// hands their significands (hidden one prepended, MAN_W = FRAC_W+1 bits) to
// the significand multiplier through sig_a/sig_b, and turns the returned
// 2*MAN_W-bit product into the result:
//   * sign = sign_a XOR sign_b;
//   * the product of two normalized significands lies in [1,4): if its top
//     bit is set it is shifted one place and the exponent is incremented;
//   * the significand is rounded to nearest, ties to even, using a guard bit
//     and a sticky bit; a carry out of the rounding bumps the exponent again;
//   * exponent = exp_a + exp_b - bias (+ normalisation, + rounding carry).
// All of this, and the handling of special values, is this design's own
// choice, since the architecture states none of it:
//   * a zero exponent field is read as zero (subnormal inputs are flushed);
//   * a result below the normal range is returned as a signed zero with the
//     underflow flag (no subnormal outputs);
//   * a result at or above the maximum exponent is returned as a signed
//     infinity with the overflow flag;
//   * infinity times zero, or any NaN operand, returns the quiet NaN
//     0 / all-ones exponent / fraction 100..0; invalid is raised for
//     infinity times zero and for a signalling NaN operand;
//   * infinity times a non-zero finite number returns a signed infinity.
//
// Interface: a, b (1+EXP_W+FRAC_W bits, IEEE layout sign|exponent|fraction),
// sig_a, sig_b out to the significand multiplier, prod back from it, result
// and flags out. Purely combinational.
module fp_mul_round
  import civp_pkg::*;
#(
  parameter int unsigned EXP_W  = 11,
  parameter int unsigned FRAC_W = 52
) (
  input  logic [EXP_W+FRAC_W:0]   a,
  input  logic [EXP_W+FRAC_W:0]   b,
  output logic [FRAC_W:0]         sig_a,
  output logic [FRAC_W:0]         sig_b,
  input  logic [2*FRAC_W+1:0]     prod,
  output logic [EXP_W+FRAC_W:0]   result,
  output fp_flags_t               flags
);
  localparam int unsigned MAN_W = FRAC_W + 1;
  localparam int unsigned EW    = EXP_W + 2;       // signed working exponent
  localparam logic [EXP_W-1:0] EMAX = '1;
  localparam logic signed [EW-1:0] BIAS = EW'((1 << (EXP_W - 1)) - 1);
  localparam logic signed [EW-1:0] EMAX_S = EW'((1 << EXP_W) - 1);

  logic              sa, sb, s;
  logic [EXP_W-1:0]  ea, eb;
  logic [FRAC_W-1:0] fa, fb;
  assign {sa, ea, fa} = a;
  assign {sb, eb, fb} = b;
  assign s = sa ^ sb;

  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan, a_snan, b_snan;
  always_comb begin
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_inf  = (ea == EMAX) && (fa == '0);
    b_inf  = (eb == EMAX) && (fb == '0);
    a_nan  = (ea == EMAX) && (fa != '0);
    b_nan  = (eb == EMAX) && (fb != '0);
    a_snan = a_nan && !fa[FRAC_W-1];
    b_snan = b_nan && !fb[FRAC_W-1];
  end

  // Significands with the hidden one (zero for a zero exponent field).
  assign sig_a = {!a_zero, fa};
  assign sig_b = {!b_zero, fb};

  // Normalisation and rounding.
  logic [MAN_W-1:0]   mant;       // normalized, before rounding
  logic               guard, sticky, round_up, norm_shift;
  logic [MAN_W:0]     mant_r;     // after rounding, with carry
  logic [FRAC_W-1:0]  frac_out;
  logic signed [EW-1:0] exp_out;

  always_comb begin
    norm_shift = prod[2*MAN_W-1];
    if (norm_shift) begin
      mant   = prod[2*MAN_W-1 -: MAN_W];
      guard  = prod[MAN_W-1];
      sticky = |prod[MAN_W-2:0];
    end else begin
      mant   = prod[2*MAN_W-2 -: MAN_W];
      guard  = prod[MAN_W-2];
      sticky = |prod[MAN_W-3:0];
    end
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + (MAN_W+1)'(round_up);
    // A rounding carry leaves 10..0: the fraction is zero, exponent + 1.
    frac_out = mant_r[MAN_W] ? '0 : mant_r[FRAC_W-1:0];
    exp_out  = $signed(EW'(ea)) + $signed(EW'(eb)) - BIAS
             + $signed(EW'(norm_shift)) + $signed(EW'(mant_r[MAN_W]));
  end

  // Result selection.
  always_comb begin
    flags = '0;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      result        = {1'b0, EMAX, 1'b1, {(FRAC_W-1){1'b0}}};
      flags.invalid = a_snan || b_snan || (a_inf && b_zero) || (b_inf && a_zero);
    end else if (a_inf || b_inf) begin
      result = {s, EMAX, {FRAC_W{1'b0}}};
    end else if (a_zero || b_zero) begin
      result = {s, {EXP_W{1'b0}}, {FRAC_W{1'b0}}};
    end else if (exp_out >= EMAX_S) begin
      result         = {s, EMAX, {FRAC_W{1'b0}}};
      flags.overflow = 1'b1;
    end else if (exp_out <= 0) begin
      result          = {s, {EXP_W{1'b0}}, {FRAC_W{1'b0}}};
      flags.underflow = 1'b1;
    end else begin
      result = {s, exp_out[EXP_W-1:0], frac_out};
    end
  end
endmodule
