// dp_fpmul: IEEE 754 double precision (binary64) multiplier.
//
// The 53-bit significands (hidden one and 52-bit fraction) are extended with
// four zero bits to 57 bits and multiplied by mul57x57, i.e. by four 24x24,
// four 24x9 and one 9x9 block. The zeros are put above the significand
// (the architecture does not say on which side), so the 114-bit product holds
// the 106-bit significand product in its low bits and zeros in its top 8.
// Sign, exponent, normalisation, rounding (to nearest, ties to even) and
// special values are handled by fp_mul_round, whose rules are this design's
// own choice.
//
// Interface: a, b (64 bits: sign[63], exponent[62:52], fraction[51:0]) ->
// result (64 bits) and flags. Combinational.
module dp_fpmul
  import civp_pkg::*;
(
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] result,
  output fp_flags_t   flags
);
  localparam int unsigned MAN_W = DP_FRAC_W + 1;  // 53
  localparam int unsigned PAD_W = DP_SIG_W - MAN_W;  // 4

  logic [MAN_W-1:0]      sig_a, sig_b;
  logic [2*DP_SIG_W-1:0] prod_full;
  logic [2*MAN_W-1:0]    prod;

  mul57x57 u_sig_mul (
    .a({{PAD_W{1'b0}}, sig_a}),
    .b({{PAD_W{1'b0}}, sig_b}),
    .p(prod_full)
  );
  // The top 2*PAD_W bits of prod_full are zero by construction.
  assign prod = prod_full[2*MAN_W-1:0];
  always_comb a_pad_zero: assert (prod_full[2*DP_SIG_W-1:2*MAN_W] == '0);

  fp_mul_round #(.EXP_W(DP_EXP_W), .FRAC_W(DP_FRAC_W)) u_round (
    .a(a), .b(b), .sig_a(sig_a), .sig_b(sig_b), .prod(prod),
    .result(result), .flags(flags)
  );
endmodule
