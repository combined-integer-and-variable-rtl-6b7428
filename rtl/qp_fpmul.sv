// qp_fpmul: IEEE 754 quadruple precision (binary128) multiplier.
//
// The 113-bit significands (hidden one and 112-bit fraction) are extended
// with one zero bit to 114 bits and multiplied by mul114x114, i.e. by four
// 57x57 units or, in dedicated blocks, 16 24x24, 16 24x9 and 4 9x9
// multipliers. The zero is put above the significand (the architecture does
// not say on which side), so the 228-bit product holds the 226-bit
// significand product in its low bits. Sign, exponent, normalisation,
// rounding (to nearest, ties to even) and special values are handled by
// fp_mul_round, whose rules are this design's own choice.
//
// Interface: a, b (128 bits: sign[127], exponent[126:112],
// fraction[111:0]) -> result (128 bits) and flags. Combinational.
module qp_fpmul
  import civp_pkg::*;
(
  input  logic [127:0] a,
  input  logic [127:0] b,
  output logic [127:0] result,
  output fp_flags_t    flags
);
  localparam int unsigned MAN_W = QP_FRAC_W + 1;     // 113
  localparam int unsigned PAD_W = QP_SIG_W - MAN_W;  // 1

  logic [MAN_W-1:0]      sig_a, sig_b;
  logic [2*QP_SIG_W-1:0] prod_full;
  logic [2*MAN_W-1:0]    prod;

  mul114x114 u_sig_mul (
    .a({{PAD_W{1'b0}}, sig_a}),
    .b({{PAD_W{1'b0}}, sig_b}),
    .p(prod_full)
  );
  // The top 2*PAD_W bits of prod_full are zero by construction.
  assign prod = prod_full[2*MAN_W-1:0];
  always_comb a_pad_zero: assert (prod_full[2*QP_SIG_W-1:2*MAN_W] == '0);

  fp_mul_round #(.EXP_W(QP_EXP_W), .FRAC_W(QP_FRAC_W)) u_round (
    .a(a), .b(b), .sig_a(sig_a), .sig_b(sig_b), .prod(prod),
    .result(result), .flags(flags)
  );
endmodule
